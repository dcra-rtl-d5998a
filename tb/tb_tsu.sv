// tb_tsu: fills the input queues from the router side, then lets the PU
// take tasks and checks that each dispatch comes from the fullest IQ (ties
// to the lower type) in FIFO order per type, that IQs refuse messages at
// their configured capacity, and that spawned tasks leave for the router
// with the owner tile computed from the first parameter.
module tb_tsu;
  import dcra_pkg::*;
  localparam int QD = 16;
  logic clk = 0, rst_n = 0;
  task_cfg_t tcfg [NUM_TT];
  logic [3:0] x_bits;
  logic rin_valid, rin_ready, rout_valid, rout_ready, sp_valid, sp_ready, ds_valid, ds_ready;
  msg_t rin_msg, rout_msg;
  tt_t sp_type, ds_type;
  word_t sp_arg0, sp_arg1, ds_arg0, ds_arg1;
  task_cfg_t ds_cfg;
  logic [$clog2(QD+1)-1:0] iq_count [NUM_TT], oq_count [NUM_TT];
  logic [31:0] n_dispatched, n_oq_holds;
  int checks = 0, failures = 0;
  word_t iq_ref [NUM_TT][$];
  word_t oq_ref [NUM_TT][$];
  bit took = 0;
  int refused = 0, ndisp = 0, nsent = 0, spawned = 0;

  tsu #(.QDEPTH(QD)) dut (.*);
  always #5 clk = ~clk;
  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  task automatic chk(input bit c, input string s);
    checks++;
    if (!c) begin failures++; $display("FAIL %s", s); end
  endtask

  initial begin
    for (int t = 0; t < NUM_TT; t++) begin
      tcfg[t] = '0;
      tcfg[t].iq_cap = 8'(3 + 2 * t);
      tcfg[t].oq_cap = 8'(4);
      tcfg[t].chunk_log2 = 5'(t + 2);
      tcfg[t].ptr_a = 32'(1000 * t);
    end
    x_bits = 4'd2;
    rin_valid = 0; rin_msg = '0; rout_ready = 0; sp_valid = 0; sp_type = '0;
    sp_arg0 = '0; sp_arg1 = '0; ds_ready = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    // ---- phase 1: fill IQs, PU busy
    for (int i = 0; i < 60; i++) begin
      @(negedge clk);
      rin_valid = 1;
      rin_msg = '{dst_x: '0, dst_y: '0, ttype: tt_t'($urandom), arg0: $urandom, arg1: 32'(i)};
      #2;
      chk(rin_ready == (iq_ref[rin_msg.ttype].size() < 3 + 2 * rin_msg.ttype), "IQ capacity");
      if (rin_ready) iq_ref[rin_msg.ttype].push_back(rin_msg.arg1); else refused++;
    end
    @(negedge clk); rin_valid = 0;
    chk(refused > 0, "some messages refused by full IQs");
    // ---- phase 2: PU takes everything
    ds_ready = 1;
    while (1) begin
      int best, bt;
      #2;
      best = 0; bt = -1;
      for (int t = 0; t < NUM_TT; t++)
        if (iq_ref[t].size() > best) begin best = iq_ref[t].size(); bt = t; end
      chk(ds_valid == (bt >= 0), "dispatch valid");
      if (bt < 0) break;
      chk(int'(ds_type) == bt, "dispatch from the fullest IQ");
      chk(ds_arg1 == iq_ref[bt][0], "FIFO order within a type");
      chk(ds_cfg.ptr_a == 32'(1000 * bt), "table entry travels with the task");
      void'(iq_ref[bt].pop_front());
      ndisp++;
      @(negedge clk);
    end
    ds_ready = 0;
    chk(n_dispatched == 32'(ndisp), "dispatch counter");
    // ---- phase 3: spawns leave to the router with their owner tile
    for (int i = 0; i < 400; i++) begin
      @(negedge clk);
      if (took) sp_valid = 0;
      took = 0;
      if (!sp_valid) begin
        sp_valid = (spawned < 200) && ($urandom_range(0, 1) == 1);
        sp_type = tt_t'($urandom); sp_arg0 = $urandom_range(0, 4095); sp_arg1 = 32'(i);
      end
      rout_ready = ($urandom_range(0, 2) == 0);
      #2;
      if (sp_valid) begin
        chk(sp_ready == (oq_ref[sp_type].size() < 4), "OQ capacity");
        if (sp_ready) begin oq_ref[sp_type].push_back(sp_arg1); spawned++; took = 1; end
      end
      if (rout_valid && rout_ready) begin
        int t; word_t own;
        t = int'(rout_msg.ttype);
        chk(oq_ref[t].size() > 0 && rout_msg.arg1 == oq_ref[t][0], "OQ order");
        own = rout_msg.arg0 >> (t + 2);
        chk(rout_msg.dst_x == coord_t'(own & 3) && rout_msg.dst_y == coord_t'(own >> 2), "owner tile");
        void'(oq_ref[t].pop_front());
        nsent++;
      end
    end
    chk(nsent > 100, "spawned tasks sent");
    $display("tsu: %0d dispatched, %0d refused, %0d sent", ndisp, refused, nsent);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
