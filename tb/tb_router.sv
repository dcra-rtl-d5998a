// tb_router: a radix-9 router with die-NoC ports in both dimensions.
// Random messages enter on random ports under random back-pressure, with
// the topology re-configured between phases (mesh, torus, die-NoC mesh or
// torus). Each message must leave exactly once, on the port a reference
// model picks by walking the ring step by step. Also checks the one-cycle
// hop latency of an isolated message and the die-NoC hop counter.
module tb_router;
  import dcra_pkg::*;
  localparam int NP = 9, HOP = 4;
  logic clk = 0, rst_n = 0;
  route_cfg_t cfg;
  logic in_valid[NP], in_ready[NP], out_valid[NP], out_ready[NP];
  msg_t in_msg[NP], out_msg[NP];
  logic [31:0] die_hops;
  int checks = 0, failures = 0;
  int exp_port [int];
  int sent = 0, recv = 0, exp_die = 0;
  bit acc [NP];
  int next_id = 0;

  router #(.HAS_DX(1'b1), .HAS_DY(1'b1), .DIE_HOP(HOP)) dut (.*);
  always #5 clk = ~clk;
  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(input bit c, input string s);
    checks++;
    if (!c) begin failures++; $display("FAIL %s", s); end
  endtask

  // reference: distance by walking the ring
  function automatic int walk(input int from, input int to, input int size, input int dir);
    int p = from, n = 0;
    while (p != to) begin p = (p + dir + size) % size; n++; end
    return n;
  endfunction

  function automatic int ref_dim(input int dst, input int my, input int size, input bit torus,
                                 input bit den, input bit dtor, input int pp, input int pm,
                                 input int dp_, input int dm_);
    int up, down, d;
    bit plus;
    if (torus) begin
      up = walk(my, dst, size, 1); down = walk(my, dst, size, -1);
      plus = (up <= down); d = plus ? up : down;
    end else begin
      plus = dst > my; d = plus ? dst - my : my - dst;
    end
    if (den && d >= HOP) begin
      if (plus && (dtor || my + HOP < size)) return dp_;
      if (!plus && (dtor || my - HOP >= 0)) return dm_;
    end
    return plus ? pp : pm;
  endfunction

  function automatic int ref_route(input msg_t m);
    if (m.dst_x != cfg.my_x)
      return ref_dim(m.dst_x, cfg.my_x, cfg.size_x, cfg.torus_x, cfg.die_en_x, cfg.die_torus_x, 1, 2, 5, 6);
    if (m.dst_y != cfg.my_y)
      return ref_dim(m.dst_y, cfg.my_y, cfg.size_y, cfg.torus_y, cfg.die_en_y, cfg.die_torus_y, 3, 4, 7, 8);
    return 0;
  endfunction

  // One clock cycle, called right after the inputs were set at a negedge:
  // the handshakes visible now complete at the coming posedge.
  task automatic cycle();
    #2;
    for (int o = 0; o < NP; o++) if (out_valid[o] && out_ready[o]) begin
      int id;
      id = int'(out_msg[o].arg1);
      checks++;
      if (!exp_port.exists(id)) begin failures++; $display("FAIL unknown/duplicate id %0d", id); end
      else begin
        if (exp_port[id] != o) begin
          failures++; $display("FAIL id %0d left on %0d, expected %0d", id, o, exp_port[id]);
        end
        exp_port.delete(id);
        recv++;
      end
    end
    for (int p = 0; p < NP; p++) begin
      acc[p] = in_valid[p] && in_ready[p];
      if (acc[p]) begin
        exp_port[int'(in_msg[p].arg1)] = ref_route(in_msg[p]);
        if (ref_route(in_msg[p]) >= 5) exp_die++;
        sent++;
      end
    end
    @(negedge clk);
    for (int p = 0; p < NP; p++) if (acc[p]) in_valid[p] = 0;
  endtask

  initial begin
    for (int p = 0; p < NP; p++) begin in_valid[p] = 0; in_msg[p] = '0; out_ready[p] = 1; end
    cfg = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    // isolated message: latency one cycle
    @(negedge clk);
    cfg = '{my_x: 8'd2, my_y: 8'd2, size_x: 8'd8, size_y: 8'd8, default: 1'b0};
    in_valid[0] = 1; in_msg[0] = '{dst_x: 8'd3, dst_y: 8'd2, ttype: '0, arg0: 0, arg1: 32'd999999};
    cycle();
    in_valid[0] = 0;
    #1 chk(out_valid[1] && out_msg[1].arg1 == 999999, "one-cycle hop latency");
    cycle();
    for (int phase = 0; phase < 8; phase++) begin
      cfg.size_x = 8'(HOP * $urandom_range(2, 4));
      cfg.size_y = 8'(HOP * $urandom_range(2, 4));
      cfg.my_x = 8'($urandom_range(0, cfg.size_x - 1));
      cfg.my_y = 8'($urandom_range(0, cfg.size_y - 1));
      {cfg.torus_x, cfg.torus_y, cfg.die_en_x, cfg.die_torus_x, cfg.die_en_y, cfg.die_torus_y} = 6'(phase * 11 + 5);
      for (int i = 0; i < 300; i++) begin
        for (int p = 0; p < NP; p++) begin
          out_ready[p] = ($urandom_range(0, 3) != 0);
          if (!in_valid[p]) begin
            if ($urandom_range(0, 2) == 0) begin
              msg_t m;
              m = '{dst_x: 8'($urandom_range(0, cfg.size_x - 1)), dst_y: 8'($urandom_range(0, cfg.size_y - 1)),
                    ttype: tt_t'($urandom), arg0: $urandom, arg1: 32'(next_id)};
              next_id++;
              in_msg[p] = m; in_valid[p] = 1;
            end
          end
        end
        cycle();
      end
      // drain with the same configuration
      for (int p = 0; p < NP; p++) begin in_valid[p] = 0; out_ready[p] = 1; end
      repeat (20) cycle();
    end
    chk(exp_port.size() == 0, "every message delivered");
    chk(recv == sent, "delivered count");
    chk(die_hops == 32'(exp_die), "die-NoC hop counter");
    chk(exp_die > 0, "die-NoC used");
    $display("router: %0d messages, %0d die-NoC hops", sent, exp_die);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
