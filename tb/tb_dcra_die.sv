// tb_dcra_die: end-to-end test of the die. Two dies of 4x4 tiles are joined
// east-to-west into one logical 8x4 grid, with a behavioural PU on every
// tile and a behavioural DRAM on every memory channel, and run a histogram:
// 512 input elements spread 16 per tile, 256 bins spread 8 per tile.
//
// Logical coordinates follow the folded layout: on die d, physical column
// 2k holds logical column 2d+k and physical column 2k+1 holds column
// 7-2d-k; rows fold the same way within the die (2k -> k, 2k+1 -> 3-k).
//
// Phase A runs half of the elements with the network configured as a mesh:
// the ring ends that meet at the far (east) edge of die 1 and at the north
// edge are closed locally, the torus-closing links at die 0's west edge
// and at the south edges are left open, and routers use mesh routing.
// Phase B reconfigures at run time (edge registers and router mode) into a
// 2D torus for both the tile-NoC and the die-NoC and runs the other half.
//
// Checks: every bin read back equals its initial DRAM contents plus the
// reference histogram; every task ran once; no message left the open
// edges; no torus-closing link was used in phase A. Every mechanism must
// have happened at least once, else it counts as a failure: tile-NoC and
// die-NoC links crossing the die boundary, die-NoC hops, local wrap-around
// at a closed edge, torus-closing links (phase B), cache hits, misses,
// dirty write-backs, prefetch fills, dispatch holds for a full output
// queue, spawns refused by a full output queue, DRAM reads and writes, and
// the mesh-to-torus mode switch.
module tb_dcra_die;
  import dcra_pkg::*;
  localparam int TX = 4, TY = 4, NT = TX * TY, NCH = 2, LPT = 10, NX = 8, NY = 4;
  localparam int E_LOG2 = 4, B_LOG2 = 3, NB_LOG2 = 8;
  localparam int NE = NX * NY << E_LOG2, NBIN = 1 << NB_LOG2;
  localparam word_t IN_BASE = 32'h1000, BIN_BASE = 32'h1040;

  logic clk = 0, rst_n = 0;
  logic cfg_we [2]; logic [15:0] cfg_tile = '0; logic [7:0] cfg_addr = '0; word_t cfg_data = '0;

  logic e_tx_valid [2][TY][4]; msg_t e_tx_msg [2][TY][4]; logic e_tx_ready [2][TY][4];
  logic e_rx_valid [2][TY][4]; msg_t e_rx_msg [2][TY][4]; logic e_rx_ready [2][TY][4];
  logic w_tx_valid [2][TY][4]; msg_t w_tx_msg [2][TY][4]; logic w_tx_ready [2][TY][4];
  logic w_rx_valid [2][TY][4]; msg_t w_rx_msg [2][TY][4]; logic w_rx_ready [2][TY][4];
  logic n_tx_valid [2][TX][4]; msg_t n_tx_msg [2][TX][4]; logic n_tx_ready [2][TX][4];
  logic n_rx_valid [2][TX][4]; msg_t n_rx_msg [2][TX][4]; logic n_rx_ready [2][TX][4];
  logic s_tx_valid [2][TX][4]; msg_t s_tx_msg [2][TX][4]; logic s_tx_ready [2][TX][4];
  logic s_rx_valid [2][TX][4]; msg_t s_rx_msg [2][TX][4]; logic s_rx_ready [2][TX][4];

  logic  ds_valid [2][NT]; tt_t ds_type [2][NT]; word_t ds_arg0 [2][NT], ds_arg1 [2][NT];
  logic  ds_ready [2][NT], task_done [2][NT];
  logic  sp_valid [2][NT]; tt_t sp_type [2][NT]; word_t sp_arg0 [2][NT], sp_arg1 [2][NT];
  logic  sp_ready [2][NT];
  logic  pu_req_valid [2][NT], pu_req_we [2][NT], pu_req_ready [2][NT], pu_resp_valid [2][NT];
  word_t pu_req_addr [2][NT], pu_req_wdata [2][NT], pu_resp_rdata [2][NT];
  logic  ch_req_valid [2][NCH], ch_req_we [2][NCH], ch_req_ready [2][NCH], ch_resp_valid [2][NCH];
  word_t ch_req_addr [2][NCH]; line_t ch_req_data [2][NCH], ch_resp_data [2][NCH];
  tile_stats_t stats [2][NT];
  logic [31:0] n_wraps [2], n_dram_reads [2], n_dram_writes [2];

  logic seed_go = 0, dump_go = 0;
  word_t seed_lo [2][NT], seed_n [2][NT];
  logic idle [2][NT], dump_valid [2][NT];
  int dump_idx [2][NT], n_t0 [2][NT], n_t1 [2][NT], n_sp_stall [2][NT];
  word_t dump_val [2][NT];

  int checks = 0, failures = 0;
  int lin_of [2][NT];           // logical linear id of a physical tile
  int die_of [NX*NY], t_of [NX*NY];
  word_t ref_bin [NBIN];
  int dumped = 0, leaked = 0, x_cross = 0, die_cross = 0;
  int phase = 0, mode_switches = 0;

  // ------------------------------------------------ the two dies
  for (genvar d = 0; d < 2; d++) begin : g_die
    dcra_die #(.TX(TX), .TY(TY), .SRAM_KB(16), .QDEPTH(16), .NCH(NCH), .LPT_LOG2(LPT)) u_die (
      .clk, .rst_n, .cfg_we(cfg_we[d]), .cfg_tile, .cfg_addr, .cfg_data,
      .e_tx_valid(e_tx_valid[d]), .e_tx_msg(e_tx_msg[d]), .e_tx_ready(e_tx_ready[d]),
      .e_rx_valid(e_rx_valid[d]), .e_rx_msg(e_rx_msg[d]), .e_rx_ready(e_rx_ready[d]),
      .w_tx_valid(w_tx_valid[d]), .w_tx_msg(w_tx_msg[d]), .w_tx_ready(w_tx_ready[d]),
      .w_rx_valid(w_rx_valid[d]), .w_rx_msg(w_rx_msg[d]), .w_rx_ready(w_rx_ready[d]),
      .n_tx_valid(n_tx_valid[d]), .n_tx_msg(n_tx_msg[d]), .n_tx_ready(n_tx_ready[d]),
      .n_rx_valid(n_rx_valid[d]), .n_rx_msg(n_rx_msg[d]), .n_rx_ready(n_rx_ready[d]),
      .s_tx_valid(s_tx_valid[d]), .s_tx_msg(s_tx_msg[d]), .s_tx_ready(s_tx_ready[d]),
      .s_rx_valid(s_rx_valid[d]), .s_rx_msg(s_rx_msg[d]), .s_rx_ready(s_rx_ready[d]),
      .ds_valid(ds_valid[d]), .ds_type(ds_type[d]), .ds_arg0(ds_arg0[d]), .ds_arg1(ds_arg1[d]),
      .ds_ready(ds_ready[d]), .task_done(task_done[d]),
      .sp_valid(sp_valid[d]), .sp_type(sp_type[d]), .sp_arg0(sp_arg0[d]), .sp_arg1(sp_arg1[d]),
      .sp_ready(sp_ready[d]),
      .pu_req_valid(pu_req_valid[d]), .pu_req_we(pu_req_we[d]), .pu_req_addr(pu_req_addr[d]),
      .pu_req_wdata(pu_req_wdata[d]), .pu_req_ready(pu_req_ready[d]),
      .pu_resp_valid(pu_resp_valid[d]), .pu_resp_rdata(pu_resp_rdata[d]),
      .ch_req_valid(ch_req_valid[d]), .ch_req_we(ch_req_we[d]), .ch_req_addr(ch_req_addr[d]),
      .ch_req_data(ch_req_data[d]), .ch_req_ready(ch_req_ready[d]),
      .ch_resp_valid(ch_resp_valid[d]), .ch_resp_data(ch_resp_data[d]),
      .stats(stats[d]), .n_wraps(n_wraps[d]), .n_dram_reads(n_dram_reads[d]),
      .n_dram_writes(n_dram_writes[d]));
    for (genvar c = 0; c < NCH; c++) begin : g_ch
      tb_dram_model #(.LATENCY(50)) u_dram (
        .clk, .req_valid(ch_req_valid[d][c]), .req_we(ch_req_we[d][c]),
        .req_addr(ch_req_addr[d][c]), .req_data(ch_req_data[d][c]),
        .req_ready(ch_req_ready[d][c]), .resp_valid(ch_resp_valid[d][c]),
        .resp_data(ch_resp_data[d][c]));
    end
    for (genvar t = 0; t < NT; t++) begin : g_pu
      tb_pu_model #(.E_LOG2(E_LOG2), .B_LOG2(B_LOG2), .NB_LOG2(NB_LOG2),
                    .IN_BASE(IN_BASE), .BIN_BASE(BIN_BASE)) u_pu (
        .clk, .rst_n, .seed_go, .seed_lo(seed_lo[d][t]), .seed_n(seed_n[d][t]), .dump_go,
        .ds_valid(ds_valid[d][t]), .ds_type(ds_type[d][t]), .ds_arg0(ds_arg0[d][t]),
        .ds_arg1(ds_arg1[d][t]), .ds_ready(ds_ready[d][t]), .task_done(task_done[d][t]),
        .sp_valid(sp_valid[d][t]), .sp_type(sp_type[d][t]), .sp_arg0(sp_arg0[d][t]),
        .sp_arg1(sp_arg1[d][t]), .sp_ready(sp_ready[d][t]),
        .pu_req_valid(pu_req_valid[d][t]), .pu_req_we(pu_req_we[d][t]),
        .pu_req_addr(pu_req_addr[d][t]), .pu_req_wdata(pu_req_wdata[d][t]),
        .pu_req_ready(pu_req_ready[d][t]), .pu_resp_valid(pu_resp_valid[d][t]),
        .pu_resp_rdata(pu_resp_rdata[d][t]),
        .idle(idle[d][t]), .dump_valid(dump_valid[d][t]), .dump_idx(dump_idx[d][t]),
        .dump_val(dump_val[d][t]), .n_t0(n_t0[d][t]), .n_t1(n_t1[d][t]),
        .n_sp_stall(n_sp_stall[d][t]));
    end
  end

  // ------------------------------------------------ die-to-die wiring
  // die 0 east <-> die 1 west, channel for channel; every other edge is
  // left unconnected (never ready, never valid).
  always_comb begin
    for (int r = 0; r < TY; r++)
      for (int c = 0; c < 4; c++) begin
        w_rx_valid[1][r][c] = e_tx_valid[0][r][c]; w_rx_msg[1][r][c] = e_tx_msg[0][r][c];
        e_tx_ready[0][r][c] = w_rx_ready[1][r][c];
        e_rx_valid[0][r][c] = w_tx_valid[1][r][c]; e_rx_msg[0][r][c] = w_tx_msg[1][r][c];
        w_tx_ready[1][r][c] = e_rx_ready[0][r][c];
        w_rx_valid[0][r][c] = 1'b0; w_rx_msg[0][r][c] = '0; w_tx_ready[0][r][c] = 1'b0;
        e_rx_valid[1][r][c] = 1'b0; e_rx_msg[1][r][c] = '0; e_tx_ready[1][r][c] = 1'b0;
      end
    for (int d = 0; d < 2; d++)
      for (int k = 0; k < TX; k++)
        for (int c = 0; c < 4; c++) begin
          n_rx_valid[d][k][c] = 1'b0; n_rx_msg[d][k][c] = '0; n_tx_ready[d][k][c] = 1'b0;
          s_rx_valid[d][k][c] = 1'b0; s_rx_msg[d][k][c] = '0; s_tx_ready[d][k][c] = 1'b0;
        end
  end

  always #5 clk = ~clk;
  initial begin
    repeat (30000) @(posedge clk);
    failures++;
    $display("watchdog: phase %0d, %0d of %0d T1 tasks, %0d bins read", phase, sum_t1(), NE, dumped);
    for (int d = 0; d < 2; d++)
      for (int t = 0; t < NT; t++)
        $display("  die %0d tile %0d: T0 %0d T1 %0d dispatched %0d idle %0d ds_valid %0d sp_valid %0d",
                 d, t, n_t0[d][t], n_t1[d][t], stats[d][t].dispatched, idle[d][t],
                 ds_valid[d][t], sp_valid[d][t]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ------------------------------------------------ monitors
  function automatic int torus_links();
    int s = 0;
    for (int r = 0; r < TY; r++) s += g_die[0].u_die.wr_w[r][0] + g_die[0].u_die.wr_w[r][1];
    for (int k = 0; k < TX; k++)
      s += g_die[0].u_die.wr_s[k][0] + g_die[0].u_die.wr_s[k][1]
         + g_die[1].u_die.wr_s[k][0] + g_die[1].u_die.wr_s[k][1];
    return s;
  endfunction
  function automatic int sum_t1();
    int s = 0;
    for (int d = 0; d < 2; d++) for (int t = 0; t < NT; t++) s += n_t1[d][t];
    return s;
  endfunction
  function automatic word_t dram_word(input int t, input int line, input int w);
    word_t a = (word_t'(t % (NT / NCH)) << LPT) | word_t'(line);
    return (a << 4) + word_t'(w) + 32'h5a000000;
  endfunction
  function automatic word_t hash_bin(input word_t w);
    word_t h = w * 32'h9E3779B1;
    return h >> (32 - NB_LOG2);
  endfunction

  always @(posedge clk) begin
    for (int r = 0; r < TY; r++)
      for (int c = 0; c < 4; c++) begin
        if (rst_n && e_tx_valid[0][r][c] && e_tx_ready[0][r][c]) begin
          if (c < 2) x_cross++; else die_cross++;
        end
        if (rst_n && w_tx_valid[1][r][c] && w_tx_ready[1][r][c]) begin
          if (c < 2) x_cross++; else die_cross++;
        end
        if (rst_n && (w_tx_valid[0][r][c] || e_tx_valid[1][r][c])) leaked++;
      end
    for (int d = 0; d < 2; d++)
      for (int k = 0; k < TX; k++)
        for (int c = 0; c < 4; c++) if (rst_n && (n_tx_valid[d][k][c] || s_tx_valid[d][k][c])) leaked++;
    for (int d = 0; d < 2; d++)
      for (int t = 0; t < NT; t++)
        if (dump_valid[d][t]) begin
          int b;
          b = lin_of[d][t] * (1 << B_LOG2) + dump_idx[d][t];
          checks++; dumped++;
          if (dump_val[d][t] !== ref_bin[b]) begin
            failures++;
            $display("FAIL bin %0d = %h, expected %h", b, dump_val[d][t], ref_bin[b]);
          end
        end
  end

  task automatic chk(input bit c, input string s);
    checks++;
    if (!c) begin failures++; $display("FAIL %s", s); end
  endtask
  task automatic wr(input int d, input int t, input logic [7:0] a, input word_t v);
    @(negedge clk);
    cfg_we[d] = 1'b1; cfg_tile = 16'(t); cfg_addr = a; cfg_data = v;
    @(negedge clk);
    cfg_we[d] = 1'b0;
  endtask
  task automatic set_mode(input bit torus);
    for (int d = 0; d < 2; d++)
      for (int t = 0; t < NT; t++)
        wr(d, t, CFG_ROUTE1, (32'd3 << 8) | (torus ? 32'h3F : 32'h14));
    // edge bits: 0 W, 1 E, 2 S, 3 N (tile-NoC); 4..7 the same for the die-NoC
    wr(0, 16'hFFFF, 8'h0, torus ? 32'hDD : 32'h88);
    wr(1, 16'hFFFF, 8'h0, torus ? 32'hEE : 32'hAA);
  endtask
  task automatic run_phase(input int lo_off, input int n, input int target);
    for (int d = 0; d < 2; d++)
      for (int t = 0; t < NT; t++) begin
        seed_lo[d][t] = word_t'((lin_of[d][t] << E_LOG2) + lo_off);
        seed_n[d][t]  = word_t'(n);
      end
    @(negedge clk); seed_go = 1'b1;
    @(negedge clk); seed_go = 1'b0;
    while (sum_t1() < target) @(negedge clk);
    repeat (100) @(negedge clk);
  endtask

  int tl_a, tl_b, hits, misses, wbs, pff, holds, hops, stalls;
  initial begin
    cfg_we[0] = 1'b0; cfg_we[1] = 1'b0;
    for (int d = 0; d < 2; d++)
      for (int t = 0; t < NT; t++) begin
        int px, py, x, y;
        px = t % TX; py = t / TX;
        x = (px % 2 == 0) ? 2 * d + px / 2 : NX - 1 - 2 * d - (px - 1) / 2;
        y = (py % 2 == 0) ? py / 2 : NY - 1 - (py - 1) / 2;
        lin_of[d][t] = y * NX + x;
        die_of[y * NX + x] = d; t_of[y * NX + x] = t;
      end
    for (int b = 0; b < NBIN; b++) begin
      int o;
      o = b >> B_LOG2;
      ref_bin[b] = dram_word(t_of[o], int'((BIN_BASE - IN_BASE) >> 4), b % (1 << B_LOG2));
    end
    for (int g = 0; g < NE; g++) begin
      int o;
      o = g >> E_LOG2;
      ref_bin[hash_bin(dram_word(t_of[o], 0, g % (1 << E_LOG2)))] += 1;
    end
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    for (int d = 0; d < 2; d++)
      for (int t = 0; t < NT; t++) begin
        int l;
        l = lin_of[d][t];
        wr(d, t, CFG_ROUTE0, {8'(NY), 8'(NX), 8'(l / NX), 8'(l % NX)});
        wr(d, t, CFG_CSEG_B, IN_BASE);
        wr(d, t, CFG_CSEG_L, IN_BASE + 32'h100);
        wr(d, t, CFG_CDATA, 32'd128);
        wr(d, t, CFG_CTAG, 32'd130);
        wr(d, t, CFG_CLINES, 32'h101);
        wr(d, t, CFG_CINIT, 32'h0);
        // T0(g): input element g; prefetch it, stream, may spawn T1
        wr(d, t, CFG_TASK0 + 0, IN_BASE - word_t'(l << E_LOG2));
        wr(d, t, CFG_TASK0 + 2, (32'(E_LOG2) << 16) | 32'h25);
        wr(d, t, CFG_TASK0 + 3, 32'h0110);
        // T1(v, 1): bin v; prefetch it; one-entry IQ and OQ to provoke back-pressure
        wr(d, t, CFG_TASK0 + 4, BIN_BASE - word_t'(l << B_LOG2));
        wr(d, t, CFG_TASK0 + 6, (32'(B_LOG2) << 16) | 32'h1);
        wr(d, t, CFG_TASK0 + 7, 32'h0101);
      end
    // phase A: mesh
    set_mode(1'b0);
    phase = 1;
    run_phase(0, 1 << (E_LOG2 - 1), NE / 2);
    tl_a = torus_links();
    // phase B: switch to torus at run time
    set_mode(1'b1);
    mode_switches++;
    phase = 2;
    run_phase(1 << (E_LOG2 - 1), 1 << (E_LOG2 - 1), NE);
    tl_b = torus_links() - tl_a;
    @(negedge clk); dump_go = 1'b1;
    @(negedge clk); dump_go = 1'b0;
    while (dumped < NBIN) @(negedge clk);
    repeat (5) @(negedge clk);

    hits = 0; misses = 0; wbs = 0; pff = 0; holds = 0; hops = 0; stalls = 0;
    for (int d = 0; d < 2; d++)
      for (int t = 0; t < NT; t++) begin
        hits += stats[d][t].hits; misses += stats[d][t].misses;
        wbs += stats[d][t].writebacks; pff += stats[d][t].pf_fills;
        holds += stats[d][t].oq_holds; hops += stats[d][t].die_hops;
        stalls += n_sp_stall[d][t];
        chk(n_t0[d][t] == (1 << E_LOG2), "every T0 of a tile ran once");
        chk(stats[d][t].dispatched == 32'(n_t0[d][t] + n_t1[d][t]), "dispatch count");
      end
    chk(sum_t1() == NE, "every T1 ran once");
    chk(leaked == 0, "no message left an open edge");
    chk(tl_a == 0, "no torus-closing link used in mesh mode");
    $display("mechanisms: x_cross=%0d die_cross=%0d die_hops=%0d local_wraps=%0d torus_links=%0d",
             x_cross, die_cross, hops, n_wraps[0] + n_wraps[1] - tl_b, tl_b);
    $display("            hits=%0d misses=%0d writebacks=%0d pf_fills=%0d oq_holds=%0d spawn_stalls=%0d",
             hits, misses, wbs, pff, holds, stalls);
    $display("            dram_reads=%0d dram_writes=%0d mode_switches=%0d",
             n_dram_reads[0] + n_dram_reads[1], n_dram_writes[0] + n_dram_writes[1], mode_switches);
    chk(x_cross > 0, "tile-NoC traffic crossed the die boundary");
    chk(die_cross > 0, "die-NoC traffic crossed the die boundary");
    chk(hops > 0, "die-NoC hops");
    chk(n_wraps[0] + n_wraps[1] > 32'(tl_b), "local wrap at a closed edge");
    chk(tl_b > 0, "torus-closing links used after the switch");
    chk(hits > 0, "cache hits");
    chk(misses > 0, "cache misses");
    chk(wbs > 0, "dirty write-backs");
    chk(pff > 0, "prefetch fills");
    chk(holds > 0, "dispatch held for a full OQ");
    chk(stalls > 0, "spawn refused by a full OQ");
    chk(n_dram_reads[0] + n_dram_reads[1] > 0, "DRAM reads");
    chk(n_dram_writes[0] + n_dram_writes[1] > 0, "DRAM writes");
    chk(mode_switches == 1, "mesh-to-torus switch");
    $display("run length: %0d cycles", $time / 10);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
