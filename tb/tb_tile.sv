// tb_tile: one tile on its own (a 1x1 grid, radix-5 router) running a
// histogram through its whole task path. The behavioural PU seeds T0 tasks;
// each spawn goes output queue -> router -> local port -> input queue ->
// dispatch, T0 reads an input word through the data cache and spawns T1,
// and T1 increments a bin in the cached segment. Input and bin lines
// conflict in a two-line direct-mapped cache, so the run also produces
// misses, hits, write-backs of dirty bins and prefetch fills from DRAM
// (a behavioural DRAM channel, 50-cycle latency).
// Checks: the bins read back equal initial contents plus the reference
// histogram, every task ran once, no message left through a network port,
// the statistics counters are consistent with the run, and each mechanism
// (hit, miss, write-back, prefetch fill, dispatch) happened.
module tb_tile;
  import dcra_pkg::*;
  localparam int E_LOG2 = 5, B_LOG2 = 4, NB_LOG2 = 4;
  localparam int NE = 1 << E_LOG2, NB = 1 << B_LOG2;
  localparam word_t IN_BASE = 32'h1000, BIN_BASE = 32'h1040;
  localparam int NP = 5;

  logic clk = 0, rst_n = 0;
  logic cfg_we = 0; logic [7:0] cfg_addr = '0; word_t cfg_data = '0;
  logic in_valid [NP-1]; msg_t in_msg [NP-1]; logic in_ready [NP-1];
  logic out_valid[NP-1]; msg_t out_msg [NP-1]; logic out_ready[NP-1];
  logic ds_valid, ds_ready, task_done, sp_valid, sp_ready;
  tt_t ds_type, sp_type; word_t ds_arg0, ds_arg1, sp_arg0, sp_arg1;
  logic pu_req_valid, pu_req_we, pu_req_ready, pu_resp_valid;
  word_t pu_req_addr, pu_req_wdata, pu_resp_rdata;
  logic mem_req_valid, mem_req_we, mem_req_ready, mem_resp_valid;
  word_t mem_req_line; line_t mem_req_data, mem_resp_data;
  tile_stats_t stats;
  logic seed_go = 0, dump_go = 0, idle, dump_valid;
  word_t seed_lo = '0, seed_n = '0, dump_val;
  int dump_idx, n_t0, n_t1, n_sp_stall;
  int checks = 0, failures = 0, leaked = 0, dumped = 0;
  word_t ref_bin [NB];

  tile #(.SRAM_KB(16), .QDEPTH(16)) dut (.*);
  tb_pu_model #(.E_LOG2(E_LOG2), .B_LOG2(B_LOG2), .NB_LOG2(NB_LOG2),
                .IN_BASE(IN_BASE), .BIN_BASE(BIN_BASE)) u_pu (.*);
  tb_dram_model #(.LATENCY(50)) u_dram (
    .clk, .req_valid(mem_req_valid), .req_we(mem_req_we), .req_addr(mem_req_line),
    .req_data(mem_req_data), .req_ready(mem_req_ready),
    .resp_valid(mem_resp_valid), .resp_data(mem_resp_data));

  always #5 clk = ~clk;
  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  always_comb for (int p = 0; p < NP - 1; p++) begin
    in_valid[p] = 1'b0; in_msg[p] = '0; out_ready[p] = 1'b1;
  end
  always @(posedge clk) begin
    for (int p = 0; p < NP - 1; p++) if (rst_n && out_valid[p]) leaked++;
    if (dump_valid) begin
      checks++; dumped++;
      if (dump_val !== ref_bin[dump_idx]) begin
        failures++;
        $display("FAIL bin %0d = %h, expected %h", dump_idx, dump_val, ref_bin[dump_idx]);
      end
    end
  end

  task automatic chk(input bit c, input string s);
    checks++;
    if (!c) begin failures++; $display("FAIL %s", s); end
  endtask
  task automatic wr(input logic [7:0] a, input word_t d);
    @(negedge clk); cfg_we = 1; cfg_addr = a; cfg_data = d;
    @(negedge clk); cfg_we = 0;
  endtask
  function automatic word_t dram_word(input int line, input int w);
    return (word_t'(line) << 4) + word_t'(w) + 32'h5a000000;
  endfunction
  function automatic word_t hash_bin(input word_t w);
    word_t h = w * 32'h9E3779B1;
    return h >> (32 - NB_LOG2);
  endfunction

  initial begin
    for (int b = 0; b < NB; b++) ref_bin[b] = dram_word(int'((BIN_BASE - IN_BASE) >> 4), b);
    for (int g = 0; g < NE; g++) begin
      ref_bin[hash_bin(dram_word(g >> 4, g & 15))] += 1;
    end
    repeat (3) @(negedge clk);
    rst_n = 1;
    // 1x1 mesh, two-line cache over the input and bin arrays
    wr(CFG_ROUTE0, 32'h0101_0000);
    wr(CFG_ROUTE1, 32'h0);
    wr(CFG_CSEG_B, IN_BASE);
    wr(CFG_CSEG_L, IN_BASE + 32'h100);
    wr(CFG_CDATA, 32'd128);
    wr(CFG_CTAG, 32'd130);
    wr(CFG_CLINES, 32'h101);
    wr(CFG_CINIT, 32'h0);
    // T0: index array at IN_BASE, prefetch + next-line streaming
    wr(CFG_TASK0 + 0, IN_BASE);
    wr(CFG_TASK0 + 2, (32'(E_LOG2) << 16) | 32'h25);
    wr(CFG_TASK0 + 3, 32'h0404);
    // T1: bins at BIN_BASE, prefetch of the bin
    wr(CFG_TASK0 + 4, BIN_BASE);
    wr(CFG_TASK0 + 6, (32'(B_LOG2) << 16) | 32'h1);
    wr(CFG_TASK0 + 7, 32'h0202);
    repeat (20) @(negedge clk);
    seed_lo = 0; seed_n = NE; seed_go = 1;
    @(negedge clk); seed_go = 0;
    wait (n_t1 == NE);
    repeat (50) @(negedge clk);
    chk(idle, "PU idle at the end");
    dump_go = 1; @(negedge clk); dump_go = 0;
    wait (dumped == NB);
    repeat (5) @(negedge clk);
    chk(n_t0 == NE, "every T0 ran once");
    chk(n_t1 == NE, "every T1 ran once");
    chk(leaked == 0, "no message left through a network port");
    chk(stats.dispatched == 32'(2 * NE), "dispatch counter");
    chk(stats.die_hops == 0, "no die-NoC hop in a radix-5 tile");
    chk(stats.hits > 0, "cache hits happened");
    chk(stats.misses > 0, "cache misses happened");
    chk(stats.writebacks > 0, "dirty write-backs happened");
    chk(stats.pf_fills > 0, "prefetch fills happened");
    chk(stats.pf_issued >= stats.pf_fills, "prefetch issued >= filled");
    $display("tile: hits=%0d misses=%0d wb=%0d pf_fills=%0d pf_issued=%0d disp=%0d spawn_stall=%0d",
             stats.hits, stats.misses, stats.writebacks, stats.pf_fills, stats.pf_issued,
             stats.dispatched, n_sp_stall);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
