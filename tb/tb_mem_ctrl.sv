// tb_mem_ctrl: 8 tiles on 2 channels with DRAM channel models. Every tile
// writes lines and reads them back at random times; each read must return
// the tile's own data (private slice, channel-local address
// tile-in-group << LPT_LOG2 | line) and arrive at the right tile.
module tb_mem_ctrl;
  import dcra_pkg::*;
  localparam int NT = 8, NCH = 2, LPT = 4;
  logic clk = 0, rst_n = 0;
  logic t_req_valid[NT], t_req_we[NT], t_req_ready[NT], t_resp_valid[NT];
  word_t t_req_line[NT];
  line_t t_req_data[NT], t_resp_data[NT];
  logic ch_req_valid[NCH], ch_req_we[NCH], ch_req_ready[NCH], ch_resp_valid[NCH];
  word_t ch_req_addr[NCH];
  line_t ch_req_data[NCH], ch_resp_data[NCH];
  logic [31:0] n_reads, n_writes;
  int checks = 0, failures = 0, reads_done = 0, writes_done = 0;

  mem_ctrl #(.NT(NT), .NCH(NCH), .LPT_LOG2(LPT)) dut (.*);
  for (genvar c = 0; c < NCH; c++) begin : g_dram
    tb_dram_model #(.LATENCY(12)) u_dram (.clk, .req_valid(ch_req_valid[c]), .req_we(ch_req_we[c]),
      .req_addr(ch_req_addr[c]), .req_data(ch_req_data[c]), .req_ready(ch_req_ready[c]),
      .resp_valid(ch_resp_valid[c]), .resp_data(ch_resp_data[c]));
  end
  always #5 clk = ~clk;
  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic line_t pat(input int t, input int l, input int v);
    line_t x;
    for (int w = 0; w < WPL; w++) x[w*32 +: 32] = 32'((t << 24) | (l << 16) | (v << 8) | w);
    return x;
  endfunction

  // one agent per tile: write line, read it back, 10 times
  for (genvar t = 0; t < NT; t++) begin : g_tile
    initial begin
      t_req_valid[t] = 0; t_req_we[t] = 0; t_req_line[t] = 0; t_req_data[t] = '0;
      wait (rst_n);
      for (int k = 0; k < 10; k++) begin
        int l;
        l = (k * 7 + t) % (1 << LPT);
        repeat ($urandom_range(0, 5)) @(negedge clk);
        @(negedge clk);
        t_req_valid[t] = 1; t_req_we[t] = 1; t_req_line[t] = word_t'(l); t_req_data[t] = pat(t, l, k);
        #2 while (!t_req_ready[t]) begin @(negedge clk); #2; end
        @(negedge clk); t_req_we[t] = 0;
        writes_done++;
        #2 while (!t_req_ready[t]) begin @(negedge clk); #2; end
        @(negedge clk); t_req_valid[t] = 0;
        while (!t_resp_valid[t]) @(negedge clk);
        checks++;
        if (t_resp_data[t] != pat(t, l, k)) begin
          failures++; $display("FAIL tile %0d line %0d read wrong data", t, l);
        end
        reads_done++;
      end
    end
  end

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    wait (reads_done == NT * 10);
    repeat (5) @(negedge clk);
    checks++;
    if (n_reads != NT * 10 || n_writes != NT * 10) begin
      failures++; $display("FAIL counters %0d %0d", n_reads, n_writes);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
