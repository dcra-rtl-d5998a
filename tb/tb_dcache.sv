// tb_dcache: the SRAM manager with an SRAM bank and a DRAM channel model.
// Random loads and stores to scratchpad and to the cached segment are
// checked against a flat reference memory; a reference direct-mapped cache
// predicts hits, misses and write-backs, which must match the counters.
// Also checks the response latencies and that a prefetch fills a line so
// that the next access hits.
module tb_dcache;
  import dcra_pkg::*;
  localparam int KB = 16, ROWS = KB * 1024 / 64, RW = $clog2(ROWS);
  localparam word_t SEG = 32'h1000, SEG_WORDS = 4096;
  localparam int LL = 3, NL = 1 << LL;
  logic clk = 0, rst_n = 0;
  logic cache_en, cache_init;
  word_t seg_base, seg_limit, cdata_row, ctag_row;
  logic [4:0] lines_log2;
  logic pu_req_valid, pu_req_we, pu_req_ready, pu_resp_valid;
  word_t pu_req_addr, pu_req_wdata, pu_resp_rdata;
  logic pf_valid, pf_ready;
  word_t pf_addr;
  logic sram_en, sram_we;
  logic [RW-1:0] sram_addr;
  logic [WPL-1:0] sram_wmask;
  line_t sram_wdata, sram_rdata;
  logic mem_req_valid, mem_req_we, mem_req_ready, mem_resp_valid;
  word_t mem_req_line;
  line_t mem_req_data, mem_resp_data;
  logic [31:0] n_hits, n_misses, n_writebacks, n_pf_fills;
  logic busy;
  int checks = 0, failures = 0;
  longint cyc = 0;
  word_t ref_mem [word_t];
  longint ref_tag [NL];
  bit ref_valid [NL], ref_dirty [NL];
  int e_hits = 0, e_miss = 0, e_wb = 0;

  dcache #(.SRAM_KB(KB)) dut (.*);
  sram_bank #(.KBYTES(KB)) u_sram (.clk, .en(sram_en), .we(sram_we), .addr(sram_addr),
    .wmask(sram_wmask), .wdata(sram_wdata), .rdata(sram_rdata));
  tb_dram_model #(.LATENCY(20)) u_dram (.clk, .req_valid(mem_req_valid), .req_we(mem_req_we),
    .req_addr(mem_req_line), .req_data(mem_req_data), .req_ready(mem_req_ready),
    .resp_valid(mem_resp_valid), .resp_data(mem_resp_data));

  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;
  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  task automatic chk(input bit c, input string s);
    checks++;
    if (!c) begin failures++; $display("FAIL %s", s); end
  endtask

  function automatic word_t dram_word(input word_t a);
    word_t line;
    line = (a - SEG) >> 4;
    return (line << 4) + (a & 15) + 32'h5a000000;
  endfunction

  task automatic access(input bit we, input word_t a, input word_t wd,
                        output word_t rd, output int lat);
    longint t0;
    @(negedge clk);
    pu_req_valid = 1; pu_req_we = we; pu_req_addr = a; pu_req_wdata = wd;
    #2;
    while (!pu_req_ready) begin @(negedge clk); #2; end
    @(posedge clk); t0 = cyc;
    @(negedge clk); pu_req_valid = 0;
    while (!pu_resp_valid) @(negedge clk);
    rd = pu_resp_rdata;
    lat = int'(cyc - t0);
  endtask

  // reference cache bookkeeping for a cached address; returns 1 on a hit
  function automatic bit ref_cache(input word_t a, input bit we);
    longint line, idx, tag;
    bit hit;
    line = (a - SEG) >> 4; idx = line % NL; tag = line / NL;
    hit = ref_valid[idx] && ref_tag[idx] == tag;
    if (hit) e_hits++;
    else begin
      e_miss++;
      if (ref_valid[idx] && ref_dirty[idx]) e_wb++;
      ref_valid[idx] = 1; ref_tag[idx] = tag; ref_dirty[idx] = 0;
    end
    if (we) ref_dirty[idx] = 1;
    return hit;
  endfunction

  initial begin
    word_t rd; int lat; bit hit;
    pu_req_valid = 0; pu_req_we = 0; pu_req_addr = 0; pu_req_wdata = 0;
    pf_valid = 0; pf_addr = 0; cache_init = 0;
    cache_en = 1; seg_base = SEG; seg_limit = SEG + SEG_WORDS; lines_log2 = LL;
    cdata_row = 200; ctag_row = 210;
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk); cache_init = 1; @(negedge clk); cache_init = 0;
    while (busy || !pu_req_ready) @(negedge clk);
    for (int i = 0; i < NL; i++) ref_valid[i] = 0;
    // scratchpad latency
    access(1, 32'h40, 32'h1234, rd, lat); ref_mem[32'h40] = 32'h1234;
    chk(lat == 2, $sformatf("scratchpad write latency %0d", lat));
    access(0, 32'h40, 0, rd, lat);
    chk(rd == 32'h1234 && lat == 3, $sformatf("scratchpad read latency %0d", lat));
    // random traffic
    for (int i = 0; i < 1500; i++) begin
      bit we, cached;
      word_t a, wd;
      cached = $urandom_range(0, 1);
      we = $urandom_range(0, 2) == 0;
      a = cached ? SEG + $urandom_range(0, 40 * 16 - 1) : word_t'($urandom_range(0, 2047));
      wd = $urandom;
      if (cached) hit = ref_cache(a, we);
      access(we, a, wd, rd, lat);
      if (we) ref_mem[a] = wd;
      else begin
        word_t exp_w;
        exp_w = ref_mem.exists(a) ? ref_mem[a] : (cached ? dram_word(a) : rd);
        chk(rd == exp_w, $sformatf("read data at %h: %h vs %h", a, rd, exp_w));
        if (cached && hit) chk(lat == 4, $sformatf("read-hit latency %0d", lat));
      end
    end
    chk(n_hits == 32'(e_hits), $sformatf("hit counter %0d vs %0d", n_hits, e_hits));
    chk(n_misses == 32'(e_miss), $sformatf("miss counter %0d vs %0d", n_misses, e_miss));
    chk(n_writebacks == 32'(e_wb), $sformatf("write-back counter %0d vs %0d", n_writebacks, e_wb));
    chk(e_wb > 0, "dirty lines were evicted");
    // prefetch: fill a line that is not present, then hit it
    begin
      word_t pa;
      longint idx;
      pa = SEG + 32'(100 * 16 + 5);
      @(negedge clk); pf_valid = 1; pf_addr = pa;
      #2; while (!pf_ready) begin @(negedge clk); #2; end
      @(negedge clk); pf_valid = 0;
      repeat (60) @(negedge clk);
      chk(n_pf_fills == 1, "prefetch filled a line");
      idx = 100 % NL;
      if (ref_valid[idx] && ref_dirty[idx]) e_wb++;
      ref_valid[idx] = 1; ref_tag[idx] = 100 / NL; ref_dirty[idx] = 0;
      hit = ref_cache(pa, 0);
      access(0, pa, 0, rd, lat);
      chk(hit && lat == 4 && rd == (ref_mem.exists(pa) ? ref_mem[pa] : dram_word(pa)), "prefetched line hits");
    end
    $display("dcache: hits %0d misses %0d writebacks %0d", n_hits, n_misses, n_writebacks);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
