// tb_prefetch_unit: dispatches tasks with different table entries and
// checks the prefetch addresses that reach the cache port: ptr_a+index and
// ptr_b+index on dispatch, then line L+1 for each new line L touched while
// a streaming task runs, and nothing after the task ends or for a task
// without the streaming bit.
module tb_prefetch_unit;
  import dcra_pkg::*;
  logic clk = 0, rst_n = 0;
  logic disp_fire, task_done, acc_fire, pf_valid, pf_ready;
  task_cfg_t disp_cfg;
  word_t disp_index, acc_addr, pf_addr;
  logic [31:0] n_issued;
  int checks = 0, failures = 0;
  word_t got[$];

  prefetch_unit dut (.*);
  always #5 clk = ~clk;
  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  task automatic chk(input bit c, input string s);
    checks++;
    if (!c) begin failures++; $display("FAIL %s", s); end
  endtask
  always @(negedge clk) if (rst_n) begin
    #2 if (pf_valid && pf_ready) got.push_back(pf_addr);
  end

  task automatic expect_seq(input word_t e[$], input string s);
    repeat (8) @(negedge clk);
    chk(got.size() == e.size(), $sformatf("%s: %0d prefetches, expected %0d", s, got.size(), e.size()));
    for (int i = 0; i < e.size() && i < got.size(); i++)
      chk(got[i] == e[i], $sformatf("%s: address %h, expected %h", s, got[i], e[i]));
    got.delete();
  endtask

  task automatic dispatch(input word_t pa, input word_t pb, input bit ea, input bit eb,
                          input bit st, input word_t idx);
    @(negedge clk);
    disp_cfg = '0;
    disp_cfg.ptr_a = pa; disp_cfg.ptr_b = pb; disp_cfg.pf_a = ea; disp_cfg.pf_b = eb;
    disp_cfg.stream = st;
    disp_index = idx; disp_fire = 1;
    @(negedge clk); disp_fire = 0;
  endtask

  task automatic touch(input word_t a);
    @(negedge clk); acc_fire = 1; acc_addr = a;
    @(negedge clk); acc_fire = 0;
  endtask

  initial begin
    disp_fire = 0; task_done = 0; acc_fire = 0; acc_addr = 0; disp_cfg = '0; disp_index = 0;
    pf_ready = 1;
    repeat (3) @(negedge clk);
    rst_n = 1;
    dispatch(32'h1000, 32'h2000, 1, 1, 0, 32'd7);
    expect_seq('{32'h1007, 32'h2007}, "two pointers");
    dispatch(32'h1000, 32'h2000, 0, 1, 0, 32'd9);
    touch(32'h3000);
    expect_seq('{32'h2009}, "second pointer only, no streaming");
    dispatch(32'h1000, 32'h2000, 0, 0, 1, 32'd0);
    touch(32'h3000); touch(32'h3001); touch(32'h3010); touch(32'h3025);
    expect_seq('{32'h3010, 32'h3020, 32'h3030}, "next-line while streaming");
    @(negedge clk); task_done = 1; @(negedge clk); task_done = 0;
    touch(32'h4000);
    expect_seq('{}, "no prefetch after the task");
    // back-pressure: cache not ready, requests wait in the queue
    pf_ready = 0;
    dispatch(32'h500, 32'h600, 1, 1, 0, 32'd1);
    repeat (5) @(negedge clk);
    chk(pf_valid && pf_addr == 32'h501, "held while the cache is busy");
    pf_ready = 1;
    expect_seq('{32'h501, 32'h601}, "after back-pressure");
    chk(n_issued == 8, "issue counter");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
