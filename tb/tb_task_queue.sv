// tb_task_queue: checks order, capacity and occupancy of task_queue
// against a reference queue kept in the testbench, with random traffic and
// a software capacity changed between phases.
module tb_task_queue;
  localparam int W = 16, DEPTH = 8;
  logic clk = 0, rst_n = 0;
  logic [7:0] cap;
  logic push, pop, empty, full;
  logic [W-1:0] din, head;
  logic [$clog2(DEPTH+1)-1:0] count;
  int checks = 0, failures = 0;
  logic [W-1:0] ref_q[$];
  int ref_cap;

  task_queue #(.W(W), .DEPTH(DEPTH)) dut (.*);

  always #5 clk = ~clk;
  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    cap = 8'd5; push = 0; pop = 0; din = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int phase = 0; phase < 3; phase++) begin
      ref_cap = (phase == 0) ? 5 : (phase == 1) ? 8 : 2;
      @(negedge clk); cap = 8'(ref_cap);
      for (int i = 0; i < 400; i++) begin
        @(negedge clk);
        check(count == ref_q.size(), "occupancy");
        check(empty == (ref_q.size() == 0), "empty flag");
        check(full == (ref_q.size() >= ref_cap), "full flag at the configured capacity");
        if (ref_q.size() > 0) check(head == ref_q[0], "head order");
        push = !full && ($urandom_range(0, 3) != 0);
        pop  = !empty && ($urandom_range(0, 2) == 0);
        din  = W'($urandom);
        @(posedge clk);
        #1;
        if (pop) void'(ref_q.pop_front());
        if (push) ref_q.push_back(din);
        @(negedge clk); push = 0; pop = 0;
      end
      // drain
      while (ref_q.size() > 0) begin
        @(negedge clk);
        check(head == ref_q[0], "drain order");
        pop = 1;
        @(posedge clk); #1; void'(ref_q.pop_front());
        @(negedge clk); pop = 0;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
