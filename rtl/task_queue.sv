// task_queue: one input or output queue of task-invocation messages.
//
// Every tile has one IQ and one OQ per task type. Their size is a
// compile-time (software) setting in DCRA, so the queue holds up to DEPTH
// entries in hardware and software sets the usable capacity `cap` (1..DEPTH)
// before a run; `full` is raised when the occupancy reaches `cap`. The
// occupancy `count` is exported because the TSU schedules by it.
// Interface: push/pop handshake without back-pressure logic inside: the
// owner pushes only when !full and pops only when !empty (asserted).
// Timing: a pushed entry is visible at `head` the next cycle; push and pop
// may happen in the same cycle. Reset is synchronous and active low.
// From the paper: one queue per task type, configurable size, occupancy
// used for scheduling. The register-based storage, DEPTH=64 are this design's choices.
module task_queue #(
  parameter int unsigned W       = 8,
  parameter int unsigned DEPTH   = 64
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic [7:0]               cap,
  input  logic                     push,
  input  logic [W-1:0]             din,
  input  logic                     pop,
  output logic [W-1:0]             head,
  output logic                     empty,
  output logic                     full,
  output logic [$clog2(DEPTH+1)-1:0] count
);
  localparam int unsigned AW = $clog2(DEPTH);
  typedef logic [$clog2(DEPTH+1)-1:0] cnt_t;

  logic [W-1:0]  mem [DEPTH];
  logic [AW-1:0] rd_ptr, wr_ptr;
  cnt_t          eff_cap;

  // Clamp the software capacity into 1..DEPTH.
  always_comb begin
    if (cap == 8'd0)             eff_cap = cnt_t'(1);
    else if (32'(cap) > DEPTH)   eff_cap = cnt_t'(DEPTH);
    else                         eff_cap = cnt_t'(cap);
  end

  assign empty = (count == '0);
  assign full  = (count >= eff_cap);
  assign head  = mem[rd_ptr];

  function automatic logic [AW-1:0] incr(input logic [AW-1:0] p);
    return (32'(p) == DEPTH - 1) ? '0 : p + 1'b1;
  endfunction

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      rd_ptr <= '0;
      wr_ptr <= '0;
      count  <= '0;
    end else begin
      if (push) wr_ptr <= incr(wr_ptr);
      if (pop)  rd_ptr <= incr(rd_ptr);
      count <= count + cnt_t'(push) - cnt_t'(pop);
    end
  end

  always_ff @(posedge clk) begin
    if (push) mem[wr_ptr] <= din;
  end

  // Handshake rules of the owner.
  a_no_overflow:  assert property (@(posedge clk) disable iff (!rst_n) push |-> (!full || pop));
  a_no_underflow: assert property (@(posedge clk) disable iff (!rst_n) pop |-> !empty);
endmodule
