// prefetch_unit: task-driven and next-line prefetching into the data cache.
//
// DCRA knows, when a task is dispatched, which data it will touch: the
// first task parameter is an array index and the TSU's per-task table holds
// the base of that array (ptr_a) and of a second array read with the same
// index (ptr_b). On dispatch this unit asks the data cache for
// ptr_a+index and/or ptr_b+index (element = one 32-bit word, an assumption).
// If the task's `stream` bit is set, it also runs a next-line prefetcher
// for the length of the task: each time the PU touches a new line L it asks
// for line L+1. Prefetches are hints: at most one candidate per source is
// kept, newer ones replace older ones, and a four-entry queue feeds the
// cache's low-priority prefetch port.
// Interface: dispatch and access events are single-cycle strobes; the
// cache side is valid/ready. A dispatch reaches the cache port two cycles
// later at the earliest.
// From the paper: two pointers per task, the streaming bit, next-line
// prefetching during the task. The candidate registers and the queue are
// this design's choices.
module prefetch_unit
  import dcra_pkg::*;
(
  input  logic      clk,
  input  logic      rst_n,
  input  logic      disp_fire,
  input  task_cfg_t disp_cfg,
  input  word_t     disp_index,
  input  logic      task_done,
  input  logic      acc_fire,
  input  word_t     acc_addr,
  output logic      pf_valid,
  output word_t     pf_addr,
  input  logic      pf_ready,
  output logic [31:0] n_issued
);
  logic  pa_v, pb_v, pn_v, streaming;
  word_t pa, pb, pn, last_line;
  logic  q_empty, q_full, push;
  word_t push_addr;
  logic [2:0] q_cnt;

  wire word_t acc_line = acc_addr >> WPL_LOG2;
  wire nl_event = streaming && acc_fire && (acc_line != last_line);

  // one candidate per cycle into the queue, in order a, b, next-line
  always_comb begin
    push      = !q_full && (pa_v || pb_v || pn_v);
    push_addr = pa_v ? pa : (pb_v ? pb : pn);
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      pa_v <= 1'b0; pb_v <= 1'b0; pn_v <= 1'b0; streaming <= 1'b0;
      pa <= '0; pb <= '0; pn <= '0; last_line <= '1;
      n_issued <= '0;
    end else begin
      if (push) begin
        if (pa_v)      pa_v <= 1'b0;
        else if (pb_v) pb_v <= 1'b0;
        else           pn_v <= 1'b0;
      end
      if (disp_fire) begin
        pa_v <= disp_cfg.pf_a;  pa <= disp_cfg.ptr_a + disp_index;
        pb_v <= disp_cfg.pf_b;  pb <= disp_cfg.ptr_b + disp_index;
        streaming <= disp_cfg.stream;
        last_line <= '1;
      end else if (task_done) begin
        streaming <= 1'b0;
      end
      if (nl_event) begin
        pn_v <= 1'b1;
        pn   <= (acc_line + 1) << WPL_LOG2;
        last_line <= acc_line;
      end
      if (pf_valid && pf_ready) n_issued <= n_issued + 1;
    end
  end

  task_queue #(.W(WORD_W), .DEPTH(4)) u_q (
    .clk, .rst_n, .cap(8'd4), .push, .din(push_addr),
    .pop(pf_valid && pf_ready), .head(pf_addr), .empty(q_empty), .full(q_full),
    .count(q_cnt)
  );
  assign pf_valid = !q_empty;
endmodule
