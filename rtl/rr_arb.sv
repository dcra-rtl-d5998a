// rr_arb: round-robin arbiter (helper).
//
// Grants one of N requesters per cycle, starting the search one past the
// requester granted last; the priority pointer moves only when the grant is
// used (`advance`). A grant that is not used is held the next cycle, so a
// stalled winner keeps its grant and the granted data stays stable. Combinational
// grant, registered pointer, synchronous active-low reset.
module rr_arb #(
  parameter int unsigned N = 4
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic [N-1:0]         req,
  input  logic                 advance,
  output logic [N-1:0]         gnt,
  output logic [$clog2(N)-1:0] gnt_idx,
  output logic                 any
);
  localparam int unsigned IW = (N > 1) ? $clog2(N) : 1;
  logic [IW-1:0] last;
  logic          hold;
  logic [IW-1:0] held;

  always_comb begin
    gnt     = '0;
    gnt_idx = '0;
    any     = 1'b0;
    if (hold && req[held]) begin
      any          = 1'b1;
      gnt[held]    = 1'b1;
      gnt_idx      = held;
    end
    for (int unsigned k = 1; k <= N; k++) begin
      int unsigned i;
      i = (32'(last) + k) % N;
      if (!any && req[i]) begin
        any        = 1'b1;
        gnt[i]     = 1'b1;
        gnt_idx    = IW'(i);
      end
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      last <= IW'(N - 1);
      hold <= 1'b0;
      held <= '0;
    end else begin
      if (advance && any) last <= gnt_idx;
      hold <= any && !advance;
      held <= gnt_idx;
    end
  end
endmodule
