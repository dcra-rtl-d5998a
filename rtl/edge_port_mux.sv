// edge_port_mux: one runtime-reconfigurable die-edge port pair.
//
// DCRA folds each ring of its torus so that logical neighbours sit two
// columns apart and the wrap-around link is short. At a die edge the ring
// has two ends, A (the first-half tile) and B (the mirror-half tile next to
// it). Software chooses with `wrap` whether the ring closes here, A and B
// being linked to each other (the die ends the torus in this direction), or
// whether A and B are linked to the off-die channels, which lead to the
// next die, to an I/O die, or to nothing (then the grid is a mesh in this
// direction). The same cell serves the tile-NoC and the die-NoC.
// Interface: valid/ready channels; purely combinational steering, no
// added latency. `wraps` counts the messages that used the local wrap link.
// From the paper (Fig. 2): the reconfigurable edge ports and the two
// choices. The single `wrap` bit per edge is this design's encoding.
module edge_port_mux
  import dcra_pkg::*;
(
  input  logic  clk,
  input  logic  rst_n,
  input  logic  wrap,
  // ring end A: router output / router input
  input  logic  a_out_valid, input  msg_t a_out_msg, output logic a_out_ready,
  output logic  a_in_valid,  output msg_t a_in_msg,  input  logic a_in_ready,
  // ring end B
  input  logic  b_out_valid, input  msg_t b_out_msg, output logic b_out_ready,
  output logic  b_in_valid,  output msg_t b_in_msg,  input  logic b_in_ready,
  // off-die channels of A and B: tx leaves the die, rx enters it
  output logic  offa_tx_valid, output msg_t offa_tx_msg, input  logic offa_tx_ready,
  input  logic  offa_rx_valid, input  msg_t offa_rx_msg, output logic offa_rx_ready,
  output logic  offb_tx_valid, output msg_t offb_tx_msg, input  logic offb_tx_ready,
  input  logic  offb_rx_valid, input  msg_t offb_rx_msg, output logic offb_rx_ready,
  output logic [31:0] wraps
);
  always_comb begin
    if (wrap) begin
      b_in_valid    = a_out_valid;  b_in_msg = a_out_msg;  a_out_ready = b_in_ready;
      a_in_valid    = b_out_valid;  a_in_msg = b_out_msg;  b_out_ready = a_in_ready;
      offa_tx_valid = 1'b0;         offa_tx_msg = '0;      offa_rx_ready = 1'b0;
      offb_tx_valid = 1'b0;         offb_tx_msg = '0;      offb_rx_ready = 1'b0;
    end else begin
      offa_tx_valid = a_out_valid;  offa_tx_msg = a_out_msg;  a_out_ready = offa_tx_ready;
      a_in_valid    = offa_rx_valid; a_in_msg = offa_rx_msg;  offa_rx_ready = a_in_ready;
      offb_tx_valid = b_out_valid;  offb_tx_msg = b_out_msg;  b_out_ready = offb_tx_ready;
      b_in_valid    = offb_rx_valid; b_in_msg = offb_rx_msg;  offb_rx_ready = b_in_ready;
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n) wraps <= '0;
    else if (wrap)
      wraps <= wraps + 32'(a_out_valid && b_in_ready) + 32'(b_out_valid && a_in_ready);
  end
endmodule
