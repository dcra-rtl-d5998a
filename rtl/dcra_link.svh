// dcra_link.svh: one unidirectional valid/ready link between two router
// ports of the die's port arrays (tout_* = router outputs, tin_* = router
// inputs), indexed [tile][port-1].
`ifndef DCRA_LINK_SVH
`define DCRA_LINK_SVH
`define DCRA_LINK(ST, SP, DT, DP) \
  assign tin_valid[DT][DP]  = tout_valid[ST][SP]; \
  assign tin_msg[DT][DP]    = tout_msg[ST][SP];   \
  assign tout_ready[ST][SP] = tin_ready[DT][DP];
`endif
