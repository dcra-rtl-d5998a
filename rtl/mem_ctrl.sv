// mem_ctrl: the DCRA die's DRAM memory controller (tile side).
//
// When an HBM device is packaged next to the die, every tile's SRAM is
// backed by a private DRAM slice of DRAM_capacity / tiles_per_die (8GB /
// 1024 = 8MB, 2^LPT_LOG2 lines of 512 bits, in the default package). The
// controller splits the tiles into NCH contiguous groups, one per HBM
// channel (8 channels), arbitrates each group round-robin, and forwards the
// line requests with their channel-local line address
// (tile-in-group << LPT_LOG2 | line). Reads are assumed to return in
// order on each channel, so a FIFO of requesting tiles routes each read
// response back; writes (dirty write-backs) are posted.
// When no DRAM is packaged the controller is simply unused (the paper
// treats it as dark silicon).
// Interface: tile side valid/ready requests and a response strobe per tile
// with the channel's data; channel side valid/ready requests and an
// in-order response strobe. The DRAM timing itself (PHY, banks, refresh)
// belongs to the PHY and HBM device and is not modelled here.
// From the paper: on-die controller, 512-bit lines, 8 channels, private
// 1-1 tile slices, physical addressing. Grouping, arbitration and the
// in-order response assumption are this design's choices.
// Synthesis note: each tile's response data port is wired straight to its
// channel's read data (a shared bus; only the valid strobe is per tile), so
// those output bits show up as pass-throughs. That is intended.
module mem_ctrl
  import dcra_pkg::*;
#(
  parameter int unsigned NT       = 1024,
  parameter int unsigned NCH      = 8,
  parameter int unsigned LPT_LOG2 = 17,
  localparam int unsigned TPC     = NT / NCH,
  localparam int unsigned TIW     = (TPC > 1) ? $clog2(TPC) : 1
) (
  input  logic  clk,
  input  logic  rst_n,
  // tile side
  input  logic  t_req_valid [NT],
  input  logic  t_req_we    [NT],
  input  word_t t_req_line  [NT],
  input  line_t t_req_data  [NT],
  output logic  t_req_ready [NT],
  output logic  t_resp_valid[NT],
  output line_t t_resp_data [NT],
  // HBM channel side
  output logic  ch_req_valid [NCH],
  output logic  ch_req_we    [NCH],
  output word_t ch_req_addr  [NCH],
  output line_t ch_req_data  [NCH],
  input  logic  ch_req_ready [NCH],
  input  logic  ch_resp_valid[NCH],
  input  line_t ch_resp_data [NCH],
  output logic [31:0] n_reads,
  output logic [31:0] n_writes
);
  logic [NCH-1:0] rd_fire, wr_fire;

  for (genvar c = 0; c < NCH; c++) begin : g_ch
    logic [TPC-1:0] req, gnt;
    logic [TIW-1:0] g;
    logic           any, q_empty, q_full, fire;
    logic [TIW-1:0] q_head;
    logic [$clog2(TPC+1)-1:0] q_cnt;

    for (genvar i = 0; i < TPC; i++) begin : g_t
      assign req[i] = t_req_valid[c*TPC+i] && !(q_full && !t_req_we[c*TPC+i]);
      assign t_req_ready[c*TPC+i]  = gnt[i] && ch_req_ready[c];
      assign t_resp_valid[c*TPC+i] = ch_resp_valid[c] && !q_empty && (q_head == TIW'(i));
      assign t_resp_data[c*TPC+i]  = ch_resp_data[c];
    end

    rr_arb #(.N(TPC)) u_arb (
      .clk, .rst_n, .req, .advance(ch_req_ready[c]), .gnt, .gnt_idx(g), .any);

    assign ch_req_valid[c] = any;
    assign ch_req_we[c]    = t_req_we[c*TPC + 32'(g)];
    assign ch_req_data[c]  = t_req_data[c*TPC + 32'(g)];
    assign ch_req_addr[c]  = (word_t'(g) << LPT_LOG2)
                           | (t_req_line[c*TPC + 32'(g)] & ((word_t'(1) << LPT_LOG2) - 1));
    assign fire = any && ch_req_ready[c];
    assign rd_fire[c] = fire && !ch_req_we[c];
    assign wr_fire[c] = fire &&  ch_req_we[c];

    // tiles waiting for read data, in request order
    task_queue #(.W(TIW), .DEPTH(TPC)) u_pend (
      .clk, .rst_n, .cap(8'(TPC)), .push(rd_fire[c]), .din(g),
      .pop(ch_resp_valid[c] && !q_empty), .head(q_head), .empty(q_empty),
      .full(q_full), .count(q_cnt));
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      n_reads <= '0; n_writes <= '0;
    end else begin
      n_reads  <= n_reads  + 32'($countones(rd_fire));
      n_writes <= n_writes + 32'($countones(wr_fire));
    end
  end
endmodule
