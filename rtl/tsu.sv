// tsu: Task Scheduling Unit, the link between the router and the PU.
//
// DCRA runs programs split into tasks at every pointer indirection; a task
// always runs on the tile that owns the data named by its first parameter.
// The TSU keeps one input queue (IQ) and one output queue (OQ) per task
// type (NUM_TT types):
//  * messages arriving from the router's local port go to IQ[ttype];
//  * when the PU is free the TSU dispatches the head of the IQ with the
//    highest occupancy (ties go to the lower task type), together with that
//    type's table entry so the prefetcher can start; a type whose table
//    marks an OQ it spawns into that is currently full is skipped, which
//    keeps a task from blocking the PU on its first spawn (counted as an
//    OQ hold when nothing else can be dispatched);
//  * tasks the PU spawns go to OQ[ttype]; the TSU drains the OQs round-robin
//    into the router, computing the destination from the first parameter:
//    owner = index >> chunk_log2 (the static, block-wise PGAS layout of the
//    indexed array), x = owner mod 2^x_bits, y = owner >> x_bits.
// The capacities of the queues come from the per-task table (software).
// Interface: all ports valid/ready; a message is dispatched or sent the
// cycle after it is queued at the earliest.
// From the paper: per-type IQs/OQs, scheduling by queue occupancy, routing
// by the first parameter through a static layout, the per-task table with
// two pointers and a streaming bit. The exact priority rule (fullest IQ),
// the block layout with power-of-two chunks and grid width, the OQ-full
// hold and the queue implementation are this design's choices.
module tsu
  import dcra_pkg::*;
#(
  parameter int unsigned QDEPTH = 64
) (
  input  logic       clk,
  input  logic       rst_n,
  input  task_cfg_t  tcfg [NUM_TT],
  input  logic [3:0] x_bits,
  // from the router's local output
  input  logic       rin_valid,
  input  msg_t       rin_msg,
  output logic       rin_ready,
  // to the router's local input
  output logic       rout_valid,
  output msg_t       rout_msg,
  input  logic       rout_ready,
  // spawns from the PU
  input  logic       sp_valid,
  input  tt_t        sp_type,
  input  word_t      sp_arg0,
  input  word_t      sp_arg1,
  output logic       sp_ready,
  // dispatch to the PU
  output logic       ds_valid,
  output tt_t        ds_type,
  output word_t      ds_arg0,
  output word_t      ds_arg1,
  output task_cfg_t  ds_cfg,
  input  logic       ds_ready,
  // status
  output logic [$clog2(QDEPTH+1)-1:0] iq_count [NUM_TT],
  output logic [$clog2(QDEPTH+1)-1:0] oq_count [NUM_TT],
  output logic [31:0] n_dispatched,
  output logic [31:0] n_oq_holds
);
  localparam int unsigned EW = 2 * WORD_W;
  localparam int unsigned CW = $clog2(QDEPTH+1);

  logic [EW-1:0] iq_head [NUM_TT], oq_head [NUM_TT];
  logic          iq_empty[NUM_TT], iq_full[NUM_TT], oq_empty[NUM_TT], oq_full[NUM_TT];
  logic          iq_pop  [NUM_TT], oq_pop  [NUM_TT];
  logic          iq_push [NUM_TT], oq_push [NUM_TT];

  for (genvar t = 0; t < NUM_TT; t++) begin : g_q
    assign iq_push[t] = rin_valid && rin_ready && (rin_msg.ttype == tt_t'(t));
    assign oq_push[t] = sp_valid && sp_ready && (sp_type == tt_t'(t));
    task_queue #(.W(EW), .DEPTH(QDEPTH)) u_iq (
      .clk, .rst_n, .cap(tcfg[t].iq_cap), .push(iq_push[t]),
      .din({rin_msg.arg0, rin_msg.arg1}), .pop(iq_pop[t]), .head(iq_head[t]),
      .empty(iq_empty[t]), .full(iq_full[t]), .count(iq_count[t]));
    task_queue #(.W(EW), .DEPTH(QDEPTH)) u_oq (
      .clk, .rst_n, .cap(tcfg[t].oq_cap), .push(oq_push[t]),
      .din({sp_arg0, sp_arg1}), .pop(oq_pop[t]), .head(oq_head[t]),
      .empty(oq_empty[t]), .full(oq_full[t]), .count(oq_count[t]));
  end

  assign rin_ready = !iq_full[rin_msg.ttype];
  assign sp_ready  = !oq_full[sp_type];

  // ------------------------------------------------ dispatch: fullest IQ
  // A task is eligible only if none of the OQs it may spawn into is full,
  // so a dispatched task can hand over its first spawn without waiting.
  tt_t    sel;
  logic   sel_any, held;
  logic [NUM_TT-1:0] elig;
  always_comb begin
    logic [CW-1:0] best;
    sel = '0; sel_any = 1'b0; best = '0; held = 1'b0;
    for (int t = 0; t < NUM_TT; t++) begin
      elig[t] = !iq_empty[t];
      for (int u = 0; u < NUM_TT; u++)
        if (tcfg[t].spawns[u] && oq_full[u]) elig[t] = 1'b0;
      if (!iq_empty[t] && !elig[t]) held = 1'b1;
    end
    for (int t = 0; t < NUM_TT; t++)
      if (elig[t] && (!sel_any || iq_count[t] > best)) begin
        sel = tt_t'(t); sel_any = 1'b1; best = iq_count[t];
      end
  end
  assign ds_valid = sel_any;
  assign ds_type  = sel;
  assign {ds_arg0, ds_arg1} = iq_head[sel];
  assign ds_cfg   = tcfg[sel];
  always_comb
    for (int t = 0; t < NUM_TT; t++) iq_pop[t] = ds_valid && ds_ready && (sel == tt_t'(t));

  // ------------------------------------------------ send: round-robin OQs
  logic [NUM_TT-1:0] oq_req, oq_gnt;
  logic [TT_W-1:0]   og;
  logic              og_any;
  always_comb for (int t = 0; t < NUM_TT; t++) oq_req[t] = !oq_empty[t];
  rr_arb #(.N(NUM_TT)) u_oarb (
    .clk, .rst_n, .req(oq_req), .advance(rout_ready), .gnt(oq_gnt),
    .gnt_idx(og), .any(og_any));

  always_comb begin
    word_t a0, a1, owner;
    {a0, a1} = oq_head[og];
    owner    = a0 >> tcfg[og].chunk_log2;
    rout_msg.ttype = og;
    rout_msg.arg0  = a0;
    rout_msg.arg1  = a1;
    rout_msg.dst_x = coord_t'(owner & ((word_t'(1) << x_bits) - 1));
    rout_msg.dst_y = coord_t'(owner >> x_bits);
  end
  assign rout_valid = og_any;
  always_comb
    for (int t = 0; t < NUM_TT; t++) oq_pop[t] = oq_gnt[t] && rout_ready;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      n_dispatched <= '0;
      n_oq_holds   <= '0;
    end else begin
      if (ds_valid && ds_ready) n_dispatched <= n_dispatched + 1;
      if (held && !sel_any) n_oq_holds <= n_oq_holds + 1;
    end
  end
endmodule
