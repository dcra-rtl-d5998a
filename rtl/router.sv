// router: one node of DCRA's tile-NoC, and of the die-NoC where present.
//
// Every tile has a radix-5 router (local, +x, -x, +y, -y). Routers that also
// sit on the die-NoC are radix-9: four more ports whose links skip a whole
// die (DIE_HOP logical positions) per hop. The topology is not fixed in
// silicon: software writes the router's logical position and the size of
// the grid it belongs to, and per dimension whether the tile-NoC and the
// die-NoC wrap around (torus) or not (mesh). The die-level wiring of the
// folded rings lives in dcra_die / edge_port_mux; this module only decides
// where each message goes.
//
// Routing (this design's choice; the paper does not give one): dimension
// order, x first. In a torus dimension the shorter way round is taken, in
// a mesh the direct way. When the remaining distance in that direction is
// at least DIE_HOP and this router has die-NoC ports in that dimension, the
// message takes the die-NoC hop, unless that hop would cross the end of a
// die-NoC that is configured as a mesh. Every hop shortens the remaining
// distance, so a message always arrives.
//
// Microarchitecture: a two-entry FIFO at every input, a round-robin arbiter
// at every output, single-flit messages (a whole msg_t per link cycle).
// Links use valid/ready; a message moves when both are high. One cycle per
// hop. Reset is synchronous, active low.
// Synthesis note: in a radix-5 router `die_hops` is constant zero, since
// there are no die-NoC ports to count.
module router
  import dcra_pkg::*;
#(
  parameter bit          HAS_DX  = 1'b0,
  parameter bit          HAS_DY  = 1'b0,
  parameter int unsigned DIE_HOP = 16,
  parameter int unsigned IBUF    = 2,
  localparam int unsigned NP     = (HAS_DX || HAS_DY) ? 9 : 5
) (
  input  logic       clk,
  input  logic       rst_n,
  input  route_cfg_t cfg,
  input  logic       in_valid [NP],
  input  msg_t       in_msg   [NP],
  output logic       in_ready [NP],
  output logic       out_valid[NP],
  output msg_t       out_msg  [NP],
  input  logic       out_ready[NP],
  // Number of messages that left through a die-NoC port (for statistics).
  output logic [31:0] die_hops
);
  localparam int unsigned MW = $bits(msg_t);
  localparam int unsigned PW = $clog2(NP);

  // ---------------------------------------------------------------- routing
  function automatic logic [3:0] dim_route(
      input coord_t dst, input coord_t my, input coord_t size,
      input logic torus, input logic has_d, input logic die_en,
      input logic die_torus, input logic [3:0] p_plus, input logic [3:0] p_minus,
      input logic [3:0] pd_plus, input logic [3:0] pd_minus);
    logic [COORD_W:0] dp, dm, rem, hop;
    logic             plus;
    hop = (COORD_W+1)'(DIE_HOP);
    dp  = (dst >= my) ? {1'b0, dst} - {1'b0, my} : {1'b0, dst} + {1'b0, size} - {1'b0, my};
    dm  = {1'b0, size} - dp;
    plus = torus ? (dp <= dm) : (dst > my);
    rem  = plus ? dp : dm;
    if (has_d && die_en && rem >= hop) begin
      if (plus && (die_torus || ({1'b0, my} + hop < {1'b0, size}))) return pd_plus;
      if (!plus && (die_torus || ({1'b0, my} >= hop)))            return pd_minus;
    end
    return plus ? p_plus : p_minus;
  endfunction

  function automatic logic [3:0] route(input msg_t m, input route_cfg_t c);
    if (m.dst_x != c.my_x)
      return dim_route(m.dst_x, c.my_x, c.size_x, c.torus_x, HAS_DX, c.die_en_x,
                       c.die_torus_x, P_XP, P_XM, P_DXP, P_DXM);
    if (m.dst_y != c.my_y)
      return dim_route(m.dst_y, c.my_y, c.size_y, c.torus_y, HAS_DY, c.die_en_y,
                       c.die_torus_y, P_YP, P_YM, P_DYP, P_DYM);
    return P_L;
  endfunction

  // ---------------------------------------------------------------- inputs
  logic [MW-1:0]   head_bits [NP];
  msg_t            head      [NP];
  logic            empty     [NP];
  logic            full      [NP];
  logic            pop       [NP];
  logic [3:0]      dest      [NP];

  for (genvar i = 0; i < NP; i++) begin : g_in
    logic [$clog2(IBUF+1)-1:0] cnt;
    task_queue #(.W(MW), .DEPTH(IBUF)) u_buf (
      .clk, .rst_n, .cap(8'(IBUF)),
      .push(in_valid[i] && in_ready[i]), .din(MW'(in_msg[i])),
      .pop(pop[i]), .head(head_bits[i]), .empty(empty[i]), .full(full[i]),
      .count(cnt)
    );
    assign in_ready[i] = !full[i];
    assign head[i]     = msg_t'(head_bits[i]);
    assign dest[i]     = route(head[i], cfg);
  end

  // ---------------------------------------------------------------- outputs
  logic [NP-1:0] req  [NP];   // req[o][i]: input i wants output o
  logic [NP-1:0] gnt  [NP];
  logic [PW-1:0] gidx [NP];
  logic          gany [NP];

  for (genvar o = 0; o < NP; o++) begin : g_out
    always_comb
      for (int i = 0; i < NP; i++)
        req[o][i] = !empty[i] && (32'(dest[i]) == o);
    rr_arb #(.N(NP)) u_arb (
      .clk, .rst_n, .req(req[o]), .advance(out_ready[o]),
      .gnt(gnt[o]), .gnt_idx(gidx[o]), .any(gany[o])
    );
    assign out_valid[o] = gany[o];
    assign out_msg[o]   = head[gidx[o]];
  end

  // An input is popped when the output it requested accepts its message.
  always_comb
    for (int i = 0; i < NP; i++) begin
      pop[i] = 1'b0;
      for (int o = 0; o < NP; o++)
        if (gnt[o][i] && out_ready[o]) pop[i] = 1'b1;
    end

  always_ff @(posedge clk) begin
    if (!rst_n) die_hops <= '0;
    else if (NP == 9) begin
      int unsigned n;
      n = 0;
      for (int o = 5; o < NP; o++) if (out_valid[o] && out_ready[o]) n++;
      die_hops <= die_hops + n;
    end
  end

  // A valid output must hold its message until it is taken.
  for (genvar o = 0; o < NP; o++) begin : g_chk
    a_stable: assert property (@(posedge clk) disable iff (!rst_n)
      out_valid[o] && !out_ready[o] |=> out_valid[o] && $stable(out_msg[o]));
  end
endmodule
