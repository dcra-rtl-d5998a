// dcra_die: one DCRA chiplet, the top of this design.
//
// A die is a TX x TY grid of tiles (32x32 in DCRA's default) connected by
// two NoCs whose topology is set by software:
//  * the tile-NoC links every tile to its logical neighbours. Each ring of
//    it is folded: physical column 2k holds the k-th tile of the first half
//    of the ring, column 2k+1 the k-th tile of the mirror half, so logical
//    neighbours are two columns apart and every link is short. At each die
//    edge the two ring ends meet in an edge_port_mux: software either closes
//    the ring there (the die ends a torus in that direction) or hands both
//    ends to the off-die channels, towards the next die, an I/O die, or
//    nothing (a mesh);
//  * the die-NoC links the routers of columns 1 and TX-2 (rows 1 and TY-2
//    for y), which are radix-9, to the same routers of the neighbouring
//    dies: one die-NoC hop advances TX/2 logical positions, i.e. a whole
//    die. It has its own edge_port_muxes, so it can be a torus or a mesh
//    independently of the tile-NoC.
// With several dies side by side, the off-die channels of one die's east
// edge connect to the same-numbered channels of the next die's west edge
// (likewise north to south), and the rings span all of them.
//
// The die also holds the DRAM memory controller that serves the tiles'
// line fills over NCH HBM channels. Not part of this module (their design
// is not available): the PUs (their task and memory ports are die ports),
// the die-to-die PHYs (off-die channels are plain valid/ready ports), the
// HBM device and the I/O dies.
//
// Configuration: cfg_tile selects a tile (its register map is in dcra_pkg)
// or, with cfg_tile = all ones, the die's edge register:
// bit 0/1/2/3 close the tile-NoC at the west/east/south/north edge,
// bit 4/5/6/7 close the die-NoC at the same edges.
// Off-die channel index per edge position: 0 tile-NoC end A (first-half
// tile), 1 tile-NoC end B (mirror tile), 2 die-NoC end A, 3 die-NoC end B.
// From the paper: tile grid, folded torus, radix-5 and radix-9 routers,
// the two NoCs and their runtime-reconfigurable edge ports (Fig. 2), the
// on-die memory controller. The placement of the die-NoC routers follows
// Fig. 2 (Tile 63 and Tile 7, next to the die edge, carry the die-NoC
// ports); the channel numbering and register encodings are this design's.
module dcra_die
  import dcra_pkg::*;
#(
  parameter int unsigned TX       = 32,
  parameter int unsigned TY       = 32,
  parameter int unsigned SRAM_KB  = 512,
  parameter int unsigned QDEPTH   = 64,
  parameter int unsigned NCH      = 8,
  parameter int unsigned LPT_LOG2 = 17,
  localparam int unsigned NT      = TX * TY
) (
  input  logic        clk,
  input  logic        rst_n,
  // configuration bus
  input  logic        cfg_we,
  input  logic [15:0] cfg_tile,
  input  logic [7:0]  cfg_addr,
  input  word_t       cfg_data,
  // off-die channels: east/west per row, north/south per column
  output logic  e_tx_valid [TY][4], output msg_t e_tx_msg [TY][4], input  logic e_tx_ready [TY][4],
  input  logic  e_rx_valid [TY][4], input  msg_t e_rx_msg [TY][4], output logic e_rx_ready [TY][4],
  output logic  w_tx_valid [TY][4], output msg_t w_tx_msg [TY][4], input  logic w_tx_ready [TY][4],
  input  logic  w_rx_valid [TY][4], input  msg_t w_rx_msg [TY][4], output logic w_rx_ready [TY][4],
  output logic  n_tx_valid [TX][4], output msg_t n_tx_msg [TX][4], input  logic n_tx_ready [TX][4],
  input  logic  n_rx_valid [TX][4], input  msg_t n_rx_msg [TX][4], output logic n_rx_ready [TX][4],
  output logic  s_tx_valid [TX][4], output msg_t s_tx_msg [TX][4], input  logic s_tx_ready [TX][4],
  input  logic  s_rx_valid [TX][4], input  msg_t s_rx_msg [TX][4], output logic s_rx_ready [TX][4],
  // PU ports of every tile (index = y*TX + x, physical position)
  output logic  ds_valid [NT],
  output tt_t   ds_type  [NT],
  output word_t ds_arg0  [NT],
  output word_t ds_arg1  [NT],
  input  logic  ds_ready [NT],
  input  logic  task_done[NT],
  input  logic  sp_valid [NT],
  input  tt_t   sp_type  [NT],
  input  word_t sp_arg0  [NT],
  input  word_t sp_arg1  [NT],
  output logic  sp_ready [NT],
  input  logic  pu_req_valid [NT],
  input  logic  pu_req_we    [NT],
  input  word_t pu_req_addr  [NT],
  input  word_t pu_req_wdata [NT],
  output logic  pu_req_ready [NT],
  output logic  pu_resp_valid[NT],
  output word_t pu_resp_rdata[NT],
  // HBM channels
  output logic  ch_req_valid [NCH],
  output logic  ch_req_we    [NCH],
  output word_t ch_req_addr  [NCH],
  output line_t ch_req_data  [NCH],
  input  logic  ch_req_ready [NCH],
  input  logic  ch_resp_valid[NCH],
  input  line_t ch_resp_data [NCH],
  // statistics
  output tile_stats_t stats [NT],
  output logic [31:0] n_wraps,
  output logic [31:0] n_dram_reads,
  output logic [31:0] n_dram_writes
);
`include "dcra_link.svh"

  localparam int unsigned HX = TX / 2;
  localparam int unsigned HY = TY / 2;

  // router port index - 1
  localparam int unsigned XP = 0, XM = 1, YP = 2, YM = 3, DXP = 4, DXM = 5, DYP = 6, DYM = 7;

  logic tin_valid [NT][8], tin_ready [NT][8], tout_valid [NT][8], tout_ready [NT][8];
  msg_t tin_msg   [NT][8], tout_msg  [NT][8];

  // ------------------------------------------------ die edge register
  logic [7:0] edge_cfg;
  always_ff @(posedge clk) begin
    if (!rst_n) edge_cfg <= '0;
    else if (cfg_we && cfg_tile == 16'hFFFF) edge_cfg <= cfg_data[7:0];
  end

  // ------------------------------------------------ tiles
  logic  m_req_valid [NT], m_req_we [NT], m_req_ready [NT], m_resp_valid [NT];
  word_t m_req_line  [NT];
  line_t m_req_data  [NT], m_resp_data [NT];

  for (genvar py = 0; py < TY; py++) begin : g_row
    for (genvar px = 0; px < TX; px++) begin : g_col
      localparam int unsigned T   = py * TX + px;
      localparam bit          HDX = (px == 1) || (px == TX - 2);
      localparam bit          HDY = (py == 1) || (py == TY - 2);
      localparam int unsigned NP  = (HDX || HDY) ? 9 : 5;

      logic iv [NP-1], ir [NP-1], ov [NP-1], orr [NP-1];
      msg_t im [NP-1], om [NP-1];
      for (genvar p = 0; p < 8; p++) begin : g_p
        if (p < NP - 1) begin : g_used
          assign iv[p] = tin_valid[T][p];
          assign im[p] = tin_msg[T][p];
          assign tin_ready[T][p]  = ir[p];
          assign tout_valid[T][p] = ov[p];
          assign tout_msg[T][p]   = om[p];
          assign orr[p] = tout_ready[T][p];
        end else begin : g_none
          assign tin_ready[T][p]  = 1'b0;
          assign tout_valid[T][p] = 1'b0;
          assign tout_msg[T][p]   = '0;
        end
      end

      tile #(.HAS_DX(HDX), .HAS_DY(HDY), .DIE_HOP(HX), .SRAM_KB(SRAM_KB),
             .QDEPTH(QDEPTH)) u_tile (
        .clk, .rst_n,
        .cfg_we(cfg_we && cfg_tile == 16'(T)), .cfg_addr, .cfg_data,
        .in_valid(iv), .in_msg(im), .in_ready(ir),
        .out_valid(ov), .out_msg(om), .out_ready(orr),
        .ds_valid(ds_valid[T]), .ds_type(ds_type[T]), .ds_arg0(ds_arg0[T]),
        .ds_arg1(ds_arg1[T]), .ds_ready(ds_ready[T]), .task_done(task_done[T]),
        .sp_valid(sp_valid[T]), .sp_type(sp_type[T]), .sp_arg0(sp_arg0[T]),
        .sp_arg1(sp_arg1[T]), .sp_ready(sp_ready[T]),
        .pu_req_valid(pu_req_valid[T]), .pu_req_we(pu_req_we[T]),
        .pu_req_addr(pu_req_addr[T]), .pu_req_wdata(pu_req_wdata[T]),
        .pu_req_ready(pu_req_ready[T]), .pu_resp_valid(pu_resp_valid[T]),
        .pu_resp_rdata(pu_resp_rdata[T]),
        .mem_req_valid(m_req_valid[T]), .mem_req_we(m_req_we[T]),
        .mem_req_line(m_req_line[T]), .mem_req_data(m_req_data[T]),
        .mem_req_ready(m_req_ready[T]), .mem_resp_valid(m_resp_valid[T]),
        .mem_resp_data(m_resp_data[T]), .stats(stats[T]));

      // ---- tile-NoC links inside the die, x (folded ring)
      if (px % 2 == 0 && px / 2 < HX - 1) begin : g_xf
        `DCRA_LINK(T, XP, T + 2, XM)
        `DCRA_LINK(T + 2, XM, T, XP)
      end
      if (px % 2 == 1 && px / 2 > 0) begin : g_xm
        `DCRA_LINK(T, XP, T - 2, XM)
        `DCRA_LINK(T - 2, XM, T, XP)
      end
      // ---- tile-NoC links inside the die, y
      if (py % 2 == 0 && py / 2 < HY - 1) begin : g_yf
        `DCRA_LINK(T, YP, T + 2*TX, YM)
        `DCRA_LINK(T + 2*TX, YM, T, YP)
      end
      if (py % 2 == 1 && py / 2 > 0) begin : g_ym
        `DCRA_LINK(T, YP, T - 2*TX, YM)
        `DCRA_LINK(T - 2*TX, YM, T, YP)
      end
      // ---- die-NoC ports of a router that only has them in the other dimension
      if (HDX && !HDY) begin : g_ny
        assign tin_valid[T][DYP] = 1'b0; assign tin_msg[T][DYP] = '0; assign tout_ready[T][DYP] = 1'b0;
        assign tin_valid[T][DYM] = 1'b0; assign tin_msg[T][DYM] = '0; assign tout_ready[T][DYM] = 1'b0;
      end
      if (HDY && !HDX) begin : g_nx
        assign tin_valid[T][DXP] = 1'b0; assign tin_msg[T][DXP] = '0; assign tout_ready[T][DXP] = 1'b0;
        assign tin_valid[T][DXM] = 1'b0; assign tin_msg[T][DXM] = '0; assign tout_ready[T][DXM] = 1'b0;
      end
      if (!HDX && !HDY) begin : g_nd
        for (genvar p = 4; p < 8; p++) begin : g_p
          assign tin_valid[T][p] = 1'b0; assign tin_msg[T][p] = '0; assign tout_ready[T][p] = 1'b0;
        end
      end
    end
  end

  // ------------------------------------------------ reconfigurable edges
  // Ring ends: x: first-half end tile at column TX-2 (east) / 0 (west),
  // mirror end tile at column TX-1 (east) / 1 (west). Die-NoC: the nodes
  // at column TX-2 (F) and column 1 (M).
  logic [31:0] wr_e [TY][2], wr_w [TY][2], wr_n [TX][2], wr_s [TX][2];

  for (genvar py = 0; py < TY; py++) begin : g_xedge
    localparam int unsigned R = py * TX;
    edge_port_mux u_e_tile (
      .clk, .rst_n, .wrap(edge_cfg[1]),
      .a_out_valid(tout_valid[R+TX-2][XP]), .a_out_msg(tout_msg[R+TX-2][XP]), .a_out_ready(tout_ready[R+TX-2][XP]),
      .a_in_valid(tin_valid[R+TX-2][XP]),   .a_in_msg(tin_msg[R+TX-2][XP]),   .a_in_ready(tin_ready[R+TX-2][XP]),
      .b_out_valid(tout_valid[R+TX-1][XM]), .b_out_msg(tout_msg[R+TX-1][XM]), .b_out_ready(tout_ready[R+TX-1][XM]),
      .b_in_valid(tin_valid[R+TX-1][XM]),   .b_in_msg(tin_msg[R+TX-1][XM]),   .b_in_ready(tin_ready[R+TX-1][XM]),
      .offa_tx_valid(e_tx_valid[py][0]), .offa_tx_msg(e_tx_msg[py][0]), .offa_tx_ready(e_tx_ready[py][0]),
      .offa_rx_valid(e_rx_valid[py][0]), .offa_rx_msg(e_rx_msg[py][0]), .offa_rx_ready(e_rx_ready[py][0]),
      .offb_tx_valid(e_tx_valid[py][1]), .offb_tx_msg(e_tx_msg[py][1]), .offb_tx_ready(e_tx_ready[py][1]),
      .offb_rx_valid(e_rx_valid[py][1]), .offb_rx_msg(e_rx_msg[py][1]), .offb_rx_ready(e_rx_ready[py][1]),
      .wraps(wr_e[py][0]));
    edge_port_mux u_w_tile (
      .clk, .rst_n, .wrap(edge_cfg[0]),
      .a_out_valid(tout_valid[R][XM]),   .a_out_msg(tout_msg[R][XM]),   .a_out_ready(tout_ready[R][XM]),
      .a_in_valid(tin_valid[R][XM]),     .a_in_msg(tin_msg[R][XM]),     .a_in_ready(tin_ready[R][XM]),
      .b_out_valid(tout_valid[R+1][XP]), .b_out_msg(tout_msg[R+1][XP]), .b_out_ready(tout_ready[R+1][XP]),
      .b_in_valid(tin_valid[R+1][XP]),   .b_in_msg(tin_msg[R+1][XP]),   .b_in_ready(tin_ready[R+1][XP]),
      .offa_tx_valid(w_tx_valid[py][0]), .offa_tx_msg(w_tx_msg[py][0]), .offa_tx_ready(w_tx_ready[py][0]),
      .offa_rx_valid(w_rx_valid[py][0]), .offa_rx_msg(w_rx_msg[py][0]), .offa_rx_ready(w_rx_ready[py][0]),
      .offb_tx_valid(w_tx_valid[py][1]), .offb_tx_msg(w_tx_msg[py][1]), .offb_tx_ready(w_tx_ready[py][1]),
      .offb_rx_valid(w_rx_valid[py][1]), .offb_rx_msg(w_rx_msg[py][1]), .offb_rx_ready(w_rx_ready[py][1]),
      .wraps(wr_w[py][0]));
    edge_port_mux u_e_die (
      .clk, .rst_n, .wrap(edge_cfg[5]),
      .a_out_valid(tout_valid[R+TX-2][DXP]), .a_out_msg(tout_msg[R+TX-2][DXP]), .a_out_ready(tout_ready[R+TX-2][DXP]),
      .a_in_valid(tin_valid[R+TX-2][DXP]),   .a_in_msg(tin_msg[R+TX-2][DXP]),   .a_in_ready(tin_ready[R+TX-2][DXP]),
      .b_out_valid(tout_valid[R+1][DXM]),    .b_out_msg(tout_msg[R+1][DXM]),    .b_out_ready(tout_ready[R+1][DXM]),
      .b_in_valid(tin_valid[R+1][DXM]),      .b_in_msg(tin_msg[R+1][DXM]),      .b_in_ready(tin_ready[R+1][DXM]),
      .offa_tx_valid(e_tx_valid[py][2]), .offa_tx_msg(e_tx_msg[py][2]), .offa_tx_ready(e_tx_ready[py][2]),
      .offa_rx_valid(e_rx_valid[py][2]), .offa_rx_msg(e_rx_msg[py][2]), .offa_rx_ready(e_rx_ready[py][2]),
      .offb_tx_valid(e_tx_valid[py][3]), .offb_tx_msg(e_tx_msg[py][3]), .offb_tx_ready(e_tx_ready[py][3]),
      .offb_rx_valid(e_rx_valid[py][3]), .offb_rx_msg(e_rx_msg[py][3]), .offb_rx_ready(e_rx_ready[py][3]),
      .wraps(wr_e[py][1]));
    edge_port_mux u_w_die (
      .clk, .rst_n, .wrap(edge_cfg[4]),
      .a_out_valid(tout_valid[R+TX-2][DXM]), .a_out_msg(tout_msg[R+TX-2][DXM]), .a_out_ready(tout_ready[R+TX-2][DXM]),
      .a_in_valid(tin_valid[R+TX-2][DXM]),   .a_in_msg(tin_msg[R+TX-2][DXM]),   .a_in_ready(tin_ready[R+TX-2][DXM]),
      .b_out_valid(tout_valid[R+1][DXP]),    .b_out_msg(tout_msg[R+1][DXP]),    .b_out_ready(tout_ready[R+1][DXP]),
      .b_in_valid(tin_valid[R+1][DXP]),      .b_in_msg(tin_msg[R+1][DXP]),      .b_in_ready(tin_ready[R+1][DXP]),
      .offa_tx_valid(w_tx_valid[py][2]), .offa_tx_msg(w_tx_msg[py][2]), .offa_tx_ready(w_tx_ready[py][2]),
      .offa_rx_valid(w_rx_valid[py][2]), .offa_rx_msg(w_rx_msg[py][2]), .offa_rx_ready(w_rx_ready[py][2]),
      .offb_tx_valid(w_tx_valid[py][3]), .offb_tx_msg(w_tx_msg[py][3]), .offb_tx_ready(w_tx_ready[py][3]),
      .offb_rx_valid(w_rx_valid[py][3]), .offb_rx_msg(w_rx_msg[py][3]), .offb_rx_ready(w_rx_ready[py][3]),
      .wraps(wr_w[py][1]));
  end

  for (genvar px = 0; px < TX; px++) begin : g_yedge
    localparam int unsigned C  = px;
    localparam int unsigned RN = (TY - 2) * TX;   // row TY-2
    localparam int unsigned RM = (TY - 1) * TX;   // row TY-1
    edge_port_mux u_n_tile (
      .clk, .rst_n, .wrap(edge_cfg[3]),
      .a_out_valid(tout_valid[RN+C][YP]), .a_out_msg(tout_msg[RN+C][YP]), .a_out_ready(tout_ready[RN+C][YP]),
      .a_in_valid(tin_valid[RN+C][YP]),   .a_in_msg(tin_msg[RN+C][YP]),   .a_in_ready(tin_ready[RN+C][YP]),
      .b_out_valid(tout_valid[RM+C][YM]), .b_out_msg(tout_msg[RM+C][YM]), .b_out_ready(tout_ready[RM+C][YM]),
      .b_in_valid(tin_valid[RM+C][YM]),   .b_in_msg(tin_msg[RM+C][YM]),   .b_in_ready(tin_ready[RM+C][YM]),
      .offa_tx_valid(n_tx_valid[px][0]), .offa_tx_msg(n_tx_msg[px][0]), .offa_tx_ready(n_tx_ready[px][0]),
      .offa_rx_valid(n_rx_valid[px][0]), .offa_rx_msg(n_rx_msg[px][0]), .offa_rx_ready(n_rx_ready[px][0]),
      .offb_tx_valid(n_tx_valid[px][1]), .offb_tx_msg(n_tx_msg[px][1]), .offb_tx_ready(n_tx_ready[px][1]),
      .offb_rx_valid(n_rx_valid[px][1]), .offb_rx_msg(n_rx_msg[px][1]), .offb_rx_ready(n_rx_ready[px][1]),
      .wraps(wr_n[px][0]));
    edge_port_mux u_s_tile (
      .clk, .rst_n, .wrap(edge_cfg[2]),
      .a_out_valid(tout_valid[C][YM]),    .a_out_msg(tout_msg[C][YM]),    .a_out_ready(tout_ready[C][YM]),
      .a_in_valid(tin_valid[C][YM]),      .a_in_msg(tin_msg[C][YM]),      .a_in_ready(tin_ready[C][YM]),
      .b_out_valid(tout_valid[TX+C][YP]), .b_out_msg(tout_msg[TX+C][YP]), .b_out_ready(tout_ready[TX+C][YP]),
      .b_in_valid(tin_valid[TX+C][YP]),   .b_in_msg(tin_msg[TX+C][YP]),   .b_in_ready(tin_ready[TX+C][YP]),
      .offa_tx_valid(s_tx_valid[px][0]), .offa_tx_msg(s_tx_msg[px][0]), .offa_tx_ready(s_tx_ready[px][0]),
      .offa_rx_valid(s_rx_valid[px][0]), .offa_rx_msg(s_rx_msg[px][0]), .offa_rx_ready(s_rx_ready[px][0]),
      .offb_tx_valid(s_tx_valid[px][1]), .offb_tx_msg(s_tx_msg[px][1]), .offb_tx_ready(s_tx_ready[px][1]),
      .offb_rx_valid(s_rx_valid[px][1]), .offb_rx_msg(s_rx_msg[px][1]), .offb_rx_ready(s_rx_ready[px][1]),
      .wraps(wr_s[px][0]));
    edge_port_mux u_n_die (
      .clk, .rst_n, .wrap(edge_cfg[7]),
      .a_out_valid(tout_valid[RN+C][DYP]), .a_out_msg(tout_msg[RN+C][DYP]), .a_out_ready(tout_ready[RN+C][DYP]),
      .a_in_valid(tin_valid[RN+C][DYP]),   .a_in_msg(tin_msg[RN+C][DYP]),   .a_in_ready(tin_ready[RN+C][DYP]),
      .b_out_valid(tout_valid[TX+C][DYM]), .b_out_msg(tout_msg[TX+C][DYM]), .b_out_ready(tout_ready[TX+C][DYM]),
      .b_in_valid(tin_valid[TX+C][DYM]),   .b_in_msg(tin_msg[TX+C][DYM]),   .b_in_ready(tin_ready[TX+C][DYM]),
      .offa_tx_valid(n_tx_valid[px][2]), .offa_tx_msg(n_tx_msg[px][2]), .offa_tx_ready(n_tx_ready[px][2]),
      .offa_rx_valid(n_rx_valid[px][2]), .offa_rx_msg(n_rx_msg[px][2]), .offa_rx_ready(n_rx_ready[px][2]),
      .offb_tx_valid(n_tx_valid[px][3]), .offb_tx_msg(n_tx_msg[px][3]), .offb_tx_ready(n_tx_ready[px][3]),
      .offb_rx_valid(n_rx_valid[px][3]), .offb_rx_msg(n_rx_msg[px][3]), .offb_rx_ready(n_rx_ready[px][3]),
      .wraps(wr_n[px][1]));
    edge_port_mux u_s_die (
      .clk, .rst_n, .wrap(edge_cfg[6]),
      .a_out_valid(tout_valid[RN+C][DYM]), .a_out_msg(tout_msg[RN+C][DYM]), .a_out_ready(tout_ready[RN+C][DYM]),
      .a_in_valid(tin_valid[RN+C][DYM]),   .a_in_msg(tin_msg[RN+C][DYM]),   .a_in_ready(tin_ready[RN+C][DYM]),
      .b_out_valid(tout_valid[TX+C][DYP]), .b_out_msg(tout_msg[TX+C][DYP]), .b_out_ready(tout_ready[TX+C][DYP]),
      .b_in_valid(tin_valid[TX+C][DYP]),   .b_in_msg(tin_msg[TX+C][DYP]),   .b_in_ready(tin_ready[TX+C][DYP]),
      .offa_tx_valid(s_tx_valid[px][2]), .offa_tx_msg(s_tx_msg[px][2]), .offa_tx_ready(s_tx_ready[px][2]),
      .offa_rx_valid(s_rx_valid[px][2]), .offa_rx_msg(s_rx_msg[px][2]), .offa_rx_ready(s_rx_ready[px][2]),
      .offb_tx_valid(s_tx_valid[px][3]), .offb_tx_msg(s_tx_msg[px][3]), .offb_tx_ready(s_tx_ready[px][3]),
      .offb_rx_valid(s_rx_valid[px][3]), .offb_rx_msg(s_rx_msg[px][3]), .offb_rx_ready(s_rx_ready[px][3]),
      .wraps(wr_s[px][1]));
  end

  always_comb begin
    n_wraps = '0;
    for (int r = 0; r < TY; r++) n_wraps += wr_e[r][0] + wr_e[r][1] + wr_w[r][0] + wr_w[r][1];
    for (int c = 0; c < TX; c++) n_wraps += wr_n[c][0] + wr_n[c][1] + wr_s[c][0] + wr_s[c][1];
  end

  // ------------------------------------------------ memory controller
  mem_ctrl #(.NT(NT), .NCH(NCH), .LPT_LOG2(LPT_LOG2)) u_mc (
    .clk, .rst_n,
    .t_req_valid(m_req_valid), .t_req_we(m_req_we), .t_req_line(m_req_line),
    .t_req_data(m_req_data), .t_req_ready(m_req_ready),
    .t_resp_valid(m_resp_valid), .t_resp_data(m_resp_data),
    .ch_req_valid, .ch_req_we, .ch_req_addr, .ch_req_data, .ch_req_ready,
    .ch_resp_valid, .ch_resp_data,
    .n_reads(n_dram_reads), .n_writes(n_dram_writes));

  initial if (TX != TY || TX % 4 != 0)
    $error("dcra_die: the die must be square with a side divisible by 4");
endmodule
