// tile: one DCRA tile without its processing unit.
//
// A tile is the unit DCRA replicates 32x32 times per die: a router on the
// tile-NoC (radix-9 where it is also a die-NoC node), a Task Scheduling Unit
// with per-task-type input and output queues, the tile's SRAM managed as a
// data cache plus scratchpad, the task-driven prefetcher, and the tile's
// configuration registers. The PU itself (a simple in-order ISA core whose
// design the paper does not give) is outside: the tile exposes the three
// ports it would use: task dispatch, task spawn, and word loads/stores into
// the tile's local address space. Line fills and write-backs leave through
// the DRAM port towards the die's memory controller.
//
// Configuration (written before a run on the cfg bus, see dcra_pkg):
// routing position and topology, cached segment and cache placement in SRAM,
// and the per-task table. Reset values: routing as a 1x1 grid, cache off,
// every queue 12 messages (the OQ size the paper's queue study starts from).
// Network ports are numbered as router ports 1..NP-1 (port - 1).
// Synthesis note: stats.die_hops is constant zero in a radix-5 tile.
module tile
  import dcra_pkg::*;
#(
  parameter bit          HAS_DX  = 1'b0,
  parameter bit          HAS_DY  = 1'b0,
  parameter int unsigned DIE_HOP = 16,
  parameter int unsigned SRAM_KB = 512,
  parameter int unsigned QDEPTH  = 64,
  localparam int unsigned NP     = (HAS_DX || HAS_DY) ? 9 : 5
) (
  input  logic        clk,
  input  logic        rst_n,
  // configuration bus
  input  logic        cfg_we,
  input  logic [7:0]  cfg_addr,
  input  word_t       cfg_data,
  // network ports (router ports 1..NP-1)
  input  logic        in_valid [NP-1],
  input  msg_t        in_msg   [NP-1],
  output logic        in_ready [NP-1],
  output logic        out_valid[NP-1],
  output msg_t        out_msg  [NP-1],
  input  logic        out_ready[NP-1],
  // PU: task dispatch
  output logic        ds_valid,
  output tt_t         ds_type,
  output word_t       ds_arg0,
  output word_t       ds_arg1,
  input  logic        ds_ready,
  input  logic        task_done,
  // PU: task spawn
  input  logic        sp_valid,
  input  tt_t         sp_type,
  input  word_t       sp_arg0,
  input  word_t       sp_arg1,
  output logic        sp_ready,
  // PU: local memory
  input  logic        pu_req_valid,
  input  logic        pu_req_we,
  input  word_t       pu_req_addr,
  input  word_t       pu_req_wdata,
  output logic        pu_req_ready,
  output logic        pu_resp_valid,
  output word_t       pu_resp_rdata,
  // DRAM port (tile-local line numbers)
  output logic        mem_req_valid,
  output logic        mem_req_we,
  output word_t       mem_req_line,
  output line_t       mem_req_data,
  input  logic        mem_req_ready,
  input  logic        mem_resp_valid,
  input  line_t       mem_resp_data,
  output tile_stats_t stats
);
  localparam int unsigned ROWS = SRAM_KB * 1024 / (LINE_W / 8);
  localparam int unsigned RW   = $clog2(ROWS);

  // ------------------------------------------------ configuration registers
  route_cfg_t rcfg;
  logic [3:0] x_bits;
  logic       cache_en, cache_init;
  word_t      seg_base, seg_limit, cdata_row, ctag_row;
  logic [4:0] lines_log2;
  task_cfg_t  tcfg [NUM_TT];

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      rcfg <= '0;
      rcfg.size_x <= coord_t'(1);
      rcfg.size_y <= coord_t'(1);
      x_bits <= '0;
      cache_en <= 1'b0; cache_init <= 1'b0;
      seg_base <= '0; seg_limit <= '0; cdata_row <= '0; ctag_row <= '0;
      lines_log2 <= '0;
      for (int t = 0; t < NUM_TT; t++) begin
        tcfg[t] <= '0;
        tcfg[t].iq_cap <= 8'd12;
        tcfg[t].oq_cap <= 8'd12;
      end
    end else begin
      cache_init <= 1'b0;
      if (cfg_we) begin
        unique casez (cfg_addr)
          CFG_ROUTE0: {rcfg.size_y, rcfg.size_x, rcfg.my_y, rcfg.my_x} <= cfg_data;
          CFG_ROUTE1: begin
            {rcfg.die_torus_y, rcfg.die_en_y, rcfg.die_torus_x, rcfg.die_en_x,
             rcfg.torus_y, rcfg.torus_x} <= cfg_data[5:0];
            x_bits <= cfg_data[11:8];
          end
          CFG_CSEG_B: seg_base  <= cfg_data;
          CFG_CSEG_L: seg_limit <= cfg_data;
          CFG_CLINES: begin lines_log2 <= cfg_data[4:0]; cache_en <= cfg_data[8]; end
          CFG_CDATA:  cdata_row <= cfg_data;
          CFG_CTAG:   ctag_row  <= cfg_data;
          CFG_CINIT:  cache_init <= 1'b1;
          8'b0001_????: begin
            unique case (cfg_addr[1:0])
              2'd0: tcfg[cfg_addr[TT_W+1:2]].ptr_a <= cfg_data;
              2'd1: tcfg[cfg_addr[TT_W+1:2]].ptr_b <= cfg_data;
              2'd2: {tcfg[cfg_addr[TT_W+1:2]].chunk_log2, tcfg[cfg_addr[TT_W+1:2]].spawns,
                     tcfg[cfg_addr[TT_W+1:2]].stream, tcfg[cfg_addr[TT_W+1:2]].pf_b,
                     tcfg[cfg_addr[TT_W+1:2]].pf_a}
                       <= {cfg_data[20:16], cfg_data[4 +: NUM_TT], cfg_data[2:0]};
              default: {tcfg[cfg_addr[TT_W+1:2]].oq_cap, tcfg[cfg_addr[TT_W+1:2]].iq_cap}
                       <= cfg_data[15:0];
            endcase
          end
          default: ;
        endcase
      end
    end
  end

  // ------------------------------------------------ router
  logic r_in_valid [NP], r_in_ready [NP], r_out_valid [NP], r_out_ready [NP];
  msg_t r_in_msg   [NP], r_out_msg  [NP];

  for (genvar p = 1; p < NP; p++) begin : g_port
    assign r_in_valid[p]  = in_valid[p-1];
    assign r_in_msg[p]    = in_msg[p-1];
    assign in_ready[p-1]  = r_in_ready[p];
    assign out_valid[p-1] = r_out_valid[p];
    assign out_msg[p-1]   = r_out_msg[p];
    assign r_out_ready[p] = out_ready[p-1];
  end

  router #(.HAS_DX(HAS_DX), .HAS_DY(HAS_DY), .DIE_HOP(DIE_HOP)) u_router (
    .clk, .rst_n, .cfg(rcfg),
    .in_valid(r_in_valid), .in_msg(r_in_msg), .in_ready(r_in_ready),
    .out_valid(r_out_valid), .out_msg(r_out_msg), .out_ready(r_out_ready),
    .die_hops(stats.die_hops));

  // ------------------------------------------------ TSU
  task_cfg_t ds_cfg;
  logic [$clog2(QDEPTH+1)-1:0] iq_count [NUM_TT], oq_count [NUM_TT];

  tsu #(.QDEPTH(QDEPTH)) u_tsu (
    .clk, .rst_n, .tcfg, .x_bits,
    .rin_valid(r_out_valid[0]), .rin_msg(r_out_msg[0]), .rin_ready(r_out_ready[0]),
    .rout_valid(r_in_valid[0]), .rout_msg(r_in_msg[0]), .rout_ready(r_in_ready[0]),
    .sp_valid, .sp_type, .sp_arg0, .sp_arg1, .sp_ready,
    .ds_valid, .ds_type, .ds_arg0, .ds_arg1, .ds_cfg, .ds_ready,
    .iq_count, .oq_count, .n_dispatched(stats.dispatched),
    .n_oq_holds(stats.oq_holds));

  // ------------------------------------------------ prefetcher
  logic  pf_valid, pf_ready;
  word_t pf_addr;
  prefetch_unit u_pf (
    .clk, .rst_n,
    .disp_fire(ds_valid && ds_ready), .disp_cfg(ds_cfg), .disp_index(ds_arg0),
    .task_done,
    .acc_fire(pu_req_valid && pu_req_ready), .acc_addr(pu_req_addr),
    .pf_valid, .pf_addr, .pf_ready, .n_issued(stats.pf_issued));

  // ------------------------------------------------ SRAM and its manager
  logic           sram_en, sram_we, dc_busy;
  logic [RW-1:0]  sram_addr;
  logic [WPL-1:0] sram_wmask;
  line_t          sram_wdata, sram_rdata;

  dcache #(.SRAM_KB(SRAM_KB)) u_dcache (
    .clk, .rst_n,
    .cache_en, .seg_base, .seg_limit, .lines_log2, .cdata_row, .ctag_row, .cache_init,
    .pu_req_valid, .pu_req_we, .pu_req_addr, .pu_req_wdata, .pu_req_ready,
    .pu_resp_valid, .pu_resp_rdata,
    .pf_valid, .pf_addr, .pf_ready,
    .sram_en, .sram_we, .sram_addr, .sram_wmask, .sram_wdata, .sram_rdata,
    .mem_req_valid, .mem_req_we, .mem_req_line, .mem_req_data, .mem_req_ready,
    .mem_resp_valid, .mem_resp_data,
    .n_hits(stats.hits), .n_misses(stats.misses), .n_writebacks(stats.writebacks),
    .n_pf_fills(stats.pf_fills), .busy(dc_busy));

  sram_bank #(.KBYTES(SRAM_KB)) u_sram (
    .clk, .en(sram_en), .we(sram_we), .addr(sram_addr), .wmask(sram_wmask),
    .wdata(sram_wdata), .rdata(sram_rdata));
endmodule
