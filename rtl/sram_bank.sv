// sram_bank: the tile's local SRAM (512KB in DCRA's default tile).
//
// Written as an array so that synthesis maps it to an SRAM macro. Rows are
// one cache line wide (512 bits, the DRAM controller's line), so a line
// fill or a write-back is a single access, and a 32-bit word access selects
// one of 16 words with the per-word write mask. Single port: one read or
// one write per cycle. Reads return `rdata` one cycle after `en`.
// From the paper: capacity (512KB/tile) and the 512-bit line; the row
// organisation and the word mask are this design's choices. Contents are
// not reset.
module sram_bank
  import dcra_pkg::*;
#(
  parameter int unsigned KBYTES = 512,
  localparam int unsigned ROWS  = KBYTES * 1024 / (LINE_W / 8),
  localparam int unsigned RW    = $clog2(ROWS)
) (
  input  logic           clk,
  input  logic           en,
  input  logic           we,
  input  logic [RW-1:0]  addr,
  input  logic [WPL-1:0] wmask,   // one bit per 32-bit word
  input  line_t          wdata,
  output line_t          rdata
);
  line_t mem [ROWS];

  always_ff @(posedge clk) begin
    if (en) begin
      if (we) begin
        for (int w = 0; w < WPL; w++)
          if (wmask[w]) mem[addr][w*WORD_W +: WORD_W] <= wdata[w*WORD_W +: WORD_W];
      end else begin
        rdata <= mem[addr];
      end
    end
  end
endmodule
