// dcache: DCRA's reconfigurable SRAM manager (data cache + scratchpad).
//
// The PU sees one tile-local word address space. Addresses inside the
// cached segment [seg_base, seg_limit) go through a direct-mapped cache of
// 2^lines_log2 lines of 512 bits that lives in the same SRAM: line i is
// stored in SRAM row cdata_row+i and its tag word (valid, dirty, tag) in
// word i%16 of row ctag_row+i/16. All other addresses are scratchpad: word
// a is word a%16 of SRAM row a/16. Software places the cache and tag rows
// so that they do not overlap the scratchpad data it uses.
//
// A miss fetches the whole line from the tile's private DRAM slice (local
// line number = offset in the segment / 16, no coherence needed since no
// other tile owns this data); a dirty victim is first written back. A
// `cache_init` pulse clears every tag word (all lines invalid).
// Prefetch requests (from prefetch_unit) use the same path: they only fill
// a missing line and return nothing; the PU port has priority.
//
// Interface: PU port is valid/ready request, then one `pu_resp_valid`
// pulse (with read data) per request, reads and writes alike. The SRAM has
// one-cycle reads. Timing, counted from the request cycle to the response
// cycle: scratchpad write 2, scratchpad read 3, cache read hit 4 (read tag,
// compare, read data), write hit 3 to a dirty line and 4 to a clean one
// (the tag is rewritten dirty); a miss adds the DRAM round trip plus a
// re-lookup, which is not counted as a hit.
// From the paper: cache/scratchpad split, direct mapping, tags and
// valid/dirty bits kept in SRAM, line = DRAM controller width, write-back
// of dirty lines, fetch by physical address. The state machine, the tag
// layout and the init pulse are this design's choices.
// Synthesis note: the write-back data port is the SRAM read data wired
// straight through (the victim row is read into the SRAM output register
// and sent from there), so it shows up as a pass-through. That is intended.
module dcache
  import dcra_pkg::*;
#(
  parameter int unsigned SRAM_KB = 512,
  localparam int unsigned ROWS   = SRAM_KB * 1024 / (LINE_W / 8),
  localparam int unsigned RW     = $clog2(ROWS)
) (
  input  logic          clk,
  input  logic          rst_n,
  // configuration
  input  logic          cache_en,
  input  word_t         seg_base,
  input  word_t         seg_limit,
  input  logic [4:0]    lines_log2,
  input  word_t         cdata_row,
  input  word_t         ctag_row,
  input  logic          cache_init,
  // PU port
  input  logic          pu_req_valid,
  input  logic          pu_req_we,
  input  word_t         pu_req_addr,
  input  word_t         pu_req_wdata,
  output logic          pu_req_ready,
  output logic          pu_resp_valid,
  output word_t         pu_resp_rdata,
  // prefetch port
  input  logic          pf_valid,
  input  word_t         pf_addr,
  output logic          pf_ready,
  // SRAM port
  output logic          sram_en,
  output logic          sram_we,
  output logic [RW-1:0] sram_addr,
  output logic [WPL-1:0] sram_wmask,
  output line_t         sram_wdata,
  input  line_t         sram_rdata,
  // DRAM port (through the memory controller), tile-local line numbers
  output logic          mem_req_valid,
  output logic          mem_req_we,
  output word_t         mem_req_line,
  output line_t         mem_req_data,
  input  logic          mem_req_ready,
  input  logic          mem_resp_valid,
  input  line_t         mem_resp_data,
  // statistics
  output logic [31:0]   n_hits,
  output logic [31:0]   n_misses,
  output logic [31:0]   n_writebacks,
  output logic [31:0]   n_pf_fills,
  output logic          busy
);
  typedef enum logic [3:0] {
    S_IDLE, S_ACC, S_SRD, S_TCHK, S_DRD, S_WBREQ, S_FREQ, S_FWAIT, S_TWR,
    S_TWD, S_INIT
  } state_e;

  state_e state;
  logic   r_we, r_pf, r_cached, r_retry;
  word_t  r_addr, r_wdata;
  word_t  r_line, r_vline;
  word_t  init_row, init_left;
  word_t  tag_entry;

  // address decomposition of the latched request
  word_t  off, idx, tag;
  logic [WPL_LOG2-1:0] widx, tword;
  always_comb begin
    off   = r_addr - seg_base;
    r_line = off >> WPL_LOG2;
    idx   = r_line & ((word_t'(1) << lines_log2) - 1);
    tag   = r_line >> lines_log2;
    widx  = r_addr[WPL_LOG2-1:0];
    tword = idx[WPL_LOG2-1:0];
    tag_entry = sram_rdata[tword*WORD_W +: WORD_W];
  end

  wire t_valid = tag_entry[31];
  wire t_dirty = tag_entry[30];
  wire t_hit   = t_valid && (tag_entry[29:0] == tag[29:0]);
  wire [RW-1:0] tag_row_a  = RW'(ctag_row + (idx >> WPL_LOG2));
  wire [RW-1:0] data_row_a = RW'(cdata_row + idx);

  function automatic line_t put_word(input logic [WPL_LOG2-1:0] w, input word_t v);
    line_t l;
    l = '0;
    l[w*WORD_W +: WORD_W] = v;
    return l;
  endfunction

  assign pu_req_ready = (state == S_IDLE) && !cache_init;
  assign pf_ready     = (state == S_IDLE) && !cache_init && !pu_req_valid;
  assign busy         = (state != S_IDLE);

  // SRAM and DRAM request signals, decoded from the state.
  always_comb begin
    sram_en = 1'b0; sram_we = 1'b0; sram_addr = '0; sram_wmask = '0; sram_wdata = '0;
    mem_req_valid = 1'b0; mem_req_we = 1'b0; mem_req_line = '0; mem_req_data = sram_rdata;
    unique case (state)
      S_ACC: begin
        sram_en = 1'b1;
        if (!r_cached) begin
          sram_addr  = RW'(r_addr >> WPL_LOG2);
          sram_we    = r_we;
          sram_wmask = WPL'(1) << widx;
          sram_wdata = put_word(widx, r_wdata);
        end else begin
          sram_addr = tag_row_a;
        end
      end
      S_TCHK: begin
        if (t_hit && !r_pf) begin
          sram_en    = 1'b1;
          sram_addr  = data_row_a;
          sram_we    = r_we;
          sram_wmask = WPL'(1) << widx;
          sram_wdata = put_word(widx, r_wdata);
        end else if (!t_hit && t_valid && t_dirty) begin
          sram_en   = 1'b1;             // read the victim line
          sram_addr = data_row_a;
        end
      end
      S_WBREQ: begin
        mem_req_valid = 1'b1; mem_req_we = 1'b1; mem_req_line = r_vline;
      end
      S_FREQ: begin
        mem_req_valid = 1'b1; mem_req_line = r_line;
      end
      S_FWAIT: if (mem_resp_valid) begin
        sram_en = 1'b1; sram_we = 1'b1; sram_addr = data_row_a;
        sram_wmask = '1; sram_wdata = mem_resp_data;
      end
      S_TWR: begin
        sram_en = 1'b1; sram_we = 1'b1; sram_addr = tag_row_a;
        sram_wmask = WPL'(1) << tword;
        sram_wdata = put_word(tword, {2'b10, tag[29:0]});
      end
      S_TWD: begin
        sram_en = 1'b1; sram_we = 1'b1; sram_addr = tag_row_a;
        sram_wmask = WPL'(1) << tword;
        sram_wdata = put_word(tword, {2'b11, tag[29:0]});
      end
      S_INIT: begin
        sram_en = 1'b1; sram_we = 1'b1; sram_addr = RW'(init_row);
        sram_wmask = '1; sram_wdata = '0;
      end
      default: ;
    endcase
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state <= S_IDLE;
      pu_resp_valid <= 1'b0; pu_resp_rdata <= '0;
      r_we <= 1'b0; r_pf <= 1'b0; r_cached <= 1'b0; r_retry <= 1'b0;
      r_addr <= '0; r_wdata <= '0; r_vline <= '0;
      init_row <= '0; init_left <= '0;
      n_hits <= '0; n_misses <= '0; n_writebacks <= '0; n_pf_fills <= '0;
    end else begin
      pu_resp_valid <= 1'b0;
      unique case (state)
        S_IDLE: begin
          if (cache_init) begin
            state     <= S_INIT;
            init_row  <= ctag_row;
            init_left <= ((word_t'(1) << lines_log2) + WPL - 1) >> WPL_LOG2;
          end else if (pu_req_valid || pf_valid) begin
            r_pf     <= !pu_req_valid;
            r_retry  <= 1'b0;
            r_we     <= pu_req_valid && pu_req_we;
            r_addr   <= pu_req_valid ? pu_req_addr : pf_addr;
            r_wdata  <= pu_req_wdata;
            r_cached <= cache_en && ((pu_req_valid ? pu_req_addr : pf_addr) >= seg_base)
                                 && ((pu_req_valid ? pu_req_addr : pf_addr) <  seg_limit);
            state    <= S_ACC;
          end
        end
        S_ACC: begin
          if (!r_cached) begin
            if (r_pf)       state <= S_IDLE;
            else if (r_we) begin pu_resp_valid <= 1'b1; state <= S_IDLE; end
            else            state <= S_SRD;
          end else          state <= S_TCHK;
        end
        S_SRD, S_DRD: begin
          pu_resp_valid <= 1'b1;
          pu_resp_rdata <= sram_rdata[widx*WORD_W +: WORD_W];
          state <= S_IDLE;
        end
        S_TCHK: begin
          if (t_hit) begin
            if (r_pf)                 state <= S_IDLE;
            else begin
              if (!r_retry) n_hits <= n_hits + 1;
              if (!r_we)              state <= S_DRD;
              else if (!t_dirty)      state <= S_TWD;
              else begin pu_resp_valid <= 1'b1; state <= S_IDLE; end
            end
          end else begin
            if (r_pf) n_pf_fills <= n_pf_fills + 1;
            else      n_misses   <= n_misses + 1;
            r_vline <= (word_t'(tag_entry[29:0]) << lines_log2) | idx;
            state   <= (t_valid && t_dirty) ? S_WBREQ : S_FREQ;
          end
        end
        S_WBREQ: if (mem_req_ready) begin
          n_writebacks <= n_writebacks + 1;
          state <= S_FREQ;
        end
        S_FREQ:  if (mem_req_ready)  state <= S_FWAIT;
        S_FWAIT: if (mem_resp_valid) state <= S_TWR;
        S_TWR: begin                              // demand access re-looks up and hits
          state   <= r_pf ? S_IDLE : S_ACC;
          r_retry <= 1'b1;
        end
        S_TWD:   begin pu_resp_valid <= 1'b1; state <= S_IDLE; end
        S_INIT: begin
          init_row  <= init_row + 1;
          init_left <= init_left - 1;
          if (init_left <= 1) state <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end
endmodule
