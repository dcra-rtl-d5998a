// tb_pu_model: behavioural stand-in for a tile's processing unit, running
// the histogram program in the task-based style DCRA uses.
//
// The program has two task types. T0(g) reads input element g, which this
// tile owns, from the cached input array (word IN_BASE + g mod 2^E_LOG2),
// hashes the word to a bin number v in [0, 2^NB_LOG2) and spawns T1(v, 1).
// The TSU sends T1 to the tile owning bin v. T1(v, inc) reads bin
// v mod 2^B_LOG2 at BIN_BASE, adds inc and writes it back. A task runs to
// completion and then pulses task_done, so read-modify-writes of a bin never
// overlap. Seeding: after seed_go, the model spawns T0 for seed_n indices
// from seed_lo, but only while no task waits: a seed offer that is not
// taken is withdrawn as soon as a task arrives, so running tasks always
// comes before seeding.
// After dump_go and once idle it reads its 2^B_LOG2 bins back and reports
// each with a dump_valid strobe.
// Timing: one state per cycle; memory and spawns wait for their
// handshakes. Counters: tasks run per type, cycles a spawn waited for a
// full output queue.
// The instruction set of the paper's core is not described, so this is a
// state machine doing the same memory and task traffic, not a processor.
module tb_pu_model
  import dcra_pkg::*;
#(
  parameter int    E_LOG2   = 4,
  parameter int    B_LOG2   = 3,
  parameter int    NB_LOG2  = 8,
  parameter word_t IN_BASE  = 32'h1000,
  parameter word_t BIN_BASE = 32'h1040
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        seed_go,
  input  word_t       seed_lo,
  input  word_t       seed_n,
  input  logic        dump_go,
  // tile side
  input  logic        ds_valid,
  input  tt_t         ds_type,
  input  word_t       ds_arg0,
  input  word_t       ds_arg1,
  output logic        ds_ready,
  output logic        task_done,
  output logic        sp_valid,
  output tt_t         sp_type,
  output word_t       sp_arg0,
  output word_t       sp_arg1,
  input  logic        sp_ready,
  output logic        pu_req_valid,
  output logic        pu_req_we,
  output word_t       pu_req_addr,
  output word_t       pu_req_wdata,
  input  logic        pu_req_ready,
  input  logic        pu_resp_valid,
  input  word_t       pu_resp_rdata,
  // observation
  output logic        idle,
  output logic        dump_valid,
  output int          dump_idx,
  output word_t       dump_val,
  output int          n_t0,
  output int          n_t1,
  output int          n_sp_stall
);
  typedef enum logic [3:0] {
    S_IDLE, S_SEED, S_RD, S_RW, S_SP, S_WR, S_WW, S_DONE, S_DRD, S_DRW
  } st_e;
  st_e   st;
  tt_t   ty;
  word_t a0, a1, val, cur, left;
  int    di;
  logic  dump_pend;

  function automatic word_t hash_bin(input word_t w);
    word_t h = w * 32'h9E3779B1;
    return h >> (32 - NB_LOG2);
  endfunction

  always_comb begin
    ds_ready     = (st == S_IDLE);
    task_done    = (st == S_DONE);
    sp_valid     = (st == S_SEED) || (st == S_SP);
    sp_type      = (st == S_SEED) ? tt_t'(0) : tt_t'(1);
    sp_arg0      = (st == S_SEED) ? cur : val;
    sp_arg1      = (st == S_SEED) ? 32'd0 : 32'd1;
    pu_req_valid = (st == S_RD) || (st == S_WR) || (st == S_DRD);
    pu_req_we    = (st == S_WR);
    pu_req_addr  = (st == S_DRD) ? BIN_BASE + word_t'(di)
                 : (ty == tt_t'(0)) ? IN_BASE + (a0 & ((32'd1 << E_LOG2) - 1))
                                    : BIN_BASE + (a0 & ((32'd1 << B_LOG2) - 1));
    pu_req_wdata = val;
    idle         = (st == S_IDLE) && (left == 0) && !ds_valid;
  end

  always_ff @(posedge clk) begin
    dump_valid <= 1'b0;
    if (!rst_n) begin
      st <= S_IDLE; ty <= '0; a0 <= '0; a1 <= '0; val <= '0; cur <= '0; left <= '0;
      di <= 0; dump_pend <= 1'b0; dump_idx <= 0; dump_val <= '0;
      n_t0 <= 0; n_t1 <= 0; n_sp_stall <= 0;
    end else begin
      if (seed_go) begin cur <= seed_lo; left <= seed_n; end
      if (dump_go) dump_pend <= 1'b1;
      if (sp_valid && !sp_ready) n_sp_stall <= n_sp_stall + 1;
      unique case (st)
        S_IDLE:
          if (ds_valid) begin
            ty <= ds_type; a0 <= ds_arg0; a1 <= ds_arg1; st <= S_RD;
          end else if (left != 0) st <= S_SEED;
          else if (dump_pend) begin di <= 0; dump_pend <= 1'b0; st <= S_DRD; end
        S_SEED:
          if (sp_ready) begin cur <= cur + 1; left <= left - 1; st <= S_IDLE; end
          else if (ds_valid) st <= S_IDLE;
        S_RD:  if (pu_req_ready) st <= S_RW;
        S_RW:
          if (pu_resp_valid) begin
            if (ty == tt_t'(0)) begin val <= hash_bin(pu_resp_rdata); st <= S_SP; end
            else begin val <= pu_resp_rdata + a1; st <= S_WR; end
          end
        S_SP:  if (sp_ready) st <= S_DONE;
        S_WR:  if (pu_req_ready) st <= S_WW;
        S_WW:  if (pu_resp_valid) st <= S_DONE;
        S_DONE: begin
          if (ty == tt_t'(0)) n_t0 <= n_t0 + 1; else n_t1 <= n_t1 + 1;
          st <= S_IDLE;
        end
        S_DRD: if (pu_req_ready) st <= S_DRW;
        S_DRW:
          if (pu_resp_valid) begin
            dump_valid <= 1'b1; dump_idx <= di; dump_val <= pu_resp_rdata;
            di <= di + 1;
            st <= (di == (1 << B_LOG2) - 1) ? S_IDLE : S_DRD;
          end
        default: st <= S_IDLE;
      endcase
    end
  end
endmodule
