// tb_dram_model: behavioural model of one DRAM channel for testbenches.
// Serves 512-bit line requests in order after a fixed LATENCY (50 cycles
// at 1 GHz is the controller-to-HBM latency assumed for DCRA). Writes are
// posted; reads answer with the stored line, or with init_line(addr) for a
// line never written. Accepts one request per cycle.
module tb_dram_model
  import dcra_pkg::*;
#(
  parameter int LATENCY = 50
) (
  input  logic  clk,
  input  logic  req_valid,
  input  logic  req_we,
  input  word_t req_addr,
  input  line_t req_data,
  output logic  req_ready,
  output logic  resp_valid,
  output line_t resp_data
);
  line_t store [word_t];
  typedef struct { longint due; line_t data; } pend_t;
  pend_t pend[$];
  longint cyc = 0;

  function automatic line_t init_line(input word_t a);
    line_t l;
    for (int w = 0; w < WPL; w++) l[w*WORD_W +: WORD_W] = (a << 4) + word_t'(w) + 32'h5a000000;
    return l;
  endfunction

  assign req_ready = 1'b1;
  initial begin resp_valid = 0; resp_data = '0; end

  always @(posedge clk) begin
    cyc <= cyc + 1;
    resp_valid <= 1'b0;
    if (pend.size() > 0 && pend[0].due <= cyc) begin
      resp_valid <= 1'b1;
      resp_data  <= pend[0].data;
      void'(pend.pop_front());
    end
    if (req_valid) begin
      if (req_we) store[req_addr] = req_data;
      else pend.push_back('{cyc + LATENCY, store.exists(req_addr) ? store[req_addr] : init_line(req_addr)});
    end
  end
endmodule
