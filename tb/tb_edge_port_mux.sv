// tb_edge_port_mux: drives random traffic on all six channels and checks
// the steering in wrap and in off-die mode, and the wrap counter.
module tb_edge_port_mux;
  import dcra_pkg::*;
  logic clk = 0, rst_n = 0, wrap;
  logic a_out_valid, a_out_ready, a_in_valid, a_in_ready;
  logic b_out_valid, b_out_ready, b_in_valid, b_in_ready;
  logic offa_tx_valid, offa_tx_ready, offa_rx_valid, offa_rx_ready;
  logic offb_tx_valid, offb_tx_ready, offb_rx_valid, offb_rx_ready;
  msg_t a_out_msg, a_in_msg, b_out_msg, b_in_msg, offa_tx_msg, offa_rx_msg, offb_tx_msg, offb_rx_msg;
  logic [31:0] wraps;
  int checks = 0, failures = 0, exp_wraps = 0;

  edge_port_mux dut (.*);
  always #5 clk = ~clk;
  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(input bit c, input string s);
    checks++;
    if (!c) begin failures++; $display("FAIL %s", s); end
  endtask

  function automatic msg_t rmsg();
    msg_t m;
    m = msg_t'({$urandom, $urandom, $urandom});
    return m;
  endfunction

  initial begin
    wrap = 1'b0;
    {a_out_valid, a_in_ready, b_out_valid, b_in_ready} = '0;
    {offa_tx_ready, offa_rx_valid, offb_tx_ready, offb_rx_valid} = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int i = 0; i < 1000; i++) begin
      @(negedge clk);
      wrap = (i >= 500);
      {a_out_valid, a_in_ready, b_out_valid, b_in_ready} = 4'($urandom);
      {offa_tx_ready, offa_rx_valid, offb_tx_ready, offb_rx_valid} = 4'($urandom);
      a_out_msg = rmsg(); b_out_msg = rmsg(); offa_rx_msg = rmsg(); offb_rx_msg = rmsg();
      #1;
      if (wrap) begin
        chk(b_in_valid == a_out_valid && b_in_msg == a_out_msg && a_out_ready == b_in_ready, "wrap A->B");
        chk(a_in_valid == b_out_valid && a_in_msg == b_out_msg && b_out_ready == a_in_ready, "wrap B->A");
        chk(!offa_tx_valid && !offb_tx_valid && !offa_rx_ready && !offb_rx_ready, "off-die idle in wrap");
        exp_wraps += int'(a_out_valid && b_in_ready) + int'(b_out_valid && a_in_ready);
      end else begin
        chk(offa_tx_valid == a_out_valid && offa_tx_msg == a_out_msg && a_out_ready == offa_tx_ready, "A out");
        chk(a_in_valid == offa_rx_valid && a_in_msg == offa_rx_msg && offa_rx_ready == a_in_ready, "A in");
        chk(offb_tx_valid == b_out_valid && offb_tx_msg == b_out_msg && b_out_ready == offb_tx_ready, "B out");
        chk(b_in_valid == offb_rx_valid && b_in_msg == offb_rx_msg && offb_rx_ready == b_in_ready, "B in");
      end
    end
    @(negedge clk);
    chk(wraps == 32'(exp_wraps), "wrap counter");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
