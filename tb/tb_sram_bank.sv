// tb_sram_bank: random word-masked writes and full-row reads against a
// reference copy; checks the one-cycle read latency.
module tb_sram_bank;
  import dcra_pkg::*;
  localparam int KB = 4, ROWS = KB * 1024 / 64;
  logic clk = 0, en, we;
  logic [$clog2(ROWS)-1:0] addr;
  logic [WPL-1:0] wmask;
  line_t wdata, rdata;
  line_t ref_mem [ROWS];
  int checks = 0, failures = 0;

  sram_bank #(.KBYTES(KB)) dut (.*);
  always #5 clk = ~clk;
  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic line_t rnd_line();
    line_t l;
    for (int i = 0; i < WPL; i++) l[i*32 +: 32] = $urandom;
    return l;
  endfunction

  initial begin
    en = 0; we = 0; addr = '0; wmask = '0; wdata = '0;
    // initialise every row
    for (int r = 0; r < ROWS; r++) begin
      @(negedge clk); en = 1; we = 1; addr = r[$clog2(ROWS)-1:0]; wmask = '1;
      wdata = rnd_line(); ref_mem[r] = wdata;
    end
    for (int i = 0; i < 2000; i++) begin
      @(negedge clk);
      en = 1; addr = $urandom_range(0, ROWS - 1);
      we = $urandom_range(0, 1);
      if (we) begin
        wmask = WPL'($urandom);
        wdata = rnd_line();
        for (int w = 0; w < WPL; w++)
          if (wmask[w]) ref_mem[addr][w*32 +: 32] = wdata[w*32 +: 32];
      end else begin
        line_t exp_l;
        exp_l = ref_mem[addr];
        @(negedge clk); en = 0;
        checks++;
        if (rdata !== exp_l) begin failures++; $display("FAIL row %0d", addr); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
