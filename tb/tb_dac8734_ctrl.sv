// tb_dac8734_ctrl: sends random codes to 25 modelled DAC8734 chips and
// checks every chip output after the latch, the number of latch pulses,
// and that one update fits the 430 kHz maximum rate (<= 232 cycles of the
// 100 MHz clock) with the four words taking about 2 us.
module tb_dac8734_ctrl;
  import ionctl_pkg::*;
  localparam int NCHIP = 25;
  logic clk = 0, rst_n = 0, start = 0;
  dac_code_t [NCHIP-1:0][3:0] codes;
  logic sclk, cs_n, ldac_n, busy, done;
  logic [NCHIP-1:0] sdi;
  int checks = 0, failures = 0;
  dac8734_ctrl #(.NCHIP(NCHIP)) dut (.*);
  dac8734_model #(.NCHIP(NCHIP)) dac (.sclk, .cs_n, .sdi, .ldac_n);
  always #5 clk = ~clk;

  initial begin #5000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  initial begin
    codes = '0;
    #23 rst_n = 1;
    for (int it = 0; it < 6; it++) begin
      longint t0;
      for (int c = 0; c < NCHIP; c++) for (int k = 0; k < 4; k++) codes[c][k] = 16'($urandom);
      @(negedge clk); start = 1; @(negedge clk); start = 0; t0 = $time - 5;
      @(posedge done); 
      checks++;
      if (($time - t0)/10 > 232 || ($time - t0)/10 < 196) begin failures++; $display("update took %0d cycles", ($time-t0)/10); end
      codes = ~codes;     // must not disturb the update already sent
      @(negedge clk);
      for (int c = 0; c < NCHIP; c++) for (int k = 0; k < 4; k++) begin
        checks++;
        if (dac.out[c][k] !== ~codes[c][k]) begin failures++; $display("chip %0d ch %0d %h", c, k, dac.out[c][k]); end
      end
    end
    checks++; if (dac.n_latch != 6 || dac.n_bad != 0) begin failures++; $display("latches %0d bad %0d", dac.n_latch, dac.n_bad); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
