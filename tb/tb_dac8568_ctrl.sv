// tb_dac8568_ctrl: writes codes to the eight DAC8568 channels, some in
// bursts faster than the serial link, and checks that every channel of the
// DAC model ends at the last code written to it and that one word takes
// 64*HALF_DIV + 1 cycles.
module tb_dac8568_ctrl;
  import ionctl_pkg::*;
  logic clk = 0, rst_n = 0, wr = 0; logic [2:0] wr_ch; dac_code_t wr_code;
  logic sclk, sync_n, din, busy, word_done;
  int checks = 0, failures = 0;
  dac8568_ctrl dut (.*);
  dac8568_model dac (.sclk, .sync_n, .din);
  always #5 clk = ~clk;
  dac_code_t last [8];
  longint t_fall; int wlen_bad = 0;
  always @(negedge sync_n) t_fall = $time;
  always @(posedge sync_n) if (($time - t_fall)/10 != 64) wlen_bad++;
  initial begin #5000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  initial begin
    wr_ch = 0; wr_code = 0;
    for (int k = 0; k < 8; k++) last[k] = 0;
    #23 rst_n = 1;
    for (int round = 0; round < 5; round++) begin
      repeat (30) begin
        int c; c = $urandom % 8;
        @(negedge clk); wr = 1; wr_ch = 3'(c); wr_code = 16'($urandom); last[c] = wr_code;
      end
      @(negedge clk); wr = 0;
      wait (!busy); repeat (3) @(negedge clk);
      for (int k = 0; k < 8; k++) begin checks++; if (dac.out[k] !== last[k]) begin failures++; $display("round %0d ch %0d %h exp %h", round, k, dac.out[k], last[k]); end end
    end
    checks++; if (wlen_bad != 0 || dac.n_bad != 0) begin failures++; $display("word length errors %0d bad %0d", wlen_bad, dac.n_bad); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
