// dac8568_model: behavioural model of the DAC8568 serial port for
// testbenches (not part of the design). Shifts din on falling sclk while
// sync_n is low; a complete "write and update" word sets the addressed
// channel's output.
module dac8568_model (
  input logic sclk,
  input logic sync_n,
  input logic din
);
  logic [31:0] sh = '0;
  int n = 0, n_bad = 0, n_words = 0;
  logic [15:0] out [8];
  initial for (int k = 0; k < 8; k++) out[k] = '0;
  always @(negedge sclk) if (!sync_n) begin sh <= {sh[30:0], din}; n <= n + 1; end
  always @(posedge sync_n) begin
    if (n == 32 && sh[31:24] == 8'h03 && sh[23] == 1'b0) begin out[sh[22:20]] = sh[19:4]; n_words++; end
    else if (n != 0) n_bad++;
    n = 0;
  end
endmodule
