// ad9912_model: behavioural model of the AD9912 serial port for testbenches.
// Not part of the design: it shifts in sdio on rising sclk while csb is low,
// decodes the 16-bit instruction and, on the rising edge of io_update, makes
// the received frequency tuning word or full-scale current word active.
module ad9912_model (
  input  logic sclk,
  input  logic csb,
  input  logic sdio,
  input  logic io_update
);
  logic [63:0] sh = '0;
  int          n = 0;
  logic [47:0] ftw_buf = '0, ftw = '0;
  logic [9:0]  amp_buf = '0, amp = '0;
  int          n_ftw = 0, n_amp = 0, n_bad = 0;
  always @(posedge sclk) if (!csb) begin sh <= {sh[62:0], sdio}; n <= n + 1; end
  always @(posedge csb) begin
    if (n == 64 && sh[63:48] == {1'b0, 2'b11, 13'h01AB}) ftw_buf = sh[47:0];
    else if (n == 32 && sh[31:16] == {1'b0, 2'b01, 13'h040C}) amp_buf = sh[9:0];
    else if (n != 0) n_bad++;
    n = 0;
  end
  always @(posedge io_update) begin
    if (ftw != ftw_buf) n_ftw++;
    if (amp != amp_buf) n_amp++;
    ftw = ftw_buf; amp = amp_buf;
  end
endmodule
