// dac8734_model: behavioural model of NCHIP DAC8734 chips on a shared clock,
// chip select and latch with one data line per chip, for testbenches.
// Not part of the design. Each chip shifts its data line in on the falling
// edge of sclk while cs_n is low, stores a data word in the input register
// addressed by bits 21:16 (4..7) when cs_n rises, and copies the input
// registers to its outputs on the falling edge of ldac_n.
module dac8734_model #(parameter int NCHIP = 25) (
  input  logic             sclk,
  input  logic             cs_n,
  input  logic [NCHIP-1:0] sdi,
  input  logic             ldac_n
);
  logic [23:0] sh [NCHIP];
  logic [15:0] inreg [NCHIP][4];
  logic [15:0] out   [NCHIP][4];
  int nbits = 0, n_bad = 0, n_latch = 0;
  initial for (int c = 0; c < NCHIP; c++) for (int k = 0; k < 4; k++) begin inreg[c][k] = 0; out[c][k] = 0; end
  always @(negedge sclk) if (!cs_n) begin
    for (int c = 0; c < NCHIP; c++) sh[c] <= {sh[c][22:0], sdi[c]};
    nbits <= nbits + 1;
  end
  always @(posedge cs_n) begin
    if (nbits != 0) for (int c = 0; c < NCHIP; c++) begin
      if (nbits != 24 || sh[c][23:22] != 2'b00 || sh[c][21:16] < 4 || sh[c][21:16] > 7) n_bad++;
      else inreg[c][sh[c][17:16]] = sh[c][15:0];
    end
    nbits = 0;
  end
  always @(negedge ldac_n) begin
    n_latch++;
    for (int c = 0; c < NCHIP; c++) for (int k = 0; k < 4; k++) out[c][k] = inreg[c][k];
  end
endmodule
