// dac8568_ctrl: writer for the eight-channel DAC8568 DC outputs.
//
// A new code for channel c (wr) is stored in that channel's register and
// marked pending; the writer visits the pending channels in round-robin
// order and sends each as a 32-bit "write and update channel" word over
// SCLK/SYNC/DIN, so every channel's output follows the latest code it was
// given, even when codes arrive faster than the serial link. One word takes
// 64*HALF_DIV + 1 cycles (about 0.65 us at a 50 MHz serial clock).
// The word format comes from the vendor; the round-robin scheduling is this
// design's choice.
module dac8568_ctrl
  import ionctl_pkg::*;
#(
  parameter int unsigned HALF_DIV = 1
) (
  input  logic       clk,
  input  logic       rst_n,
  input  logic       wr,
  input  logic [2:0] wr_ch,
  input  dac_code_t  wr_code,
  output logic       sclk,
  output logic       sync_n,
  output logic       din,
  output logic       busy,
  output logic       word_done
);
  dac_code_t  val [8];
  logic [7:0] pend;
  logic [2:0] next_ch, cur;
  logic       found;
  logic       spi_start, spi_busy, spi_done, active;
  logic [0:0][31:0] word;

  // next pending channel after `cur`, round robin
  always_comb begin
    found = 1'b0; next_ch = cur;
    for (int k = 1; k <= 8; k++) begin
      logic [2:0] c;
      c = 3'(cur + 3'(k));
      if (!found && pend[c]) begin found = 1'b1; next_ch = c; end
    end
  end

  spi_master #(.LANES(1), .MAXBITS(32), .HALF_DIV(HALF_DIV), .CPOL(1'b1)) u_spi (
    .clk, .rst_n, .start(spi_start), .nbits(6'd32), .data(word),
    .sclk, .cs_n(sync_n), .sdo(din), .busy(spi_busy), .done(spi_done));

  assign busy = active || (pend != 0);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int c = 0; c < 8; c++) val[c] <= '0;
      pend <= '0; cur <= 3'd7; spi_start <= 1'b0; active <= 1'b0; word <= '0; word_done <= 1'b0;
    end else begin
      spi_start <= 1'b0;
      word_done <= 1'b0;
      if (!active && found) begin
        word[0]       <= dac8568_word(next_ch, val[next_ch]);
        pend[next_ch] <= 1'b0;
        cur           <= next_ch;
        spi_start     <= 1'b1;
        active        <= 1'b1;
      end else if (active && spi_done) begin
        active <= 1'b0; word_done <= 1'b1;
      end
      if (wr) begin val[wr_ch] <= wr_code; pend[wr_ch] <= 1'b1; end
    end
  end
endmodule
