// dac8734_ctrl: bus controller for the 25 four-channel DAC8734 chips of the
// 100-channel trap-electrode supply.
//
// All chips share one serial clock, one chip select and one LDAC line; each
// chip has its own data line, so one 24-bit word reaches all 25 chips at
// once. An update (start) sends four words, one per DAC channel 0..3 of
// every chip, each {write, 0, address 4+ch, 16-bit code}, and then pulses
// ldac_n low for LDAC_CYC cycles so that all 100 outputs change together.
// With a 100 MHz clock and HALF_DIV = 1 the serial clock runs at 50 MHz, the
// chip's limit; the four words take 4*(48+1) cycles, about 2 us or 100
// serial clock periods as in the paper, and a whole update about 2.1 us,
// inside the 430 kHz maximum update rate. Between updates the serial clock
// is stopped. Channel c of the system is chip c/4, DAC channel c%4.
// The 25-chip, 4-channel structure, the rate limits and the latch follow the
// paper; the shared clock with per-chip data lines, the word format (from the
// vendor) and the channel numbering are this design's choices.
module dac8734_ctrl
  import ionctl_pkg::*;
#(
  parameter int unsigned NCHIP    = 25,
  parameter int unsigned HALF_DIV = 1,
  parameter int unsigned LDAC_CYC = 2
) (
  input  logic                         clk,
  input  logic                         rst_n,
  input  logic                         start,
  input  dac_code_t [NCHIP-1:0][3:0]   codes,
  output logic                         sclk,
  output logic                         cs_n,
  output logic [NCHIP-1:0]             sdi,
  output logic                         ldac_n,
  output logic                         busy,
  output logic                         done
);
  typedef enum logic [1:0] {D_IDLE, D_WORD, D_WAIT, D_LDAC} dstate_e;
  dstate_e st;
  logic [1:0] ch;
  logic [7:0] cnt;
  logic spi_start, spi_busy, spi_done;
  logic [NCHIP-1:0][23:0] words;
  dac_code_t [NCHIP-1:0][3:0] codes_q;

  always_comb
    for (int c = 0; c < NCHIP; c++) words[c] = dac8734_word(ch, codes_q[c][ch]);

  spi_master #(.LANES(NCHIP), .MAXBITS(24), .HALF_DIV(HALF_DIV), .CPOL(1'b1)) u_spi (
    .clk, .rst_n, .start(spi_start), .nbits(5'd24), .data(words),
    .sclk, .cs_n, .sdo(sdi), .busy(spi_busy), .done(spi_done));

  assign busy = (st != D_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= D_IDLE; ch <= '0; cnt <= '0; spi_start <= 1'b0; ldac_n <= 1'b1; done <= 1'b0;
      codes_q <= '0;
    end else begin
      spi_start <= 1'b0;
      done      <= 1'b0;
      unique case (st)
        D_IDLE: if (start) begin
          codes_q <= codes; ch <= '0; spi_start <= 1'b1; st <= D_WAIT;
        end
        D_WORD: begin spi_start <= 1'b1; st <= D_WAIT; end
        D_WAIT: if (spi_done) begin
          if (ch == 2'd3) begin ldac_n <= 1'b0; cnt <= '0; st <= D_LDAC; end
          else begin ch <= ch + 1'b1; st <= D_WORD; end
        end
        D_LDAC: begin
          cnt <= cnt + 1'b1;
          if (cnt == 8'(LDAC_CYC - 1)) begin ldac_n <= 1'b1; done <= 1'b1; st <= D_IDLE; end
        end
        default: st <= D_IDLE;
      endcase
    end
  end
endmodule
