// spi_master: multi-lane serial word shifter used by every DAC and DDS port.
//
// On `start` the low `nbits` bits of each lane's word are shifted out MSB
// first. All lanes share one chip select (cs_n) and one serial clock (sclk),
// so LANES chips receive a word each in the time of one word; the 100-channel
// DAC bus uses this to feed 25 DAC8734 chips over separate data lines.
// Each bit lasts 2*HALF_DIV clock cycles: the data bit is set, after
// HALF_DIV cycles sclk makes its sampling edge (rising for CPOL = 0, falling
// for CPOL = 1), after another HALF_DIV cycles it returns to idle. A word
// therefore takes 2*HALF_DIV*nbits cycles with cs_n low, and `done` pulses
// in the cycle cs_n returns high. Between words sclk stays at its idle
// level, so no clock reaches the chips while nothing is written.
// The paper calls the DAC link "SPI-like" and gives no timing; the bit
// order, clock polarity and lane sharing are this design's choices.
// The handshake assertion at the end is disabled during reset, so lint tools
// see rst_n used both asynchronously and synchronously; only the assertion
// uses it synchronously, the flip-flops reset asynchronously.
module spi_master #(
  parameter int unsigned LANES    = 1,
  parameter int unsigned MAXBITS  = 64,
  parameter int unsigned HALF_DIV = 1,
  parameter bit          CPOL     = 1'b0
) (
  input  logic                              clk,
  input  logic                              rst_n,
  input  logic                              start,
  input  logic [$clog2(MAXBITS+1)-1:0]      nbits,
  input  logic [LANES-1:0][MAXBITS-1:0]     data,
  output logic                              sclk,
  output logic                              cs_n,
  output logic [LANES-1:0]                  sdo,
  output logic                              busy,
  output logic                              done
);
  localparam int unsigned DW = (HALF_DIV > 1) ? $clog2(HALF_DIV) : 1;
  localparam int unsigned IW = (MAXBITS > 1) ? $clog2(MAXBITS) : 1;

  logic [LANES-1:0][MAXBITS-1:0] shreg;
  logic [IW-1:0]                 bitidx;
  logic [DW-1:0]                 div;
  logic                          phase;   // 0: before sampling edge, 1: after

  always_comb begin
    for (int l = 0; l < LANES; l++) sdo[l] = busy ? shreg[l][bitidx] : 1'b0;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy   <= 1'b0;
      done   <= 1'b0;
      cs_n   <= 1'b1;
      sclk   <= CPOL;
      shreg  <= '0;
      bitidx <= '0;
      div    <= '0;
      phase  <= 1'b0;
    end else begin
      done <= 1'b0;
      if (!busy) begin
        if (start && nbits != 0) begin
          busy   <= 1'b1;
          cs_n   <= 1'b0;
          shreg  <= data;
          bitidx <= IW'(nbits - 1'b1);
          div    <= '0;
          phase  <= 1'b0;
        end
      end else if (div == DW'(HALF_DIV - 1)) begin
        div <= '0;
        if (!phase) begin
          sclk  <= ~CPOL;            // sampling edge
          phase <= 1'b1;
        end else begin
          sclk  <= CPOL;
          phase <= 1'b0;
          if (bitidx == 0) begin
            busy <= 1'b0;
            cs_n <= 1'b1;
            done <= 1'b1;
          end else begin
            bitidx <= bitidx - 1'b1;
          end
        end
      end else begin
        div <= div + 1'b1;
      end
    end
  end

  // A start while a word is in flight is ignored; callers must wait for done.
  a_no_start_when_busy: assert property (@(posedge clk) disable iff (!rst_n) busy |-> !start)
    else $error("spi_master: start while busy");

endmodule
