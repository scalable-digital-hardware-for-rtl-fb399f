// ad7671_if: sampling controller for the AD7671 16-bit, 1 MSPS ADC that
// digitises the error signal of the comb and intensity locks.
//
// Every CONV_DIV clock cycles (100 cycles = 1 MSPS at a 100 MHz clock, the
// rate the paper gives) it pulls cnvst_n low for two cycles, waits for the
// converter's busy output to rise and fall, then drives cs_n and rd_n low
// for RD_CYC cycles and latches the parallel data bus on the last of them.
// The word is presented as a signed two's-complement sample with a
// one-cycle `sample_valid` strobe. If busy never rises within CONV_DIV
// cycles the conversion is abandoned and the next one is started.
// The paper gives the part and its rate only; the parallel read, the
// two's-complement output coding and the strobe timing are this design's
// choices, taken from the vendor's interface description.
module ad7671_if
  import ionctl_pkg::*;
#(
  parameter int unsigned CONV_DIV = 100,
  parameter int unsigned RD_CYC   = 3
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         enable,
  // ADC pins
  output logic         cnvst_n,
  output logic         cs_n,
  output logic         rd_n,
  input  logic         busy,
  input  logic [15:0]  db,
  // sample stream
  output adc16_t       sample,
  output logic         sample_valid
);
  typedef enum logic [2:0] {S_IDLE, S_CONV, S_WAIT_HI, S_WAIT_LO, S_READ} state_e;
  state_e state;
  logic [$clog2(CONV_DIV)-1:0] tick;
  logic [7:0]                  cnt;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE; tick <= '0; cnt <= '0;
      cnvst_n <= 1'b1; cs_n <= 1'b1; rd_n <= 1'b1;
      sample <= '0; sample_valid <= 1'b0;
    end else begin
      sample_valid <= 1'b0;
      tick <= (tick == $bits(tick)'(CONV_DIV - 1)) ? '0 : tick + 1'b1;
      unique case (state)
        S_IDLE: if (enable && tick == 0) begin
          cnvst_n <= 1'b0; cnt <= '0; state <= S_CONV;
        end
        S_CONV: begin
          cnt <= cnt + 1'b1;
          if (cnt == 8'd1) begin cnvst_n <= 1'b1; cnt <= '0; state <= S_WAIT_HI; end
        end
        S_WAIT_HI: begin
          cnt <= cnt + 1'b1;
          if (busy) state <= S_WAIT_LO;
          else if (tick == $bits(tick)'(CONV_DIV - 1)) state <= S_IDLE;
        end
        S_WAIT_LO: if (!busy) begin
          cs_n <= 1'b0; rd_n <= 1'b0; cnt <= '0; state <= S_READ;
        end
        S_READ: begin
          cnt <= cnt + 1'b1;
          if (cnt == 8'(RD_CYC - 1)) begin
            sample <= adc16_t'(db); sample_valid <= 1'b1;
            cs_n <= 1'b1; rd_n <= 1'b1; state <= S_IDLE;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end
endmodule
