// ad7608_ctrl: ADC controller of the next-generation lock.
//
// Every CONV_DIV cycles (500 = 200 kHz at 100 MHz, the AD7608's maximum
// rate, at which the paper runs it) it raises convst for two cycles, waits
// for busy to rise and fall, and then reads the eight 18-bit results one
// after another (cs_n and rd_n low for RD_CYC cycles per channel, then high
// for one cycle). Each result leaves as a (channel, sample) word with a
// one-cycle strobe, so the pipeline behind sees one channel at a time, as the
// paper describes. The 18-bit parallel read in one access per channel and
// two's-complement coding are simplifications chosen here; the real part
// can also deliver its words serially or in two 16-bit reads.
module ad7608_ctrl
  import ionctl_pkg::*;
#(
  parameter int unsigned CONV_DIV = 500,
  parameter int unsigned RD_CYC   = 3
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        enable,
  // ADC pins
  output logic        convst,
  output logic        cs_n,
  output logic        rd_n,
  input  logic        busy,
  input  logic [17:0] db,
  // sample stream, one channel at a time
  output logic [2:0]  ch,
  output adc18_t      sample,
  output logic        valid
);
  typedef enum logic [2:0] {A_IDLE, A_CONV, A_WAIT_HI, A_WAIT_LO, A_READ, A_GAP} astate_e;
  astate_e st;
  logic [$clog2(CONV_DIV)-1:0] tick;
  logic [7:0] cnt;
  logic [2:0] rch;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= A_IDLE; tick <= '0; cnt <= '0; rch <= '0;
      convst <= 1'b0; cs_n <= 1'b1; rd_n <= 1'b1; ch <= '0; sample <= '0; valid <= 1'b0;
    end else begin
      valid <= 1'b0;
      tick <= (tick == $bits(tick)'(CONV_DIV - 1)) ? '0 : tick + 1'b1;
      unique case (st)
        A_IDLE: if (enable && tick == 0) begin convst <= 1'b1; cnt <= '0; st <= A_CONV; end
        A_CONV: begin
          cnt <= cnt + 1'b1;
          if (cnt == 8'd1) begin convst <= 1'b0; st <= A_WAIT_HI; end
        end
        A_WAIT_HI: if (busy) st <= A_WAIT_LO;
                   else if (tick == $bits(tick)'(CONV_DIV - 1)) st <= A_IDLE;
        A_WAIT_LO: if (!busy) begin rch <= '0; cnt <= '0; cs_n <= 1'b0; rd_n <= 1'b0; st <= A_READ; end
        A_READ: begin
          cnt <= cnt + 1'b1;
          if (cnt == 8'(RD_CYC - 1)) begin
            ch <= rch; sample <= adc18_t'(db); valid <= 1'b1;
            rd_n <= 1'b1; cnt <= '0;
            if (rch == 3'd7) begin cs_n <= 1'b1; st <= A_IDLE; end
            else st <= A_GAP;
          end
        end
        A_GAP: begin rch <= rch + 1'b1; rd_n <= 1'b0; st <= A_READ; end
        default: st <= A_IDLE;
      endcase
    end
  end
endmodule
