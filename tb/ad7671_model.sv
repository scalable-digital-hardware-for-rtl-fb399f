// ad7671_model: behavioural model of the AD7671 ADC for testbenches.
// Not synthesizable logic of the design: it stands in for the commercial
// converter. On a falling cnvst_n it samples `value`, holds busy high for
// CONV_CYC clock cycles, and drives the sampled word on db while cs_n and
// rd_n are both low (zero otherwise).
module ad7671_model #(parameter int CONV_CYC = 20) (
  input  logic        clk,
  input  logic        cnvst_n,
  input  logic        cs_n,
  input  logic        rd_n,
  input  logic signed [15:0] value,
  output logic        busy,
  output logic [15:0] db
);
  logic cnv_q = 1'b1;
  logic [15:0] held = '0;
  int cnt = 0;
  initial busy = 1'b0;
  always @(posedge clk) begin
    cnv_q <= cnvst_n;
    if (cnv_q && !cnvst_n) begin held <= value; busy <= 1'b1; cnt <= 0; end
    else if (busy) begin cnt <= cnt + 1; if (cnt == CONV_CYC - 1) busy <= 1'b0; end
  end
  assign db = (!cs_n && !rd_n) ? held : 16'h0000;
endmodule
