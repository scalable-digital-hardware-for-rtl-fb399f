// ad7608_model: behavioural model of the AD7608 eight-channel ADC for
// testbenches (not part of the design). A rising convst samples the eight
// `values`, holds busy high for CONV_CYC cycles, and each falling edge of
// rd_n while cs_n is low moves the output bus on to the next channel.
module ad7608_model #(parameter int CONV_CYC = 100) (
  input  logic        clk,
  input  logic        convst,
  input  logic        cs_n,
  input  logic        rd_n,
  input  logic signed [17:0] values [8],
  output logic        busy,
  output logic [17:0] db
);
  logic cv_q = 1'b0, rd_q = 1'b1;
  logic [17:0] held [8];
  int cnt = 0, idx = 0, n_conv = 0;
  initial begin busy = 1'b0; for (int k = 0; k < 8; k++) held[k] = '0; end
  always @(posedge clk) begin
    cv_q <= convst; rd_q <= rd_n;
    if (!cv_q && convst) begin
      for (int k = 0; k < 8; k++) held[k] <= values[k];
      busy <= 1'b1; cnt <= 0; idx <= -1; n_conv <= n_conv + 1;
    end else if (busy) begin cnt <= cnt + 1; if (cnt == CONV_CYC - 1) busy <= 1'b0; end
    if (rd_q && !rd_n && !cs_n) idx <= idx + 1;
  end
  assign db = (!cs_n && !rd_n && idx >= 0 && idx < 8) ? held[idx] : 18'h0;
endmodule
