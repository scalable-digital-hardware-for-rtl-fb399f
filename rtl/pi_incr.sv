// pi_incr: the incremental proportional-integral update of the digital locks.
//
// For each error sample e_k (in_valid) it forms the running sum
// S_k = S_{k-1} + e_k and updates its output register as
//     y(k+1) = y(k) + ((P*e_k + I*S_k) >>> SHIFT),
// which is the paper's f0(k+1) = f0(k) + P e_k + I sum_{n<=k} e_n with the
// gains P and I read as fixed-point numbers with SHIFT fraction bits (the
// paper gives P = 1 for its step test and chooses I for a 50 Hz/s slew, but
// no number format). The new y is clamped to [y_min, y_max]; `delta` is the
// change actually applied, which the comb lock feeds forward. The result
// appears with out_valid one cycle after the sample. When `enable` is low
// samples are ignored and y and S hold (the intensity lock's sample and
// hold); `load` sets y to y_init and clears S. Widths are this design's.
module pi_incr #(
  parameter int unsigned EW    = 16,   // error width
  parameter int unsigned GW    = 16,   // gain width (signed)
  parameter int unsigned YW    = 48,   // output width (unsigned)
  parameter int unsigned SW    = 40,   // running-sum width
  parameter int unsigned SHIFT = 8     // fraction bits of P and I
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  enable,
  input  logic                  load,
  input  logic [YW-1:0]         y_init,
  input  logic [YW-1:0]         y_min,
  input  logic [YW-1:0]         y_max,
  input  logic signed [GW-1:0]  kp,
  input  logic signed [GW-1:0]  ki,
  input  logic signed [EW-1:0]  e,
  input  logic                  in_valid,
  output logic [YW-1:0]         y,
  output logic signed [YW:0]    delta,
  output logic                  out_valid
);
  localparam int unsigned CW = SW + GW + 1;   // correction width
  localparam int unsigned XW = (CW > YW + 2) ? CW : YW + 2;

  logic signed [SW-1:0] s_next;
  logic signed [SW-1:0] s_q;
  logic signed [CW-1:0] corr;
  logic signed [XW-1:0] y_ext, y_clamped;

  // Saturating running sum.
  always_comb begin
    logic signed [SW:0] t;
    t = SW'(s_q) + (SW+1)'(e);
    if (t > (SW+1)'((2**(SW-1)) - 1))    s_next = {1'b0, {(SW-1){1'b1}}};
    else if (t < -(SW+1)'(2**(SW-1)))   s_next = {1'b1, {(SW-1){1'b0}}};
    else                                s_next = SW'(t);
    corr  = (CW'(kp) * CW'(e) + CW'(ki) * CW'(s_next)) >>> SHIFT;
    y_ext = XW'($signed({1'b0, y})) + XW'(corr);
    if (y_ext < XW'($signed({1'b0, y_min})))      y_clamped = XW'($signed({1'b0, y_min}));
    else if (y_ext > XW'($signed({1'b0, y_max}))) y_clamped = XW'($signed({1'b0, y_max}));
    else                                          y_clamped = y_ext;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      y <= '0; s_q <= '0; delta <= '0; out_valid <= 1'b0;
    end else begin
      out_valid <= 1'b0;
      if (load) begin
        y <= y_init; s_q <= '0; delta <= '0;
      end else if (enable && in_valid) begin
        s_q       <= s_next;
        y         <= YW'(y_clamped);
        delta     <= (YW+1)'(y_clamped - XW'($signed({1'b0, y})));
        out_valid <= 1'b1;
      end
    end
  end
endmodule
