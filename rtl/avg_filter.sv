// avg_filter: block-averaging filter on the error samples.
//
// After 2**log2n input samples it emits their mean, (sum) >>> log2n, with a
// one-cycle out_valid strobe in the cycle after the last sample, then starts
// a new block. log2n = 0 passes every sample through with one cycle of
// latency. This is the filter the paper inserts in front of the comb-lock PI
// loop (N = 1, 4 and 16 are evaluated); restricting N to powers of two, so
// that the division is a shift, is this design's choice. The lock bandwidth
// falls by 1/N because the PI loop sees one sample per block.
module avg_filter #(
  parameter int unsigned W         = 16,
  parameter int unsigned LOG2N_MAX = 4
) (
  input  logic                            clk,
  input  logic                            rst_n,
  input  logic [$clog2(LOG2N_MAX+1)-1:0]  log2n,
  input  logic signed [W-1:0]             in,
  input  logic                            in_valid,
  output logic signed [W-1:0]             out,
  output logic                            out_valid
);
  localparam int unsigned AW = W + LOG2N_MAX;
  logic signed [AW-1:0]  acc;
  logic [LOG2N_MAX:0]    cnt;
  logic signed [AW-1:0]  sum;
  logic [LOG2N_MAX:0]    last;

  assign sum  = acc + AW'(in);
  assign last = (LOG2N_MAX+1)'((1 << log2n) - 1);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      acc <= '0; cnt <= '0; out <= '0; out_valid <= 1'b0;
    end else begin
      out_valid <= 1'b0;
      if (in_valid) begin
        if (cnt >= last) begin
          out       <= W'(sum >>> log2n);
          out_valid <= 1'b1;
          acc       <= '0;
          cnt       <= '0;
        end else begin
          acc <= sum;
          cnt <= cnt + 1'b1;
        end
      end
    end
  end
endmodule
