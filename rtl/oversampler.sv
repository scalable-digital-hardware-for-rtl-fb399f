// oversampler: per-channel averaging stage at the head of the PID pipeline.
//
// Words arrive one channel at a time. For each channel it accumulates the
// words and counts them; when the count reaches that channel's oversample
// ratio 2**log2_ratio it passes the average, sum >>> log2_ratio, to the PID
// stage (one cycle after the last word, with the channel number) and starts
// a new block. A ratio of 1 passes every word. The paper describes a running
// average handed on when the ratio is reached; power-of-two ratios (up to
// 2**15, the range of the 4-bit setting) are this design's choice so the
// division is a shift.
module oversampler
  import ionctl_pkg::*;
#(
  parameter int unsigned NCH      = NPID,
  parameter int unsigned W        = 18,
  parameter int unsigned LOG2_MAX = 15
) (
  input  logic                         clk,
  input  logic                         rst_n,
  input  pid_chan_cfg_t [NCH-1:0]      cfg,
  input  logic [$clog2(NCH)-1:0]       in_ch,
  input  logic signed [W-1:0]          in_data,
  input  logic                         in_valid,
  output logic [$clog2(NCH)-1:0]       out_ch,
  output logic signed [W-1:0]          out_data,
  output logic                         out_valid
);
  localparam int unsigned AW = W + LOG2_MAX;
  logic signed [AW-1:0] acc [NCH];
  logic [LOG2_MAX:0]    cnt [NCH];
  logic signed [AW-1:0] sum;
  logic [3:0]           l2;
  logic [LOG2_MAX:0]    last;

  always_comb begin
    l2   = cfg[in_ch].log2_ratio;
    sum  = acc[in_ch] + AW'(in_data);
    last = (LOG2_MAX+1)'((1 << l2) - 1);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int c = 0; c < NCH; c++) begin acc[c] <= '0; cnt[c] <= '0; end
      out_ch <= '0; out_data <= '0; out_valid <= 1'b0;
    end else begin
      out_valid <= 1'b0;
      if (in_valid) begin
        if (cnt[in_ch] >= last) begin
          out_ch    <= in_ch;
          out_data  <= W'(sum >>> l2);
          out_valid <= 1'b1;
          acc[in_ch] <= '0;
          cnt[in_ch] <= '0;
        end else begin
          acc[in_ch] <= sum;
          cnt[in_ch] <= cnt[in_ch] + 1'b1;
        end
      end
    end
  end
endmodule
