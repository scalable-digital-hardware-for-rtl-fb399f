// output_proc: output processor of the next-generation lock.
//
// For a PID result x of channel c it optionally applies the channel's linear
// transformation y = ((gain*x) >>> 8) + offset, then clamps y to the
// channel's bounds [lo, hi]; `clipped` flags a result that had to be
// clamped. One cycle of latency. Bounds and the optional linear map are what
// the paper lists; the gain format (8 fraction bits) and the order (map,
// then bound) are this design's choices. The bounds should be set to the
// range of the chosen output: 0..65535 for a DAC code, 0..1023 for a DDS
// amplitude, 0..2**48-1 for a DDS tuning word.
module output_proc
  import ionctl_pkg::*;
#(
  parameter int unsigned NCH = NPID
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  pid_chan_cfg_t [NCH-1:0]    cfg,
  input  logic [$clog2(NCH)-1:0]     in_ch,
  input  out_word_t                  in_x,
  input  logic                       in_valid,
  output logic [$clog2(NCH)-1:0]     out_ch,
  output out_word_t                  out_y,
  output logic                       out_valid,
  output logic                       clipped
);
  localparam int unsigned XW = OUT_W + 18;
  logic signed [XW-1:0] m;
  out_word_t            y;
  logic                 clip;

  always_comb begin
    pid_chan_cfg_t c;
    c = cfg[in_ch];
    if (c.lin_en) m = ((XW'(c.gain) * XW'(in_x)) >>> 8) + XW'(c.offset);
    else          m = XW'(in_x);
    clip = 1'b1;
    if (m < XW'(c.lo))      y = c.lo;
    else if (m > XW'(c.hi)) y = c.hi;
    else begin              y = OUT_W'(m); clip = 1'b0; end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_ch <= '0; out_y <= '0; out_valid <= 1'b0; clipped <= 1'b0;
    end else begin
      out_valid <= in_valid;
      if (in_valid) begin out_ch <= in_ch; out_y <= y; clipped <= clip; end
    end
  end
endmodule
