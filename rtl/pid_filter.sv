// pid_filter: discrete PID filter shared by the eight lock channels.
//
// For each averaged error e of channel c it computes, in one cycle,
//     I_c += e                         (saturating)
//     u    = (kp*e + ki*I_c + kd*(e - e_prev_c)) >>> SHIFT
// and stores e as e_prev_c; u leaves with the channel number one cycle
// later. The state of the eight channels is kept in small register arrays,
// so one arithmetic unit serves all channels as their words pass one at a
// time. A channel whose `enable` is off produces no output and has its
// integrator and previous error cleared. The paper names a discrete PID
// filter only; this positional form, the gain format and the anti-windup
// saturation are this design's choices.
module pid_filter
  import ionctl_pkg::*;
#(
  parameter int unsigned NCH   = NPID,
  parameter int unsigned EW    = 18,
  parameter int unsigned IW    = 36,
  parameter int unsigned SHIFT = 8
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  pid_chan_cfg_t [NCH-1:0]    cfg,
  input  logic [$clog2(NCH)-1:0]     in_ch,
  input  logic signed [EW-1:0]       in_e,
  input  logic                       in_valid,
  output logic [$clog2(NCH)-1:0]     out_ch,
  output out_word_t                  out_u,
  output logic                       out_valid
);
  localparam int unsigned PW = IW + 18;
  logic signed [IW-1:0] integ [NCH];
  logic signed [EW-1:0] prev  [NCH];
  logic signed [IW-1:0] i_next;
  logic signed [PW-1:0] u;

  always_comb begin
    logic signed [IW:0] t;
    t = (IW+1)'(integ[in_ch]) + (IW+1)'(in_e);
    if (t > (IW+1)'((2**(IW-1)) - 1))   i_next = {1'b0, {(IW-1){1'b1}}};
    else if (t < -(IW+1)'(2**(IW-1)))  i_next = {1'b1, {(IW-1){1'b0}}};
    else                               i_next = IW'(t);
    u = (PW'(cfg[in_ch].kp) * PW'(in_e)
       + PW'(cfg[in_ch].ki) * PW'(i_next)
       + PW'(cfg[in_ch].kd) * (PW'(in_e) - PW'(prev[in_ch]))) >>> SHIFT;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int c = 0; c < NCH; c++) begin integ[c] <= '0; prev[c] <= '0; end
      out_ch <= '0; out_u <= '0; out_valid <= 1'b0;
    end else begin
      out_valid <= 1'b0;
      for (int c = 0; c < NCH; c++)
        if (!cfg[c].enable) begin integ[c] <= '0; prev[c] <= '0; end
      if (in_valid && cfg[in_ch].enable) begin
        integ[in_ch] <= i_next;
        prev[in_ch]  <= in_e;
        out_ch       <= in_ch;
        out_u        <= OUT_W'(u);
        out_valid    <= 1'b1;
      end
    end
  end
endmodule
