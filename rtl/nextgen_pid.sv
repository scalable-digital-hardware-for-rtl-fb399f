// nextgen_pid: eight concurrent PID locks sharing one processing pipeline.
//
// The AD7608 controller reads the eight error channels at 200 kHz and hands
// them one at a time to the pipeline:
//     oversampler -> PID filter -> output processor -> router
// each stage taking one cycle and keeping per-channel state. The router
// sends channel c's result, according to its `dest` setting, to channel c
// of the DAC8568 (DC output, 16-bit code = low bits of the bounded result),
// to the frequency of DDS c (48-bit tuning word) or to the amplitude of DDS
// c (10-bit word). Per-channel settings arrive as a packed struct array
// (pid_chan_cfg_t) that the host would write over USB. The stage order and
// the roles of the stages follow the paper's description; one AD9912 per
// channel and the routing encoding are this design's choices. The chips'
// own limits (66 kHz DAC, 100 kHz DDS update rates in the paper) are not
// enforced here: each output port simply carries its channel's latest value.
module nextgen_pid
  import ionctl_pkg::*;
#(
  parameter int unsigned CONV_DIV = 500,
  parameter int unsigned SHIFT    = 8
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic                      adc_enable,
  input  pid_chan_cfg_t [NPID-1:0]  cfg,
  // AD7608 pins
  output logic                      adc_convst,
  output logic                      adc_cs_n,
  output logic                      adc_rd_n,
  input  logic                      adc_busy,
  input  logic [17:0]               adc_db,
  // DAC8568 pins
  output logic                      dac_sclk,
  output logic                      dac_sync_n,
  output logic                      dac_din,
  // one AD9912 serial port per channel
  output logic [NPID-1:0]           dds_sclk,
  output logic [NPID-1:0]           dds_csb,
  output logic [NPID-1:0]           dds_sdio,
  output logic [NPID-1:0]           dds_io_update,
  // status
  output logic [NPID-1:0]           clipped,
  output logic                      result_valid,
  output logic [2:0]                result_ch,
  output out_word_t                 result
);
  logic [2:0] a_ch, o_ch, p_ch;
  adc18_t     a_x, o_x;
  logic       a_v, o_v, p_v;
  out_word_t  p_u;
  logic       clip;
  logic       dac_busy, dac_wd;
  logic [NPID-1:0] dds_busy, dds_w;

  ad7608_ctrl #(.CONV_DIV(CONV_DIV)) u_adc (
    .clk, .rst_n, .enable(adc_enable), .convst(adc_convst), .cs_n(adc_cs_n), .rd_n(adc_rd_n),
    .busy(adc_busy), .db(adc_db), .ch(a_ch), .sample(a_x), .valid(a_v));

  oversampler #(.NCH(NPID), .W(18)) u_os (
    .clk, .rst_n, .cfg, .in_ch(a_ch), .in_data(a_x), .in_valid(a_v),
    .out_ch(o_ch), .out_data(o_x), .out_valid(o_v));

  pid_filter #(.NCH(NPID), .EW(18), .SHIFT(SHIFT)) u_pid (
    .clk, .rst_n, .cfg, .in_ch(o_ch), .in_e(o_x), .in_valid(o_v),
    .out_ch(p_ch), .out_u(p_u), .out_valid(p_v));

  output_proc #(.NCH(NPID)) u_op (
    .clk, .rst_n, .cfg, .in_ch(p_ch), .in_x(p_u), .in_valid(p_v),
    .out_ch(result_ch), .out_y(result), .out_valid(result_valid), .clipped(clip));

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) clipped <= '0;
    else if (result_valid) clipped[result_ch] <= clip;

  // Router.
  logic to_dac;
  assign to_dac = result_valid && cfg[result_ch].dest == DEST_DAC;

  dac8568_ctrl u_dac (
    .clk, .rst_n, .wr(to_dac), .wr_ch(result_ch), .wr_code(dac_code_t'(result[DAC_W-1:0])),
    .sclk(dac_sclk), .sync_n(dac_sync_n), .din(dac_din), .busy(dac_busy), .word_done(dac_wd));

  for (genvar g = 0; g < NPID; g++) begin : g_dds
    logic hit;
    assign hit = result_valid && result_ch == 3'(g);
    ad9912_writer u_dds (
      .clk, .rst_n,
      .ftw(ftw_t'(result[FTW_W-1:0])), .ftw_req(hit && cfg[g].dest == DEST_DDS_FREQ),
      .amp(amp_t'(result[AMP_W-1:0])), .amp_req(hit && cfg[g].dest == DEST_DDS_AMP),
      .sclk(dds_sclk[g]), .csb(dds_csb[g]), .sdio(dds_sdio[g]), .io_update(dds_io_update[g]),
      .busy(dds_busy[g]), .ftw_written(dds_w[g]));
  end
endmodule
