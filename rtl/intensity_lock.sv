// intensity_lock: sample-and-hold stabilisation of the Raman beam power.
//
// A photodiode after the fibre is sampled by the AD7671; the error
// e = setpoint - sample drives the same incremental PI update as the comb
// lock, whose 10-bit result is the AD9912 full-scale-current (amplitude)
// word of the DDS feeding AOM 1. The loop runs only while the digital
// trigger `gate` from the main controller is high (the paper turns it on
// during Doppler cooling); when the gate falls, the last amplitude is held
// on the DDS until the next gate. Amplitude writes go to the DDS whenever
// the PI result changes; `load` sets the amplitude to amp_init.
// The gating and hold follow the paper; the error sign, the clamp to the
// 10-bit range and the gain format are this design's choices.
module intensity_lock
  import ionctl_pkg::*;
#(
  parameter int unsigned CONV_DIV = 100,
  parameter int unsigned SHIFT    = 8,
  parameter int unsigned DDS_HALF_DIV = 1
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               gate,
  input  logic               load,
  input  amp_t               amp_init,
  input  adc16_t             setpoint,
  input  logic signed [15:0] kp,
  input  logic signed [15:0] ki,
  // AD7671 pins
  output logic               adc_cnvst_n,
  output logic               adc_cs_n,
  output logic               adc_rd_n,
  input  logic               adc_busy,
  input  logic [15:0]        adc_db,
  // DDS serial port
  output logic               dds_sclk, dds_csb, dds_sdio, dds_io_update,
  // status
  output amp_t               amp
);
  adc16_t sample; logic sample_valid;
  logic signed [16:0] err_w;
  adc16_t err;
  logic signed [AMP_W:0] delta;
  logic pi_valid, load_d, busy, w;

  ad7671_if #(.CONV_DIV(CONV_DIV)) u_adc (
    .clk, .rst_n, .enable(gate),
    .cnvst_n(adc_cnvst_n), .cs_n(adc_cs_n), .rd_n(adc_rd_n), .busy(adc_busy), .db(adc_db),
    .sample, .sample_valid);

  // Saturate the 17-bit difference to 16 bits.
  always_comb begin
    err_w = 17'(setpoint) - 17'(sample);
    if (err_w > 17'sd32767)       err = 16'sh7FFF;
    else if (err_w < -17'sd32768) err = 16'sh8000;
    else                          err = 16'(err_w);
  end

  pi_incr #(.EW(16), .GW(16), .YW(AMP_W), .SW(32), .SHIFT(SHIFT)) u_pi (
    .clk, .rst_n, .enable(gate), .load, .y_init(amp_init),
    .y_min('0), .y_max({AMP_W{1'b1}}), .kp, .ki, .e(err), .in_valid(sample_valid),
    .y(amp), .delta, .out_valid(pi_valid));

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) load_d <= 1'b0; else load_d <= load;


  ad9912_writer #(.HALF_DIV(DDS_HALF_DIV)) u_dds (
    .clk, .rst_n, .ftw('0), .ftw_req(1'b0), .amp, .amp_req((pi_valid && delta != 0) || load_d),
    .sclk(dds_sclk), .csb(dds_csb), .sdio(dds_sdio), .io_update(dds_io_update),
    .busy, .ftw_written(w));
endmodule
