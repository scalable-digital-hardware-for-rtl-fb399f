// comb_lock: digital lock of a DDS to the repetition rate of a mode-locked
// laser, with feed-forward of the n-th harmonic of the drift to the AOM DDS.
//
// The mixer output between the photodiode signal at frep and DDS0 at f0 is
// sampled by the AD7671 (1 MSPS), optionally block-averaged over N = 2**log2n
// samples, and fed to the incremental PI update
//     f0(k+1) = f0(k) + P e_k + I sum e_n,
// whose result is written to DDS0 so that f0 tracks frep. The change
// delta = f0(k+1) - f0(k) is the measured drift of frep; the lock feeds
// n*delta forward to the second AOM tone, f2(k+1) = f2(k) + n*delta, which
// keeps fq = n*frep + (f1 - f2) constant. n = HARMONIC_N = 166 as in the
// paper (frep ~ 76 MHz, fq ~ 12.6 GHz). Frequencies are 48-bit AD9912 tuning
// words; `load` sets f0 and f2 to their start values and clears the sum.
// Timing: a PI result appears two cycles after an (averaged) sample, f2 one
// cycle later; each DDS write then takes about 135 cycles, so with no
// averaging the DDS ports carry the latest value rather than every one.
// The loop structure and equations are the paper's; gain format (SHIFT
// fraction bits), widths and the DDS write scheduling are this design's.
module comb_lock
  import ionctl_pkg::*;
#(
  parameter int unsigned CONV_DIV   = 100,
  parameter int unsigned HARMONIC   = HARMONIC_N,
  parameter int unsigned SHIFT      = 8,
  parameter int unsigned LOG2N_MAX  = 4,
  parameter int unsigned DDS_HALF_DIV = 1
) (
  input  logic                           clk,
  input  logic                           rst_n,
  // control
  input  logic                           lock_en,
  input  logic                           load,
  input  ftw_t                           f0_init,
  input  ftw_t                           f2_init,
  input  logic signed [15:0]             kp,
  input  logic signed [15:0]             ki,
  input  logic [$clog2(LOG2N_MAX+1)-1:0] log2n,
  // AD7671 pins
  output logic                           adc_cnvst_n,
  output logic                           adc_cs_n,
  output logic                           adc_rd_n,
  input  logic                           adc_busy,
  input  logic [15:0]                    adc_db,
  // DDS0 (f0) and DDS2 (f2) serial ports
  output logic                           dds0_sclk, dds0_csb, dds0_sdio, dds0_io_update,
  output logic                           dds2_sclk, dds2_csb, dds2_sdio, dds2_io_update,
  // status
  output ftw_t                           f0,
  output ftw_t                           f2,
  output adc16_t                         err_avg,
  output logic                           update_strobe
);
  adc16_t sample;   logic sample_valid;
  logic   avg_valid;
  logic signed [FTW_W:0] delta;
  logic   pi_valid;
  logic   load_d;
  logic   f2_valid;
  logic   b0, b2, w0, w2;

  ad7671_if #(.CONV_DIV(CONV_DIV)) u_adc (
    .clk, .rst_n, .enable(lock_en),
    .cnvst_n(adc_cnvst_n), .cs_n(adc_cs_n), .rd_n(adc_rd_n), .busy(adc_busy), .db(adc_db),
    .sample, .sample_valid);

  avg_filter #(.W(16), .LOG2N_MAX(LOG2N_MAX)) u_avg (
    .clk, .rst_n, .log2n, .in(sample), .in_valid(sample_valid),
    .out(err_avg), .out_valid(avg_valid));

  pi_incr #(.EW(16), .GW(16), .YW(FTW_W), .SW(40), .SHIFT(SHIFT)) u_pi (
    .clk, .rst_n, .enable(lock_en), .load, .y_init(f0_init),
    .y_min('0), .y_max({FTW_W{1'b1}}), .kp, .ki, .e(err_avg), .in_valid(avg_valid),
    .y(f0), .delta, .out_valid(pi_valid));

  // Feed-forward of the n-th harmonic of the drift to f2 (Eq. 4).
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      f2 <= '0; f2_valid <= 1'b0; load_d <= 1'b0;
    end else begin
      f2_valid <= 1'b0;
      load_d   <= load;
      if (load) f2 <= f2_init;
      else if (pi_valid) begin
        f2       <= FTW_W'($signed({1'b0, f2}) + $signed(HARMONIC) * delta);
        f2_valid <= 1'b1;
      end
    end
  end

  assign update_strobe = f2_valid;

  ad9912_writer #(.HALF_DIV(DDS_HALF_DIV)) u_dds0 (
    .clk, .rst_n, .ftw(f0), .ftw_req(pi_valid | load_d), .amp('0), .amp_req(1'b0),
    .sclk(dds0_sclk), .csb(dds0_csb), .sdio(dds0_sdio), .io_update(dds0_io_update),
    .busy(b0), .ftw_written(w0));

  ad9912_writer #(.HALF_DIV(DDS_HALF_DIV)) u_dds2 (
    .clk, .rst_n, .ftw(f2), .ftw_req(f2_valid | load_d), .amp('0), .amp_req(1'b0),
    .sclk(dds2_sclk), .csb(dds2_csb), .sdio(dds2_sdio), .io_update(dds2_io_update),
    .busy(b2), .ftw_written(w2));
endmodule
