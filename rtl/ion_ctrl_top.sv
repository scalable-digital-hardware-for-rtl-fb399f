// ion_ctrl_top: classical control logic of a trapped-ion quantum register.
//
// Gathers the four FPGA functions described for the ion-trap control
// hardware on one clock (100 MHz assumed):
//   * comb_lock      - locks DDS0 to the pulsed laser's repetition rate and
//                      feeds the 166th harmonic of its drift to the AOM DDS2;
//   * intensity_lock - gated sample-and-hold PI loop on the Raman beam power,
//                      acting on the amplitude of the AOM 1 DDS;
//   * nextgen_pid    - eight PID locks sharing one pipeline, with DAC or DDS
//                      outputs;
//   * dac_system     - 32 stored voltage sets driven onto 100 trap electrodes
//                      through 25 DAC8734 chips.
// The subsystems share nothing but the clock and reset; in the paper they sit
// on separate boards, and they are gathered here so that one netlist holds
// all the logic. Everything the host PC sets (over USB in the paper) enters
// as plain ports, and the pins of the external ADC, DAC and DDS chips leave
// as ports.
module ion_ctrl_top
  import ionctl_pkg::*;
#(
  parameter int unsigned NCHIP = 25,
  parameter int unsigned NSETS = 32
) (
  input  logic                       clk,
  input  logic                       rst_n,
  // ---- comb lock ----
  input  logic                       cl_lock_en,
  input  logic                       cl_load,
  input  ftw_t                       cl_f0_init,
  input  ftw_t                       cl_f2_init,
  input  logic signed [15:0]         cl_kp,
  input  logic signed [15:0]         cl_ki,
  input  logic [2:0]                 cl_log2n,
  output logic                       cl_adc_cnvst_n, cl_adc_cs_n, cl_adc_rd_n,
  input  logic                       cl_adc_busy,
  input  logic [15:0]                cl_adc_db,
  output logic                       dds0_sclk, dds0_csb, dds0_sdio, dds0_io_update,
  output logic                       dds2_sclk, dds2_csb, dds2_sdio, dds2_io_update,
  output ftw_t                       cl_f0,
  output ftw_t                       cl_f2,
  output logic                       cl_update,
  output adc16_t                     cl_err_avg,     // averaged error, for lock monitoring
  // ---- intensity lock ----
  input  logic                       il_gate,
  input  logic                       il_load,
  input  amp_t                       il_amp_init,
  input  adc16_t                     il_setpoint,
  input  logic signed [15:0]         il_kp,
  input  logic signed [15:0]         il_ki,
  output logic                       il_adc_cnvst_n, il_adc_cs_n, il_adc_rd_n,
  input  logic                       il_adc_busy,
  input  logic [15:0]                il_adc_db,
  output logic                       il_dds_sclk, il_dds_csb, il_dds_sdio, il_dds_io_update,
  output amp_t                       il_amp,
  // ---- next-generation PID ----
  input  logic                       np_adc_enable,
  input  pid_chan_cfg_t [NPID-1:0]   np_cfg,
  output logic                       np_adc_convst, np_adc_cs_n, np_adc_rd_n,
  input  logic                       np_adc_busy,
  input  logic [17:0]                np_adc_db,
  output logic                       np_dac_sclk, np_dac_sync_n, np_dac_din,
  output logic [NPID-1:0]            np_dds_sclk, np_dds_csb, np_dds_sdio, np_dds_io_update,
  output logic [NPID-1:0]            np_clipped,
  output logic                       np_result_valid,
  output logic [2:0]                 np_result_ch,
  output out_word_t                  np_result,
  // ---- trap DAC system ----
  input  logic                       ds_set_we,
  input  logic [$clog2(NSETS)-1:0]   ds_set_wsel,
  input  logic [$clog2(NCHIP*4)-1:0] ds_set_wchan,
  input  dac_code_t                  ds_set_wdata,
  input  logic                       ds_go,
  input  logic [$clog2(NSETS)-1:0]   ds_go_set,
  input  dac_code_t                  ds_go_step,
  input  logic [23:0]                ds_go_period,
  output logic                       ds_dac_sclk, ds_dac_cs_n, ds_dac_ldac_n,
  output logic [NCHIP-1:0]           ds_dac_sdi,
  output logic                       ds_busy,
  output logic                       ds_done,
  output logic [31:0]                ds_n_updates,
  output dac_code_t [NCHIP-1:0][3:0] ds_cur_codes
);
  comb_lock u_comb (
    .clk, .rst_n, .lock_en(cl_lock_en), .load(cl_load), .f0_init(cl_f0_init), .f2_init(cl_f2_init),
    .kp(cl_kp), .ki(cl_ki), .log2n(cl_log2n),
    .adc_cnvst_n(cl_adc_cnvst_n), .adc_cs_n(cl_adc_cs_n), .adc_rd_n(cl_adc_rd_n),
    .adc_busy(cl_adc_busy), .adc_db(cl_adc_db),
    .dds0_sclk, .dds0_csb, .dds0_sdio, .dds0_io_update,
    .dds2_sclk, .dds2_csb, .dds2_sdio, .dds2_io_update,
    .f0(cl_f0), .f2(cl_f2), .err_avg(cl_err_avg), .update_strobe(cl_update));

  intensity_lock u_int (
    .clk, .rst_n, .gate(il_gate), .load(il_load), .amp_init(il_amp_init), .setpoint(il_setpoint),
    .kp(il_kp), .ki(il_ki),
    .adc_cnvst_n(il_adc_cnvst_n), .adc_cs_n(il_adc_cs_n), .adc_rd_n(il_adc_rd_n),
    .adc_busy(il_adc_busy), .adc_db(il_adc_db),
    .dds_sclk(il_dds_sclk), .dds_csb(il_dds_csb), .dds_sdio(il_dds_sdio), .dds_io_update(il_dds_io_update),
    .amp(il_amp));

  nextgen_pid u_pid (
    .clk, .rst_n, .adc_enable(np_adc_enable), .cfg(np_cfg),
    .adc_convst(np_adc_convst), .adc_cs_n(np_adc_cs_n), .adc_rd_n(np_adc_rd_n),
    .adc_busy(np_adc_busy), .adc_db(np_adc_db),
    .dac_sclk(np_dac_sclk), .dac_sync_n(np_dac_sync_n), .dac_din(np_dac_din),
    .dds_sclk(np_dds_sclk), .dds_csb(np_dds_csb), .dds_sdio(np_dds_sdio), .dds_io_update(np_dds_io_update),
    .clipped(np_clipped), .result_valid(np_result_valid), .result_ch(np_result_ch), .result(np_result));

  dac_system #(.NSETS(NSETS), .NCHIP(NCHIP)) u_dac (
    .clk, .rst_n,
    .set_we(ds_set_we), .set_wsel(ds_set_wsel), .set_wchan(ds_set_wchan), .set_wdata(ds_set_wdata),
    .go(ds_go), .go_set(ds_go_set), .go_step(ds_go_step), .go_period(ds_go_period),
    .dac_sclk(ds_dac_sclk), .dac_cs_n(ds_dac_cs_n), .dac_sdi(ds_dac_sdi), .dac_ldac_n(ds_dac_ldac_n),
    .busy(ds_busy), .done(ds_done), .n_updates(ds_n_updates), .cur_codes(ds_cur_codes));
endmodule
