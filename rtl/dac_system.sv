// dac_system: the 100-channel trap-electrode DAC controller.
//
// Connects the voltage-set block memory (32 sets of 100 codes), the
// sequencer that steps the electrodes towards a chosen set at a given
// update period and step size, and the bus controller of the 25 DAC8734
// chips. The host writes codes into the memory one electrode at a time and
// then issues commands; `cur_codes` shows what the DACs were last sent.
// The host link (USB on the paper's FPGA module), the SDRAM that holds up to
// 8 M further sets, and the assembly-code program are outside this module.
module dac_system
  import ionctl_pkg::*;
#(
  parameter int unsigned NSETS    = 32,
  parameter int unsigned NCHIP    = 25,
  parameter int unsigned HALF_DIV = 1,
  parameter int unsigned PW       = 24
) (
  input  logic                          clk,
  input  logic                          rst_n,
  // host: voltage-set writes
  input  logic                          set_we,
  input  logic [$clog2(NSETS)-1:0]      set_wsel,
  input  logic [$clog2(NCHIP*4)-1:0]    set_wchan,
  input  dac_code_t                     set_wdata,
  // host: commands
  input  logic                          go,
  input  logic [$clog2(NSETS)-1:0]      go_set,
  input  dac_code_t                     go_step,
  input  logic [PW-1:0]                 go_period,
  // DAC8734 bus
  output logic                          dac_sclk,
  output logic                          dac_cs_n,
  output logic [NCHIP-1:0]              dac_sdi,
  output logic                          dac_ldac_n,
  // status
  output logic                          busy,
  output logic                          done,
  output logic [31:0]                   n_updates,
  output dac_code_t [NCHIP-1:0][3:0]    cur_codes
);
  logic [$clog2(NSETS)-1:0] rset;
  logic [1:0]               rrow;
  dac_code_t [NCHIP-1:0]    rdata;
  logic                     dac_start, dac_done, dac_busy;

  voltage_set_ram #(.NSETS(NSETS), .NCHIP(NCHIP)) u_ram (
    .clk, .we(set_we), .wset(set_wsel), .wchan(set_wchan), .wdata(set_wdata),
    .rset, .rrow, .rdata);

  dac_sequencer #(.NSETS(NSETS), .NCHIP(NCHIP), .PW(PW)) u_seq (
    .clk, .rst_n, .go, .set_sel(go_set), .step(go_step), .period(go_period),
    .rset, .rrow, .rdata, .dac_start, .codes(cur_codes), .dac_done,
    .busy, .done, .n_updates);

  dac8734_ctrl #(.NCHIP(NCHIP), .HALF_DIV(HALF_DIV)) u_bus (
    .clk, .rst_n, .start(dac_start), .codes(cur_codes),
    .sclk(dac_sclk), .cs_n(dac_cs_n), .sdi(dac_sdi), .ldac_n(dac_ldac_n),
    .busy(dac_busy), .done(dac_done));
endmodule
