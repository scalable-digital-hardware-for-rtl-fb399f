// ad9912_writer: serial port writer for one AD9912 DDS.
//
// A frequency request (ftw_req) writes the 48-bit tuning word as one 64-bit
// streaming transfer (16-bit instruction, six data bytes); an amplitude
// request (amp_req) writes the 10-bit DAC full-scale current word as a
// 32-bit transfer. Each transfer is followed by an IO_UPDATE pulse of
// IOUP_CYC cycles that makes the new value take effect. Requests that arrive
// while a transfer is under way are not queued: the latest frequency and the
// latest amplitude are remembered and written next, so the chip always
// receives the most recent value (frequency before amplitude when both
// wait). One 64-bit write takes 128*HALF_DIV + IOUP_CYC + 1 cycles.
// The paper says only that the FPGA sets the DDS frequency and amplitude;
// the register addresses are the vendor's, the coalescing is this design's.
module ad9912_writer
  import ionctl_pkg::*;
#(
  parameter int unsigned HALF_DIV = 1,
  parameter int unsigned IOUP_CYC = 4
) (
  input  logic  clk,
  input  logic  rst_n,
  input  ftw_t  ftw,
  input  logic  ftw_req,
  input  amp_t  amp,
  input  logic  amp_req,
  output logic  sclk,
  output logic  csb,
  output logic  sdio,
  output logic  io_update,
  output logic  busy,
  output logic  ftw_written     // strobe: a tuning word was made effective
);
  ftw_t ftw_q;  amp_t amp_q;
  logic ftw_pend, amp_pend;
  logic start, spi_busy, spi_done;
  logic [6:0] nbits;
  logic [0:0][63:0] word;
  logic cur_is_ftw;
  logic [7:0] up_cnt;
  typedef enum logic [1:0] {W_IDLE, W_SHIFT, W_UPDATE} wstate_e;
  wstate_e st;

  spi_master #(.LANES(1), .MAXBITS(64), .HALF_DIV(HALF_DIV), .CPOL(1'b0)) u_spi (
    .clk, .rst_n, .start, .nbits, .data(word), .sclk, .cs_n(csb), .sdo(sdio),
    .busy(spi_busy), .done(spi_done));

  assign busy = (st != W_IDLE) || ftw_pend || amp_pend;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ftw_q <= '0; amp_q <= '0; ftw_pend <= 1'b0; amp_pend <= 1'b0;
      st <= W_IDLE; start <= 1'b0; nbits <= '0; word <= '0; cur_is_ftw <= 1'b0;
      io_update <= 1'b0; up_cnt <= '0; ftw_written <= 1'b0;
    end else begin
      start <= 1'b0;
      ftw_written <= 1'b0;
      if (ftw_req) begin ftw_q <= ftw; ftw_pend <= 1'b1; end
      if (amp_req) begin amp_q <= amp; amp_pend <= 1'b1; end
      unique case (st)
        W_IDLE: begin
          if (ftw_pend) begin
            word[0] <= ad9912_ftw_word(ftw_q); nbits <= 7'd64; cur_is_ftw <= 1'b1;
            if (!ftw_req) ftw_pend <= 1'b0;
            start <= 1'b1; st <= W_SHIFT;
          end else if (amp_pend) begin
            word[0] <= {32'b0, ad9912_amp_word(amp_q)}; nbits <= 7'd32; cur_is_ftw <= 1'b0;
            if (!amp_req) amp_pend <= 1'b0;
            start <= 1'b1; st <= W_SHIFT;
          end
        end
        W_SHIFT: if (spi_done) begin
          io_update <= 1'b1; up_cnt <= '0; st <= W_UPDATE;
        end
        W_UPDATE: begin
          up_cnt <= up_cnt + 1'b1;
          if (up_cnt == 8'(IOUP_CYC - 1)) begin
            io_update <= 1'b0; st <= W_IDLE; ftw_written <= cur_is_ftw;
          end
        end
        default: st <= W_IDLE;
      endcase
    end
  end
endmodule
