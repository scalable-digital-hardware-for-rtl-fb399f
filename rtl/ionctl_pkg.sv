// ionctl_pkg: types and constants shared by the trapped-ion control logic.
//
// Holds the word widths of the converters, the harmonic number used by the
// comb-lock feed-forward, and the serial command encodings of the external
// DDS and DAC chips. The harmonic number n = 166 and the converter
// resolutions (16-bit AD7671, 18-bit AD7608, 16-bit DAC8734 and DAC8568)
// follow the paper. The command encodings are taken from the chip vendors'
// data sheets, which the paper does not reproduce; the 100 MHz system clock
// is this design's own choice.
package ionctl_pkg;

  // System clock assumed for all rate parameters (Hz).
  localparam int unsigned CLK_HZ = 100_000_000;

  // Comb lock: n-th harmonic fed forward to f2 (frep ~ 76 MHz, fq ~ 12.6 GHz).
  localparam int unsigned HARMONIC_N = 166;

  // Word widths.
  localparam int unsigned FTW_W   = 48;  // AD9912 frequency tuning word
  localparam int unsigned AMP_W   = 10;  // AD9912 DAC full-scale current word
  localparam int unsigned ADC16_W = 16;  // AD7671
  localparam int unsigned ADC18_W = 18;  // AD7608
  localparam int unsigned DAC_W   = 16;  // DAC8734 / DAC8568

  typedef logic [FTW_W-1:0]          ftw_t;
  typedef logic [AMP_W-1:0]          amp_t;
  typedef logic signed [ADC16_W-1:0] adc16_t;
  typedef logic signed [ADC18_W-1:0] adc18_t;
  typedef logic [DAC_W-1:0]          dac_code_t;

  // AD9912 serial instruction: R/W, W1:W0 (byte count, 2'b11 = streaming),
  // 13-bit register address; multi-byte writes run towards lower addresses.
  localparam logic [12:0] AD9912_FTW_MSB_ADDR = 13'h01AB;  // FTW0 bytes 0x01AB..0x01A6
  localparam logic [12:0] AD9912_FSC_MSB_ADDR = 13'h040C;  // DAC full-scale current 0x040C..0x040B

  function automatic logic [63:0] ad9912_ftw_word(input ftw_t ftw);
    return {1'b0, 2'b11, AD9912_FTW_MSB_ADDR, ftw};
  endfunction

  function automatic logic [31:0] ad9912_amp_word(input amp_t amp);
    return {1'b0, 2'b01, AD9912_FSC_MSB_ADDR, 6'b0, amp};
  endfunction

  // DAC8734 24-bit word: R/W = 0 (write), 0, 6-bit address, 16-bit data.
  // Data registers of DAC channels 0..3 sit at addresses 4..7.
  function automatic logic [23:0] dac8734_word(input logic [1:0] ch, input dac_code_t code);
    return {1'b0, 1'b0, 6'(4 + ch), code};
  endfunction

  // DAC8568 32-bit word: 4'b0000 prefix, control 4'b0011 (write and update
  // channel), 4-bit address, 16-bit data, 4 feature bits.
  function automatic logic [31:0] dac8568_word(input logic [2:0] ch, input dac_code_t code);
    return {4'b0000, 4'b0011, 1'b0, ch, code, 4'b0000};
  endfunction

  // Output routing of the next-generation PID lock.
  typedef enum logic [1:0] {
    DEST_NONE     = 2'd0,
    DEST_DAC      = 2'd1,
    DEST_DDS_FREQ = 2'd2,
    DEST_DDS_AMP  = 2'd3
  } dest_e;

  // Per-channel settings of the next-generation PID lock (written by the
  // host over USB in the paper's system).
  localparam int unsigned NPID      = 8;   // concurrent locks
  localparam int unsigned OUT_W     = 48;  // output-processor word
  typedef logic signed [OUT_W-1:0] out_word_t;

  typedef struct packed {
    logic               enable;      // lock on
    logic [3:0]         log2_ratio;  // oversample ratio = 2**log2_ratio
    logic signed [15:0] kp;          // PID gains, SHIFT fraction bits
    logic signed [15:0] ki;
    logic signed [15:0] kd;
    dest_e              dest;        // where the result goes
    logic               lin_en;      // apply y = gain*x + offset
    logic signed [15:0] gain;        // 8 fraction bits
    out_word_t          offset;
    out_word_t          lo;          // output bounds
    out_word_t          hi;
  } pid_chan_cfg_t;

endpackage
