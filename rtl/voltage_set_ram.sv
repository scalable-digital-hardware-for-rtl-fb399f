// voltage_set_ram: on-chip block memory for the stored voltage sets.
//
// Holds NSETS sets (32 in the paper) of NCHIP*4 = 100 electrode codes. A row
// is one DAC channel index (0..3) of one set across all NCHIP chips, so one
// read returns the NCHIP codes that go out in the same serial word; the
// sequencer reads the four rows of a set in four cycles. Writes come one
// electrode at a time from the host port (set, channel c = chip*4 + dac
// channel, code). Reads have one cycle of latency. The set count is the
// paper's; the row organisation is this design's choice.
module voltage_set_ram
  import ionctl_pkg::*;
#(
  parameter int unsigned NSETS = 32,
  parameter int unsigned NCHIP = 25
) (
  input  logic                              clk,
  // host write port
  input  logic                              we,
  input  logic [$clog2(NSETS)-1:0]          wset,
  input  logic [$clog2(NCHIP*4)-1:0]        wchan,
  input  dac_code_t                         wdata,
  // sequencer read port
  input  logic [$clog2(NSETS)-1:0]          rset,
  input  logic [1:0]                        rrow,
  output dac_code_t [NCHIP-1:0]             rdata
);
  localparam int unsigned CW = $clog2(NCHIP*4);
  localparam int unsigned KW = (NCHIP > 1) ? $clog2(NCHIP) : 1;
  dac_code_t mem [NSETS*4][NCHIP];
  logic [KW-1:0] wchip;
  assign wchip = wchan[CW-1:2];

  always_ff @(posedge clk) begin
    if (we) mem[{wset, wchan[1:0]}][wchip] <= wdata;
    for (int c = 0; c < NCHIP; c++) rdata[c] <= mem[{rset, rrow}][c];
  end
endmodule
