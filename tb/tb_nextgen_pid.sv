// tb_nextgen_pid: closed-loop test of the eight-channel PID lock.
// Channel 0 locks a DC output: its ADC input is 20000 minus the DAC8568
// model's channel-0 code. Channel 1 locks a DDS frequency with 4x
// oversampling: its input is the (clamped) difference between a target and
// the tuning word in DDS model 1. Channel 2 drives a DDS amplitude into its
// upper bound, which must be held and flagged as clipped. Channel 5 is
// disabled and must produce nothing.
module tb_nextgen_pid;
  import ionctl_pkg::*;
  logic clk = 0, rst_n = 0, adc_enable = 0;
  pid_chan_cfg_t [NPID-1:0] cfg;
  logic adc_convst, adc_cs_n, adc_rd_n, adc_busy; logic [17:0] adc_db;
  logic dac_sclk, dac_sync_n, dac_din;
  logic [NPID-1:0] dds_sclk, dds_csb, dds_sdio, dds_io_update, clipped;
  logic result_valid; logic [2:0] result_ch; out_word_t result;
  int checks = 0, failures = 0;
  nextgen_pid dut (.*);
  always #5 clk = ~clk;

  logic signed [17:0] values [8];
  ad7608_model #(.CONV_CYC(100)) adc (.clk, .convst(adc_convst), .cs_n(adc_cs_n), .rd_n(adc_rd_n),
                                      .values, .busy(adc_busy), .db(adc_db));
  dac8568_model dac (.sclk(dac_sclk), .sync_n(dac_sync_n), .din(dac_din));
  ad9912_model dds1 (.sclk(dds_sclk[1]), .csb(dds_csb[1]), .sdio(dds_sdio[1]), .io_update(dds_io_update[1]));
  ad9912_model dds2 (.sclk(dds_sclk[2]), .csb(dds_csb[2]), .sdio(dds_sdio[2]), .io_update(dds_io_update[2]));

  localparam longint TARGET = 1_000_000;
  always_comb begin
    longint d;
    for (int k = 0; k < 8; k++) values[k] = 18'sd100;
    values[0] = 18'(20000 - int'(dac.out[0]));
    d = TARGET - longint'(dds1.ftw);
    if (d > 100000) d = 100000; else if (d < -100000) d = -100000;
    values[1] = 18'(d);
    values[2] = 18'sd5000;
  end

  int nres [8];
  // Every result must respect its channel's bounds; the P-only mapped channel
  // 3 sees a constant input, so each of its results is exactly 2*100 + 7.
  always @(posedge clk) if (rst_n && result_valid) begin
    nres[result_ch]++;
    checks++;
    if ($signed(result) < $signed(cfg[result_ch].lo) || $signed(result) > $signed(cfg[result_ch].hi)) begin
      failures++; $display("ch%0d result %0d outside bounds", result_ch, $signed(result));
    end
    if (result_ch == 3'd3) begin
      checks++; if (result != 48'd207) begin failures++; $display("ch3 result %0d", result); end
    end
  end

  initial begin #50000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  initial begin
    cfg = '0;
    for (int c = 0; c < 8; c++) begin cfg[c].hi = 48'sd65535; nres[c] = 0; end
    cfg[0].enable = 1; cfg[0].ki = 16'sd16; cfg[0].dest = DEST_DAC;
    cfg[1].enable = 1; cfg[1].ki = 16'sd64; cfg[1].dest = DEST_DDS_FREQ; cfg[1].log2_ratio = 4'd2;
    cfg[1].hi = 48'hFFFF_FFFF;
    cfg[2].enable = 1; cfg[2].ki = 16'sd256; cfg[2].dest = DEST_DDS_AMP; cfg[2].hi = 48'sd1023;
    cfg[3].enable = 1; cfg[3].kp = 16'sd256; cfg[3].dest = DEST_DAC;              // P only, with linear map
    cfg[3].lin_en = 1; cfg[3].gain = 16'sd512; cfg[3].offset = 48'sd7;           // y = 2*100 + 7
    #23 rst_n = 1; adc_enable = 1;
    repeat (400) repeat (500) @(negedge clk);
    checks++; if (int'(dac.out[0]) < 19990 || int'(dac.out[0]) > 20010) begin failures++; $display("ch0 DAC %0d", dac.out[0]); end
    checks++; if (longint'(dds1.ftw) < TARGET - 50 || longint'(dds1.ftw) > TARGET + 50) begin failures++; $display("ch1 ftw %0d", dds1.ftw); end
    checks++; if (dds2.amp != 10'd1023 || !clipped[2]) begin failures++; $display("ch2 amp %0d clipped %b", dds2.amp, clipped[2]); end
    checks++; if (dac.out[3] != 16'd207) begin failures++; $display("ch3 DAC %0d", dac.out[3]); end
    checks++; if (nres[5] != 0) begin failures++; $display("disabled channel produced output"); end
    checks++; if (nres[1] * 4 < nres[0] - 4 || nres[1] * 4 > nres[0] + 4) begin failures++; $display("oversampling: %0d vs %0d", nres[1], nres[0]); end
    // 400 ADC frames of 500 cycles at 200 kHz: one result per frame on ch0
    checks++; if (nres[0] < 398 || nres[0] > 400) begin failures++; $display("ch0 results %0d, expected ~400", nres[0]); end
    // routing: only DAC-destined channels reach the DAC8568
    checks++; if (dac.out[1] != 0 || dac.out[2] != 0 || dac.out[5] != 0) begin failures++; $display("non-DAC channel reached the DAC"); end
    checks++; if (dac.n_bad + dds1.n_bad + dds2.n_bad != 0) failures++;
    $display("results ch0=%0d ch1=%0d", nres[0], nres[1]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
