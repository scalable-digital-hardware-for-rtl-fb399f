// tb_intensity_lock: closed-loop test of the gated intensity lock.
// The plant model gives a photodiode reading proportional to the DDS model's
// amplitude times a slowly drifting transmission. While the gate is high the
// reading must settle at the setpoint; when the gate falls the amplitude on
// the DDS must stay frozen even though the transmission keeps drifting; a
// second gate must restore the setpoint.
module tb_intensity_lock;
  import ionctl_pkg::*;
  localparam int CONV_DIV = 100;
  logic clk = 0, rst_n = 0, gate = 0, load = 0;
  amp_t amp_init, amp;
  adc16_t setpoint;
  logic signed [15:0] kp, ki;
  logic adc_cnvst_n, adc_cs_n, adc_rd_n, adc_busy; logic [15:0] adc_db;
  logic dds_sclk, dds_csb, dds_sdio, dds_io_update;
  int checks = 0, failures = 0;
  intensity_lock #(.CONV_DIV(CONV_DIV)) dut (.*);
  always #5 clk = ~clk;

  int trans;                     // transmission, in 1/1000
  logic signed [15:0] pd;
  assign pd = 16'((int'(dds.amp) * 20 * trans) / 1000);
  ad7671_model #(.CONV_CYC(30)) adc (.clk, .cnvst_n(adc_cnvst_n), .cs_n(adc_cs_n), .rd_n(adc_rd_n),
                                      .value(pd), .busy(adc_busy), .db(adc_db));
  ad9912_model dds (.sclk(dds_sclk), .csb(dds_csb), .sdio(dds_sdio), .io_update(dds_io_update));

  task automatic expect_near(input string what, input int tol);
    int d; d = int'(pd) - int'(setpoint);
    checks++;
    if (d > tol || d < -tol) begin failures++; $display("%s: pd=%0d setpoint=%0d amp=%0d", what, pd, setpoint, dds.amp); end
  endtask

  // The converter must stay idle while the gate is low (the loop is off), and
  // once a write has finished the DDS must carry the lock's amplitude.
  int conv_gated_off = 0;
  always @(negedge adc_cnvst_n) if (rst_n && !gate && !load) conv_gated_off++;
  longint amp_changed = 0;
  always @(amp) amp_changed = $time;
  always @(negedge dds_io_update) if (rst_n) begin
    repeat (3) @(posedge clk);
    if (dds_csb && $time - amp_changed > 2000) begin
      checks++;
      if (dds.amp != amp) begin failures++; $display("DDS amp %0d != lock amp %0d", dds.amp, amp); end
    end
  end

  initial begin #100000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  initial begin
    amp_init = 10'd300; setpoint = 16'sd10000; kp = 16'sd12; ki = 16'sd0; trans = 1000;
    #23 rst_n = 1;
    @(negedge clk); load = 1; @(negedge clk); load = 0;
    repeat (300) @(negedge clk);
    checks++; if (dds.amp != 10'd300) failures++;
    gate = 1;
    repeat (2000*CONV_DIV) @(negedge clk);
    expect_near("first gate", 40);
    gate = 0;
    repeat (300) @(negedge clk);
    begin
      amp_t held; int nw;
      held = dds.amp; nw = dds.n_amp;
      repeat (50) begin trans = trans - 4; repeat (10*CONV_DIV) @(negedge clk); end
      checks++; if (dds.amp != held || dds.n_amp != nw || amp != held) begin failures++; $display("amplitude not held"); end
      checks++; if (int'(pd) > int'(setpoint) - 1000) begin failures++; $display("plant did not drift"); end
    end
    gate = 1;
    repeat (2000*CONV_DIV) @(negedge clk);
    expect_near("second gate", 40);
    checks++; if (dds.n_bad != 0) failures++;
    checks++; if (conv_gated_off != 0) begin failures++; $display("%0d conversions while gated off", conv_gated_off); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
