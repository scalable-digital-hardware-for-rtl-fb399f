// tb_comb_lock: closed-loop test of the repetition-rate lock.
// A plant model turns the difference between the laser repetition rate
// (frep, in tuning-word units) and the frequency actually programmed into
// the DDS0 model into the ADC input, as the mixer and filter would. The test
// steps frep, as in the paper's step-response measurement, and checks that
// f0 re-locks to frep, that f2 - f2_init stays exactly n*(f0 - f0_init) with
// n = 166, that the DDS models carry f0 and f2, and that with N = 4
// averaging the PI loop updates once every 4 ADC samples (every 16 with
// N = 16). Finally, as in the paper's averaging measurement, white noise is
// added to the mixer signal and the mean square of the averaged error must
// fall with N = 16 to well below its N = 1 value (ideally 1/16).
module tb_comb_lock;
  import ionctl_pkg::*;
  localparam int CONV_DIV = 100;
  logic clk = 0, rst_n = 0;
  logic lock_en = 0, load = 0;
  ftw_t f0_init, f2_init, f0, f2;
  logic signed [15:0] kp, ki;
  logic [2:0] log2n;
  logic adc_cnvst_n, adc_cs_n, adc_rd_n, adc_busy;
  logic [15:0] adc_db;
  logic dds0_sclk, dds0_csb, dds0_sdio, dds0_io_update;
  logic dds2_sclk, dds2_csb, dds2_sdio, dds2_io_update;
  adc16_t err_avg; logic update_strobe;
  int checks = 0, failures = 0;

  comb_lock #(.CONV_DIV(CONV_DIV)) dut (.*);
  always #5 clk = ~clk;

  longint frep;
  int noise = 0, noise_amp = 0;
  always @(negedge adc_cnvst_n) noise = (noise_amp == 0) ? 0 : int'($urandom_range(2*noise_amp)) - noise_amp;
  logic signed [15:0] mix;
  always_comb begin
    longint d;
    d = frep - longint'(dds0.ftw);
    if (d > 30000) d = 30000; else if (d < -30000) d = -30000;
    mix = 16'(d + noise);
  end
  ad7671_model #(.CONV_CYC(30)) adc (.clk, .cnvst_n(adc_cnvst_n), .cs_n(adc_cs_n), .rd_n(adc_rd_n),
                                      .value(mix), .busy(adc_busy), .db(adc_db));
  ad9912_model dds0 (.sclk(dds0_sclk), .csb(dds0_csb), .sdio(dds0_sdio), .io_update(dds0_io_update));
  ad9912_model dds2 (.sclk(dds2_sclk), .csb(dds2_csb), .sdio(dds2_sdio), .io_update(dds2_io_update));

  // invariant f2 - f2_init == n * (f0 - f0_init), checked on every update
  int nupd = 0; longint last_upd = -1; int period_err = 0; bit check_period = 0; int exp_period = 0;
  real msq = 0.0; int nmsq = 0; bit acc_msq = 0;
  always @(posedge clk) if (rst_n && update_strobe) begin
    nupd++;
    if (longint'(f2) - longint'(f2_init) != 166 * (longint'(f0) - longint'(f0_init))) begin
      failures++; $display("feed-forward broken f0=%0d f2=%0d", f0, f2);
    end
    checks++;
    if (check_period && last_upd >= 0 && ($time - last_upd)/10 != exp_period) period_err++;
    if (acc_msq) begin msq += real'(err_avg) * real'(err_avg); nmsq++; end
    last_upd = $time;
  end

  task automatic settle_and_check(input string what);
    repeat (2000*CONV_DIV) @(posedge clk);
    checks++;
    if ((frep - longint'(f0)) > 16 || (frep - longint'(f0)) < -16) begin
      failures++; $display("%s: not locked frep=%0d f0=%0d", what, frep, f0);
    end
    repeat (4*CONV_DIV) @(posedge clk);
    checks++; if (dds0.ftw != f0 && (frep - longint'(dds0.ftw)) > 16) begin failures++; $display("dds0 %0d f0 %0d", dds0.ftw, f0); end
  endtask

  initial begin #100000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  initial begin
    f0_init = 48'd1_000_000_000; f2_init = 48'd2_800_000_000;
    kp = 16'sd64; ki = 16'sd1; log2n = 0;
    frep = 1_000_000_000 + 5000;
    #23 rst_n = 1;
    @(negedge clk); load = 1; @(negedge clk); load = 0;
    repeat (400) @(negedge clk);
    checks++; if (dds0.ftw != f0_init || dds2.ftw != f2_init) begin failures++; $display("initial DDS load"); end
    lock_en = 1;
    settle_and_check("initial lock");
    frep = frep - 12000;                       // step in frep
    settle_and_check("after step down");
    log2n = 2;                                 // N = 4 averaging
    frep = frep + 7000;
    repeat (40*CONV_DIV) @(posedge clk);
    check_period = 1; exp_period = 4*CONV_DIV;
    settle_and_check("N=4");
    checks++; if (period_err != 0) begin failures++; $display("N=4 update period wrong %0d times", period_err); end
    check_period = 0; log2n = 4;               // N = 16 averaging
    frep = frep - 3000;
    repeat (40*CONV_DIV) @(posedge clk);
    check_period = 1; exp_period = 16*CONV_DIV;
    repeat (8000*CONV_DIV) @(posedge clk);     // 16x fewer updates: allow longer to settle
    settle_and_check("N=16");
    checks++; if (period_err != 0) begin failures++; $display("N=16 update period wrong %0d times", period_err); end
    check_period = 0;
    // noise: mean square of the averaged error, N = 1 against N = 16
    begin
      real ms1, ms16;
      noise_amp = 2000;
      log2n = 0; repeat (40*CONV_DIV) @(posedge clk);
      msq = 0.0; nmsq = 0; acc_msq = 1; repeat (3200*CONV_DIV) @(posedge clk); acc_msq = 0;
      ms1 = msq / nmsq;
      log2n = 4; repeat (40*CONV_DIV) @(posedge clk);
      msq = 0.0; nmsq = 0; acc_msq = 1; repeat (3200*CONV_DIV) @(posedge clk); acc_msq = 0;
      ms16 = msq / nmsq;
      $display("mean-square averaged error: N=1 %0.1f  N=16 %0.1f  ratio %0.3f", ms1, ms16, ms16 / ms1);
      checks++; if (ms1 < 1.0e5 || ms16 > 0.15 * ms1) begin failures++; $display("averaging did not reduce the noise"); end
      noise_amp = 0;
    end
    lock_en = 0;
    repeat (40*CONV_DIV) @(posedge clk);
    checks++;
    if (dds2.ftw != f2) begin failures++; $display("dds2 %0d f2 %0d", dds2.ftw, f2); end
    checks++; if (dds0.n_bad + dds2.n_bad != 0) failures++;
    $display("updates=%0d", nupd);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
