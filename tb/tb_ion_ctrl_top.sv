// tb_ion_ctrl_top: end-to-end test of the whole control logic at its
// default sizes (25 DAC chips, 32 voltage sets, 8 PID channels, 1 MSPS and
// 200 kHz ADC rates), with models of every external chip and simple plant
// models closing the loops. All four subsystems run at once:
//   comb lock      - locks, re-locks after a step in frep, switches to N = 4
//                    averaging; f2 must follow n*delta with n = 166;
//   intensity lock - gate on (locks to the setpoint), gate off (amplitude
//                    held while the beam drifts), gate on again;
//   next-gen PID   - DAC, DDS-frequency and DDS-amplitude outputs, a bounded
//                    (clipped) output and 4x oversampling;
//   DAC system     - static upload, a shuttle at a requested period shorter
//                    than the 430 kHz limit, and a slower shuttle.
// Each mechanism is counted; one that never happens is a failure.
module tb_ion_ctrl_top;
  import ionctl_pkg::*;
  localparam int NCHIP = 25;
  logic clk = 0, rst_n = 0;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  // comb lock
  logic cl_lock_en = 0, cl_load = 0; ftw_t cl_f0_init, cl_f2_init, cl_f0, cl_f2;
  logic signed [15:0] cl_kp, cl_ki; logic [2:0] cl_log2n; logic cl_update; adc16_t cl_err_avg;
  logic cl_adc_cnvst_n, cl_adc_cs_n, cl_adc_rd_n, cl_adc_busy; logic [15:0] cl_adc_db;
  logic dds0_sclk, dds0_csb, dds0_sdio, dds0_io_update, dds2_sclk, dds2_csb, dds2_sdio, dds2_io_update;
  // intensity lock
  logic il_gate = 0, il_load = 0; amp_t il_amp_init, il_amp; adc16_t il_setpoint;
  logic signed [15:0] il_kp, il_ki;
  logic il_adc_cnvst_n, il_adc_cs_n, il_adc_rd_n, il_adc_busy; logic [15:0] il_adc_db;
  logic il_dds_sclk, il_dds_csb, il_dds_sdio, il_dds_io_update;
  // next-gen PID
  logic np_adc_enable = 0; pid_chan_cfg_t [NPID-1:0] np_cfg;
  logic np_adc_convst, np_adc_cs_n, np_adc_rd_n, np_adc_busy; logic [17:0] np_adc_db;
  logic np_dac_sclk, np_dac_sync_n, np_dac_din;
  logic [NPID-1:0] np_dds_sclk, np_dds_csb, np_dds_sdio, np_dds_io_update, np_clipped;
  logic np_result_valid; logic [2:0] np_result_ch; out_word_t np_result;
  // DAC system
  logic ds_set_we = 0; logic [4:0] ds_set_wsel; logic [6:0] ds_set_wchan; dac_code_t ds_set_wdata;
  logic ds_go = 0; logic [4:0] ds_go_set; dac_code_t ds_go_step; logic [23:0] ds_go_period;
  logic ds_dac_sclk, ds_dac_cs_n, ds_dac_ldac_n, ds_busy, ds_done; logic [NCHIP-1:0] ds_dac_sdi;
  logic [31:0] ds_n_updates; dac_code_t [NCHIP-1:0][3:0] ds_cur_codes;

  ion_ctrl_top dut (.*);

  // ---------------- chip and plant models ----------------
  longint frep;
  logic signed [15:0] mix;
  ad9912_model dds0 (.sclk(dds0_sclk), .csb(dds0_csb), .sdio(dds0_sdio), .io_update(dds0_io_update));
  ad9912_model dds2 (.sclk(dds2_sclk), .csb(dds2_csb), .sdio(dds2_sdio), .io_update(dds2_io_update));
  always_comb begin
    longint d; d = frep - longint'(dds0.ftw);
    if (d > 30000) d = 30000; else if (d < -30000) d = -30000;
    mix = 16'(d);
  end
  ad7671_model #(.CONV_CYC(30)) cl_adc (.clk, .cnvst_n(cl_adc_cnvst_n), .cs_n(cl_adc_cs_n), .rd_n(cl_adc_rd_n),
                                         .value(mix), .busy(cl_adc_busy), .db(cl_adc_db));

  int trans; logic signed [15:0] pd;
  ad9912_model il_dds (.sclk(il_dds_sclk), .csb(il_dds_csb), .sdio(il_dds_sdio), .io_update(il_dds_io_update));
  assign pd = 16'((int'(il_dds.amp) * 20 * trans) / 1000);
  ad7671_model #(.CONV_CYC(30)) il_adc (.clk, .cnvst_n(il_adc_cnvst_n), .cs_n(il_adc_cs_n), .rd_n(il_adc_rd_n),
                                         .value(pd), .busy(il_adc_busy), .db(il_adc_db));

  logic signed [17:0] np_values [8];
  ad7608_model #(.CONV_CYC(100)) np_adc (.clk, .convst(np_adc_convst), .cs_n(np_adc_cs_n), .rd_n(np_adc_rd_n),
                                         .values(np_values), .busy(np_adc_busy), .db(np_adc_db));
  dac8568_model np_dac (.sclk(np_dac_sclk), .sync_n(np_dac_sync_n), .din(np_dac_din));
  ad9912_model np_dds1 (.sclk(np_dds_sclk[1]), .csb(np_dds_csb[1]), .sdio(np_dds_sdio[1]), .io_update(np_dds_io_update[1]));
  ad9912_model np_dds2 (.sclk(np_dds_sclk[2]), .csb(np_dds_csb[2]), .sdio(np_dds_sdio[2]), .io_update(np_dds_io_update[2]));
  localparam longint NP_TARGET = 1_000_000;
  always_comb begin
    longint d;
    for (int k = 0; k < 8; k++) np_values[k] = 18'sd100;
    np_values[0] = 18'(20000 - int'(np_dac.out[0]));
    d = NP_TARGET - longint'(np_dds1.ftw);
    if (d > 100000) d = 100000; else if (d < -100000) d = -100000;
    np_values[1] = 18'(d);
    np_values[2] = 18'sd5000;
  end

  dac8734_model #(.NCHIP(NCHIP)) ds_dac (.sclk(ds_dac_sclk), .cs_n(ds_dac_cs_n), .sdi(ds_dac_sdi), .ldac_n(ds_dac_ldac_n));

  // ---------------- mechanism counters ----------------
  int n_cl_update = 0, n_ff_ok = 0, n_coalesce = 0, n_avg4 = 0, n_relock = 0;
  int n_il_lock = 0, n_il_hold = 0;
  int n_np_dac = 0, n_np_freq = 0, n_np_amp = 0, n_np_clip = 0, n_np_os = 0;
  int n_ds_static = 0, n_ds_shuttle = 0, n_ds_ratecap = 0;
  longint last_upd = -1;
  int np_res0 = 0, np_res1 = 0;

  always @(posedge clk) if (rst_n) begin
    if (cl_update) begin
      n_cl_update++;
      checks++;
      if (longint'(cl_f2) - longint'(cl_f2_init) == 166 * (longint'(cl_f0) - longint'(cl_f0_init))) n_ff_ok++;
      else begin failures++; $display("feed-forward mismatch f0=%0d f2=%0d", cl_f0, cl_f2); end
      if (cl_log2n == 2 && last_upd >= 0 && ($time - last_upd)/10 == 400) n_avg4++;
      last_upd = $time;
    end
    // a new f0 while the previous one is still being shifted into DDS0
    if (cl_update && !dds0_csb) n_coalesce++;
    if (np_result_valid && np_result_ch == 3'd0) np_res0++;
    if (np_result_valid && np_result_ch == 3'd1) np_res1++;
  end

  int ds_sets [3][100];
  longint ds_last_latch = -1; int ds_fast = 0;
  always @(negedge ds_dac_ldac_n) begin
    if (ds_last_latch >= 0 && ($time - ds_last_latch) < 2325) ds_fast++;
    ds_last_latch = $time;
  end
  task automatic ds_command(input int s, input int st, input int per);
    @(negedge clk); ds_go = 1; ds_go_set = 5'(s); ds_go_step = 16'(st); ds_go_period = 24'(per);
    @(negedge clk); ds_go = 0;
    @(posedge ds_done); repeat (5) @(negedge clk);
  endtask
  function automatic int ds_bad(input int s);
    int bad = 0;
    for (int ch = 0; ch < 100; ch++) if (int'($signed(ds_dac.out[ch/4][ch%4])) != ds_sets[s][ch]) bad++;
    return bad;
  endfunction

  initial begin #200000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  // ---------------- stimulus ----------------
  initial begin
    cl_f0_init = 48'd1_000_000_000; cl_f2_init = 48'd2_800_000_000; cl_kp = 16'sd64; cl_ki = 16'sd1; cl_log2n = 0;
    frep = 1_000_005_000;
    il_amp_init = 10'd300; il_setpoint = 16'sd10000; il_kp = 16'sd12; il_ki = 16'sd0; trans = 1000;
    np_cfg = '0;
    for (int c = 0; c < 8; c++) np_cfg[c].hi = 48'sd65535;
    np_cfg[0].enable = 1; np_cfg[0].ki = 16'sd16; np_cfg[0].dest = DEST_DAC;
    np_cfg[1].enable = 1; np_cfg[1].ki = 16'sd64; np_cfg[1].dest = DEST_DDS_FREQ; np_cfg[1].log2_ratio = 4'd2;
    np_cfg[1].hi = 48'hFFFF_FFFF;
    np_cfg[2].enable = 1; np_cfg[2].ki = 16'sd256; np_cfg[2].dest = DEST_DDS_AMP; np_cfg[2].hi = 48'sd1023;
    ds_set_wsel = 0; ds_set_wchan = 0; ds_set_wdata = 0; ds_go_set = 0; ds_go_step = 0; ds_go_period = 0;
    #23 rst_n = 1;
    fork
      // comb lock
      begin
        @(negedge clk); cl_load = 1; @(negedge clk); cl_load = 0;
        repeat (400) @(negedge clk);
        cl_lock_en = 1;
        repeat (200000) @(negedge clk);
        checks++; if ((frep - longint'(cl_f0)) > 16 || (frep - longint'(cl_f0)) < -16) begin failures++; $display("comb lock not locked"); end
        frep = frep - 12000;
        repeat (200000) @(negedge clk);
        checks++;
        if ((frep - longint'(cl_f0)) > 16 || (frep - longint'(cl_f0)) < -16) begin failures++; $display("comb lock lost after step"); end
        else n_relock++;
        cl_log2n = 2; frep = frep + 7000;
        repeat (200000) @(negedge clk);
        checks++; if ((frep - longint'(cl_f0)) > 16 || (frep - longint'(cl_f0)) < -16) begin failures++; $display("comb lock (N=4) not locked"); end
        cl_lock_en = 0;
        repeat (2000) @(negedge clk);
        checks++; if (dds2.ftw != cl_f2 || dds0.ftw != cl_f0) begin failures++; $display("comb DDS contents differ from f0/f2"); end
      end
      // intensity lock
      begin
        @(negedge clk); il_load = 1; @(negedge clk); il_load = 0;
        repeat (300) @(negedge clk);
        il_gate = 1;
        repeat (200000) @(negedge clk);
        checks++; if (int'(pd) - 10000 > 40 || int'(pd) - 10000 < -40) begin failures++; $display("intensity not locked pd=%0d", pd); end else n_il_lock++;
        il_gate = 0;
        repeat (300) @(negedge clk);
        begin
          amp_t held; held = il_dds.amp;
          repeat (50) begin trans = trans - 4; repeat (1000) @(negedge clk); end
          checks++; if (il_dds.amp != held) begin failures++; $display("intensity amplitude not held"); end else n_il_hold++;
        end
        il_gate = 1;
        repeat (200000) @(negedge clk);
        checks++; if (int'(pd) - 10000 > 40 || int'(pd) - 10000 < -40) begin failures++; $display("intensity not re-locked pd=%0d", pd); end else n_il_lock++;
      end
      // next-generation PID
      begin
        np_adc_enable = 1;
        repeat (200000) @(negedge clk);
        checks++; if (int'(np_dac.out[0]) < 19990 || int'(np_dac.out[0]) > 20010) begin failures++; $display("PID ch0 DAC %0d", np_dac.out[0]); end else n_np_dac++;
        checks++; if (longint'(np_dds1.ftw) < NP_TARGET - 50 || longint'(np_dds1.ftw) > NP_TARGET + 50) begin failures++; $display("PID ch1 ftw %0d", np_dds1.ftw); end else n_np_freq++;
        checks++; if (np_dds2.amp != 10'd1023) begin failures++; $display("PID ch2 amp %0d", np_dds2.amp); end else n_np_amp++;
        if (np_clipped[2]) n_np_clip++;
      end
      // DAC system
      begin
        for (int s = 0; s < 3; s++) for (int ch = 0; ch < 100; ch++) begin
          ds_sets[s][ch] = int'($signed(16'($urandom % 16001) - 16'd8000));
          @(negedge clk); ds_set_we = 1; ds_set_wsel = 5'(s + 20); ds_set_wchan = 7'(ch); ds_set_wdata = 16'(ds_sets[s][ch]);
        end
        @(negedge clk); ds_set_we = 0;
        ds_command(20, 0, 0);
        checks++; if (ds_bad(0) != 0 || ds_n_updates != 1) begin failures++; $display("DAC static upload wrong"); end else n_ds_static++;
        ds_command(21, 500, 10);      // asks for 10 MHz: capped to 430 kHz
        checks++; if (ds_bad(1) != 0) begin failures++; $display("DAC shuttle wrong"); end else n_ds_shuttle++;
        checks++; if (ds_fast != 0) begin failures++; $display("DAC updates faster than 430 kHz"); end else n_ds_ratecap++;
        ds_command(22, 3000, 1000);
        checks++; if (ds_bad(2) != 0) begin failures++; $display("DAC slow shuttle wrong"); end else n_ds_shuttle++;
      end
    join
    // channel 1 averages 4 frames per result, channel 0 none
    n_np_os = (np_res1 * 4 >= np_res0 - 4 && np_res1 * 4 <= np_res0 + 4 && np_res1 > 0) ? np_res1 : 0;
    // count a failure for every mechanism that never happened
    begin
      int counts [17];
      string names [17];
      counts = '{n_cl_update, n_ff_ok, n_coalesce, n_avg4, n_relock, n_il_lock, n_il_hold,
                 n_np_dac, n_np_freq, n_np_amp, n_np_clip, n_np_os, n_ds_static, n_ds_shuttle, n_ds_ratecap,
                 il_dds.n_amp, np_dac.n_words};
      names  = '{"PI update", "feed-forward", "DDS write coalescing", "N=4 averaging", "re-lock after step",
                 "intensity lock", "intensity hold", "PID to DAC", "PID to DDS freq", "PID to DDS amp",
                 "output clipping", "oversampling", "static upload", "shuttle", "430 kHz rate cap",
                 "DDS amplitude writes", "DAC8568 writes"};
      for (int k = 0; k < 17; k++) begin
        $display("mechanism %-22s : %0d", names[k], counts[k]);
        checks++; if (counts[k] == 0) begin failures++; $display("  never happened"); end
      end
    end
    checks++; if (dds0.n_bad + dds2.n_bad + il_dds.n_bad + np_dac.n_bad + ds_dac.n_bad != 0) begin failures++; $display("malformed serial words"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
