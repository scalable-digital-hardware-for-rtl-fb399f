// tb_dac_sequencer: drives the sequencer with the voltage-set memory and a
// DAC-bus stand-in that answers each start with done after BUS_CYC cycles.
// A reference model in the testbench steps every electrode by at most
// `step`; every update sent is compared with it, as are the number of
// updates, the spacing of updates (= period) and the single-update jump of
// the static mode (step 0).
module tb_dac_sequencer;
  import ionctl_pkg::*;
  localparam int NSETS = 32, NCHIP = 25, BUS_CYC = 220;
  logic clk = 0, rst_n = 0;
  logic go = 0; logic [4:0] set_sel; dac_code_t step; logic [23:0] period;
  logic [4:0] rset; logic [1:0] rrow; dac_code_t [NCHIP-1:0] rdata;
  logic dac_start, dac_done = 0, busy, done; dac_code_t [NCHIP-1:0][3:0] codes;
  logic [31:0] n_updates;
  logic we = 0; logic [4:0] wset; logic [6:0] wchan; dac_code_t wdata;
  int checks = 0, failures = 0;

  voltage_set_ram #(.NSETS(NSETS), .NCHIP(NCHIP)) ram (.clk, .we, .wset, .wchan, .wdata, .rset, .rrow, .rdata);
  dac_sequencer #(.NSETS(NSETS), .NCHIP(NCHIP)) dut (.*);
  always #5 clk = ~clk;

  // bus stand-in
  always @(posedge clk) if (rst_n && dac_start) fork begin repeat (BUS_CYC) @(posedge clk); dac_done <= 1; @(posedge clk); dac_done <= 0; end join_none

  int sets [NSETS][100];
  int ref_v [100];
  longint last_start; int gap_err, nstarts, mism;
  always @(posedge clk) if (rst_n && dac_start) begin
    // compare with reference step
    for (int ch = 0; ch < 100; ch++) begin
      int t, d;
      t = sets[set_sel_q][ch]; d = t - ref_v[ch];
      if (step_q == 0 || (d <= step_q && d >= -step_q)) ref_v[ch] = t;
      else ref_v[ch] += (d > 0) ? step_q : -step_q;
      if (int'($signed(codes[ch/4][ch%4])) != ref_v[ch]) mism++;
    end
    if (nstarts > 0 && ($time - last_start)/10 != period_exp) begin gap_err++; if (gap_err < 3) $display("gap %0d", ($time - last_start)/10); end
    last_start = $time; nstarts++;
  end
  int set_sel_q, step_q, period_exp;

  function automatic int maxdiff(input int a, input int b);
    int mx = 0;
    for (int ch = 0; ch < 100; ch++) begin int d = sets[b][ch] - sets[a][ch]; if (d < 0) d = -d; if (d > mx) mx = d; end
    return mx;
  endfunction

  task automatic run(input int s, input int st, input int per, input int exp_updates);
    nstarts = 0; gap_err = 0; mism = 0;
    set_sel_q = s; step_q = st; period_exp = (per > BUS_CYC + 12) ? per : BUS_CYC + 12;
    if (period_exp < 233) period_exp = 233;
    @(negedge clk); go = 1; set_sel = 5'(s); step = 16'(st); period = 24'(per);
    @(negedge clk); go = 0;
    @(posedge done); @(negedge clk);
    checks++; if (mism != 0) begin failures++; $display("run set %0d: %0d mismatching codes", s, mism); end
    checks++; if (nstarts != exp_updates) begin failures++; $display("run set %0d: %0d updates exp %0d", s, nstarts, exp_updates); end
    checks++; if (gap_err != 0) begin failures++; $display("run set %0d: update spacing wrong %0d", s, gap_err); end
  endtask

  initial begin #50000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  initial begin
    set_sel = 0; step = 0; period = 0; wset = 0; wchan = 0; wdata = 0;
    for (int ch = 0; ch < 100; ch++) ref_v[ch] = 0;
    for (int s = 0; s < 4; s++) for (int ch = 0; ch < 100; ch++) begin
      sets[s][ch] = (s == 0) ? 0 : int'($signed(16'($urandom % 20001) - 16'd10000));
      @(negedge clk); we = 1; wset = 5'(s); wchan = 7'(ch); wdata = 16'(sets[s][ch]);
    end
    sets[2][37] = 20000; sets[2][38] = -20000;
    @(negedge clk); wset = 2; wchan = 37; wdata = 16'(20000);
    @(negedge clk); wset = 2; wchan = 38; wdata = 16'(-20000);
    @(negedge clk); we = 0;
    #23 rst_n = 1;
    run(0, 0, 0, 1);                              // static upload of zeros
    run(1, 0, 0, 1);                              // static jump
    run(2, 1000, 500, (maxdiff(1, 2) + 999) / 1000);   // shuttle with period 500 cycles
    run(3, 4000, 100, (maxdiff(2, 3) + 3999) / 4000);   // period below the bus time
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
