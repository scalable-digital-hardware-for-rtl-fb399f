// tb_dac_system: end-to-end test of the 100-channel DAC controller with 25
// modelled DAC8734 chips. Loads three voltage sets, uploads one statically
// (one update, then no serial clock edges while idle), shuttles to a second
// set with a small step at the fastest rate and checks the analog-side
// model reaches it, that the number of updates is ceil(max change / step),
// and that updates are never closer than 1/430 kHz.
module tb_dac_system;
  import ionctl_pkg::*;
  localparam int NCHIP = 25;
  logic clk = 0, rst_n = 0;
  logic set_we = 0; logic [4:0] set_wsel; logic [6:0] set_wchan; dac_code_t set_wdata;
  logic go = 0; logic [4:0] go_set; dac_code_t go_step; logic [23:0] go_period;
  logic dac_sclk, dac_cs_n, dac_ldac_n, busy, done;
  logic [NCHIP-1:0] dac_sdi;
  logic [31:0] n_updates;
  dac_code_t [NCHIP-1:0][3:0] cur_codes;
  int checks = 0, failures = 0;
  dac_system dut (.*);
  dac8734_model #(.NCHIP(NCHIP)) dac (.sclk(dac_sclk), .cs_n(dac_cs_n), .sdi(dac_sdi), .ldac_n(dac_ldac_n));
  always #5 clk = ~clk;

  int sets [3][100];
  int sclk_edges = 0; always @(posedge dac_sclk) sclk_edges++;
  longint last_latch = -1; int fast_latch = 0;
  always @(negedge dac_ldac_n) begin
    if (last_latch >= 0 && ($time - last_latch) < 2325) fast_latch++;   // 1/430 kHz = 2326 ns
    last_latch = $time;
  end

  task automatic check_outputs(input int s, input string what);
    int bad = 0;
    for (int ch = 0; ch < 100; ch++) if (int'($signed(dac.out[ch/4][ch%4])) != sets[s][ch]) bad++;
    checks++; if (bad != 0) begin failures++; $display("%s: %0d outputs wrong", what, bad); end
  endtask

  task automatic command(input int s, input int st, input int per);
    @(negedge clk); go = 1; go_set = 5'(s); go_step = 16'(st); go_period = 24'(per);
    @(negedge clk); go = 0;
    @(posedge done); repeat (5) @(negedge clk);
  endtask

  initial begin #100000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  initial begin
    set_wsel = 0; set_wchan = 0; set_wdata = 0; go_set = 0; go_step = 0; go_period = 0;
    #23 rst_n = 1;
    for (int s = 0; s < 3; s++) for (int ch = 0; ch < 100; ch++) begin
      sets[s][ch] = int'($signed(16'($urandom % 16001) - 16'd8000));
      @(negedge clk); set_we = 1; set_wsel = 5'(s + 7); set_wchan = 7'(ch); set_wdata = 16'(sets[s][ch]);
    end
    @(negedge clk); set_we = 0;
    // static upload
    command(7, 0, 0);
    check_outputs(0, "static upload");
    checks++; if (n_updates != 1) begin failures++; $display("static: %0d updates", n_updates); end
    begin
      int e0;
      e0 = sclk_edges;
      repeat (20000) @(negedge clk);
      checks++; if (sclk_edges != e0) begin failures++; $display("serial clock ran while idle"); end
    end
    // shuttle at the fastest rate
    begin
      int mx, u0;
      mx = 0;
      for (int ch = 0; ch < 100; ch++) begin
        int d; d = sets[1][ch] - sets[0][ch]; if (d < 0) d = -d; if (d > mx) mx = d;
      end
      u0 = n_updates;
      command(8, 500, 1);
      check_outputs(1, "shuttle");
      checks++; if (int'(n_updates) - u0 != (mx + 499) / 500) begin failures++; $display("shuttle: %0d updates exp %0d", int'(n_updates) - u0, (mx+499)/500); end
    end
    // shuttle at 100 kHz
    command(9, 2000, 1000);
    check_outputs(2, "slow shuttle");
    checks++; if (fast_latch != 0) begin failures++; $display("%0d updates faster than 430 kHz", fast_latch); end
    checks++; if (dac.n_bad != 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
