// tb_pi_incr: checks the incremental PI update y(k+1) = y(k) + (P e_k +
// I sum e) >>> SHIFT against a reference computed in the testbench, the
// output clamp, the hold when disabled, the load, and the one-cycle latency.
module tb_pi_incr;
  localparam int SHIFT = 8;
  logic clk = 0, rst_n = 0, enable = 0, load = 0, in_valid = 0;
  logic [47:0] y_init, y_min, y_max, y;
  logic signed [15:0] kp, ki, e;
  logic signed [48:0] delta;
  logic out_valid;
  int checks = 0, failures = 0;
  pi_incr #(.EW(16), .GW(16), .YW(48), .SW(40), .SHIFT(SHIFT)) dut (.*);
  always #5 clk = ~clk;

  longint ry, rs;
  task automatic step(input logic signed [15:0] ev, input bit en);
    longint c, yn;
    @(negedge clk); e = ev; in_valid = 1; enable = en;
    @(negedge clk); in_valid = 0;
    if (en) begin
      rs += ev;
      c = (longint'(kp) * ev + longint'(ki) * rs) >>> SHIFT;
      yn = ry + c;
      if (yn < longint'(y_min)) yn = y_min;
      if (yn > longint'(y_max)) yn = y_max;
      checks++; if (!out_valid) failures++;
      checks++; if (longint'(delta) != yn - ry) begin failures++; $display("delta %0d exp %0d", delta, yn-ry); end
      ry = yn;
    end else begin
      checks++; if (out_valid) failures++;
    end
    checks++; if (longint'(y) != ry) begin failures++; $display("y %0d exp %0d", y, ry); end
  endtask

  initial begin #2000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  initial begin
    y_init = 48'd1_000_000; y_min = 48'd0; y_max = 48'd2_000_000;
    kp = 16'sd256; ki = 16'sd40; e = 0;
    #23 rst_n = 1;
    @(negedge clk); load = 1; @(negedge clk); load = 0;
    ry = 1_000_000; rs = 0;
    checks++; if (y != 48'd1_000_000) failures++;
    repeat (50) step(16'($signed($urandom % 2001) - 1000), 1'b1);
    repeat (5)  step(16'sd500, 1'b0);          // hold
    repeat (50) step(16'sd30000, 1'b1);        // drive into the upper clamp
    checks++; if (y != y_max) failures++;
    repeat (100) step(-16'sd30000, 1'b1);      // and into the lower clamp
    checks++; if (y != y_min) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
