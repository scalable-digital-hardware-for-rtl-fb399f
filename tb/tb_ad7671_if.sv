// tb_ad7671_if: runs the AD7671 controller against the converter model with
// a changing input and checks that every sample equals the value present at
// its conversion start and that samples arrive once per CONV_DIV cycles.
module tb_ad7671_if;
  import ionctl_pkg::*;
  localparam int CONV_DIV = 100;
  logic clk = 0, rst_n = 0, enable = 0;
  logic cnvst_n, cs_n, rd_n, busy;
  logic [15:0] db;
  adc16_t sample; logic sample_valid;
  logic signed [15:0] value;
  int checks = 0, failures = 0;

  ad7671_if #(.CONV_DIV(CONV_DIV)) dut (.*);
  ad7671_model #(.CONV_CYC(30)) adc (.clk, .cnvst_n, .cs_n, .rd_n, .value, .busy, .db);

  always #5 clk = ~clk;

  logic signed [15:0] exp_q[$];
  always @(negedge cnvst_n) exp_q.push_back(value);

  longint last_t = -1; int nsamp = 0;
  always @(posedge clk) if (sample_valid) begin
    logic signed [15:0] ex;
    ex = exp_q.pop_front();
    checks++;
    if (sample !== ex) begin failures++; $display("sample %h exp %h", sample, ex); end
    if (last_t >= 0) begin
      checks++;
      if (($time - last_t)/10 != CONV_DIV) begin failures++; $display("period %0d", ($time-last_t)/10); end
    end
    last_t = $time; nsamp++;
  end

  initial begin #2000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  initial begin
    value = 16'sd1234;
    #23 rst_n = 1; enable = 1;
    repeat (40) begin
      repeat (37) @(posedge clk);
      value = 16'($urandom);
    end
    repeat (200) @(posedge clk);
    checks++; if (nsamp < 10) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
