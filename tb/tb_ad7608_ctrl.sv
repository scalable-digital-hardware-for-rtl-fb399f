// tb_ad7608_ctrl: reads the AD7608 model and checks that each frame yields
// channels 0..7 in order with the values present at convst, and that frames
// start every CONV_DIV cycles (200 kHz).
module tb_ad7608_ctrl;
  import ionctl_pkg::*;
  localparam int CONV_DIV = 500;
  logic clk = 0, rst_n = 0, enable = 0;
  logic convst, cs_n, rd_n, busy; logic [17:0] db;
  logic [2:0] ch; adc18_t sample; logic valid;
  logic signed [17:0] values [8];
  int checks = 0, failures = 0;
  ad7608_ctrl #(.CONV_DIV(CONV_DIV)) dut (.*);
  ad7608_model #(.CONV_CYC(100)) adc (.clk, .convst, .cs_n, .rd_n, .values, .busy, .db);
  always #5 clk = ~clk;

  logic signed [17:0] snap [8];
  int exp_ch = 0; longint last_t = -1; int frames = 0;
  always @(posedge convst) begin
    for (int k = 0; k < 8; k++) snap[k] = values[k];
    if (last_t >= 0) begin checks++; if (($time - last_t)/10 != CONV_DIV) begin failures++; $display("frame period %0d", ($time-last_t)/10); end end
    last_t = $time; frames++;
  end
  always @(posedge clk) if (rst_n && valid) begin
    checks++;
    if (ch != 3'(exp_ch) || sample !== snap[ch]) begin failures++; $display("ch %0d exp %0d data %h exp %h", ch, exp_ch, sample, snap[ch]); end
    exp_ch = (exp_ch + 1) % 8;
  end

  initial begin #5000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  initial begin
    for (int k = 0; k < 8; k++) values[k] = 18'(k * 1000);
    #23 rst_n = 1; enable = 1;
    repeat (20) begin
      repeat (CONV_DIV) @(negedge clk);
      for (int k = 0; k < 8; k++) values[k] = 18'($urandom);
    end
    repeat (CONV_DIV) @(negedge clk);
    checks++; if (frames < 19) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
