// tb_avg_filter: feeds random signed samples for N = 1, 4 and 16 (the
// averaging ratios evaluated for the comb lock) and compares every output
// with the mean computed in the testbench (floor of sum / N).
module tb_avg_filter;
  logic clk = 0, rst_n = 0;
  logic [2:0] log2n;
  logic signed [15:0] in, out;
  logic in_valid, out_valid;
  int checks = 0, failures = 0;
  avg_filter #(.W(16), .LOG2N_MAX(4)) dut (.*);
  always #5 clk = ~clk;

  longint sum; int cnt; longint expv[$];
  always @(posedge clk) if (rst_n && out_valid) begin
    checks++;
    if (expv.size() == 0 || out !== 16'(expv[0])) begin failures++; $display("t=%0t out %0d exp %0d n=%0d", $time, out, expv[0], expv.size()); end
    void'(expv.pop_front());
  end

  task automatic run(input int l2, input int blocks);
    log2n = 3'(l2); sum = 0; cnt = 0;
    repeat (blocks << l2) begin
      @(negedge clk);
      in = 16'($urandom); in_valid = 1;
      sum += longint'(in); cnt++;
      if (cnt == (1 << l2)) begin expv.push_back(sum >>> l2); sum = 0; cnt = 0; end
      if ($urandom % 3 == 0) begin @(negedge clk); in_valid = 0; end
      @(negedge clk); in_valid = 0;
    end
    repeat (3) @(negedge clk);
  endtask

  initial begin #5000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  initial begin
    in = 0; in_valid = 0; log2n = 0;
    #23 rst_n = 1;
    run(0, 20); run(2, 20); run(4, 20);
    checks++; if (expv.size() != 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
