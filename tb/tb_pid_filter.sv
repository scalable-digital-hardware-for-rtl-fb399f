// tb_pid_filter: sends interleaved random errors on eight channels with
// different gains and compares each output with a per-channel reference PID
// computed in the testbench; also checks that a disabled channel gives no
// output and restarts with a cleared integrator.
module tb_pid_filter;
  import ionctl_pkg::*;
  logic clk = 0, rst_n = 0;
  pid_chan_cfg_t [7:0] cfg;
  logic [2:0] in_ch, out_ch; logic signed [17:0] in_e; logic in_valid, out_valid; out_word_t out_u;
  int checks = 0, failures = 0;
  pid_filter dut (.*);
  always #5 clk = ~clk;
  longint integ [8], prev [8]; longint expq[$]; int expch[$];

  always @(posedge clk) if (rst_n && out_valid) begin
    checks++;
    if (expq.size() == 0 || out_u != out_word_t'(expq[0]) || out_ch != 3'(expch[0])) begin
      failures++; $display("ch %0d u %0d exp %0d", out_ch, out_u, expq[0]);
    end
    void'(expq.pop_front()); void'(expch.pop_front());
  end

  task automatic send(input int c, input int e);
    @(negedge clk); in_ch = 3'(c); in_e = 18'(e); in_valid = 1;
    if (cfg[c].enable) begin
      integ[c] += e;
      expq.push_back((longint'(cfg[c].kp) * e + longint'(cfg[c].ki) * integ[c] + longint'(cfg[c].kd) * (e - prev[c])) >>> 8);
      expch.push_back(c);
      prev[c] = e;
    end
    @(negedge clk); in_valid = 0;
  endtask

  initial begin #5000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  initial begin
    cfg = '0;
    for (int c = 0; c < 8; c++) begin
      cfg[c].enable = 1; cfg[c].kp = 16'(100 * c - 300); cfg[c].ki = 16'(c + 1); cfg[c].kd = 16'(50 - 10 * c);
      integ[c] = 0; prev[c] = 0;
    end
    in_ch = 0; in_e = 0; in_valid = 0;
    #23 rst_n = 1;
    repeat (100) send($urandom % 8, int'($urandom % 200001) - 100000);
    cfg[3].enable = 0; integ[3] = 0; prev[3] = 0;
    repeat (40) send($urandom % 8, int'($urandom % 2001) - 1000);
    cfg[3].enable = 1;
    repeat (40) send($urandom % 8, int'($urandom % 2001) - 1000);
    repeat (3) @(negedge clk);
    checks++; if (expq.size() != 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
