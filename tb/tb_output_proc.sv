// tb_output_proc: random inputs through channels with and without the
// linear map, checking y = clamp(((gain*x) >>> 8) + offset or x, lo, hi)
// and the clipped flag against the testbench's own computation.
module tb_output_proc;
  import ionctl_pkg::*;
  logic clk = 0, rst_n = 0;
  pid_chan_cfg_t [7:0] cfg;
  logic [2:0] in_ch, out_ch; out_word_t in_x, out_y; logic in_valid, out_valid, clipped;
  int checks = 0, failures = 0, nclip = 0;
  output_proc dut (.*);
  always #5 clk = ~clk;
  initial begin #5000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  initial begin
    cfg = '0;
    for (int c = 0; c < 8; c++) begin
      cfg[c].lin_en = c[0]; cfg[c].gain = 16'(64 * c - 200); cfg[c].offset = 48'(1000 * c);
      cfg[c].lo = -48'sd20000 + 48'(c); cfg[c].hi = 48'sd30000 - 48'(c);
    end
    in_ch = 0; in_x = 0; in_valid = 0;
    #23 rst_n = 1;
    repeat (400) begin
      longint m, y; bit cl; int c;
      c = $urandom % 8;
      @(negedge clk); in_ch = 3'(c); in_x = out_word_t'(int'($urandom % 120001) - 60000); in_valid = 1;
      m = cfg[c].lin_en ? ((longint'(cfg[c].gain) * longint'(in_x)) >>> 8) + longint'(cfg[c].offset) : longint'(in_x);
      cl = 1; if (m < longint'(cfg[c].lo)) y = cfg[c].lo; else if (m > longint'(cfg[c].hi)) y = cfg[c].hi; else begin y = m; cl = 0; end
      @(negedge clk); in_valid = 0;
      checks++;
      if (!out_valid || out_ch != 3'(c) || longint'(out_y) != y || clipped != cl) begin failures++; $display("ch %0d x %0d y %0d exp %0d", c, in_x, out_y, y); end
      nclip += cl;
    end
    checks++; if (nclip == 0 || nclip == 400) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
