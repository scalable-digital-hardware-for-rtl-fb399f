// tb_oversampler: interleaves random words of eight channels with different
// oversample ratios (1, 2, 4 ... 128) and compares each output with the
// block mean computed per channel in the testbench.
module tb_oversampler;
  import ionctl_pkg::*;
  logic clk = 0, rst_n = 0;
  pid_chan_cfg_t [7:0] cfg;
  logic [2:0] in_ch, out_ch; logic signed [17:0] in_data, out_data; logic in_valid, out_valid;
  int checks = 0, failures = 0;
  oversampler dut (.*);
  always #5 clk = ~clk;

  longint acc [8]; int cnt [8]; longint expq [8][$];
  int nout [8];
  always @(posedge clk) if (rst_n && out_valid) begin
    checks++;
    if (expq[out_ch].size() == 0 || 18'(expq[out_ch][0]) !== out_data) begin failures++; $display("ch %0d out %0d", out_ch, out_data); end
    else void'(expq[out_ch].pop_front());
    nout[out_ch]++;
  end

  initial begin #5000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  initial begin
    cfg = '0;
    for (int c = 0; c < 8; c++) begin cfg[c].log2_ratio = 4'(c); acc[c] = 0; cnt[c] = 0; nout[c] = 0; end
    in_ch = 0; in_data = 0; in_valid = 0;
    #23 rst_n = 1;
    repeat (256) for (int c = 0; c < 8; c++) begin
      @(negedge clk); in_ch = 3'(c); in_data = 18'($urandom); in_valid = 1;
      acc[c] += longint'(in_data); cnt[c]++;
      if (cnt[c] == (1 << c)) begin expq[c].push_back(acc[c] >>> c); acc[c] = 0; cnt[c] = 0; end
    end
    @(negedge clk); in_valid = 0; repeat (3) @(negedge clk);
    for (int c = 0; c < 8; c++) begin checks++; if (nout[c] != 256 >> c) begin failures++; $display("ch %0d %0d outputs", c, nout[c]); end end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
