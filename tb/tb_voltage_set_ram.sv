// tb_voltage_set_ram: fills all 32 sets of 100 codes with values computed
// from (set, channel) and reads every row back, checking each of the 25
// codes per row and the one-cycle read latency.
module tb_voltage_set_ram;
  import ionctl_pkg::*;
  localparam int NSETS = 32, NCHIP = 25;
  logic clk = 0, we = 0;
  logic [4:0] wset, rset; logic [6:0] wchan; dac_code_t wdata;
  logic [1:0] rrow; dac_code_t [NCHIP-1:0] rdata;
  int checks = 0, failures = 0;
  voltage_set_ram #(.NSETS(NSETS), .NCHIP(NCHIP)) dut (.*);
  always #5 clk = ~clk;
  function automatic dac_code_t pat(input int s, input int ch); return 16'(s * 977 + ch * 131 + 5); endfunction
  initial begin #5000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  initial begin
    rset = 0; rrow = 0; wset = 0; wchan = 0; wdata = 0;
    for (int s = 0; s < NSETS; s++) for (int ch = 0; ch < NCHIP*4; ch++) begin
      @(negedge clk); we = 1; wset = 5'(s); wchan = 7'(ch); wdata = pat(s, ch);
    end
    @(negedge clk); we = 0;
    for (int s = NSETS-1; s >= 0; s--) for (int r = 0; r < 4; r++) begin
      @(negedge clk); rset = 5'(s); rrow = 2'(r);
      @(negedge clk);
      for (int c = 0; c < NCHIP; c++) begin
        checks++; if (rdata[c] !== pat(s, c*4 + r)) begin failures++; $display("set %0d row %0d chip %0d", s, r, c); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
