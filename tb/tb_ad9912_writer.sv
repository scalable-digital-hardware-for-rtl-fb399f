// tb_ad9912_writer: writes tuning words and amplitude words to the DDS
// serial-port model and checks the values made active on IO_UPDATE, the
// transfer time of a 64-bit write, and that back-to-back requests coalesce
// to the most recent value.
module tb_ad9912_writer;
  import ionctl_pkg::*;
  localparam int HALF_DIV = 1, IOUP_CYC = 4;
  logic clk = 0, rst_n = 0;
  ftw_t ftw; amp_t amp; logic ftw_req = 0, amp_req = 0;
  logic sclk, csb, sdio, io_update, busy, ftw_written;
  int checks = 0, failures = 0;
  ad9912_writer #(.HALF_DIV(HALF_DIV), .IOUP_CYC(IOUP_CYC)) dut (.*);
  ad9912_model dds (.sclk, .csb, .sdio, .io_update);
  always #5 clk = ~clk;

  task automatic wr_ftw(input ftw_t v);
    longint t0;
    @(negedge clk); ftw = v; ftw_req = 1; @(negedge clk); ftw_req = 0; t0 = $time;
    @(posedge ftw_written);
    checks++; if (dds.ftw !== v) begin failures++; $display("ftw %h exp %h", dds.ftw, v); end
    checks++; if (($time - t0)/10 > 128*HALF_DIV + IOUP_CYC + 4) begin failures++; $display("ftw write took %0d", ($time-t0)/10); end
  endtask

  initial begin #2000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  initial begin
    ftw = '0; amp = '0;
    #23 rst_n = 1;
    repeat (5) wr_ftw({$urandom, $urandom} & 48'hFFFF_FFFF_FFFF);
    // amplitude
    @(negedge clk); amp = 10'h2A5; amp_req = 1; @(negedge clk); amp_req = 0;
    wait (!busy); repeat (2) @(negedge clk);
    checks++; if (dds.amp !== 10'h2A5) failures++;
    // burst of three frequency requests: the last one must end up active
    @(negedge clk); ftw = 48'h111111111111; ftw_req = 1;
    @(negedge clk); ftw = 48'h222222222222;
    @(negedge clk); ftw = 48'h333333333333;
    @(negedge clk); ftw_req = 0;
    wait (!busy); repeat (2) @(negedge clk);
    checks++; if (dds.ftw !== 48'h333333333333) begin failures++; $display("coalesce %h", dds.ftw); end
    checks++; if (dds.n_bad != 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
