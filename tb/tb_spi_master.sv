// tb_spi_master: checks the multi-lane shifter against a serial receiver
// model in the testbench. Three lanes carry different words; the receiver
// samples each lane on the sampling edge and the words and the cycle count
// per word (2*HALF_DIV*nbits) are compared with the expected values.
module tb_spi_master;
  localparam int LANES = 3, MAXBITS = 24, HALF_DIV = 2;
  logic clk = 0, rst_n = 0, start = 0;
  logic [$clog2(MAXBITS+1)-1:0] nbits;
  logic [LANES-1:0][MAXBITS-1:0] data;
  logic sclk, cs_n, busy, done;
  logic [LANES-1:0] sdo;
  int checks = 0, failures = 0;

  spi_master #(.LANES(LANES), .MAXBITS(MAXBITS), .HALF_DIV(HALF_DIV), .CPOL(1'b0)) dut (.*);

  always #5 clk = ~clk;

  logic [LANES-1:0][MAXBITS-1:0] rx;
  int nrx;
  always @(posedge sclk) if (!cs_n) begin
    for (int l = 0; l < LANES; l++) rx[l] <= {rx[l][MAXBITS-2:0], sdo[l]};
    nrx <= nrx + 1;
  end

  task automatic send(input int nb);
    longint t0, t1;
    logic [LANES-1:0][MAXBITS-1:0] exp;
    for (int l = 0; l < LANES; l++) data[l] = MAXBITS'($urandom);
    nbits = nb[$clog2(MAXBITS+1)-1:0];
    nrx = 0; rx = '0;
    @(negedge clk); start = 1; @(negedge clk); start = 0;
    t0 = $time - 5;
    @(posedge done); t1 = $time;
    @(negedge clk);
    for (int l = 0; l < LANES; l++) begin
      exp[l] = data[l] & ((MAXBITS'(1) << nb) - 1);
      checks++;
      if (rx[l] != exp[l]) begin failures++; $display("lane %0d got %h exp %h", l, rx[l], exp[l]); end
    end
    checks++;
    if (nrx != nb) begin failures++; $display("edges %0d exp %0d", nrx, nb); end
    checks++;
    if ((t1 - t0)/10 != 2*HALF_DIV*nb) begin failures++; $display("cycles %0d exp %0d", (t1-t0)/10, 2*HALF_DIV*nb); end
  endtask

  initial begin
    #10000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    nbits = 0; data = '0;
    #23 rst_n = 1;
    checks++; if (sclk !== 1'b0 || cs_n !== 1'b1) failures++;
    send(24); send(24); send(8); send(1); send(17);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
