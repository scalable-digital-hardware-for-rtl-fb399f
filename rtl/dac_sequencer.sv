// dac_sequencer: moves the 100 electrode voltages to a stored voltage set.
//
// A command (go) names a target set, a step size and an update period in
// clock cycles. The sequencer keeps the present code of every electrode. On
// each update it reads the four rows of the target set (eight cycles), moves
// every electrode towards its target by at most `step` codes, sends the
// new codes to the DAC bus and waits for the bus to finish; it repeats every
// `period` cycles, but never faster than MIN_PERIOD (233 cycles, the
// paper's 430 kHz maximum update rate; one bus update itself takes ~2.1 us)
// until every electrode has reached its target, then pulses `done`. A step
// of 0 jumps straight to the target in a single update: this is the
// non-shuttling mode, in which one set is uploaded and the serial clocks
// then stay off. Codes are two's-complement (signed) DAC codes.
// The paper says the FPGA interpolates between sets at a user-defined rate
// and step size; moving by a bounded step per channel is this design's
// reading of "step size". The assembly-code program that issues the
// commands is not modelled; commands arrive on plain ports.
module dac_sequencer
  import ionctl_pkg::*;
#(
  parameter int unsigned NSETS = 32,
  parameter int unsigned NCHIP = 25,
  parameter int unsigned PW    = 24,
  // shortest update period in clock cycles: 1/430 kHz at 100 MHz
  parameter int unsigned MIN_PERIOD = 233
) (
  input  logic                          clk,
  input  logic                          rst_n,
  // command
  input  logic                          go,
  input  logic [$clog2(NSETS)-1:0]      set_sel,
  input  dac_code_t                     step,
  input  logic [PW-1:0]                 period,
  // voltage-set memory read port
  output logic [$clog2(NSETS)-1:0]      rset,
  output logic [1:0]                    rrow,
  input  dac_code_t [NCHIP-1:0]         rdata,
  // DAC bus
  output logic                          dac_start,
  output dac_code_t [NCHIP-1:0][3:0]    codes,
  input  logic                          dac_done,
  // status
  output logic                          busy,
  output logic                          done,
  output logic [31:0]                   n_updates
);
  typedef enum logic [2:0] {Q_IDLE, Q_HOLDOFF, Q_RD, Q_CMP, Q_SEND, Q_WAITBUS, Q_WAITPER} qstate_e;
  qstate_e st;
  logic [1:0]    r;
  dac_code_t     step_q;
  logic [PW-1:0] period_q, timer;
  logic          remaining;

  function automatic dac_code_t toward(input dac_code_t cur, input dac_code_t tgt, input dac_code_t s);
    logic signed [16:0] d;
    d = $signed({tgt[15], tgt}) - $signed({cur[15], cur});
    if (s == 0)                                               return tgt;
    else if (d >= 0 && d <= $signed({1'b0, s}))               return tgt;
    else if (d < 0 && -d <= $signed({1'b0, s}))               return tgt;
    else if (d > 0)                                           return cur + s;
    else                                                      return cur - s;
  endfunction

  assign rrow = r;
  assign busy = (st != Q_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= Q_IDLE; r <= '0; rset <= '0; step_q <= '0; period_q <= '0; timer <= '0;
      remaining <= 1'b0; dac_start <= 1'b0; codes <= '0; done <= 1'b0; n_updates <= '0;
    end else begin
      dac_start <= 1'b0;
      done      <= 1'b0;
      if (timer != '1) timer <= timer + 1'b1;
      unique case (st)
        Q_IDLE: if (go) begin
          rset <= set_sel; step_q <= step;
          period_q <= (period < PW'(MIN_PERIOD)) ? PW'(MIN_PERIOD) : period;
          r <= '0; remaining <= 1'b0; st <= Q_HOLDOFF;
        end
        // the first update of a command also keeps MIN_PERIOD from the last one
        Q_HOLDOFF: if ((PW+1)'(timer) + (PW+1)'(10) >= (PW+1)'(MIN_PERIOD)) st <= Q_RD;
        Q_RD: st <= Q_CMP;                       // memory latency
        Q_CMP: begin
          for (int c = 0; c < NCHIP; c++) begin
            dac_code_t nv;
            nv = toward(codes[c][r], rdata[c], step_q);
            codes[c][r] <= nv;
            if (nv != rdata[c]) remaining <= 1'b1;
          end
          if (r == 2'd3) st <= Q_SEND;
          else begin r <= r + 1'b1; st <= Q_RD; end
        end
        Q_SEND: begin
          dac_start <= 1'b1; timer <= '0; n_updates <= n_updates + 1'b1; st <= Q_WAITBUS;
        end
        Q_WAITBUS: if (dac_done) begin
          if (!remaining) begin done <= 1'b1; st <= Q_IDLE; end
          else st <= Q_WAITPER;
        end
        Q_WAITPER: if ((PW+1)'(timer) + (PW+1)'(10) >= (PW+1)'(period_q)) begin
          // ten cycles of reading, stepping and starting precede the next send
          r <= '0; remaining <= 1'b0; st <= Q_RD;
        end
        default: st <= Q_IDLE;
      endcase
    end
  end
endmodule
