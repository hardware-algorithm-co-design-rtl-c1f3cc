// rota_timebase -- global time base of the co-processor.
//
// A prescaler turns the clock into a one-cycle tick every TICK_DIV cycles
// (10 us at 100 MHz by default); the tick triggers every B- and S-Timer.
// A hyper-period counter, programmed in ticks by c.hyp, raises hyp_start
// on the tick that begins each hyper-period; hyp_start resets every
// S-Timer.  Writing c.hyp restarts the hyper-period at the next tick;
// length 0 stops it.  hyp_start is always coincident with a tick.
// The paper only names a global clock that resets the S-Timers at every
// hyper-period; the prescaler, its ratio and programming the length by a
// c-type instruction are this design's choices.  TICK_DIV must be >= 2
// because the timers decrement on a rising edge of the tick.
module rota_timebase
  import rota_pkg::*;
#(
  parameter int unsigned TICK_DIV = 1000
) (
  input  logic clk,
  input  logic rst_n,
  input  cfg_t cfg,
  output logic tick,
  output logic hyp_start
);

  localparam int unsigned DW = $clog2(TICK_DIV);

  logic [DW-1:0]     div;
  logic [TIME_W-1:0] hyp_len, hcnt;
  logic              restart;

  assign tick      = (div == DW'(TICK_DIV-1));
  assign hyp_start = tick && (hyp_len != '0) && (restart || hcnt == hyp_len - TIME_W'(1));

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      div     <= '0;
      hyp_len <= '0;
      hcnt    <= '0;
      restart <= 1'b0;
    end else begin
      div <= tick ? '0 : div + DW'(1);
      if (cfg.valid && cfg.sub == C_HYP) begin
        hyp_len <= cfg.value;
        hcnt    <= '0;
        restart <= 1'b1;
      end else if (tick && hyp_len != '0) begin
        restart <= 1'b0;
        hcnt    <= hyp_start ? '0 : hcnt + TIME_W'(1);
      end
    end
  end

  initial assert (TICK_DIV >= 2) else $error("TICK_DIV must be at least 2");

endmodule
