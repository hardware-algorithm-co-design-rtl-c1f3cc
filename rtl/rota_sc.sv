// rota_sc -- server container: the hardware half of one execution time
// server (ETS).
//
// The parameter register holds the ETS priority Prio-S (its SID is the
// container's index, parameter SID).  The S-Timer is reloaded with the
// ETS start time at every hyper-period start and counts ticks down; when it
// reaches 0 the B-Timer is reloaded with the budget and from then counts
// ticks down too, so the ETS owns the time window [start, start + budget)
// of each hyper-period.  The container's request is {1, SID, Prio-S} while
// the B-Timer status is 1, the L-SE reports a ready task (HasT?) and
// Prio-S != 0; otherwise it is all zero.
//
// Configuration: c.set writes the B-Timer reset value, c.enr the S-Timer
// reset value, c.pri Prio-S, each when the instruction's SID equals SID.
// Timing: the B-Timer reset port is held low for exactly one cycle, the
// cycle after the S-Timer has reached 0 (or the cycle after a hyper-period
// start that left the S-Timer at 0, i.e. a start time of 0).  expire is a
// one-cycle pulse on the cycle after the B-Timer status falls.
// The paper links the B-Timer reset to the S-Timer status and the S-Timer
// reset to the global hyper-period signal; the edge detection that turns
// the status level into a one-cycle reload, and the HasT? term in the
// filter, are this design's reading of that.
module rota_sc
  import rota_pkg::*;
#(
  parameter int unsigned SID = 0
) (
  input  logic  clk,
  input  logic  rst_n,
  input  cfg_t  cfg,
  input  logic  hyp_start,
  input  logic  tick,
  input  logic  has_t,
  output sreq_t req,
  output logic  budget,
  output logic  expire
);

  logic [PRIO_W-1:0] prio_s;
  logic              sel;
  logic              s_status, s_status_q, hyp_q, budget_q;
  logic              b_reset_n;

  assign sel = cfg.valid && (cfg.sid == SID_W'(SID));

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      prio_s     <= '0;
      s_status_q <= 1'b0;
      hyp_q      <= 1'b0;
      budget_q   <= 1'b0;
    end else begin
      if (sel && cfg.sub == C_PRI) prio_s <= cfg.value[PRIO_W-1:0];
      s_status_q <= s_status;
      hyp_q      <= hyp_start;
      budget_q   <= budget;
    end
  end

  // S-Timer just reached 0, or was loaded with 0 by the hyper-period start
  assign b_reset_n = !((s_status_q || hyp_q) && !s_status);

  rota_timer #(.W(TIME_W)) u_s_timer (
    .clk, .rst_n,
    .cfg_we   (sel && cfg.sub == C_ENR),
    .cfg_value(cfg.value),
    .reset_n  (!hyp_start),
    .trigger  (tick),
    .status   (s_status)
  );

  rota_timer #(.W(TIME_W)) u_b_timer (
    .clk, .rst_n,
    .cfg_we   (sel && cfg.sub == C_SET),
    .cfg_value(cfg.value),
    .reset_n  (b_reset_n),
    .trigger  (tick),
    .status   (budget)
  );

  assign expire = budget_q && !budget;

  always_comb begin
    req = '0;
    if (budget && has_t && prio_s != '0) begin
      req.valid = 1'b1;
      req.sid   = SID_W'(SID);
      req.prio  = prio_s;
    end
  end

endmodule
