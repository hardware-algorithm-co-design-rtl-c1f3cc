// rota_se -- scheduling engine: two nested priority queues.
//
// The G-SE (one server container per ETS) chooses the ETS, one L-SE per ETS
// chooses the task inside it, and a multiplexer whose control is SID-SCH
// and whose data are the L-SEs' [TID-SCH, P-Len] forms the decision.
//
// Handshake with the I/O pool: when find_next_job is high in cycle t and an
// ETS is eligible, SID-SCH is loaded at the end of t; in cycle t+1 job
// carries {1, SID-SCH, TID-SCH, P-Len} of that ETS's best task for one
// cycle (if the ETS is still eligible), and the L-SE marks the task
// dispatched.  The caller must keep find_next_job low while a job is in
// flight.  expire[k] pulses when ETS k's budget runs out; the matching L-SE
// is told to drop its ready tasks in the same cycle.
// SCH_PIPE = 1 puts the optional pipeline stage into every comparator
// tree; the caller must then hold find_next_job low until the trees have
// caught up with the last change of their inputs (see rota_io).
// The structure follows the paper; the one-cycle issue after SID-SCH and
// the re-check of eligibility are this design's choices.
module rota_se
  import rota_pkg::*;
#(
  parameter int unsigned N_ETS     = 8,
  parameter int unsigned TIB_DEPTH = 8,
  parameter bit          SCH_PIPE  = 1'b0
) (
  input  logic             clk,
  input  logic             rst_n,
  input  cfg_t             cfg,
  input  tpara_t           tpara,
  input  logic             hyp_start,
  input  logic             tick,
  input  logic             find_next_job,
  output job_t             job,
  output logic [N_ETS-1:0] budget,
  output logic [N_ETS-1:0] expire,
  output logic             tib_overflow
);

  logic [N_ETS-1:0]             has_t, ovf, disp;
  logic [N_ETS-1:0][TID_W-1:0]  tid_sch;
  logic [N_ETS-1:0][PLEN_W-1:0] plen_sch;
  logic [SID_W-1:0]             sid_sch;
  logic                         sch_valid;

  rota_gse #(.N_ETS(N_ETS), .PIPE(SCH_PIPE)) u_gse (
    .clk, .rst_n, .cfg, .hyp_start, .tick, .has_t, .find_next_job,
    .sid_sch, .sch_valid, .budget, .expire
  );

  for (genvar k = 0; k < N_ETS; k++) begin : g_lse
    rota_lse #(.MY_SID(k), .TIB_DEPTH(TIB_DEPTH), .PIPE(SCH_PIPE)) u_lse (
      .clk, .rst_n, .tpara,
      .dispatch    (disp[k]),
      .dispatch_tid(job.tid),
      .terminate   (expire[k]),
      .has_t       (has_t[k]),
      .tid_sch     (tid_sch[k]),
      .plen_sch    (plen_sch[k]),
      .overflow    (ovf[k])
    );
  end

  // output multiplexer, controlled by SID-SCH
  always_comb begin
    job = '0;
    for (int k = 0; k < N_ETS; k++) begin
      if (sch_valid && sid_sch == SID_W'(k) && has_t[k] && budget[k]) begin
        job.valid = 1'b1;
        job.sid   = sid_sch;
        job.tid   = tid_sch[k];
        job.plen  = plen_sch[k];
      end
    end
    for (int k = 0; k < N_ETS; k++) disp[k] = job.valid && (sid_sch == SID_W'(k));
  end

  assign tib_overflow = |ovf;

endmodule
