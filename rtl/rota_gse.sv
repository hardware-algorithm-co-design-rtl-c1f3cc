// rota_gse -- global scheduling engine: chooses which ETS may run next.
//
// N_ETS server containers each present a filtered request {valid, SID,
// Prio-S}.  A purely combinational comparator tree picks the valid request
// with the largest Prio-S (ties: lower SID).  When find_next_job is high and
// some request is valid, the winner is loaded into the SID-SCH register and
// sch_valid pulses for one cycle; otherwise SID-SCH holds.
//
// Interface: c-type configuration (cfg), hyper-period start and tick from
// the time base, HasT? from the L-SEs.  budget/expire expose every
// B-Timer's status and its falling edge for termination of an ETS.
// The containers, the comparator tree and the Find_Next_Job-controlled
// SID-SCH register follow the paper.  PIPE = 1 adds the paper's optional
// pipeline stage inside the comparator tree (one clock more from a request
// change to the tree result; the caller must allow for it); its position
// and the tie rule are this design's choices.
module rota_gse
  import rota_pkg::*;
#(
  parameter int unsigned N_ETS = 8,
  parameter bit          PIPE  = 1'b0
) (
  input  logic             clk,
  input  logic             rst_n,
  input  cfg_t             cfg,
  input  logic             hyp_start,
  input  logic             tick,
  input  logic [N_ETS-1:0] has_t,
  input  logic             find_next_job,
  output logic [SID_W-1:0] sid_sch,
  output logic             sch_valid,
  output logic [N_ETS-1:0] budget,
  output logic [N_ETS-1:0] expire
);

  sreq_t req [N_ETS];
  sreq_t best;
  logic [N_ETS-1:0]             req_valid;
  logic [N_ETS-1:0][PRIO_W-1:0] req_prio;
  always_comb begin
    for (int k = 0; k < N_ETS; k++) begin
      req_valid[k] = req[k].valid;
      req_prio[k]  = req[k].prio;
    end
  end


  for (genvar k = 0; k < N_ETS; k++) begin : g_sc
    rota_sc #(.SID(k)) u_sc (
      .clk, .rst_n, .cfg, .hyp_start, .tick,
      .has_t (has_t[k]),
      .req   (req[k]),
      .budget(budget[k]),
      .expire(expire[k])
    );
  end

  rota_prio_tree #(.N(N_ETS), .KEY_W(PRIO_W), .IDX_W(SID_W), .PIPE(PIPE)) u_tree (
    .clk,
    .valid_i ( req_valid ),
    .key_i   ( req_prio  ),
    .valid_o ( best.valid ),
    .idx_o   ( best.sid   ),
    .key_o   ( best.prio  )
  );

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      sid_sch   <= '0;
      sch_valid <= 1'b0;
    end else begin
      sch_valid <= find_next_job && best.valid;
      if (find_next_job && best.valid) sid_sch <= best.sid;
    end
  end

endmodule
