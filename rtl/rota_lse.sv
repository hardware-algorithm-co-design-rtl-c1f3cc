// rota_lse -- local scheduling engine of one ETS.
//
// The Task Info Block (TIB) is a register chain of TIB_DEPTH entries
// {used, TID, P-Len, Prio-T}, all readable in parallel.  It is written from
// the task headers (T-Para) that the decoder broadcasts to every L-SE:
//   p.ld  for this SID : create/update entry {TID, P-Len}, Prio-T = 0
//                        (loaded but not released)
//   i.ld  for this SID : create/update entry {TID, P-Len, Prio-T} (ready)
//   p.ld/i.ld for another SID holding the same TID here: entry freed
//   i.run (any SID)    : an entry holding TID gets Prio-T (released)
// A task is ready while its Prio-T is not 0.  A comparator tree returns
// the ready task with the largest Prio-T (ties: lower slot) as TID-SCH with
// its P-Len; HasT? says whether there is one.  dispatch clears the
// dispatched task's Prio-T (the entry stays, so i.run can release it
// again); terminate clears every Prio-T (the ETS ran out of budget and its
// unfinished tasks are dropped).  A load that finds the TIB full is dropped
// and overflow pulses.
//
// Timing: TIB updates on the clock edge after the header; HasT?/TID-SCH are
// combinational from the TIB, or one clock later with PIPE = 1 (the
// optional pipeline stage of the comparator tree).  When T-Para and dispatch/terminate touch the
// same entry in one cycle the T-Para write wins.
// The TIB contents and the tree follow the paper; the entry life cycle,
// TIB_DEPTH = 8 and the tie rule are this design's choices.
module rota_lse
  import rota_pkg::*;
#(
  parameter int unsigned MY_SID    = 0,
  parameter int unsigned TIB_DEPTH = 8,
  parameter bit          PIPE      = 1'b0
) (
  input  logic              clk,
  input  logic              rst_n,
  input  tpara_t            tpara,
  input  logic              dispatch,
  input  logic [TID_W-1:0]  dispatch_tid,
  input  logic              terminate,
  output logic              has_t,
  output logic [TID_W-1:0]  tid_sch,
  output logic [PLEN_W-1:0] plen_sch,
  output logic              overflow
);

  localparam int unsigned SLOT_W = (TIB_DEPTH > 1) ? $clog2(TIB_DEPTH) : 1;

  typedef struct packed {
    logic              used;
    logic [TID_W-1:0]  tid;
    logic [PLEN_W-1:0] plen;
    logic [PRIO_W-1:0] prio;
  } tib_entry_t;

  tib_entry_t tib [TIB_DEPTH];

  // ---- TIB write side -------------------------------------------------
  logic                 mine, is_load;
  logic [TIB_DEPTH-1:0] hit, free;
  logic                 any_hit, any_free;
  logic [SLOT_W-1:0]    hit_slot, free_slot;

  assign mine    = tpara.valid && (tpara.sid == SID_W'(MY_SID));
  assign is_load = tpara.valid && (tpara.kind == TP_PLD || tpara.kind == TP_ILD);

  always_comb begin
    any_hit = 1'b0; any_free = 1'b0; hit_slot = '0; free_slot = '0;
    for (int e = 0; e < TIB_DEPTH; e++) begin
      hit[e]  = tib[e].used && (tib[e].tid == tpara.tid);
      free[e] = !tib[e].used;
    end
    for (int e = TIB_DEPTH-1; e >= 0; e--) begin
      if (hit[e])  begin any_hit  = 1'b1; hit_slot  = SLOT_W'(e); end
      if (free[e]) begin any_free = 1'b1; free_slot = SLOT_W'(e); end
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      for (int e = 0; e < TIB_DEPTH; e++) tib[e] <= '0;
      overflow <= 1'b0;
    end else begin
      overflow <= 1'b0;
      for (int e = 0; e < TIB_DEPTH; e++) begin
        if (terminate) tib[e].prio <= '0;
        else if (dispatch && tib[e].used && tib[e].tid == dispatch_tid) tib[e].prio <= '0;
      end
      if (is_load && mine) begin
        if (any_hit || any_free) begin
          tib[any_hit ? hit_slot : free_slot] <= '{used: 1'b1, tid: tpara.tid, plen: tpara.plen,
              prio: (tpara.kind == TP_ILD) ? tpara.prio : '0};
        end else begin
          overflow <= 1'b1;
        end
      end else if (is_load && any_hit) begin
        tib[hit_slot] <= '0;   // task moved to another ETS
      end else if (tpara.valid && tpara.kind == TP_IRUN && any_hit) begin
        tib[hit_slot].prio <= tpara.prio;
      end
    end
  end

  // ---- scheduling logic ------------------------------------------------
  logic [TIB_DEPTH-1:0]             rdy;
  logic [TIB_DEPTH-1:0][PRIO_W-1:0] key;
  logic [SLOT_W-1:0]                win;
  logic [PRIO_W-1:0]                win_prio;

  always_comb begin
    for (int e = 0; e < TIB_DEPTH; e++) begin
      rdy[e] = tib[e].used && tib[e].prio != '0;
      key[e] = tib[e].prio;
    end
  end

  rota_prio_tree #(.N(TIB_DEPTH), .KEY_W(PRIO_W), .IDX_W(SLOT_W), .PIPE(PIPE)) u_tree (
    .clk, .valid_i(rdy), .key_i(key), .valid_o(has_t), .idx_o(win), .key_o(win_prio)
  );

  assign tid_sch  = has_t ? tib[win].tid  : '0;
  assign plen_sch = has_t ? tib[win].plen : '0;

endmodule
