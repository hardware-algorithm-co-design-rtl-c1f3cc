// rota_prio_tree -- comparator tree ("C" blocks of the scheduling logic)
// shared by the global and the local scheduling engines.
//
// N candidates, each with a valid bit and a KEY_W-bit priority.  Pairs are
// compared level by level in a balanced binary tree (N padded to a power of
// two with invalid leaves); at each node the valid candidate with the larger
// key wins and the left (lower-index) one wins a tie.  Outputs: whether any
// candidate is valid, the winning index and its key.
//
// PIPE = 0 (default): purely combinational, depth ceil(log2 N) comparators.
// PIPE = 1: the node results at depth LVL/2 from the root are registered,
// so the outputs lag the inputs by one clock and the longest path is about
// half the tree.  The paper marks such a stage as optional for large
// configurations; where it sits and that there is only one is this
// design's choice.  The stage has no reset: its users wait until it has
// been refilled after their inputs last changed.
module rota_prio_tree #(
  parameter int unsigned N     = 8,
  parameter int unsigned KEY_W = 8,
  parameter int unsigned IDX_W = 5,
  parameter bit          PIPE  = 1'b0
) (
  input  logic                    clk,
  input  logic [N-1:0]            valid_i,
  input  logic [N-1:0][KEY_W-1:0] key_i,
  output logic                    valid_o,
  output logic [IDX_W-1:0]        idx_o,
  output logic [KEY_W-1:0]        key_o
);

  localparam int unsigned LVL = (N > 1) ? $clog2(N) : 0;
  localparam int unsigned NP  = 1 << LVL;
  localparam int unsigned PD  = LVL / 2;        // depth of the pipeline cut
  localparam int unsigned CUT = 1 << PD;        // first node index at that depth

  // lower part: leaves up to the cut (nodes CUT .. 2*NP-1)
  logic [2*NP-1:1]            nv;
  logic [2*NP-1:1][KEY_W-1:0] nk;
  logic [2*NP-1:1][IDX_W-1:0] ni;
  // upper part: cut nodes (registered or not) up to the root (nodes 1 .. 2*CUT-1)
  logic [2*CUT-1:1]            mv;
  logic [2*CUT-1:1][KEY_W-1:0] mk;
  logic [2*CUT-1:1][IDX_W-1:0] mi;
  // pipeline registers at the cut
  logic [2*CUT-1:CUT]            rv;
  logic [2*CUT-1:CUT][KEY_W-1:0] rk;
  logic [2*CUT-1:CUT][IDX_W-1:0] ri;

  always_comb begin
    nv = '0; nk = '0; ni = '0;
    for (int j = 0; j < NP; j++) begin
      nv[NP+j] = (j < N) ? valid_i[j] : 1'b0;
      nk[NP+j] = (j < N) ? key_i[j]   : '0;
      ni[NP+j] = IDX_W'(j);
    end
    for (int n = NP-1; n >= CUT; n--) begin
      if (nv[2*n] && (!nv[2*n+1] || nk[2*n] >= nk[2*n+1])) begin
        nv[n] = nv[2*n];   nk[n] = nk[2*n];   ni[n] = ni[2*n];
      end else begin
        nv[n] = nv[2*n+1]; nk[n] = nk[2*n+1]; ni[n] = ni[2*n+1];
      end
    end
  end

  if (PIPE) begin : g_pipe
    always_ff @(posedge clk) begin
      for (int n = CUT; n < 2*CUT; n++) begin
        rv[n] <= nv[n]; rk[n] <= nk[n]; ri[n] <= ni[n];
      end
    end
  end else begin : g_comb
    always_comb begin
      for (int n = CUT; n < 2*CUT; n++) begin
        rv[n] = nv[n]; rk[n] = nk[n]; ri[n] = ni[n];
      end
    end
  end

  always_comb begin
    mv = '0; mk = '0; mi = '0;
    for (int n = CUT; n < 2*CUT; n++) begin
      mv[n] = rv[n]; mk[n] = rk[n]; mi[n] = ri[n];
    end
    for (int n = CUT-1; n >= 1; n--) begin
      if (mv[2*n] && (!mv[2*n+1] || mk[2*n] >= mk[2*n+1])) begin
        mv[n] = mv[2*n];   mk[n] = mk[2*n];   mi[n] = mi[2*n];
      end else begin
        mv[n] = mv[2*n+1]; mk[n] = mk[2*n+1]; mi[n] = mi[2*n+1];
      end
    end
  end

  assign valid_o = mv[1];
  assign idx_o   = mv[1] ? mi[1] : '0;
  assign key_o   = mv[1] ? mk[1] : '0;

endmodule
