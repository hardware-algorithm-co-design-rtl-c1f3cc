// tb_rota_io_synth -- randomly generated I/O task sets run on the whole
// co-processor, a scaled-down form of the synthetic evaluation: n = 4..16
// periodic tasks whose utilisations are drawn with UUniFast for a total of
// U = 0.05 * n, periods of H or H/2 units (H = 64-unit hyper-period, so
// at most 32 jobs, one task ID per job) and implicit deadlines.
//
// The bench plays the software side.  A simple offline scheduler (a
// greedy list schedule, not the full quality-driven algorithm) places the
// jobs of one hyper-period back to back in release order and cuts the
// list into gap-free groups of at most TIB_DEPTH jobs; each group becomes
// one ETS whose window starts at its first job's start and whose budget
// is the group's length plus a small guard for the few cycles the
// hardware spends between jobs.  Jobs that would need a ninth ETS, miss
// their deadline or leave the hyper-period are not admitted.  Every job is
// pre-loaded once with p.ld (priority falls with its place in the group)
// and released at each hyper-period start with i.run; from then on the
// hardware alone decides when it runs.
//
// The device model accepts one operation per unit.  The first hyper-period
// is defect-free; in the second, every other system has one job whose
// operations take 1 + PE units each (a timing defect, PE = 3).  Checked per job: all
// operations arrive in order; none before the job's release or outside its
// ETS's window; the first job of a window starts within a few cycles of the
// window opening and each later job within a few cycles of the device
// going idle; no termination without a defect.  With a defect, the
// defective window must not leak past its end, and the next window must
// start at most one stretched operation late.
//
// The schedule is computed in units of one operation.  In the first phase
// a unit is one tick (39 systems, quick); in the second a unit is 2250
// ticks, so the hyper-period is 144,000 ticks -- 1440 ms at the default
// 10 us tick -- and the ETS start times, budgets and hyper-period length
// are programmed at their full size (two systems, n = 4 and n = 16).
// The tick is shortened to 20 clocks to keep the run short.
module tb_rota_io_synth;
  import rota_pkg::*;

  localparam int TD     = 20;   // clocks per tick
  localparam int H      = 64;   // hyper-period, ticks
  localparam int OFS    = 4;    // ticks kept free at the start for the i.run words
  localparam int NE     = 8;    // ETSs (top default)
  localparam int TIB    = 8;    // TIB entries per ETS (top default)
  localparam int SLACK  = 12;   // cycles between the device idling and the next operation
  localparam int NSYS   = 3;    // systems per task count
  localparam int PE     = 3;    // defect: an operation takes 1 + PE units
  localparam int FULL_UT = 2250; // ticks per unit in the full-length phase (64 * 2250 = 144,000)
  localparam int NFULL  = 2;    // systems run at the full hyper-period

  logic clk = 0, rst_n = 0;
  logic in_valid = 0, in_priv = 0;
  logic [WORD_W-1:0] in_data = '0;
  logic op_valid, op_ready, io_idle;
  logic [WORD_W-1:0] op_data;
  job_t job;
  logic [NE-1:0] ets_budget;
  logic hyp_start, terminated, priv_err, tib_overflow;

  rota_io #(.TICK_DIV(TD)) dut (.*);

  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  task automatic chk(bit c, string m);
    checks++;
    if (!c) begin failures++; $display("FAIL t=%0t %s", $time, m); end
  endtask

  initial begin
    repeat (13 * NSYS * (2 * H * TD + 4000) + NFULL * (2 * H * FULL_UT * TD + 4000)) @(posedge clk);
    failures++; $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------- the job set of one system ------------------------------
  int nj;                          // jobs generated
  int j_rel [32], j_c [32], j_t [32], j_grp [32], j_idx [32], j_prio [32];
  int ng;                          // groups (= ETSs used)
  int g_alpha [NE], g_lam [NE], g_size [NE];
  int g_first [NE][TIB];           // job ids of a group in order

  // ---------------- time reference ----------------------------------------
  int cyc = 0, hyp_cyc = 0, hp = -1;
  int ut = 1;                      // ticks per schedule unit
  int uc = TD;                     // clocks per schedule unit
  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (hyp_start) hyp_cyc <= cyc;
  end

  // ---------------- device model and per-operation checks -----------------
  int busy = 0;
  int defect_job = -1;             // job stretched in the second hyper-period
  int nops [32], first_acc [32], last_acc [32];
  assign io_idle  = (busy == 0);
  assign op_ready = (busy == 0);
  always @(posedge clk) begin
    if (busy > 0) busy <= busy - 1;
    if (op_valid && op_ready && rst_n) begin
      int t, o, rel, g;
      t = int'(op_data[31:24]); o = int'(op_data[23:16]);
      rel = cyc - hyp_cyc;
      checks++;
      if (t >= nj || j_grp[t] < 0 || o != nops[t] || op_data[15:0] != 16'hA5C3) begin
        failures++; $display("FAIL t=%0t unexpected operation %h", $time, op_data);
      end else begin
        g = j_grp[t];
        chk(rel >= g_alpha[g] * uc && rel < (g_alpha[g] + g_lam[g]) * uc + 6,
            $sformatf("job %0d op %0d at %0d outside ETS %0d window [%0d,%0d) units",
                      t, o, rel, g, g_alpha[g], g_alpha[g] + g_lam[g]));
        if (nops[t] == 0) first_acc[t] = rel;
        last_acc[t] = rel;
        nops[t] = nops[t] + 1;
      end
      busy <= (hp == 1 && t == defect_job) ? (1 + PE) * uc - 1 : uc - 1;
    end
  end

  int n_term_hp = 0;
  always @(posedge clk) if (rst_n && terminated) n_term_hp <= n_term_hp + 1;

  // ---------------- instruction helpers -----------------------------------
  function automatic logic [31:0] mk(int op, int sid, int tid, int service);
    return (32'(service) << 12) | (32'(tid) << 7) | (32'(sid) << 2) | 32'(op);
  endfunction
  task automatic word(logic [31:0] w, bit priv);
    @(negedge clk); in_valid = 1; in_data = w; in_priv = priv;
    @(negedge clk); in_valid = 0; in_priv = 0;
  endtask
  task automatic cfg(int sub, int sid, int v);
    word(mk(0, sid, 0, (sub << 18) | v), 1);
  endtask

  // ---------------- task set generation and offline schedule --------------
  function automatic real urand();
    return real'($urandom) / 4294967296.0;
  endfunction

  function automatic int guard(int jobs);
    return 1 + (jobs * 8 + uc - 1) / uc;
  endfunction

  task automatic make_system(int n);
    real u [16];
    real sum, nxt;
    int  per [16], c [16];
    int  gend, gnext, start, alpha, size;
    bit  fresh;
    // UUniFast
    sum = 0.05 * n;
    for (int i = 0; i < n - 1; i++) begin
      nxt  = sum * (urand() ** (1.0 / real'(n - 1 - i)));
      u[i] = sum - nxt;
      sum  = nxt;
    end
    u[n-1] = sum;
    for (int i = 0; i < n; i++) begin
      per[i] = ($urandom_range(1) == 1) ? H : H / 2;
      c[i]   = int'(u[i] * real'(per[i]) + 0.5);
      if (c[i] < 1) c[i] = 1;
      if (c[i] > 31) c[i] = 31;
    end
    // jobs in release order (offset by OFS ticks)
    nj = 0;
    for (int r = 0; r < H; r += H / 2)
      for (int i = 0; i < n; i++)
        if (r % per[i] == 0) begin
          j_rel[nj] = r + OFS; j_c[nj] = c[i]; j_t[nj] = per[i]; j_grp[nj] = -1;
          nj++;
        end
    // greedy list schedule cut into gap-free groups
    ng = 0; gend = 0; gnext = OFS;
    for (int j = 0; j < nj; j++) begin
      fresh = !(ng > 0 && g_size[ng-1] < TIB && j_rel[j] <= gend);
      if (fresh && ng == NE) continue;
      alpha = fresh ? ((j_rel[j] > gnext) ? j_rel[j] : gnext) : g_alpha[ng-1];
      start = fresh ? alpha : gend;
      size  = fresh ? 1 : g_size[ng-1] + 1;
      if (start + j_c[j] > j_rel[j] + j_t[j]) continue;            // deadline
      if (start + j_c[j] - alpha + guard(size) + alpha > H - 2) continue;
      if (fresh) begin g_alpha[ng] = alpha; g_size[ng] = 0; ng++; end
      j_grp[j] = ng - 1;
      j_idx[j] = g_size[ng-1];
      j_prio[j] = 200 - j_idx[j];
      g_first[ng-1][g_size[ng-1]] = j;
      g_size[ng-1]++;
      gend = start + j_c[j];
      g_lam[ng-1] = gend - g_alpha[ng-1] + guard(g_size[ng-1]);
      gnext = g_alpha[ng-1] + g_lam[ng-1];
    end
  endtask

  // ---------------- end-of-hyper-period checks ----------------------------
  int n_sys = 0, n_jobs_adm = 0, n_jobs_drop = 0, n_exact = 0, n_follow = 0;
  int n_defects = 0, n_terms = 0, n_isolated = 0, n_full = 0;

  task automatic check_hp(int defect_grp);
    for (int g = 0; g < ng; g++) begin
      bit clean;
      clean = (defect_grp < 0) || (g < defect_grp);
      for (int k = 0; k < g_size[g]; k++) begin
        int j;
        j = g_first[g][k];
        chk(nops[j] == 0 || first_acc[j] >= j_rel[j] * uc,
            $sformatf("job %0d started before its release", j));
        if (!clean) continue;
        chk(nops[j] == j_c[j], $sformatf("hp %0d job %0d ran %0d of %0d ops", hp, j, nops[j], j_c[j]));
        if (k == 0) begin
          chk(first_acc[j] >= g_alpha[g] * uc && first_acc[j] <= g_alpha[g] * uc + SLACK,
              $sformatf("ETS %0d: first job at %0d, window opens at %0d", g, first_acc[j], g_alpha[g] * uc));
          n_exact++;
        end else begin
          int p;
          p = g_first[g][k-1];
          chk(first_acc[j] - last_acc[p] >= uc && first_acc[j] - last_acc[p] <= uc + SLACK,
              $sformatf("ETS %0d: job %0d starts %0d cycles after job %0d's last op", g, j,
                        first_acc[j] - last_acc[p], p));
          n_follow++;
        end
      end
    end
    if (defect_grp < 0) chk(n_term_hp == 0, "no termination without a timing defect");
    else if (defect_grp + 1 < ng) begin
      int j;
      j = g_first[defect_grp + 1][0];
      chk(nops[j] > 0 && first_acc[j] <= (g_alpha[defect_grp + 1] + 1 + PE) * uc + SLACK,
          $sformatf("ETS after the defect starts late (%0d)", first_acc[j]));
      n_isolated++;
    end
    n_terms += n_term_hp;
  endtask

  task automatic run_hp(int defect_grp);
    @(posedge clk iff hyp_start);
    hp++;
    for (int j = 0; j < nj; j++) begin nops[j] = 0; first_acc[j] = -1; last_acc[j] = -1; end
    n_term_hp = 0;
    for (int j = 0; j < nj; j++)
      if (j_grp[j] >= 0) word(mk(3, j_grp[j], j, j_prio[j] << 7), 0);
    wait (cyc - hyp_cyc >= (H - 1) * uc);
    @(negedge clk);
    check_hp(defect_grp);
  endtask

  // ---------------- main --------------------------------------------------
  initial begin
    for (int run = 0; run < 13 * NSYS + NFULL; run++) begin
        int n, s, adm, dgrp;
        if (run < 13 * NSYS) begin
          n = 4 + run / NSYS; s = run % NSYS; ut = 1;
        end else begin
          // full length: the smallest and the largest task count
          n = (run == 13 * NSYS) ? 4 : 16; s = 0; ut = FULL_UT;
        end
        uc = ut * TD;
        make_system(n);
        rst_n = 0; hp = -1; defect_job = -1;
        repeat (4) @(negedge clk);
        rst_n = 1;
        adm = 0;
        for (int g = 0; g < ng; g++) begin
          cfg(int'(C_ENR), g, g_alpha[g] * ut);
          cfg(int'(C_SET), g, g_lam[g] * ut);
          cfg(int'(C_PRI), g, 100 - g);
        end
        for (int j = 0; j < nj; j++)
          if (j_grp[j] >= 0) begin
            adm++;
            word(mk(1, j_grp[j], j, j_c[j] << 15), 0);
            for (int o = 0; o < j_c[j]; o++) word({8'(j), 8'(o), 16'hA5C3}, 0);
          end
        n_jobs_adm  += adm;
        n_jobs_drop += nj - adm;
        chk(adm > 0, "at least one job admitted");
        cfg(int'(C_HYP), 0, H * ut);
        // first hyper-period: no defects
        run_hp(-1);
        // second hyper-period: every other system stretches one job
        dgrp = -1;
        if ((s + n) % 2 == 0 && adm > 0) begin
          int j;
          do j = $urandom_range(nj - 1); while (j_grp[j] < 0);
          defect_job = j; dgrp = j_grp[j];
          n_defects++;
        end
        run_hp(dgrp);
        n_sys++;
        if (ut > 1) n_full++;
      end
    chk(n_full == NFULL, "full-length hyper-periods run");
    $display("systems=%0d (full length %0d) jobs_admitted=%0d jobs_not_admitted=%0d window_starts=%0d back_to_back=%0d defects=%0d terminations=%0d isolation_checks=%0d",
             n_sys, n_full, n_jobs_adm, n_jobs_drop, n_exact, n_follow, n_defects, n_terms, n_isolated);
    chk(n_exact > 0 && n_follow > 0, "window starts and back-to-back jobs both seen");
    chk(n_terms > 0, "timing defects led to terminations");
    chk(n_isolated > 0, "a window after a defective one was checked");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
