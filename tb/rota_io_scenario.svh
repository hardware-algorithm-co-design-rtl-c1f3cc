// rota_io_scenario.svh -- end-to-end scenario shared by tb_rota_io (short
// tick), tb_rota_io_pipe (short tick, pipelined comparator trees) and
// tb_rota_io_full (default parameters).  The including module
// declares localparam TD (clocks per tick, equal to the DUT's TICK_DIV) and
// START_SLACK (cycles allowed from a window opening to its first operation)
// and instantiates the DUT as "dut" on the signals declared here.  When
// the scenario is over it triggers scenario_done; the including module
// then prints the result line and ends the simulation.
//
// The testbench plays the cores (it sends instruction words) and the
// protocol translator/device (it pops one operation at a time and is busy
// for the operation's low byte times TD/4 cycles, so that task lengths in
// ticks are the same whatever the tick length).
// Operation word: {TID[7:0], order[7:0], 8'h5A, duration[7:0]}.
//
// Hyper-period 40 ticks.  ETS (start, budget, Prio-S):
//   ETS0 (2, 6, 30)   task A = TID 1, 4 ops, pre-loaded, released by i.run
//   ETS1 (10, 10, 20) task B = TID 2 (i.ld, Prio-T 9), task C = TID 3
//                     (p.ld + i.run, Prio-T 4)
//   ETS2 (18, 8, 10)  task E = TID 4 (i.ld); its window overlaps ETS1's
//   ETS3 (30, 4, 5)   task D = TID 5, 31 slow ops: cannot finish in its
//                     budget (timing defect) and is terminated
//   ETS7              nine zero-length loads overflow its 8-entry TIB
// A user-mode c.set is rejected.  In the second hyper-period A, C and D
// are released again.  (With the default 32-word FIFO and at most 31
// operations per task the loader never waits for FIFO room here; that
// back-pressure is covered by the loader's own testbench.)
import rota_pkg::*;

logic clk = 0, rst_n = 0;
logic in_valid = 0, in_priv = 0;
logic [WORD_W-1:0] in_data = '0;
logic op_valid, op_ready, io_idle;
logic [WORD_W-1:0] op_data;
job_t job;
logic [7:0] ets_budget;
logic hyp_start, terminated, priv_err, tib_overflow;

int checks = 0, failures = 0;
event scenario_done;   // the including module reports and finishes on this
always #5 clk = ~clk;

task automatic chk(bit c, string m);
  checks++;
  if (!c) begin failures++; $display("FAIL t=%0t %s", $time, m); end
endtask

localparam int HT = 40;
localparam int DSCALE = (TD >= 8) ? TD / 4 : 2;
localparam int WATCHDOG = (4 * HT + 20) * TD + 20000;
initial begin
  repeat (WATCHDOG) @(posedge clk);
  failures++; $display("FAIL watchdog");
  $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
  $finish;
end

// ---------------- time reference: cycle count and tick index -------------
int cyc = 0, hyp_cnt = 0, hyp_cyc = 0;
always @(posedge clk) begin
  cyc <= cyc + 1;
  if (hyp_start) begin hyp_cnt <= hyp_cnt + 1; hyp_cyc <= cyc; end
end
function automatic int tick_now();   // ticks since the last hyper-period start
  return (cyc - hyp_cyc) / TD;
endfunction

// ---------------- device model (protocol translator stand-in) ------------
int busy = 0;
int nops [32];           // operations executed per TID, this release
int first_cyc [32];      // cycle of the first operation of a release
int ops_total = 0;
logic [WORD_W-1:0] expect_op [32][32];
assign io_idle  = (busy == 0);
assign op_ready = (busy == 0);
always @(posedge clk) begin
  if (busy > 0) busy <= busy - 1;
  if (op_valid && op_ready && rst_n) begin
    int t, o;
    t = int'(op_data[31:24]); o = int'(op_data[23:16]);
    checks++;
    if (t >= 32 || op_data != expect_op[t][o] || o != nops[t]) begin
      failures++; $display("FAIL t=%0t bad operation %h (TID %0d op %0d, expected op %0d)", $time, op_data, t, o, nops[t]);
    end
    if (t < 32) begin
      if (nops[t] == 0) first_cyc[t] = cyc;
      nops[t] = nops[t] + 1;
    end
    ops_total++;
    busy <= int'(op_data[7:0]) * DSCALE;
  end
end

// ---------------- event counters (one per mechanism) ---------------------
int n_jobs = 0, n_term = 0, n_priv = 0, n_ovf = 0, n_overlap = 0, n_hyp = 0;
int job_tick [$]; job_t jobs [$];
always @(posedge clk) if (rst_n) begin
  if (job.valid) begin n_jobs++; jobs.push_back(job); job_tick.push_back(tick_now()); end
  if (terminated) n_term++;
  if (priv_err) n_priv++;
  if (tib_overflow) n_ovf++;
  if (hyp_start) n_hyp++;
  if (ets_budget[1] && ets_budget[2] && !io_idle) n_overlap++;
end

// ---------------- instruction helpers -------------------------------------
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
task automatic load(bit imm, int sid, int tid, int n, int prio, int dur);
  word(mk(imm ? 2 : 1, sid, tid, (n << 15) | (prio << 7)), 0);
  for (int o = 0; o < n; o++) begin
    expect_op[tid][o] = {8'(tid), 8'(o), 8'h5A, 8'(dur)};
    word(expect_op[tid][o], 0);
  end
endtask
task automatic irun(int tid, int prio);
  word(mk(3, 0, tid, prio << 7), 0);
endtask
task automatic wait_tick(int t);   // wait for tick t of the current/next hyper-period
  do @(negedge clk); while (!(tick_now() == t && (cyc - hyp_cyc) % TD == 1));
endtask

// ---------------- the scenario -------------------------------------------
initial begin
  int hyp0;
  foreach (nops[i]) begin nops[i] = 0; first_cyc[i] = -1; end
  repeat (4) @(negedge clk);
  rst_n = 1;
  // ETS configuration (kernel mode)
  cfg(0, 0, 6);  cfg(1, 0, 2);  cfg(2, 0, 30);
  cfg(0, 1, 10); cfg(1, 1, 10); cfg(2, 1, 20);
  cfg(0, 2, 8);  cfg(1, 2, 18); cfg(2, 2, 10);
  cfg(0, 3, 4);  cfg(1, 3, 30); cfg(2, 3, 5);
  cfg(0, 7, 3);  cfg(1, 7, 36); cfg(2, 7, 1);
  word(mk(0, 1, 0, 55), 0);            // user-mode c.set: rejected
  // tasks
  load(0, 0, 1, 4, 0, 2);              // A, pre-loaded
  load(1, 1, 2, 3, 9, 3);              // B, immediate
  load(0, 1, 3, 5, 0, 2);              // C, pre-loaded
  load(1, 2, 4, 2, 6, 2);              // E, immediate
  load(1, 3, 5, 31, 1, 4);             // D, 31 ops x 1 tick: overruns
  for (int t = 20; t < 29; t++) load(0, 7, t, 0, 0, 0);   // 9th overflows
  irun(1, 1);
  irun(3, 4);
  chk(n_priv == 1, "user-mode c.set rejected");
  chk(n_ovf == 1, "ninth task overflows an 8-entry TIB");
  chk(n_jobs == 0, "nothing runs before the hyper-period is started");
  // start the hyper-period
  cfg(3, 0, HT);
  @(posedge hyp_start); hyp0 = cyc;
  wait_tick(HT - 1);
  // ---- first hyper-period results ----
  chk(nops[1] == 4 && nops[2] == 3 && nops[3] == 5 && nops[4] == 2, "A, B, C, E complete");
  chk(nops[5] > 0 && nops[5] < 31, $sformatf("D cut short by its budget (%0d of 31 ops)", nops[5]));
  chk(n_term == 1, "one termination");
  // A is the only task of ETS0: its first operation follows its start time
  // by a fixed small delay (timer reload + decision + pool latency)
  chk(first_cyc[1] - hyp0 >= 2 * TD && first_cyc[1] - hyp0 <= 2 * TD + START_SLACK,
      $sformatf("A starts %0d cycles after tick 2 of the hyper-period", first_cyc[1] - hyp0 - 2 * TD));
  // order: A (ETS0), B (Prio-T 9) before C (Prio-T 4) in ETS1, E in ETS2, D
  chk(jobs.size() == 5, $sformatf("5 jobs (%0d)", jobs.size()));
  if (jobs.size() == 5) begin
    chk(jobs[0].tid == 1 && jobs[1].tid == 2 && jobs[2].tid == 3 && jobs[3].tid == 4 && jobs[4].tid == 5, "job order A B C E D");
    chk(job_tick[0] >= 2 && job_tick[0] < 8,  "A in ETS0's window");
    chk(job_tick[1] >= 10 && job_tick[2] < 20, "B, C in ETS1's window");
    chk(job_tick[3] >= 18 && job_tick[3] < 26, "E in ETS2's window");
    chk(job_tick[4] >= 30 && job_tick[4] < 34, "D in ETS3's window");
  end
  // ---- second hyper-period: re-release A, C and D ----
  foreach (nops[i]) nops[i] = 0;
  irun(1, 2); irun(3, 4); irun(5, 1);
  wait_tick(0);
  wait_tick(HT - 1);
  chk(nops[1] == 4 && nops[3] == 5, "A and C run again after i.run");
  chk(nops[2] == 0 && nops[4] == 0, "B and E (not released again) do not run");
  chk(nops[5] > 0 && nops[5] < 31 && n_term == 2, "D terminated again");
  // ---- mechanism coverage ----
  chk(n_jobs == 8, $sformatf("8 jobs dispatched (%0d)", n_jobs));
  chk(n_hyp >= 2, "hyper-period repeats");
  chk(n_term > 0 && n_priv > 0 && n_ovf > 0, "termination, privilege reject and TIB overflow all seen");
  chk(n_overlap > 0, "ETS1 and ETS2 windows overlapped while busy");
  $display("mechanisms: jobs=%0d terminations=%0d priv_rejects=%0d tib_overflows=%0d overlap_cycles=%0d hyper_periods=%0d ops=%0d",
           n_jobs, n_term, n_priv, n_ovf, n_overlap, n_hyp, ops_total);
  -> scenario_done;
end
