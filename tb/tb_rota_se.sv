// tb_rota_se -- scheduling engine with 2 ETSs and 4-entry TIBs.  ETS 0
// owns ticks [0,6) with Prio-S 9, ETS 1 ticks [4,12) with Prio-S 5, in a
// 16-tick hyper-period.  The testbench plays the I/O pool: it raises
// Find_Next_Job whenever it is idle and stays busy 6 cycles per job.
// Checks: the order of dispatched jobs (ETS priority first, then Prio-T),
// that every job carries its task's P-Len and lies in its ETS's window,
// the two-cycle decision latency, that a task released outside its window
// waits for the next one, and that a task still pending when its ETS's
// budget expires is dropped.
module tb_rota_se;
  import rota_pkg::*;
  localparam int N = 2, HT = 16;
  logic clk = 0, rst_n = 0, hyp_start = 0, tick = 0, find_next_job = 0, tib_overflow;
  logic [N-1:0] budget, expire;
  cfg_t cfg = '0; tpara_t tpara = '0; job_t job;
  int checks = 0, failures = 0, cyc = 0, ti = -1;
  bit run = 0, pool_on = 0;
  int busy = 0, fnj_cyc = -10;
  job_t seen [$]; int seen_ti [$];

  always #5 clk = ~clk;
  rota_se #(.N_ETS(N), .TIB_DEPTH(4)) dut (.*);

  task automatic chk(bit c, string m);
    checks++;
    if (!c) begin failures++; $display("FAIL t=%0t %s", $time, m); end
  endtask

  initial begin
    repeat (50000) @(posedge clk);
    failures++; $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(negedge clk) if (run) begin
    cyc++;
    tick = (cyc % 4 == 0);
    if (tick) ti = (ti + 1) % HT;
    hyp_start = tick && ti == 0;
  end

  // pool model
  always @(negedge clk) begin
    #2;
    if (job.valid) begin
      seen.push_back(job); seen_ti.push_back(ti);
      chk(cyc - fnj_cyc == 1, $sformatf("job one cycle after Find_Next_Job (%0d)", cyc - fnj_cyc));
      chk(budget[job.sid], "job issued while its ETS has budget");
      busy = 6;
    end
    if (busy > 0) busy--;
    find_next_job = pool_on && busy == 0 && !find_next_job && !job.valid;
    if (find_next_job) fnj_cyc = cyc;
  end

  task automatic cfgw(csub_e s, int sid, int v);
    @(negedge clk); #1;
    cfg = '{valid: 1'b1, sub: s, sid: SID_W'(sid), value: TIME_W'(v)};
    @(negedge clk); #1; cfg = '0;
  endtask
  task automatic tp(tpkind_e k, int sid, int tid, int plen, int prio);
    @(negedge clk); #1;
    tpara = '{valid: 1'b1, kind: k, sid: SID_W'(sid), tid: TID_W'(tid), plen: PLEN_W'(plen), prio: PRIO_W'(prio)};
    @(negedge clk); #1; tpara = '0;
  endtask
  task automatic wait_tick(int t);
    do begin @(negedge clk); #1; end while (!(tick && ti == t));
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    cfgw(C_ENR, 0, 0); cfgw(C_SET, 0, 6); cfgw(C_PRI, 0, 9);
    cfgw(C_ENR, 1, 4); cfgw(C_SET, 1, 8); cfgw(C_PRI, 1, 5);
    tp(TP_ILD, 1, 5, 9, 1);
    tp(TP_ILD, 0, 1, 4, 3);
    tp(TP_ILD, 0, 2, 2, 7);
    tp(TP_PLD, 1, 6, 3, 0);
    run = 1; pool_on = 1;
    wait_tick(HT - 1);
    // expected: ETS 0 jobs TID 2 then TID 1 (ticks 0..5), then ETS 1 TID 5
    chk(seen.size() == 3, $sformatf("3 jobs in the first hyper-period (%0d)", seen.size()));
    if (seen.size() == 3) begin
      chk(seen[0].sid == 0 && seen[0].tid == 2 && seen[0].plen == 2, "1st: ETS0 TID2 (Prio-T 7)");
      chk(seen[1].sid == 0 && seen[1].tid == 1 && seen[1].plen == 4, "2nd: ETS0 TID1 (Prio-T 3)");
      chk(seen[2].sid == 1 && seen[2].tid == 5 && seen[2].plen == 9, "3rd: ETS1 TID5");
      chk(seen_ti[0] == 0 && seen_ti[2] >= 4 && seen_ti[2] < 12, "jobs inside their windows");
    end
    // release TID 1 of ETS 0 outside its window: must wait for tick 0
    seen.delete(); seen_ti.delete();
    tp(TP_IRUN, 0, 1, 0, 4);
    repeat (2) @(negedge clk);
    chk(seen.size() == 0 && ti == HT - 1, "no job outside every window");
    wait_tick(2);
    chk(seen.size() == 1 && seen[0].tid == 1 && seen_ti[0] == 0, "released task runs at the next window start");
    // ETS 1 task released while the pool is held busy: dropped at budget expiry
    pool_on = 0;
    wait_tick(6);
    tp(TP_IRUN, 1, 6, 0, 2);
    wait_tick(13);
    chk(dut.has_t[1] == 0, "expired ETS drops its pending task");
    pool_on = 1; seen.delete();
    wait_tick(HT - 1);
    chk(seen.size() == 0, "dropped task is not run in the next hyper-period");
    chk(!tib_overflow, "no overflow");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
