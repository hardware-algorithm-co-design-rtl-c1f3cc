// tb_rota_gse -- global scheduler with 4 ETSs whose windows overlap
// (start, budget, Prio-S): (0,6,9) (4,6,7) (8,8,5) (2,12,7), hyper-period
// 16 ticks.  Each tick HasT? is randomised; Find_Next_Job is raised 3
// cycles after the tick and the SID-SCH loaded one cycle later must be the
// eligible ETS with the largest Prio-S (ties: lower SID), computed here
// from the windows.  Also checks that SID-SCH holds without Find_Next_Job.
module tb_rota_gse;
  import rota_pkg::*;
  localparam int N = 4, HT = 16;
  logic clk = 0, rst_n = 0, hyp_start = 0, tick = 0, find_next_job = 0;
  logic [N-1:0] has_t = '0, budget, expire;
  logic [SID_W-1:0] sid_sch;
  logic sch_valid;
  cfg_t cfg = '0;
  int checks = 0, failures = 0, cyc = 0, ti = -1, picks = 0, idles = 0;
  int A [N] = '{0, 4, 8, 2};
  int L [N] = '{6, 6, 8, 12};
  int PR[N] = '{9, 7, 5, 7};
  bit run = 0;

  always #5 clk = ~clk;
  rota_gse #(.N_ETS(N)) dut (.*);

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

  task automatic cfgw(csub_e s, int sid, int v);
    @(negedge clk); #1;
    cfg = '{valid: 1'b1, sub: s, sid: SID_W'(sid), value: TIME_W'(v)};
    @(negedge clk); #1; cfg = '0;
  endtask

  initial begin
    logic [SID_W-1:0] held;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int k = 0; k < N; k++) begin
      cfgw(C_ENR, k, A[k]); cfgw(C_SET, k, L[k]); cfgw(C_PRI, k, PR[k]);
    end
    run = 1;
    do begin @(negedge clk); #1; end while (!hyp_start);
    for (int it = 0; it < 6 * HT; it++) begin
      int best, bp;
      repeat (2) @(negedge clk); #1;
      has_t = N'($urandom);
      @(negedge clk); #1;   // tick + 3
      best = -1; bp = 0;
      for (int k = 0; k < N; k++) begin
        bit in_win; in_win = ti >= A[k] && ti < A[k] + L[k];
        chk(budget[k] == in_win, $sformatf("budget of ETS %0d at tick %0d", k, ti));
        if (in_win && has_t[k] && PR[k] > bp) begin best = k; bp = PR[k]; end
      end
      held = sid_sch;
      find_next_job = (it % 5) != 4;
      if (!find_next_job) has_t = ~has_t;   // SID-SCH must not follow this
      @(negedge clk); #1;   // tick + 4 = next tick cycle
      if (find_next_job) begin
        chk(sch_valid == (best >= 0), $sformatf("sch_valid at tick %0d", ti));
        if (best >= 0) begin chk(sid_sch == SID_W'(best), $sformatf("SID-SCH %0d expected %0d", sid_sch, best)); picks++; end
        else begin chk(sid_sch == held, "SID-SCH holds when nothing eligible"); idles++; end
      end else begin
        chk(!sch_valid && sid_sch == held, "SID-SCH holds without Find_Next_Job");
      end
      find_next_job = 0;
    end
    chk(picks > 20 && idles > 5, $sformatf("both outcomes exercised (%0d picks, %0d idle)", picks, idles));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
