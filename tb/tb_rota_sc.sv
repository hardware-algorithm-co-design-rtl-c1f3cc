// tb_rota_sc -- server container with SID 3.  A tick every 4 cycles and a
// hyper-period of 16 ticks are generated here.  For several (start,
// budget) settings, including start 0, the B-Timer status must be 1
// exactly in ticks [start, start+budget) of every hyper-period (sampled
// 3 cycles after each tick), expire must pulse once per window, and the
// request must be {1, 3, Prio-S} only with budget, HasT? and Prio-S != 0.
module tb_rota_sc;
  import rota_pkg::*;
  localparam int HT = 16;
  logic clk = 0, rst_n = 0, hyp_start = 0, tick = 0, has_t = 0, budget, expire;
  cfg_t cfg = '0;
  sreq_t req;
  int checks = 0, failures = 0;
  int cyc = 0, ti = -1, expires = 0;
  int alpha = 0, lambda = 0;

  always #5 clk = ~clk;
  rota_sc #(.SID(3)) dut (.*);

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

  // time base: tick in cycles 0 mod 4, hyper-period start every HT ticks
  bit run = 0;
  always @(negedge clk) begin
    if (run) begin
      cyc++;
      tick = (cyc % 4 == 0);
      if (tick) ti = (ti + 1) % HT;
      hyp_start = tick && ti == 0;
    end
  end
  always @(posedge clk) if (expire) expires++;

  task automatic cfgw(csub_e s, int sid, int v);
    @(negedge clk); #1;
    cfg = '{valid: 1'b1, sub: s, sid: SID_W'(sid), value: TIME_W'(v)};
    @(negedge clk); #1; cfg = '0;
  endtask

  // observe two hyper-periods; check at 3 cycles after every tick
  task automatic observe(int prio);
    int e0; int nw;
    // align: wait for a hyper-period start
    do begin @(negedge clk); #1; end while (!hyp_start);
    e0 = expires; nw = 0;
    repeat (2 * HT) begin
      bit exp_b;
      repeat (3) @(negedge clk); #1;
      exp_b = (ti >= alpha) && (ti < alpha + lambda);
      chk(budget == exp_b, $sformatf("budget at tick %0d (start %0d budget %0d)", ti, alpha, lambda));
      has_t = $urandom % 2; #1;
      chk(req.valid == (exp_b && has_t && prio != 0), "request valid");
      if (req.valid) chk(req.sid == 3 && req.prio == PRIO_W'(prio), "request {SID, Prio-S}");
      else chk(req == '0, "request is 0");
      if (ti == HT - 1) nw++;
      @(negedge clk);
    end
    chk(expires - e0 == ((lambda > 0) ? 2 : 0) || (alpha + lambda >= HT), $sformatf("one expire per window (%0d)", expires - e0));
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    cfgw(C_PRI, 3, 5);
    cfgw(C_ENR, 3, 4);  alpha = 4;
    cfgw(C_SET, 3, 3);  lambda = 3;
    cfgw(C_SET, 2, 9);   // another ETS: ignored
    run = 1;
    // the first hyper-period after configuration
    observe(5);
    cfgw(C_ENR, 3, 0);  alpha = 0;
    cfgw(C_SET, 3, 5);  lambda = 5;
    observe(5);
    cfgw(C_ENR, 3, 10); alpha = 10;
    cfgw(C_SET, 3, 6);  lambda = 6;
    cfgw(C_PRI, 3, 0);
    observe(0);
    cfgw(C_PRI, 3, 200);
    cfgw(C_SET, 3, 0);  lambda = 0;
    observe(200);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
