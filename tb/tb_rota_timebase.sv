// tb_rota_timebase -- checks the tick period, the hyper-period length in
// ticks, restart on a new c.hyp and stopping with length 0.
module tb_rota_timebase;
  import rota_pkg::*;
  localparam int DIV = 5;
  logic clk = 0, rst_n = 0, tick, hyp_start;
  cfg_t cfg = '0;
  int checks = 0, failures = 0;
  int cyc = 0, last_tick = -1, ticks = 0, last_hyp_tick = -1, hyps = 0;
  int hyp_len_exp = 0;
  bit tick_period_ok = 1;

  always #5 clk = ~clk;
  rota_timebase #(.TICK_DIV(DIV)) dut (.*);

  task automatic chk(bit c, string m);
    checks++;
    if (!c) begin failures++; $display("FAIL t=%0t %s", $time, m); end
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++; $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(negedge clk) if (rst_n) begin
    cyc++;
    if (hyp_start) chk(tick, "hyp_start coincides with a tick");
    if (tick) begin
      if (last_tick >= 0) chk(cyc - last_tick == DIV, "tick period");
      last_tick = cyc; ticks++;
      if (hyp_start) begin
        if (last_hyp_tick >= 0 && hyp_len_exp > 0) chk(ticks - last_hyp_tick == hyp_len_exp, $sformatf("hyper-period %0d ticks", ticks - last_hyp_tick));
        last_hyp_tick = ticks; hyps++;
      end
    end
  end

  task automatic set_hyp(int len);
    @(negedge clk);
    cfg = '{valid: 1'b1, sub: C_HYP, sid: '0, value: TIME_W'(len)};
    @(negedge clk);
    cfg = '0;
    hyp_len_exp = len; last_hyp_tick = -1;
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    repeat (40) @(negedge clk);
    chk(hyps == 0, "no hyper-period while length is 0");
    set_hyp(7);
    repeat (DIV*7*4 + 10) @(negedge clk);
    chk(hyps >= 4, "hyper-periods of 7 ticks seen");
    hyps = 0;
    set_hyp(3);
    repeat (DIV*2) @(negedge clk);
    chk(hyps == 1, "restart at the first tick after c.hyp");
    repeat (DIV*3*5) @(negedge clk);
    chk(hyps >= 5, "hyper-periods of 3 ticks seen");
    set_hyp(0); hyps = 0;
    repeat (DIV*10) @(negedge clk);
    chk(hyps == 0, "length 0 stops");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
