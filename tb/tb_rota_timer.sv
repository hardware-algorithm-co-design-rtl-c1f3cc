// tb_rota_timer -- self-checking test of the count-down timer.
// Random program/reset/trigger stimulus against a cycle-level reference of
// the timer's rules (reload while reset port is 0, decrement on a rising
// trigger edge, stop at 0); the status port is compared every cycle, and a
// directed part checks that a trigger held high decrements only once.
module tb_rota_timer;
  localparam int W = 6;
  logic clk = 0, rst_n = 0;
  logic cfg_we = 0, reset_n = 1, trigger = 0, status;
  logic [W-1:0] cfg_value = '0;
  int checks = 0, failures = 0;
  // reference
  int rv, cv; bit tq;

  always #5 clk = ~clk;

  rota_timer #(.W(W)) dut (.*);

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

  // reference model updated on the same edge
  always @(posedge clk) begin
    if (!rst_n) begin rv = 0; cv = 0; tq = 0; end
    else begin
      int nrv; nrv = cfg_we ? int'(cfg_value) : rv;
      if (!reset_n) cv = rv;
      else if (trigger && !tq && cv > 0) cv = cv - 1;
      rv = nrv; tq = trigger;
    end
  end

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    // directed: load 3, hold trigger high for 5 cycles -> one decrement
    cfg_we = 1; cfg_value = 3; @(negedge clk); cfg_we = 0;
    reset_n = 0; @(negedge clk); reset_n = 1;
    chk(status == 1 && dut.current_value == 3, "load 3");
    trigger = 1; repeat (5) @(negedge clk); trigger = 0; @(negedge clk);
    chk(dut.current_value == 2, "held trigger decrements once");
    repeat (2) begin trigger = 1; @(negedge clk); trigger = 0; @(negedge clk); end
    chk(status == 0, "reaches 0 after 3 edges");
    trigger = 1; @(negedge clk); trigger = 0; @(negedge clk);
    chk(status == 0 && dut.current_value == 0, "stays at 0");
    // random
    for (int i = 0; i < 5000; i++) begin
      cfg_we    = ($urandom % 16) == 0;
      cfg_value = W'($urandom);
      reset_n   = ($urandom % 24) != 0;
      trigger   = ($urandom % 3) == 0;
      @(negedge clk);
      chk(status == (cv != 0), $sformatf("status vs model cv=%0d", cv));
      chk(int'(dut.current_value) == cv, "current value vs model");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
