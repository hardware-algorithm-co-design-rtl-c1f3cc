// tb_rota_io -- end-to-end test of the co-processor with a short tick
// (8 clocks) so that several hyper-periods simulate quickly; all other
// parameters are the defaults.  The scenario is in rota_io_scenario.svh:
// configuration, pre-loaded and immediate tasks, priority order within and
// across ETSs, window timing, termination of an overrunning task,
// privilege check and TIB overflow.
module tb_rota_io;
  localparam int TD = 8;
  localparam int START_SLACK = 8;
  `include "rota_io_scenario.svh"
  rota_io #(.TICK_DIV(TD)) dut (.*);
  initial begin
    @(scenario_done);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
