// tb_rota_io_full -- the same end-to-end scenario as tb_rota_io with every
// parameter of the co-processor at its default: 8 ETSs, 8-entry TIBs,
// 4096-word pool, 32-word FIFO and a tick of 1000 clocks (10 us at
// 100 MHz).  Two hyper-periods of 40 ticks are about 80,000 cycles.
module tb_rota_io_full;
  localparam int TD = 1000;
  localparam int START_SLACK = 8;
  `include "rota_io_scenario.svh"
  rota_io dut (.*);
  initial begin
    @(scenario_done);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
