// tb_rota_io_pipe -- the end-to-end scenario of tb_rota_io run with the
// optional pipeline stage in every comparator tree (SCH_PIPE = 1): the same
// jobs, order, windows, terminations and status events must result, the
// decisions only being taken a few cycles later.  Tick of 8 clocks.
module tb_rota_io_pipe;
  localparam int TD = 8;
  localparam int START_SLACK = 12;  // four cycles more for the pipeline to settle
  `include "rota_io_scenario.svh"
  rota_io #(.TICK_DIV(TD), .SCH_PIPE(1'b1)) dut (.*);
  initial begin
    @(scenario_done);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
