// rota_timer -- count-down timer used twice in every server container
// (B-Timer for the budget, S-Timer for the start offset).
//
// Two registers, as in the paper: the reset value (written through the
// program port) and the current value.  While the reset port is 0 the
// current value is reloaded from the reset value on every clock edge; a
// rising edge on the trigger port decrements it by one, stopping at 0.  The
// status port is 1 while the current value is not 0.
//
// Timing: all updates on the rising clock edge.  The trigger edge is found
// against a registered copy of the trigger input, so one trigger pulse (or
// a level held high) decrements once.  Reset has priority over a trigger
// edge in the same cycle; saturation at 0 and that priority are this
// design's choices.  W = 18 bits is also a choice (the paper gives none).
module rota_timer #(
  parameter int unsigned W = 18
) (
  input  logic         clk,
  input  logic         rst_n,      // system reset
  input  logic         cfg_we,     // program port
  input  logic [W-1:0] cfg_value,
  input  logic         reset_n,    // reset port, active low
  input  logic         trigger,    // trigger port, rising edge
  output logic         status      // current value != 0
);

  logic [W-1:0] reset_value;
  logic [W-1:0] current_value;
  logic         trigger_q;
  logic         trig_edge;

  assign trig_edge = trigger & ~trigger_q;
  assign status    = (current_value != '0);

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      reset_value   <= '0;
      current_value <= '0;
      trigger_q     <= 1'b0;
    end else begin
      trigger_q <= trigger;
      if (cfg_we) reset_value <= cfg_value;
      if (!reset_n)
        current_value <= reset_value;
      else if (trig_edge && status)
        current_value <= current_value - W'(1);
    end
  end

endmodule
