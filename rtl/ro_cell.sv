// ro_cell: behavioural model of one enable-gated ring oscillator.
//
// This is a behavioural model, not synthesizable logic. On the FPGA the
// oscillator is an enable gate whose output runs through a chain of
// inverting stages back to its own input; its frequency depends on the
// delays of the placed stages and so on process variation. The model keeps
// that structure but lumps the gate and all stages into one delayed
// assignment, osc = enable & ~osc after HALF_PERIOD_PS picoseconds, so the
// output toggles every half-period while enable is high. The combinational
// loop is intended: it is the oscillator; a synthesis tool that ignores the
// delay sees the loop an FPGA implementation would build from placed LUTs. Each instance gets its
// own HALF_PERIOD_PS from the Token Generator: that is how the model stands
// in for manufacturing variation between oscillators and between devices.
//
// Interface: enable (input) starts the loop; osc (output) is the last stage.
// Timing: the first rising edge of osc comes one half-period after enable
// rises. When enable falls, osc returns to 0 within one half-period and
// stays there, as the real loop does once the enable gate forces its input.
// No jitter is modelled.
module ro_cell #(
  parameter int unsigned HALF_PERIOD_PS = 1000
) (
  input  logic enable,
  output logic osc
);
  timeunit 1ns;
  timeprecision 1ps;

  // Enable gate and inverting loop, lumped into one stage with the loop
  // delay: the output is the inverted feedback while enabled, 0 otherwise.
  assign #(HALF_PERIOD_PS * 1ps) osc = enable & ~osc;

endmodule
