// ro_counter: edge counter clocked by a ring oscillator.
//
// One of the two "Counter" blocks of the Token Generator. It counts rising
// edges of the oscillator selected by its MUX while the measurement window
// is open. The counter runs in the oscillator's own clock domain; clr is an
// asynchronous clear driven from the system clock domain.
//
// Timing / clock crossing (this design's choice): the system-domain
// controller asserts clr only while all oscillators are stopped, opens the
// window by enabling the two selected oscillators, closes it by disabling
// them and waits a few system cycles before it reads count. The count is
// therefore static whenever it is read and needs no synchronizer.
// The counter saturates at its maximum instead of wrapping, so a very fast
// oscillator can never compare as slower than it is.
module ro_counter #(
  parameter int unsigned CNT_W = 16
) (
  input  logic             ro_clk,
  input  logic             clr,
  output logic [CNT_W-1:0] count
);
  timeunit 1ns;
  timeprecision 1ps;

  always_ff @(posedge ro_clk or posedge clr) begin
    if (clr)             count <= '0;
    else if (~&count)    count <= count + 1'b1;
  end

endmodule
