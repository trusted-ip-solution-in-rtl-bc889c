// key_store: block RAM holding the PUF keys inside the TrustToken controller.
//
// N_KEYS words of KEY_W bits (256 x 256 bits by default): key k is the token
// of ID k. One write port, used once by the controller while it copies keys
// from the Token Generator, and two read ports: port A serves Token
// Authorization, port B serves Key Assign.
//
// Timing: reads are registered, data appears the cycle after the address
// (block-RAM behaviour). A read of the word being written returns the old
// content. The memory itself is not reset; the controller keeps a separate
// flag telling whether the keys have been written. The port arrangement and
// latency are this design's own; storing the keys in block RAM inside the
// controller follows the published design.
module key_store #(
  parameter int unsigned N_KEYS = 256,
  parameter int unsigned KEY_W  = 256,
  localparam int unsigned AW    = $clog2(N_KEYS)
) (
  input  logic             clk,
  input  logic             we,
  input  logic [AW-1:0]    waddr,
  input  logic [KEY_W-1:0] wdata,
  input  logic [AW-1:0]    ra_addr,
  output logic [KEY_W-1:0] ra_data,
  input  logic [AW-1:0]    rb_addr,
  output logic [KEY_W-1:0] rb_data
);
  timeunit 1ns;
  timeprecision 1ps;

  logic [KEY_W-1:0] mem [N_KEYS];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
  end

  always_ff @(posedge clk) begin
    ra_data <= mem[ra_addr];
    rb_data <= mem[rb_addr];
  end

endmodule
