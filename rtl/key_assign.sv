// key_assign: hands out the token belonging to an ID.
//
// In the TrustToken controller the keys made by the PUF are turned into
// per-IP tokens: the token of ID k is stored key k. Key Assign answers a
// provisioning request for an ID by reading that key from port B of the
// key store and returning it as the ID's ar_token. The request port is
// meant for the trusted integrator / runtime, which passes the token to the
// application allowed to use that IP; how tokens travel to software is not
// part of the hardware and is this design's assumption.
//
// A request is refused (rsp_ok low, token zero) while the keys have not
// been generated yet or when the ID has no key (ID >= N_KEYS).
//
// Timing: req_valid in cycle t gives rsp_valid in cycle t+2 (one cycle for
// the key-store read, one for the registered answer). One request may be
// issued per cycle; answers come back in order.
module key_assign #(
  parameter int unsigned N_KEYS = 256,
  parameter int unsigned ID_W   = 8,
  parameter int unsigned KEY_W  = 256,
  localparam int unsigned AW    = $clog2(N_KEYS)
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             keys_ready,
  input  logic             req_valid,
  input  logic [ID_W-1:0]  req_id,
  output logic             rsp_valid,
  output logic             rsp_ok,
  output logic [KEY_W-1:0] rsp_token,
  // key-store read port B
  output logic [AW-1:0]    rd_addr,
  input  logic [KEY_W-1:0] rd_data
);
  timeunit 1ns;
  timeprecision 1ps;

  logic pend, pend_ok;

  assign rd_addr = req_id[AW-1:0];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      pend      <= 1'b0;
      pend_ok   <= 1'b0;
      rsp_valid <= 1'b0;
      rsp_ok    <= 1'b0;
      rsp_token <= '0;
    end else begin
      pend      <= req_valid;
      pend_ok   <= keys_ready && (32'(req_id) < N_KEYS);
      rsp_valid <= pend;
      rsp_ok    <= pend && pend_ok;
      rsp_token <= (pend && pend_ok) ? rd_data : '0;
    end
  end

endmodule
