// apb_decoder: APB interconnect between the host and the TrustWrappers.
//
// Routes each host access to one of N_IP wrappers by address: wrapper i
// owns the 2**SLOT_LSB-byte window starting at i << SLOT_LSB (4 KiB windows
// by default). PSEL goes only to the addressed wrapper; every other signal,
// including the TrustToken fields, is passed to all of them, and the
// addressed wrapper's response is returned. An address above the last
// window is answered by the decoder itself with PSLVERR in the access
// phase, without wait states. The address map is this design's choice; the
// published design only states that standard AMBA APB carries the accesses.
// The decoder is combinational: it adds no cycle.
module apb_decoder
  import trusttoken_pkg::*;
#(
  parameter int unsigned N_IP     = 4,
  parameter int unsigned SLOT_LSB = 12
) (
  input  apb_req_t             s_req,
  output apb_rsp_t             s_rsp,
  output apb_req_t [N_IP-1:0]  m_req,
  input  apb_rsp_t [N_IP-1:0]  m_rsp
);
  timeunit 1ns;
  timeprecision 1ps;

  localparam int unsigned SW = (N_IP > 1) ? $clog2(N_IP) : 1;

  logic [ADDR_W-1:0] slot;
  assign slot = s_req.paddr >> SLOT_LSB;

  always_comb begin
    for (int unsigned i = 0; i < N_IP; i++) begin
      m_req[i]      = s_req;
      m_req[i].psel = s_req.psel && (slot == ADDR_W'(i));
    end
    if (slot < ADDR_W'(N_IP)) begin
      s_rsp = m_rsp[slot[SW-1:0]];
    end else begin
      s_rsp.pready  = 1'b1;
      s_rsp.prdata  = '0;
      s_rsp.pslverr = s_req.psel && s_req.penable;
    end
  end

endmodule
