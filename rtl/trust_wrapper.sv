// trust_wrapper: TrustWrapper placed around one untrusted IP core.
//
// The host reaches the IP over APB3 extended with the three TrustToken
// fields: ar_id (8 bits), ar_integrity (1 bit) and ar_token (256 bits). The
// wrapper keeps the IP's integrity level in a register whose reset value,
// INTEGRITY, is set by the IP integrator.
//   - Integrity LOW and the access asks for LOW: isolation is off, the
//     access goes straight to the IP (non-secured interface).
//   - Otherwise (secured interface): the wrapper holds the access (PREADY
//     low), sends ar_id and ar_token to Token Authorization in the
//     controller and waits for the answer.
//       granted: the integrity register takes the access's ar_integrity
//                (so changing the level needs a valid token), and the access
//                is forwarded to the IP;
//       refused: the access ends with PSLVERR=1 and PRDATA=0, the IP never
//                sees it and violation pulses for one cycle.
// The IP's read data can reach the bus only through a forwarded access.
// Carrying the ID and token as added bus signals, the integrity semantics
// (LOW disables isolation, HIGH enforces it) and per-access authorization
// follow the published design; the APB timing, the error response and the
// exact rule for changing integrity are this design's choices.
//
// Timing (access phase, IP with zero wait states): non-secured 4 cycles,
// secured 8 cycles when Token Authorization is idle (1 to issue, 3 to
// decide, 1 to hand over, then the IP setup and access phases and the
// registered response).
module trust_wrapper
  import trusttoken_pkg::*;
#(
  parameter bit INTEGRITY = 1'b1
) (
  input  logic      clk,
  input  logic      rst_n,
  // host side: APB with TrustToken fields
  input  apb_req_t  s_req,
  output apb_rsp_t  s_rsp,
  // IP side: plain APB
  output ip_req_t   m_req,
  input  apb_rsp_t  m_rsp,
  // Token Authorization
  output auth_req_t auth_req,
  input  auth_rsp_t auth_rsp,
  // status
  output logic      integrity,
  output logic      violation
);
  timeunit 1ns;
  timeprecision 1ps;

  typedef enum logic [2:0] {W_IDLE, W_AUTH, W_SETUP, W_ACCESS, W_RESP} wstate_t;

  wstate_t           state;
  logic              integ_q;
  logic              pwrite_q, want_integ_q, err_q;
  logic [ADDR_W-1:0] paddr_q;
  logic [DATA_W-1:0] pwdata_q, rdata_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state        <= W_IDLE;
      integ_q      <= INTEGRITY;
      pwrite_q     <= 1'b0;
      want_integ_q <= 1'b0;
      paddr_q      <= '0;
      pwdata_q     <= '0;
      rdata_q      <= '0;
      err_q        <= 1'b0;
      auth_req     <= '0;
      violation    <= 1'b0;
    end else begin
      violation <= 1'b0;
      unique case (state)
        W_IDLE: if (s_req.psel && s_req.penable) begin
          paddr_q      <= s_req.paddr;
          pwrite_q     <= s_req.pwrite;
          pwdata_q     <= s_req.pwdata;
          want_integ_q <= s_req.sec.ar_integrity;
          if (integ_q || s_req.sec.ar_integrity) begin
            auth_req.valid <= 1'b1;
            auth_req.id    <= s_req.sec.ar_id;
            auth_req.token <= s_req.sec.ar_token;
            state          <= W_AUTH;
          end else begin
            state <= W_SETUP;
          end
        end
        W_AUTH: if (auth_rsp.done) begin
          auth_req <= '0;
          if (auth_rsp.grant) begin
            integ_q <= want_integ_q;
            state   <= W_SETUP;
          end else begin
            rdata_q   <= '0;
            err_q     <= 1'b1;
            violation <= 1'b1;
            state     <= W_RESP;
          end
        end
        W_SETUP: state <= W_ACCESS;
        W_ACCESS: if (m_rsp.pready) begin
          rdata_q <= pwrite_q ? '0 : m_rsp.prdata;
          err_q   <= m_rsp.pslverr;
          state   <= W_RESP;
        end
        W_RESP: begin
          rdata_q <= '0;
          err_q   <= 1'b0;
          state   <= W_IDLE;
        end
        default: state <= W_IDLE;
      endcase
    end
  end

  always_comb begin
    m_req.psel    = (state == W_SETUP) || (state == W_ACCESS);
    m_req.penable = (state == W_ACCESS);
    m_req.pwrite  = pwrite_q;
    m_req.paddr   = paddr_q;
    m_req.pwdata  = pwdata_q;
  end

  assign s_rsp.pready  = (state == W_RESP);
  assign s_rsp.prdata  = rdata_q;
  assign s_rsp.pslverr = err_q;
  assign integrity     = integ_q;

  // APB rule for the host: once in the access phase, the transfer is held
  // unchanged until PREADY.
  a_apb_hold: assert property (@(posedge clk) disable iff (!rst_n)
      (s_req.psel && s_req.penable && !s_rsp.pready) |=>
        (s_req.psel && s_req.penable && $stable(s_req.paddr) && $stable(s_req.pwrite)))
    else $error("APB master changed a transfer before PREADY");

  // Authorization handshake: a request is held until its answer.
  a_auth_hold: assert property (@(posedge clk) disable iff (!rst_n)
      (auth_req.valid && !auth_rsp.done) |=> auth_req.valid)
    else $error("authorization request dropped before its answer");

endmodule
