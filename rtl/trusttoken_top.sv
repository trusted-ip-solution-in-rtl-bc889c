// trusttoken_top: TrustToken system for a multi-tenant FPGA.
//
// Third-party IP cores on a shared FPGA are reached by tenant software over
// APB. Each IP sits inside a TrustWrapper; every access must carry the IP's
// ID and a 256-bit token, and the central controller checks the pair
// against keys that a ring-oscillator PUF generated on the chip at start-up,
// so no key is kept in non-volatile memory.
//
//   token_generator  512-oscillator PUF, 2-byte challenge -> 256-bit key
//   trust_controller fills a 256 x 256-bit key store from the PUF, hands out
//                    tokens (Key Assign) and authorizes accesses (Token
//                    Authorization)
//   apb_decoder      routes host accesses to the wrappers by address
//   trust_wrapper    N_IP wrappers, one per untrusted IP
//
// The untrusted IP cores and the host processor are not part of this
// design: the IP-side APB ports (ip_req/ip_rsp) and the host APB port
// (host_req/host_rsp) are top-level ports. Four wrappers with integrity
// HIGH match the published evaluation (AES, DES, TRNG and RSA cores); the
// IDs 1..4 given to them are this design's choice.
//
// Timing: after reset, keys_ready rises once all keys are generated,
// N_KEYS * (KEY_W * (WINDOW + 6) + 3) cycles or so; secured accesses made
// before that are refused. Access and token-request latencies are those of
// trust_wrapper and key_assign.
module trusttoken_top
  import trusttoken_pkg::*;
#(
  parameter int unsigned N_IP        = 4,
  parameter int unsigned N_RO        = PUF_N_RO,
  parameter int unsigned N_KEYS      = PUF_N_KEYS,
  parameter int unsigned WINDOW      = 16,
  parameter logic [31:0] DEVICE_SEED = 32'h1234_5678,
  parameter logic [N_IP-1:0][ID_W-1:0] IP_IDS = {8'd4, 8'd3, 8'd2, 8'd1},
  parameter logic [N_IP-1:0] INTEGRITY = '1
) (
  input  logic                clk,
  input  logic                rst_n,
  // host APB with TrustToken fields
  input  apb_req_t            host_req,
  output apb_rsp_t            host_rsp,
  // untrusted IP cores
  output ip_req_t [N_IP-1:0]  ip_req,
  input  apb_rsp_t [N_IP-1:0] ip_rsp,
  // token provisioning (Key Assign)
  input  logic                prov_req,
  input  id_t                 prov_id,
  output logic                prov_valid,
  output logic                prov_ok,
  output token_t              prov_token,
  // status
  output logic                keys_ready,
  output logic [N_IP-1:0]     integrity,
  output logic [N_IP-1:0]     violation
);
  timeunit 1ns;
  timeprecision 1ps;

  logic                puf_start, puf_busy, puf_key_valid;
  logic [CHAL_W-1:0]   puf_challenge;
  token_t              puf_key;
  auth_req_t [N_IP-1:0] auth_req;
  auth_rsp_t [N_IP-1:0] auth_rsp;
  apb_req_t  [N_IP-1:0] w_req;
  apb_rsp_t  [N_IP-1:0] w_rsp;

  token_generator #(
    .N_RO(N_RO), .KEY_W(TOKEN_W), .CHAL_W(CHAL_W),
    .WINDOW(WINDOW), .DEVICE_SEED(DEVICE_SEED)
  ) u_puf (
    .clk, .rst_n,
    .start(puf_start), .challenge(puf_challenge),
    .busy(puf_busy), .key_valid(puf_key_valid), .key(puf_key)
  );

  trust_controller #(.N_IP(N_IP), .N_KEYS(N_KEYS), .IP_IDS(IP_IDS)) u_ctrl (
    .clk, .rst_n,
    .puf_start, .puf_challenge, .puf_busy, .puf_key_valid, .puf_key,
    .keys_ready,
    .prov_req, .prov_id, .prov_valid, .prov_ok, .prov_token,
    .auth_req, .auth_rsp
  );

  apb_decoder #(.N_IP(N_IP)) u_dec (
    .s_req(host_req), .s_rsp(host_rsp),
    .m_req(w_req),    .m_rsp(w_rsp)
  );

  for (genvar i = 0; i < N_IP; i++) begin : g_wrap
    trust_wrapper #(.INTEGRITY(INTEGRITY[i])) u_wrap (
      .clk, .rst_n,
      .s_req(w_req[i]), .s_rsp(w_rsp[i]),
      .m_req(ip_req[i]), .m_rsp(ip_rsp[i]),
      .auth_req(auth_req[i]), .auth_rsp(auth_rsp[i]),
      .integrity(integrity[i]), .violation(violation[i])
    );
  end

endmodule
