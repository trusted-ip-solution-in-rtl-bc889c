// trust_controller: the central TrustToken (Trust Login) controller.
//
// After reset the controller fills its key store from the Token Generator:
// for k = 0 .. N_KEYS-1 it starts the PUF with challenge {k, ~k} (a 2-byte
// challenge that is never zero), waits for the key and writes it to word k.
// When all keys are stored it raises keys_ready. From then on it
//   - answers token requests through Key Assign (the token of ID k is key k),
//   - checks the ar_id/ar_token of every secured access the TrustWrappers
//     forward, through Token Authorization, against the stored keys and the
//     ID recorded for each wrapper port (IP_IDS).
// Storing runtime-generated keys in block RAM inside the controller, and the
// three inner parts, follow the published design; the challenge schedule,
// the port timing and starting generation by itself after reset are this
// design's choices.
//
// Timing: key generation takes N_KEYS * (PUF key time + 2) cycles. Token
// requests answer in 2 cycles, authorization in 3 (see key_assign and
// token_auth).
module trust_controller
  import trusttoken_pkg::*;
#(
  parameter int unsigned N_IP   = 4,
  parameter int unsigned N_KEYS = 256,
  parameter logic [N_IP-1:0][ID_W-1:0] IP_IDS = {8'd4, 8'd3, 8'd2, 8'd1}
) (
  input  logic                 clk,
  input  logic                 rst_n,
  // Token Generator (PUF)
  output logic                 puf_start,
  output logic [CHAL_W-1:0]    puf_challenge,
  input  logic                 puf_busy,
  input  logic                 puf_key_valid,
  input  token_t               puf_key,
  output logic                 keys_ready,
  // Key Assign port (token provisioning)
  input  logic                 prov_req,
  input  id_t                  prov_id,
  output logic                 prov_valid,
  output logic                 prov_ok,
  output token_t               prov_token,
  // TrustWrapper authorization
  input  auth_req_t [N_IP-1:0] auth_req,
  output auth_rsp_t [N_IP-1:0] auth_rsp
);
  timeunit 1ns;
  timeprecision 1ps;

  localparam int unsigned AW = $clog2(N_KEYS);

  typedef enum logic [1:0] {G_START, G_WAIT, G_DONE} gstate_t;

  gstate_t       gstate;
  logic [AW:0]   gen_k;
  logic          ks_we;
  logic [AW-1:0] ks_waddr, ra_addr, rb_addr;
  token_t        ks_wdata, ra_data, rb_data;

  // Key generation sequencer.
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      gstate     <= G_START;
      gen_k      <= '0;
      puf_start  <= 1'b0;
      keys_ready <= 1'b0;
      ks_we      <= 1'b0;
      ks_waddr   <= '0;
      ks_wdata   <= '0;
    end else begin
      puf_start <= 1'b0;
      ks_we     <= 1'b0;
      unique case (gstate)
        G_START: if (!puf_busy && !puf_start) begin
          puf_start <= 1'b1;
          gstate    <= G_WAIT;
        end
        G_WAIT: if (puf_key_valid) begin
          ks_we    <= 1'b1;
          ks_waddr <= gen_k[AW-1:0];
          ks_wdata <= puf_key;
          gen_k    <= gen_k + 1'b1;
          gstate   <= (gen_k == (AW+1)'(N_KEYS - 1)) ? G_DONE : G_START;
        end
        G_DONE: keys_ready <= !ks_we || keys_ready;
        default: gstate <= G_START;
      endcase
    end
  end

  assign puf_challenge = {8'(gen_k[AW-1:0]), ~8'(gen_k[AW-1:0])};

  key_store #(.N_KEYS(N_KEYS), .KEY_W(TOKEN_W)) u_store (
    .clk,
    .we(ks_we), .waddr(ks_waddr), .wdata(ks_wdata),
    .ra_addr, .ra_data,
    .rb_addr, .rb_data
  );

  key_assign #(.N_KEYS(N_KEYS), .ID_W(ID_W), .KEY_W(TOKEN_W)) u_assign (
    .clk, .rst_n, .keys_ready,
    .req_valid(prov_req), .req_id(prov_id),
    .rsp_valid(prov_valid), .rsp_ok(prov_ok), .rsp_token(prov_token),
    .rd_addr(rb_addr), .rd_data(rb_data)
  );

  token_auth #(.N_IP(N_IP), .N_KEYS(N_KEYS), .IP_IDS(IP_IDS)) u_auth (
    .clk, .rst_n, .keys_ready,
    .auth_req, .auth_rsp,
    .rd_addr(ra_addr), .rd_data(ra_data)
  );

endmodule
