// trusttoken_pkg: widths and bus types shared by the TrustToken blocks.
//
// The three TrustToken fields added to every APB access follow the field
// widths of the TrustWrapper data ports: a 256-bit token, a 1-bit integrity
// level and an 8-bit ID, packed in that order with the token most
// significant. The 256-bit key width, 256 stored keys, 2-byte challenge and
// 512 oscillators are the PUF's published figures. The APB address/data
// width (32 bits) and the request/response structs are this design's own.
package trusttoken_pkg;

  timeunit 1ns;
  timeprecision 1ps;

  localparam int unsigned TOKEN_W = 256;  // ar_token width, = PUF key width
  localparam int unsigned ID_W    = 8;    // ar_id width
  localparam int unsigned CHAL_W  = 16;   // PUF challenge, 2 bytes
  localparam int unsigned PUF_N_RO   = 512;  // ring oscillators in the PUF
  localparam int unsigned PUF_N_KEYS = 256;  // keys held in the key store
  localparam int unsigned ADDR_W  = 32;   // APB address width (assumed)
  localparam int unsigned DATA_W  = 32;   // APB data width (assumed)

  typedef logic [TOKEN_W-1:0] token_t;
  typedef logic [ID_W-1:0]    id_t;

  // TrustToken security fields, ordered as in the wrapper port diagram.
  typedef struct packed {
    token_t ar_token;
    logic   ar_integrity;
    id_t    ar_id;
  } tt_sec_t;

  // APB3 request from the host side, extended with the TrustToken fields.
  typedef struct packed {
    logic              psel;
    logic              penable;
    logic              pwrite;
    logic [ADDR_W-1:0] paddr;
    logic [DATA_W-1:0] pwdata;
    tt_sec_t           sec;
  } apb_req_t;

  // Plain APB3 request seen by an untrusted IP behind its wrapper.
  typedef struct packed {
    logic              psel;
    logic              penable;
    logic              pwrite;
    logic [ADDR_W-1:0] paddr;
    logic [DATA_W-1:0] pwdata;
  } ip_req_t;

  // APB3 response (same on both sides of a wrapper).
  typedef struct packed {
    logic              pready;
    logic [DATA_W-1:0] prdata;
    logic              pslverr;
  } apb_rsp_t;

  // Wrapper -> Token Authorization request; valid is held until done.
  typedef struct packed {
    logic   valid;
    id_t    id;
    token_t token;
  } auth_req_t;

  // Token Authorization -> wrapper answer, a one-cycle pulse.
  typedef struct packed {
    logic done;
    logic grant;
  } auth_rsp_t;

endpackage
