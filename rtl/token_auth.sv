// token_auth: Token Authorization unit of the TrustToken controller.
//
// Every TrustWrapper whose IP runs with integrity HIGH sends the ar_id and
// ar_token of each access here before the access may reach the IP. The
// request is granted only if all of these hold:
//   - the keys have been generated (keys_ready),
//   - ar_id is the ID recorded for the IP behind that wrapper port
//     (IP_IDS[port]): a valid token of another IP does not open this one,
//   - ar_token equals the stored key of ar_id.
// Otherwise it is refused and the wrapper blocks the access.
//
// Requests from the N_IP wrappers share the single key-store read port and
// are served one at a time in round-robin order (this design's choice).
// Timing: a request first seen in cycle t while the unit is idle gets its
// one-cycle auth_rsp.done pulse in cycle t+3; the unit is idle again in
// t+4. A wrapper must hold valid, id and token until done.
module token_auth
  import trusttoken_pkg::*;
#(
  parameter int unsigned N_IP   = 4,
  parameter int unsigned N_KEYS = 256,
  parameter logic [N_IP-1:0][ID_W-1:0] IP_IDS = {8'd4, 8'd3, 8'd2, 8'd1},
  localparam int unsigned AW    = $clog2(N_KEYS)
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 keys_ready,
  input  auth_req_t [N_IP-1:0] auth_req,
  output auth_rsp_t [N_IP-1:0] auth_rsp,
  // key-store read port A
  output logic [AW-1:0]        rd_addr,
  input  token_t               rd_data
);
  timeunit 1ns;
  timeprecision 1ps;

  localparam int unsigned PW = (N_IP > 1) ? $clog2(N_IP) : 1;

  typedef enum logic [1:0] {A_IDLE, A_READ, A_CHECK, A_RESP} astate_t;

  astate_t         state;
  logic [PW-1:0]   ptr, cur, pick;
  logic            any;
  id_t             cur_id;
  token_t          cur_token;

  // Round-robin choice starting at ptr.
  always_comb begin
    any  = 1'b0;
    pick = '0;
    for (int unsigned k = 0; k < N_IP; k++) begin
      int unsigned idx;
      idx = (32'(ptr) + k) % N_IP;
      if (!any && auth_req[idx].valid) begin
        any  = 1'b1;
        pick = PW'(idx);
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state     <= A_IDLE;
      ptr       <= '0;
      cur       <= '0;
      cur_id    <= '0;
      cur_token <= '0;
      rd_addr   <= '0;
      auth_rsp  <= '0;
    end else begin
      auth_rsp <= '0;
      unique case (state)
        A_IDLE: if (any) begin
          cur       <= pick;
          cur_id    <= auth_req[pick].id;
          cur_token <= auth_req[pick].token;
          rd_addr   <= auth_req[pick].id[AW-1:0];
          ptr       <= PW'((32'(pick) + 1) % N_IP);
          state     <= A_READ;
        end
        A_READ:  state <= A_CHECK;   // key-store read under way
        A_CHECK: begin
          auth_rsp[cur].done  <= 1'b1;
          auth_rsp[cur].grant <= keys_ready
                              && (32'(cur_id) < N_KEYS)
                              && (cur_id == IP_IDS[cur])
                              && (cur_token == rd_data);
          state <= A_RESP;
        end
        A_RESP:  state <= A_IDLE;    // requester drops valid this cycle
        default: state <= A_IDLE;
      endcase
    end
  end

endmodule
