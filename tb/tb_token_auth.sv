// tb_token_auth: checks Token Authorization.
// Four requesters (wrapper ports with IDs 1..4) and a reference key memory
// with one-cycle read latency. Checked: the grant rule (right token and the
// port's own ID), refusal of a valid token presented at another port (the
// App 3 -> RSA case), refusal before keys_ready, the 3-cycle answer
// latency, and round-robin service when all four ports ask at once.
module tb_token_auth;
  import trusttoken_pkg::*;
  timeunit 1ns;
  timeprecision 1ps;

  localparam int unsigned NK = 16, NIP = 4;

  int checks = 0, failures = 0;
  logic clk = 1'b0, rst_n = 1'b0, keys_ready = 1'b0;
  auth_req_t [NIP-1:0] auth_req = '0;
  auth_rsp_t [NIP-1:0] auth_rsp;
  logic [3:0] rd_addr;
  token_t rd_data;
  token_t mem [NK];
  int cyc = 0;

  token_auth #(.N_IP(NIP), .N_KEYS(NK), .IP_IDS({8'd4, 8'd3, 8'd2, 8'd1})) dut (.*);

  always #5ns clk = ~clk;
  always @(posedge clk) cyc++;
  always_ff @(posedge clk) rd_data <= mem[rd_addr];

  task automatic check(string what, bit ok);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // one request on one port; returns grant and latency
  task automatic ask(int p, logic [7:0] id, token_t tok, output bit grant, output int lat);
    int c0;
    @(negedge clk);
    auth_req[p] = '{valid: 1'b1, id: id, token: tok};
    c0 = cyc;
    while (!auth_rsp[p].done) @(negedge clk);
    lat = cyc - c0;
    grant = auth_rsp[p].grant;
    @(negedge clk);
    auth_req[p] = '0;
  endtask

  initial begin
    bit g;
    int lat;
    int order [$];
    foreach (mem[i]) for (int j = 0; j < 8; j++) mem[i][j*32 +: 32] = $urandom;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    ask(0, 8'd1, mem[1], g, lat);
    check("refused before keys are ready", !g);
    keys_ready = 1'b1;
    for (int p = 0; p < NIP; p++) begin
      ask(p, 8'(p + 1), mem[p + 1], g, lat);
      check($sformatf("port %0d own token granted", p), g);
      check($sformatf("port %0d latency %0d", p, lat), lat == 3);
      ask(p, 8'(p + 1), mem[p + 1] ^ (token_t'(1) << $urandom_range(0, 255)), g, lat);
      check($sformatf("port %0d one-bit-wrong token refused", p), !g);
      ask(p, 8'(p + 1), mem[(p + 2) % NK], g, lat);
      check($sformatf("port %0d other key refused", p), !g);
    end
    // App 3 (TRNG, ID 3) tries the RSA core at port 3 (ID 4)
    ask(3, 8'd3, mem[3], g, lat);
    check("valid token of another IP refused", !g);
    ask(3, 8'd4, mem[3], g, lat);
    check("claimed ID with wrong token refused", !g);
    // all four ports at once: each served once, in round-robin order
    @(negedge clk);
    for (int p = 0; p < NIP; p++) auth_req[p] = '{valid: 1'b1, id: 8'(p + 1), token: mem[p + 1]};
    while (order.size() < NIP) begin
      @(negedge clk);
      for (int p = 0; p < NIP; p++) if (auth_rsp[p].done) begin
        check($sformatf("port %0d granted under contention", p), auth_rsp[p].grant);
        order.push_back(p);
        auth_req[p] = '0;
      end
      if (cyc > 1000) break;
    end
    check("four answers", order.size() == NIP);
    for (int i = 1; i < order.size(); i++)
      check("round-robin order", order[i] == (order[i-1] + 1) % NIP);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
