// tb_trust_controller: checks the central controller with 16 keys.
// The PUF is replaced here by a model that answers a challenge after a
// fixed delay with a key derived from the challenge (so the expected token
// of every ID is known). Checked: the challenge sequence {k, ~k}, that
// keys_ready rises only after all keys are written, token hand-out of every
// ID through Key Assign, and authorization of accesses on the four wrapper
// ports (own token granted, other IP's token refused).
module tb_trust_controller;
  import trusttoken_pkg::*;
  timeunit 1ns;
  timeprecision 1ps;

  localparam int unsigned NK = 16, NIP = 4, PUF_LAT = 20;

  int checks = 0, failures = 0;
  logic clk = 1'b0, rst_n = 1'b0;
  logic puf_start, puf_busy = 1'b0, puf_key_valid = 1'b0, keys_ready;
  logic [15:0] puf_challenge;
  token_t puf_key = '0;
  logic prov_req = 1'b0, prov_valid, prov_ok;
  id_t prov_id = '0;
  token_t prov_token;
  auth_req_t [NIP-1:0] auth_req = '0;
  auth_rsp_t [NIP-1:0] auth_rsp;
  int n_start = 0, cyc = 0;

  trust_controller #(.N_IP(NIP), .N_KEYS(NK), .IP_IDS({8'd4, 8'd3, 8'd2, 8'd1})) dut (.*);

  always #5ns clk = ~clk;
  always @(posedge clk) cyc++;

  function automatic token_t key_of(logic [15:0] c);
    token_t k;
    for (int j = 0; j < 16; j++) k[j*16 +: 16] = c * 16'(j * 2 + 1) ^ 16'(j * 16'h3C3C);
    return k;
  endfunction

  // PUF model
  initial begin
    forever begin
      @(posedge clk);
      if (rst_n && puf_start && !puf_busy) begin
        logic [15:0] c;
        c = puf_challenge;
        if (c != {8'(n_start), ~8'(n_start)}) begin
          failures++;
          $display("FAIL: challenge %h for key %0d", c, n_start);
        end
        n_start++;
        #1ns puf_busy = 1'b1;
        repeat (PUF_LAT) @(posedge clk);
        #1ns;
        puf_busy = 1'b0; puf_key_valid = 1'b1; puf_key = key_of(c);
        @(posedge clk);
        #1ns puf_key_valid = 1'b0;
      end
    end
  end

  task automatic check(string what, bit ok);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic ask(int p, logic [7:0] id, token_t tok, output bit grant);
    @(negedge clk);
    auth_req[p] = '{valid: 1'b1, id: id, token: tok};
    while (!auth_rsp[p].done) @(negedge clk);
    grant = auth_rsp[p].grant;
    @(negedge clk);
    auth_req[p] = '0;
  endtask

  initial begin
    bit g;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    ask(1, 8'd2, key_of({8'd2, 8'd253}), g);
    check("refused while keys are generated", !g);
    while (!keys_ready) begin
      @(negedge clk);
      if (keys_ready) check($sformatf("keys_ready after %0d keys", n_start), n_start == NK);
    end
    check("one challenge per key", n_start == NK);
    for (int i = 0; i < NK; i++) begin
      @(negedge clk);
      prov_req = 1'b1; prov_id = 8'(i);
      @(negedge clk);
      prov_req = 1'b0;
      @(negedge clk);
      check($sformatf("token of id %0d", i),
            prov_valid && prov_ok && prov_token == key_of({8'(i), ~8'(i)}));
    end
    for (int p = 0; p < NIP; p++) begin
      ask(p, 8'(p + 1), key_of({8'(p + 1), ~8'(p + 1)}), g);
      check($sformatf("port %0d own token", p), g);
      ask(p, 8'((p + 1) % NIP + 1), key_of({8'((p + 1) % NIP + 1), ~8'((p + 1) % NIP + 1)}), g);
      check($sformatf("port %0d other IP's token refused", p), !g);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
