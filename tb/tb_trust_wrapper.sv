// tb_trust_wrapper: checks one TrustWrapper between an APB host task, a
// register-file IP model and a simple authorizer written here (grants when
// id == 8'd7 and token == GOOD, answers 3 cycles after the request).
// Checked: secured write/read with a good token reach the IP and take 8
// cycles; bad token or wrong ID are refused with PSLVERR and never reach
// the IP; a valid-token request may lower the integrity, after which accesses
// bypass authorization and take 4 cycles; raising it again needs a valid
// token; IP wait states are passed through. A second wrapper with
// INTEGRITY=0 starts in bypass mode.
module tb_trust_wrapper;
  import trusttoken_pkg::*;
  timeunit 1ns;
  timeprecision 1ps;

  int checks = 0, failures = 0;
  logic clk = 1'b0, rst_n = 1'b0;
  apb_req_t  s_req = '0, s_req_b = '0;
  apb_rsp_t  s_rsp, m_rsp, s_rsp_b, m_rsp_b;
  ip_req_t   m_req, m_req_b;
  auth_req_t auth_req, auth_req_b;
  auth_rsp_t auth_rsp, auth_rsp_b;
  logic      integrity, violation, integrity_b, violation_b;
  int        n_ip, n_ip_b, n_auth = 0, n_viol = 0, cyc = 0;
  token_t    GOOD;

  trust_wrapper #(.INTEGRITY(1'b1)) dut (.*);
  trust_wrapper #(.INTEGRITY(1'b0)) dut_b (
    .clk, .rst_n, .s_req(s_req_b), .s_rsp(s_rsp_b), .m_req(m_req_b), .m_rsp(m_rsp_b),
    .auth_req(auth_req_b), .auth_rsp(auth_rsp_b), .integrity(integrity_b), .violation(violation_b));

  apb_ip_model #(.WAIT(0), .TAG(32'h0))        ip   (.clk, .rst_n, .req(m_req),   .rsp(m_rsp),   .n_access(n_ip));
  apb_ip_model #(.WAIT(2), .TAG(32'hFFFF_0000)) ip_b (.clk, .rst_n, .req(m_req_b), .rsp(m_rsp_b), .n_access(n_ip_b));

  always #5ns clk = ~clk;
  always @(posedge clk) cyc++;
  always @(posedge clk) if (rst_n && violation) n_viol++;

  // authorizer model: answer 3 cycles after valid is first seen
  task automatic authorizer(ref auth_req_t rq, ref auth_rsp_t rs);
    forever begin
      rs = '0;
      @(posedge clk);
      if (rq.valid) begin
        repeat (2) @(posedge clk);
        #1ns;
        rs = '{done: 1'b1, grant: (rq.id == 8'd7) && (rq.token == GOOD)};
        n_auth++;
        @(posedge clk);
        #1ns;
        rs = '0;
        @(posedge clk);
      end
    end
  endtask
  initial begin auth_rsp = '0; #1ns authorizer(auth_req, auth_rsp); end
  initial begin auth_rsp_b = '0; #1ns authorizer(auth_req_b, auth_rsp_b); end

  task automatic check(string what, bit ok);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // one APB transfer on wrapper A (b=0) or B (b=1)
  task automatic apb(bit b, bit wr, logic [31:0] addr, logic [31:0] wdata,
                     logic [7:0] id, token_t tok, bit integ,
                     output logic [31:0] rdata, output bit err, output int lat);
    apb_req_t r;
    int c0;
    r = '0;
    r.psel = 1'b1; r.pwrite = wr; r.paddr = addr; r.pwdata = wdata;
    r.sec = '{ar_token: tok, ar_integrity: integ, ar_id: id};
    @(negedge clk);
    if (b) s_req_b = r; else s_req = r;
    @(negedge clk);
    r.penable = 1'b1;
    if (b) s_req_b = r; else s_req = r;
    c0 = cyc;
    while (!(b ? s_rsp_b.pready : s_rsp.pready)) @(negedge clk);
    lat = cyc - c0 + 1;
    rdata = b ? s_rsp_b.prdata : s_rsp.prdata;
    err = b ? s_rsp_b.pslverr : s_rsp.pslverr;
    @(posedge clk);
    #1ns;
    if (b) s_req_b = '0; else s_req = '0;
  endtask

  initial begin
    logic [31:0] rd;
    bit err;
    int lat, n0, a0;
    for (int j = 0; j < 8; j++) GOOD[j*32 +: 32] = $urandom;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    check("integrity from parameter", integrity && !integrity_b);

    apb(0, 1, 32'h8, 32'hDEAD_BEEF, 8'd7, GOOD, 1, rd, err, lat);
    check("secured write accepted", !err);
    check($sformatf("secured write latency %0d", lat), lat == 8);
    apb(0, 0, 32'h8, 0, 8'd7, GOOD, 1, rd, err, lat);
    check("secured read data", !err && rd == 32'hDEAD_BEEF);
    check("IP saw two accesses", n_ip == 2);

    n0 = n_ip;
    apb(0, 1, 32'h8, 32'h1111_1111, 8'd7, ~GOOD, 1, rd, err, lat);
    check("bad token refused", err && rd == 0);
    apb(0, 0, 32'h8, 0, 8'd6, GOOD, 1, rd, err, lat);
    check("wrong id refused, no data", err && rd == 0);
    apb(0, 0, 32'h8, 0, 8'd7, ~GOOD, 0, rd, err, lat);
    check("lowering integrity with bad token refused", err && integrity);
    check("refused accesses never reached the IP", n_ip == n0);
    check($sformatf("violations flagged: %0d", n_viol), n_viol == 3);
    apb(0, 0, 32'h8, 0, 8'd7, GOOD, 1, rd, err, lat);
    check("register unchanged by refused write", !err && rd == 32'hDEAD_BEEF);

    apb(0, 0, 32'h8, 0, 8'd7, GOOD, 0, rd, err, lat);
    check("integrity lowered with valid token", !err && !integrity);
    a0 = n_auth;
    apb(0, 1, 32'hC, 32'h0000_00AA, 8'd0, '0, 0, rd, err, lat);
    check("bypass write without token", !err);
    check($sformatf("bypass latency %0d", lat), lat == 4);
    check("bypass needs no authorization", n_auth == a0);
    apb(0, 1, 32'hC, 32'h0000_00BB, 8'd0, '0, 1, rd, err, lat);
    check("raising integrity without token refused", err && !integrity);
    apb(0, 0, 32'hC, 0, 8'd7, GOOD, 1, rd, err, lat);
    check("integrity raised with valid token", !err && integrity && rd == 32'hAA);
    apb(0, 0, 32'hC, 0, 8'd0, '0, 0, rd, err, lat);
    check("secured again: tokenless access refused", err);

    apb(1, 1, 32'h4, 32'h1234_5678, 8'd0, '0, 0, rd, err, lat);
    check("integrity-LOW wrapper passes", !err && n_ip_b == 1);
    check($sformatf("wait states passed through, latency %0d", lat), lat == 6);
    apb(1, 0, 32'h4, 0, 8'd0, '0, 0, rd, err, lat);
    check("integrity-LOW read", !err && rd == (32'h1234_5678 ^ 32'hFFFF_0000));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
