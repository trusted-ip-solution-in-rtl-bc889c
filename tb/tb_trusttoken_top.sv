// tb_trusttoken_top: end-to-end run of the TrustToken system at reduced
// size (16 oscillators, 8 keys, 4-cycle window; keys stay 256 bits).
// Four register-file IP models stand for the AES, DES, TRNG and RSA cores
// (IDs 1..4) and five "applications" are played by the host APB task: apps
// 1..4 each own the token of one IP, app 5 owns none.
// The run: accesses made before the keys exist are refused; the PUF fills the
// key store; the trusted runtime fetches each IP's token (checked against
// a reference model of the PUF); every app uses its own IP; app 3 (TRNG)
// attacks the RSA core with its own token and with a forged one; app 5
// tries without a token; an app lowers its IP's integrity with its token
// and then uses it without a token, and a tokenless attempt to raise it
// again is refused; an unmapped address is answered with an error.
// Each mechanism is counted and must occur at least once.
module tb_trusttoken_top;
  import trusttoken_pkg::*;
  timeunit 1ns;
  timeprecision 1ps;

  localparam int unsigned NIP = 4, NRO = 16, NK = 8, WIN = 4, CLK_PS = 10_000;
  localparam logic [31:0] SEED = 32'h1234_5678;

  int checks = 0, failures = 0, cyc = 0;
  logic clk = 1'b0, rst_n = 1'b0;
  apb_req_t host_req = '0;
  apb_rsp_t host_rsp;
  ip_req_t  [NIP-1:0] ip_req;
  apb_rsp_t [NIP-1:0] ip_rsp;
  logic prov_req = 1'b0, prov_valid, prov_ok, keys_ready;
  id_t prov_id = '0;
  token_t prov_token;
  logic [NIP-1:0] integrity, violation;
  int n_ip [NIP];
  token_t app_token [1:5];
  logic [7:0] app_id [1:5];

  // mechanism counters
  int m_keygen = 0, m_prov = 0, m_grant = 0, m_refuse_early = 0, m_refuse_token = 0,
      m_refuse_cross = 0, m_integ_low = 0, m_bypass = 0, m_integ_refused = 0,
      m_unmapped = 0, m_viol = 0;

  trusttoken_top #(.N_IP(NIP), .N_RO(NRO), .N_KEYS(NK), .WINDOW(WIN), .DEVICE_SEED(SEED)) dut (.*);

  for (genvar i = 0; i < NIP; i++) begin : g_ip
    apb_ip_model #(.WAIT(i % 2), .TAG(32'(i) << 28)) u_ip (
      .clk, .rst_n, .req(ip_req[i]), .rsp(ip_rsp[i]), .n_access(n_ip[i]));
  end

  always #5ns clk = ~clk;
  always @(posedge clk) cyc++;
  always @(posedge clk) if (rst_n) m_viol += $countones(violation);

  // ---- reference model of the PUF keys (documented oscillator model) ----
  function automatic int unsigned hp_of(int unsigned i);
    logic [31:0] h;
    h = SEED ^ (i * 32'h9E37_79B9);
    h ^= h >> 16;  h *= 32'h85EB_CA6B;
    h ^= h >> 13;  h *= 32'hC2B2_AE35;
    h ^= h >> 16;
    return 1000 + (h & 32'hFF);
  endfunction
  function automatic int edges(int unsigned hp, int unsigned t);
    int n = 0;
    for (int unsigned m = 1; hp * m < t; m += 2) n++;
    return n;
  endfunction
  function automatic token_t model_key(int unsigned k);
    logic [15:0] s;
    token_t key;
    s = {8'(k), ~8'(k)};
    for (int b = 0; b < TOKEN_W; b++) begin
      key[b] = edges(hp_of(s % (NRO / 2)), WIN * CLK_PS)
             > edges(hp_of(NRO / 2 + (s >> $clog2(NRO / 2)) % (NRO / 2)), WIN * CLK_PS);
      s = s[0] ? ((s >> 1) ^ 16'hB400) : (s >> 1);
    end
    return key;
  endfunction

  task automatic check(string what, bit ok);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic apb(bit wr, logic [31:0] addr, logic [31:0] wdata,
                     logic [7:0] id, token_t tok, bit integ,
                     output logic [31:0] rdata, output bit err, output int lat);
    apb_req_t r;
    int c0;
    r = '0;
    r.psel = 1'b1; r.pwrite = wr; r.paddr = addr; r.pwdata = wdata;
    r.sec = '{ar_token: tok, ar_integrity: integ, ar_id: id};
    @(negedge clk);
    host_req = r;
    @(negedge clk);
    r.penable = 1'b1;
    host_req = r;
    #1ps;  // let the combinational decoder answer settle
    c0 = cyc;
    while (!host_rsp.pready) @(negedge clk);
    lat = cyc - c0 + 1;
    rdata = host_rsp.prdata;
    err = host_rsp.pslverr;
    @(posedge clk);
    #1ns host_req = '0;
  endtask

  // app a accesses IP slot s (0..3) with its own ID and token, integrity HIGH
  task automatic app_access(int a, int s, bit wr, logic [31:0] wdata,
                            output logic [31:0] rdata, output bit err, output int lat);
    apb(wr, (32'(s) << 12) | 32'h10, wdata, app_id[a], app_token[a], 1'b1, rdata, err, lat);
  endtask

  initial begin
    logic [31:0] rd;
    bit err;
    int lat, n_before;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    check("all wrappers start with integrity HIGH", integrity == 4'b1111);

    // before the keys exist every secured access is refused
    apb(0, 32'h0000_0010, 0, 8'd1, '0, 1'b1, rd, err, lat);
    check("access before keys refused", err && !keys_ready);
    if (err) m_refuse_early++;

    while (!keys_ready) @(negedge clk);
    m_keygen++;
    $display("keys ready after %0d cycles", cyc);

    // trusted runtime fetches tokens: app k <-> IP k (ID k), app 5 none
    for (int a = 1; a <= 4; a++) begin
      @(negedge clk);
      prov_req = 1'b1; prov_id = 8'(a);
      @(negedge clk);
      prov_req = 1'b0;
      @(negedge clk);
      check($sformatf("token %0d from the key store", a), prov_valid && prov_ok);
      check($sformatf("token %0d equals PUF model key", a), prov_token == model_key(a));
      app_token[a] = prov_token;
      app_id[a] = 8'(a);
      m_prov++;
    end
    app_id[5] = 8'd5; app_token[5] = '0;
    check("tokens differ", app_token[1] != app_token[2] && app_token[3] != app_token[4]);

    // each app writes and reads back its own IP
    for (int a = 1; a <= 4; a++) begin
      app_access(a, a - 1, 1, 32'hA000_0000 + 32'(a), rd, err, lat);
      check($sformatf("app %0d write own IP", a), !err);
      check($sformatf("app %0d secured latency %0d", a, lat), lat == 8 + (a - 1) % 2);
      app_access(a, a - 1, 0, 0, rd, err, lat);
      check($sformatf("app %0d read own IP", a),
            !err && rd == ((32'hA000_0000 + 32'(a)) ^ (32'(a - 1) << 28)));
      if (!err) m_grant++;
    end

    // app 3 (TRNG) attacks the RSA core (slot 3, ID 4)
    n_before = n_ip[3];
    app_access(3, 3, 0, 0, rd, err, lat);
    check("app 3 -> RSA with its own ID/token refused", err && rd == 0);
    if (err) m_refuse_cross++;
    apb(1, 32'h0000_3010, 32'hBAD, 8'd4, app_token[3], 1'b1, rd, err, lat);
    check("app 3 -> RSA claiming RSA's ID refused", err);
    if (err) m_refuse_token++;
    check("RSA core never saw the attack", n_ip[3] == n_before);
    app_access(4, 3, 0, 0, rd, err, lat);
    check("RSA data intact", !err && rd == ((32'hA000_0004) ^ (32'd3 << 28)));

    // app 5 holds no token
    app_access(5, 1, 0, 0, rd, err, lat);
    check("tokenless app refused", err);
    if (err) m_refuse_token++;
    n_before = n_ip[0];
    apb(0, 32'h0000_0010, 0, 8'd0, '0, 1'b0, rd, err, lat);
    check("tokenless integrity-LOW access to a secured IP refused", err && n_ip[0] == n_before);
    if (err) m_integ_refused++;

    // app 2 lowers its IP's integrity with its token, then bypasses
    apb(0, 32'h0000_1010, 0, app_id[2], app_token[2], 1'b0, rd, err, lat);
    check("integrity lowered with valid token", !err && integrity == 4'b1101);
    if (!err && !integrity[1]) m_integ_low++;
    apb(0, 32'h0000_1010, 0, 8'd0, '0, 1'b0, rd, err, lat);
    check("bypass read without token", !err && rd == ((32'hA000_0002) ^ (32'd1 << 28)));
    check($sformatf("bypass latency %0d", lat), lat == 5);
    if (!err) m_bypass++;
    apb(0, 32'h0000_1010, 0, 8'd0, '0, 1'b1, rd, err, lat);
    check("raising integrity without token refused", err && !integrity[1]);
    if (err) m_integ_refused++;
    check("other wrappers stay secured", integrity[0] && integrity[2] && integrity[3]);

    // unmapped address
    apb(0, 32'h0000_7000, 0, 8'd1, app_token[1], 1'b1, rd, err, lat);
    check("unmapped address error", err);
    if (err) m_unmapped++;

    check($sformatf("violations flagged %0d", m_viol), m_viol == 6);
    check("key generation happened", m_keygen > 0);
    check("token provisioning happened", m_prov > 0);
    check("granted access happened", m_grant > 0);
    check("refusal-before-keys happened", m_refuse_early > 0);
    check("bad-token refusal happened", m_refuse_token > 0);
    check("cross-IP refusal happened", m_refuse_cross > 0);
    check("integrity lowering happened", m_integ_low > 0);
    check("bypass access happened", m_bypass > 0);
    check("unauthorized integrity change refused", m_integ_refused > 0);
    check("unmapped access happened", m_unmapped > 0);
    $display("mechanisms: keygen=%0d prov=%0d grant=%0d early=%0d badtoken=%0d cross=%0d low=%0d bypass=%0d integ_refused=%0d unmapped=%0d viol=%0d",
             m_keygen, m_prov, m_grant, m_refuse_early, m_refuse_token, m_refuse_cross,
             m_integ_low, m_bypass, m_integ_refused, m_unmapped, m_viol);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (40000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
