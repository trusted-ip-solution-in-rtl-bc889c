// tb_trusttoken_full: the TrustToken system at its default size.
// 512 oscillators, 256 keys of 256 bits, four wrappers with IDs 1..4 and
// integrity HIGH. After reset the PUF generates all 256 keys. The test then
// fetches every token through Key Assign and compares it with a reference
// model of the PUF, reports the key statistics the design is judged by
// (share of ones = randomness; mean Hamming distance between keys, which
// should lie between 40 % and 60 %), and runs one protected access per IP
// plus the cross-IP attack (the TRNG application using its token on the
// RSA core), which must be refused without reaching the core.
module tb_trusttoken_full;
  import trusttoken_pkg::*;
  timeunit 1ns;
  timeprecision 1ps;

  localparam int unsigned NIP = 4, NK = 256, WIN = 16, CLK_PS = 10_000;
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
  token_t tokens [NK];

  trusttoken_top dut (.*);

  for (genvar i = 0; i < NIP; i++) begin : g_ip
    apb_ip_model #(.WAIT(0), .TAG(32'(i) << 28)) u_ip (
      .clk, .rst_n, .req(ip_req[i]), .rsp(ip_rsp[i]), .n_access(n_ip[i]));
  end

  always #5ns clk = ~clk;
  always @(posedge clk) cyc++;

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
      key[b] = edges(hp_of(s[7:0]), WIN * CLK_PS) > edges(hp_of(256 + s[15:8]), WIN * CLK_PS);
      s = s[0] ? ((s >> 1) ^ 16'hB400) : (s >> 1);
    end
    return key;
  endfunction

  task automatic check(string what, bit ok);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic apb(bit wr, logic [31:0] addr, logic [31:0] wdata,
                     logic [7:0] id, token_t tok,
                     output logic [31:0] rdata, output bit err);
    apb_req_t r;
    r = '0;
    r.psel = 1'b1; r.pwrite = wr; r.paddr = addr; r.pwdata = wdata;
    r.sec = '{ar_token: tok, ar_integrity: 1'b1, ar_id: id};
    @(negedge clk);
    host_req = r;
    @(negedge clk);
    r.penable = 1'b1;
    host_req = r;
    #1ps;
    while (!host_rsp.pready) @(negedge clk);
    rdata = host_rsp.prdata;
    err = host_rsp.pslverr;
    @(posedge clk);
    #1ns host_req = '0;
  endtask

  initial begin
    logic [31:0] rd;
    bit err;
    int ones, n_model_ok, n_before;
    longint hd_sum, n_pairs;
    int hd_min, hd_max;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    while (!keys_ready) @(negedge clk);
    $display("all %0d keys generated after %0d cycles", NK, cyc);
    check("key generation time", cyc < NK * (TOKEN_W * (WIN + 6) + 8) + 20);

    n_model_ok = 0; ones = 0;
    for (int k = 0; k < NK; k++) begin
      @(negedge clk);
      prov_req = 1'b1; prov_id = 8'(k);
      @(negedge clk);
      prov_req = 1'b0;
      @(negedge clk);
      tokens[k] = prov_token;
      if (prov_valid && prov_ok && prov_token == model_key(k)) n_model_ok++;
      ones += $countones(prov_token);
    end
    check($sformatf("%0d of %0d tokens match the PUF model", n_model_ok, NK), n_model_ok == NK);
    hd_sum = 0; n_pairs = 0; hd_min = TOKEN_W; hd_max = 0;
    for (int a = 0; a < NK; a++)
      for (int b = a + 1; b < NK; b++) begin
        int hd;
        hd = $countones(tokens[a] ^ tokens[b]);
        hd_sum += hd; n_pairs++;
        if (hd < hd_min) hd_min = hd;
        if (hd > hd_max) hd_max = hd;
      end
    $display("randomness (ones): %0d / %0d bits = %0.2f %%", ones, NK * TOKEN_W,
             100.0 * ones / (NK * TOKEN_W));
    $display("key-to-key Hamming distance: mean %0.2f %%, min %0d, max %0d of %0d bits",
             100.0 * hd_sum / (n_pairs * TOKEN_W), hd_min, hd_max, TOKEN_W);
    check("mean key-to-key distance within 40..60 %",
          hd_sum * 100 >= 40 * n_pairs * TOKEN_W && hd_sum * 100 <= 60 * n_pairs * TOKEN_W);
    check("all keys distinct", hd_min > 0);

    for (int i = 0; i < NIP; i++) begin
      apb(1, (32'(i) << 12) | 32'h20, 32'h5500_0000 + 32'(i), 8'(i + 1), tokens[i + 1], rd, err);
      check($sformatf("IP %0d protected write", i + 1), !err);
      apb(0, (32'(i) << 12) | 32'h20, 0, 8'(i + 1), tokens[i + 1], rd, err);
      check($sformatf("IP %0d protected read", i + 1),
            !err && rd == ((32'h5500_0000 + 32'(i)) ^ (32'(i) << 28)));
    end
    n_before = n_ip[3];
    apb(0, 32'h0000_3020, 0, 8'd3, tokens[3], rd, err);
    check("TRNG application refused on the RSA core", err && rd == 0);
    apb(0, 32'h0000_3020, 0, 8'd4, tokens[3], rd, err);
    check("forged RSA credentials refused", err && rd == 0);
    check("RSA core untouched by the attack", n_ip[3] == n_before);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (1_600_000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
