// tb_token_generator: checks the full-size PUF (512 oscillators, 256-bit
// keys, 2-byte challenges) at its default parameters.
// Two instances with different DEVICE_SEED stand for two chips. Each key is
// compared with a reference computed here from the documented model: the
// oscillator half-period 1000 ps + (hash(seed, index) & 255), the challenge
// LFSR choosing one oscillator per bank for every bit, and the edge count of
// each oscillator in the window. Also checked: the key latency, that a
// repeated challenge reproduces its key, and that the two chips give
// different keys for the same challenge.
module tb_token_generator;
  timeunit 1ns;
  timeprecision 1ps;

  localparam int unsigned N_RO = 512, KEY_W = 256, WINDOW = 16, SETTLE = 4;
  localparam int unsigned CLK_PS = 10_000;
  localparam logic [31:0] SEED0 = 32'h1234_5678, SEED1 = 32'hCAFE_F00D;

  int checks = 0, failures = 0;
  logic clk = 1'b0, rst_n = 1'b0, start = 1'b0;
  logic [15:0] challenge = '0;
  logic busy0, busy1, kv0, kv1;
  logic [KEY_W-1:0] key0, key1;
  int cyc = 0;

  token_generator #(.DEVICE_SEED(SEED0)) dut0 (
    .clk, .rst_n, .start, .challenge, .busy(busy0), .key_valid(kv0), .key(key0));
  token_generator #(.DEVICE_SEED(SEED1)) dut1 (
    .clk, .rst_n, .start, .challenge, .busy(busy1), .key_valid(kv1), .key(key1));

  always #5ns clk = ~clk;
  always @(posedge clk) cyc++;

  function automatic int unsigned hp_of(logic [31:0] seed, int unsigned i);
    logic [31:0] h = seed ^ (i * 32'h9E37_79B9);
    h ^= h >> 16;  h *= 32'h85EB_CA6B;
    h ^= h >> 13;  h *= 32'hC2B2_AE35;
    h ^= h >> 16;
    return 1000 + (h & 32'hFF);
  endfunction

  function automatic int edges(int unsigned hp, int unsigned t);
    return (t / hp + 1) / 2 - ((t % hp == 0 && (t / hp) % 2 == 1) ? 1 : 0);
  endfunction

  function automatic logic [KEY_W-1:0] model_key(logic [31:0] seed, logic [15:0] c);
    logic [15:0] s = (c == 0) ? 16'h1 : c;
    logic [KEY_W-1:0] k;
    for (int b = 0; b < KEY_W; b++) begin
      k[b] = edges(hp_of(seed, s[7:0]), WINDOW * CLK_PS)
           > edges(hp_of(seed, 256 + s[15:8]), WINDOW * CLK_PS);
      s = s[0] ? ((s >> 1) ^ 16'hB400) : (s >> 1);
    end
    return k;
  endfunction

  task automatic check(string what, bit ok);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    logic [15:0] chals [3] = '{16'h00FF, 16'h01FE, 16'hA55A};
    logic [KEY_W-1:0] first0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    foreach (chals[j]) begin
      int c0;
      @(negedge clk);
      challenge = chals[j]; start = 1'b1;
      @(negedge clk);
      start = 1'b0;
      c0 = cyc;
      while (!kv0) @(negedge clk);
      check($sformatf("latency %0d", cyc - c0), cyc - c0 == KEY_W * (WINDOW + SETTLE + 2));
      check("both chips finish together", kv1);
      check($sformatf("chip 0 key for %h", chals[j]), key0 == model_key(SEED0, chals[j]));
      check($sformatf("chip 1 key for %h", chals[j]), key1 == model_key(SEED1, chals[j]));
      check("chips differ", key0 != key1);
      $display("challenge %h: ones %0d/256, inter-chip HD %0d/256",
               chals[j], $countones(key0), $countones(key0 ^ key1));
      if (j == 0) first0 = key0;
    end
    @(negedge clk);
    challenge = chals[0]; start = 1'b1;
    @(negedge clk);
    start = 1'b0;
    while (!kv0) @(negedge clk);
    check("repeat challenge reproduces key", key0 == first0);
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
