// tb_puf_ctrl: checks the PUF selection/count/compare logic.
// A small instance (16 oscillators, 16-bit key, 8-cycle window) drives an
// oscillator array built here with known half-periods. The expected key is
// worked out independently: the documented challenge LFSR gives the two
// oscillators of every bit, and the number of rising edges each makes in the
// window follows from its half-period (edges at HP, 3HP, ... after enable).
// Also checked: the key latency KEY_W*(WINDOW+SETTLE+2) cycles, that at
// most one oscillator per bank runs at a time, and that the same challenge
// gives the same key.
module tb_puf_ctrl;
  timeunit 1ns;
  timeprecision 1ps;

  localparam int unsigned N_RO = 16, KEY_W = 16, WINDOW = 8, SETTLE = 2;
  localparam int unsigned CLK_PS = 10_000;
  localparam int unsigned BANK = N_RO / 2;

  int checks = 0, failures = 0;
  logic clk = 1'b0, rst_n = 1'b0, start = 1'b0;
  logic [15:0] challenge = '0;
  logic busy, key_valid;
  logic [KEY_W-1:0] key;
  logic [N_RO-1:0] ro_en, ro_out;
  int cyc = 0;

  function automatic int unsigned hp_of(int unsigned i);
    return 1003 + 61 * ((i * 5) % 16);
  endfunction

  for (genvar i = 0; i < N_RO; i++) begin : g_ro
    ro_cell #(.HALF_PERIOD_PS(hp_of(i))) u_ro (.enable(ro_en[i]), .osc(ro_out[i]));
  end

  puf_ctrl #(.N_RO(N_RO), .KEY_W(KEY_W), .CHAL_W(16), .WINDOW(WINDOW),
             .SETTLE(SETTLE), .CNT_W(16)) dut (.*);

  always #5ns clk = ~clk;
  always @(posedge clk) cyc++;

  always @(negedge clk) if (rst_n) begin
    if ($countones(ro_en[BANK-1:0]) > 1 || $countones(ro_en[N_RO-1:BANK]) > 1) begin
      failures++;
      $display("FAIL: more than one oscillator per bank enabled");
    end
  end

  function automatic int edges(int unsigned hp, int unsigned t);
    int n = 0;
    for (int unsigned m = 1; hp * m < t; m += 2) n++;
    return n;
  endfunction

  function automatic logic [KEY_W-1:0] model_key(logic [15:0] c);
    logic [15:0] s = (c == 0) ? 16'h1 : c;
    logic [KEY_W-1:0] k;
    for (int b = 0; b < KEY_W; b++) begin
      int unsigned ia = s % BANK;
      int unsigned ib = BANK + (s >> $clog2(BANK)) % BANK;
      k[b] = edges(hp_of(ia), WINDOW * CLK_PS) > edges(hp_of(ib), WINDOW * CLK_PS);
      s = s[0] ? ((s >> 1) ^ 16'hB400) : (s >> 1);
    end
    return k;
  endfunction

  task automatic check(string what, bit ok);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic gen(input logic [15:0] c, output logic [KEY_W-1:0] k, output int lat);
    int c0;
    @(negedge clk);
    challenge = c; start = 1'b1;
    @(negedge clk);
    start = 1'b0;
    c0 = cyc;
    while (!key_valid) @(negedge clk);
    lat = cyc - c0;  // edges from the one that samples start to the one that sets key_valid
    k = key;
  endtask

  initial begin
    logic [KEY_W-1:0] k, k2;
    int lat;
    logic [15:0] chals [6] = '{16'h0000, 16'h1234, 16'hBEEF, 16'h00FF, 16'h8001, 16'h5A5A};
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    check("idle after reset", !busy && ro_en == '0);
    foreach (chals[j]) begin
      gen(chals[j], k, lat);
      check($sformatf("challenge %h key %h expected %h", chals[j], k, model_key(chals[j])),
            k == model_key(chals[j]));
      check($sformatf("latency %0d expected %0d", lat, KEY_W * (WINDOW + SETTLE + 2)),
            lat == KEY_W * (WINDOW + SETTLE + 2));
    end
    gen(16'h1234, k, lat);
    gen(16'h1234, k2, lat);
    check("same challenge, same key", k == k2);
    check("oscillators stopped when idle", ro_en == '0 && !busy);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
