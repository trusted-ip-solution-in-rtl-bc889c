// tb_ro_cell: checks the ring-oscillator model.
// Two oscillators with different half-periods are enabled for a fixed time;
// their rising edges are counted and compared with the number expected from
// the half-period alone (edges at HP, 3HP, 5HP, ... after enable). The
// outputs must stay low while disabled and return low after disable.
module tb_ro_cell;
  timeunit 1ns;
  timeprecision 1ps;

  localparam int unsigned HP_A = 1000;
  localparam int unsigned HP_B = 1130;
  localparam int unsigned T_PS = 1_000_000;  // enable time, ps

  int checks = 0, failures = 0;
  logic en_a = 1'b0, en_b = 1'b0;
  logic osc_a, osc_b;
  int rises_a = 0, rises_b = 0;

  ro_cell #(.HALF_PERIOD_PS(HP_A)) dut_a (.enable(en_a), .osc(osc_a));
  ro_cell #(.HALF_PERIOD_PS(HP_B)) dut_b (.enable(en_b), .osc(osc_b));

  always @(posedge osc_a) rises_a++;
  always @(posedge osc_b) rises_b++;

  function automatic int expected_rises(int unsigned hp, int unsigned t);
    int n = 0;
    for (longint k = 0; hp + 2 * hp * k < t; k++) n++;
    return n;
  endfunction

  task automatic check(string what, bit ok);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    #100ns;
    check("osc_a low while disabled", osc_a == 1'b0);
    check("no edges while disabled", rises_a == 0 && rises_b == 0);
    en_a = 1'b1; en_b = 1'b1;
    #(T_PS * 1ps);
    en_a = 1'b0; en_b = 1'b0;
    #5ns;
    check($sformatf("A edges %0d expected %0d", rises_a, expected_rises(HP_A, T_PS)),
          rises_a == expected_rises(HP_A, T_PS));
    check($sformatf("B edges %0d expected %0d", rises_b, expected_rises(HP_B, T_PS)),
          rises_b == expected_rises(HP_B, T_PS));
    check("faster oscillator counts more", rises_a > rises_b);
    check("outputs low after disable", osc_a == 1'b0 && osc_b == 1'b0);
    rises_a = 0;
    #200ns;
    check("stopped after disable", rises_a == 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100us;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
