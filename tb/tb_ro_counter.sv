// tb_ro_counter: checks the oscillator edge counter.
// Pulses are applied to ro_clk in bursts of known length; the count must
// equal the number of pulses, clear must zero it asynchronously, and a
// 4-bit instance must saturate at 15 instead of wrapping.
module tb_ro_counter;
  timeunit 1ns;
  timeprecision 1ps;

  int checks = 0, failures = 0;
  logic ro_clk = 1'b0, clr = 1'b0;
  logic [15:0] count;
  logic [3:0]  count4;

  ro_counter #(.CNT_W(16)) dut   (.ro_clk, .clr, .count);
  ro_counter #(.CNT_W(4))  dut4  (.ro_clk, .clr, .count(count4));

  task automatic pulses(int n);
    repeat (n) begin #1ns ro_clk = 1'b1; #1ns ro_clk = 1'b0; end
  endtask

  task automatic check(string what, bit ok);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    #2ns clr = 1'b1;
    #3ns clr = 1'b0;
    #5ns;
    check("zero after clear", count == 0 && count4 == 0);
    for (int t = 0; t < 20; t++) begin
      int n;
      n = int'($urandom_range(1, 300));
      clr = 1'b1; #1ns clr = 1'b0; #1ns;
      pulses(n);
      #1ns;
      check($sformatf("count %0d after %0d pulses", count, n), count == 16'(n));
      check($sformatf("4-bit count %0d after %0d pulses", count4, n),
            count4 == ((n > 15) ? 4'd15 : 4'(n)));
    end
    clr = 1'b1; #1ns;
    check("async clear", count == 0 && count4 == 0);
    clr = 1'b0;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #1ms;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
