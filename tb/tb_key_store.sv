// tb_key_store: checks the key block RAM at its full 256 x 256-bit size.
// All words are written with random keys kept in a reference array, then
// read through both ports at random addresses; data must appear one cycle
// after the address. A read of a word in the cycle it is written must
// return the old value.
module tb_key_store;
  timeunit 1ns;
  timeprecision 1ps;

  localparam int unsigned N = 256, W = 256;

  int checks = 0, failures = 0;
  logic clk = 1'b0;
  logic we = 1'b0;
  logic [7:0] waddr = '0, ra_addr = '0, rb_addr = '0;
  logic [W-1:0] wdata = '0, ra_data, rb_data;
  logic [W-1:0] ref_mem [N];

  key_store #(.N_KEYS(N), .KEY_W(W)) dut (.*);

  always #5ns clk = ~clk;

  function automatic logic [W-1:0] rnd_key();
    logic [W-1:0] k;
    for (int i = 0; i < W / 32; i++) k[i*32 +: 32] = $urandom;
    return k;
  endfunction

  task automatic check(string what, bit ok);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    @(negedge clk);
    for (int i = 0; i < N; i++) begin
      ref_mem[i] = rnd_key();
      we = 1'b1; waddr = 8'(i); wdata = ref_mem[i];
      @(negedge clk);
    end
    we = 1'b0;
    for (int t = 0; t < 200; t++) begin
      logic [7:0] a, b;
      a = 8'($urandom); b = 8'($urandom);
      ra_addr = a; rb_addr = b;
      @(negedge clk);
      check($sformatf("port A word %0d", a), ra_data == ref_mem[a]);
      check($sformatf("port B word %0d", b), rb_data == ref_mem[b]);
    end
    // read during write returns old data, new data one cycle later
    ra_addr = 8'd7; we = 1'b1; waddr = 8'd7; wdata = ~ref_mem[7];
    @(negedge clk);
    we = 1'b0;
    check("read-during-write gives old word", ra_data == ref_mem[7]);
    @(negedge clk);
    check("new word after write", ra_data == ~ref_mem[7]);
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
