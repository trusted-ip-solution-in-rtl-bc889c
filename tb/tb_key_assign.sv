// tb_key_assign: checks token hand-out.
// A reference memory with one-cycle read latency stands in for the key
// store (16 keys). Requests must be refused before keys_ready, answered with
// the key of the requested ID two cycles after the request once keys are
// ready, refused for an ID with no key, and pipelined one per cycle.
module tb_key_assign;
  timeunit 1ns;
  timeprecision 1ps;

  localparam int unsigned NK = 16, W = 256;

  int checks = 0, failures = 0;
  logic clk = 1'b0, rst_n = 1'b0, keys_ready = 1'b0, req_valid = 1'b0;
  logic [7:0] req_id = '0;
  logic rsp_valid, rsp_ok;
  logic [W-1:0] rsp_token, rd_data;
  logic [3:0] rd_addr;
  logic [W-1:0] mem [NK];

  key_assign #(.N_KEYS(NK), .ID_W(8), .KEY_W(W)) dut (.*);

  always #5ns clk = ~clk;
  always_ff @(posedge clk) rd_data <= mem[rd_addr];

  task automatic check(string what, bit ok);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // issue a request and check the answer two cycles later
  task automatic request(logic [7:0] id, bit exp_ok);
    @(negedge clk);
    req_valid = 1'b1; req_id = id;
    @(negedge clk);
    req_valid = 1'b0;
    check("no answer after one cycle", !rsp_valid);
    @(negedge clk);
    check($sformatf("answer for id %0d after two cycles", id), rsp_valid);
    check($sformatf("ok flag for id %0d", id), rsp_ok == exp_ok);
    check($sformatf("token for id %0d", id),
          rsp_token == (exp_ok ? mem[id[3:0]] : '0));
  endtask

  initial begin
    foreach (mem[i]) for (int j = 0; j < W / 32; j++) mem[i][j*32 +: 32] = $urandom;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    request(8'd3, 1'b0);          // keys not generated yet
    keys_ready = 1'b1;
    for (int i = 0; i < NK; i++) request(8'(i), 1'b1);
    request(8'd20, 1'b0);         // no key for this ID
    // back-to-back requests
    @(negedge clk);
    for (int i = 0; i < 4; i++) begin
      req_valid = 1'b1; req_id = 8'(i + 5);
      @(negedge clk);
      if (i >= 1) check($sformatf("pipelined answer %0d", i - 1),
                        rsp_valid && rsp_token == mem[i + 4]);
    end
    req_valid = 1'b0;
    @(negedge clk);
    check("last pipelined answer", rsp_valid && rsp_token == mem[8]);
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
