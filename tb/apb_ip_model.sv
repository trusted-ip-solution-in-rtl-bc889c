// apb_ip_model: stand-in for an untrusted IP core in the testbenches.
// A 16-word APB3 register file with WAIT wait states per access. It counts
// the accesses it receives, so a testbench can tell whether a refused access
// ever reached the IP. Reads return the register, XORed with TAG so that
// each IP's data can be told apart.
module apb_ip_model
  import trusttoken_pkg::*;
#(
  parameter int unsigned WAIT = 0,
  parameter logic [31:0] TAG  = 32'h0
) (
  input  logic     clk,
  input  logic     rst_n,
  input  ip_req_t  req,
  output apb_rsp_t rsp,
  output int       n_access
);
  timeunit 1ns;
  timeprecision 1ps;

  logic [31:0] regs [16];
  int unsigned waits;

  always_comb begin
    rsp.pready  = req.psel && req.penable && (waits >= WAIT);
    rsp.prdata  = (rsp.pready && !req.pwrite) ? (regs[req.paddr[5:2]] ^ TAG) : '0;
    rsp.pslverr = 1'b0;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      waits    <= 0;
      n_access <= 0;
      foreach (regs[i]) regs[i] <= '0;
    end else if (req.psel && req.penable) begin
      if (rsp.pready) begin
        waits    <= 0;
        n_access <= n_access + 1;
        if (req.pwrite) regs[req.paddr[5:2]] <= req.pwdata;
      end else begin
        waits <= waits + 1;
      end
    end
  end
endmodule
