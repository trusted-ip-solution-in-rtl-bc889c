// tb_apb_decoder: checks address decoding of the APB interconnect.
// Random host requests are applied; only the wrapper owning the 4 KiB
// window of the address may see PSEL, every wrapper sees the other fields
// unchanged, the addressed wrapper's response comes back, and addresses
// beyond the last window are answered with PSLVERR by the decoder.
module tb_apb_decoder;
  import trusttoken_pkg::*;
  timeunit 1ns;
  timeprecision 1ps;

  localparam int unsigned NIP = 4;

  int checks = 0, failures = 0;
  apb_req_t s_req;
  apb_rsp_t s_rsp;
  apb_req_t [NIP-1:0] m_req;
  apb_rsp_t [NIP-1:0] m_rsp;

  apb_decoder #(.N_IP(NIP), .SLOT_LSB(12)) dut (.*);

  task automatic check(string what, bit ok);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    for (int t = 0; t < 300; t++) begin
      int unsigned slot;
      slot = $urandom_range(0, 5);
      s_req = '0;
      s_req.psel    = 1'b1;
      s_req.penable = 1'($urandom);
      s_req.pwrite  = 1'($urandom);
      s_req.paddr   = (slot << 12) | ($urandom & 32'hFFF);
      s_req.pwdata  = $urandom;
      s_req.sec.ar_id = 8'($urandom);
      s_req.sec.ar_integrity = 1'($urandom);
      s_req.sec.ar_token = {8{$urandom}};
      for (int i = 0; i < NIP; i++)
        m_rsp[i] = '{pready: 1'($urandom), prdata: $urandom, pslverr: 1'($urandom)};
      #1ns;
      for (int i = 0; i < NIP; i++) begin
        apb_req_t e;
        e = s_req;
        e.psel = (slot == i);
        check($sformatf("wrapper %0d request for slot %0d", i, slot), m_req[i] == e);
      end
      if (slot < NIP)
        check($sformatf("response of slot %0d", slot), s_rsp == m_rsp[slot]);
      else
        check("unmapped address answered with error",
              s_rsp.pready && s_rsp.prdata == 0 && s_rsp.pslverr == s_req.penable);
    end
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
