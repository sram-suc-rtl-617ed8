// apb_decoder_tb: random APB requests into the decoder with random slave
// responses; checks that PSEL reaches only the slave the address selects
// (slot 0 below 0x2000, slot 1 from 0x2000 to 0x3FFF, none above), that the
// other request fields pass with the local address, and that the master sees
// the selected slave's response, or PSLVERR when no slave is selected.
`timescale 1ns/1ps
module apb_decoder_tb;
  import suc_pkg::*;
  apb_req_t m_req, s0_req, s1_req;
  apb_rsp_t m_rsp, s0_rsp, s1_rsp;
  int checks = 0, failures = 0;
  int hits [3] = '{0, 0, 0};

  apb_decoder dut (.m_req, .m_rsp, .s0_req, .s0_rsp, .s1_req, .s1_rsp);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    int slot;
    for (int i = 0; i < 600; i++) begin
      m_req = '{paddr: 16'($urandom_range(16'h5fff)), psel: 1'($urandom), penable: 1'($urandom),
                pwrite: 1'($urandom), pwdata: $urandom};
      s0_rsp = '{prdata: $urandom, pready: 1'($urandom), pslverr: 1'($urandom)};
      s1_rsp = '{prdata: $urandom, pready: 1'($urandom), pslverr: 1'($urandom)};
      #1;
      slot = (m_req.paddr < 16'h2000) ? 0 : (m_req.paddr < 16'h4000) ? 1 : 2;
      hits[slot]++;
      check(s0_req.psel == (m_req.psel && slot == 0), "psel slot 0");
      check(s1_req.psel == (m_req.psel && slot == 1), "psel slot 1");
      check(s0_req.paddr == {3'b0, m_req.paddr[12:0]} && s1_req.pwdata == m_req.pwdata
            && s0_req.pwrite == m_req.pwrite && s1_req.penable == m_req.penable, "request fields");
      if (slot == 0)      check(m_rsp == s0_rsp, "response from slot 0");
      else if (slot == 1) check(m_rsp == s1_rsp, "response from slot 1");
      else check(m_rsp.pready && m_rsp.pslverr == (m_req.psel && m_req.penable) && m_rsp.prdata == 0,
                 "error response outside the map");
    end
    check(hits[0] > 0 && hits[1] > 0 && hits[2] > 0, "all slots exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100us; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
