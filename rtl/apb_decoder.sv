// apb_decoder: the APB fabric between the processor's fabric interface and the
// two slaves of the SUC core (the bus IP the paper uses for this is a
// vendor core; this is a plain replacement with the same job).
//
// One APB3 master port is split into two slave slots by address:
//   PADDR[15:14] = 0, PADDR[13] = 0  -> slot 0, SUC logic (challenge/response)
//   PADDR[15:14] = 0, PADDR[13] = 1  -> slot 1, SUC SRAM (S-box loading)
//   any other address                -> no slave; completes with PSLVERR
// PSEL is routed to the selected slot only; PADDR, PENABLE, PWRITE and PWDATA
// go to both. The response (PRDATA, PREADY, PSLVERR) is taken from the
// selected slot. Combinational, no added wait states. That the processor
// reaches both slaves over one APB bus is the paper's; the address map is this
// design's choice.
module apb_decoder
  import suc_pkg::*;
(
  input  apb_req_t m_req,
  output apb_rsp_t m_rsp,
  output apb_req_t s0_req,   // SUC logic
  input  apb_rsp_t s0_rsp,
  output apb_req_t s1_req,   // SUC SRAM
  input  apb_rsp_t s1_rsp
);

  logic in_range, hit0, hit1;
  assign in_range = (m_req.paddr[APB_ADDR_W-1:14] == '0);
  assign hit0     = in_range && !m_req.paddr[13];
  assign hit1     = in_range &&  m_req.paddr[13];

  always_comb begin
    s0_req      = m_req;
    s1_req      = m_req;
    s0_req.psel = m_req.psel && hit0;
    s1_req.psel = m_req.psel && hit1;
    // local addresses inside each 8 KB slot
    s0_req.paddr = {3'b000, m_req.paddr[12:0]};
    s1_req.paddr = {3'b000, m_req.paddr[12:0]};
    if (hit0)      m_rsp = s0_rsp;
    else if (hit1) m_rsp = s1_rsp;
    else begin
      m_rsp.prdata  = '0;
      m_rsp.pready  = 1'b1;
      m_rsp.pslverr = m_req.psel && m_req.penable;
    end
  end

endmodule
