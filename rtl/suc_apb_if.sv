// suc_apb_if: APB slave through which the processor hands a 64-bit challenge
// to the cipher (Tx) and collects the 64-bit response (Rx).
//
// The APB bus is 32 bits wide, so each 64-bit value moves as two words. The
// slave decodes PADDR[3:2]:
//   0x0  challenge bits [31:0]   read/write
//   0x4  challenge bits [63:32]  read/write
//   0x8  response  bits [31:0]   read only
//   0xC  response  bits [63:32]  read only
// A write to a response word is refused with PSLVERR. Transfers complete
// without wait states. The challenge register drives tx continuously; the
// cipher samples it only when it starts, so software writes both words before
// raising start. rx is the S-layer output register, which holds the response
// while the cipher is in its READY state; it is read as a stable value from the
// bus clock domain. The 32-bit bus and the 64-bit challenge/response are the
// paper's; the register map is this design's choice.
module suc_apb_if
  import suc_pkg::*;
(
  input  logic     pclk,
  input  logic     presetn,
  input  apb_req_t apb_req,
  output apb_rsp_t apb_rsp,
  output block_t   tx,   // challenge to the multiplexer
  input  block_t   rx    // response from the S-layer register
);

  typedef enum logic [1:0] {
    REG_CHAL_LO = 2'd0,
    REG_CHAL_HI = 2'd1,
    REG_RESP_LO = 2'd2,
    REG_RESP_HI = 2'd3
  } reg_t;

  reg_t   sel;
  logic   access;
  block_t chal;

  assign sel    = reg_t'(apb_req.paddr[3:2]);
  assign access = apb_req.psel && apb_req.penable;

  always_ff @(posedge pclk or negedge presetn) begin
    if (!presetn) begin
      chal <= '0;
    end else if (access && apb_req.pwrite) begin
      case (sel)
        REG_CHAL_LO: chal[31:0]  <= apb_req.pwdata;
        REG_CHAL_HI: chal[63:32] <= apb_req.pwdata;
        default: ;
      endcase
    end
  end

  always_comb begin
    apb_rsp.pready  = 1'b1;
    apb_rsp.pslverr = 1'b0;
    apb_rsp.prdata  = '0;
    if (access) begin
      case (sel)
        REG_CHAL_LO: apb_rsp.prdata = chal[31:0];
        REG_CHAL_HI: apb_rsp.prdata = chal[63:32];
        REG_RESP_LO: apb_rsp.prdata = rx[31:0];
        REG_RESP_HI: apb_rsp.prdata = rx[63:32];
        default: ;
      endcase
      if (apb_req.pwrite && (sel == REG_RESP_LO || sel == REG_RESP_HI))
        apb_rsp.pslverr = 1'b1;
    end
  end

  assign tx = chal;

  // APB3: a setup phase is always followed by an access phase to this slave
  a_setup_then_access: assert property (@(posedge pclk) disable iff (!presetn)
    apb_req.psel && !apb_req.penable |=> apb_req.psel && apb_req.penable);

endmodule
