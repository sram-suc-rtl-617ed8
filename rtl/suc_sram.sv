// suc_sram: the "SUC SRAM" part of the SUC design template. It holds the S-box
// memory (lsram) and the APB slave through which the processor loads the eight
// S-boxes after each power-on.
//
// The processor may only write this memory: a write transfer stores
// PWDATA[7:0] at LSRAM address PADDR[12:2] (one byte per 32-bit word, so the
// 2048 bytes take the 8 KB window 0x0000-0x1FFF of this slave). A read
// transfer returns zero and signals PSLVERR, so the S-boxes can never be read
// back over the bus. Every transfer completes without wait states (PREADY=1).
// Read ports A and B are passed to the cipher logic. That the bus can only
// write is the paper's; the byte-per-word address map and the error response
// on reads are this design's choices.
module suc_sram
  import suc_pkg::*;
(
  input  logic                  pclk,
  input  logic                  presetn,
  input  apb_req_t              apb_req,
  output apb_rsp_t              apb_rsp,
  // read ports to the S-layer (cipher clock)
  input  logic                  clk,
  input  logic [RAM_ADDR_W-1:0] a_addr,
  output logic [SBOX_W-1:0]     a_data,
  input  logic [RAM_ADDR_W-1:0] b_addr,
  output logic [SBOX_W-1:0]     b_data
);

  logic access;
  assign access = apb_req.psel && apb_req.penable;

  logic we;
  assign we = access && apb_req.pwrite;

  always_comb begin
    apb_rsp.prdata  = '0;
    apb_rsp.pready  = 1'b1;
    apb_rsp.pslverr = access && !apb_req.pwrite;
  end

  lsram #(.ADDR_W(RAM_ADDR_W), .DATA_W(SBOX_W)) u_lsram (
    .rclk   (clk),
    .a_addr (a_addr),
    .a_data (a_data),
    .b_addr (b_addr),
    .b_data (b_data),
    .wclk   (pclk),
    .c_we   (we),
    .c_addr (apb_req.paddr[RAM_ADDR_W+1:2]),
    .c_data (apb_req.pwdata[SBOX_W-1:0])
  );

  // APB3: a setup phase is always followed by an access phase to this slave
  a_setup_then_access: assert property (@(posedge pclk) disable iff (!presetn)
    apb_req.psel && !apb_req.penable |=> apb_req.psel && apb_req.penable);

endmodule
