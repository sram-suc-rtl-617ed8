// suc_core: top level of the SRAM-SUC core, a secret 64-bit involutive block
// cipher whose eight 8-bit S-boxes are held in on-chip SRAM and loaded after
// every power-on, so that each chip computes its own unknown cipher.
//
// Parts: apb_decoder (splits the processor's APB bus), suc_sram (write-only
// S-box memory, 2048 x 8) and suc_logic (APB challenge/response registers,
// multiplexer, latch, S-layer, P-layer and controller). Start and Reset come
// from processor GPIOs and Ready goes back to one.
// Clocks: pclk (APB, 100 MHz in the paper) and clk (cipher, 200 MHz). Start and
// Reset are synchronised into the clk domain with two flip-flops each, so ready
// rises 2 + 144 clk cycles after start is raised; a response at 200 MHz takes
// 0.72 us of cipher time, as in the paper.
// Use: write the 2048 S-box bytes to 0x2000 + 4*addr, write the challenge to
// 0x0000/0x0004, raise start, wait for ready, read the response at
// 0x0008/0x000C, lower start. Since the cipher is an involution, feeding the
// response back as a challenge returns the original challenge.
// Resets: presetn (active low) clears the APB registers; rst (active high,
// the Reset GPIO) clears the cipher state machine and registers. The S-box
// contents are not reset.
module suc_core
  import suc_pkg::*;
(
  // APB from the processor (fabric interface 0)
  input  logic     pclk,
  input  logic     presetn,
  input  apb_req_t apb_req,
  output apb_rsp_t apb_rsp,
  // cipher clock and GPIOs
  input  logic     clk,
  input  logic     rst_gpio,
  input  logic     start_gpio,
  output logic     ready
);

  apb_req_t s0_req, s1_req;
  apb_rsp_t s0_rsp, s1_rsp;

  logic rst_s, start_s;
  logic rst;
  logic [RAM_ADDR_W-1:0] a_addr, b_addr;
  logic [SBOX_W-1:0]     a_data, b_data;

  // reset: asserted at once, released through the synchroniser
  sync2 u_sync_rst   (.clk, .d(rst_gpio),   .q(rst_s));
  sync2 u_sync_start (.clk, .d(start_gpio), .q(start_s));
  assign rst = rst_gpio | rst_s;

  apb_decoder u_dec (
    .m_req (apb_req), .m_rsp (apb_rsp),
    .s0_req, .s0_rsp, .s1_req, .s1_rsp
  );

  suc_sram u_sram (
    .pclk, .presetn,
    .apb_req (s1_req), .apb_rsp (s1_rsp),
    .clk, .a_addr, .a_data, .b_addr, .b_data
  );

  suc_logic u_logic (
    .pclk, .presetn,
    .apb_req (s0_req), .apb_rsp (s0_rsp),
    .clk, .rst, .start (start_s), .ready,
    .a_addr, .a_data, .b_addr, .b_data
  );

endmodule
