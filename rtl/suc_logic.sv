// suc_logic: the "SUC Logic" of the SUC design template, i.e. the SRAM-SUC
// cipher datapath around the S-box memory, with its APB interface.
//
// Data path (one loop per round):
//   APB interface (tx) --+
//                        mux --> latch --> slayer (reads S-box memory) --> player
//   player output -------+                   |
//                                            +--> rx (response) to the APB interface
// The controller drives mux select, latch enable and the S-layer counter from
// the start input and reports ready after 144 cycles. The S-box memory itself
// is outside this module (suc_sram); its read ports A and B are ports here.
// Two clocks: pclk for the APB interface, clk for the cipher. The challenge
// and response registers are only sampled when they are stable (the challenge
// before start, the response while ready is high), so no synchroniser sits on
// the 64-bit buses; start and rst must already be synchronous to clk.
// The structure is the paper's SUC core figure.
module suc_logic
  import suc_pkg::*;
#(
  parameter int unsigned ROUNDS = FULL_ROUNDS
) (
  input  logic                  pclk,
  input  logic                  presetn,
  input  apb_req_t              apb_req,
  output apb_rsp_t              apb_rsp,
  input  logic                  clk,
  input  logic                  rst,
  input  logic                  start,
  output logic                  ready,
  output logic [RAM_ADDR_W-1:0] a_addr,
  input  logic [SBOX_W-1:0]     a_data,
  output logic [RAM_ADDR_W-1:0] b_addr,
  input  logic [SBOX_W-1:0]     b_data
);

  block_t tx, mux_y, latch_q, sl_q, p_q;
  logic mux_sel, latch_en, sl_run;
  logic [PAIR_W-1:0] sl_pair;

  suc_apb_if u_apb (
    .pclk, .presetn, .apb_req, .apb_rsp,
    .tx (tx),
    .rx (sl_q)
  );

  suc_mux u_mux (.sel(mux_sel), .tx(tx), .fb(p_q), .y(mux_y));

  suc_latch u_latch (.clk, .rst, .en(latch_en), .d(mux_y), .q(latch_q));

  slayer u_slayer (
    .clk, .rst,
    .run (sl_run), .pair (sl_pair), .din (latch_q),
    .a_addr, .a_data, .b_addr, .b_data,
    .dout (sl_q)
  );

  player u_player (.d(sl_q), .q(p_q));

  suc_controller #(.ROUNDS(ROUNDS)) u_ctrl (
    .clk, .rst, .start, .ready,
    .mux_sel, .latch_en, .sl_run, .sl_pair
  );

endmodule
