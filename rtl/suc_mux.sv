// suc_mux: the 64-bit two-way multiplexer in front of the round latch.
//
// With sel = 0 it passes the challenge from the APB interface (tx); with
// sel = 1 it passes the permuted output of the previous S-layer (the PLayer
// output), closing the round loop. The controller holds sel at 0 while idle
// and at 1 from the second cycle of an operation on, as the paper describes.
// Purely combinational.
module suc_mux
  import suc_pkg::*;
(
  input  logic   sel,
  input  block_t tx,      // challenge from the APB interface
  input  block_t fb,      // PLayer output
  output block_t y
);

  always_comb y = sel ? fb : tx;

endmodule
