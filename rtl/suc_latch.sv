// suc_latch: the 64-bit round register ("Latch" in the paper) that holds the
// S-layer input for one round.
//
// It is an edge-triggered register with an enable: when en is high at a rising
// clock edge it takes d, otherwise it keeps its value. The controller pulses
// en for one cycle at the start of every round. The paper calls this part a
// latch but describes it as a 64-bit register with an enable input, which is
// what is built here; the asynchronous clear on rst is this design's choice.
module suc_latch
  import suc_pkg::*;
(
  input  logic   clk,
  input  logic   rst,
  input  logic   en,
  input  block_t d,
  output block_t q
);

  always_ff @(posedge clk or posedge rst) begin
    if (rst)     q <= '0;
    else if (en) q <= d;
  end

endmodule
