// sync2: two-flip-flop synchroniser for a single-bit level signal entering
// the cipher clock domain, used for the start and reset inputs that come from
// processor GPIOs. The output follows the input two rising clock edges later.
// It has no reset of its own. The paper does not describe it; it is added here
// because the GPIOs and the cipher run on different clocks.
module sync2 (
  input  logic clk,
  input  logic d,
  output logic q
);

  logic meta, q_r;

  always_ff @(posedge clk) begin
    meta <= d;
    q_r  <= meta;
  end

  assign q = q_r;

endmodule
