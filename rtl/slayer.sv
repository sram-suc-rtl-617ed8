// slayer: the substitution layer. It looks up all eight S-boxes of one round
// in the S-box memory, two at a time, and collects the 64-bit result in its
// output register.
//
// The memory has two synchronous read ports, so each pair of S-boxes takes two
// cycles: an address cycle, in which port A gets {2p, byte 2p of din} and
// port B gets {2p+1, byte 2p+1 of din}, and a data cycle, in which the two
// returned bytes are written into bytes 2p and 2p+1 of dout. The pair number p
// (0..3) is the 2-bit counter given by the controller; while run is high the
// layer's own state machine alternates address and data cycles, so the four
// pairs take 8 cycles. dout keeps its value while run is low: between rounds
// it feeds the PLayer, and after the last round it is the response.
// Interface: run must stay high for exactly 8 cycles and pair must advance
// after every data cycle. The two-ports-per-cycle scheme and the 8-cycle
// layer are the paper's; the pairing order of the S-boxes is this design's.
module slayer
  import suc_pkg::*;
(
  input  logic                  clk,
  input  logic                  rst,
  input  logic                  run,
  input  logic [PAIR_W-1:0]     pair,
  input  block_t                din,      // from the latch
  output logic [RAM_ADDR_W-1:0] a_addr,
  input  logic [SBOX_W-1:0]     a_data,
  output logic [RAM_ADDR_W-1:0] b_addr,
  input  logic [SBOX_W-1:0]     b_data,
  output block_t                dout
);

  // phase (address or data) of the current cycle
  typedef enum logic {
    SL_ADDR = 1'b0,
    SL_DATA = 1'b1
  } sl_phase_t;

  sl_phase_t phase;

  logic [SBOX_SEL_W-1:0] sa, sb;   // S-box numbers of the pair
  assign sa = {pair, 1'b0};
  assign sb = {pair, 1'b1};

  assign a_addr = {sa, din[SBOX_W*sa +: SBOX_W]};
  assign b_addr = {sb, din[SBOX_W*sb +: SBOX_W]};

  // a layer always begins with an address cycle when run rises
  always_ff @(posedge clk or posedge rst) begin
    if (rst)      phase <= SL_ADDR;
    else if (!run) phase <= SL_ADDR;
    else          phase <= (phase == SL_ADDR) ? SL_DATA : SL_ADDR;
  end

  always_ff @(posedge clk or posedge rst) begin
    if (rst) dout <= '0;
    else if (run && phase == SL_DATA) begin
      dout[SBOX_W*sa +: SBOX_W] <= a_data;
      dout[SBOX_W*sb +: SBOX_W] <= b_data;
    end
  end

endmodule
