// lsram: the S-box memory, a 2048 x 8 SRAM with two read ports and one
// write port, modelling one LSRAM block configured as 2k x 8.
//
// The eight 8-bit S-boxes sit one after another: address {s, x} (3-bit S-box
// number s, 8-bit input x) holds IS_s(x). Read ports A and B are synchronous:
// an address presented in one cycle gives its byte in the next, so the S-layer
// uses an "address" cycle followed by a "data" cycle, as in the paper's timing
// diagram. Write port C is clocked by the bus clock (wclk) and is used only
// while the S-boxes are (re)loaded; the read ports run on the cipher clock
// (rclk). The 2k x 8 shape, the two read ports and the separate write port are
// the paper's; the paper's figure prints the port data as 11 bits, while the
// text gives 8-bit data, which is what this model uses. The contents are not
// reset: after power-on they are undefined until written, as in an SRAM.
module lsram #(
  parameter int unsigned ADDR_W = 11,
  parameter int unsigned DATA_W = 8
) (
  // read side (cipher clock)
  input  logic              rclk,
  input  logic [ADDR_W-1:0] a_addr,
  output logic [DATA_W-1:0] a_data,
  input  logic [ADDR_W-1:0] b_addr,
  output logic [DATA_W-1:0] b_data,
  // write side (bus clock)
  input  logic              wclk,
  input  logic              c_we,
  input  logic [ADDR_W-1:0] c_addr,
  input  logic [DATA_W-1:0] c_data
);

  logic [DATA_W-1:0] mem [1 << ADDR_W];

  always_ff @(posedge wclk) begin
    if (c_we) mem[c_addr] <= c_data;
  end

  always_ff @(posedge rclk) begin
    a_data <= mem[a_addr];
    b_data <= mem[b_addr];
  end

endmodule
