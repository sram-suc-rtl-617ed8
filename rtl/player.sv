// player: the involutive 64-bit bit permutation between S-layers.
//
// Output bit j of S-box i feeds input bit i of S-box j in the next round
// ([IS_i]_j = [IS_j]_i). With S-box i on bits [8i+7:8i], bit 8*i+j moves to
// bit 8*j+i: the 64 bits, seen as an 8 x 8 matrix, are transposed. Applying
// the permutation twice gives the identity, which keeps the whole cipher an
// involution. It is wiring only, with no logic and no delay.
module player
  import suc_pkg::*;
(
  input  block_t d,
  output block_t q
);

  always_comb begin
    for (int i = 0; i < N_SBOX; i++)
      for (int j = 0; j < SBOX_W; j++)
        q[SBOX_W*j + i] = d[SBOX_W*i + j];
  end

endmodule
