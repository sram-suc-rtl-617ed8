// suc_tb_pkg: reference model used by the SRAM-SUC testbenches.
//
// - sbox4: the eight 4-bit S-boxes of the Serpent cipher, used as the
//   "optimal 4-bit S-boxes" the 8-bit S-boxes are built from.
// - gen_sbox8: builds an involutive 8-bit S-box as an r-round balanced Feistel
//   network on two nibbles (high nibble L, low nibble R). Round k does
//   L ^= F_k(R) and then swaps the halves, except after the last round. The
//   round functions are palindromic (F_k = F_{r-1-k}), which makes the whole
//   network its own inverse for odd r.
// - gen_tables_one: the same, with one 8-bit S-box in all eight positions.
// - ref_cipher: the SRAM-SUC cipher computed bit by bit: S-layer, then
//   FULL rounds of (bit permutation, S-layer).
// - lin4 / diff4: linearity and differential uniformity of a 4-bit S-box.
// This model is written independently of the RTL and shares nothing with it
// except the block layout (S-box i on bits [8i+7:8i]).
package suc_tb_pkg;

  typedef logic [7:0] table8_t [8][256];

  function automatic logic [3:0] sbox4(input int unsigned n, input logic [3:0] x);
    logic [3:0] t [8][16] = '{
      '{4'd3, 4'd8, 4'd15,4'd1, 4'd10,4'd6, 4'd5, 4'd11,4'd14,4'd13,4'd4, 4'd2, 4'd7, 4'd0, 4'd9, 4'd12},
      '{4'd15,4'd12,4'd2, 4'd7, 4'd9, 4'd0, 4'd5, 4'd10,4'd1, 4'd11,4'd14,4'd8, 4'd6, 4'd13,4'd3, 4'd4},
      '{4'd8, 4'd6, 4'd7, 4'd9, 4'd3, 4'd12,4'd10,4'd15,4'd13,4'd1, 4'd14,4'd4, 4'd0, 4'd11,4'd5, 4'd2},
      '{4'd0, 4'd15,4'd11,4'd8, 4'd12,4'd9, 4'd6, 4'd3, 4'd13,4'd1, 4'd2, 4'd4, 4'd10,4'd7, 4'd5, 4'd14},
      '{4'd1, 4'd15,4'd8, 4'd3, 4'd12,4'd0, 4'd11,4'd6, 4'd2, 4'd5, 4'd4, 4'd10,4'd9, 4'd14,4'd7, 4'd13},
      '{4'd15,4'd5, 4'd2, 4'd11,4'd4, 4'd10,4'd9, 4'd12,4'd0, 4'd3, 4'd14,4'd8, 4'd13,4'd6, 4'd7, 4'd1},
      '{4'd7, 4'd2, 4'd12,4'd5, 4'd8, 4'd4, 4'd6, 4'd11,4'd14,4'd9, 4'd1, 4'd15,4'd13,4'd3, 4'd10,4'd0},
      '{4'd1, 4'd13,4'd15,4'd0, 4'd14,4'd8, 4'd2, 4'd11,4'd7, 4'd4, 4'd12,4'd10,4'd9, 4'd3, 4'd5, 4'd6}
    };
    return t[n % 8][x];
  endfunction

  // sel[k] picks the Serpent S-box for Feistel round k, k < (r+1)/2
  function automatic logic [7:0] feistel8(input int unsigned sel [8], input int unsigned r,
                                          input logic [7:0] x);
    logic [3:0] l, rr, t;
    int unsigned k, f;
    l  = x[7:4];
    rr = x[3:0];
    for (k = 0; k < r; k++) begin
      f = (k < (r + 1) / 2) ? sel[k] : sel[r - 1 - k];
      l = l ^ sbox4(f, rr);
      if (k != r - 1) begin
        t = l; l = rr; rr = t;
      end
    end
    return {l, rr};
  endfunction

  // builds the eight 8-bit S-boxes from random Serpent S-box choices
  function automatic void gen_tables(output table8_t tab, input int unsigned r);
    int unsigned sel [8];
    for (int s = 0; s < 8; s++) begin
      for (int k = 0; k < 8; k++) sel[k] = $urandom_range(7);
      for (int x = 0; x < 256; x++) tab[s][x] = feistel8(sel, r, 8'(x));
    end
  endfunction

  // one 8-bit S-box, used in all eight positions
  function automatic void gen_tables_one(output table8_t tab, input int unsigned r);
    int unsigned sel [8];
    for (int k = 0; k < 8; k++) sel[k] = $urandom_range(7);
    for (int x = 0; x < 256; x++) begin
      tab[0][x] = feistel8(sel, r, 8'(x));
      for (int s = 1; s < 8; s++) tab[s][x] = tab[0][x];
    end
  endfunction

  function automatic logic [63:0] ref_slayer(input table8_t tab, input logic [63:0] d);
    logic [63:0] q;
    for (int s = 0; s < 8; s++) q[s*8 +: 8] = tab[s][d[s*8 +: 8]];
    return q;
  endfunction

  // output bit k takes input bit (k mod 8)*8 + k/8
  function automatic logic [63:0] ref_perm(input logic [63:0] d);
    logic [63:0] q;
    for (int k = 0; k < 64; k++) q[k] = d[(k % 8) * 8 + k / 8];
    return q;
  endfunction

  function automatic logic [63:0] ref_cipher(input table8_t tab, input logic [63:0] x,
                                             input int unsigned full);
    logic [63:0] v;
    v = ref_slayer(tab, x);
    for (int k = 0; k < int'(full); k++) v = ref_slayer(tab, ref_perm(v));
    return v;
  endfunction

  function automatic int diff4(input int unsigned n);
    int best = 0;
    for (int a = 1; a < 16; a++)
      for (int b = 0; b < 16; b++) begin
        int c = 0;
        for (int x = 0; x < 16; x++)
          if ((sbox4(n, 4'(x)) ^ sbox4(n, 4'(x ^ a))) == 4'(b)) c++;
        if (c > best) best = c;
      end
    return best;
  endfunction

  function automatic int lin4(input int unsigned n);
    int best = 0;
    for (int a = 0; a < 16; a++)
      for (int b = 1; b < 16; b++) begin
        int c = 0;
        for (int x = 0; x < 16; x++)
          if (^(4'(a) & 4'(x)) == ^(4'(b) & sbox4(n, 4'(x)))) c++;
        c = 2 * c - 16;
        if (c < 0) c = -c;
        if (c > best) best = c;
      end
    return best;
  endfunction

endpackage
