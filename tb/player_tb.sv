// player_tb: checks the bit permutation on single-bit inputs (bit 8i+j must
// land on bit 8j+i) and on random words against the reference model, and
// checks that applying it twice gives the input back.
`timescale 1ns/1ps
module player_tb;
  import suc_pkg::*;
  import suc_tb_pkg::*;
  block_t d, q, q2;
  int checks = 0, failures = 0;

  player dut  (.d(d), .q(q));
  player dut2 (.d(q), .q(q2));

  initial begin
    for (int i = 0; i < 8; i++)
      for (int j = 0; j < 8; j++) begin
        d = 64'd1 << (8 * i + j); #1;
        checks++;
        if (q !== 64'd1 << (8 * j + i)) begin failures++; $display("FAIL bit %0d,%0d", i, j); end
      end
    for (int k = 0; k < 200; k++) begin
      d = {$urandom, $urandom}; #1;
      checks += 2;
      if (q !== ref_perm(d)) failures++;
      if (q2 !== d) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #10us; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
