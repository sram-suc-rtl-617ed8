// suc_mux_tb: drives random challenge and feedback words with both select
// values and checks the 64-bit output.
`timescale 1ns/1ps
module suc_mux_tb;
  import suc_pkg::*;
  logic sel;
  block_t tx, fb, y;
  int checks = 0, failures = 0;

  suc_mux dut (.sel, .tx, .fb, .y);

  initial begin
    for (int i = 0; i < 200; i++) begin
      tx = {$urandom, $urandom}; fb = {$urandom, $urandom}; sel = 1'($urandom);
      #1;
      checks++;
      if (y !== (sel ? fb : tx)) begin failures++; $display("FAIL sel=%0d", sel); end
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
