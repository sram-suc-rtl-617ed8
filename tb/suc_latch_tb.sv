// suc_latch_tb: random data with a random enable; the register must take d
// only at a clock edge with en high, keep its value otherwise, and clear on rst.
`timescale 1ns/1ps
module suc_latch_tb;
  import suc_pkg::*;
  logic clk = 0, rst = 1, en = 0;
  block_t d = '0, q, expect_q;
  int checks = 0, failures = 0;
  always #2.5 clk = ~clk;

  suc_latch dut (.clk, .rst, .en, .d, .q);

  initial begin
    repeat (2) @(negedge clk);
    checks++; if (q !== '0) failures++;
    rst = 0;
    expect_q = '0;
    for (int i = 0; i < 300; i++) begin
      @(negedge clk);
      d = {$urandom, $urandom}; en = 1'($urandom);
      if (en) expect_q = d;
      @(negedge clk);
      en = 0; d = ~d;
      checks++;
      if (q !== expect_q) begin failures++; $display("FAIL cycle %0d", i); end
    end
    rst = 1; #1;
    checks++; if (q !== '0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100us; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
