// slayer_tb: the S-layer against a loaded S-box memory. The memory is filled
// with eight involutive 8-bit S-boxes through its write port; the testbench
// then plays the controller's part (latch holds din, run high for 8 cycles,
// pair counting 0,0,1,1,2,2,3,3) and checks that after each data cycle the
// right two bytes of dout hold the S-box outputs, that the whole layer takes
// exactly 8 cycles, and that dout holds its value while run is low.
`timescale 1ns/1ps
module slayer_tb;
  import suc_pkg::*;
  import suc_tb_pkg::*;
  logic clk = 0, rst = 1, run = 0;
  logic [1:0] pair = 0;
  block_t din = '0, dout, expect_q;
  logic [10:0] a_addr, b_addr, c_addr = 0;
  logic [7:0] a_data, b_data, c_data = 0;
  logic c_we = 0;
  table8_t tab;
  int checks = 0, failures = 0;
  always #2.5 clk = ~clk;

  lsram mem (.rclk(clk), .a_addr, .a_data, .b_addr, .b_data, .wclk(clk), .c_we, .c_addr, .c_data);
  slayer dut (.clk, .rst, .run, .pair, .din, .a_addr, .a_data, .b_addr, .b_data, .dout);

  initial begin
    gen_tables(tab, 3);
    for (int a = 0; a < 2048; a++) begin
      @(negedge clk); c_we = 1; c_addr = 11'(a); c_data = tab[a / 256][a % 256];
    end
    @(negedge clk); c_we = 0; rst = 0;
    for (int t = 0; t < 50; t++) begin
      din = {$urandom, $urandom};
      expect_q = ref_slayer(tab, din);
      @(negedge clk);
      run = 1;
      for (int s = 0; s < 8; s++) begin
        pair = 2'(s / 2);
        @(negedge clk);
        if (s % 2 == 1) begin
          checks++;
          if (dout[16 * (s / 2) +: 16] !== expect_q[16 * (s / 2) +: 16]) begin
            failures++; $display("FAIL pair %0d", s / 2);
          end
        end
      end
      run = 0;
      checks++;
      if (dout !== expect_q) begin failures++; $display("FAIL layer %h -> %h", din, dout); end
      din = ~din;
      repeat (3) @(negedge clk);
      checks++;
      if (dout !== expect_q) begin failures++; $display("FAIL dout not held"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #200us; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
