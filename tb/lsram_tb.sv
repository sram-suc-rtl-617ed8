// lsram_tb: fills the 2048 x 8 S-box memory through write port C (bus clock)
// with random bytes, then reads every address through ports A and B (cipher
// clock, B walking downwards) and checks each byte one cycle after its address,
// against a shadow copy kept by the testbench. Also checks that a port-C cycle
// without write enable leaves the memory unchanged.
`timescale 1ns/1ps
module lsram_tb;
  logic rclk = 0, wclk = 0;
  always #2.5 rclk = ~rclk;
  always #5   wclk = ~wclk;

  logic [10:0] a_addr = 0, b_addr = 0, c_addr = 0;
  logic [7:0]  a_data, b_data, c_data = 0;
  logic        c_we = 0;
  logic [7:0]  shadow [2048];
  int checks = 0, failures = 0;

  lsram dut (.rclk, .a_addr, .a_data, .b_addr, .b_data, .wclk, .c_we, .c_addr, .c_data);

  initial begin
    for (int a = 0; a < 2048; a++) begin
      @(negedge wclk);
      c_we = 1; c_addr = 11'(a); c_data = 8'($urandom); shadow[a] = c_data;
    end
    @(negedge wclk);
    // a non-write cycle must not change memory
    c_we = 0; c_addr = 11'd5; c_data = ~shadow[5];
    @(negedge wclk);
    for (int a = 0; a < 2048; a++) begin
      @(negedge rclk);
      a_addr = 11'(a); b_addr = 11'(2047 - a);
      @(negedge rclk);
      checks += 2;
      if (a_data !== shadow[a])        begin failures++; $display("FAIL A %0d", a); end
      if (b_data !== shadow[2047 - a]) begin failures++; $display("FAIL B %0d", a); end
    end
    // one-cycle latency: the output changes only at the clock edge
    @(negedge rclk); a_addr = 11'd1;
    @(negedge rclk); a_addr = 11'd2; #1;
    checks++; if (a_data !== shadow[1]) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #200us; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
