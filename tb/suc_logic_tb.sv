// suc_logic_tb: the cipher logic with an S-box memory in the testbench. The
// memory is loaded with eight involutive 8-bit S-boxes; each test writes a
// challenge over APB, raises start, counts clock edges until ready (must be
// 144), reads the response over APB and compares it with the reference
// model, then feeds it back and expects the challenge again (involution).
`timescale 1ns/1ps
module suc_logic_tb;
  import suc_pkg::*;
  import suc_tb_pkg::*;
  logic pclk = 0, clk = 0, presetn = 0, rst = 1, start = 0, ready;
  always #5   pclk = ~pclk;
  always #2.5 clk  = ~clk;
  apb_req_t apb_req = '0;
  apb_rsp_t apb_rsp;
  logic [10:0] a_addr, b_addr, c_addr = 0;
  logic [7:0]  a_data, b_data, c_data = 0;
  logic c_we = 0;
  table8_t tab;
  int checks = 0, failures = 0;

  lsram mem (.rclk(clk), .a_addr, .a_data, .b_addr, .b_data, .wclk(pclk), .c_we, .c_addr, .c_data);
  suc_logic dut (.pclk, .presetn, .apb_req, .apb_rsp, .clk, .rst, .start, .ready,
                 .a_addr, .a_data, .b_addr, .b_data);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic apb_write(input logic [15:0] a, input logic [31:0] d, output logic err);
    @(posedge pclk); #1;
    apb_req = '{paddr: a, psel: 1'b1, penable: 1'b0, pwrite: 1'b1, pwdata: d};
    @(posedge pclk); #1;
    apb_req.penable = 1'b1;
    #1; while (!apb_rsp.pready) @(posedge pclk);
    err = apb_rsp.pslverr;
    @(posedge pclk); #1;
    apb_req = '0;
  endtask

  task automatic apb_read(input logic [15:0] a, output logic [31:0] d, output logic err);
    @(posedge pclk); #1;
    apb_req = '{paddr: a, psel: 1'b1, penable: 1'b0, pwrite: 1'b0, pwdata: '0};
    @(posedge pclk); #1;
    apb_req.penable = 1'b1;
    #1; while (!apb_rsp.pready) @(posedge pclk);
    d = apb_rsp.prdata;
    err = apb_rsp.pslverr;
    @(posedge pclk); #1;
    apb_req = '0;
  endtask

  task automatic run_op(input logic [63:0] x, output logic [63:0] y);
    logic err;
    logic [31:0] lo, hi;
    int cyc;
    apb_write(16'h0, x[31:0], err);
    apb_write(16'h4, x[63:32], err);
    @(negedge clk); start = 1;
    cyc = 0;
    do begin @(posedge clk); cyc++; #0.1; end while (!ready && cyc < 1000);
    check(cyc == 144, $sformatf("latency %0d, expected 144", cyc));
    apb_read(16'h8, lo, err);
    apb_read(16'hC, hi, err);
    y = {hi, lo};
    @(negedge clk); start = 0;
    repeat (2) @(negedge clk);
  endtask

  initial begin
    logic [63:0] x, y, z;
    gen_tables(tab, 5);
    for (int a = 0; a < 2048; a++) begin
      @(negedge pclk); c_we = 1; c_addr = 11'(a); c_data = tab[a / 256][a % 256];
    end
    @(negedge pclk); c_we = 0; presetn = 1;
    @(negedge clk); rst = 0;
    for (int i = 0; i < 20; i++) begin
      x = {$urandom, $urandom};
      run_op(x, y);
      check(y == ref_cipher(tab, x, FULL_ROUNDS), $sformatf("response for %h", x));
      run_op(y, z);
      check(z == x, "involution");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #500us; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
