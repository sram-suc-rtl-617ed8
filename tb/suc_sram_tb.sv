// suc_sram_tb: loads random bytes into the S-box memory over APB (one byte per
// word at 4*address, with random upper data bits that must be ignored), reads
// them back through read ports A and B, and checks that an APB read returns
// zero with PSLVERR so the contents can never be read over the bus.
`timescale 1ns/1ps
module suc_sram_tb;
  import suc_pkg::*;
  logic pclk = 0, clk = 0, presetn = 0;
  always #5   pclk = ~pclk;
  always #2.5 clk  = ~clk;
  apb_req_t apb_req = '0;
  apb_rsp_t apb_rsp;
  logic [10:0] a_addr = 0, b_addr = 0;
  logic [7:0]  a_data, b_data;
  logic [7:0]  shadow [2048];
  int checks = 0, failures = 0;

  suc_sram dut (.pclk, .presetn, .apb_req, .apb_rsp, .clk, .a_addr, .a_data, .b_addr, .b_data);

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

  initial begin
    logic err;
    logic [31:0] d;
    repeat (3) @(posedge pclk);
    presetn = 1;
    for (int a = 0; a < 2048; a++) begin
      d = $urandom;
      shadow[a] = d[7:0];
      apb_write(16'(4 * a), d, err);
      check(!err, "write accepted");
    end
    for (int a = 0; a < 2048; a++) begin
      @(negedge clk); a_addr = 11'(a); b_addr = 11'(a ^ 11'h7ff);
      @(negedge clk);
      check(a_data == shadow[a] && b_data == shadow[a ^ 11'h7ff], $sformatf("read ports at %0d", a));
    end
    for (int a = 0; a < 16; a++) begin
      apb_read(16'(4 * $urandom_range(2047)), d, err);
      check(err && d == 0, "bus read refused");
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
