// suc_apb_if_tb: writes random 64-bit challenges as two 32-bit words and
// checks the tx output and the read-back, drives random responses on rx and
// reads them as two words, and checks that writes to the response words are
// refused with PSLVERR and change nothing.
`timescale 1ns/1ps
module suc_apb_if_tb;
  import suc_pkg::*;
  logic pclk = 0, presetn = 0;
  always #5 pclk = ~pclk;
  apb_req_t apb_req = '0;
  apb_rsp_t apb_rsp;
  block_t tx, rx = '0;
  int checks = 0, failures = 0;

  suc_apb_if dut (.pclk, .presetn, .apb_req, .apb_rsp, .tx, .rx);

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
    logic [31:0] d, lo, hi;
    logic [63:0] x;
    repeat (3) @(posedge pclk);
    check(tx == '0, "challenge cleared by reset");
    presetn = 1;
    for (int i = 0; i < 50; i++) begin
      x = {$urandom, $urandom};
      apb_write(16'h0, x[31:0], err);  check(!err, "write low");
      apb_write(16'h4, x[63:32], err); check(!err, "write high");
      check(tx == x, $sformatf("tx %h expected %h", tx, x));
      apb_read(16'h0, lo, err); apb_read(16'h4, hi, err);
      check({hi, lo} == x, "challenge read back");
      rx = {$urandom, $urandom};
      apb_read(16'h8, lo, err); check(!err, "read low");
      apb_read(16'hC, hi, err); check(!err, "read high");
      check({hi, lo} == rx, $sformatf("rx read %h expected %h", {hi, lo}, rx));
      apb_write(16'h8, $urandom, err); check(err, "response low is read only");
      apb_write(16'hC, $urandom, err); check(err, "response high is read only");
      check(tx == x, "read-only write left the challenge alone");
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
