// suc_core_tb: end-to-end test of the SRAM-SUC core at its default size.
//
// Flow, as the processor software would do it: reset; check that the Serpent
// S-boxes the model uses are optimal; build eight involutive 8-bit S-boxes
// (3-round Feistel networks of 4-bit S-boxes) and load all 2048 bytes over
// APB; try to read them back (must be refused); then, for a set of random
// challenges, write the challenge, raise start, wait for ready, read the
// response and compare it with the reference model, check the latency
// (2 synchroniser cycles + 144 cycles), and feed the response back to check
// that the cipher is an involution. It also aborts one operation with the
// Reset GPIO, writes to a read-only register and to an unmapped address, and
// counts how often each of these mechanisms happened.
`timescale 1ns/1ps
module suc_core_tb;
  import suc_pkg::*;
  import suc_tb_pkg::*;

  localparam int unsigned N_OPS   = 12;
  localparam int unsigned LATENCY = 2 + 144;

  logic pclk = 0, clk = 0, presetn = 0;
  logic rst_gpio = 1, start_gpio = 0;
  logic ready;
  apb_req_t apb_req;
  apb_rsp_t apb_rsp;

  always #5   pclk = ~pclk;   // 100 MHz
  always #2.5 clk  = ~clk;    // 200 MHz

  suc_core dut (.pclk, .presetn, .apb_req, .apb_rsp, .clk, .rst_gpio, .start_gpio, .ready);

  int checks = 0, failures = 0;
  table8_t tab;

  // mechanism counters
  int n_sbox_writes = 0, n_read_denied = 0, n_ro_denied = 0, n_unmapped = 0;
  int n_ops = 0, n_involution = 0, n_reset_abort = 0;
  int n_mux_chal = 0, n_mux_fb = 0, n_ready_hold = 0;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
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

  // mux select observed in the cycle the latch loads
  always @(posedge clk) if (dut.u_logic.latch_en && !dut.rst) begin
    if (dut.u_logic.mux_sel) n_mux_fb++;
    else                     n_mux_chal++;
  end

  task automatic run_suc(input logic [63:0] x, output logic [63:0] y);
    logic err;
    logic [31:0] lo, hi;
    int cyc;
    apb_write(16'h0000, x[31:0], err);  check(!err, "challenge low write");
    apb_write(16'h0004, x[63:32], err); check(!err, "challenge high write");
    @(posedge pclk); #1; start_gpio = 1;
    cyc = 0;
    while (!ready) begin @(posedge clk); #0.1; cyc++; end
    check(cyc == LATENCY, $sformatf("latency %0d, expected %0d", cyc, LATENCY));
    apb_read(16'h0008, lo, err); check(!err, "response low read");
    apb_read(16'h000C, hi, err); check(!err, "response high read");
    check(ready, "ready held while start is high");
    if (ready) n_ready_hold++;
    @(posedge pclk); #1; start_gpio = 0;
    repeat (4) @(posedge clk);
    check(!ready, "ready falls after start is lowered");
    y = {hi, lo};
    n_ops++;
  endtask

  initial begin : main
    logic err;
    logic [31:0] d;
    logic [63:0] x, y, z;
    apb_req = '0;
    repeat (4) @(posedge pclk);
    presetn = 1;
    repeat (4) @(posedge clk);
    rst_gpio = 0;
    repeat (4) @(posedge clk);

    for (int n = 0; n < 8; n++) begin
      check(diff4(n) == 4, $sformatf("Serpent S%0d differential uniformity", n));
      check(lin4(n) == 8, $sformatf("Serpent S%0d linearity", n));
    end

    // reinitialisation: load the eight S-boxes
    gen_tables(tab, 3);
    for (int s = 0; s < 8; s++)
      for (int v = 0; v < 256; v++)
        check(tab[s][tab[s][v]] == 8'(v), "8-bit S-box is an involution");
    for (int a = 0; a < 2048; a++) begin
      apb_write(16'h2000 + 16'(4 * a), {24'h0, tab[a / 256][a % 256]}, err);
      check(!err, "S-box write accepted");
      n_sbox_writes++;
    end

    // the S-boxes cannot be read back
    for (int a = 0; a < 4; a++) begin
      apb_read(16'h2000 + 16'(4 * a), d, err);
      check(err && d == 0, "S-box read refused");
      if (err) n_read_denied++;
    end
    apb_write(16'h0008, 32'hdead_beef, err);
    check(err, "write to response register refused");
    if (err) n_ro_denied++;
    apb_write(16'h4000, 32'h1, err);
    check(err, "unmapped address answered with error");
    if (err) n_unmapped++;

    // a challenge written can be read back
    apb_write(16'h0000, 32'h1234_5678, err);
    apb_read(16'h0000, d, err);
    check(d == 32'h1234_5678, "challenge register read back");

    // an operation aborted by the Reset GPIO, then a complete one
    x = {$urandom, $urandom};
    apb_write(16'h0000, x[31:0], err);
    apb_write(16'h0004, x[63:32], err);
    @(posedge pclk); #1; start_gpio = 1;
    repeat (40) @(posedge clk);
    #0.1 rst_gpio = 1;
    repeat (3) @(posedge clk);
    check(!ready && dut.u_logic.u_ctrl.state == ST_NOP, "reset returns the controller to NOP");
    if (dut.u_logic.u_ctrl.state == ST_NOP) n_reset_abort++;
    start_gpio = 0;
    #0.1 rst_gpio = 0;
    repeat (4) @(posedge clk);

    for (int i = 0; i < int'(N_OPS); i++) begin
      x = (i == 0) ? 64'h0 : (i == 1) ? '1 : {$urandom, $urandom};
      run_suc(x, y);
      check(y == ref_cipher(tab, x, FULL_ROUNDS),
            $sformatf("response %h for challenge %h, expected %h", y, x,
                      ref_cipher(tab, x, FULL_ROUNDS)));
      run_suc(y, z);
      check(z == x, $sformatf("involution: SUC(SUC(%h)) = %h", x, z));
      if (z == x) n_involution++;
    end

    $display("mechanisms: sbox_writes=%0d read_denied=%0d ro_denied=%0d unmapped=%0d",
             n_sbox_writes, n_read_denied, n_ro_denied, n_unmapped);
    $display("mechanisms: ops=%0d involution=%0d reset_abort=%0d mux_chal=%0d mux_fb=%0d ready_hold=%0d",
             n_ops, n_involution, n_reset_abort, n_mux_chal, n_mux_fb, n_ready_hold);
    check(n_sbox_writes == 2048, "all S-box bytes loaded");
    check(n_read_denied > 0, "mechanism: S-box read denied");
    check(n_ro_denied > 0, "mechanism: read-only register");
    check(n_unmapped > 0, "mechanism: unmapped address");
    check(n_reset_abort > 0, "mechanism: reset abort");
    check(n_involution > 0, "mechanism: involution");
    check(n_ready_hold > 0, "mechanism: ready held until start low");
    check(n_mux_chal >= n_ops, "mechanism: mux selects the challenge");
    check(n_mux_fb >= 15 * n_ops, "mechanism: mux selects the PLayer output");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin : watchdog
    #5ms;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
