// suc_enroll_tb: the enrollment workload. A trusted party collects
// challenge-response pairs (CRPs) from a freshly reinitialised core: the
// S-box table is loaded, then 16, 32, 1024 and 2048 random challenges are sent
// through the APB registers and the responses read back, as the processor
// would do for each CRP. Every response is compared with the reference model
// and every latency with 2 + 144 cipher cycles; the cipher time and the data
// size (16 bytes per pair) of each set are printed. The bus traffic and the
// link to the trusted party are not part of the core and are not timed.
`timescale 1ns/1ps
module suc_enroll_tb;
  import suc_pkg::*;
  import suc_tb_pkg::*;

  logic pclk = 0, clk = 0, presetn = 0;
  logic rst_gpio = 1, start_gpio = 0;
  logic ready;
  apb_req_t apb_req;
  apb_rsp_t apb_rsp;
  always #5   pclk = ~pclk;
  always #2.5 clk  = ~clk;

  suc_core dut (.pclk, .presetn, .apb_req, .apb_rsp, .clk, .rst_gpio, .start_gpio, .ready);

  int checks = 0, failures = 0;
  table8_t tab;
  int sets [4] = '{16, 32, 1024, 2048};

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL: %s", what); end
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

  task automatic crp(input logic [63:0] x, output logic [63:0] y, output int cyc);
    logic err;
    logic [31:0] lo, hi;
    apb_write(16'h0000, x[31:0], err);
    apb_write(16'h0004, x[63:32], err);
    @(posedge pclk); #1; start_gpio = 1;
    cyc = 0;
    while (!ready && cyc < 1000) begin @(posedge clk); #0.1; cyc++; end
    apb_read(16'h0008, lo, err);
    apb_read(16'h000C, hi, err);
    @(posedge pclk); #1; start_gpio = 0;
    repeat (3) @(posedge clk);
    y = {hi, lo};
  endtask

  initial begin : main
    logic err;
    logic [63:0] x, y;
    int cyc, suc_cycles;
    apb_req = '0;
    repeat (4) @(posedge pclk);
    presetn = 1;
    rst_gpio = 0;
    repeat (4) @(posedge clk);
    gen_tables(tab, 3);
    for (int a = 0; a < 2048; a++)
      apb_write(16'h2000 + 16'(4 * a), {24'h0, tab[a / 256][a % 256]}, err);
    foreach (sets[s]) begin
      suc_cycles = 0;
      for (int i = 0; i < sets[s]; i++) begin
        x = {$urandom, $urandom};
        crp(x, y, cyc);
        suc_cycles += cyc - 2;
        check(cyc == 146, $sformatf("latency %0d", cyc));
        check(y == ref_cipher(tab, x, FULL_ROUNDS), $sformatf("CRP %0d of set %0d", i, sets[s]));
      end
      $display("enrollment: %0d pairs, %0d bytes, %0d cipher cycles = %0.2f us at 200 MHz",
               sets[s], 16 * sets[s], suc_cycles, suc_cycles * 0.005);
      check(suc_cycles == 144 * sets[s], "144 cycles per pair");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin : watchdog
    #20ms;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
