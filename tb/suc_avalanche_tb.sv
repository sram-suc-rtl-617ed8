// suc_avalanche_tb: the avalanche workload. Several SRAM-SUC instances that
// differ only in their number of rounds (ROUNDS = 0, 1, 3, 7, 15, 31 full
// rounds, i.e. 1, 2, 4, 8, 16 and 32 S-layers; 15 is the design's default)
// run side by side on the same S-box table. For 20 random S-box tables (each
// one 8-bit S-box from a 3-round Feistel network, used in all eight positions)
// and 50 random challenges per table,
// each challenge and each of its 64 one-bit neighbours is encrypted; the
// Hamming distance between the two responses is collected per instance.
// Every response is also checked against the reference model and every
// latency against 9*ROUNDS + 9 cycles. Printed: mean distance per number of
// S-layers and the distance histogram of the default instance, whose mean must
// lie near half the block (32 bits). The sample is much smaller than a full
// statistical study; the bounds checked are loose accordingly.
`timescale 1ns/1ps
module suc_avalanche_tb;
  import suc_pkg::*;
  import suc_tb_pkg::*;

  localparam int N_INST = 6;
  localparam int unsigned RLIST [N_INST] = '{0, 1, 3, 7, 15, 31};
  localparam int N_TABLES = 20;
  localparam int N_NUMS   = 50;

  logic pclk = 0, clk = 0, presetn = 0, rst = 1, start = 0;
  always #5   pclk = ~pclk;
  always #2.5 clk  = ~clk;
  apb_req_t apb_req;
  apb_rsp_t apb_rsp, rsp [N_INST];
  logic [N_INST-1:0] ready;
  logic [10:0] c_addr = 0;
  logic [7:0]  c_data = 0;
  logic        c_we = 0;

  for (genvar g = 0; g < N_INST; g++) begin : inst
    logic [10:0] a_addr, b_addr;
    logic [7:0]  a_data, b_data;
    lsram mem (.rclk(clk), .a_addr, .a_data, .b_addr, .b_data, .wclk(pclk), .c_we, .c_addr, .c_data);
    suc_logic #(.ROUNDS(RLIST[g])) dut (.pclk, .presetn, .apb_req, .apb_rsp(rsp[g]), .clk, .rst,
      .start, .ready(ready[g]), .a_addr, .a_data, .b_addr, .b_data);
  end
  assign apb_rsp = rsp[0];   // all instances answer alike to writes

  int checks = 0, failures = 0;
  table8_t tab;
  real hd_sum [N_INST];
  int  hd_n   [N_INST];
  int  hist   [65];

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

  // reads one register from every instance in a single broadcast transfer
  task automatic apb_read_all(input logic [15:0] a, output logic [31:0] d [N_INST]);
    @(posedge pclk); #1;
    apb_req = '{paddr: a, psel: 1'b1, penable: 1'b0, pwrite: 1'b0, pwdata: '0};
    @(posedge pclk); #1;
    apb_req.penable = 1'b1;
    #1;
    for (int g = 0; g < N_INST; g++) d[g] = rsp[g].prdata;
    @(posedge pclk); #1;
    apb_req = '0;
  endtask

  task automatic run_all(input logic [63:0] x, output logic [63:0] y [N_INST]);
    logic err;
    logic [31:0] lo [N_INST], hi [N_INST];
    int cyc;
    int seen [N_INST];
    apb_write(16'h0, x[31:0], err);
    apb_write(16'h4, x[63:32], err);
    @(negedge clk); start = 1;
    cyc = 0;
    for (int g = 0; g < N_INST; g++) seen[g] = -1;
    while (!(&ready) && cyc < 2000) begin
      @(posedge clk); cyc++; #0.1;
      for (int g = 0; g < N_INST; g++) if (ready[g] && seen[g] < 0) seen[g] = cyc;
    end
    for (int g = 0; g < N_INST; g++)
      check(seen[g] == int'(9 * RLIST[g] + 9), $sformatf("latency of ROUNDS=%0d: %0d", RLIST[g], seen[g]));
    apb_read_all(16'h8, lo);
    apb_read_all(16'hC, hi);
    for (int g = 0; g < N_INST; g++) y[g] = {hi[g], lo[g]};
    @(negedge clk); start = 0;
    repeat (2) @(negedge clk);
  endtask

  initial begin : main
    logic [63:0] x, xf;
    logic [63:0] y [N_INST], yf [N_INST];
    int d;
    real mean;
    apb_req = '0;
    for (int g = 0; g < N_INST; g++) begin hd_sum[g] = 0; hd_n[g] = 0; end
    for (int h = 0; h <= 64; h++) hist[h] = 0;
    repeat (3) @(posedge pclk);
    presetn = 1;
    @(negedge clk); rst = 0;
    for (int t = 0; t < N_TABLES; t++) begin
      gen_tables_one(tab, 3);
      for (int a = 0; a < 2048; a++) begin
        @(negedge pclk); c_we = 1; c_addr = 11'(a); c_data = tab[a / 256][a % 256];
      end
      @(negedge pclk); c_we = 0;
      for (int n = 0; n < N_NUMS; n++) begin
        x = {$urandom, $urandom};
        run_all(x, y);
        for (int g = 0; g < N_INST; g++)
          check(y[g] == ref_cipher(tab, x, RLIST[g]), "response matches the model");
        for (int b = 0; b < 64; b++) begin
          xf = x ^ (64'd1 << b);
          run_all(xf, yf);
          for (int g = 0; g < N_INST; g++) begin
            check(yf[g] == ref_cipher(tab, xf, RLIST[g]), "response matches the model");
            d = $countones(y[g] ^ yf[g]);
            hd_sum[g] += d;
            hd_n[g]++;
            if (RLIST[g] == FULL_ROUNDS) hist[d]++;
          end
        end
      end
    end
    for (int g = 0; g < N_INST; g++) begin
      mean = hd_sum[g] / hd_n[g];
      $display("avalanche: %0d S-layers, %0d samples, mean output bit changes %0.2f",
               RLIST[g] + 1, hd_n[g], mean);
      if (RLIST[g] == 0) check(mean <= 8.0, "one S-layer changes at most one byte");
      if (RLIST[g] >= 3) check(mean > 30.0 && mean < 34.0, "mean near 32 bits");
    end
    for (int h = 0; h <= 64; h++)
      if (hist[h] > 0) $display("avalanche histogram (16 S-layers): %0d bits: %0d", h, hist[h]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin : watchdog
    #1s;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
