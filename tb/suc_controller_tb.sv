// suc_controller_tb: records the controller's outputs cycle by cycle during
// an operation and compares them with the schedule worked out from the cipher
// structure: cycle 1 loads the latch from the challenge (mux_sel = 0); then
// 16 S-layers of 8 cycles (pair 0,0,1,1,2,2,3,3), each of the first 15
// followed by one latch cycle with mux_sel = 1; ready exactly 144 clock edges
// after start is first sampled, held while start stays high, cleared one
// cycle after start falls. Also aborts an operation with rst.
`timescale 1ns/1ps
module suc_controller_tb;
  logic clk = 0, rst = 1, start = 0;
  logic ready, mux_sel, latch_en, sl_run;
  logic [1:0] sl_pair;
  int checks = 0, failures = 0;
  always #2.5 clk = ~clk;

  suc_controller dut (.clk, .rst, .start, .ready, .mux_sel, .latch_en, .sl_run, .sl_pair);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic one_op();
    int k, s;
    @(negedge clk);
    check(!ready && !mux_sel && !latch_en && !sl_run, "idle outputs");
    start = 1; #0.1;
    // cycle 1
    check(latch_en && !mux_sel && !sl_run && !ready, "cycle 1: latch loads the challenge");
    for (int c = 2; c <= 144; c++) begin
      @(negedge clk);
      k = c - 2; s = k % 9;
      if (s < 8) begin
        check(sl_run && !latch_en && mux_sel && sl_pair == 2'(s / 2) && !ready,
              $sformatf("cycle %0d: S-layer step %0d", c, s));
      end else begin
        check(latch_en && !sl_run && mux_sel && !ready,
              $sformatf("cycle %0d: latch loads the PLayer output", c));
      end
    end
    for (int h = 0; h < 10; h++) begin
      @(negedge clk);
      check(ready && !latch_en && !sl_run && mux_sel, "ready held");
    end
    start = 0;
    @(negedge clk);
    check(!ready && !mux_sel, "back to NOP after start falls");
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst = 0;
    one_op();
    one_op();
    // abort with reset in the middle of an operation
    @(negedge clk); start = 1;
    repeat (50) @(negedge clk);
    rst = 1; #0.1;
    check(!ready && !sl_run && !mux_sel, "reset returns to NOP");
    start = 0;
    @(negedge clk); rst = 0;
    one_op();
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100us; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
