// suc_controller: the SUC state machine (NOP, RUN, READY) that sequences one
// encryption/decryption of the SRAM-SUC.
//
// NOP: idle, mux_sel = 0 so the latch sees the challenge. When start is high
//   the latch is enabled in that same cycle (cycle 1) and the machine enters
//   RUN.
// RUN: mux_sel = 1, so the latch is fed by the PLayer. Each S-layer takes 8
//   cycles (sl_run high, sl_pair counting 0,0,1,1,2,2,3,3); each of the 15
//   full rounds is followed by one latch cycle that loads the permuted S-layer
//   output. The 16th S-layer has no permutation after it: its output register
//   is the response. That S-layer ends in cycle 1 + 16*8 + 15 = 144.
// READY: ready = 1 until start is taken low, then back to NOP.
// Timing: ready rises 144 clock edges after the edge at which start is first
// seen high. rst (the Reset input) returns the machine to NOP at any time.
// The three states, the start/ready handshake, the mux/latch sequence and the
// 144-cycle figure are the paper's. The paper says "144 cycles ... with 15
// rounds" and that the last round has no PLayer; 144 cycles only come out as
// 15 rounds of S-layer plus PLayer followed by one more S-layer, which is
// what is built. The round and step counters are this design's own.
module suc_controller
  import suc_pkg::*;
#(
  parameter int unsigned ROUNDS = FULL_ROUNDS   // S-layer + PLayer rounds
) (
  input  logic              clk,
  input  logic              rst,
  input  logic              start,
  output logic              ready,
  output logic              mux_sel,
  output logic              latch_en,
  output logic              sl_run,
  output logic [PAIR_W-1:0] sl_pair
);

  suc_state_t state;

  localparam int unsigned STEPS = 2 * PAIRS;           // 8 cycles per S-layer
  localparam int unsigned RND_W = (ROUNDS < 1) ? 1 : $clog2(ROUNDS + 1);

  logic [RND_W-1:0] round;   // number of S-layers already completed
  logic [3:0]       step;    // 0: latch cycle, 1..8: S-layer cycles

  logic last_step;
  assign last_step = (step == 4'(STEPS));

  always_ff @(posedge clk or posedge rst) begin
    if (rst) begin
      state <= ST_NOP;
      round <= '0;
      step  <= '0;
    end else begin
      unique case (state)
        ST_NOP: if (start) begin
          state <= ST_RUN;
          round <= '0;
          step  <= 4'd1;
        end
        ST_RUN: begin
          if (last_step) begin
            if (round == RND_W'(ROUNDS)) begin
              state <= ST_READY;
              step  <= '0;
            end else begin
              round <= round + 1'b1;
              step  <= '0;
            end
          end else begin
            step <= step + 1'b1;
          end
        end
        ST_READY: if (!start) state <= ST_NOP;
        default: state <= ST_NOP;
      endcase
    end
  end

  always_comb begin
    ready    = (state == ST_READY);
    mux_sel  = (state != ST_NOP);
    latch_en = ((state == ST_NOP) && start) || ((state == ST_RUN) && step == 4'd0);
    sl_run   = (state == ST_RUN) && step != 4'd0;
    sl_pair  = PAIR_W'((step - 4'd1) >> 1);
  end

  a_ready_only_in_ready: assert property (@(posedge clk) disable iff (rst)
    ready |-> state == ST_READY);
  a_no_latch_during_slayer: assert property (@(posedge clk) disable iff (rst)
    !(latch_en && sl_run));

endmodule
