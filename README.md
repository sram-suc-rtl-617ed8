# SRAM-SUC: a secret 64-bit cipher in on-chip SRAM, used as a digital PUF

A physically unclonable function (PUF) gives every chip an identity that
cannot be copied. It does this by answering challenges with responses that
only that chip can produce. Analog PUFs are noisy, so they need error
correction, which is slow.

A *secret unknown cipher* (SUC) works differently. Each chip picks its own
random block cipher once, from an on-chip random source, and nobody ever learns
which one. The chip's answer to a challenge is simply that cipher's encryption
of it. The answer is digital, so it is the same every time, and it takes a
fraction of a microsecond.

This RTL is one such cipher for SoC FPGAs, called SRAM-SUC. The cipher's
structure is fixed and the same in every chip. Only its eight 8-bit S-boxes
differ: they are random and stored in a block of fabric SRAM. After every
power-on, software on the chip's processor decrypts the stored S-boxes and
writes them into that SRAM. From then on the processor sends 64-bit challenges
and reads 64-bit responses. Each response takes 144 cycles of the cipher
clock, which is 0.72 µs at 200 MHz.

The design follows the paper *SRAM-SUC: Ultra-Low Latency Robust Digital PUF*
(Mars, Ghandour, Adi). The paper built it on a Microsemi SmartFusion2. The RTL
here is generic SystemVerilog with no vendor primitives.

## The cipher

The block is 64 bits, split into eight bytes. S-box `IS_i` works on bits
`[8i+7:8i]`, so `IS_7` sits at the most significant end.

```
x ──► S ──► P ──► S ──► P ── ... ──► P ──► S ──► y
      └──────── 15 × (S, P) ────────┘      └ final S-layer, no P
```

- **S (substitution layer).** Each byte goes through its own 8-bit S-box
  (`IS_0..IS_7`). Every S-box is an *involution*, meaning `IS(IS(v)) = v`.
  All rounds use the same eight S-boxes.
- **P (permutation layer).** Output bit `j` of S-box `i` becomes input bit `i`
  of S-box `j`. In other words, bit `8i+j` moves to bit `8j+i`. Viewed as an
  8 × 8 bit matrix, the block is transposed. P is also an involution.
- **Rounds.** There are 15 rounds of S followed by P, then one more S-layer.

The chain is palindromic and every layer is its own inverse, so the whole
cipher is an involution: `SUC(SUC(x)) = x`. One circuit therefore encrypts and
decrypts. The testbenches check this on every run.

**Number of rounds.** The paper's text says "144 cycles … with 15 rounds". It
also says the full round "is repeated 15 times" and that the last round has
only a substitution layer. This design has 15 S+P rounds and then a 16th
S-layer. That is the only reading that gives the paper's 144 cycles:

    1 (first latch load) + 16 × 8 (S-layers) + 15 (later latch loads) = 144

The round count is a parameter, `ROUNDS`, with a default of 15.

## Where the S-boxes come from

A setup program runs once on the processor. It builds each 8-bit S-box as a
balanced Feistel network with an odd number of rounds `r`, working on two
4-bit halves:

- Each round does `L ^= F_k(R)` and then swaps the halves. There is no swap
  after the last round.
- The round functions `F_k` are 4-bit S-boxes of the "optimal" Serpent type:
  bijective, linearity 8, differential uniformity 4.
- The sequence of round functions reads the same forwards and backwards:
  `F_k = F_{r-1-k}`.

These rules make the 8-bit S-box an involution whatever the 4-bit S-boxes are.
Only `(r+1)/2` of the round functions are chosen freely, at random.

After building the S-boxes, the program encrypts them with the chip's PUF key
and stores them in flash. After each power-on it decrypts them and writes
them into the SRAM. All of this is software. The hardware's only role is the
write path into the S-box memory.

The testbench package `tb/suc_tb_pkg.sv` contains this construction:

- `gen_tables` and `gen_tables_one` build S-box tables.
- The round functions are the eight Serpent S-boxes.
- `r = 3` in most tests.

The end-to-end test also checks that those Serpent S-boxes have linearity 8 and
differential uniformity 4.

## Hardware

```
           APB (32 bit)                       GPIO: start, reset        GPIO: ready
  processor ───────► apb_decoder ──slot 1──► suc_sram ──write port C──► lsram 2048×8
                         │                                               │ A  │ B  (11-bit addr, 8-bit data)
                       slot 0                                            ▼    ▼
                         ▼                 ┌─────────────────────────── slayer ◄── pair counter
                     suc_apb_if ──tx──► suc_mux ──► suc_latch ──► (state machine + 64-bit register)
                         ▲                  ▲                         │
                         └──── rx ──────────┼─────────────────────────┤
                                            └──────── player ◄────────┘
                                 suc_controller: mux_sel, latch_en, sl_run, sl_pair, ready
```

| module | role |
|---|---|
| `suc_core` | Top level. Holds the APB decoder, the S-box memory and the cipher logic, and synchronises the start and reset GPIOs. |
| `apb_decoder` | Splits one APB bus into two slots. Slot 0 is the cipher registers; slot 1 is the S-box memory. |
| `suc_sram` | Write-only APB slave in front of the S-box memory. |
| `lsram` | 2048 × 8 memory with two synchronous read ports (A, B) and one write port (C). S-box `s` is at addresses `{s, x}`. |
| `suc_logic` | The cipher around the memory: everything in the lower half of the diagram. |
| `suc_apb_if` | Holds the 64-bit challenge (`tx`) and reads back the response (`rx`) as 32-bit words. |
| `suc_mux` | Selects what the latch loads: the challenge (`sel=0`) or the permuted S-layer output (`sel=1`). |
| `suc_latch` | 64-bit register with an enable. It holds the S-layer input for one round. |
| `slayer` | Looks up two S-boxes per two cycles and collects the result in its 64-bit output register. |
| `player` | The bit transpose, which is wiring only. |
| `suc_controller` | NOP / RUN / READY state machine that runs the schedule below. |
| `suc_pkg` | Widths, the round count, the APB structs and the state type. |
| `sync2` | Two-flip-flop synchroniser. |

The S-layer output register has two jobs:

- Between rounds, it feeds the P-layer.
- After the last round, it *is* the response that the APB interface returns.

The last S-layer therefore needs no extra copy of its result.

## One operation, cycle by cycle

This is the part to understand before changing anything.

The memory reads are synchronous. An address presented in one cycle returns its
byte in the next. The S-layer therefore alternates *address* and *data* cycles.
Port A serves S-box `2p` and port B serves S-box `2p+1`, for pair `p = 0..3`.
One S-layer takes 8 cycles.

Cycles are numbered from the first cycle in which the controller sees
`start = 1`:

| cycle | state | latch_en | mux_sel | S-layer |
|---|---|---|---|---|
| 1 | NOP | 1 (loads the challenge) | 0 | – |
| 2 … 9 | RUN | 0 | 1 | pairs 0,0,1,1,2,2,3,3 (address, data, …) |
| 10 | RUN | 1 (loads P(S-layer output)) | 1 | – |
| 11 … 18 | RUN | 0 | 1 | second S-layer |
| … | | | | |
| 137 … 144 | RUN | 0 | 1 | 16th S-layer; its output is the response |
| 145 … | READY | 0 | 1 | `ready = 1` until `start` falls |

Notes on the schedule:

- **Cycle 1.** The latch enable is decoded from `start` while the machine is
  still in NOP. This way the challenge is loaded in the very first cycle, as in
  the paper's timing diagram.
- **Ready.** `ready` rises 144 clock edges after the edge at which the
  controller first samples `start` high. It stays high until software lowers
  `start`. One cycle after that, the machine returns to NOP and the mux goes
  back to the challenge.
- **Latency at the top level.** The two `sync2` flip-flops on the start GPIO
  add 2 cycles, so the full latency there is 146 cycles.

With `ROUNDS = R`, an operation takes `9R + 9` cycles.

## Software's view

APB addresses inside `suc_core`:

| address | access | content |
|---|---|---|
| `0x0000` | R/W | challenge bits 31:0 |
| `0x0004` | R/W | challenge bits 63:32 |
| `0x0008` | R | response bits 31:0 (a write gives PSLVERR) |
| `0x000C` | R | response bits 63:32 (a write gives PSLVERR) |
| `0x2000 + 4·a` | W | S-box memory byte `a = {s[2:0], x[7:0]}`, taken from PWDATA[7:0]. A read returns 0 with PSLVERR. |
| `0x4000` and above | – | no slave; PSLVERR |

All transfers complete without wait states.

To reinitialise after power-on:

1. Hold the reset GPIO high.
2. Write the 2048 S-box bytes.
3. Release reset.

For each challenge:

1. Write both challenge words.
2. Raise start.
3. Wait for ready.
4. Read both response words.
5. Lower start.

The S-box memory cannot be read back over the bus. The paper requires this,
because the S-boxes are the chip's secret.

## Clocks and resets

There are two clocks:

- `pclk` drives the APB side (100 MHz in the paper).
- `clk` drives the cipher and the memory read ports (200 MHz in the paper).

The memory write port runs on `pclk`.

The 64-bit challenge and response cross between the two clocks without
synchronisers. This relies on software following the sequence above:

- The challenge is written before `start` is raised, and is stable while the
  cipher reads it.
- The response is stable for as long as `ready` is high.

`start` and the reset GPIO pass through two-flip-flop synchronisers. Reset
asserts at once and releases synchronously.

`presetn` (active low) clears the challenge register. The reset GPIO (active
high) returns the controller to NOP and clears the latch and the S-layer
register. Nothing clears the S-box memory.

## Choices made here, and departures from the paper

The paper defines the following:

- the cipher
- the memory organisation and its addressing
- the two read ports
- the 8-cycle S-layer
- the mux and latch sequence
- the three controller states
- the start/ready handshake
- the 144-cycle count
- that the bus can only write the memory

Everything else was chosen here:

- **Bus IP.** The paper uses a vendor APB core to split the bus. `apb_decoder`
  is a plain replacement with this design's own address map.
- **Register map.** The challenge/response register map and the PSLVERR
  responses are this design's. The paper says only that a state machine packs
  the 64-bit values onto the 32-bit bus. Here, address decoding does that job.
- **Memory write format.** One S-box byte per 32-bit write.
- **S-box pairing.** Pair `p` is S-boxes `2p` and `2p+1`. The paper does not
  give the order.
- **S-box numbering.** Memory slot `s` holds `IS_s`, numbered 0–7. The paper's
  memory figure numbers the S-boxes 1–8 and prints the port data as 11 bits;
  its text gives 8 bits, which is what is built.
- **S-layer counter.** The controller drives a 2-bit pair counter. The paper's
  figure shows a 2-bit signal from the controller to the S-layer's "counter".
  The S-layer toggles its own address/data phase.
- **Clock gating.** The paper's timing diagram shows a gated memory clock. Here
  the clock runs continuously and the memory is read every cycle.
- **Extra logic.** The synchronisers and all reset behaviour are additions.
- **Not built: the key `K_TA`.** The paper mentions an optional key for use by
  several trusted authorities, outside its main configuration.
- **Not built: everything outside the fabric.** The processor, flash, TRNG,
  PUF, AES and PLL are not part of this RTL. Neither is the setup software.

After synthesis, the core has 207 flip-flops plus the 16 Kbit memory. The paper
reports 208 flip-flops and one memory block for its implementation.

## Verification

Each testbench prints `TB_RESULT checks=N failures=M`. It compares the block
against a reference model in `tb/suc_tb_pkg.sv` that shares no code with the
RTL.

| testbench | what it shows |
|---|---|
| `suc_core_tb` | Full design at default size. Runs the whole flow and checks: the Serpent S-box properties; that the S-box read-back is refused; the error responses; an operation aborted by reset; 24 challenge/response operations against the model, with 146-cycle latency; and the involution (feeding each response back returns the challenge). It also counts each mechanism. |
| `suc_enroll_tb` | Enrollment of 16, 32, 1024 and 2048 challenge-response pairs, each checked. Reports 144 cipher cycles per pair. |
| `suc_avalanche_tb` | Six cipher instances with 1, 2, 4, 8, 16 and 32 S-layers, run on 20 random S-box tables × 50 challenges × 64 single-bit flips. Mean output change: 4.3, 18.4, 31.9, 32.0, 32.0 and 32.0 bits. The 16-layer histogram is binomial around 32. Every response and every latency is checked. |
| `suc_logic_tb`, `suc_controller_tb`, `slayer_tb`, `player_tb`, `lsram_tb`, `suc_sram_tb`, `suc_apb_if_tb`, `apb_decoder_tb`, `suc_latch_tb`, `suc_mux_tb` | Block-level tests. `suc_controller_tb` checks the schedule above cycle by cycle. |

To run one with Verilator 5, from the directory that holds `rtl/` and `tb/`:

```
verilator --binary --timing --assert -Irtl -Itb \
  rtl/suc_pkg.sv tb/suc_tb_pkg.sv rtl/*.sv tb/suc_core_tb.sv --top-module suc_core_tb
./obj_dir/Vsuc_core_tb
```

Replace `suc_core_tb` with any other testbench name.

All testbenches finish in well under a minute. `suc_avalanche_tb` is the
longest, at about 20 s.

The design is written for two-state simulation. Everything that is read is
either reset or written first, except the S-box memory, which software loads.
