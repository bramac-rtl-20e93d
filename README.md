# BRAMAC: multiply-accumulate inside an FPGA block RAM

An FPGA block RAM (BRAM) holds the weights of a neural network, but it cannot
do arithmetic on them. Every weight has to travel through the routing fabric
to a DSP block or to soft logic. BRAMAC adds a small compute array to each
BRAM so that the block itself can run multiply-accumulates (MACs) on the
weights it stores. In every other respect it still works as an ordinary dual-port RAM.

The idea has three parts:

* **A separate "dummy" array does the arithmetic.** The main 20-kbit array
  stays a normal memory. The weights needed for one operation are copied into
  a tiny 7-row array that sits next to it. The dummy array has its own adder,
  so the main array's ports stay free for loads and reads while the dummy
  array computes.
* **Hybrid arithmetic: weights in parallel, inputs bit by bit.** One 160-bit
  dummy-array row holds 20, 10 or 5 weights (2-, 4- or 8-bit, sign-extended
  to 8-, 16- or 32-bit lanes). The inputs are streamed in one bit per step,
  MSB first. Each step adds one of four precomputed rows to a running
  partial sum: 0, W1, W2 or W1+W2. Two's-complement inputs are handled with
  a subtraction on the MSB step.
* **An embedded state machine (eFSM) runs the sequence.** A single
  instruction, written to a reserved address, starts a whole multi-cycle
  operation. After that the main array is not needed until the next weights
  must be copied.

The basic operation is the **MAC2**. It works lane by lane over a row of
weights:

    P = W1 * I1 + W2 * I2          (per lane)
    Acc = Acc + P

Here W1 and W2 are two weight vectors (two 40-bit words of the main array),
and I1 and I2 are two scalar inputs carried in the instruction. Used on the
columns of a transposed weight matrix, a sequence of MAC2s computes a
matrix-vector product. Each MAC2 consumes two matrix columns and two vector
elements, and the outputs build up in the accumulator row.

Two variants are built:

| variant | dummy arrays | dummy-array clock | MAC2 period, signed 2 / 4 / 8 bit | MACs per main cycle, 2 / 4 / 8 bit |
|---|---|---|---|---|
| BRAMAC-2SA | 2, in the main clock domain | clk | 5 / 7 / 11 cycles | 16 / 5.7 / 1.8 |
| BRAMAC-1DA | 1, "double-pumped" | clk2x = 2 x clk | 3 / 4 / 6 cycles | 13.3 / 5 / 1.7 |

The MAC rate counts 2 MACs per lane per MAC2. It assumes signed inputs and
back-to-back MAC2s. With unsigned inputs the period is one dummy-array step
shorter.

## The bit-serial MAC2

Take n-bit two's-complement inputs. Weight the input bits MSB first; the MSB
has weight -2^(n-1). The product sum is then

    P = sum over i of  s_i * 2^i * (W1*I1[i] + W2*I2[i]),   s_(n-1) = -1, else +1

Each bracket is one of four values, chosen by the bit pair {I2[i], I1[i]}:

| {I2[i], I1[i]} | row read | value |
|---|---|---|
| 00 | row 0 (hard-wired zero) | 0 |
| 01 | W1 | W1 |
| 10 | W2 | W2 |
| 11 | W1+W2 | W1 + W2 |

A 2:4 demux in front of the dummy array's row decoder makes this choice, so
a step never multiplies anything. The MSB term is subtracted by adding its
bitwise inverse plus one (`P + ~psum + 1`). The sum is then processed in
Horner form, shifting left by one after every step except the last. One MAC2
therefore runs these dummy-array steps:

| step | reads (port A, port B) | writes | note |
|---|---|---|---|
| INIT | W1, W2 | W1+W2 (port A, M1 = sum); P = 0 (port B, M2 = 0) | |
| INVERT | demux(MSB bits) on B | Inverter row = ~B (port B, M2 = B-bar) | signed only |
| ADDMSB | Inverter, P | P = (Inverter + P + 1) << 1 (port A, M1 = S_Right) | signed only; carry-in 1 |
| ADD i, i = n-2 ... 1 | demux(bit i), P | P = (row + P) << 1 | |
| ADD 0 | demux(bit 0), P | P = row + P (M1 = S) | no shift |
| ACCUM | Accumulator, P | Accumulator = Accumulator + P | |

That makes n + 3 steps for signed inputs. Unsigned inputs skip INVERT and
treat the MSB like any other bit, giving n + 2 steps.

"Shift left" is implemented as the write-back mux M1 taking the sum bit of
its right-hand neighbour (S_Right). Each lane's LSB receives 0, and no bit
moves from one lane into the next.

**Worked example (4-bit, two lanes).** W1 = (-5, 4), W2 = (7, -3), I1 = -7
(1001), I2 = 3 (0011). After ADDMSB, P is (10, -8). After the three ADD
steps it is (20, -16), (54, -38) and (56, -37). The last is -5·-7 + 7·3 = 56
and 4·-7 + -3·3 = -37. The testbenches check these intermediate values.

## The dummy array

The array has seven rows of 160 bits (`dummy_array`):

| row | content |
|---|---|
| 0 | constant zero (not stored) |
| 1 | W1 |
| 2 | W2 |
| 3 | W1 + W2 |
| 4 | Inverter: the inverted MSB partial sum |
| 5 | P: the running MAC2 result |
| 6 | Accumulator |

The array has two read ports and two write ports.

* **Each step is a read-add-write.** Two rows are read, added by the SIMD
  adder, and written back through two muxes:
  * M1 chooses copy data from main port A, the sum S, or the shifted sum
    S_Right.
  * M2 chooses copy data from main port B, the inverted port-B read data, or
    zero.
* **Reads see the old contents.** A row read in a step returns its contents
  from before that step's write.
* **The SIMD adder splits into lanes** (`simd_adder`). It is a 160-bit
  carry-lookahead adder built from 4-bit lookahead groups. Carries are cut at
  lane boundaries, giving 20 x 8, 10 x 16 or 5 x 32-bit lanes for 2-, 4- or
  8-bit MACs. One carry-in goes to every lane.
* **Weights are sign-extended on the way in** (`sign_ext_mux`). A 40-bit word
  of the main array becomes a 160-bit row: element by element, 2 → 8, 4 → 16
  or 8 → 32 bits. The mux is made of five identical blocks, one per input
  byte.

The lanes are as wide as the accumulator: 8, 16 or 32 bits. The accumulator
wraps modulo its lane width, so the length of a dot product that is safe
from overflow depends on the data. It has to be read out before it
overflows.

## Instructions and the port interface

The block's ports are those of a simple dual-port RAM, plus a mode bit.
The mode bit stands for a configuration cell of the FPGA.

* **Memory mode (mode = 0).** The block is a 512 x 40-bit dual-port RAM. It
  is 128 rows x 160 columns behind a 4:1 column mux, so a word address is
  {row[6:0], col[1:0]}. Inputs are registered, and read data appears one
  cycle after the address. Address 0xfff is an ordinary address and aliases
  to word 511.
* **Compute mode (mode = 1).** A port-A access to address 0xfff is a CIM
  instruction: din_a carries it, and nothing is written. The instruction
  cycle works like this:
  * The instruction's own address fields take over both ports' addresses for
    that cycle, to read the weights.
  * The port-B access of that cycle is dropped.
  * Every other cycle is a normal memory cycle, including cycles in which a
    MAC2 is running. This is how the next weight tile can be loaded while the
    current one is being used.

Instruction fields, by bit position of din_a:

| field | BRAMAC-2SA | BRAMAC-1DA | meaning |
|---|---|---|---|
| prec | 1:0 | 1:0 | 0 = 2-bit, 1 = 4-bit, 2 = 8-bit |
| inType | 2 | 2 | 0 = signed inputs, 1 = unsigned |
| reset | 3 | 3 | clear the accumulator(s), stop the controller |
| start | 4 | 4 | start a MAC2 with the latched inputs |
| copy | 5 | 5 | copy weights from the main array into the dummy array |
| w1_w2 | 6 | — | 2SA: this copy fills W1 (0) or W2 (1) |
| done | 7 | 6 | read out one 40-bit accumulator slice |
| bramRow | 14:8 | — | row of the word to copy (2SA); on done, bit 0 selects the array |
| bramRow_1 | — | 13:7 | row of W1 (1DA) |
| bramRow_2 | — | 20:14 | row of W2 (1DA) |
| bramCol | 16:15 | 22:21 | column of the word(s); on done, the accumulator slice |
| input_1 | 24:17 | 30:23 | first input (I1; in 2SA I3 when w1_w2 = 1) |
| input_2 | 32:25 | 38:31 | second input (I2; in 2SA I4 when w1_w2 = 1) |

Inputs are 8 bits wide. At lower precision only the low n bits are used.

**Done.** A done instruction returns accumulator slice bramCol (bits
40·c+39 ... 40·c) on **dout_b** in the cycle after the instruction. This is
the same latency as a read. Reading out a complete result takes 4 done
instructions in 1DA, and 8 in 2SA (two arrays).

**Start while a MAC2 runs.** A start that arrives while a MAC2 is running is
remembered. It begins right after the running MAC2's ACCUM step. A start
without copy reuses the weights already in the dummy array.

## BRAMAC-2SA timing

Both dummy arrays get the same weights and different inputs:

* array 0 computes W1·I1 + W2·I2;
* array 1 computes W1·I3 + W2·I4.

Each MAC2 needs two instructions. One copies W1 and latches I1 and I2 (for
array 0). The other copies W2, latches I3 and I4 (for array 1), and starts.
Each instruction copies one word. Both main ports read that same word: port
A feeds array 0 and port B feeds array 1, each through its own sign-extension
mux and each into write port B of its array.

An instruction presented in cycle k acts in cycle k+1. A 4-bit signed MAC2,
with its instructions presented in cycles 0 and 1:

| cycle | 1 | 2 | 3 | 4 | 5 | 6 | 7 | 8 | 9 |
|---|---|---|---|---|---|---|---|---|---|
| dummy arrays | copy W1 | copy W2 | INIT | INVERT | ADDMSB | ADD 2 | ADD 1 | ADD 0 | ACCUM |
| next MAC2 | | | | | | | | copy W3 | copy W4 |

ADD 0 and ACCUM do not use write port B, so the next MAC2's copies can fall
into those two cycles. A start in the ACCUM cycle begins the next INIT
straight away. The steady-state period is therefore n + 3 cycles (n + 2 for
unsigned inputs). The main array is busy for only 2 of them.

## BRAMAC-1DA timing

A single dummy array runs on clk2x. clk2x must be twice the frequency of clk,
and every rising edge of clk must also be a rising edge of clk2x. Each
dummy-array step then takes half a main cycle.

A 1DA instruction names two rows and a shared column. In the cycle after the
instruction, port A reads W1 at {bramRow_1, bramCol} and port B reads W2 at
{bramRow_2, bramCol}. Both words are registered at the end of that cycle. In
the first half of the following cycle, they are written into the W1 and W2
rows through the array's two write ports. The sequencer knows which half of
the main cycle it is in from a toggle flop: the flop flips on every clk edge
and is sampled on clk2x.

| main cycle | 0 | 1 | 2 | 3 | 4 | 5 |
|---|---|---|---|---|---|---|
| main array | instruction | read W1, W2 | | | next instruction | read W3, W4 |
| dummy array, 1st half | | | copy W1, W2 | INVERT | ADD 2 | ADD 0 |
| dummy array, 2nd half | | | INIT | ADDMSB | ADD 1 | ACCUM |

A signed n-bit MAC2 takes n + 4 half cycles including its copy. Issued every
n/2 + 2 main cycles (3, 4 or 6), the next copy lands exactly in the half
cycle after ACCUM. A shorter period would make a copy collide with a step
that writes the array. An assertion in `efsm_1da` reports such a collision,
and the testbench checks that the nominal period works.

Because a done reads the accumulator in the cycle after it is presented, a
done must come at least two cycles after a reset or after the last
instruction of a computation.

## Module hierarchy

```
bramac              top; parameter VARIANT = VAR_2SA (default) | VAR_1DA
├─ bramac_2sa       0xfff decode, address muxes, output mux
│  ├─ main_bram     512 x 40 dual-port array
│  ├─ sign_ext_mux  x2
│  ├─ efsm_2sa      instruction register, MAC2 sequencer for both arrays
│  └─ dummy_array   x2
│     └─ simd_adder
└─ bramac_1da       same, with two-row addressing and word capture
   ├─ main_bram
   ├─ sign_ext_mux  x2
   ├─ efsm_1da      clk/clk2x controller
   └─ dummy_array   (on clk2x)
      └─ simd_adder
bramac_pkg          geometry, enums, dummy-array control struct, instruction structs
```

The dummy array is controlled through one packed struct (`dummy_ctrl_t`)
per cycle. It carries the read and write rows, the demux flags, the M1 and
M2 selects, the carry-in and the lane precision. Everything about the step
sequence therefore lives in the two eFSMs, and the array itself is generic.

## Simulating

Any Verilator 5 runs the testbenches. For example, the full-size test of the
default top:

```
verilator --binary --timing --assert -Irtl -y rtl rtl/bramac_pkg.sv \
          tb/tb_bramac.sv --top-module tb_bramac
./obj_dir/Vtb_bramac +verilator+rand+reset+2
```

Replace `tb_bramac` with any other testbench name. Each testbench prints
`TB_RESULT checks=<n> failures=<m>` and stops itself through a watchdog if
something hangs.

| testbench | what it checks |
|---|---|
| tb_simd_adder | random and corner operands at every lane width against per-lane arithmetic |
| tb_sign_ext_mux | every precision with random words against a reference extension |
| tb_main_bram | random dual-port traffic, read-first behaviour, write collisions |
| tb_dummy_array | hand-driven MAC2 steps, including the worked example's intermediate values; 72 random MAC2s (12 per precision and signedness) with the P row, the W1+W2 row and the accumulator checked after each |
| tb_efsm_2sa | the 2SA control sequence cycle by cycle, pipelined copies, pending start |
| tb_efsm_1da | the 1DA controller half cycle by half cycle against the step list: copy, reset, every step, input bits, capture and readout strobes, pipelined issue, pending start |
| tb_bramac | the top at full size (2SA build): memory mode, then MAC2 batches at all precisions, signed and unsigned, pipelined at the n+3 period and with gaps, readout, reset, memory traffic during MAC2s |
| tb_bramac_1da | the top built as 1DA with both clocks: the same set of scenarios, at the 3 / 4 / 6-cycle period |
| tb_gemv_1da | a 64 x 128 matrix-vector product on the 1DA build at 2, 4 and 8 bit: the whole matrix stored in the block at 2 bit, tiles loaded while the previous tile computes at 4 and 8 bit, every output compared exactly with y = A x |

The end-to-end testbenches compare results with a lane-by-lane reference
model. They count the controller's busy cycles against the expected period.
They also count every mechanism they are meant to exercise (pipelined copy,
pending start, unsigned path, memory traffic during a MAC2, and so on), and
a mechanism that never happened counts as a failure.

## Where this RTL makes its own choices

The paper gives the array sizes, the dummy-array rows, the mux inputs, the
demux rule, the step sequence (through a worked 4-bit example), the periods
and the instruction field positions. The following points are not fixed by
the paper and were decided here:

* **Encodings.** prec codes 0/1/2 for 2/4/8 bit and inType 0 = signed. The
  lowest-numbered bit of a field is its LSB.
* **Port use inside each step.** Which rows go to which read and write port
  is chosen so that the overlap of copies and computation needs no port
  twice. In 1DA, W1 goes through write port A (M1) and W2 through write
  port B (M2), the natural reading of the mux description. In 2SA both
  copies go through write port B. The reason is the overlap: the copy of the
  next W1 falls in the last ADD step, and that step must write the sum back
  through M1, the only mux that can select the sum.
* **Instruction timing.** Instructions are registered like any other RAM
  input, so they act one cycle after they are presented.
* **Readout.** Slices come out on dout_b, in column order. In 2SA, bit 0 of
  bramRow selects the array.
* **Pending start and reset.** A start that arrives during a MAC2 waits for
  it to finish. rst_n is synchronous, active low, and resets only the
  controllers. The arrays power up with arbitrary contents, like SRAM, and
  the reset instruction clears the accumulator.
* **Memory mode.** Only the 512 x 40 memory configuration is provided.
  Colliding writes from both ports keep port B's data.
* **Accumulator width for 8-bit MACs.** It is 32 bits, as the design
  description states. The throughput comparison in the paper assumes a 27-bit
  accumulator, and 32-bit lanes hold that.
* **Correct instruction streams are the issuer's job.** No copy may overwrite
  weights still in use, and copies must fall only in the allowed cycles.
  Assertions flag copies that would collide with a sequence write.

Not represented at all: the FPGA routing crossbars around the block, the
sense amplifiers and write drivers as circuits, and the clock-period, area
and power figures, which are circuit properties. The evaluation at the level
of whole accelerators (DNN tiling, GEMV mapping) lies outside the block.
