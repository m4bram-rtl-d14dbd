# M4BRAM: a block RAM that multiplies mixed-precision matrices

FPGA deep-learning accelerators keep weights in block RAMs and multiply them in DSP blocks.
DSPs are built for wide multiplications. When weights are 2, 4 or 8 bits and activations
anywhere from 2 to 8 bits, most of each DSP multiplier goes unused. M4BRAM adds a small
bit-serial compute engine to an M20K-style block RAM. In *compute mode* the block takes
weights from its own array and multiplies them with activations streamed in through its write
port. The block's read port stays free all the while, so a DSP next to it can keep reading the
same memory. The two engines then share one weight cache and split the work between them.

This repository holds synthesizable SystemVerilog for one M4BRAM block. It covers both sizes
(M4BRAM-S and M4BRAM-L), both BPE clockings (synchronous and double-pumped), and the 512 x 40,
1K x 20 and 2K x 10 memory shapes. Self-checking testbenches come with it, including convolution
tiles at the precision mixes the block is meant for.

## The operation: MAC2

The unit of work is a **MAC2**, `P = W1*I1 + W2*I2`. Four processing elements (**BPEs**) each
compute one MAC2 per operation, and they work in parallel:

* **W1, W2** are vectors of weights. A BPE of 32 columns holds one 8-bit weight, two 4-bit
  weights or four 2-bit weights per vector. Each weight is multiplied by the same activation.
* **I1, I2** are activations of `n` bits, with `n` from 1 to 8. They are signed or unsigned;
  the choice is made once per layer.
* Each weight gets a *lane* of `4*Pw` bits (8, 16 or 32) in which its products are summed. A
  lane keeps its result modulo `2^(4*Pw)`. Long dot products with 2-bit weights can therefore
  wrap, because the lane is only 8 bits wide.
* After each MAC2 the result is added to a per-BPE accumulator, or replaces it. A chain of
  MAC2s thus computes a dot product of any length.

With synchronous BPEs a MAC2 takes `n + 2` clock cycles once its second instruction has been
taken:

1. one cycle forms `W1 + W2`;
2. `n` cycles handle one activation bit each, MSB first;
3. one cycle accumulates.

Double-pumped BPEs take two bit steps per main cycle, so a MAC2 takes `ceil(n/2) + 2` cycles.

## Block structure

```
               port A (write / instruction)                port B (read)
                        |                                        |
   cfg.cim_mode --------+---------------------------+            |
                        v                           v            v
                 +-------------+   32/64-bit   +---------+   +--------+
   instruction ->|    eFSM     |   weights     |  main   |-->|   MO   |--> dout_b
   fields        | (m4bram_    |<------------- |  array  |   |  2:1   |
                 |  efsm)      |   +--------+  | 512x40  |   +--------+
                 +-------------+   |  dup.  |  +---------+        ^
                   |  control  |   |shuffler|<---'                 | accumulators
                   v           v   +--------+                      |
               +------+  +------+------+------+                    |
               | pump |->| BPE0 | BPE1 | BPE2 | BPE3 |-------------'
               +------+  +------+------+------+------+
```

| Module | Role |
|---|---|
| `m4bram` | Top level. It wires the blocks together and splits port A between memory writes and instructions. |
| `m4bram_array` | 128 x 160 bit cell array with a 4:1 column mux, which gives 512 words of 40 bits. It is true dual-port, with 10-bit byte enables. With NBANK = 2 it is split into two banks, for M4BRAM-L. |
| `m4bram_width` | One per port. It maps 1K x 20 and 2K x 10 accesses onto the 40-bit words. |
| `m4bram_efsm` | Embedded FSM. It decodes instructions, holds the activations, sequences the BPEs and reads out the results. |
| `m4bram_dup_shuffler` | Four 4:1 muxes. They hand each BPE one quarter of the weight vector, with optional duplication. |
| `m4bram_bpe` | One processing element: a 7-row dummy array with a lane-segmented adder. |
| `m4bram_pump` | Splits the eFSM's per-cycle control into two half-cycle operations for double-pumped BPEs. |
| `m4bram_mo` | Output mux on port B: array data or accumulator words. |
| `m4bram_pkg` | Constants, configuration types and the BPE operation codes. |

### Parameters of the top

| Parameter | Default | Meaning |
|---|---|---|
| `NBANK` | 1 | 1 is M4BRAM-S (BPEs of 7 x 32). 2 is M4BRAM-L (BPEs of 7 x 64, two array banks). |
| `DPUMP` | 0 | 0 runs the BPEs on `clk`. 1 runs them on `clk2x`, which must be twice `clk` with rising edges aligned. |

The static configuration comes in on `cfg`, and it stands in for the FPGA's configuration
SRAM cells:

* `cim_mode` selects memory or compute mode.
* `pw` is the weight precision: 0 for 2 bits, 1 for 4 bits, 2 for 8 bits.
* `dp` is the duplication factor N_I: 0 for 1, 1 for 2, 2 for 4.
* `width` is the memory-mode shape: 0 for 512 x 40, 1 for 1K x 20, 2 for 2K x 10.

## Memory mode

With `cim_mode = 0` the block is a plain true dual-port RAM. `cfg.width` sets its shape, for
both ports at once:

| `cfg.width` | Shape | Address bits used | Byte enables |
|---|---|---|---|
| 0 | 512 x 40 | 8:0 | `be[3:0]`, 10 bits each |
| 1 | 1K x 20 | 9:0 | `be[1:0]` |
| 2 | 2K x 10 | 10:0 | none; the word is written whenever `wen` is high |

* The array always stores 40-bit words. A narrow word at address `a` is lane `a % k` of array
  word `a / k`, where `k` is 2 or 4, with the low address in the low bits.
* Write data are replicated into every lane. The lane's byte enables decide where they land.
* The read data are the selected lane, zero-extended to 40 bits.
* Reads return their data one cycle later.
* A read of a word that is being written in the same cycle returns the old data.
* When both ports write one byte in the same cycle, port B wins.

The compute logic sits idle. Compute mode always uses the 512 x 40 shape, whatever
`cfg.width` says, because the instruction fields use the whole address bus.

## Compute mode and the instruction format

With `cim_mode = 1`, port A is the write port and port B the read port. Port B never writes in
this mode, so its write enable `wen_b` is spare. A cycle with `wen_b` high is a **CIM
instruction**, and in that cycle port A's address, data and byte enables are read as
instruction fields:

| Field | Bits | Meaning |
|---|---|---|
| addrRow | `addr_a[6:0]` | Row of the weight vector in the array. |
| addrCol | `addr_a[8:7]` | Column-mux position of the weight vector. |
| addrDP | `addr_a[10:9]` | Slice select for the duplication shuffler. |
| activations | `data_a[8k+7:8k]` | Activation for BPE k, for k = 0..3. |
| `inclr` | separate pin | 1: configuration instruction. 0: MAC instruction. |
| with `inclr` = 1 | `be_a[0]` | Activations are signed. |
| | `be_a[3:1]` | Activation precision minus one (`n - 1`). |
| with `inclr` = 0 | `be_a[0]` | **reset**: the accumulation replaces the accumulator instead of adding to it. |
| | `be_a[1]` | **start**: this second instruction launches the MAC2. |
| | `be_a[2]` | **copy**: load this instruction's weight vector into the BPEs. Without it the BPEs reuse their previous W1 (or W2). |
| | `be_a[3]` | **done**: after this MAC2, read the accumulators out on port B. |

In every cycle that is not an instruction, port A writes normally when `wen_a` is high. The
next weight tile can therefore be written while the BPEs compute, and port B keeps serving
reads to other logic.

### Instruction timing

A MAC2 needs two MAC instructions in consecutive slots. The first fills slot 1 (W1, I1); the
second fills slot 2 (W2, I2) and carries `start`:

```
cycle        t0        t1        t2        t3 ... t2+n     t3+n       t4+n ... t7+n
port A/wen_b instr 1   instr 2   -         -               (next instr 1 may come here)
array        read W1   read W2
BPE W rows             load W1   load W2
BPE op                           SUM       bits n-1..0     ACC
dout_b                                                               result words 0..3
```

`cim_ready` is high when a first instruction can be taken. That is when the eFSM is idle, or
in the accumulation cycle of a MAC2 without `done`. So back-to-back MAC2s issue every `n + 3`
cycles. An instruction that arrives when it cannot be taken is dropped, and `cim_drop` pulses
for that cycle. Configuration instructions are taken only when the eFSM is idle.

After a MAC2 with `done`, port B outputs the accumulators for 4 cycles (8 for M4BRAM-L):

* `dout_b_is_result` is high in those cycles.
* Word `i` holds bits `[32*(i%NBANK) +: 32]` of the accumulator of BPE `i/NBANK`, zero-extended
  to 40 bits.
* Array reads that fall in those cycles are not visible on port B.

## Inside a BPE

The BPE is the hardest part to follow. It has seven rows of `NCOL` bits and one adder that
reads two rows and writes one each cycle:

| Row | Content |
|---|---|
| 0 | zero |
| 1 | W1, each weight sign-extended to its lane |
| 2 | W2, likewise |
| 3 | W1 + W2 |
| 4 | INV: the inverted look-up word, used for a signed MSB |
| 5 | P, the MAC2 result being built |
| 6 | ACC, the accumulator |

Rows 0–3 form a look-up table: `{I2[b], I1[b]}` picks 0, W1, W2 or W1+W2. The MAC2 runs MSB
first:

* `SUM`: row 3 gets W1 + W2. When W2 is being loaded in this same cycle, it is forwarded to the
  adder.
* `MSB`: P gets `LUT[bits]`. For a signed activation the MSB has negative weight, so P gets
  `-LUT[bits]` instead. The inverted word is written to INV and added to zero with carry-in 1.
* `BIT`: P gets `2*P + LUT[bits]`, once for each remaining bit.
* `ACC`: ACC gets `ACC + P`, or just `P` when reset was requested.

Mixed precision comes from cutting the adder's carry chain and the `2*P` shift at lane
boundaries. These are 8, 16 or 32 bits for 2-, 4- or 8-bit weights. Weights are sign-extended
into their lanes when they are written. A single 32-column row thus carries one, two or four
independent dot products with no extra hardware per precision.

## Duplication shuffler: weight sharing

The weight vector read through port A is cut into four slices A, B, C, D (A in the low bits).
Each slice is 8 bits for M4BRAM-S and 16 bits for M4BRAM-L. The four BPEs receive:

| `cfg.dp` | N_I | BPE 0 | BPE 1 | BPE 2 | BPE 3 |
|---|---|---|---|---|---|
| 0 | 1 | A | B | C | D |
| 1 | 2 | slice {addrDP[1],0} | slice {addrDP[1],1} | slice {addrDP[1],0} | slice {addrDP[1],1} |
| 2 | 4 | slice addrDP | slice addrDP | slice addrDP | slice addrDP |

* With N_I = 1 the four BPEs multiply four different weight sets by their own activations.
* With N_I = 4 one weight set meets four different activations, which is weight sharing for
  layers with few output channels.
* The addrDP of the instruction that copies a vector is the one applied to it.

## Double pumping

With `DPUMP = 1`:

* The eFSM still runs on `clk`, but each cycle it produces two operations, one per half cycle.
* `m4bram_pump` tells the two `clk2x` edges apart. A toggle flop on `clk` is sampled by a flop
  on `clk2x`. At the edge in mid-cycle the two differ; at the edge that coincides with `clk`
  they agree. The first half's operation is applied at the mid-cycle edge, the second at the
  coinciding edge.
* With an odd `n` the first half of the first bit cycle is idle.
* `SUM` runs in the first half only. A weight load is held for the whole main cycle, so the BPE
  writes the same word at both fast edges.

## Choices that are this design's own

The published description fixes the geometry, the four BPEs, the rows of the BPE, the
instruction field positions, the MAC2 latencies and the two variants. These details are not
specified there and were chosen here:

* The precision code `n - 1` and the meaning of each flag. The flags' bit order, reset in bit 0
  up to done in bit 3, is read from the left-to-right order of the published instruction format.
* Exactly when weights are copied: the array read happens in the instruction cycle and the BPE
  row is written one cycle later.
* Which slices N_I = 2 selects.
* The configuration encodings of `pw` and `dp`.
* Back-to-back issue in the accumulation cycle.
* Dropping instructions that come too early, with a flag.
* The read-out order of result words and their zero extension to 40 bits.
* The phase detector used for double pumping.
* Port B's priority on write collisions and read-before-write behaviour.
* The set of memory-mode shapes and the lane order within a 40-bit word.
* An asynchronous, active-low reset that clears all BPE rows and eFSM state. The main array is
  not reset.

## What is not here

These parts are outside the block, or are not modelled:

* The FPGA's configuration SRAM cells, which are modelled as the `cfg` input.
* The routing crossbars, which are left to the surrounding logic.
* The 512 x 32 view of compute mode. In compute mode the ports here still carry 40-bit words
  with 10-bit byte enables; the compute path uses bits 31:0. A true x32 port, with 8-bit byte
  enables, would need bit-level write masks in the array.
* The deepest, narrowest memory shapes of an M20K (4K x 5 down to 16K x 1). They would need
  a wider address bus than the 11 bits here.
* Transistor-level timing and area, and the frequency of the double-pumped clock.
* The heterogeneous accelerator that tiles whole networks over many M4BRAMs and DSPs. A network
  such as ResNet-34 (about 21.8 million weights) spreads over hundreds to thousands of blocks.
  The RTL here is one block; what it can run is one tile of such a layer at a time.

## Verification

Every block has a self-checking testbench that counts checks and failures and ends with a line
`TB_RESULT checks=N failures=M`. The arithmetic is checked against a reference model that
shares no code with the RTL (`tb/m4bram_ref_pkg.sv`). That model uses plain integer
multiplication per lane, modulo the lane width.

| Testbench | What it covers |
|---|---|
| `tb_m4bram` | The whole block at its defaults (M4BRAM-S, synchronous). It covers memory-mode reads and writes on both ports in all three shapes. It runs 180 compute rounds over every weight precision, duplication factor, activation width from 2 to 8, and signed and unsigned activations. In the background, port A writes and port B reads run against a memory model. It checks the MAC2 latency of `n + 2` cycles, back-to-back issue, dropped instructions, weight reuse without copy and chained accumulation. It counts how often each mechanism happened and fails if one never did. |
| `tb_m4bram_l` | The same test for M4BRAM-L (`NBANK = 2`). |
| `tb_m4bram_dp` | The same test with double-pumped BPEs (`DPUMP = 1`); the latency expected is `ceil(n/2) + 2`. |
| `tb_m4bram_conv` | Convolution tiles on the default block, driven only through its ports. Each tile has 4 input channels, a 4x4 map, 3x3 kernels and 2x2 outputs. Weights are packed for each duplication factor and written in memory mode; the 36 kernel terms then run as 18 back-to-back MAC2s. The precision mixes are 8-bit weights with 4..8-bit activations, uniform 2/2, 4/4 and 8/8, and 4- and 8-bit filters with 6-bit activations. Every output is compared with a direct convolution, and the tile must take exactly `18*(n+3)+1` cycles to its first result word. |
| `tb_m4bram_conv_l`, `tb_m4bram_conv_dp`, `tb_m4bram_conv_dpl` | The same tiles on M4BRAM-L, on double-pumped M4BRAM-S and on double-pumped M4BRAM-L. M4BRAM-L covers twice the output channels per tile. Double pumping shortens the tile to `18*(ceil(n/2)+3)+1` cycles. |
| `tb_m4bram_bpe` | Random MAC2 sequences on 32- and 64-column BPEs, checked cycle by cycle. |
| `tb_m4bram_dup_shuffler` | Exhaustive over configuration, addrDP and random vectors. |
| `tb_m4bram_array` | Random traffic on both ports and both bank counts, checked against a model. |
| `tb_m4bram_efsm` | Cycle-by-cycle check of the control outputs, including drops and back-to-back issue. |
| `tb_m4bram_pump` | Per-half-cycle check of the selected operation, for both clockings. |
| `tb_m4bram_width` | Random accesses in all three shapes against a byte-level model. |
| `tb_m4bram_mo` | Mux selection for both bank counts. |

To run one with Verilator, from the directory that holds `rtl/` and `tb/` (the package goes
first; any testbench name can replace `tb_m4bram`):

```
verilator --binary --top-module tb_m4bram -Itb rtl/m4bram_pkg.sv \
          $(ls rtl/*.sv | grep -v m4bram_pkg) tb/m4bram_ref_pkg.sv tb/tb_m4bram.sv
./obj_dir/Vtb_m4bram
```

Each block's testbench was also run against a copy of the block with one deliberate bug. Examples are
a missing carry-in in the signed MSB step, or port B's write enable not gated by the mode.
Every testbench reported failures against its broken copy.
