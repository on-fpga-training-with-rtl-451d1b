# Low-precision tensor-train training accelerator

A fully connected layer `Y = W X` with a large weight matrix can be stored as a
tensor-train (TT) chain. The weight matrix becomes a short chain of small
four-way factors `G_k(r_{k-1}, j_k, i_k, r_k)`. With this form, all the trainable
parameters of a small network fit in on-chip block RAM. The design also uses
very narrow numbers:

- factors are 4-bit;
- forward activations are 8-bit;
- backward gradients are 16-bit.

Training then reduces to a sequence of tensor contractions. Each one multiplies
a large activation tensor, held in DRAM, by one small factor, held in BRAM.

This RTL provides the programmable-logic part of such a trainer:

- three contraction engines;
- the factor memory;
- the ping-pong buffers and DMA that stream activations;
- hardware that chooses power-of-two output scales.

A processor outside this RTL (an embedded core) does three things:

- it issues one command per contraction;
- it updates the factors after each step;
- it writes the factors back through a simple port.

## Number formats (`tt_pkg`)

| Quantity | Format |
|---|---|
| Factors | 4-bit two's complement, 16 per 64-bit BRAM word |
| Activations and gradients in DRAM | 16-bit lanes, 16 per 256-bit beat |

In forward mode (`fwd=1`), only the low byte of each 16-bit lane is used, sign-extended. Results saturate to 8 bits.

In backward mode the full 16 bits are used, and results saturate to 16 bits.

Every engine accumulates in 32 bits. It then applies a right shift by `shift`
(round half up) and saturates the result (`requant`). This shift is the
power-of-two scale of the result.

## The three contraction engines

### PE1 (`pe1`, `pe1_engine`): `Z'(a,d) = sum_{b,c} Z(a,b,c) G(b,d,c)`

**The array.** 8 rows × 16 lanes of multiply-accumulators (`macc`).

- Rows are 8 values of `a`.
- Lanes are 16 consecutive values of `c`.
- Each clock it takes one 16-wide factor word `G(b,d,c..c+15)`, shared by all 8 rows, and one 16-wide slice of `Z` per row.
- After the last `(b, c-chunk)` step, the 16 lanes of a row are summed into one result.

**The engine's loop.** For each tile of 8 `a`:

1. It loads the slice `Z(a0..a0+7, :, :)` into its input ping-pong buffer.
2. It then sweeps `d`, and for each `d` it sweeps `b` and the c-chunks.
3. It collects 16 consecutive `d` results of the 8 rows into one output word and stores it as 8 DRAM beats.

The next tile is loaded while the current one computes.

**Command (`pe1_cmd_t`).**

| Field | Meaning |
|---|---|
| `z_base` | DRAM beat address of Z |
| `out_base` | DRAM beat address of the result |
| `a_tiles` | number of 8-row tiles of `a` |
| `b_n` | size of `b` |
| `c16` | number of 16-wide c-chunks |
| `d_n` | size of `d` (a multiple of 16) |
| `g_base` | BRAM word address of the factor |
| `fwd` | forward mode (8-bit) or backward mode (16-bit) |
| `shift` | output scale |

**Data layout.**

| Data | Location |
|---|---|
| Input Z | beat `z_base + (a*b_n + b)*c16 + cc` |
| Factor | BRAM word `g_base + (b*d_n + d)*c16 + cc` |
| Output | beat `out_base + a*(d_n/16) + d/16`, lane `d%16` |

### PE2 (`pe2`, `pe2_engine`): `Z'(a,d,c) = sum_b Z(a,b,c) G(b,d)`

**The array.** 8 `d` lanes × 16 `c` lanes.

- Each clock, one 16-wide beat `Z(a,b,c..c+15)` is broadcast to all 8 `d` rows.
- It is multiplied by 8 factors `G(b, d..d+7)`, taken from a 32-bit half word of the BRAM's second read port.

**The engine's loop.** For each `(a, c-chunk)`:

1. It loads all `b` beats into its buffer, which is 256 deep in the top.
2. For each group of 8 `d` it accumulates over `b`.
3. It stores 8 result beats.

**Command (`pe2_cmd_t`).**

| Field | Meaning |
|---|---|
| `a_n` | size of `a` |
| `b_n` | size of `b` |
| `c16` | number of 16-wide c-chunks |
| `d8` | number of 8-wide `d` groups |
| `g_base8` | half-word address of `G` |

**Data layout.** `G(b, 8g..8g+7)` sits in half word `g_base8 + b*d8 + g`, so `G`
must be zero-padded to a multiple of 8 along `d`. The output beat for `(a,d,cc)`
is `out_base + (a*D + d)*c16 + cc`.

### Choosing the engine for a contraction

Together, PE1 and PE2 cover every contraction of the forward and backward TT passes:

- a contraction that consumes the last index of the activation goes to PE1;
- a contraction over a middle index goes to PE2.

The last index of each tensor is padded to a multiple of 16. Reshapes are done
only by choosing strides, never by permuting data.

### PE3 (`pe3`): the weight-gradient outer product

PE3 works only in the backward pass. It computes `dW = dY ⊗ X` for one sample.

1. It first caches all of `dY`.
2. It then streams `X` beats of 16 lanes.
3. Each product is written to the address of the entry `(j1,i1,j2,i2,…)` of the gradient tensor in its interleaved TT ordering.

The index is a mixed-radix number with the digits interleaved. `jdim` and
`idim` give the radices, with up to 4 cores. The lowest `i` digit counts
16-wide chunks.

With `accumulate` set, PE3 reads the old value of `dW` and adds to it
(read-modify-write). This lets the gradients of a batch be summed.

## Factor memory (`param_bram`)

- It holds 2048 words × 64 bits, which is 32768 4-bit factors.
- Port 1 is a registered 64-bit read for PE1.
- Port 2 is a registered 32-bit half-word read for PE2.
- The processor writes whole words.

## Streaming: ping-pong buffers and the load & store unit

`pingpong_buffer` has two banks, each with a full flag:

- the producer fills one bank and commits it;
- the consumer reads the other bank and releases it.

`load_store` is a two-level strided DMA. Beat `p` of buffer word `w` comes from
`base + w*wstride + p*pstride`. Stores use the same scheme.

DRAM ports use request/ready handshakes and return read data in order.

## Automatic scale selection (`scale_monitor`)

Each engine has a monitor that adds up the magnitudes of the engine's results.

On `eval`, the monitor compares the mean magnitude with full scale: 2^7 in
forward mode and 2^15 in backward mode.

- If the mean is above 0.3 of full scale, the shift goes up by one.
- If the mean is below 0.1 of full scale, the shift goes down by one.

With `auto_scale[k]` set in the top, engine `k` uses the monitor's shift in place
of the shift in its command.

## Top level (`tt_accel_top`)

The top instantiates:

- the BRAM;
- the three engines;
- the three monitors.

It has three DRAM port pairs (index 0 = PE1, 1 = PE2, 2 = PE3), the factor write
port, and the command and status ports.

The DRAM and the processor are not part of the RTL.

## Simulation

Every block has a self-checking testbench in `tb/`. Each one prints
`TB_RESULT checks=N failures=M`.

`tb_tt_accel_top` runs one training step of a 128×128 two-core layer at the
default parameters:

1. PE1 forward;
2. PE2 forward;
3. two PE3 outer products, the second accumulated;
4. PE1 backward with an auto-selected scale.

Every result is checked against a software model. The run also checks that DRAM
stalls, load/compute overlap and scale adjustments all happened at least once.

To build and run it with plain verilator:

```
verilator --binary --timing --assert --top-module tb_tt_accel_top -y rtl -y tb +libext+.sv \
  rtl/tt_pkg.sv tb/tb_ref_pkg.sv tb/tb_tt_accel_top.sv
obj_dir/Vtb_tt_accel_top +verilator+rand+reset+2
```

## Departures and assumptions

**Design choices not fixed by the source description:**

- the widths, depths and command formats;
- the loop orders;
- the three separate DRAM ports;
- the strided DMA.

**PE1 factor sharing.** The source says each first operand is shared by 8
multipliers, and also parallelizes `a` by 8. Here the factor word is what the
8 rows share.

**Not in this RTL:**

- the weight update and the rank-shrinking regularizer, which run on the processor;
- layer sequencing, which the processor also does;
- nonlinearities and the loss.

**Verilator warnings that remain:**

- Assertions use `disable iff (!rst_n)`, so verilator reports the reset as used both synchronously and asynchronously.
- `pe2_engine` leaves a few counter bits unused.
