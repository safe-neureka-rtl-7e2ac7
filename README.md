# Safe-NEureka: a convolution engine that trades throughput for lockstep checking

Safe-NEureka is a DNN convolution accelerator meant for radiation-prone
environments such as satellites. Its central idea is that one array of
processing elements (PEs) can be split in two and used in either of two ways,
chosen by software between jobs:

* **Performance mode.** The two halves work on different output tiles, so
  the accelerator runs at close to the speed of a single unprotected 4x4
  array.
* **Redundancy mode.** The two halves compute the same tile. One runs a
  fixed number of cycles behind the other. Their outputs are compared before
  anything is written back. On a mismatch the tile is thrown away and
  recomputed from its first input block. Nothing corrupt reaches memory, and
  the cost of an upset is one tile's worth of cycles.

Two more protections are always on:

* The controller is triplicated with a bitwise majority vote.
* The memory port carries SEC-DED (single-error-correcting,
  double-error-detecting) codes on both the data and the request metadata.

This repository holds synthesizable SystemVerilog for the accelerator itself:
the streamer, the engine and the controller. It also holds self-checking
testbenches for every block and for the whole design. The surrounding cluster
(RISC-V cores, DMA, L1 banks, interconnect) is not included. Its memory port
is brought out as top-level ports, and a behavioural memory model stands in
for it in simulation.

## Block structure

```
safe_neureka
├── controller         3 x controller_core + tmr_voter (W = whole output struct)
│   └── controller_core
│       ├── regfile    job registers, HMR mode, error counters
│       ├── uloop x2   tile walkers (active walker / checkpoint)
│       └── FSM + address generation
├── streamer           one 288-bit load/store port, 9 x hsiao_enc/dec (39,32), metadata hsiao_enc
└── engine
    ├── subarray x2    input buffer (6x4 pixels) + dispatcher + 8 x pe
    ├── config delay   TIMESHIFT-cycle buffer on the shadow inputs
    └── output_checker delayed-main vs shadow XNOR reduction
```

Shared sizes and types are in `neureka_pkg`. `ecc_pkg` generates the Hsiao
parity-check matrix used by both the encoder and the decoder.

## What one job computes

A job is one dense 3x3 convolution: stride 1, no padding, 8-bit unsigned
activations and 8-bit signed weights. The input is `(HO+2) x (WO+2) x KI`
and the output is `HO x WO x KO`. KI and KO must be multiples of 32, HO a
multiple of 4 and WO a multiple of 2.

Each output value is

    out = clamp((acc * scale) >>> shift, 0, 255)

Here `acc` is the 32-bit sum of products and `scale` (8 bit) and `shift`
(5 bit) come from the QUANT register.

The output is cut into **tiles** of 4 rows x 2 columns x 32 output channels.
This is exactly what one 4x2 half-array produces: each PE owns one pixel and
32 accumulators. A tile is built from one 32-channel input block at a time:

| phase | cycles (no stalls) | what happens |
|---|---|---|
| INPUT LOAD | 24 | The 6x4 input window of the tile (32 channels per pixel, one pixel per beat) fills the input buffer. |
| MM | 256 (+2 drain) | 32 input channels x 8 weight beats. A beat is 36 signed bytes: the 9 taps of 4 output channels. It is broadcast to all PEs. The dispatcher hands each PE the 9 activations under its 3x3 window. |
| OUTPUT CHECK | 2+TIMESHIFT = 3 | Redundancy mode only, after the last input block. |
| STREAMOUT | 8 | One 32-byte store per PE. |

The memory layouts are fixed by the address generator (byte addresses):

```
input   in_ptr  + ((h*(WO+2) + w)*KI + c)
weights wt_ptr  + ((ko_blk*KI + ki)*8 + beat)*36      byte j*9+t of a beat = tap t of channel beat*4+j
output  out_ptr + ((h*WO + w)*KO + ko_blk*32)
```

### Register map (configuration port, word index)

| idx | name | access | meaning |
|---|---|---|---|
| 0 | TRIGGER | W | start a job (ignored while busy) |
| 1 | STATUS | R | bit 0 = busy |
| 2 | HMR_MODE | RW | bit 0: 1 = redundancy mode. Writable only while idle; applies to every later job. |
| 3 | ERR_STATUS | RW | number of mismatches found by the output checker; a write clears it |
| 4 | ECC_CORR | RW | corrected memory words; a write clears it |
| 5 | ECC_UNC | RW | uncorrectable memory words; a write clears it |
| 6-8 | IN_PTR, WT_PTR, OUT_PTR | RW | byte addresses |
| 9-12 | KI, KO, HO, WO | RW | layer sizes |
| 13 | QUANT | RW | [7:0] scale, [12:8] shift |

Writes take effect at the next edge. Read data come back one cycle after the
request, with `cfg_rvalid_o`. Every register except TRIGGER and STATUS
ignores writes while a job runs.

## The two modes in detail

### Performance mode

The controller has two tile walkers (`uloop`). Both walk the same loop nest
`ko_t → h_t → w_t → ki_t`, innermost last, but with a step of 2 on the
column tile: walker 0 takes the even column tiles for datapath 0, and walker
1 takes the odd ones for datapath 1.

There is a single memory port, so in each input block the controller fills
buffer 0 and then buffer 1. The response tag carries a 2-bit buffer mask
(01, then 10). The weight beats are then shared: both halves consume the same
beat in the same cycle, because their tiles need the same output channels.
STREAMOUT drains datapath 0 and then datapath 1. If the layer has an odd
number of column tiles, walker 1 falls off the edge on the last pair and
datapath 1 sits idle.

### Redundancy mode

Both buffers are written by every pixel (mask 11). Datapath 0 is the
**main** copy and datapath 1 the **shadow**. The shadow receives every
response and every accumulator clear through a `TIMESHIFT`-cycle delay line
(default 1). The two copies therefore do identical work, but never in the
same cycle. A disturbance that hits both at one instant, for example on a
shared clock or supply, lands at different points of their computation, so
their results differ.

The `output_checker` delays the main outputs by the same amount and compares
them with the shadow outputs. The comparison is a bitwise XNOR over all 8 PE
x 32 channel x 8 bit outputs, followed by an AND. The check takes
`2 + TIMESHIFT` cycles:

| cycle | what happens |
|---|---|
| 0 | The delay is primed. |
| TIMESHIFT | The delayed main outputs meet the shadow outputs. |
| TIMESHIFT+1 | The controller reads the registered result. |

### Checkpoint and rollback

In redundancy mode walker 0 is the only active walker. Walker 1 is a
**checkpoint**: it holds the position of the current tile's first input block.

* **Check passes.** STREAMOUT writes the tile. Walker 0 advances, and walker 1
  is loaded with walker 0's next position.
* **Check fails.** The FSM spends one cycle in ERROR:
  * it increments ERR_STATUS;
  * it reloads walker 0 from walker 1;
  * it clears all accumulators;
  * it returns to INPUT LOAD.

  The tile is then recomputed and checked again, so a second upset during
  the retry is also caught.

The cost of one detected error is fixed: `1 + (KI/32) * (24 + 256 + 2) + (2 + TIMESHIFT)`
cycles when memory never stalls. For KI = 256 that is 2,260 cycles.

## Controller triplication

`controller` holds three `controller_core` copies. Each copy has its own
register file, FSM, walkers and address generator, and all three get the same
inputs. Every bit of their output structure is voted 2-of-3 by `tmr_voter`.
This covers engine control, memory requests, tags, register read data and
status. A fault in one copy is therefore masked at the voter and never reaches
the datapath or the memory port.

`tmr_mismatch_o` reports that the copies disagree. Copies are not
resynchronised: a copy whose state was upset stays outvoted until the next
reset.

## Memory port and ECC

The top exposes a TCDM-style port:

* **Handshake.** `tcdm_req_o` is held until `tcdm_gnt_i`. A granted read
  returns `tcdm_r_valid_i` with data exactly one cycle later.
* **Data.** The 288-bit payload is nine 32-bit words. Each word is encoded
  separately into 39 bits, so `tcdm_data_o` and `tcdm_r_data_i` are 351
  bits wide.
* **Metadata.** `{we, be[35:0], add[31:0]}` is protected by a second Hsiao
  code with 8 check bits, sent on `tcdm_meta_ecc_o`.

On reads each word is decoded:

* Single-bit errors are corrected and counted in ECC_CORR.
* Double-bit errors are counted in ECC_UNC. The data are passed on as read.

The streamer keeps the tag of the one outstanding read (buffer or weight
beat, mask and index) and returns it with the data. This tag is what routes a
pixel to the right buffer(s).

The Hsiao code uses the weight-3 columns in increasing numeric order, then
weight-5 columns. Any single error therefore gives an odd syndrome equal to
one column, and any double error gives an even, non-zero syndrome.

## Timing measured in simulation

With the memory granting every cycle, the dense layer `[KI,KO,HO,WO] =
[256,32,8,8]` takes:

| mode | cycles | note |
|---|---|---|
| performance | 9,856 | |
| redundancy | 18,136 | +84% |
| redundancy + 1 injected upset | +2,260 | one tile recomputed |

The redundancy-mode cost is nearly a doubling, because each tile is computed
once by the pair instead of two tiles at a time. The output checks add 24
cycles in total: 8 tiles x 3 cycles.

## Verification

Each testbench is self-checking and ends with a line
`TB_RESULT checks=<n> failures=<m>`. Each also has a watchdog.

| testbench | what it checks |
|---|---|
| `tb_hsiao_enc` | The encoder has SEC-DED properties: pass-through data, linearity, odd and distinct columns. |
| `tb_hsiao_dec` | No-error, all 39 single-bit flips corrected, random double flips flagged. |
| `tb_tmr_voter` | Majority and mismatch flag for all single-copy corruptions. |
| `tb_pe` | 32 accumulators against a reference, quantisation at several scale/shift values, clear. |
| `tb_subarray` | A full input block against a reference 3x3 convolution for all 8 PEs. |
| `tb_output_checker` | A shifted equal stream gives no mismatch. A one-cycle corruption is flagged in cycle TIMESHIFT+1. |
| `tb_engine` | Performance mode: two tiles against a reference. Redundancy mode: the one-cycle lag of the shadow, a passing check, and a planted accumulator upset caught within the check. |
| `tb_streamer` | ECC encode/decode through a memory model, single/double error counts, tag return, random grants. |
| `tb_uloop` | Loop order, stride-2 split, edge handling, load. |
| `tb_regfile` | Read-back, trigger only when idle, mode and job registers locked while busy, counters, clear on write. |
| `tb_controller_core` | The full request stream (addresses and buffer masks) against a model of the loop nest, with random grants, in both modes. A reported mismatch causes one error count and an exact re-issue of the tile. |
| `tb_controller` | The triplicated controller equals a single reference core every cycle while each copy in turn outputs random garbage. |
| `tb_safe_neureka` | End to end on `[64,64,8,6]` with random memory stalls. It runs four jobs (see below) and counts each mechanism: stalls, mode switch, refused write, check, rollback, ECC correction and detection, TMR masking. Each mechanism must occur at least once. |
| `tb_safe_neureka_full` | The same sequence with every top parameter at its default, on the `[256,32,8,8]` dense layer, with a memory that always grants. It also checks the cycles spent in output checks and the exact cost of one recovery. |

The four jobs of `tb_safe_neureka` are:

1. A performance-mode job.
2. A redundancy-mode job, with a refused mode write during the run.
3. A redundancy-mode job with an accumulator upset, a single-bit memory error and a double-bit memory error.
4. A performance-mode job in which one controller copy's outputs are corrupted for 30 cycles.

The end-to-end testbenches compare every output byte with a reference
convolution computed in the testbench.

`tb/tcdm_model.sv` is a behavioural memory with random grants. Its
`flip_bit` function injects memory errors, and it checks the metadata ECC of
every request.

To simulate one testbench with Verilator, list the two packages first. For
example:

```
verilator --binary --timing --assert -Irtl -Itb \
    rtl/neureka_pkg.sv rtl/ecc_pkg.sv tb/tcdm_model.sv tb/tb_safe_neureka.sv rtl/*.sv \
    --top-module tb_safe_neureka
./obj_dir/Vtb_safe_neureka
```

Some tests inject faults by writing to internal state through hierarchical
paths:

* `tb_engine`, `tb_safe_neureka`: the accumulators of PE 3 of datapath 0.
* `tb_controller`, `tb_safe_neureka`: the output of one controller copy, `core_out[k]`.

Renaming those instances breaks those tests.

## Where this design departs from the paper or goes beyond it

The following follow the published description:

* the two 4x2 halves;
* the performance/redundancy modes and their switching only while idle;
* the one-cycle shift on the shadow inputs and the delayed main outputs;
* the XNOR comparison and its 2+TIMESHIFT-cycle check;
* the checkpoint walker with rollback to INPUT LOAD;
* the triplicated controller with majority voting;
* nine (39,32) Hsiao words on the 288-bit port, metadata ECC, and software-readable error registers.

Choices made here where the description is silent:

* the beat and memory layouts;
* the quantisation formula;
* the tag format and register map;
* the 8-bit metadata code;
* the TCDM handshake;
* ERROR lasting one cycle;
* the two-cycle drain at the end of MM;
* loading the two buffers back to back in performance mode;
* stepping by 2 over *column* tiles in performance mode. The published text
  says row tiles, but its loop pseudo-code steps the column index; the
  pseudo-code is followed;
* running the comparison in its own OUTPUT CHECK state just before
  STREAMOUT, rather than during STREAMOUT.

Not implemented:

* **Pointwise 1x1 and depthwise 3x3 convolutions.** Only dense 3x3 with
  stride 1 and no padding is sequenced and computed.
* **Variable weight precision (2 to 8 bits).** Weights are always 8-bit.
* **Address look-ahead.** The original walkers compute the addresses of the
  next input block while the current one is processed. Here addresses are
  formed combinationally from the current position, which costs no cycles
  at this size.
* **Programmable tile walkers.** The original walkers are driven by
  microcode. Here `uloop` is a fixed loop nest.
* **Cluster components.** The cores, DMA, L1 banks, scrubber and
  interconnect are outside this RTL.

Consequences for workloads:

* **Dense 3x3 layer `[256,32,8,8]`.** Input 25.6 kB, weights 73.7 kB and
  output 2 kB fit the 128 kB L1 and run at full size.
* **Pointwise, depthwise and network workloads.** These need the missing
  modes, padding or stride 2. They cannot run.

A note on input-block timing. One input block costs 24 + 256 + 2 cycles here,
because the input window is loaded before the block's MM phase and not
overlapped with it. Redundancy mode therefore costs about 84% over
performance mode on the dense layer, close to the near-doubling reported for
the original design. Absolute cycle counts are not comparable with the
original.
