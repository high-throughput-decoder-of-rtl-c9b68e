# A limited-precision layered LDPC decoder for CV-QKD reconciliation

Continuous-variable QKD needs a reconciliation step. The two parties agree on a key by
error-correcting very noisy data with long, low-rate LDPC codes. The decoder sees the
channel samples `R` and the syndrome `s = u·Hᵀ` of the transmitted word. It must find the
word `u`. At the rates such systems run, this has to happen at hundreds of Mbit/s.

This RTL implements a partially parallel, pipelined **layered belief-propagation decoder**
for quasi-cyclic (QC) LDPC codes. The main ideas are:

* **Short messages.** Every message is only 8 bits wide: 1 sign, 4 integer and 3 fraction
  bits. That makes the memories small enough to put **two decoders** in one device.
* **p = 100 lanes.** The decoder processes 100 rows of a circulant per clock cycle.
* **Erase step.** Short messages cost decoding performance. Some of it is bought back by
  a **residue error-bits erase** step. It runs only when the decoded word's syndrome does
  not match `s`.

The default configuration is the rate-0.2 code of length N = 80000, with 13 iterations and
an erase threshold Δ = 40. The same RTL takes the rate-0.1 configuration through
parameters: N = 96000, 10-bit messages with 5 fraction bits, 25 iterations and Δ = 180.

## 1. The algorithm in fixed point

For one layer (one row of the base matrix) and one iteration, every edge (m, n) goes
through three steps:

```
Lqmn = Lq[n] − Lr[m,n]                                   (variable node, VNU)
Lr[m,n] = (1−2·s[m]) · Π sgn(Lqm·n') · Φ( Σ Φ(|Lqm·n'|) ) over n' ≠ n  (check node, CNU)
Lq[n] = Lqmn + Lr[m,n]                                   (total message unit)
```

Here `Φ(x) = −ln tanh(x/2)`. The decided bit is `u[n] = 1` when `Lq[n] < 0`.

The input is `Lq[n] = 2·R[n]/σ²`. It is formed in the receiving unit as `R[n]` times a
`llr_scale` input. Every adder saturates symmetrically to ±(2^(W−1)−1), so ±127 for W = 8.

`Φ` is a table of 2^(W−1) entries, computed at elaboration from the real function. Each
entry is rounded to nearest.

* **Φ(0).** Φ(0) is infinite. The table evaluates it at half an LSB (0.0625) instead. If
  Φ(0) saturated to the largest code, a check message could equal a saturated `Lq`. The
  next iteration's `Lq − Lr` would then carry no information. In a first version, this
  collapsed decoding completely.
* **Clamping.** The sum over a row is kept at full width. The edge's own Φ is subtracted
  from it, and the difference is clamped to the largest code before the second lookup.

## 2. Code structure and schedule

`H` is made of Z × Z circulants: identity matrices cyclically shifted by α. With `k = Z/p`,
a circulant is worked on in `k` row groups of p rows.

**One ROM entry per cycle.** The schedule is a ROM with one entry per
(layer, row group c, circulant). The order is:

1. layer;
2. then row group `c = 1..k`;
3. then the circulants of the layer.

One iteration therefore takes `E = k · Σ(layer weights)` cycles. Each entry carries:

* the two RAM addresses;
* the offset of the window;
* the circulant's column and its position in the layer;
* the first, last and end-of-row-group flags.

The check-message RAM is addressed by the entry's index.

**The code itself is this design's own.** The published matrices of the rate-0.2 and
rate-0.1 codes are not available. `ldpc_pkg` defines a deterministic QC base matrix with
the same kind of edge structure as their multi-edge-type ensembles:

* `NT1` "type-1" layers of weight `D1` on `NCORE = NB − (MB − NT1)` core columns;
* `MB − NT1` "type-2" layers of weight 4. Each has three core columns,
  `(3i, 3i+1, 3i+2) mod NCORE`, plus one degree-1 column of its own;
* shifts `α = (37·l + 53·c + 11·l·c + 5) mod Z`.

The defaults for each rate:

* **Rate 0.2:** Z = 800, a 100 × 80 base matrix, 5 layers of weight 12 and 75 of weight 4.
  This gives E = 2880 cycles per iteration.
* **Rate 0.1:** a 120 × 108 base matrix, 3 layers of weight 12 and 105 of weight 4.
  This gives E = 3648.

This code is not a capacity-approaching code. Frame error rates measured with it say
nothing about the original codes. To use another QC code, change `base_col`/`base_shift`
in `ldpc_pkg`, or replace them with a table. The ROM and every other block follow from
those two functions.

## 3. Variable-message memory and the two shifters

This is the least obvious part of the datapath.

### Memory layout

The N messages `Lq` are stored as N/p words of p values. Word `j` holds columns
`j·p … j·p+p−1`. Even words go to **RAM_L** and odd words to **RAM_R**, both at address
`j/2`. Because N/p is even, each bank has N/(2p) words (400 at the defaults).

### Reading a row group (shift-right unit)

Row group c of a circulant with shift α needs the p values starting at column
`(c·p + α) mod Z` of the circulant's column block. That window covers at most two
consecutive words, one from each bank, so both banks are read in the same cycle.

* **Lower word.** The lower word is `w = (c + ⌊α/p⌋) mod k`.
* **Upper word.** The upper word is `(w+1) mod k`. It wraps inside the column block.
* **Offset.** The window starts `α mod p` values into the lower word.
* **Swap.** The ROM entry stores a `swap` bit, set when the lower word is odd and so sits
  in RAM_R.

The **shift-right unit** then works as follows:

1. It forms `{upper, lower, p zeros}`.
2. It shifts that right by the offset.
3. It returns three p-value slices:
   * `Lq` (middle): the p values the VNU needs;
   * `Lq_L` (top) and `Lq_R` (bottom): the values of the two words *outside* the
     window. These must be written back unchanged.

### Writing back (shift-left unit)

The new values `Lq'` come out of the pipeline many cycles later. They are re-assembled
into the two words in the **shift-left unit**, which forms a 3p-value input, shifts it
left by the same offset and writes the top 2p values back.

The difficulty: row groups c and c+1 of the same circulant share a word. The
outside-the-window values read for row group c+1 were read before row group c's update
was written. The input is therefore chosen by position in the circulant:

| row group   | top p values            | middle | bottom p values                  |
|-------------|-------------------------|--------|----------------------------------|
| c = 1       | `Lq_L` as read          | `Lq'`  | `Lq_R` as read                   |
| 1 < c < k   | `Lq_L` as read          | `Lq'`  | `Lq'` of row group c−1           |
| c = k       | `Lq'` of row group 1    | `Lq'`  | `Lq'` of row group c−1           |

A layer interleaves its circulants inside each row group. The "row group 1" and
"row group c−1" values are therefore kept in two small register files, indexed by the
circulant's position in its layer (up to `DMAX` entries).

## 4. The pipeline

```
addr_gen ROM ─► RAM_L/RAM_R, check RAM, Syn_RAM read ─► shift-right ─► VNU ─► reg
   ─► FIFO_1 (Lq_L, Lq_R, address, flags)    FIFO_2 (Lqmn)
   ─► CNU accumulate ─► row-group queue ─► CNU emit (pops FIFO_1/FIFO_2 edge by edge)
   ─► total message unit ─► shift-left unit ─► RAM_L/RAM_R write, check RAM write
```

**The CNU is split in two halves.**

* The *accumulate* half sums Φ and XORs the signs while the edges of a row group stream
  past. At the last edge, it pushes the row group's totals into a queue four entries
  deep.
* The *emit* half replays the same edges from FIFO_2, which holds `Lqmn`. It subtracts
  each edge's own contribution and produces `Lr`, then `Lq'`. It pops one edge per cycle
  whenever a finished row group is waiting.

So the pipeline never waits for a whole layer. A row group's results leave one row group
after they arrived.

**Read/write conflicts.** A layer may read a column that an earlier layer has not yet
written back. The address generator keeps one counter of outstanding writes per base
column, plus the layer that issued them. It **stalls** while the next entry's column has
writes pending from a different layer. Reads of the same layer are allowed, because that
layer's own write-back order is taken care of by the shift-left unit.

**Back-pressure.** The address generator is also held when FIFO_1 is nearly full
(26 of 32 entries).

**Stall cost.** At the defaults, one frame sees about 112 stall cycles in 13 iterations of
2880 cycles. The type-2 layers are built so that consecutive ones never share a column.

## 5. Frame control, decision and erase

The global controller runs each frame through these phases:

1. **RECV** waits for the receiving unit's `finish_storing`. During RECV, `in_ready` is
   high until a whole frame has been taken.
2. **DECODE** runs `TMAX` passes over the schedule. The first pass uses `Lr = 0`.
3. **DECIDE** runs one read-only pass. The decision unit XORs the hard decisions of each
   row group and compares them with the syndrome word from Syn_RAM, which has a second
   port for this. A sticky `mismatch` flag records any failing row.
4. **ERASE** runs only if the syndrome failed. It is one pass in which the erase module
   may change `Lq`.
5. **OUT** reads RAM_L/RAM_R word pairs and sends `N/(2p)` beats of 2p decided bits
   (RAM_L word in the low p bits).

In decide and erase passes, the VNU passes `Lq` through unchanged (`Lr` taken as 0).

**The erase rule.** A symbol is *suspicious* when its reliability `|Lq|` is below Δ. In
each failing row with **exactly one** suspicious symbol, that symbol is taken to be the
error. It is overwritten with `−sign·Δ`, which flips its decision. Rows with two or more
suspicious symbols are left alone.

Like the CNU, the module accumulates per row group and then emits edge by edge. The
number of flipped symbols is reported on `flips`.

The rule is this design's simple reading of the erase step. It is a single pass, and the
syndrome is not re-checked after it. The step as originally described costs about 2.4
iterations (rate 0.2) or 3 iterations (rate 0.1), so it is probably more elaborate. On
the generated code at σ = 0.6, the rule flips about 170 bits of an 80000-bit frame. It
usually leaves no or one residual error.

## 6. Interfaces and timing

`ldpc_top` holds `NUM_DEC = 2` independent decoders. Each has its own ports; only
`llr_scale` is shared.

| port                         | width   | meaning                                                       |
|------------------------------|---------|---------------------------------------------------------------|
| `in_valid`, `in_ready`       | 1       | beat handshake, taken when both are high                       |
| `in_r`                       | p × 12  | channel samples, two's complement, 8 fraction bits             |
| `in_s`                       | p       | syndrome bits, in the first M/p beats (0 afterwards)           |
| `llr_scale`                  | 12      | 2/σ², unsigned, 8 fraction bits                                |
| `u_valid`, `u_data`          | 1, 2p   | decided bits, N/(2p) beats in column order                     |
| `frame_done`                 | 1       | one-cycle pulse after the last output beat                     |
| `syn_ok`, `erased`, `flips`  | 1,1,32  | syndrome matched / erase pass ran / bits flipped               |
| `stalls`                     | 32      | running count of interlock stall cycles                        |

**Input.** A frame is N/p beats in column order. The frame's last beat must be the N/p-th.

**Cycles per frame.**

```
N/p  +  TMAX·E  +  E (decide)  +  [E (erase)]  +  N/(2p)  +  stalls  +  ~30 (pipeline drain)
```

For the default configuration, the full-size simulation measures 44541 cycles per frame
with the erase pass included. At 100 MHz with two decoders, that is **359 Mbit/s**. The
published figure for this configuration is 360.92 Mbit/s.

**Clocking and reset.** One clock; asynchronous active-low reset. Memories are not reset.
The receiving unit overwrites every word before a frame is decoded.

## 7. Files

| file | block |
|------|-------|
| `rtl/ldpc_pkg.sv` | defaults, schedule entry type, code construction, Φ table function |
| `rtl/ldpc_top.sv` | two decoders |
| `rtl/ldpc_decoder.sv` | one decoder: pipeline, FIFOs, wiring |
| `rtl/gcu.sv` | global controller (frame phases) |
| `rtl/rx_unit.sv` | receiving unit (scaling, bank interleave, syndrome store) |
| `rtl/addr_gen.sv` | schedule ROM, iteration counter, read/write interlock |
| `rtl/var_msg_ram.sv`, `rtl/chk_msg_ram.sv`, `rtl/syn_ram.sv` | RAM_L/RAM_R, check messages, true dual-port syndrome RAM |
| `rtl/shift_right_unit.sv`, `rtl/shift_left_unit.sv` | window extraction and write-back assembly |
| `rtl/vnu.sv`, `rtl/cnu.sv`, `rtl/total_msg_unit.sv` | the three arithmetic steps |
| `rtl/sync_fifo.sv` | FIFO_1, FIFO_2 and the row-group queues |
| `rtl/decision_unit.sv`, `rtl/erase_unit.sv` | syndrome check and residue error-bits erase |

## 8. Simulation and checks

Every module has a self-checking testbench in `tb/` named `tb_<module>`. Each prints
`TB_RESULT checks=… failures=…`. `tb/ldpc_ref_pkg.sv` is a bit-accurate reference decoder:
a class with the same fixed point, schedule, Φ table and erase rule. The decoder-level
tests compare every decided bit and every status output with it.

* `tb_ldpc_decoder`, `tb_ldpc_top`: a small code with p = 4, Z = 8 and N = 96. There are
  40 and 2×24 frames, over noiseless and noisy channels. `tb_ldpc_top` counts interlock
  stalls, input back-pressure, failed syndromes (erase mode), erase flips and clean
  decodes, and fails if any never occurs.
* `tb_ldpc_top_full`: both decoders at the default size, one frame each. This takes
  about 3 s of simulation. The decided bits must match the reference model exactly. Against
  the transmitted word, up to 10 residual bit errors per frame are accepted. At the chosen
  noise level (and with the design's own matrix) a frame can end with a few bits wrong even
  after erasing, and the test checks the hardware, not the code's error rate.
* `tb_ldpc_rate01`: the rate-0.1 configuration through parameters, one frame per decoder.

To run one with Verilator, list the package first. At the reduced test sizes lint reports
width warnings that do not stop a run, hence `-Wno-fatal`:

```
verilator --binary --timing --assert --timescale 1ns/1ps -Wno-fatal \
    --top-module tb_ldpc_top rtl/ldpc_pkg.sv \
    $(ls rtl/*.sv | grep -v ldpc_pkg) tb/ldpc_ref_pkg.sv tb/tb_ldpc_top.sv
./obj_dir/Vtb_ldpc_top
```

Unit tests need only the package, the module and its testbench. The `cnu` and
`erase_unit` tests also need `rtl/sync_fifo.sv`.

## 9. How far to trust it

These parts are directly checked against an independent model or worked example:

* the arithmetic;
* the memory layout and both shifters (including the worked example with p = 2);
* the schedule;
* the interlock;
* the frame sequence.

Whole-frame results are checked bit-exactly against the reference model. That model
shares the design's choices: the code, Φ(0), the erase rule and the schedule order. It
confirms that the hardware computes what the model says, not that the choices match the
original decoder.

Departures and open points:

* **Code.** The parity-check matrices are generated here (section 2).
* **Erase.** The erase algorithm is a simplified single-pass rule (section 5). Its gain in
  frame error rate has not been measured against the original.
* **Syn_RAM depth.** Syn_RAM holds M/p words, one per row group, not one per check-RAM
  word. One syndrome bit per row is all the decoder needs.
* **Interlock.** Read/write conflicts are handled by an interlock in hardware as well as
  by the choice of matrix.
* **Iteration counter.** `Iter_num` advances when the read side wraps to the next
  iteration, not once the last write-back of the iteration has finished. The pipeline
  overlaps iterations, so there is no moment when the writing is complete and the next
  reads have not begun. The number of iterations run is the same.
* **Own choices.** These are not specified by the original description and were chosen
  here:
  * the CNU's elastic split and the FIFO depths;
  * the input sample format and the scale input;
  * the beat-level interfaces;
  * the Φ quantisation.
* **Not modelled.** The FPGA board, its host link and the distribution of frames to the
  two decoders are not part of the RTL.
