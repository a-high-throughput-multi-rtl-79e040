# Multi-mode flooding LDPC decoder for 5G NR base graph 1

The 5G NR data channel uses one family of LDPC codes. A single base graph
(BG1, 46 check rows by 68 columns) is expanded by a lifting size Z, and every
code rate from 11/12 down to 1/3 is a top-left part of the same matrix. This
decoder handles Z up to 96 and any number of rows from 4 (rate 11/12) to 46
(rate 1/3). It runs offset min-sum under a flooding schedule with 5-bit
messages. Two ideas keep it small and fast:

* **Extended variable nodes.** Columns 27..68 of BG1 are degree-1 parity bits:
  each has a single edge, to row 4 + k, with shift 0. Those columns need
  neither an accumulator nor a shift network. The decoder gives them an adder
  and a 42-entry memory, and wires them lane to lane to the check nodes.
* **A shift network that splits.** The network between variable and check
  nodes can run as one 96-lane rotator, two independent 48-lane rotators or
  four independent 24-lane rotators. For Z <= 48 or Z <= 24 the idle lanes then
  decode two or four frames side by side. Each slot also holds two frames, so
  up to eight frames are in flight and throughput stays close to the Z = 96
  figure.

All RTL is SystemVerilog in `rtl/`. A self-checking testbench for each module
is in `tb/`.

## 1. How the matrix maps onto hardware

| BG1 part | columns | rows | hardware |
|---|---|---|---|
| mother code | 0..25 | 0..3 | 13 groups x 96 VNs (`vn_unit`); node (g, i) serves columns g and g+13, lane i |
| extension checks | 0..25 | 4..45 | the same VNs |
| diagonal parity extension | 26..67 | 4..45 | 96 EVNs (`evn_unit`), 42 entries each |
| all rows | | | 96 check nodes (`cn_unit`); node i serves lane i of the current layer |

A *layer* is one base-graph row lifted by Z: Z check equations. The check
nodes take one layer in two clocks, called half layers. In half 0 VN group g
sends column g. In half 1 it sends column g + 13, and the EVN of that layer's
extended column is sent as well. So one check node sees at most 13 + 1
messages per clock. Its 16-input comparator takes those 14 plus the two
minima carried over from half 0.

Between VN group g and the check nodes sit two shift networks (`shift_net`),
one per direction, 26 in all. For the circulant at (layer, column) with
coefficient V, the shift is `sv = V mod Z`. Check-node lane r gets VN lane
`(r + sv) mod Z`, and the way back uses `(Z - sv) mod Z`.

## 2. The two-slot flooding schedule

This part is the hardest to follow. Time is cut into **periods** of
`2L + 1` clocks, where L is the number of layers in use. In clock
`c < 2L` of a period, layer `c/2` and half `c%2` are issued to two pipelines
at once:

* **stage 1** (VN -> CN) works on the frame in slot `p` (p = period parity).
  The VNs put out the APP values they hold in their *outgoing* registers. The
  check nodes subtract the message each edge got one iteration earlier, then
  compute the parity and the minima of every layer. They store the minima per
  layer.
* **stage 2** (CN -> VN) works on the frame in slot `!p`. The check nodes turn
  the stored minima of that frame into messages. The VNs add them, layer by
  layer, into their *incoming* registers, starting from the channel LLR. At
  the last layer the sum goes into the outgoing register.

Clock `2L` is the pipeline drain. At the end of the period the outgoing
registers hold the new APP of slot `!p`, and that slot enters stage 1 next
period. So one iteration of a frame is two periods, `4L + 2` clocks: 18 clocks
at rate 11/12. Each period does useful work for both frames.

Timing inside a period (forward shift network registered, backward one
registered):

| clock | controller issues | CN stage 1 | VN |
|---|---|---|---|
| c | layer c/2, half c%2; CN memory read address; stage-2 messages leave the CN | - | outgoing entry c%2 drives the forward network |
| c+1 | - | APP arrives, subtract, compare; minima stored after half 1 | message from the backward network added |

The EVN memory is read for the stage-1 frame and written for the stage-2
frame in the same clock, at the same address. A read returns the old value.
This is why one 42-entry memory is enough for two frames.

**Frame life.** The host loads a free slot. At the slot's next stage-2 period
after the load (or, with `cfg_early`, after the mother code, columns 0..25,
is loaded) it starts *fresh*: every check-node message is forced to zero. The VNs then
take the bare LLRs, and the check-node message memory is cleared. Each later
stage-1 period is a full parity check of the current hard decisions. The
frame ends after the first clean check (early termination) or after 10
iterations. The result appears `(2 + 2 x iterations) x (2L + 1) + 1` clocks
after `frame_start`.

## 3. Check node (`cn_unit`, `cn_comparator`)

Stage 1 takes, per edge, `v2c = sat(APP - old C2V)`. The hard decision is the
sign of the APP, before the subtraction; the XOR of the hard decisions is the
row parity. |v2c| goes into a binary min1/min2 tree. A missing edge enters as
magnitude 15 with sign +, so it never wins. After half 0 the tree's min1,
min2 and index of min1 are held in feedback registers and fed back as two
inputs in half 1. The layer result, with the sign product, goes into the
minimum registers of the slot, one entry per layer.

Stage 2 looks up the slot's entry for the layer. Each edge gets min2 if it
is the min1 edge and min1 otherwise. Then the offset of 1 LSB is subtracted,
with a floor of 0. The message is negated if the sign product times the
edge's own v2c sign is negative. The message goes to the VNs and into the
message memory, which holds 2 slots x 46 layers x 2 halves x 14 messages.

## 4. Variable nodes (`vn_unit`, `evn_unit`)

A VN has an input selector (LLR at the first layer, its own register later),
a saturating adder, and two 2-entry registers. The incoming register
accumulates. The outgoing register holds the APP being sent. The entries are
indexed by half layer. In a layer where the column has no edge nothing is
written, except that the first layer always loads the LLR and the last layer
always forwards to the outgoing register.

An EVN stores `sat(extended LLR + C2V)` at address `layer - 4` and reads the
same address for the other frame.

## 5. Shift network and multi-frame mode (`shift_net`)

A log-stage rotator can only rotate all N lanes. The Banyan variant used
here runs two copies side by side:

* the *original* rotates by SV;
* the *duplicate* rotates by SV + (N - Z);
* a final column of 2:1 multiplexers takes the original for output lanes
  `k < Z - SV` and the duplicate for the rest.

Each copy has 7 stages for N = 96. Stage s moves data by 2^s lanes and wraps
inside the segment width: 96, 48 or 24 for `PAR1`, `PAR2` or `PAR4`. In split
mode every segment uses its own width in place of N, so it works as an
independent smaller network. The output is registered.

In `PAR2` and `PAR4` frame f of a slot uses lanes `f*96/P .. f*96/P + Z - 1` of
every column. The frames of one slot share Z, the code rate and the shift
values. They run in lock step, and the slot ends when all of its frames pass
or the iteration limit is reached. `dec_seg_ok` reports each frame's parity
result. With `PAR1` and Z < 96, the lanes at and above Z are disabled.

## 6. Interface (`ldpc_decoder`)

| port | meaning |
|---|---|
| `cfg_z`, `cfg_par`, `cfg_layers` | lifting size, parallelism (`PAR1/PAR2/PAR4`), layers L (4..46). Keep them stable while frames are in flight. |
| `cfg_early` | early start: a slot may begin decoding once columns 0..25 (the mother code) are in. The host must then send columns 26, 27, ... in ascending order, one per clock. Column 26+k is first read in clock 9+2k of the first period, so a gap-free load always stays ahead. |
| `ld_valid/ld_ready/ld_col/ld_last/ld_llr[96]` | load one column (96 five-bit LLRs, positive means bit 0) per accepted clock. Columns 0 .. 21+L, in any order, or in ascending order with `cfg_early`. `ld_last` marks the final column. |
| `ld_slot` | slot being loaded |
| `dec_valid/dec_slot/dec_iters/dec_seg_ok/dec_bits[26][96]` | result of one slot: hard decisions of columns 0..25 (information bits are columns 0..21), iterations run, per-frame parity flag |
| `period_start`, `frame_start`, `frame_slot` | status |

Reset (`rst_n`) is asynchronous and active low. It covers the control state
only. The datapath memories need no reset, because a fresh period writes
them before they are read.

## 7. Numbers

Messages are 5-bit and saturate at +/-15. The offset is 1 LSB, which
corresponds to 0.5 if the LLRs carry one fractional bit. The limit is 10
iterations. One iteration is 18 clocks at rate 11/12 and 186 clocks at rate
1/3.

The figures below assume that every frame runs to the limit (fresh period,
then 10 iterations, then a final check: 11 x (4L + 2) clocks) and that two
frames are in flight:

| case | clocks per 2 frames | throughput at 82 MHz | at 526 MHz |
|---|---|---|---|
| rate 11/12, Z = 96, N = 2496 | 198 | 2.07 Gb/s | 13.3 Gb/s |
| rate 1/3, Z = 96, N = 6528 | 2046 | 0.52 Gb/s | 3.4 Gb/s |
| Z = 48, PAR2 (4 frames) | as Z = 96 | same as Z = 96 | |
| Z = 24, PAR4 (8 frames) | as Z = 96 | same as Z = 96 | |

Early termination shortens all of these.

## 8. Where this RTL departs from, or goes beyond, the published description

* **Base-graph table.** The shift coefficients of BG1 (3GPP TS 38.212,
  eight lifting sets) are not reproduced. `ldpc_pkg::bg_value()` returns a
  placeholder table with BG1's shape:
  * mother code with the dual-diagonal core parity in columns 22..25;
  * extension rows over the first 26 columns;
  * the degree-1 diagonal in columns 26..67, with shift 0.

  To decode real 5G frames, put the standard table (for the set that holds Z)
  into that function. Nothing else changes. `V mod Z` already follows the
  standard's rule.
* **Rows.** 46 rows, as BG1 has. A drawing of the matrix outline also shows
  48, but 46 rows agrees with the 42 extended columns.
* **Internal choices.** The following are this design's own:
  * the switch-level order of the shift network (a barrel arrangement that
    keeps the 96/48/24 split);
  * the EVN message travelling with the second half layer;
  * stored per-edge signs;
  * the zero-message first pass;
  * per-slot early termination;
  * the in-order loading rule that makes the early start (decoding from the
    mother code on) safe;
  * the load and result interface;
  * one drain clock per period.
* **Pipeline depth.** This design has one register in each shift direction
  and one drain clock per period. Published descriptions of this decoder give
  four and five pipeline stages. The RTL matches neither figure.
* **Not included.** Rate matching, puncturing and de-interleaving happen
  before the LLRs reach `ld_llr`. The two punctured columns are simply loaded
  with LLR 0. There is no BG2 support and no clock gating of disabled lanes
  (their registers are write-disabled instead).

## 9. Verification

Each testbench prints `TB_RESULT checks=N failures=M` and has a watchdog.

| testbench | what it checks |
|---|---|
| `tb_shift_net` | every active lane of random rotations, all Z up to the segment width, all three modes |
| `tb_cn_comparator` | min1, min2, index against a sort, with many ties |
| `tb_cn_unit` | ten periods with two frames in flight, against an offset min-sum model, including the node's own old messages and the row parity |
| `tb_vn_unit` | saturating accumulation in layer order, unconnected layers, outgoing register held during accumulation, disabled lane |
| `tb_evn_unit` | saturating sum, registered read, read-before-write |
| `tb_llr_buffer` | both read ports against the written data |
| `tb_shift_rom` | every entry against the table definition |
| `tb_ctrl_unit` | period length, 18 clocks per iteration at L = 4, shift values, delayed VN controls, fresh period, early termination, iteration limit, latency |
| `tb_ldpc_decoder` | the whole decoder at its default size; see below |

`tb_ldpc_decoder` sends noisy all-zero codewords, which are codewords of any
LDPC code, through the full 96-lane decoder. It covers:

* rate 11/12 with Z = 96 and with Z = 96 under heavy noise;
* Z = 40 in `PAR2` and Z = 20 in `PAR4`, two slots each, so 8 frames;
* rate 1/3 with Z = 64, so that lanes are disabled and all 42 EVN entries are
  used;
* rate 1/2 (L = 24) with Z = 96;
* rate 1/3 with Z = 96 and the early start, with one load timed so that the
  frame starts while its extended columns are still arriving.

Every result is compared bit for bit with a behavioural flooding min-sum
decoder inside the testbench: hard decisions, iteration count, per-frame
parity flags and exact latency. The testbench also counts that early
termination, the iteration limit, each mode, disabled lanes, EVNs, two
active slots and the early start all occur.

Run a testbench with plain Verilator, from the folder that holds `rtl/` and
`tb/`:

```
verilator --binary --timing --assert -Wno-fatal --top-module tb_ldpc_decoder \
  -Irtl rtl/ldpc_pkg.sv $(ls rtl/*.sv | grep -v ldpc_pkg) tb/tb_ldpc_decoder.sv
./obj_dir/Vtb_ldpc_decoder
```

The full decoder takes about two minutes to compile and a few seconds to run.

## 10. Files

| file | content |
|---|---|
| `rtl/ldpc_pkg.sv` | sizes, message types, saturating arithmetic, base-graph table |
| `rtl/ldpc_decoder.sv` | top level |
| `rtl/ctrl_unit.sv` | schedule, shift values, slots, early termination |
| `rtl/shift_rom.sv` | base-graph ROM |
| `rtl/shift_net.sv` | splittable Banyan-variant rotator |
| `rtl/cn_unit.sv`, `rtl/cn_comparator.sv` | check node and its minimum tree |
| `rtl/vn_unit.sv`, `rtl/evn_unit.sv` | primary and extended variable nodes |
| `rtl/llr_buffer.sv` | channel LLR storage for the two slots |
