# A GARI decoder core in SystemVerilog

This design decodes correlated (Y-type) errors in quantum LDPC codes. It runs
belief propagation on a detector error model that has been reshaped by
*graph augmentation and rewiring for inference* (GARI). The RTL targets the
[[144,12,12]] bivariate bicycle ("gross") code. A single hardware core
decodes one syndrome window. The top level holds three independent cores.

## 1. The problem the hardware is built around

GARI turns the X/Z/Y error model into a parity-check matrix with four row
blocks. Each block has a very different shape:

| block | rows (checks) | variables it touches | character |
|---|---|---|---|
| D_X | 792 | 7920 merged variables ē_Z | few checks, high degree (up to 45) |
| D_Z | 936 | 8784 merged variables ē_X | few checks, high degree (up to 45) |
| U | 7920 (one per ē_Z) | ē_Z, e_Z and a few e_Y | many checks, low degree (3 to 23) |
| V | 8784 (one per ē_X) | ē_X, e_X and a few e_Y | many checks, low degree (3 to 23) |

Each e_Y variable sits in exactly one U check and one V check. U and V have
no variables in common with each other except through e_Y. D_X and U share
only ē_Z, and D_Z and V share only ē_X.

The design exploits that split. It uses two very different engines:

* **The D_X,D_Z unit** is a *serial*, layered min-sum decoder. It walks
  through the 792 + 936 high-degree checks one per cycle, with one wide
  check-node unit (CNU). The unit is split into 45 *tiles*. A tile is a
  memory bank holding up to 345 D_X variables and 286 D_Z variables. Every
  check touches at most one variable per tile, so all operands of a check
  are read in one cycle.
* **The U,V unit** consists of 18 small *data-driven* tiles. They process
  the thousands of low-degree U and V checks in parallel. A tile does
  nothing until the total of its ē variable arrives from the serial unit.
  It then updates that check and sends the results on.

Crossbars move values between the two units, and between U and V for the
e_Y messages.

### Schedule

One iteration has two *steps*. The U and V work hides under the D_Z and D_X
steps:

| step | D_X,D_Z unit | U,V unit |
|---|---|---|
| 1 | D_X | (first iteration: loading) |
| 2 | D_Z, then parity check | U (fed by the ē_Z totals of step 1) |
| 3 | D_X | V (fed by the ē_X totals of step 2) |
| 4 | D_Z, then parity check | U |
| … | … | … |

The design enforces this order as follows:

* At the end of a D_X step, every ē_Z total computed in it is released to
  the U tiles. Each U check then sends its new ē_Z total back into the D_X
  value memory, which is idle during the D_Z step.
* After each D_Z step the hard decisions are checked against all D_Z
  checks. If no check is violated, decoding stops.

## 2. Numbers

| quantity | value | where it comes from |
|---|---|---|
| input LLR | 6 bits | published operating point |
| check-to-variable message | 8 bits, saturated to ±127 | published |
| variable total | 10 bits, saturated to ±511 | published |
| min-sum normalization | 3/4, as (3·m)>>2 | this design's choice |
| D_X,D_Z tiles | 45, depths 345 (D_X) and 286 (D_Z) | published |
| checks | 792 D_X, 936 D_Z | published |
| U,V tiles | 18, check degrees 23,17,13,11,11,11,7×8,5,5,3,3 | published |
| U,V slots | 1000 per tile: 0–499 U, 500–999 V | published (500 per matrix) |
| e_Y lanes | degree − 2 per tile, 122 in total | derived |
| crossbars | 45→18, 18→45, 122→122 | derived from the above |
| cores | 3 | published |

## 3. D_X,D_Z unit (`dxdz_unit`)

### Pipeline

One check is issued per cycle. `iteration_control` reads one row of the
control ROM for it. The row holds one `ctrl_t` per tile:

* `valid`: whether the tile takes part;
* `addr`: the 9-bit variable address;
* `first`: the variable's first touch in the step;
* `last`: the variable's last touch in the step.

| stage | tile (`dxdz_tile`) | shared |
|---|---|---|
| S1 | read the V^DX or V^DZ value memory, the calibration memory C and the tag memory | syndrome bit from the queue |
| S2 | select the operand: C at a first touch in iteration 1, else the value memory | pop the message buffer (iteration ≥ 2) |
| S3 | q = operand − old message (saturated) | CNU stage 1: two minima, argmin, sign parity |
| S4 | — | CNU stage 2: normalization and sign |
| S5 | write q + r back; at a last touch, queue the total (and write the hard decision in D_Z) | push the new messages into the message buffer |

The write lands 5 cycles after issue. Two checks that share a variable must
therefore be at least 5 issue slots apart. Arranging this is the job of
whoever orders the checks in the ROM.

The *message buffer* is a FIFO with one entry per check. Each entry holds
all 45 messages of that check. It is filled in check order during one
iteration and drained in the same order in the next. A masked tile sends
the largest magnitude with a positive sign into the CNU. This way the tile
never becomes a minimum and never flips a sign.

### Handing totals to the U,V unit

At a variable's last touch, its total leaves the tile. It is tagged with a
destination (U,V tile) and an address (slot). These come from the tile's
tag memory. The tagged value goes into a *release queue*.

The queue counts what it has received in the current step (`pending`). At
`step_end` that count becomes *credit*, and only credited entries may
leave. This makes "enable the transfer at the end of the step" exact, even
when the next step's totals are already queued behind.

Totals that come back from the U,V unit carry `{matrix, address}`. They are
written into the value memory of the matrix *not* being processed. An
assertion checks this.

### Convergence (`conv_check`, `syndrome_store`)

The hard-decision registers are flat flip-flops, 45 × 286. Each D_Z check
XORs its syndrome bit with one hard decision per tile, chosen by a loadable
table. All 936 parities are computed at once and registered. The parities
are then OR-reduced and registered again. The result is ready two cycles
after the D_Z step ends.

In the meantime the next D_X step has already started. It is simply
abandoned if the parity check passes. The syndrome store is one register
file. Its circular-queue view is a pointer that advances with every issued
check and restarts with each decode.

### Step length

A step lasts `step_len_x` (D_X) or `step_len_z` (D_Z) cycles. This must be
at least the number of checks plus 6: one cycle of issue latency plus the
5-stage pipeline. A decode of *i* iterations takes exactly

    cycles = i · (step_len_x + step_len_z) + 3

At the minimum lengths this is i·1740 + 3. The published core reaches
i·1728 + 10 because it overlaps the tail of one step with the head of the
next. Here the steps do not overlap. The step length must also cover the U
or V work that runs under the step (section 5). The testbenches use
step_len = checks + 40 at their reduced sizes. At full size, the margin
needed beyond checks + 6 depends on the real variable-to-tile mapping.

## 4. U,V unit (`uv_unit`, `uv_tile`)

Each slot of a tile holds one U or V check. Such a check joins:

* one e_Z or e_X variable, whose prior is stored in the tile;
* up to *L* e_Y variables, where *L* is the tile's lane count;
* one ē variable, whose total arrives from the serial unit.

Per slot, the tile stores:

* the e_X/e_Z prior;
* per lane: the e_Y prior e^C, the last message e^M received from the
  check on the other side, and a tag e^T naming the global lane and slot of
  that other check;
* the ē tag (back to a D tile and address);
* the last message sent to ē.

When a total arrives, the tile takes it from a queue and reads the slot.
It then forms the CNU inputs:

* the prior;
* for each lane, e^C + e^M (an e_Y variable has exactly two checks, so this
  is its variable-to-check message);
* total − last message.

It runs min-sum with a zero syndrome. Three cycles later it emits:

* one message per valid lane, into the 122-port lane crossbar, which
  delivers it to the partner lane's e^M memory;
* the new total (input − old + new message) towards the D tiles.

The tile has no controller. Which half (U or V) it works on is decided
purely by which slot addresses arrive.

Message memories read as zero until first written after reset. The U,V
unit is reset at the start of each decode, so every decode starts from
zero messages. This matches a decoder that begins with all check messages
at zero.

## 5. Crossbars (`fifo_xbar`, `xbar_dist`)

A J-port crossbar is a radix sort in K = ⌈log2 J⌉ levels:

* At level *i*, each of the J/2 two-by-two nodes pairs positions that lie
  2^(K−1−i) apart. The node routes each message on bit K−1−i of its
  destination, MSB first: 0 goes to the lower position, 1 to the upper.
* After K levels a message sits at the position equal to its destination.
* When both inputs of a node want the same output, the node arbitrates
  round robin and holds one input back. This is the crossbar's only stall.
* FIFOs sit at the inputs, two-entry ping-pong buffers between the levels,
  and FIFOs again at the outputs.
* Ports beyond NIN/NOUT up to 2^K are tied off.

The input FIFOs are large (512) because producers are not allowed to
stall. A U,V tile emits all its lane messages in the cycle a check
finishes. Assertions flag any loss.

The destination port travels inside the message from the start. The tag
memories of the tiles already hold it, so no per-stage lookup is needed.

## 6. Loading a code

Everything the code and the noise decide is written before `start`, over
one bus, `load_t = {valid, target, tile, lane, addr, data}`:

| target | into | addr | data |
|---|---|---|---|
| LD_CTRL | control ROM of tile | check (D_Z after the 792 D_X) | `{valid[11], first[10], last[9], addr[8:0]}` |
| LD_DXTAG | tag memory of D tile | `{matrix[9], var[8:0]}` | tag: `valid[31], dest[30:23], addr[10:0]` = (U,V tile, slot) |
| LD_CONV | parity table of tile | D_Z check | `{valid[9], addr[8:0]}` |
| LD_LLR_DX | calibration memory of D tile | var (D_Z after VX_DEPTH) | 6-bit LLR |
| LD_UV_XZ | U,V tile prior | slot | 6-bit LLR |
| LD_UV_YLLR | U,V tile lane prior | lane, slot | 6-bit LLR |
| LD_UV_YTAG | U,V tile lane tag | lane, slot | tag = (global lane of partner, partner slot) |
| LD_UV_BTAG | U,V tile ē tag | slot | tag = (D tile, `{matrix, var}`) |
| LD_SYN | syndrome store | check (D_Z after D_X) | bit 0 |

The tables follow from the code and the mapping by these rules:

* D_X check *c* in tile *t* gets `valid=1` and `addr=a` if variable (t, a)
  is in the check.
* `first` and `last` mark the first and last check in the step's order
  that touch (t, a).
* The parity table repeats the D_Z part of the control ROM.
* Global lane numbers count the lanes of the tiles in order: tile *k*
  starts at Σ_{j<k} L_j.

For a new decode with the same code, only LD_LLR_DX, the U,V priors and
LD_SYN need rewriting.

## 7. Where this design departs from the published one

* **Steps do not overlap.** Each step takes a fixed, programmable number of
  cycles: at least the number of checks + 6. This gives i·(step_len_x +
  step_len_z) + 3 cycles instead of i·1728 + 10.
* **Pipeline depths:** 5 stages in the serial unit (published: 8) and 3 in
  a U,V tile (published: 10). Retiming for a 300 MHz target is not done.
* **Crossbar details:**
  * The destination index is carried in every message rather than added
    by a tagging stage.
  * The input FIFOs come before the first level.
  * Nodes are 2×2 with round-robin arbitration.
* **Release queue:** totals are queued in each D tile and released with
  credits at step end, instead of waiting in the crossbar's input queue.
  The observable behaviour is the same: nothing leaves before its step
  ends.
* **Convergence** is tested over the 936 D_Z checks, as the text and the
  parity-unit size (936 registers) say. One block diagram draws the test
  against D_X. The speculative start of the next step while the result is
  computed is this design's choice.
* **Normalization factor** 3/4 is chosen here; no value is published.
* **Loading:** one target-addressed load bus fills every table and memory.
  The ROMs are therefore writable memories. The code-specific contents
  (the GARI matrices and the variable-to-tile mapping) are not published,
  so the design cannot ship them.
* **Ensemble:** the three cores are independent, each with its own ports.
  How an ensemble shares inputs and merges results is not built.

## 8. Verification

Every module has a self-checking testbench in `tb/`. Each one ends with a
single `TB_RESULT checks=N failures=M` line and has a watchdog.

The decoder-level tests use `gari_tb_pkg`. It generates random codes with
the GARI structure (tiles, first/last touches, U,V slots, e_Y links) at any
size. It also contains a bit-exact reference decoder that uses the same
schedule and saturations. The main tests:

| testbench | what it shows |
|---|---|
| `tb_gari_core` | one core, reduced size (4 D tiles, 20+24 checks, 3 U,V tiles), 7 decodes vs the reference. Checks every hard decision, the iteration count, the exact cycle count, and the convergence flag. Counts early stops, stops at the iteration limit, calibration reads, masked CNU inputs, crossbar stalls and step-end releases; each must occur. |
| `tb_gari_ensemble` | three reduced cores loaded and run concurrently with different codes |
| `tb_gari_scaled` | the same end-to-end test at a larger size: 16 D tiles of depth 40, 120 + 140 checks, 6 U,V tiles with 5,3,3,1,1,1 lanes and 256 slots |
| `tb_dxdz_unit` | the serial unit alone, with U,V replaced by an identity loopback and random backpressure |
| `tb_uv_unit` | U, V, U, V steps on the U,V unit with random totals, checking the e_Y exchange through the lane crossbar |
| `tb_fifo_xbar` | random traffic through 5→3 and 12→12 crossbars: every item delivered once, to the right port |

To run one with Verilator:

    verilator --binary --timing --assert -Irtl -Itb rtl/gari_pkg.sv tb/gari_tb_pkg.sv \
        -y rtl -y tb tb/tb_gari_core.sv --top-module tb_gari_core
    ./obj_dir/Vtb_gari_core +verilator+rand+reset+2

Leave out `tb/gari_tb_pkg.sv` for the leaf tests that do not import it.

No simulation runs the top at its default size (three cores of 45 + 18
tiles). Verilator turns that configuration into several hundred C++ files,
and compiling them takes far longer than the simulation would. The largest
configuration simulated is the one in `tb_gari_scaled` (above). It exercises
the same RTL with only the size parameters changed.

## 9. Limits

* The random test codes have the right structure but are not the
  [[144,12,12]] GARI matrices. Decoding quality on the real code is
  therefore not shown, only bit-exactness against the reference algorithm.
* The U (or V) exchange must finish within one step. Whether it does at
  full size depends on the real mapping. The design does not stall if it
  does not finish; instead an assertion flags a value returning into the
  memory being processed. Increase `step_len_*` if that fires.
* In `tb_gari_scaled`, about 107 totals per U,V tile went through the
  16→6 and 6→16 crossbars. The round trip needed more than 180 cycles, so
  checks + 60 was too short and checks + 100 works. That is well above the
  10–20 % routing overhead reported for the original design. At full size,
  each tile has up to 500 totals per half and the step is 798 or 942 cycles
  long, so the crossbars here may need longer steps than the minimum. This
  has not been measured at full size.
* There is no input/output interface to a quantum control system; LLRs and
  syndromes enter on the load bus.
