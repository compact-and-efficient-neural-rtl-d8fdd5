# LST-1: a handwritten-digit classifier built on a learned 2-D separable transform

## The idea

A fully connected layer that takes a 28x28 image flattens it into 784 inputs and needs a weight
for every input of every output. The learned 2-D separable transform (LST) instead treats the
image as 28 rows and applies **one** small fully connected layer, FC1 (28 inputs to 28 outputs,
plus bias), to every row, followed by tanh. It then applies a second shared layer, FC2, to every
**column** of that result, again followed by tanh. With `X` the image, `V` the row result and `Y`
the column result:

    V[k, :] = tanh(W1 · X[k, :] + b1)      k = 0..27   (rows)
    Y[:, k] = tanh(W2 · V[:, k] + b2)      k = 0..27   (columns)

The two layers together hold only 2·(28+1)·28 = 1624 parameters. The classifier built here,
LST-1, passes `Y` (flattened row by row to 784 values) through one 784x10 fully connected layer
and takes the index of the largest of the ten scores as the digit. That is 9474 parameters in
total. The published accuracy on the MNIST test set for this model is about 98 %.

The hardware uses that structure directly. Every row and every column uses the same 28x28
matrices, so 28 multiply-accumulate processing elements (PEs) are enough for both layers. PE #i
always computes output i. The data word is broadcast to all of them, so there is one memory read
per cycle. Ten of the PEs also compute the output layer. There is a single image buffer, and each
layer's result is written back over its input, so no second buffer is needed. One tanh unit
serves all 28 PEs.

## Datapath

```
            D_in ─┐                       ┌───────────── Tanh ◄─────────────┐
                  ▼                       ▼                                 │ head
               [wmux] ──► RAM 784x12 ──► Dout ─[bias mux: 1.0]─► line 4 (data to all PEs)
                           ▲ Addr                                           │
   Counters block ── line 1 cnt_r (ROW ROM addr)                           │
                  ── line 2 cnt_c (COL ROM addr)                            │
                  ── line 3 cnt_o (RAM addr = OUTPUT ROM addr)              │
                                                                            │
   PE_rco #0..#9 : ROW ROM | COL ROM | OUTPUT ROM ─► mux ─► MAC ─► y ───┐  │
   PE_rc #10..#27: ROW ROM | COL ROM             ─► mux ─► MAC ─► y ───┤  │
                                                                        ▼  │
                          RG chain: PE#0 ─► head, PE#i ─► RG#i, shift ─────┘
   PE #0..#9 outputs ─► Max index ─► D_out
```

| unit | module | what it holds / does |
|---|---|---|
| processing element, 3 ROMs | `pe_rco` (x10) | ROW ROM: row *i* of W1 + b1[i] (29 words). COL ROM: row *i* of W2 + b2[i] (29 words). OUTPUT ROM: row *i* of the 784x10 matrix + bias (785 words). One MAC. |
| processing element, 2 ROMs | `pe_rc` (x18) | ROW and COL ROMs only. Idle during the output stage. |
| MAC core | `mac_unit` | 34-bit accumulator, result shifted back to Q5.7 and saturated |
| weight ROM | `weight_rom` | synchronous-read ROM, contents from `lst_pkg::init_weight` |
| image buffer | `image_ram` | 784 x 12 bit, single port, with the D_in / Tanh write mux |
| result chain | `rg_chain` | RG #1..#27: parallel load from the PEs, then a shift toward Tanh |
| activation | `tanh_approx` | piecewise-quadratic tanh, combinational |
| address generation | `counters_block` | loop counters k, j, w; drives bus lines 1–3 |
| sequencer | `control_unit` | stage FSM, MAC and chain controls, `data_ready` |
| arg max | `max_index` | index of the largest of the 10 scores; registered to `D_out` |
| top | `lst1_top` | wires it all together |

Every weight and data word is a 12-bit two's-complement fixed-point number with 7 fractional
bits (Q5.7: range −16 … +15.99, step 1/128). The bias of each matrix row is stored as the last ROM
word. On the bias step the data line carries the constant 1.0 instead of RAM data, so a bias is
just one more multiply-accumulate.

## The schedule

This is the part that is hardest to see in a block diagram. One classification runs in five
stages. The control unit (`control_unit.sv`) steps through the states `ST_*` of `lst_pkg`, and
the counters block turns the loop indices into addresses.

**1 – Load.** Each cycle with `new_data = 1` writes `d_in` to address `j`, for j = 0, 1, …, 783
(row-major: pixel (r, c) goes to 28r + c). There may be any gaps between words. The cycle that
takes word 783 also starts stage 2.

**2 – Rows (FC1).** For k = 0..27:

* `ST_ROW_MAC`, 29 cycles: in cycle j the address lines show RAM address 28k + j and ROW ROM
  address j (j = 28 is the bias word). RAM and ROMs answer one clock later. The control unit
  therefore delays `mac_en`, `mac_clr` (first term) and `bias_sel` (last term) by one register.
* `ST_ROW_DRAIN`, 1 cycle: the last MAC step.
* `ST_ROW_WR`, 28 cycles: in the first cycle the RG chain loads all 28 PE results. PE #0 is
  shown directly at the chain head; PE #i goes into RG #i. In each following cycle the chain
  shifts by one. In cycle w, tanh(head), which is tanh(result of PE #w), is written to address
  28k + w.

Writing back over row k is safe because row k has been read in full before the first write.
The next row is not touched until the write-back is over.

**3 – Columns (FC2).** The same, with the COL ROMs. It reads addresses 28j + k and writes the
results to 28w + k. When it ends, the RAM holds `Y` row-major, which is the flattened vector the
output layer expects.

**4 – Output layer.** `ST_OUT_MAC`, 785 cycles: address j = 0..783 goes both to the RAM and to
the OUTPUT ROMs of PEs #0..#9 (the same bus line, 3). Step 784 is the bias. Then comes one drain
cycle. The 18 `pe_rc` hold their MACs. No activation is applied: the softmax is monotonic, so it
cannot change which score is largest.

**5 – Max index.** `ST_MAX` registers the arg max of the ten saturated PE results into `d_out`.
Ties go to the lowest index. `ST_DONE` raises `data_ready`.

Cycle count per dot product with write-back: 29 + 1 + 28 = 58. The latency from the clock edge
that takes the last pixel to the edge that raises `data_ready` is

    2 · 28 · 58  +  (785 + 1)  +  1  =  4035 cycles

Add 784 cycles to load the image. In general, for image side D, the latency is
2·D·(2D+2) + D² + 3.

## Interface

| port | dir | width | meaning |
|---|---|---|---|
| `clk` | in | 1 | clock; everything is on the rising edge |
| `reset` | in | 1 | synchronous, active high; returns to the load state with all counters at 0 |
| `new_data` | in | 1 | `d_in` is valid this cycle |
| `d_in` | in | 12 | pixel, Q5.7, row-major order |
| `data_ready` | out | 1 | `d_out` is valid; stays high until the next `new_data` |
| `d_out` | out | 4 | recognised digit 0..9 |

`new_data` is ignored while a classification is running. A `new_data` while `data_ready` is high
is taken as pixel 0 of the next image. Pixel scaling is left to the host: a plain 0..255 MNIST
pixel divided by 255 becomes 0 … 128 in Q5.7.

## Arithmetic details

* **MAC** (`mac_unit.sv`): the Q5.7 × Q5.7 product is exact (Q10.14). The accumulator is 34
  bits, enough for 785 full-scale products without wrap. The result is `acc >>> 7`, which
  truncates toward −∞, clamped to [−2048, 2047]. Every PE result passes through this clamp,
  including the ten class scores.
* **tanh** (`tanh_approx.sv`): F(x) = sign(x) for |x| > 2, x + x²/4 for −2 < x < 0, and
  x − x²/4 for 0 ≤ x < 2. x² is exact and x²/4 is truncated to 7 fractional bits, so
  F(−x) = −F(x) and the error against the real-valued formula is at most one LSB. At |x| = 2 both
  branches give ±1.
* **Arg max**: compares the 12-bit saturated scores. Two scores that both saturate compare as
  equal.

## Weights

The trained weights of the model are not public. So the ROMs are filled at elaboration time by
`lst_pkg::init_weight(layer, row, col)`. This is an integer hash (multiply, xor-shift) of the
layer (0 = W1, 1 = W2, 2 = output), the matrix row and the column. It gives values in
[−32, 31] LSB = [−0.25, 0.25). Column index `n` (28 for W1/W2, 784 for the output layer) is the
bias. With these weights the circuit is exercised in every region of its arithmetic, but the
digits it reports mean nothing. To run a trained model, replace the body of `init_weight` with
the quantised weights (round(w·128), clamped to 12 bits). No other file depends on the values.

## How this relates to the published design

Taken from the published architecture: the five-stage schedule, the counts and kinds of units
(10 three-ROM PEs, 18 two-ROM PEs, RG #1..#27 with a mux in front of each, one RAM with a
D_in/Tanh write mux, one Tanh, a counters block with outputs cnt_r / cnt_c / cnt_o, a control
unit with reset / new_data / data_ready, a max-index block), the numbering of the four bus lines,
the Q5.7 format and the tanh formula.

Choices of this RTL, where the published description gives nothing:

* the handshake, the synchronous reset, one-cycle RAM/ROM reads, the drain cycle, and the
  absence of any overlap between reading and write-back (the design's throughput was never
  reported);
* the accumulator width, truncation and saturation rules, and the tie rule of the arg max;
* the RAM address formulas. The architecture figure draws the RAM address and cnt_o on the same
  line; here that line carries every RAM address, and in the output stage it is also the
  OUTPUT ROM address;
* the constant-1.0 bias mux in front of the PE data line;
* the weight contents (see above).

One inconsistency in the published description: its closed formula Y = tanh(W2 tanh(W1 Xᵀ))
would apply W2 to the row results themselves. Its pseudocode, its block diagram and its
description of the hardware all apply W2 to the **columns** of the row result. This RTL does
the latter.

The published implementation reports 680 flip-flops and 29 RAMB18. This RTL synthesises
(generic, yosys) to about 990 flip-flop bits: 28 × 34-bit accumulators, 27 × 12-bit chain
registers and control. It also has 123 480 memory bits: 9474 ROM words plus the 784-word RAM, at
12 bits. The published count of 680 suggests narrower accumulators there, or accumulators mapped
into DSP blocks.

The two deeper models the paper also evaluates, LST-2 (two LST blocks) and ResLST-3 (three
blocks with a skip connection), are not supported. They need two or three sets of W1/W2, more
LST passes and, for ResLST-3, an adder and a second buffer.

## Verification

Each module has a self-checking testbench in `tb/`. Each prints
`TB_RESULT checks=N failures=M` and has a watchdog.

| testbench | what it checks |
|---|---|
| `tb_tanh_approx` | all 4096 inputs against an integer model and the real-valued formula |
| `tb_mac_unit` | random dot products up to 785 terms, idle cycles, both saturation limits |
| `tb_weight_rom` | every word and the read latency of a 29- and a 785-word ROM; range and spread of contents |
| `tb_pe_rco`, `tb_pe_rc` | dot products in each mode with bias, against the ROM formula; `pe_rc` idle in output mode |
| `tb_image_ram` | load via D_in, overwrite via Tanh, random reads against a shadow copy |
| `tb_rg_chain` | head order PE #0, #1, … #27 after a load; holding; restarted runs |
| `tb_counters_block` | every address of every phase against the formulas above |
| `tb_control_unit` | with the counters: write-back order, dot-product lengths, clear/bias placement, chain loads/shifts, latency 4035, restart |
| `tb_max_index` | random, tied and extreme score vectors |
| `tb_lst1_top` | full-size end-to-end test (see below) |
| `tb_lst1_stream` | the classification workload: 16 synthetic stroke images streamed back to back at full size, every digit and score against the reference, 4819 cycles per image |
| `tb_lst1_small` | the same design built for an 8x8 image and 4 classes, to check that sizes and schedule follow the parameters |

`tb_lst1_top` runs the top with all parameters at their defaults and classifies four images in
a row. The first is random pixels with random gaps in `new_data`. The second is a ring shape. The
third has large pixel values (±16), which drive the PEs into saturation. The fourth is all zeros,
so only the biases count. A bit-exact reference model inside the testbench computes `V`, `Y`, the
ten scores and the digit from the same ROM formula. The test compares the whole RAM after the row
stage and after the column stage, the ten scores, `d_out` and the 4035-cycle latency. It also
counts how often each mechanism occurred and fails if any never did: the four tanh regions, PE
saturation, bias steps, the output stage with idle `pe_rc`s, gaps in the load, and restarts from
the done state.

`tb/lst_ref_pkg.sv` holds the reference model that the last two share (and a generator of
stroke images). To run one testbench with Verilator 5 (from the directory that holds `rtl/`
and `tb/`):

    verilator --binary --timing --assert --timescale 1ns/1ps -Irtl -Itb -y rtl -y tb \
        rtl/lst_pkg.sv tb/lst_ref_pkg.sv tb/tb_lst1_top.sv --top-module tb_lst1_top -o sim
    ./obj_dir/sim

Replace `tb_lst1_top` with any other testbench name. The full-size test simulates about 20 000
cycles, and building it takes most of its one-minute run time. `rtl/` also lints cleanly with
`verilator --lint-only -Wall` (apart from notes about unused package constants) and elaborates
in yosys with the slang front end.

## Changing the design

* **Trained weights**: edit `init_weight` in `rtl/lst_pkg.sv`.
* **Image size**: `lst1_top #(.D(n))` sets the image side and the number of PEs. Address widths
  and the latency follow from it. `N_OUT` sets the number of classes, which must be ≤ D.
* **Word format**: `DATA_W` / `FRAC_W` in `lst_pkg`. The clamp constants in `mac_unit` and the
  tanh thresholds assume 12 / 7.
* **Throughput**: the schedule never overlaps the write-back of one vector with the reads of
  the next, so about half the cycles of stages 2 and 3 leave the MACs idle. Overlapping them
  needs a dual-port RAM and a second result register set, because the RG chain would still be
  shifting when the PEs finish the next vector. Within a stage the overlap is safe: the vectors
  read and written are disjoint rows (or columns). At the boundary between rows and columns, the
  first column read touches the row that is still being written, so it must wait.
