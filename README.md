# SPARQ: sparsity-aware activation quantization in a MAC datapath

Quantizing CNN activations from 8 to 4 bits with a fixed scale factor costs noticeable
accuracy, because a bell-shaped distribution wastes most of a uniform 4-bit grid.
SPARQ does the 8-to-4-bit step dynamically, per value, and uses two kinds of sparsity
to lose as little as possible:

* **bit sparsity (bSPARQ)** -- most activations have leading zero bits. Instead of
  always keeping bits [7:4], keep the *most significant* 4-bit window that still holds
  the leading one, and record where it sits. 27 = `0001_1011` becomes window `1101` at
  bits [4:1], i.e. 26; after rounding by the dropped bit it is `1110` at [4:1], i.e. 28.
  The value is then `window << shift`: a tiny floating-point number with a 4-bit
  mantissa and a power-of-two scale.
* **value sparsity (vSPARQ)** -- activations are handled in pairs that share an 8-bit
  budget. After ReLU many activations are exactly zero; if one member of a pair is
  zero, the other keeps all 8 bits (no quantization at all). Only when both are
  non-zero is each trimmed to 4 bits.

The hardware cost is a multiplier that can compute either one 8b x 8b product or two
independent, shifted 4b x 8b products in the same cycle. This repository holds
synthesizable SystemVerilog for that multiplier, for the encoder that produces its
operands, and for three engines built from it: an output-stationary systolic array
with its buffers and controller, a dense 4 x 4 tensor core made of dot-product units,
and a sparse-tensor-core dot-product path (2:4 weight sparsity) with the encoder
replicated in front of the dot-product unit.

## 1. Operand format

An activation pair `(a0, a1)` with weights `(w0, w1)` is encoded as two **lanes**:

| field     | width        | meaning                                                      |
|-----------|--------------|--------------------------------------------------------------|
| data      | n            | window bits (n = 4 by default)                               |
| ShiftCtrl | clog2(NOPT)  | placement index k; the lane is shifted left by k * STEP      |
| MuxCtrl   | 1            | 0: multiply by w0, 1: multiply by w1                         |

Packed as `lane = {MuxCtrl, ShiftCtrl, data}` and `pair = {lane1, lane0}` (16 bits for
the default 5opt configuration; `sparq_pkg` has the width functions).

Placements are evenly spaced, `STEP = (8 - n) / (NOPT - 1)`:

| configuration | n | NOPT | STEP | windows kept             | ShiftCtrl bits |
|---------------|---|------|------|--------------------------|----------------|
| 5opt (default)| 4 | 5    | 1    | [7:4] [6:3] [5:2] [4:1] [3:0] | 3         |
| 3opt          | 4 | 3    | 2    | [7:4] [5:2] [3:0]        | 2              |
| 2opt          | 4 | 2    | 4    | [7:4] [3:0]              | 1              |
| 6opt (3-bit)  | 3 | 6    | 1    | [7:5] ... [2:0]          | 3              |
| 7opt (2-bit)  | 2 | 7    | 1    | [7:6] ... [1:0]          | 3              |

The pair rule (`vsparq_encoder`):

| a0      | a1      | lane0                               | lane1                          |
|---------|---------|-------------------------------------|--------------------------------|
| 0       | 0       | zero                                | zero                           |
| x != 0  | 0       | upper n bits of x's 2n-bit window, shift + n, weight w0 | lower n bits, shift, weight w0 |
| 0       | x != 0  | same, both lanes on weight w1       |                                |
| != 0    | != 0    | bSPARQ(a0), weight w0               | bSPARQ(a1), weight w1          |

For n = 4 the 2n-bit window of a lone value is the whole byte, so it is exact. For
n = 3 and n = 2 the lone value gets a 6- or 4-bit window, chosen and rounded by the
same rule as the n-bit windows.

**Window choice and rounding** (`bsparq_trim`). The lowest placement whose window
holds every set bit is taken. The window is rounded half-up using the first bit below
it. If rounding would carry out of the window (31 = `0001_1111` in 5opt), the window
saturates to all ones (`1111` at [4:1] = 30) and the placement stays; promoting to the
next placement would be the other possible reading and costs one more multiplexer.

With `ROUND = 0` the window is truncated; with `VSPARQ = 0` the zero detector does not
change the lanes and every activation is trimmed to n bits. These two switches give
the "Trim" and "-vS" ablations.

## 2. The flexible multiplier (`sparq_mult`)

    p = (x1 * (mux1 ? w2 : w1)) << (sc1 * STEP)  +  (x2 * (mux2 ? w2 : w1)) << (sc2 * STEP)

Two weight multiplexers, two n-bit-unsigned x 8-bit-signed multipliers, two
shift-left units producing 16-bit signed values, and one adder producing a 17-bit
signed result. An 8b x 8b product is the special case `x1 = x[7:4], sc1 -> 4,
x2 = x[3:0], sc2 -> 0`, both muxes on the same weight, since
`x*w = (x[7:4]*w << 4) + x[3:0]*w`. So one multiplier does the work of two 4b x 8b
MACs per cycle, and one 8b x 8b MAC when the pair holds a lone non-zero value.

The multiplier is purely combinational; it is the only thing that changes in a
processing element compared with a conventional 8-bit design, apart from the second
weight input.

## 3. Systolic-array engine

```
            act_wr (raw pairs) --> vsparq_encoder --> act_buffer (COLS banks x DEPTH)
                                                           | skewed, 1 pair/column/cycle
weight_buffer (ROWS banks x DEPTH) --skewed weight pairs--> sparq_systolic_array (ROWS x COLS sparq_pe)
                         ^                                                        |
                 sa_controller (rd_en, rd_addr, clr, shift, done)        psum_bottom[c]
                                                                      (one result row per cycle)
```

* **Where quantization happens.** The encoder sits on the write path of the activation
  buffer: activations are converted once, when they are stored, and the buffer holds
  the encoded pairs with their metadata. That is why the trimming logic runs at the
  (low) write rate and is not replicated per PE, and why the activation memory grows:
  the 5opt pair is 16 bits for 16 bits of raw activations, but only 8 of them are data.
* **PE (`sparq_pe`).** Output-stationary. Each cycle: `psum <= (clr ? 0 : psum) + p`,
  the activation pair goes down and the weight pair goes right through one register
  each. Partial sums are 32-bit two's complement and wrap on overflow. With `shift`
  high the PE instead loads `psum_in`, the partial sum of the PE above (zero for row
  0), so each column is also a shift register for reading results out.
* **Array (`sparq_systolic_array`).** PE (r,c) sees column c's activation stream and
  row r's weight stream, so after a tile `psum[r][c] = sum_i pairvalue(A[c][i], W[r][i])`.
  Results leave through the bottom row (`psum_bottom`); the full `psum` grid is also
  an output of the array for inspection, but not of the top.
* **Buffers (`act_buffer`, `weight_buffer`).** One bank per column (row), `DEPTH` pairs
  each, written one pair per cycle. A read fetches the same address from all banks,
  registers it (one cycle latency) and delays bank c by c more cycles, which produces
  the diagonal wavefront. When no read is issued, zeros are fed; zeros add nothing, so
  the array needs no valid bits.
* **Controller (`sa_controller`).** A `start` pulse (only while `busy` is low; an
  assertion checks this) with `base_addr`, `len` (1..DEPTH pairs) and `clear_acc`
  runs one tile. Timing, counted in clock edges after the edge `s` that samples
  `start`: reads on edges s+1..s+len; `clr` reaches all PEs for edge s+2, exactly when
  PE (0,0) adds its first product (the other PEs are still adding zeros then);
  PE (ROWS-1, COLS-1) adds its last product on edge s+len+ROWS+COLS; `done` is high
  for the cycle after that edge. With `clear_acc = 0` the tile adds to the sums
  already in the array, so a reduction longer than `2*DEPTH` activations is run as
  several chained tiles.
  An `unload` pulse (while idle) drains the result: sampled at edge u, it holds
  `shift` high for ROWS cycles; between edges u+i and u+i+1 (i = 0..ROWS-1)
  `out_valid` is high and the bottom row shows result row `out_row = ROWS-1-i`.
  Unloading replaces the partial sums with zeros, so it follows the last tile of a
  chain. `busy` is high during a tile and during an unload.

Throughput: one activation pair (two MACs) per PE per cycle, i.e. 2 x ROWS x COLS MACs
per cycle in steady state, whatever the sparsity; sparsity improves accuracy, not
speed.

## 4. Tensor-core engines

### 4.1 Dense tensor core (`sparq_tc`)

A tensor core computes `D = A x B + C` on small matrices with a set of dot-product
units. Here every element of the 4 x 4 result has its own `tc_dp_unit`: four SPARQ
multipliers, a 17 -> 18 -> 19-bit adder tree and a 32-bit third operand (`C[i][j]`).
Because each multiplier takes a pair, one evaluation reduces over 8: `A` is 4 x 8
unsigned activations, `B` is 8 x 4 signed weights. Each row of `A` goes through four
encoders once, and the encoded row is shared by the four units of that result row.
`D` is registered on the edge that samples `in_valid` and held otherwise. To reduce over
more than 8, feed `D` back as `C`.

### 4.2 Sparse tensor core (`sparq_stc`)

Weights are pruned 2:4: in each group of four consecutive weights at most two are
non-zero, and only those two are stored together with their 2-bit positions. Per
cycle with `in_valid`:

1. `stc_selector` picks, in each of 4 groups, the two activations (of 16) that meet
   the stored weights (`sel[2g+j] = act[4g + idx[g][j]]`);
2. the 8 selected activations form 4 pairs (neighbours), each with its own
   `vsparq_encoder` -- activations that survived selection can still be zero;
3. `tc_dp_unit` (4 SPARQ multipliers, adder tree 17 -> 18 -> 19 bits, plus a 32-bit
   third operand) adds the 8 products to the accumulator.

`acc` is updated on the edge that samples `in_valid`; `acc_clr` with `in_valid`
replaces instead of adding. `pcase` reports what each pair's zero detector saw.
Compared with a conventional sparse tensor core of this kind (two 4:2 multiplexers,
8 activations, 4 weights, 4 multipliers), the width is doubled together with the
weight bandwidth.

## 5. Top level (`sparq_top`) and parameters

`sparq_top` holds the three engines; they share only clock and asynchronous active-low
reset. Ports: activation-pair write (`act_wr_en/col/addr/a0/a1`, with `act_wr_case`
reporting the pair case), weight-pair write (`wgt_wr_en/row/addr/w0/w1`), tile control
(`start`, `clear_acc`, `base_addr`, `len`, `busy`, `done`), result drain (`unload`
in; `psum_out_valid`, `psum_out_row`, `psum_out[COLS]` out, one row per cycle), the
`tc_*` ports of the dense tensor core (`tc_in_valid`, `tc_a`, `tc_b`, `tc_c`, `tc_d`,
`tc_out_valid`, `tc_pcase`) and the `stc_*` ports of the sparse engine.

| parameter | default | meaning |
|-----------|---------|---------|
| ROWS, COLS | 16, 16 | array size (weight rows x activation columns) |
| DEPTH | 256 | pairs per buffer bank (512 activations of reduction per tile) |
| N | 4 | data bits per lane (3 and 2 also supported) |
| NOPT | 5 | window placements (5/3/2 for N=4, 6 for N=3, 7 for N=2) |
| ROUND | 1 | round by the first dropped bit |
| VSPARQ | 1 | use the zero-partner case |

Other (N, NOPT) pairs are rejected by an elaboration-time assertion in
`vsparq_encoder` unless `(8-N)` is divisible by `NOPT-1` and N by the step.

## 6. What is specified and what is chosen here

Taken from the method's description: the window placement sets and worked examples of
the 5opt/3opt/2opt configurations; rounding by the residual bits; the pair rule; the
multiplier structure with its widths (4, 8, 16, 17); the output-stationary PE with
8-bit operands and a 32-bit partial sum; operand buffers on the top and left edges;
the four-multiplier dot-product unit with a 32-bit third operand; selection of
activations by the stored 2:4 coordinates; trimming replicated per dot-product unit in
the sparse engine.

Chosen here, because the description is silent:

* the rounding rule (half-up on one bit) and saturation on carry-out;
* evenly spaced placements for the 3- and 2-bit configurations;
* the lane layout and which half of a lone value goes to which lane;
* the array size (16 x 16), buffer depth (256), banking, read latency and zero fill;
* the whole controller, including chained accumulation tiles and the parallel
  partial-sum readout through the downward shift chain;
* the encoder on the activation-buffer write path;
* the dense tensor core's 4 x 4 tile of dot-product units, its output register, and
  encoding each activation row once for the four units that share it;
* doubling the sparse engine to 16 activations / 8 weights per cycle, the pairing of
  neighbouring selected activations, and 2-bit (not 3-bit) coordinates;
* reset style (asynchronous, active low) and the shared top.

Not modelled: SRAM macros (the buffers are register arrays a synthesis flow will map
to flops or memories), the host that supplies data, off-chip memory, and the
conventional 8b x 8b and 2 x 4b x 8b baselines the method is compared with.

## 7. Verification

Each module has a self-checking testbench in `tb/` that prints
`TB_RESULT checks=N failures=M` and stops on a watchdog. The reference model
(`tb/sparq_ref_pkg.sv`) works on integer values -- it grows a shift until the value fits
the window and rounds arithmetically -- rather than on bit fields, so it is an
independent formulation of the rule.

| testbench | what it covers |
|-----------|----------------|
| `bsparq_trim_tb` | all 256 inputs, nine configurations, the worked examples |
| `vsparq_encoder_tb` | 5000 random pairs x 7 configurations through the multiplier; lane fields |
| `sparq_mult_tb` | random operands for all placement sets; 8b x 8b equivalence |
| `sparq_pe_tb` | cycle-by-cycle partial sum, forwarding, clear, shift-in |
| `sparq_systolic_array_tb` | 3 x 4 array, two tiles, every partial sum, drain through the bottom row |
| `act_buffer_tb`, `weight_buffer_tb` | write, read latency, skew per bank, zero fill |
| `sa_controller_tb` | read window, clr edge, done latency len+ROWS+COLS, wrap-around, unload sequence |
| `tc_dp_unit_tb` | random and extreme operands |
| `sparq_tc_tb` | 1500 random steps on two configurations (5opt; 3-bit 6opt without vSPARQ), chained reductions, hold when idle |
| `stc_selector_tb` | every coordinate pair |
| `sparq_stc_tb` | 2000 cycles of pruned dot products with accumulation runs |
| `sparq_top_tb` | default size: fills both buffers (512 activations per column), runs a full tile, an accumulating tile and a short tile, drains and checks all 256 sums after each, and the latency, then 300 sparse-engine vectors and 200 dense tensor-core steps; counts every pair case, every placement, rounding, saturation, cleared and chained tiles, and fails if one never occurs |
| `resnet_layer_tb` | a slice of a ResNet-18 layer4 3x3 convolution (reduction 4608) on the default top as nine chained tiles followed by a drain, with ReLU-like sparse activations |
| `pruned_layer_tb` | a slice of a 2:4-pruned ResNet-18 layer4 convolution (reduction 4608, 288 cycles per output, 64 outputs) on the sparse engine of the default top, every output checked |

Running one with Verilator (from the directory holding `rtl/` and `tb/`):

    verilator --binary --timing --assert -Irtl -Itb -y rtl -y tb \
        rtl/sparq_pkg.sv tb/sparq_ref_pkg.sv tb/sparq_top_tb.sv \
        --top-module sparq_top_tb -Mdir obj_top
    ./obj_top/Vsparq_top_tb

Verilator runs two-state, so every register that is read has a reset. The testbenches
that exercise a single block often override its parameters to stay small; the three
top-level ones use the defaults. The two layer slices also print the mean relative
error of the SPARQ result against the exact 8-bit dot product on their synthetic data
(about 2% and 1.6%); that number describes the random operands, not a trained network.

What this does not establish: timing closure, area, or accuracy on real networks.
The accuracy of the number format depends only on the arithmetic checked above; the
networks themselves are not run.
