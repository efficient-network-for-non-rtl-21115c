# Layered Min-Max decoder for non-binary Class-II QC-LDPC codes

This is SystemVerilog RTL for a layered decoder for non-binary quasi-cyclic
LDPC codes over GF(2^m). Its subject is the interconnect. A layered decoder
usually needs a global network that is rebuilt for every layer, plus a
shuffle that moves each variable's a-posteriori message to wherever that
variable sits in the next layer. For the Class-II codes built from two
additive subgroups of GF(2^m), both networks collapse to very little:

* The global network becomes fixed wiring.
* The local network becomes a Benes network of 2x2 switches that moves
  whole blocks of q-1 variable node units (VNUs), not single messages.
* Its control bits come from a small constant table.

The default build decodes the 32-ary (992, 496) rate-1/2 code (m = 5, t = 2):
32 block columns by 16 block rows of 31x31 circulants.

## The code

Let q = 2^m, and split the m-bit vector of a field element into a high part
of m-t bits and a low part of t bits. The n = 2^t low vectors are β_0..β_(n-1).
The c = 2^(m-t) high vectors are δ_0..δ_(c-1). Base-matrix entry
(row i·n+k, column j·n+l) is the field element δ_i + δ_j + β_k + β_l. Each
entry is expanded into a (q-1)x(q-1) matrix: a circulant permutation matrix
scaled by α, or all zeros for the zero element.

The order in which subset vectors get index numbers is a free choice. Here
vectors are ordered by popcount, then lexicographically by the list of set
bit positions. With that ordering, the table INDEX(i, j) = index(vec(i) XOR
vec(j)) has the symmetric Latin-square form the scheduling relies on. For
n = 4 it is

    0 1 2 3
    1 0 3 2
    2 3 0 1
    3 2 1 0

With rho = q block columns, block row v has a single "row vector"
λ_v = δ_i + β_k (v = i·n + k). Its block column with vector y carries the
circulant of element λ_v XOR y. Exactly one block column of each row meets the
zero element, so that column has no edge in the layer.

## Keeping every layer in the same frame

One layer is one block row, i.e. q-1 checks, each of degree rho. The design
always keeps the variables of block column y at physical block position
x = y XOR λ_v. Then, in every layer, position x sees the circulant of the
same element x:

* check r of the layer connects to position p = (r + log_α x) mod (q-1) of
  block x;
* the edge coefficient is α^r · x;
* block 0 has no edge.

This one choice drives the whole design:

* The global network is the same wiring for all layers (`gsn`).
* The coefficient table is a single constant of (q-1)·rho entries
  (`nbqc_decoder`).
* Moving from layer v to layer v+1 is a translation of block positions by
  d = λ_v XOR λ_(v+1), applied to every block alike. This includes the step
  from the last layer back to the first.

For the β part, d is the step index(v-1, i) → index(v, i) through the INDEX
table. For the δ part, the same reasoning applies one level up, to groups of
n blocks. Inside a block, messages never move.

## The local shuffle network

`lsn_class2` is a Benes network over rho = 2^K ports, where one port is a
whole block of q-1 L_v vectors:

* It has 2K-1 stages.
* Stage s exchanges the ports whose numbers differ only in bit
  b = 0, 1, …, K-1, …, 1, 0.
* For four ports this is two stages on bit 0 around one on bit 1.

A translation by d needs only the second half of the network. The stage on
bit b crosses all its switches exactly when bit b of d is set, and the first
K-1 stages stay straight. `lsn_lut` therefore stores K·rho/2 bits per layer,
γ·rho·log2(rho)/2 bits in all: 1280 bits at the default size. The table is
computed at elaboration from the index assignment.

A general permutation would need all rho(K - 1/2) switch settings per layer.
The translation structure means that half of them are constant.

## Datapath and schedule

```
           +-----+  L_v (BQ+1 bits)  +---------------+
  chan --> | VNU | ----------------> | local shuffle | --+
           |array| <---------------- |  (Benes, LUT) |   |
           +-----+                   +---------------+   |
   L_cv |    ^ R                                          |
        v    |                                            |
     +-------------+   +--------------+   +-------------+ |
     | global net  |-->| de-/permute  |-->| q-1 Min-Max | |
     | (wires)     |<--| (coef table) |<--| CNUs        | |
     +-------------+   +--------------+   +-------------+ |
        ^___________________________________________________|
```

`layer_ctrl` runs one layer as a fixed sequence of steps:

1. **cv** – every VNU forms L_cv = L_v − R_v,layer (step 1 of layered
   Min-Max) and registers it.
2. **perm** – the global wires bring each L_cv to its check row. The
   permutation stage re-indexes it by b = h·a. A missing edge gets the
   neutral message: 0 for symbol 0, the maximum for every other symbol.
3. **CNU** – all q-1 check node units run in lock-step. Each one computes
   R(b) = min over configurations of the max of the other inputs (step 2)
   with a forward-backward pass of elementary Min-Max operations. One
   operation Z(b) = min_a max(X(a), Y(a⊕b)) takes q cycles, and there are
   3(rho-2) of them.
4. **deperm** – each R is mapped back by a = b / h.
5. **upd** – every VNU with an edge forms L_v = L_cv + R (step 3),
   normalises it, and stores R for the next iteration. A VNU with no edge
   keeps L_v unchanged.
6. **shf** – the new L_v vectors pass through the Benes network into their
   positions for the next layer.

A decode with `max_iter` = I (0 counts as 1) finishes with `done`
3 + I·γ·(3(rho-2)·q + 7) cycles after `start`. The testbenches check this
exact count. At the defaults, one iteration is 46,192 cycles. The CNU
dominates, because a single elementary unit serves each check. That was
chosen to keep the logic small. The decoder's latency is not the point of
this design.

Hard decisions are taken from L_v after the last layer. Since the last
shuffle returns to the layer-0 frame, block column y is read from position
y XOR λ_0.

## Arithmetic

* Reliabilities are unsigned, with 0 meaning most likely. Channel values and
  L_v are BQ+1 bits; L_cv and R are BQ bits. BQ = 8 by default.
* After every subtraction or addition a vector is shifted so that its
  smallest entry is 0, then saturated. The VNU works in BQ+3 signed bits
  internally, so nothing wraps.
* L_v needs the extra bit. If it is clipped to BQ bits, a variable's
  reliabilities can collapse and the decoder stops matching an exact
  column-order model.
* Messages hold all q entries. Nothing is truncated to the n_m best entries.
* The fields use the primitive polynomials x^2+x+1, x^3+x+1, x^4+x+1,
  x^5+x^2+1 and x^6+x+1 (see `nbldpc_pkg`). The package supports m ≤ 6.

## What follows the source and what does not

These parts follow the published architecture:

* the Class-II code construction;
* the Layer-I partition (one block row per layer);
* the layered Min-Max equations;
* the block structure (CNUs, de-/permutation, global network, VNUs with a
  local network);
* the Benes local network with its stage and switch counts;
* its LUT size.

These are choices of this design:

* **Port ordering.** The network ports are ordered by field vector, and
  block x holds column x XOR λ_v. This turns every layer step into a
  translation, including the δ part and the wrap-around to layer 0. The
  published scheduling algorithm lists only the β-part step inside a group
  of n blocks.
* **Control-bit count.** The published text counts rho(log2 rho − 1/2)
  control bits, i.e. every switch. Its complexity table gives
  γ·rho·log2(rho)/2 LUT bits. This design matches the table: the first K-1
  stages are fixed straight.
* **Global network.** It is fixed wiring with no de-multiplexers. This
  corresponds to the non-flexible option of the comparison table. The
  flexible variants, which load a different code through de-multiplexers,
  are not built.
* **CNU.** Its architecture (serial forward-backward, one elementary unit)
  is not given by the source.
* **Other choices:** the word widths, the normalisation, the handling of
  absent edges, the fixed iteration count (no early stop on a zero
  syndrome), and reset behaviour.
* **Not built:**
  * the Class-I local shuffle network, a fixed cyclic interconnect, and a
    decoder for Class-I codes;
  * the Layer-II partition (one check per layer).
* **Size limit.** rho must equal q, i.e. the full 2^t × 2^(m−t) base matrix.

## Files

| file | contents |
|---|---|
| `rtl/nbldpc_pkg.sv` | GF(2^m) arithmetic, index assignment, Benes helpers |
| `rtl/cnu_minmax.sv` | Min-Max check node unit |
| `rtl/vnu.sv` | variable node unit with its R memory |
| `rtl/perm_block.sv` | permutation / de-permutation by H coefficients |
| `rtl/gsn.sv` | fixed global shuffle network |
| `rtl/lsn_class2.sv` | Benes local shuffle network |
| `rtl/lsn_lut.sv` | its control-bit table |
| `rtl/layer_ctrl.sv` | layer and iteration sequencer |
| `rtl/nbqc_decoder.sv` | top level |
| `tb/tb_*.sv` | one self-checking testbench per block |
| `tb/nbqc_tb_core.sv` | stimulus and independent reference decoder |

Top-level parameters: M (m), T (t), RHO (= 2^M), GAMMA (number of layers,
2..2^M), BQ, and ITW (iteration-counter width).

Ports:

* `chan_llr[RHO·(q-1)]`: one q-entry vector per code symbol, in natural
  column order (column y, position p → index y·(q-1)+p).
* `max_iter`, `start`: start a decode.
* `busy`, `iter`, `done`: decode status.
* `dec_sym[]`: the decoded symbols, valid from `done` until the next start.

## Verification

Every block has a self-checking testbench that compares the block against
values computed independently in the testbench:

* **CNU:** brute force over all symbol configurations, plus the exact
  latency.
* **Permutation:** the testbench's own GF tables.
* **Benes network:** the four-port example, and translations of every
  distance.
* **LUT:** the INDEX table above.
* **Controller:** the strobe sequence.

`tb_nbqc_decoder` runs the whole decoder on the 8-ary code with t = 1
(rho = 8, γ = 8, BQ = 6) for 1 to 3 iterations. It compares every decoded
symbol with a reference decoder in `nbqc_tb_core`. That decoder processes the
code in plain column order: it has no networks and no position frame. The
test also checks the cycle count.

It counts each mechanism and fails if one never happens:

* each kind of block translation;
* the wrap-around to layer 0;
* absent edges;
* saturation;
* symbols that the decoder corrects.

`tb_nbqc_decoder_full` runs the same comparison on the default
(992, 496) decoder for one iteration, with 12 symbol errors. It passes
998 checks, and every error is corrected. Each mechanism occurs:

* translations of six kinds;
* one wrap-around;
* 496 absent edges;
* over 300,000 saturations.

Verilator needs about 18 minutes on one core to compile this testbench's
C++ model. The simulation itself then runs in about 30 seconds.

To simulate with Verilator, for example:

```
verilator --binary --timing -Irtl -Itb rtl/nbldpc_pkg.sv rtl/*.sv \
    tb/nbqc_tb_core.sv tb/tb_nbqc_decoder.sv --top-module tb_nbqc_decoder
./obj_dir/Vtb_nbqc_decoder
```

Each testbench ends with a line `TB_RESULT checks=N failures=F`.
