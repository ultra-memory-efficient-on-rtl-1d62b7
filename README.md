# Tensor-train linear layers trained on chip: a bidirectional-contraction engine

Fine-tuning a transformer on an edge FPGA fails first on memory. The
weights, the gradients and the stored activations of a BERT-sized model do
not fit on chip. Compressing every 768 x 768 weight matrix into a
tensor train (TT) of six small cores cuts each one from 589,824 parameters
to 4,896. The compressed model and its gradients then fit in block RAM.

The cost moves into arithmetic. A TT layer is no longer one matrix product
but a chain of small tensor contractions. Done naively (contract the input
with the cores one after the other), every step drags along the K
activations of the batch and is strictly sequential.

The RTL here trains such layers with the **bidirectional** order (BTT):

* The three cores of the output side and the three cores of the input side
  are first contracted among themselves, towards the middle and in
  parallel. No activation is touched during this step.
* Only the last two steps meet the activations.
* The backward pass reuses the intermediates of the forward pass. It
  computes the core gradients in a fused, fine-grained way that needs a
  buffer of only one rank vector.

Everything is IEEE binary32. Every datapath is R lanes wide, one lane per
TT-rank element.

## 1. What one layer computes

A layer maps X (N x K) to Y = W X (M x K). K is batch x sequence length,
32 here. M = m1 m2 m3 and N = n1 n2 n3. W is never stored. It is the chain

    W[(i1 i2 i3), (j1 j2 j3)] = G1[i1,:] G2[:,i2,:] G3[:,i3,:] G4[:,j1,:] G5[:,j2,:] G6[:,j3]

Each core is an R x mode x R array (the end cores have one outer rank of
1). The defaults are R = 12 with modes (m1,m2,m3) = (12,8,8) and
(n1,n2,n3) = (8,8,12), which gives M = N = 768.

The engine splits the chain at its middle rank index b:

    Wl (M x R) = G1 G2 G3          Wr (R x N) = G4 G5 G6
    forward :  Z2 = Wr X  (R x K)         Y  = Wl Z2
    backward:  Z2' = Wl^T Y'              X' = Wr^T Z2'
               dWl = Y' Z2^T  (M x R)     dWr = Z2' X^T  (R x N)
               chain rule from dWl into dG3, dG2, dG1 and from dWr into dG4, dG5, dG6
    update  :  G <- G - lr * dG  (plain SGD; the learning rate is an input)

dWl and dWr are never stored as matrices (section 4).

Contracting the cores first costs about R^2 (M + N) multiply-adds. The
forward activation steps cost R K (M + N). At R = 12 and K = 32 this is
about 2.5 x 10^5 for the cores and 5.9 x 10^5 for the activations. A dense
layer would cost M N K = 1.9 x 10^7.

## 2. Architecture

    btt_linear_engine                         (top; one TT layer per command)
    |-- u_left  : btt_side_unit LEFT=1  cores G1 G2 G3, computes Wl, Y, Z2', dG1..dG3
    |     |-- tt_core_mem   cores of all layers (grouped), 1 word = R x FP32
    |     |-- tt_core_mem   gradients of one layer
    |     |-- work memory   per-layer intermediates Mid (m1 m2 x R) and Wl (M x R), plus dMid
    |     `-- tc_kernel     R-lane FP32 contraction datapath
    |-- u_right : btt_side_unit LEFT=0  cores G6 G5 G4, computes Wr, Z2, X', dG4..dG6
    |-- act_mem X, Y', Y, X'            scalar FP32 buffers, element (t,k) at t*K + k
    |-- act_mem Z2                      R-wide, one K-word slot per layer
    `-- act_mem Z2'                     R-wide, K words

The two sides use the same unit. Each runs the generic two-step chain

    step a:  Mid(p, i) = sum_x C0(p)[x]  * C1(i, x)      p < P1,       i < I2
    step b:  W(q, i)   = sum_x Mid(q)[x] * C2(i, x)      q < P1*I2,    i < I3

on rank vectors. Only the flattening of the indices differs:

| side | C0, C1, C2 | P1, I2, I3 | flattening | W(t) means |
|---|---|---|---|---|
| left | G1, G2, G3 | m1, m2, m3 | p*I + i | row t of Wl |
| right | G6, G5, G4 | n3, n2, n1 | i*P + p | column t of Wr |

Core words are oriented so that the rank index contracted next sits across
the word:

* left word (i, x) of G2 or G3 is G[x, i, :];
* right word (i, x) of G5 or G4 is G[:, i, x].

Every contraction is therefore a scalar times a stored rank vector, or an
inner product of two rank vectors.

### tc_kernel: the only arithmetic

R lanes, each with an FP32 multiplier and adder, plus a balanced adder tree
over the lanes (padded to a power of two). It has three operations, one per
cycle, with results registered:

| op | effect | used for |
|---|---|---|
| TC_ROW | acc_v += s * a | chain steps, Z(k) += A[t,k] * W(t), dW(t) += A[t,k] * Zin(k) |
| TC_DOT | acc_d[lane] += sum(a .* b) | Y[t,k] = W(t) . Zin(k), back-propagation into Mid |
| TC_FMA | acc_v = a + s * b | core-gradient accumulation, SGD update (s = -lr) |

## 3. Side-unit commands and their cycle counts

A side unit is a three-stage micro-operation pipeline: issue, then operand
fetch plus kernel, then write-back. It performs one kernel operation per
cycle. Every memory read is synchronous and is scheduled one cycle ahead.
A command on a unit adds three cycles of issue and drain.

| command | kernel role | work | cycles |
|---|---|---|---|
| SC_CHAIN | MUL0 | steps a and b; Mid and W stored for this layer | (R+1)(P1 I2 + P1 I2 I3) |
| SC_PROJ | MUL1 (right, forward); Z2' (left, backward) | Z(k) = sum_t A[t,k] W(t) | T K |
| SC_EXPAND | MUL2 (left, forward); X' (right, backward) | O[t,k] = W(t) . Zin(k) | T K |
| SC_GRAD | fused MUL2/MUL3 | gradients of the three cores | T(K+2+2R) + P1 I2 (2+2R) |
| SC_UPDATE | PU | C <- C - lr dC for every word of the layer | P1 + (I2+I3) R |

T is the product of the side's three modes (M or N). The R+1 of the chain
is one load of the incoming rank vector plus R row operations.

## 4. The fused gradient (SC_GRAD)

This is the least obvious part. Take the left side with Y' and Z2. The
gradient of row t of Wl is

    dW(t) = sum_k Y'[t,k] Z2(k)        (one rank vector)

A plain schedule would compute all of dWl (M x R), then dG3 and dMid from
it, and so on. Here, for every (q, i) of step b, the unit does four things:

1. It loads Mid(q) into an input register. This takes 1 cycle.
2. It builds dW(t) in the row accumulator from K TC_ROW operations. This
   takes K cycles plus a one-cycle bubble, and the result is copied into a
   one-word register.
3. It runs R TC_FMA operations dG3(i, x) = dG3(i, x) + Mid(q)[x] * dW(t),
   read-modify-writing the gradient store.
4. It runs R TC_DOT operations dMid(q)[x] += G3(i, x) . dW(t), accumulating
   one lane per operation in the inner-product register. This register is
   written back when i reaches its last value.

dW(t) is consumed immediately, so the only gradient buffer of the activation
step is one R-word register. Step a is then repeated the same way from dMid
to give dG2 and dG1. On the right side the same command uses X and Z2'.

The first contribution to each gradient word is written over, not added.
The gradient store therefore never needs clearing. It holds one layer: the
update of a layer must run before the next layer's SC_GRAD, which the
engine guarantees by ending every backward pass with SC_UPDATE.

## 5. Engine schedule

| stage (`stage` port) | left unit | right unit |
|---|---|---|
| 1 MUL0 | SC_CHAIN | SC_CHAIN (in parallel) |
| 2 MUL1 | - | SC_PROJ: Z2 = Wr X, stored in the layer's Z2 slot |
| 3 MUL2 | SC_EXPAND: Y = Wl Z2 | - |
| 4 Z2' | SC_PROJ: Z2' = Wl^T Y' | - |
| 5 gradients | SC_GRAD (Y', Z2) | SC_EXPAND: X' = Wr^T Z2', then SC_GRAD (X, Z2') |
| 6 update | SC_UPDATE | SC_UPDATE |

Stages 1-3 are one `start` with `op_bp = 0`. Stages 4-6 are one `start` with
`op_bp = 1`, which must follow the forward pass of the same layer: it reads
that layer's stored Mid, W and Z2 and the X buffer.

Measured at the defaults (768 x 768, R = 12, K = 32):

* forward pass: 60,400 cycles;
* backward pass with update: 96,416 cycles;
* that is 0.60 ms and 0.96 ms per layer at 100 MHz.

Both figures are the formulas above plus 16 and 20 cycles of stage
hand-over.

## 6. Storage: reshaping and grouping

An HLS design that wants R parallel reads of a core would split it into R
memories, each mostly empty. Here the rank index is instead packed into the
word: one 384-bit word per rank vector. That is six 72-bit-wide BRAM36
columns rather than twelve BRAMs.

The cores of all LAYERS layers of one side are then concatenated along the
depth of a single array, so the depth comes closer to the depth of a block
RAM. The address of word (layer, core, i, x) is

    layer * LSZ + { p  |  P1 + i*R + x  |  P1 + I2*R + i*R + x },     LSZ = P1 + (I2+I3) R

At the defaults (LAYERS = 13):

| memory | size |
|---|---|
| cores, both sides | 2 x 13 x 204 words = 254.6 KB |
| gradients | 2 x 204 words |
| work memories | 2 x 11,328 words = 1.09 MB |
| activation buffers | 4 x 24,576 FP32 = 393 KB |
| Z2 slots | 13 x 32 words |

The total is about 1.8 MB, all on chip. LAYERS = 13 is the count of
768 x 768 TT layers in a two-encoder BERT-style model: 6 per encoder plus a
classifier layer. Four or six encoders need LAYERS = 25 or 37, which is only
a parameter change.

## 7. Interface

* `start`, `op_bp`, `layer` and `lr` are sampled when the engine is idle.
  `busy` is high during a pass and `done` pulses once at its end.
* X and Y' are written through `x_*` and `dy_*`. Y and X' are read through
  `y_raddr` and `dx_raddr`, with data one cycle later. Element (t, k) is at
  t*K + k.
* Cores are read and written through `h_*` while the engine is idle.
  * `h_right` selects the side.
  * `h_core` 0/1/2 is G1/G2/G3 on the left and G6/G5/G4 on the right.
  * `h_i` is the mode index and `h_x` the rank index (section 2 gives the
    word orientation).
  * Read data appear on `h_rdata` the cycle after `h_ren`.
* Reset is asynchronous and active low. It clears the control state and the
  kernel registers, not the memories.

## 8. Numerics

fp_mul and fp_add in `btt_pkg` round to nearest even. They differ from
full IEEE in these ways:

* subnormal inputs and results are flushed to zero;
* no NaN is produced;
* overflow saturates to infinity;
* x + (-x) gives +0.

Products and sums are single rounding. The kernel testbench checks them bit
for bit against correctly rounded double-precision results. Inner products
are rounded at every level of the adder tree, so their results differ from
a sequential sum in the last bits.

## 9. Verification

Each testbench prints `TB_RESULT checks=N failures=M` and has a watchdog.
All reference values are computed in double precision from the testbench's
own model, never from the RTL's arithmetic.

| testbench | what it checks |
|---|---|
| `tb/tc_kernel_tb.sv` | 3,000 random operations; single-rounding cases bit-exact, the rest to 1e-6; lanes not addressed stay unchanged |
| `tb/tt_core_mem_tb.sv` | every logical word written once in random order with concurrent reads, then all read back (catches overlapping address ranges) |
| `tb/act_mem_tb.sv` | 20,000 cycles of random traffic on the write port and both read ports, including read-during-write |
| `tb/btt_side_unit_tb.sv` | right-side unit at small sizes: PROJ and EXPAND against the chain model, and the cores after GRAD + UPDATE against C - lr dC; cycle count of every command |
| `tb/btt_linear_engine_tb.sv` | whole engine at reduced sizes (R = 3, modes 2x2x3 / 3x2x2, K = 4, 3 layers) |
| `tb/btt_linear_engine_full_tb.sv` | the same at the defaults |

The two engine testbenches run the same flow on layer LAYERS-1 and on
layer 0:

* Y is compared with W X, with W built element by element from the six
  cores.
* X' is compared with W^T Y'.
* The gradient of each core, (G_old - G_new) / lr, is compared with the
  chain rule applied to dW = Y' X^T.
* Pass lengths are compared with the formulas.
* The testbench counts that parallel MUL0, MUL1, MUL2, Z2', the overlap of
  X' with the left gradient, the update and a second layer each occurred.

The two engine testbenches share their code and differ only in sizes and
in the parameter list of the engine instance.

To simulate with plain Verilator, for example the full-size engine run
(about 3 minutes to build and 2 seconds to run):

    verilator --binary --timing -Wno-fatal --top-module btt_linear_engine_full_tb \
        rtl/btt_pkg.sv tb/tb_fp_pkg.sv rtl/tc_kernel.sv rtl/tt_core_mem.sv \
        rtl/act_mem.sv rtl/btt_side_unit.sv rtl/btt_linear_engine.sv \
        tb/btt_linear_engine_full_tb.sv
    ./obj_dir/Vbtt_linear_engine_full_tb

`tb/tb_fp_pkg.sv` converts between `real` and binary32 bit patterns with
round-to-nearest-even, so the testbenches need no `shortreal`.

## 10. Where this departs from the accelerator it follows, and what is missing

* **Scope.** This RTL is the TT linear-layer engine: the TT forward and
  backward kernels and the parameter-update kernel, with the grouped core
  store. The rest of a training step is not included:
  * the TTM embedding table (modes ((10,10,10),(12,8,8)), rank 30);
  * the attention matrix products;
  * LayerNorm, GELU, tanh, softmax and the loss, with their derivatives;
  * the off-chip memory.

  Those are the parts that the host-side ports of the engine stand in for.
* **Q/K/V task rescheduling.** The original overlaps the core contractions
  of later attention projections with the activation steps of earlier
  ones, so that two MUL0 kernels serve three layers. Here a layer is one
  command, so there is one MUL0 per side and no cross-layer overlap.
* **Three cores per side.** The fine-grained fused gradient is described
  for layers with two cores per side. Here it is generalised to three: the
  split runs over every (q, i) of the last chain step, and the step before
  it is handled the same way from dMid.
* **Update order.** The update runs after all core gradients of the layer
  exist rather than directly inside the last gradient kernel, so the result
  is exactly SGD on the old cores.
* **Mode order.** The defaults use the (12,8,8,8,8,12) mode order of the
  evaluated model. A worked example in the original description uses
  {8,8,12} x {12,8,8} instead; both are a parameter setting.
* **Micro-architecture.** The original was produced by high-level
  synthesis and its pipelining is not published. The three-stage pipeline,
  the single-cycle FP32 lanes, the work-memory layout, the word orientation
  and the host ports are this design's own.
* **Memories.** They are plain arrays with synchronous reads. No FPGA
  primitives are instantiated.
* **Synthesis.** The single-stage FP32 lane (multiplier, 16-input adder
  tree and accumulator in one cycle) is functionally complete. A 100 MHz
  implementation would pipeline it, which changes the cycle counts by a
  fixed latency per operation chain.
