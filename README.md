# HiKonv: many low-bitwidth convolution products out of one wide multiplier

A 27x18 multiplier, such as the one in a Xilinx DSP48E2 slice, spends almost
all of its width on waste when it multiplies two 4-bit numbers. HiKonv
(Liu, Chen et al., "HiKonv: High Throughput Quantized Convolution With Novel
Bit-wise Management and Computation") fills that width instead. Several
low-bitwidth operands go into each multiplier input, S bits apart. The
single product then holds a whole short 1-D convolution, one output per
S-bit segment. Some bit-level care with signs and carries lets these short
convolutions be chained into arbitrarily long rows and then into complete
convolution layers.

This repository holds synthesizable SystemVerilog for that arithmetic and
for a convolution-layer engine built on it. Each part has a self-checking
testbench. The defaults follow the FPGA configuration the method is
presented with: 4-bit features and weights on a 27x18 multiplier with a
45-bit result, S = 10, two features and three weights per product. Treating
both operands as signed is this design's choice; unsigned packing is a
parameter. That gives
2x3 = 6 multiplications and 2 additions per multiplier per clock.

## 1. One product, one short convolution

Take N feature values f[0..N-1] (p bits each) and K kernel taps
g[0..K-1] (q bits each). Pack them as

    A = sum f[n] * 2^(S*n)        B = sum g[k] * 2^(S*k)

Then

    A * B = sum_m y[m] * 2^(S*m),   y[m] = sum_{n+k=m} f[n] * g[k]

so segment m of the product is output m of the 1-D convolution f * g. There
are N+K-1 segments and N*K multiplications inside them. Everything works as
long as no segment overflows into its neighbour. S is therefore the width of
one product plus guard bits Gb:

| operands        | slice size S  |
|-----------------|---------------|
| p = 1           | q + Gb        |
| q = 1           | p + Gb        |
| otherwise       | p + q + Gb    |

N and K are the largest counts for which the packed words still fit the two
multiplier inputs. This design keeps one spare bit above the top slice, for a
reason given in section 2. With the defaults:

    S = 4 + 4 + 2 = 10
    features: 18-bit input -> N = 2   (bits 0..3 and 10..13, plus sign room)
    weights:  27-bit input -> K = 3   (bits 0..3, 10..13, 20..23, plus room)
    product:  N+K-1 = 4 segments in bits 0..39 of the 45-bit result

`hikonv_pkg` computes S (`hk_slice`) and N, K (`hk_fit`) from these rules.

## 2. Signed operands: a borrow chain

For unsigned data, packing is plain concatenation with zero extension, and
segment m is read straight out of bits [S*m +: S].

Signed data needs care. A negative f[0], sign-extended, fills every bit
above it with ones. That is worth -1 in units of the next slice. So the
number that really sits in slice 1 is f[1] - 1, and the same happens again
one slice higher. The packer (`hikonv_pack`) therefore builds each slice as

    slice[0] = f[0]
    slice[n] = f[n] - MSB(slice[n-1])

This is a 1-bit decrement per slice, not a wide adder. The borrow ripples up
the word. The result, read as a signed integer, is exactly sum f[n] 2^(S*n).

The product has the same structure, so the segmenter (`hikonv_segment`)
undoes the borrow:

    y[0] = signed(P[S-1:0])
    y[m] = signed(P[S*m +: S]) + P[S*m - 1]

Two consequences are easy to miss:

* The top slice of a packed operand can reach f - 1 = -2^(p-1) - 1. That
  needs p+1 bits, so every operand keeps one bit above its top slice. The
  method's own fit rule, p + (N-1)S <= input width, leaves no such bit. For
  the default widths both rules give the same N and K.
* A signed segment can hold values in [-(2^(S-1)-1), 2^(S-1)-1] but not
  -2^(S-1), because it stores y minus a possible borrow.

## 3. Guard bits: how many products may share a segment

A segment holds a sum of products. The design adds at most M*K of them into
one segment:

* M input channels are summed in the product word (section 5);
* each row output is a sum of K taps (section 4).

With signed p- and q-bit data, one product has magnitude at most
2^(p+q-2). The elaboration check `hk_guard_ok` requires
M*K*2^(p+q-2) <= 2^(S-1)-1. With the defaults that is 2*3*64 = 384 <= 511.

The source counts guard bits as Gb = ceil(log2(M*min(K,N))), which gives
M = 2 for Gb = 2. The check above is the one the hardware actually needs.
With the defaults it agrees with that formula.

## 4. Long rows: carrying the overlap between products

A row of W features is cut into X = ceil(W/N) blocks of N. Block x gives a
product whose outputs belong at row positions x*N .. x*N+N+K-2. So its upper
K-1 outputs overlap the lower K-1 outputs of block x+1.

The stacker (`hikonv_stack`) does not segment both products and add the
outputs pair by pair. Like the original method, it adds bit-fields: the part
of the previous word above bit N*S is shifted down and added onto the new
product word. One adder thus forms K-1 outputs at once.

    T_x      = Prod_x + carry_(x-1)            (carry = 0 for x = 0)
    carry_x  = (T_x >>> N*S) + T_x[N*S-1]
    outputs  = segments 0..N-1 of T_x          (all N+K-1 when x = X-1)

The `+ T_x[N*S-1]` is the same borrow correction as in section 2. The
arithmetic shift rounds toward minus infinity whenever the dropped low
segments are negative. The added bit restores the exact upper part. The
stacker needs K-1 <= N, so that only the previous block overlaps.

Timing: one product per clock. The outputs are registered and appear one
clock after the product.

## 5. From 1-D rows to a convolution layer

A layer with stride 1 and no padding computes

    O[co][h][w] = sum_ci sum_kh sum_kw I[ci][h+kh][w+kw] * W[co][ci][kh][kw]

For each (co, ci, h, kh) the inner sum over kw is a 1-D convolution. Its
input is row I[ci][h+kh][*]. Its kernel is the reversed weight row,
g[k] = W[co][ci][kh][K-1-k]. Output w of the layer is element w+K-1 of that
1-D convolution. Columns past the end of the row count as zero.

Input channels are combined at two levels:

* **in the product word.** The multiplier's accumulate path adds the packed
  products of M channels (same co, h, kh and block x) before anything is
  segmented. This is the "channel accumulation" of the method. It is paid
  for with guard bits (section 3).
* **after segmentation.** Sums over channel groups and kernel rows go into
  32-bit row accumulators.

## 6. The layer engine (`hikonv_conv_layer`)

```
          fmem (CI*HI*WI x 4b) --N pixels--> hikonv_pack (18b) --+------------+
                                                                 |            |
 wmem (CO*CI*K*K x 4b) --K taps, lane l--> hikonv_pack (27b) --> hikonv_dsp_mac (l)
                                                                 | P (45b), M-channel sum
                                                                 v
                                                        hikonv_stack (l)
                                                                 | N or N+K-1 outputs
                                                                 v
                                                   row accumulators acc[l][0..WO-1]
                                                                 |
                                                                 v
                                                     omem (CO*HO*WO x 32b)
```

The NPE lanes (default 4) handle NPE output channels at once. They share the
packed pixels. Each lane has its own weight packer, multiplier and stacker.

**Schedule.** One multiplier operation per lane per clock. Loops, from outer
to inner:

    output-channel group (CO/NPE) > output row h (HO) > kernel row kh (K)
      > input-channel group (CI/M) > block x (X) > channel in group m (M)

In the innermost loop, m = 0 loads the product and m > 0 adds onto it. After
m = M-1 the summed product goes to the stacker. After the last
(kh, channel group, x, m) of a row, the pipeline drains for 4 clocks. Then
the row accumulators go to the output memory, one column per clock for all
lanes, and are cleared. From the clock that samples `start` to the `done`
pulse a layer takes

    (CO/NPE) * HO * (K*(CI/M)*X*M + 4 + WO)  clocks

With the defaults this is 16*10*(3*32*11*2 + 4 + 20) = 341,760 clocks. The
multiplier is busy in 98.9 % of them.

**Interface.** All signals are plain. The reset is synchronous and active
low. Memories are not reset.

| port                         | use                                                |
|------------------------------|----------------------------------------------------|
| `fm_we/fm_addr/fm_wdata`     | write pixel at (ci*HI + h)*WI + w, while idle      |
| `wt_we/wt_addr/wt_wdata`     | write weight at ((co*CI + ci)*K + kh)*K + kw       |
| `start`, `busy`, `done`      | start a layer; `done` is a one-clock pulse          |
| `out_addr` -> `out_rdata`    | read output (co*HO + h)*WO + w, one clock latency  |

## 7. Parameters

| parameter | default | meaning                                                | origin               |
|-----------|---------|--------------------------------------------------------|----------------------|
| P, Q      | 4, 4    | feature and weight bitwidth                            | the method's FPGA use |
| SIGNED    | 1       | signed (borrow chain) or unsigned packing              | design choice        |
| BIT_A     | 18      | multiplier input that carries features                 | the method's DSP map |
| BIT_B     | 27      | multiplier input that carries weights                  | the method's DSP map |
| PROD_W    | 45      | product/accumulator width of the multiplier            | DSP48E2              |
| GB        | 2       | guard bits (S = P+Q+GB = 10)                           | the method           |
| K         | 3       | kernel size                                            | the method's DSP map |
| M         | 2       | channels summed in one product word                    | largest M for GB = 2 |
| NPE       | 4       | output-channel lanes (multipliers)                     | design choice        |
| CI, CO    | 64, 64  | input / output channels                                | a late UltraNet layer |
| HI, WI    | 12, 22  | input map (10x20 output)                               | a late UltraNet layer |
| ACC_W     | 32      | output accumulator width                               | design choice        |

Derived: S, N, HO, WO, X and the address widths. Elaboration-time
assertions check that CI is a multiple of M, CO a multiple of NPE, K taps
fit BIT_B, K-1 <= N, and that the guard bits suffice.

To try a binary or other configuration, change P, Q, GB and SIGNED. For
p = q = 1, set SIGNED = 0: 1-bit two's complement does not represent
{0, 1}. With GB = 3 that gives S = 4 and five features per 18-bit operand.
`tb_hikonv_conv_layer_bnn` runs exactly this. The datapath blocks are just
as happy on other multipliers. `tb_hikonv_conv1d_32x32` chains them on a
32x32 multiplier, the processor configuration of the method: unsigned
4-bit, S = 10, N = K = 3.

## 8. Where this design departs from, or goes beyond, the source

* **Accelerator architecture.** The method was evaluated inside an existing
  layer-pipelined CNN accelerator (UltraNet), whose structure is not part of
  the method. The controller, loop order, lanes, memories, accumulators and
  host interface here are this design's own, kept as simple as possible. The
  full network, its line buffers, pooling and the host processor are not
  included.
* **Layer sizes.** The default layer (64 -> 64 channels, 3x3, 10x20 output)
  is typical of UltraNet's later layers. It is not a size stated with the
  method.
* **Spare top bit** in packed operands (section 2), and the exact guard-bit
  check (section 3).
* **Number of blocks per row.** X = ceil(W/N), which covers every pixel. One
  statement of the layer mapping writes ceil(W/N) - 1. That reads as the
  last block index, not the count.
* **Carry correction** in the stacker (section 4). The bit-field addition is
  shown only for the unsigned case.
* **Multiplier.** `hikonv_dsp_mac` is a behavioural-level but synthesizable
  model of the DSP48E2's multiply-add: one register stage, with accumulate
  feedback. The pre-adder, cascade and pipeline registers of the real slice
  are not modelled. A synthesis tool may map it onto a DSP slice or onto
  logic.
* **Binary configuration.** The method quotes S=4, N=9, K=4 for 1-bit data
  on 27x18. Those numbers do not satisfy its own fit rule (1 + 8*4 > 27).
  This design computes N and K from the rule instead.

## 9. Files and simulation

| file | content |
|------|---------|
| `rtl/hikonv_pkg.sv` | S, N, K and guard-bit functions |
| `rtl/hikonv_pack.sv` | operand packer (signed borrow chain) |
| `rtl/hikonv_segment.sv` | product segmenter (borrow correction) |
| `rtl/hikonv_dsp_mac.sv` | 27x18 + 45 multiply-add, one clock |
| `rtl/hikonv_stack.sv` | overlap carry between successive products |
| `rtl/hikonv_conv_layer.sv` | the layer engine (top) |
| `tb/tb_*.sv` | one self-checking bench per module |
| `tb/tb_hikonv_conv_layer.sv` | small layer (4->4 channels, 5x7), two runs, mechanism counts |
| `tb/tb_hikonv_conv_layer_full.sv` | default-size layer end to end |
| `tb/tb_hikonv_conv_layer_bnn.sv` | binary layer: 1-bit unsigned data, S = 4, N = 5 |
| `tb/tb_hikonv_conv1d_32x32.sv` | 480-element 1-D convolution on a 32x32 multiplier, unsigned 4-bit, N = K = 3 |

Every bench compares against values it computes itself with plain integer
arithmetic. Each ends with a line `TB_RESULT checks=<n> failures=<n>` and has
a watchdog. The layer benches also check the clock count above. They count
how often each mechanism fires: channel accumulation, overlap carry,
last-block flush, zero extension, packing borrow and segment borrow
correction. A mechanism that never fires counts as a failure.

With Verilator 5:

    verilator --binary --timing --assert -Irtl -Itb -y rtl -y tb +libext+.sv \
        rtl/hikonv_pkg.sv tb/tb_hikonv_conv_layer_full.sv \
        --top-module tb_hikonv_conv_layer_full -o sim
    ./obj_dir/sim

Replace the testbench name to run another one. The full-size layer
simulates in well under a second.
