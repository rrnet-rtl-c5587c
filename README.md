# A two-party secret-sharing operator core for ReLU-reduced private inference

In two-party private inference, two servers evaluate a neural network on an
input that neither of them may see. Every tensor is split into two random
*additive shares*, one per server, that add up to the true value modulo
2^32. Linear layers are cheap on shares. Comparisons, which ReLU and MaxPool
need, are expensive: they take an oblivious-transfer protocol and many network
round trips. The approach this design supports removes most comparisons from
the network by replacing ReLU with a trainable second-order polynomial,

    delta(x) = k1 * x^2 + w2 * x + b        (k1 = c / sqrt(N_x) * w1)

so that almost every layer is made of additions and multiplications. Every
multiplication of two shared values uses a precomputed *Beaver triple* and one
exchange of masked values between the servers.

This repository holds the RTL of one server's hardware accelerator for those
polynomial operators. There are two such accelerators, one for server 0 and one
for server 1, built from the same RTL. The `party` pin tells a core which
server it is. Values are 32-bit ring elements. The load and store buses are
128 bits wide, so each bus word carries four elements, and every unit works on
four lanes at once.

## Arithmetic on shares

All arithmetic is modulo 2^W (W = 32), so the W-bit adders and multipliers
that wrap on overflow are exactly the ring operations. Server i holds X_Si,
with X = X_S0 + X_S1.

| operation | what each server computes | communication |
|---|---|---|
| share generation | owner draws r and keeps r; sends x - r | one vector |
| recovery | X_S0 + X_S1 | one vector each way |
| scale and add | a*X_Si + Y_Si, where a is public | none |
| Beaver mask | E_Si = X_Si - A_Si, then E = E_S0 + E_S1 | one vector each way |
| product (Beaver triple Z = A*B) | R_Si = -i*E*F + X_Si*F + E*Y_Si + Z_Si | E and F opened first |
| square (Beaver pair Z = A*A) | R_Si = Z_Si + 2*E*A_Si + [i = 0] E*E | E opened first |
| polynomial activation | k1*sq_Si + w2*X_Si + [i = 0] b | as for square |

Two points are easy to get wrong:

* **Public terms are added once.** E, F, E*F, E*E and b are public: both
  servers know them. If both servers added such a term, the recovered sum
  would hold it twice. For the product, only server 1 subtracts E*F. For the
  square, only server 0 adds E*E. For the activation, only server 0 adds b.
  A square equation with E*E on both sides recovers X^2 + E^2. It is wrong, and
  the fault test of the square unit shows that the testbench catches it.
* **The product is folded.** (X_Si - i*E)*F + E*Y_Si is the same quantity as
  the product row above. It needs two multipliers per lane instead of three.

Worked example, in a 4-bit ring. It is used as a test vector. A client holds
u = [-2, 1] and a model vendor holds w = [[0, 1], [2, -1]]. Their shares are
u0 = [-4, -4], u1 = [2, 5], w0 = [[-3, -5], [-5, 1]] and w1 = [[3, 6], [7, -2]].
With the triple A0 = [3, 4], A1 = [4, -2], B0 = [[2, 4], [-5, 0]],
B1 = [[-6, -1], [-4, -2]], Z0 = [-8, -4] and Z1 = [-6, 5], the opened masks
are E = [7, -1] and F = [[4, -2], [-5, 1]]. Server 0 computes r0 = [-4, -4] and
server 1 computes r1 = [6, 1]. Their sum is [2, -3] = u*w.

Fixed-point scale is not handled in hardware. The ring elements are whatever
fixed-point encoding the host chose. Products are not truncated, so the host
must encode k1, w2 and b so that the three terms of delta(x) share one scale.
It must also rescale between layers, or leave enough integer headroom in the
32 bits.

## The core, `rrnet_2pc_core`

```
             cmd (op, count, kdim, a, k1, w2, b)
                 |
   load bus  +---v-----------+   slots   +----------------------+
 ----------->| rr_load_      |---------->| ss_share_gen  (SHR,  |
  128 bit    | collect       |  4 x 128  |   MASK: x - r)       |     store bus
             +---------------+           | ss_scale_add  (LIN)  |---> 128 bit
                                         | ss_beaver_square (SQ)|
                                         | ss_x2act     (X2ACT) |
                                         | ss_beaver_matmul     |
                                         |        (MATMUL)      |
                                         +----------+-----------+
   (store bus is fed from a 2-entry FIFO)           | own share
                          to other server  <--------+ tx
                          from other server --------> rx --> ss_share_rec (REC, MASK)
```

A command runs one operation over `count` output vectors of four elements.
For each output vector, the core goes through these steps:

1. It gathers the operand vectors from the load bus. Beat j goes into slot j.
2. It fires the operator unit.
3. If the operation needs it, it sends a vector to the other server. If the
   operation also needs the other server's vector, it waits for that vector
   and adds it to its own.
4. It writes one 128-bit result to the store bus, through a two-entry FIFO.

Both servers must be given the same command sequence. Share generation is the
exception: the owner runs `OP_SHR` while the other server runs `OP_RCV`.

| op | load beats, in order | store | peer traffic |
|---|---|---|---|
| `OP_SHR` | x, r | r | sends x - r |
| `OP_RCV` | none | received share | receives |
| `OP_REC` | own share | recovered value | sends and receives |
| `OP_MASK` | X_Si, A_Si | opened E (or F) | sends and receives |
| `OP_LIN` | X_Si, Y_Si | a*X_Si + Y_Si | none |
| `OP_SQ` | E, A_Si, Z_Si | share of X^2 | none |
| `OP_X2ACT` | E, A_Si, Z_Si, X_Si | share of delta(X) | none |
| `OP_MATMUL` | per step k: {X_Si[k] in lane 0, E[k] in lane 1}, F[k, n..n+3], Y_Si[k, n..n+3]; on step 0 also Z_Si[n..n+3] | R_Si[n..n+3] | none |

`OP_MATMUL` computes one four-column segment of a row-vector times matrix
product per output vector. Its `kdim` inner steps accumulate in four
accumulators, which start from Z_Si. The host orders the segments.

Convolutions and fully connected layers run as this product, after an
im2col-style rearrangement by the host. Batch normalisation and the 1/window
scale of average pooling run as `OP_LIN`. The window sum of average pooling is
a chain of `OP_LIN` commands with a = 1.

A polynomial layer therefore runs as the following commands:
`MASK` (E = X - A) → `X2ACT`. A linear layer with a shared weight runs as:
`MASK` E → `MASK` F → `MATMUL` → `LIN`.

The Beaver triples and pairs (A, B, Z) come from outside, over the load bus. So
do the random masks r. The core does not generate them.

### Interfaces

All streams use valid/ready. Data must stay steady while valid waits for
ready; assertions in the core check this for the store and tx streams. The
buses are:

* the command stream (`cmd_t` from `rr_pkg`, with a `done` pulse after the last
  store);
* the load bus (`ld_*`);
* the store bus (`st_*`);
* the stream to the other server (`tx_*`) and the stream from it (`rx_*`).

The core does not implement the link between the servers. It only needs the
link to deliver vectors in order. The link must also accept a vector from the
core before that core is ready to receive, because both servers send first and
then wait.

### Overlap of load, compute and store

The local operations are `LIN`, `SQ`, `X2ACT` and `MATMUL`. For these the
core is streamed. The gather of the next operands starts in the same cycle
that the current operands fire into the unit. Results then wait in a
two-entry store FIFO. The load bus and the store bus therefore work at the
same time, and neither has to wait for the other.

A result must never find the FIFO full. To guarantee this, a gather that will
produce a result may only start once it can reserve a FIFO entry. A counter,
`owed`, holds the number of results that have been promised but not yet
stored. When the store bus is held off, the loading stops one vector later and
no result is lost.

A non-final matmul step produces no result, so it needs no entry.

The exchanging operations (`SHR`, `RCV`, `REC`, `MASK`) run one vector at a
time, and each vector waits for a full link round trip. With a real network
link this dominates the cost of opening masks. Keeping several vectors in
flight on the link, a coarser level of pipelining, is not done here.

### Timing

These figures assume that every stream is ready and that data is available at
once.

* **Local operations.** An operation that gathers n beats takes n + 1 cycles
  per output vector:
  * `OP_LIN` takes 3 cycles.
  * `OP_SQ` takes 4 cycles.
  * `OP_X2ACT` takes 5 cycles.
* **`OP_MATMUL`.** It takes 4K + 1 cycles per output vector of inner
  dimension K. Each step takes three beats plus one fire cycle, and step 0 has
  the extra Z beat.
* **A whole command.** For a command of C vectors, `done` is high
  C*(n+1) + 5 edges after the edge that accepts the command. This is
  C*(4K+1) + 5 for `MATMUL`, and one more for `X2ACT`.
* **Exchanging operations.** These add the link's flight time to every
  vector.

The load bus is the limit. Four elements arrive per cycle, and each step of
the product needs three beats (the X/E pair, a row of F and a row of Y).
A wider or double-buffered gather would be the next step up in throughput.

Example: the first convolution block of a CIFAR-10 network, a 3x3
convolution from 3 to 64 channels on a 32x32 image. It needs 16,384 product
vectors at K = 27, which take 1.79 M cycles. The whole block, including the
sharing, the masks, the bias and the activation, takes 2.45 M cycles per
server. At 200 MHz that is about 12 ms, plus what the real network adds.

## What is not in this RTL

* **Secure comparison, ReLU and MaxPool.** These use an oblivious-transfer
  comparison protocol taken from prior work. Its steps are not specified here,
  so models with any ReLU or MaxPool cannot run entirely on this core.
* **The operation scheduler and latency table.** A cryptographic scheduler and
  a per-operator latency table feed the architecture search. Neither is
  specified in enough detail to build. Commands come from a host.
* **Randomness and triple generation, the network link, the processor and
  DRAM.** These are outside the core. In simulation, `tb/tb_link_model.sv`
  stands in for the link.

## Files

| file | content |
|---|---|
| `rtl/rr_pkg.sv` | ring width, lanes, opcodes, command struct, beats per op |
| `rtl/ss_share_gen.sv` | share generation and Beaver masking, x - r |
| `rtl/ss_share_rec.sv` | recovery, s0 + s1 |
| `rtl/ss_scale_add.sv` | a*X + Y |
| `rtl/ss_beaver_square.sv` | Beaver square |
| `rtl/ss_x2act.sv` | polynomial activation |
| `rtl/ss_beaver_matmul.sv` | Beaver vector x matrix product |
| `rtl/rr_load_collect.sv` | operand gathering from the load bus |
| `rtl/rrnet_2pc_core.sv` | one server's core (top) |
| `tb/tb_*.sv` | one self-checking testbench per module; `tb_rrnet_2pc_core` joins two cores; `tb_workload_conv1` and `tb_workload_tail` run a first convolution block and a pooling + classifier tail |
| `tb/tb_link_model.sv` | behavioural model of the network link, for simulation only |

## Simulating

Each testbench prints `TB_RESULT checks=N failures=M` and stops. For example:

```
verilator --binary --timing --assert -y rtl -y tb rtl/rr_pkg.sv \
    tb/tb_rrnet_2pc_core.sv --top-module tb_rrnet_2pc_core
./obj_dir/Vtb_rrnet_2pc_core
```

How each testbench checks its module:

* **Unit testbenches.** Each one shares random operands the way a dealer
  would, runs the unit once for each server, and checks that the two outputs
  add up to the plaintext result. They also check the latency. The matmul and
  share testbenches also replay the 4-bit example above, with W = 4 and two
  lanes.
* **`tb_rrnet_2pc_core`.** It uses the default sizes and runs one private
  layer end to end on two cores:
  h = delta(a*(x*Y) + beta), with x of size 1x8 and Y of size 8x8.
  It checks every intermediate result. It runs the layer twice. The first pass
  has random stalls on every stream. The second pass has no stalls and checks
  the cycle counts given above. It then runs a burst of `LIN` commands while
  the store bus is held off. It requires that each of the following happened
  at least once: every operation, a load underrun, store backpressure, link
  backpressure, a wait for the peer, and a gather that waited for a free FIFO
  entry.
* **`tb_workload_conv1`.** It runs the first convolution block described
  above on two cores: 3x3, 3 to 64 channels, on a 32x32 image, with bias and
  activation. It checks all 65,536 outputs of each stage against a plaintext
  convolution, and checks the product's cycle count.
* **`tb_workload_tail`.** It runs the classifier tail of a CIFAR-10 ResNet on
  two cores. Global average pooling over 4x4x512 runs as 16 `LIN` passes.
  The fully connected layer, 512 to 10, runs as `MATMUL` with K = 512. The
  testbench checks the pooled values and the logits against a plaintext model.
  The product takes 3*(4*512+1) + 5 = 6,152 cycles.

To change the ring or the lane count, set `W` and `L` on the modules. The
defaults come from `rr_pkg`.
