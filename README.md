# OS-ELM training and inference engine for single-photon histograms (binary64 RTL)

Single-photon instruments compress what they detect into short vectors. A
fluorescence-lifetime (FLIM) system gives a histogram of photon arrival times.
A diffuse-correlation (DCS) system gives an autocorrelation curve. A LiDAR
gives a time-of-flight histogram. A small network maps such a vector to the
quantity of interest: lifetimes, a blood-flow index and beta, or an object
class.

The network here is an extreme learning machine (ELM):

- The input layer `W`, `b` is random and fixed.
- Only the output weights `eta` are learned.
- The *online-sequential* variant (OS-ELM) keeps learning after deployment,
  one sample at a time. It needs no backpropagation and no big matrix
  inversion.

This RTL is the programmable-logic half of such a system. The initial
training, two pseudo-inverses computed with a one-sided Jacobi SVD, runs in
software on the processor. It leaves two results in DDR:

- `P_N0`, the L x L inverse correlation matrix of the hidden outputs.
- `eta_N0`, the L x #ON output weights.

The logic then:

1. Takes `W` and `b` into on-chip memory.
2. Refines `P` and `eta` with every new labelled sample.
3. Answers inference requests with the current `eta`.

All arithmetic is IEEE-754 binary64, because the regression targets
(especially DCS) are sensitive to rounding.

## The recursive update

For each training sample `x` (length #IN) with label `y` (length #ON), batch
size 1:

```
h   = Phi(W x + b)                 1 x L    hidden-layer output
c   = P h^T                        L x 1
d   = h P                          1 x L
a   = 1 / (1 + h c)                scalar   the only division
P   = P - (c a) d                  L x L    rank-one downdate
ye  = y - h eta                    1 x #ON  prediction error
eta = eta + (P h^T) ye             L x #ON  uses the *new* P
```

Inference is `y_hat = Phi(W x + b) eta`.

The scalar `1 + h P h^T` replaces the k x k matrix inverse of the general
OS-ELM. With k = 1 the whole update needs only multiply-adds and one
division.

## Working modes and the programming model

Three modules sit behind a working-mode multiplexer. Each has its own
datapath, so training and inference do not share multipliers. The mode is
latched when a start is accepted, and only the selected module may drive the
shared AXI master.

| mode | module                   | work per start |
|------|--------------------------|----------------|
| 0    | data loader (`data_loader`) | copies `W` (L rows of #IN doubles, row-major) and `b` (L doubles) from DDR into `wb_bram` |
| 1    | training (`obt_core`)     | with CTRL.init set, first loads `P_N0` (L x L, row-major) and `eta_N0` (L x #ON, row-major); then trains on `N_SAMPLES` consecutive samples |
| 2    | inference (`infer_core`)  | for `N_SAMPLES` consecutive vectors, writes `y_hat` (#ON doubles each) to DDR |

`P` and `eta` stay on chip between starts. A second mode-1 start without
init therefore continues training where the previous one stopped, and mode 2
always uses the latest `eta`. Neither `P` nor `eta` is written back to DDR.

### Register map

AXI4-Lite, 32-bit, byte offsets:

| offset | name        | access | meaning |
|--------|-------------|--------|---------|
| 0x00   | CTRL        | W  | bit0 start (self-clearing), bit1 init (load `P_N0`, `eta_N0` first; mode 1 only) |
| 0x04   | MODE        | RW | working mode 0/1/2 |
| 0x08   | STATUS      | RO | bit0 busy; bit1 done (sticky, cleared by the next start) |
| 0x0C   | N_IN        | RW | #IN, 1..MAX_IN |
| 0x10   | N_HID       | RW | L, 1..MAX_L |
| 0x14   | N_OUT       | RW | #ON, 1..MAX_ON |
| 0x18   | N_SAMPLES   | RW | samples per start (32 bit) |
| 0x1C   | ADDR_W      | RW | DDR byte address of `W` |
| 0x20   | ADDR_B      | RW | `b` |
| 0x24   | ADDR_P      | RW | `P_N0` |
| 0x28   | ADDR_ETA    | RW | `eta_N0` |
| 0x2C   | ADDR_X      | RW | first input vector; sample s at ADDR_X + s·#IN·8 |
| 0x30   | ADDR_Y      | RW | first label; sample s at ADDR_Y + s·#ON·8 |
| 0x34   | ADDR_YHAT   | RW | first result; sample s at ADDR_YHAT + s·#ON·8 |

Behaviour of the port:

- Write strobes are ignored and every response is OKAY.
- A start while busy is ignored.
- After reset the topology registers read 1 and the mode reads 0.

A typical session:

1. Set the topology and addresses.
2. Start mode 0.
3. Start mode 1 with init.
4. Start mode 1 again, as often as new data arrive.
5. Start mode 2 whenever predictions are needed.

Poll STATUS.done between starts.

## Inside the training module

The training module is the part that needs most explanation. It has two
multiply-add lanes and one sequential divider. Every vector and matrix it
touches is an on-chip array:

- `P` is MAX_L x MAX_L, at word i·MAX_L + j.
- `eta` is MAX_L x MAX_ON, at word j·MAX_ON + i.
- `x`, `y`, `h`, `c`, `d`, `c·a` and `P h^T` are vectors.

Arrays are read asynchronously, so a multiply-add consumes one operand pair
per clock.

A sample goes through these phases (L = n_hid):

| phase | work | clocks |
|-------|------|--------|
| fetch x, y | two DMA reads | (#IN + 2) + (#ON + 2) |
| hidden | `h = Phi(W x + b)`, by the module's own `hidden_mvm` | L·(#IN + 2) |
| c and d | lane A forms `c_i = sum_j P[i][j] h_j`, lane B forms `d_j = sum_i h_i P[i][j]`, in parallel | L² |
| h·c | dot product | L |
| 1 + h·c, divide | one add, then a 56-clock divider | about 60 |
| c·a | vector scale | L |
| P update | `P[i][j] -= (c a)_i d_j`, one element per clock | L² |
| h·eta, ye | #ON dot products, then `y - h eta` | L·#ON |
| e = P h^T | with the new `P` | L² |
| eta update | `eta[j][i] += e_j ye_i` | L·#ON |

Per sample that is

```
(#IN+2) + (#ON+2) + L(#IN+2) + 3L² + 2L + 2L·#ON + 60  clocks
```

The testbenches check it exactly. Inference takes
`(#IN+2) + L(#IN+2) + 2 + L·#ON + (#ON+2) + 1` clocks per sample.

Every dot product adds its terms in index order 0, 1, 2, and so on. The
order, together with correctly rounded add and multiply, makes the result
reproducible. A plain software model in `double`, doing the same operations
in the same order, gives bit-identical `P`, `eta` and `y_hat`. The
testbenches use that as their reference.

## Arithmetic units

- **`fp64_add`, `fp64_mul`** are combinational and round to nearest-even.
  Inf and NaN pass through. Subnormal inputs and results are flushed to zero.
  With data in the ranges of this application (histograms, unit-scale
  weights), subnormals do not occur. Both units are long combinational paths;
  a timing-driven implementation would pipeline them. The schedules above
  assume one result per clock.
- **`fp64_div`** is a restoring divider that produces one quotient bit per
  clock. It then rounds to nearest-even with the remainder as sticky bit. The
  latency is 56 clocks from start to done. x/0 gives Inf.
- **`sigmoid_act`** computes the activation `Phi`. The source names it only
  as Phi, without a formula. This design uses the logistic sigmoid,
  approximated piecewise-linearly:

  | \|x\| range   | value               |
  |---------------|---------------------|
  | < 1           | 0.25\|x\| + 0.5     |
  | < 2.375       | 0.125\|x\| + 0.625  |
  | < 5           | 0.03125\|x\| + 0.84375 |
  | otherwise     | 1                   |

  For negative x it uses `Phi(-x) = 1 - Phi(x)`. The largest error against
  the true sigmoid is about 0.02. An ELM trains its output layer on whatever
  `Phi` the hardware computes, so the only requirement is that training and
  inference use the same function, which they do. Replace this module to use
  another activation.

## Memory and bus

`wb_bram` holds `W` (MAX_L rows of MAX_IN doubles, row stride MAX_IN) and
`b`. It has one write port for the loader and two registered read ports, one
each for training and inference.

`axi_hp_master` is the only path to DDR. It is a 64-bit AXI4 master with
32-bit addresses:

- It takes a command of the form {read/write, byte address, length in
  words}.
- It splits the command into INCR bursts of at most MAX_BURST = 16 beats.
  No burst crosses a 4 KiB boundary.
- It has one burst outstanding at a time.
- Response codes are not checked.

Assertions check that AR/AW stay stable while not accepted and that no burst
crosses 4 KiB.

## Sizes

| parameter | default | meaning |
|-----------|---------|---------|
| MAX_IN    | 256 | largest #IN |
| MAX_L     | 150 | largest L |
| MAX_ON    | 2   | largest #ON |
| MAX_BURST | 16  | AXI burst length |

These hold every topology the original hardware was built for: #IN 64, 128
or 256, L 50, 100 or 150, #ON 1 or 2. In particular they hold DCS (128, 150,
2), FLIM (256, 150, 2) and a 16-lag autocorrelator front end (16, 50, 2).
On-chip storage at the defaults is about 4.0 Mbit: `W` 2.46 Mbit, `P` 1.44
Mbit, the rest small.

The LiDAR classifier (#IN 50, #ON 1) fits only up to L = 150. The larger L
values up to 600, which were evaluated only in software, would need
`P` = 600² doubles (23 Mbit) and do not fit.

Clock counts at the defaults:

| topology | training per sample | inference per sample |
|----------|---------------------|----------------------|
| DCS (128, 150, 2)  | 88,094 clocks  | 19,937 clocks |
| FLIM (256, 150, 2) | 107,422 clocks | 39,265 clocks |

## Where this departs from the original design

- The original modules were produced by high-level synthesis, with the
  matrix operations unrolled and pipelined and `W`/`b` copied into register
  files for parallel access. Here each matrix operation is a plain sequential
  loop with one or two multiply-adds per clock. The latencies differ:
  - The original hidden-layer time was 19,913 clocks for DCS and 199,800 for
    FLIM. Here it is L·(#IN+2) = 19,500 and 39,000 clocks.
  - The original `P` update phases were about 22,500 clocks each. Here they
    are L² = 22,500.
  - The original inference hidden layer took 9,663 clocks for DCS. Here it
    takes 19,500.
  - The original spent 13,967 clocks per training run clearing
    intermediate results to zero. Here each dot product starts from its
    first term (or from the bias), so nothing needs clearing.
  - Loading `W` and `b` took 45,002 clocks in the original. Here it takes
    one clock per word, L·(#IN + 1) words, plus AXI overhead and stalls.
- How `P_N0` and `eta_N0` reach the logic, and where samples and results live
  in DDR, are not specified by the source. The layout above is this design's
  own choice.
- Completion is signalled by a STATUS bit, not an interrupt. The original
  system's trigger flags in DDR were a processor-to-processor convention.
- Training and inference have separate datapaths, as in the original. The
  shared AXI master and the single mode multiplexer still let only one
  module run at a time.
- Not part of this RTL:
  - the processor-side software (initial training by Jacobi SVD, drivers);
  - the DDR controller and interconnect.

## Verification

Each block has a self-checking testbench in `tb/`. Each ends with
`TB_RESULT checks=N failures=M`.

- `tb_fp64_add`, `tb_fp64_mul`, `tb_fp64_div` compare with the simulator's
  `real` arithmetic on random and corner-case operands. `tb_fp64_div` also
  checks the divider latency.
- `tb_sigmoid_act` compares with the piecewise-linear definition.
- `tb_hidden_mvm`, `tb_data_loader`, `tb_obt_core` and `tb_infer_core` run
  against `dma_model`, a behavioural DMA/DDR model. They compare bit for bit
  with the `double` reference model in `tb_ref_pkg` and check the clock
  counts given above. `tb_obt_core` also covers continued training without
  init and #ON = 1.
- `tb_axil_cfg` covers the register file handshakes. `tb_axi_hp_master`
  covers burst splitting under random back-pressure from `axi_ddr_model`.
- `tb_oselm_pl_top` runs the top at reduced sizes through AXI only, playing
  the processor. It runs load, train with init, infer, continued training and
  infer again. It counts each mechanism and fails if one never happened:
  - each mode;
  - the init load and continued training;
  - full 16-beat bursts and 4 KiB splits;
  - bus stalls and write bursts;
  - busy seen in STATUS.
- `tb_oselm_full` does the same with every parameter at its default and the
  FLIM topology (256, 150, 2). It runs in about a second of wall-clock time
  with Verilator.
- `tb_oselm_workloads` keeps the defaults and reprograms the topology at run
  time. It covers DCS (128, 150, 2), a 16-lag autocorrelator (16, 50, 2),
  LiDAR at L = 150 (50, 150, 1) and (64, 50, 1). Each topology runs the same
  load, train, infer and continue sequence, checked bit for bit.

To run a testbench:

```
verilator --binary --timing --assert -Wno-fatal -Irtl -Itb -y rtl -y tb \
  rtl/oselm_pkg.sv tb/tb_ref_pkg.sv tb/tb_oselm_pl_top.sv \
  --top-module tb_oselm_pl_top -Mdir obj -o sim
./obj/sim
```

Not verified:

- Timing closure of the combinational floating-point units at any clock
  rate.
- Behaviour with subnormal or out-of-range data.
- Topology registers set outside their 1..MAX limits. The hardware does not
  guard against this.
