# Multi-bit-decision list decoder for polar codes (SystemVerilog)

Successive-cancellation list (SCL) decoding makes polar codes competitive with
LDPC and turbo codes. Its drawback is latency. A conventional SCL decoder of
code length n spends about 3n-2 clock cycles per codeword:

- 2n-2 cycles go to the f/g operations of its SC component decoders;
- n more cycles sort the 2L candidate paths after every single bit.

This design cuts the latency by deciding **2^K bits at once**. The last K
stages of each SC component decoder are replaced by two small combinational
units:

- a *metric computation unit* (MCU) computes the path metric of every one of
  the 2^(2^K) values the next 2^K bits can take;
- a *zero-forcing unit* (ZFU) removes the values that put a 1 on a frozen
  position.

The list is then pruned once per group of 2^K bits instead of once per bit.
The intermediate levels of the code tree are never visited, so the metrics
are exact. The result equals that of a list decoder that prunes once per
group.

| K | bits per decision | candidates per path | latency (cycles) |
|---|---|---|---|
| 0 | 1 (conventional SCL) | 2 | 3n-2 |
| 1 | 2 (2b-rSCL) | 4 | 2n-2 |
| 2 | 4 (4b-rSCL) | 16 | n-2 |
| K | 2^K | 2^(2^K) | n/2^(K-2) - 2 |

The RTL covers K = 1 and K = 2, the two cases the method was worked out for
in hardware. It also covers any list size L ≥ 2 and any power-of-two n. The
default configuration is a (1024, 512) code, K = 2, L = 2 and 3-bit channel
values. It decodes a codeword in 1022 cycles.

## Arithmetic: log-likelihood pairs, max-log, and -Inf

Each code bit carries two log-likelihoods, LL(0) and LL(1). It does not
carry a single LLR. Every value along a path is a *joint* log-probability of
that path's past decisions and the bit, so the value that reaches the last
stage already is the path metric. No separate metric accumulator is needed.

The processing element (`rscl_pe`) implements the max-log f and g functions:

    f:  c(0) = max(a0+b0, a1+b1)        c(1) = max(a0+b1, a1+b0)
    g:  d(0) = a(u)+b(0)                d(1) = a(1-u)+b(1)      (u = partial sum)

The same four adders serve both functions. Two compare-and-select units
finish f, and two muxes steered by the partial sum finish g.

Widths grow by one bit per stage:

- channel values are QCH bits (3 by default);
- stage s values are QCH+s bits;
- metrics and sorter keys are QCH+m bits, which is 13 at n = 1024.

All values are signed two's complement. -Inf, the log of a forced-zero
likelihood, is coded as the most negative 13-bit number. For this to be safe,
channel values must stay within ±(2^(QCH-1)-1), that is ±3 with 3 bits. A
real path metric then reaches at most 3·1024 in magnitude, which is below
4096. The test channels give LL(0), LL(1) ≤ 0 with the larger one equal to 0,
but any values in range work.

## The decoding tree and its storage

Stage 0 is the channel. Stage s holds 2^(m-s) LL pairs for each list slot.
PE j of stage s combines `a = LL_{s-1}[j]` and `b = LL_{s-1}[j + 2^(m-s)]`.
This pairing matches the natural-order encoder x = u·F^{⊗m}, with F = [1 0; 1 1].

The LL bank, the SC component decoders and the partial-sum generator share
one *heap layout*: stage s occupies indices [2^(m-s), 2^(m-s+1)). Stage m-K,
the last f/g stage, therefore sits at [2^K, 2^(K+1)). Those 2^K pairs are
the a_1..a_{2^(K-1)}, b_1..b_{2^(K-1)} inputs of the MCU.

`ll_memory_bank` stores stage s at its true width of QCH+s bits and
sign-extends on read. Every stage has its own set of 2^(m-s) PEs in
`sc_component_decoder`, so a stage's f or g step takes one cycle.

## Schedule and latency

`rscl_controller` walks the tree group by group. There are n/2^K groups.

- **Group 0** runs f at stages 1 .. m-K.
- **Group i > 0** first runs one g at stage m-K-t, where t is the number of
  trailing zeros of i. It then runs f at the stages below, down to m-K.
- **Every group** ends with two further cycles:
  - `ST_MC`: the MCU and ZFU, plus the first half of the sorting network;
  - `ST_SORT`: the second half of the sorting network. The pruning is
    applied at the end of this cycle.

The f/g cycles add up to 2(n/2^K - 1) and the group cycles to 2n/2^K. That
totals n/2^(K-2) - 2, the latency in the table above. `busy` is high for
exactly that many cycles.

For n = 16 and K = 2 the sequence of states is:

    f1 f2 MC S | g2 MC S | g1 f2 MC S | g2 MC S          (14 = n - 2 cycles)

## Candidate metrics (MCU) and zero forcing (ZFU)

For a group of 2^K bits α = (α_1 .. α_{2^K}), the MCU forms x = α·G_{2^K}
with the 2^K-point polar transform. It then adds the matching stage-(m-K)
values:

    P(α) = Σ_j LL_j(x_j)
    K = 1:  P(00)=a0+b0  P(01)=a1+b1  P(10)=a1+b0  P(11)=a0+b1
    K = 2:  P(α) = a1(α1^α2^α3^α4) + a2(α2^α4) + b1(α3^α4) + b2(α4)

The adders are shared as in a two-level tree. The a-half sums are formed
once per combination of their x bits, and so are the b-half sums. One adder
per candidate then adds the two halves.

Candidate index c holds α_1 in its most significant bit, so output 1 is
P(00..01). The ZFU forces M(α) = -Inf when α sets a frozen bit to 1. It also
forces -Inf when the list slot holds no path (see below).

## Pruning: sorting 2^(2^K)·L candidates down to L

The sorting element is the **metric sorting block** (`metric_sort_block`).
It takes 2^s inputs and passes on the larger half:

1. An increasing bitonic sorter sorts the first half of the inputs, and a
   decreasing bitonic sorter sorts the second half.
2. A row of compare-and-select units then outputs out_j = max(i_j, d_j).

The 8-input version is exactly two 4x4 sorters made of IOS/DOS 2x2 cells,
followed by four C&S units.

One block only halves its input set. `path_pruner` therefore **cascades**
log2(2^(2^K)) blocks: 32 → 16 → 8 → 4 → 2 for K = 2 and L = 2. The result
is the L largest candidates, in no particular order.

The cascade holds a register after its first half. This is the "data path
balancing" arrangement: the register that would otherwise sit between the
last f/g stage and the MCU is moved into the sorter. The last f/g stage
still writes the LL bank. The `ST_MC` cycle then covers the MCU, the ZFU and
half of the sorting, and `ST_SORT` covers the rest.

Each sorter element is `{metric, slot, pattern}`, so the winner carries its
parent slot and its 2^K decided bits with it. When metrics are equal, the
order of the winners is not defined.

## Path management

The pruning step writes every list slot l from the slot `parent[l]` of its
winning candidate. Several new slots may share one parent, and a slot that
is no winner's parent is dropped. Three blocks take part, all in the same
clock edge:

- **`ll_memory_bank`** copies the whole LL history of the parent. It is
  built from register arrays with a full L-way copy.
- **`partial_sum_generator`** copies the parent's partial sums and adds the
  new group. It re-encodes the 2^K bits, then walks up the tree:
  - a node that is a left child stores its estimate, which is what its right
    sibling's g operations will read;
  - a node that is a right child merges with its stored left sibling v into
    [v xor w, w] and the walk goes one stage up.

  Bit (m-K-s) of the group index tells which case applies at stage s. This
  is the encoder butterfly applied one level at a time.
- **`survival_path_bank`** copies the parent's decided bits, writes the 2^K
  new bits, and records the metric.

**Empty list slots.** At the start of a codeword only slot 0 holds a path.
The other slots are marked invalid, and the ZFU turns all their candidates
into -Inf. A slot whose selected metric is -Inf stays invalid. This can
happen while fewer than L qualified candidates exist, for example while the
first groups are frozen.

**Output.** At the end, the valid slot with the largest metric is the result,
with ties going to the lowest slot. All L paths are also output, for use with
an outer check such as a CRC. That check is not part of this design.

## Interface

`rscl_decoder #(N=1024, K=2, L=2, QCH=3)`

| port | dir | width | meaning |
|---|---|---|---|
| clk, rst_n | in | 1 | clock; asynchronous active-low reset |
| start | in | 1 | sampled while idle: latch inputs and begin |
| ch_ll | in | N×2×QCH | LL(0), LL(1) of each code bit, signed |
| info_mask | in | N | 1 = information bit, 0 = frozen |
| busy | out | 1 | high for N/2^(K-2)-2 cycles |
| done | out | 1 | one-cycle pulse after busy; outputs valid from here |
| u_hat | out | N | decoded u (bit i = u_{i+1}), best valid path |
| best_metric | out | QCH+m | its metric |
| list_paths, list_valid | out | L×N, L | all survivors |

The outputs hold until the next `start`. Channel values and the frozen
pattern are taken in parallel. A streaming input is not provided.

## Files

`rtl/` contains one module or package per file:

- `rscl_pkg`: shared types (states, PE mode) and the polar-transform helper;
- `rscl_pe`, `sc_component_decoder`: the f/g stages;
- `rscl_mcu`, `rscl_zfu`: the reformulated last stages;
- `bitonic_sorter`, `metric_sort_block`, `path_pruner`: the sorting;
- `ll_memory_bank`, `partial_sum_generator`, `survival_path_bank`: the state;
- `rscl_controller`: the schedule;
- `rscl_decoder`: the top.

`tb/` contains one self-checking testbench per module (`tb_<module>`),
together with:

- `tb_rscl_ref_pkg`: an independent behavioural reference decoder and AWGN
  channel model;
- `tb_rscl_driver`: frame stimulus and checks for one decoder;
- `tb_rscl_decoder`: end-to-end test at N = 64 in two configurations, K = 2
  with L = 2 and K = 1 with L = 4;
- `tb_rscl_decoder_full`: the default 1024-bit configuration.

Every testbench prints `TB_RESULT checks=N failures=F`.

Run a testbench with plain Verilator, for example:

    verilator --binary --timing -Wno-fatal rtl/rscl_pkg.sv rtl/*.sv \
        tb/tb_util_pkg.sv tb/tb_rscl_ref_pkg.sv tb/tb_rscl_driver.sv \
        tb/tb_rscl_decoder_full.sv --top-module tb_rscl_decoder_full
    ./obj_dir/Vtb_rscl_decoder_full

The full-size build takes about a minute, and the simulation takes well
under a second.

## What the tests establish, and how far to trust it

- **Units.** Each unit is checked against its equations on random inputs:
  - PE, MCU (K = 1 and K = 2) and ZFU;
  - the sorters, whose outputs must be the largest half or the largest L as
    multisets, with intact tags;
  - the LL bank, including stage widths and copying, and the survival bank,
    both against reference models;
  - the partial sums, against a direct re-encoding of the decided bits;
  - the controller's whole (stage, f/g) sequence and its cycle count, for
    K = 1 and K = 2.
- **End to end.** Random messages are sent over BPSK/AWGN with a
  Bhattacharyya-chosen information set of rate 1/2. Each frame checks:
  - the latency (n-2 or 2n-2 cycles);
  - zeros on all frozen positions;
  - that the reported metric equals the metric of `u_hat` as recomputed by
    the reference decoder from the channel values;
  - that a noiseless frame decodes to the message;
  - that the best metric equals the reference decoder's best metric. This
    check applies only when the reference met no tie at the list boundary:
    a tie lets two correct decoders keep different survivors.

  The tests count the f and g operations, zero-forced groups, list forks,
  dropped paths and empty-slot steps. Each of these must occur.
- **Not established.**
  - Frame-error-rate curves were not reproduced.
  - Clock rate, area and power were not measured.
  - At n = 1024 only two frames are simulated.
  - With 3-bit channel values, ties at the list boundary are common, so the
    reference comparison of the best metric is skipped on most noisy frames.
    The end-to-end test at N = 64 uses 9-bit channel values so that this
    comparison applies to most frames.

## Where this design goes beyond, or departs from, the published method

- **Sorter cascade.** The method states that a single 2^s-input,
  2^(s-1)-output sorting block is enough to find the L best of 2^(2^K)·L
  candidates. Taken literally, that block only returns the larger half.
  Here the blocks are cascaded until L remain. This lengthens the sorting
  logic, which is why the two-stage pipelining matters.
- **Pipeline register position.** The position inside the sorter is chosen
  here: after the first ceil(2^K/2) of the 2^K cascaded blocks (after block 2 of 4 for K = 2). That register, which holds half of the candidates, is the only metric storage. The method instead mentions memory for all 2^(2^K)·L metrics.
- **Path copying** is a full register copy of the LL history, the partial
  sums and the decided bits. The method does not describe how paths are
  copied. A pointer-based memory would be cheaper in area.
- **PE count.** One PE per stage output (about n PEs per path) gives the
  one-cycle-per-stage schedule that the latency formula assumes. The method
  does not give a PE count.
- **Additions not in the method.** The valid-slot mechanism for empty list
  slots, the -Inf coding, the tie rules, the parallel input interface and
  the start/busy/done handshake are all choices of this design.
- **Scope.** Only the LL-based (not LLR-based) variant is built. K ≥ 3 is
  allowed by the parameters but untested. The MCU's candidate count grows
  as 2^(2^K), so K = 3 already gives 256 candidates per path.
