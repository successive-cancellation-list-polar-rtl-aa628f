# LLR-based successive cancellation list polar decoder

Successive cancellation list (SCL) decoding runs L successive-cancellation
(SC) decoders side by side over the code tree of a polar code. At every
information bit each of the L surviving paths is extended by both bit values,
and only the L most probable of the 2L candidates survive. Classical SCL
formulations carry two numbers per message (the probability, or
log-probability, of the bit being 0 and of it being 1). This design carries a
single log-likelihood ratio (LLR) per message, as LLR-based SC decoders do, and
recovers the path probabilities that the list needs with a small *metric
computation unit* (MCU) behind the last stage of each SC decoder. The LLR
memory and the processing elements are about half the size of their
two-message counterparts.

The RTL is written in SystemVerilog and is parameterised by code length `N`,
list size `L`, LLR width `Q` and path-metric width `PMW`. The defaults are
N = 1024, L = 4, Q = 8, PMW = 8.

## The path metric in LLR form

Let `M` be the log-probability of a surviving path of length i-1, and `x` the
LLR of bit i that the SC decoder of that path computes (positive means "0 is
more likely"). Exactly,

    M(i,0) = M + x - ln(1 + e^x)
    M(i,1) = M     - ln(1 + e^x)

and with `ln(1 + e^x) ≈ max(x, 0)` this becomes

    x >= 0:  M(i,0) = M        M(i,1) = M - x
    x <  0:  M(i,0) = M + x    M(i,1) = M

The child that agrees with the sign of x keeps the parent's metric; the
other child is penalised by |x|. Metrics therefore start at 0 and only fall.
The approximation costs no measurable error-rate performance. The decoder
never needs `ln` or `exp`. Each MCU is just one adder, one subtractor and two
2:1 muxes driven by the sign of x.

For a frozen bit every path simply takes the value 0 and keeps M(i,0). The
penalty still counts if the LLR says 1, so paths that contradict frozen bits
are pushed down the list.

## Block structure

```
                +--------------------+     +--------------------+
 channel LLRs ->| llr_mem_bank       |<--->| llr_sc_decoder x L |  (N/2 PEs each)
                | L x (2N-1) x Q     |     +--------------------+
                +---------+----------+               ^ partial sums
                          | layer-0 LLR per path     |
                          v                          |
  path_metric_bank --> mcu x L --> 2L candidates --> sorting_block (2L inputs)
        ^                                             |
        |             new metrics / source path / bit |
        +--------------------+------------------------+
                             v
                   survival_path_bank (bits + partial sums)
                   llr_mem_bank (path copies)
```

| Module | Role |
|---|---|
| `llr_scl_decoder` | top: wires everything, builds and selects the candidates |
| `scl_controller` | schedule: one tree layer per cycle, one decision cycle per bit |
| `llr_sc_decoder` | one component SC decoder, a line of N/2 `llr_pe` |
| `llr_pe` | f unit and g unit on Q-bit sign-magnitude LLRs |
| `mcu` | path-metric update described above |
| `sorting_block` | Batcher odd-even merge sorting network of `cas_unit`s |
| `llr_mem_bank` | every LLR of every path: L(2N-1) words |
| `survival_path_bank` | decoded bits (L x N) and partial sums (L x (N-1)) |
| `path_metric_bank` | L metrics, valid flags, best path |
| `s2c`, `c2s` | sign-magnitude <-> two's complement, C2S saturating |
| `llrscl_pkg` | default sizes and the controller phase type |

### Processing element

An LLR is stored as sign and magnitude. The f unit
`f(a,b) = sign(a)·sign(b)·min(|a|,|b|)` (the min-sum form) works on that form
directly: an XOR of the signs and a compare-and-select of the Q-1 bit
magnitudes. The g unit `g(a,b,u) = b + (-1)^u · a` converts both operands to
two's complement, forms `b + a` and `b - a` in parallel, and picks one with
the partial sum `u`. It converts the result back, clipping the Q+1-bit result
to ±(2^(Q-1)-1). A final mux selects f or g. The PE is purely combinational.

### Component decoder and the tree schedule

The tree of a length-N code has layers 0..log2 N. Layer λ of the node being
decoded holds 2^λ LLRs; layer log2 N holds the channel LLRs. With N/2 PEs a
component decoder computes a whole layer in one cycle: PE k combines parent
words k and k + 2^λ. Layer λ of every path is stored at word offset 2^λ - 1
of that path's 2N-1 word array in `llr_mem_bank`.

For bit i the controller runs

* i = 0: f at layers log2 N - 1 down to 0;
* i > 0: g at layer t = (number of trailing zeros of i), then f at layers
  t-1 down to 0;

and then one DECIDE cycle. This gives 2N-2 compute cycles and N decision
cycles per codeword, **3N-2 = 3070 cycles at N = 1024**. The g at layer t
needs the partial sums of the finished left sibling. These are the polar
encoding of the bits that sibling decoded.

### Partial sums

`survival_path_bank` keeps, per path and per layer λ < log2 N, a 2^λ-bit
register β[λ]: the re-encoded bits of the most recent left child finished at
that layer. When bit i is decided with value b the vector v = (b) climbs the
tree. At every layer where bit λ of i is 1, v is a right child and becomes
`{β[λ] XOR v, v}`. At the first layer where bit λ of i is 0, v is stored as
β[λ] and the climb ends. This is done combinationally in the decision cycle.
The registers are copied with their path like everything else.

### Decision cycle: candidates, sorting and pruning

In the decision cycle the layer-0 LLR of each path and its metric go through
the L MCUs, which give 2L candidates. Candidate j = 2·path + bit gets the key

    { valid, metric with its sign bit inverted, ~j }

compared as an unsigned number. Invalid paths therefore sort below all valid
ones. Metrics order as signed numbers, and equal metrics go to the lower
candidate index, so every key is distinct and the result is deterministic.
For an information bit the `sorting_block` orders the 2L keys and the L
largest become new paths 0..L-1, best first. For a frozen bit the sorter is
bypassed: path l stays path l with bit 0 and metric M(i,0).

The sorting network is Batcher's odd-even merge sort. For 8 inputs (L = 4) it
has 19 compare-and-swap units in 6 layers: sorting pairs, then 2x2 merges,
then a 4x4 merge. It is the longest combinational path of the decoder, about
log2(2L)(log2(2L)+1)/2 C&S delays.

In the same clock edge all three banks apply the decision: new path l is
loaded from its source path's LLRs, bits, partial sums and the chosen
metric, and the decided bit is appended. The copy is a full copy. A path's
LLR array is replaced in one cycle, which makes each LLR word register an
L:1 mux input.

### Starting the list

The metric bank starts a codeword with all metrics 0 but only **path 0
valid**. If all L paths started as valid identical copies, every sort would
pick L copies of the same best child, and the list would never spread out.
With the flag, the first information bits spread path 0 into 2, then 4
distinct paths. Until the list is full, the sorter keeps some invalid
candidates; they stay invalid and cannot win.

After the last bit, `u_hat` shows the bits of the valid path with the largest
metric (lowest index on a tie), and `best_metric` shows its metric.

## Number formats and saturation

* Channel and internal LLRs: Q-bit sign-magnitude, positive = bit 0.
  Negative zero is accepted and behaves like zero.
* g-unit results clip to ±(2^(Q-1)-1). f cannot overflow.
* Path metrics: PMW-bit two's complement, at most 0. They saturate at
  -2^(PMW-1). With the default PMW = Q = 8 this bound is reached in
  noisy blocks. Paths that are saturated tie and are ordered by index. The
  best path is rarely affected, but a wider PMW makes the list ordering
  exact for longer. Only the parameter needs to change.

## Interface and timing

| Port | Dir | Width | Meaning |
|---|---|---|---|
| `clk`, `rst_n` | in | 1 | clock; asynchronous active-low reset |
| `llr_we`, `llr_waddr`, `llr_wdata` | in | 1, log2 N, Q | write channel LLR `waddr` (ignored while busy) |
| `frozen` | in | N | 1 = frozen bit (value 0); held stable while busy |
| `start` | in | 1 | one-cycle pulse while idle |
| `busy` | out | 1 | high for exactly 3N-2 cycles |
| `done` | out | 1 | one-cycle pulse after the last decision |
| `u_hat` | out | N | decoded bits of the best path, valid from `done` until the next `start` |
| `best_metric` | out | PMW | metric of that path |

Loading takes N cycles, one LLR per cycle, written into all L path copies.
The code construction (the frozen set) is an input, so any (N, K) code of
length N can be decoded without changing the RTL.

## Sizes at the default parameters

| Resource | Count |
|---|---|
| PEs | L·N/2 = 2048 |
| MCUs | L = 4 |
| C&S units | 19 |
| LLR memory | L(2N-1)·Q = 8188 × 8 bits |
| survival paths | L·N = 4096 bits |
| partial sums | L(N-1) = 4092 bits |
| path metrics | L·PMW = 32 bits + 4 valid flags |
| latency | 3N-2 = 3070 cycles per codeword |

## Choices made in this implementation

The following are not fixed by the architecture this RTL implements. They
are the choices made here:

* **Q = 8 and PMW = Q.** The architecture is described for a generic q-bit
  word, and its path-metric memory has q bits per path.
* **Storage.** All banks are plain register arrays. The channel LLRs are
  stored per path (L copies), so each path owns a full 2N-1 word array.
* **Path replacement.** A full one-cycle copy, not pointer-based or lazy
  copying.
* **Partial sums** live in `survival_path_bank` next to the decoded bits.
* **Valid flags and the tie rule** are described under "Starting the list"
  and "Decision cycle".
* **Saturation.** g results and metrics are clipped as described under
  "Number formats and saturation".
* **Tree order.** The code is the natural-order polar transform without bit
  reversal: x = u·F^{⊗n}, with F = [[1,0],[1,1]]. An encoder must use the
  same order.
* **Loading** is one LLR per cycle, and the frozen mask is an input port.

## Verification

Every module has a self-checking testbench in `tb/`. Each one prints
`TB_RESULT checks=<n> failures=<m>` and has a cycle watchdog.

| Testbench | What it checks |
|---|---|
| `tb_llr_pe` | all Q = 6 operand pairs, f and g, both u_sum |
| `tb_mcu` | all Q = 6 LLRs × all non-positive PMW = 7 metrics, including saturation |
| `tb_cas_unit` | random and equal words |
| `tb_sorting_block` | all 256 0/1 inputs (0-1 principle), random words, 19 C&S |
| `tb_llr_sc_decoder` | every layer, f and g, against integer models |
| `tb_llr_mem_bank` | random loads, layer writes and path copies against a shadow copy |
| `tb_survival_path_bank` | partial sums against direct re-encoding of the stored bits |
| `tb_path_metric_bank` | init, updates, best-path selection |
| `tb_scl_controller` | the full (phase, layer, f/g, bit) schedule and 3N-2 latency, N = 8 and 16 |
| `tb_llr_scl_decoder` | 30 codewords at N = 64, L = 4 |
| `tb_llr_scl_decoder_full` | 3 codewords at the default N = 1024, L = 4 |

The two decoder testbenches encode random words of a rate-1/2 code. The
information set is the largest-Hamming-weight indices, a simple test choice.
They add integer noise at three levels and compare `u_hat` and `best_metric`
bit-exactly with `scl_ref_pkg`. This is a reference model that recomputes
every bit LLR from the channel by walking the tree, so it shares neither the
schedule nor the storage of the RTL. The testbenches also check that noiseless
words are recovered and that decoding takes exactly 3N-2 cycles. They count
every mechanism: frozen and information-bit decisions, path copies, invalid
candidates kept while the list fills, metric ties, g saturation and metric
saturation. A mechanism that never occurs counts as a failure.

Running a testbench with Verilator 5, from the directory that holds `rtl/`
and `tb/`:

```
verilator --binary --timing --assert -Irtl -Itb \
    rtl/llrscl_pkg.sv tb/scl_ref_pkg.sv tb/tb_llr_scl_decoder.sv \
    --top-module tb_llr_scl_decoder -o sim
./obj_dir/sim
```

For other testbenches, change the last file and the top module. Only the two
decoder testbenches need `tb/scl_ref_pkg.sv`. Verilator finds the other
modules through `-Irtl`. At N = 1024, compiling the C++ that Verilator
generates takes about a minute, and the three codewords simulate in a few
seconds.

## Limits

* The error-rate curves of the original evaluation depend on a frozen set and
  an SNR sweep that are not part of this RTL. The testbenches check exact
  agreement with the algorithm and decoding at three fixed noise levels, not
  a BER curve.
* Table-level gate counts and the critical-path figure (6 C&S delays for
  L = 4) are properties of the structure. They have not been measured here.
* The full path copy and the combinational sorter in the decision cycle are
  the simplest faithful realisation. A production design would pipeline the
  decision or use lazy copies.
