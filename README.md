# Trinity in SystemVerilog: one datapath for CKKS, TFHE and scheme conversion

Fully homomorphic encryption comes in two families that stress hardware in opposite ways.
CKKS works on long polynomials (N = 2^16) with many RNS limbs. Its cost is dominated by large
NTTs and by the multiply-accumulate products of key switching and base conversion. TFHE works
on short polynomials (N = 1024–2048), and its programmable bootstrapping is a long chain of small
NTTs, multiply-accumulates and negacyclic rotations. An accelerator built around one family
leaves most of its multipliers idle on the other.

The design in this repository follows Trinity's answer to that problem: a pool of small,
reconfigurable **computing units (CUs)**. Each CU is a column array of **processing elements
(PEs)**. A PE contains one modular multiplier, one adder and one subtractor. Its mode decides
whether it acts as a Cooley–Tukey butterfly (NTT), as a Gentleman–Sande butterfly (inverse
NTT) or as a systolic multiply-accumulate cell (MAC).

CUs are chained behind fixed NTT units through a transpose unit:
- For a long CKKS NTT, the CUs finish the second phase of a four-step NTT.
- For TFHE, they extend the short NTT pipelines.
- For key switching and base conversion, they become a systolic array.

The same multipliers therefore stay busy whichever scheme runs.

Everything here is written for a 36-bit word and modular arithmetic with Barrett reduction. It
is parameterised so that the defaults are the full chip:
- 4 clusters;
- 256 lanes per cluster;
- two 256-point NTT units per cluster;
- six CUs per cluster, of 1, 2, 2, 2, 2 and 3 columns;
- two HBM stacks.

## 1. Word and modular arithmetic (`trinity_pkg`)

All data are 36-bit residues modulo a prime q with 2^35 < q < 2^36. Multiplication forms the
72-bit product x, then applies Barrett reduction with the constant mu = floor(2^72 / q):

    q1 = x >> 35          (37 bits)
    q3 = (q1 * mu) >> 37
    r  = x - q3*q         (computed on 38 bits, r < 3q)
    r  = r - q, twice, each time only if r >= q

Addition and subtraction use a single conditional correction. The modulus and mu travel
together as a `modq_t`, which is part of each cluster's control word. One datapath therefore
serves every RNS limb: the sequencer changes q and mu between limbs. The test prime used
throughout is q = 2^36 − 2^20 + 1. It has 2^20-th roots of unity, so every NTT size in the
design can be exercised.

The package also defines:
- the PE, EWE, rotator and VPU mode enums;
- the numbering of the cluster crossbar sources;
- the packed control structures of every unit.

## 2. The NTT unit: constant geometry with an on-the-fly twist (`trinity_nttu`, `trinity_bu`, `trinity_tw`)

An NTTU transforms one 2M-point vector (M = 128, so 256 lanes) per cycle. It has S = log2(2M)
butterfly stages of M butterflies, each followed by a register. Every stage uses the same
constant-geometry wiring: butterfly i reads lanes i and i+M and writes lanes 2i and 2i+1.
With this wiring, every stage is identical, and only the twiddle factors change from stage to
stage. After S stages, output lane j holds X[bitrev(j)].

The twiddle factors that make this wiring compute a DFT were derived for this design. For a
primitive 2M-th root w, the butterfly i of stage s uses:

    forward: w ^ ( (2M >> (s+1)) * bitrev_s(i mod 2^s) )
    inverse: w^-1 ^ ( 2^s * (i >> s) )     (stages in the same order, no 1/N scaling)

Each stage's M twiddles sit in a register row, loaded one row at a time from the crossbar
(`tw_we`, `tw_stage`). The sequencer can thus change them per limb without reloading the
whole unit.

Ahead of the first stage sits the **twist (TW) stage**, one modular multiplier per lane. It
multiplies lane l of each incoming vector by a running factor t_l. The factor starts at
`first` and is multiplied by `ratio` after each vector, so a four-step twiddle matrix
w_N^(j1·k) never has to be stored. `bypass` passes the data through unmultiplied, which turns
the unit into a plain 256-point NTT. The inverse mode uses Gentleman–Sande butterflies
(a+b, (a−b)·w), so the same pipeline runs backwards.

Latency: S + 1 cycles from `in_v` to `out_v`, one vector per cycle sustained.

## 3. Four-step NTT through NTTU → TP → CUs

A length-N = N1·N2 transform, with N1 = 256 lanes and N2 ≤ 256 vectors, proceeds as follows:

1. **Phase 1.** The N2 vectors enter the NTTU. Vector t holds x[N2·j1 + t] in lane j1. Each
   vector is twisted and then transformed across its lanes. The twist seeds are first = 1 and
   ratio_l = w_N^bitrev(l), because the NTTU's output lane l carries frequency bitrev(l).
2. **Transpose (`trinity_tp`).** A ping-pong buffer of 2 × 256 vectors collects N2 vectors. It
   then reads them out so that each output vector carries 256/N2 complete columns of N2
   elements. While one half is read, the other half fills, so throughput stays at one vector per
   cycle. The block size is set by `log_n2`. Output comes 2 cycles after the last input of a
   block.
3. **Phase 2 on CUs.** The N2-point transforms of each group of N2 lanes run on the CU columns
   of the chain.

Each CU column holds NR = 128 PEs. It performs one constant-geometry stage on groups of
2^log_g lanes. The CU's local network (`trinity_cu_noc`) routes, for PE p:

    a = in[base + i],  b = in[base + i + 2^(log_g-1)]
    where i = p mod 2^(log_g-1) and base = (p >> (log_g-1)) << log_g

It writes back to lanes 2p and 2p+1. The result after log2(N2) columns is:

    lane m of output vector u = X[k1 + N1*k2]
    k1 = bitrev_8(u*(256/N2) + m/N2)
    k2 = bitrev_log2(N2)(m mod N2)

This is the data layout the testbenches check. A chain of CUs whose total column count equals
log2(N2) completes the transform.

The six CUs of a cluster have 1, 2, 2, 2, 2 and 3 columns, 12 in all. The sequencer chains them
through the crossbar as the polynomial length requires. Two examples from the tests:
- CU-2 → CU-2 gives four stages (N2 = 16).
- CU-1 → CU-3 gives four stages as well.

Two NTTU pipelines can run side by side, which is how short TFHE polynomials keep both NTTUs
busy.

## 4. The PE in MAC mode: the systolic array

In MAC mode, PE row p of a CU keeps an accumulator:
- Each valid cycle it adds b·c, where b arrives on lane p + NR and c is the column's
  per-row constant.
- When `out_acc` is high, the PE emits a + acc on lane p. That sum includes the product of that
  same cycle. The accumulator then restarts from zero.
- b is passed on unchanged to the next column.

A CU of X columns therefore computes a dot product over time with X constants per row, and the
columns' sums add up along lane p. This is the inner-product and base-conversion structure of
CKKS key switching and the external product of TFHE. The column constants are read once from
local-buffer banks, which hold their read data.

Latency: one cycle per column, in every mode.

## 5. The other functional units

- **EWE (`trinity_ewe`).** 512 lanes (two vectors per operand) of modular add, subtract,
  multiply and multiply-add. One register stage.
- **Automorphism unit (`trinity_autou`).** Works in the coefficient domain. It writes
  coefficient i of an N-coefficient polynomial to position i·k mod 2N, and negates it when that
  position is N or more. It reads the polynomial back in order. It is a ping-pong buffer of
  NMAX = 65536 coefficients, one vector in and one out per cycle. Output starts 2 cycles after
  the last input vector.
- **Rotator (`trinity_rotator`).** Negacyclic rotation by X^r, plus the SampleExtract
  rearrangement of TFHE/scheme conversion (out[j] = a[idx−j] for j ≤ idx, −a[N+idx−j]
  otherwise). It consists of an index map and a conditional negation over a buffered
  polynomial. Output vector u appears 2+u cycles after `start`.
- **VPU (`trinity_vpu`).**
  - ModSwitch from q to 2N: round(x·2N/q) mod 2N, using a divider per lane.
  - The key-switching digit MAC of TFHE: acc −= digit·ksk, where digit is field `dig` of width
    `base_log` of a scalar mask element.
  - Accumulator load.
- **Memories.** The local buffer (`trinity_lbuf`) has 5 banks of 512 vectors, and a cluster has
  three of them. The scratchpad (`trinity_spm`) has 4 banks of 10240 vectors, 47 MB per
  cluster. Each bank is a single-port array (`trinity_sram_sp`) with a one-cycle read latency.
  The read data are held until the next read, so a bank can feed a constant to a unit for as
  long as needed.

## 6. The cluster and its control word (`trinity_cluster`)

Inside a cluster, every producer drives one slot of a source crossbar:
- 15 local-buffer banks and 4 scratchpad banks;
- 2 NTTUs and 2 TPs;
- 6 CUs;
- the rotator, the AutoU, the two halves of the EWE and the VPU;
- the network input and the HBM input.

Every consumer selects its input by a 6-bit source index. A unit consumes a vector when it is
enabled and its selected source is valid. Memory read valids are registered, so they line up
with the read data.

The whole cluster is therefore steered by one packed `cluster_ctl_t` per cycle. It carries the
modulus, each unit's mode and source, and each bank's enable, write, address and write source.
In the paper, the compiler produces this sequence. Here the
testbenches generate it.

## 7. The chip (`trinity_top`) and the inter-cluster network (`trinity_icnoc`)

The top holds NC = 4 clusters, the inter-cluster network and two HBM ports:
- Cluster c uses HBM port c / (NC / NHBM).
- An output multiplexer per port picks which of its clusters drives it.

The network is registered and has two modes:
- **All-to-all.** Each vector is cut into NC chunks, and cluster o receives chunk o of every
  cluster. This is the limb-wise ↔ slot-wise layout switch.
- **Permutation.** Cluster o receives cluster `src[o]`'s vector.

The HBM2 PHY and DRAM are outside the RTL: the top exposes their data ports.

## 8. Where this design departs from the paper or fills gaps

- **Scratchpad size.** The paper gives both "40960 items per bank" and "45 MB per cluster",
  and these do not agree at 256 lanes and 36 bits. The 45 MB figure was followed, which gives
  10240 vectors per bank. The resulting on-chip total is about 224 MB, against the paper's
  total of 191 MB.
- **CU MAC rate.** The paper says both "n_r elements per cycle" and "256 elements per cycle"
  for MAC. This design takes one new b per row per cycle (n_r = 128).
- **BConv mapping.** The text and the figure name different CU combinations. Any combination
  can be chained through the crossbar, so nothing in the RTL depends on the choice.
- **Transpose and automorphism networks.** The paper refers to F1's quad-swap network and to
  ARK's shuffle stages without describing them. Both are built here as buffers that are written
  in one order and read in another, with the same throughput of one vector per cycle.
- **Untuned datapath.** The constant-geometry twiddle schedule, the TW seeds, the PE
  accumulator timing, the 6-bit crossbar encoding, reset behaviour and all latencies are this
  design's own. The units are not pipelined deeper than one register per stage, so timing at
  1 GHz has not been addressed.
- **VPU decomposition.** The digit extraction uses unsigned digits without the rounding of a
  production TFHE decomposition.
- **Not implemented.** The compiler that produces the control sequences is not
  implemented: the control word is the interface. The HBM2 PHY is not implemented either.

## 9. Simulating it

Every block has a self-checking testbench in `tb/`. Each compares against a reference written
independently in `tb/tb_ref_pkg.sv` (80-bit `%` arithmetic, direct DFTs, explicit index maps)
and ends with a `TB_RESULT checks=… failures=…` line. For example:

    verilator --binary --timing -Irtl -Itb rtl/trinity_pkg.sv tb/tb_ref_pkg.sv \
        -y rtl -y tb tb/tb_trinity_top.sv --top-module tb_trinity_top
    ./obj_dir/Vtb_trinity_top

Two testbenches cover the whole design:
- **`tb_trinity_top`** is the end-to-end test, run at 16 lanes, 4 clusters and NMAX = 256.
  - It loads data through HBM into the scratchpad and local buffers.
  - It runs two four-step 256-point NTTs at once, through the two pipeline shapes.
  - It then runs a bypassed plain NTT, a CU dot product, EWE multiplication, an automorphism,
    a rotation, a SampleExtract, a ModSwitch, and both network modes.
  - Every result is read back through HBM and checked.
  - It counts how often each mechanism happened and how many vectors each unit produced. A
    mechanism that never happened counts as a failure.
- **`tb_trinity_cluster`** runs the same sequence on one cluster, with its network port looped
  back.

No testbench runs the top at its full default size: four clusters of 256 lanes hold about
20,000 36-bit modular multipliers and 224 MB of arrays, and the simulator's C++ build of that
alone takes far longer than a test run should. The largest size simulated end to end is
4 clusters of 16 lanes with NMAX = 256. The unit testbenches use reduced sizes as well (for
example, the NTTU at 16 points and the CUs at 4 rows); every size-dependent index computation
is written in terms of the parameters, so the defaults exercise the same code.

### How the sizes fit

- A CKKS ciphertext at N = 2^16 and L = 35 takes 21 MB. It fits in one cluster's scratchpad.
- Its evaluation key (dnum = 3) takes 85 MB. It fits across the four clusters.
- The TFHE bootstrapping keys of the three parameter sets take 18, 35 and 65 MB.
- Every polynomial length used (2^10 to 2^16) maps to the four-step flow with N2 ≤ 256.
