# Fast-TSCF: a thresholded SC-flip polar decoder in SystemVerilog

Successive-cancellation (SC) decoding of a polar code fails a frame as soon as
one bit decision goes wrong, because every later decision builds on the earlier
ones. SC-flip decoders repair the most common case, a single channel-induced
error. If the CRC of the first attempt fails, they decode the frame again with
one early decision inverted, and try again until the CRC passes or an attempt
budget T_max is used up. The hard part is choosing which decision to invert.

This RTL implements the **Fast Thresholded SC-Flip (Fast-TSCF)** decoder from
"Fast Thresholded SC-Flip Decoding of Polar Codes" (F. Ercan, W. J. Gross). It
chooses flips with three rules:

* **Critical set from the code structure.** A decision is a flip candidate only
  where the decoder has just entered a Rate-1 sub-code (and the equivalent
  places inside Rep and SPC sub-codes). The candidates need no precomputed
  table.
* **Threshold.** A candidate is kept only if its LLR magnitude is at most a
  threshold Omega. Omega follows from the channel quality alone:
  `Omega* = 2 (Eb/N0[dB] + 3)`. This linear fit replaces code-specific
  thresholds that would otherwise come from off-line simulation.
* **Order of appearance.** Candidates are tried in the order they occur in
  the codeword, not sorted by reliability, so no sorter is needed.

The decoder is "fast" because it decodes whole special sub-trees (Rate-0,
Rate-1, repetition, single parity check) in one step, straight from their
top-node LLRs. It also computes the flip candidates of those nodes at that
point, without walking down to the leaves.

The default configuration is the one the paper evaluates: PC(1024,512) with a
16-bit CRC (polynomial 0x1021) and T_max = 10.

## 1. Decoding tree and special nodes

A code of length N = 2^n is decoded on a binary tree. The root (stage n) holds
the N channel LLRs. A node at stage s holds 2^s LLRs α, and its children are
at stage s-1:

    left  child:  α_l[i] = sgn(α[i]) sgn(α[i+h]) min(|α[i]|, |α[i+h]|)      (f)
    right child:  α_r[i] = α[i+h] + (1 - 2 β_l[i]) α[i]                       (g)
    partial sums: β[i] = β_l[i] xor β_r[i],  β[i+h] = β_r[i]        (i < h = 2^(s-1))

Here β_l is the decided codeword (partial sums) of the left child. The
decoder walks the tree depth-first, left child first. When a node's leaves form
one of these patterns, the decoder does not go below the node:

| node   | leaf pattern (1 = information)  | decision                                   |
|--------|---------------------------------|--------------------------------------------|
| Rate-0 | all frozen                      | β = 0                                      |
| Rate-1 | none frozen                     | β_i = sign of α_i                          |
| Rep    | only the last leaf information  | all β_i = sign of Σ α_i                     |
| SPC    | only the first leaf frozen      | signs of α_i; if their parity is odd, invert the one with the smallest abs(α_i) |

Checks run in this order. A node counts as special only if it has at most P
leaves, which is one LLR word (P = 64 by default). A larger Rate-0 or Rate-1
region is handled as several P-leaf nodes. Single leaves are always Rate-0 or
Rate-1 nodes. The paper also names (0011) and (0101) four-leaf patterns but
gives no rule for them. This decoder walks into them: they split into Rate-0 +
Rate-1 and Rep + Rep.

## 2. Flip candidates (the thresholded critical set)

During the **first** attempt, each special node can report candidates.
Omega is the threshold. Every magnitude below is a top-node LLR magnitude
`abs(α)`, and `i1`, `i2`, `i3` are the indices of the smallest, second and
third smallest magnitudes:

* **Rate-1**: one candidate, index `i1`, if `abs(α_i1) <= Omega`.
* **Rep**: one candidate, the whole node (invert its decision), if
  `abs(Σ α_i) <= Omega`.
* **SPC**: two candidates, η1 before η2. Which test applies depends on the
  hard-decision parity p:

  | candidate | p = 1 (odd)                       | p = 0 (even)                                 |
  |-----------|-----------------------------------|----------------------------------------------|
  | η1        | invert `i2` instead of `i1`, if `abs(α_i2) <= Omega` | invert `i1` and `i2`, if `abs(α_i1) + abs(α_i2) <= Omega` |
  | η2        | invert `i3` instead of `i1`, if `abs(α_i3) <= Omega` | invert `i1` and `i3`, if `abs(α_i1) + abs(α_i3) <= Omega` |

  Every one of these changes keeps the parity even. The paper gives the index
  sets and their tests. Applying them this way, so the codeword stays valid,
  is this design's reading of those sets.

The first T_max candidates are stored in order of appearance (`flip_list`).
Attempt t (1 ≤ t ≤ T_max) repeats the whole decoding with candidate t applied.
Only one candidate is applied per attempt. A candidate is stored only as the
node's first leaf index plus the SPC subset bit. Everything decoded before that
node is the same as in the first attempt, so its LLRs are the same too. The
node decoder therefore finds the same `i1`..`i3` again, and nothing else needs
storing.

Decoding stops when the CRC passes, or when the attempts or the candidates run
out. In the second case the last attempt's result is returned with `crc_ok = 0`.

## 3. Architecture

```
 in_llr ──► llr_mem (stage regions) ──► pe_array (P × f/g) ──► llr_mem
               │
               └──► rate1_node / rep_node / spc_node (+ Rate-0) ──► psum_mem (β, in place)
                          │            ▲                    └──► u_hat (leaf values)
                          ▼            │ flip target
                       flip_list ──────┘
 info_mask ─► node_type            snr_db ─► omega_approx ─► Omega
 u_hat, info_mask ─► crc_check ─► controller (next attempt or done)
```

* **llr_mem**: P-lane words of QI-bit LLRs. Stage s has its own region, which
  holds the single node at that stage that the depth-first walk needs:
  2^s / P words when 2^s ≥ P, one word otherwise. That is 37 words for
  N = 1024, P = 64. There is one write port and there are two asynchronous
  read ports, so both halves of a parent are read in the same cycle. The
  channel region is filled once per frame and is never overwritten, so a new
  attempt restarts at the root without reloading.
* **pe_array**: P lanes, each computing f or g. g saturates to ±(2^(QI-1)-1).
* **node decoders**: purely combinational. All three see the same LLR word,
  and `node_type` selects which result is used. The Rate-1 and SPC decoders
  share a three-minimum finder (`min3_finder`, a linear insertion scan that
  breaks ties towards the lower lane).
* **psum_mem**: one N-bit register. Each node's partial sums sit at the
  positions of its leaves. When two children merge, the parent's second half
  is already the right child's β, so only the first half changes, by xor with
  the second half. This merge is one cycle at any size. After the root merge
  the register holds the codeword `x_hat`.
* **Leaf values**: for a special node, the decoded leaves are `u = β·G^{⊗s}`
  (the polar transform is its own inverse). They are formed by s butterfly
  levels on the node's word and written into `u_hat`, which the CRC reads.
* **crc_check**: CRC-16/0x1021 over the information leaves in leaf order,
  skipping frozen ones, P leaves per cycle.
* **Controller** (in `ftscf_decoder`): states LOAD → DESC / G / UP → CRC → next
  attempt or DONE.
  * DESC, at node (s,k): decode the node if it is special; otherwise run f for
    one word per cycle and go to the left child.
  * UP: a right child merges into its parent; a left child starts the g step
    of its sibling.

### Latency

With a parent at stage s, one attempt costs:

* one cycle per f word, `max(1, 2^(s-1)/P)` per step;
* one cycle per g word, `max(1, 2^(s-1)/P)` per step;
* one cycle per special node;
* one cycle per step back up the tree;
* `N/P + 2` cycles for the CRC.

For the PC(1024,512) test code (frozen set from the polarisation-weight
order), a frame decoded on the first attempt takes 490 cycles on average. The
paper reports an average coded throughput of 1595 Mb/s at 480 MHz for its own
architecture. That is about 308 cycles per frame, so this schedule is slower.
The paper does not describe its schedule; see §6.

## 4. Interface

| port | dir | width | meaning |
|------|-----|-------|---------|
| `clk`, `rst_n` | in | 1 | clock; asynchronous active-low reset |
| `start` | in | 1 | pulse in idle: latch `info_mask`, `snr_db`, begin a frame |
| `info_mask` | in | N | 1 = information (non-frozen) leaf |
| `snr_db` | in | 8 | signed Eb/N0 in dB × 2 (0.5 dB steps) |
| `in_valid` / `in_ready` | in / out | 1 | channel LLR word handshake, N/P words per frame |
| `in_llr` | in | P × QC | lane i of word w = channel LLR of code bit w·P+i |
| `busy`, `done` | out | 1 | frame in progress; one-cycle pulse at the end |
| `crc_ok` | out | 1 | final CRC passed |
| `attempts` | out | 4 | flip attempts used (0 … T_max) |
| `u_hat`, `x_hat` | out | N | decoded leaves (message bits at information positions); codeword |

Outputs hold until the next `start`. The message is expected to end with its
16 CRC bits as the last 16 information leaves, most significant first, with a
zero initial CRC register. A code PC(N,K) here has K information leaves in
total, CRC included; PC(64,16) thus carries an empty message.

## 5. Number formats

Channel LLRs are QC = 6-bit two's complement, and internal LLRs QI = 7 bits.
Both have one fractional bit, so the value 2 means an LLR of 1.0. The most
negative channel code is mapped to its symmetric neighbour on load. The
threshold comes out in the same units: `Omega = 2·snr_db + 12` (for example
22 at 2.5 dB), clamped at 0 and 1023. The paper keeps word lengths and
parallelism equal to an earlier Fast-SCF decoder without stating them. The
values here are this design's choice.

## 6. What follows the paper and what does not

Taken from the paper:
* the f, g and partial-sum rules;
* the four special-node patterns;
* the Rate-1, Rep and SPC flip criteria, with `<= Omega` as in its equations
  (the prose says "smaller than" in two places);
* `Omega* = 2(x+3)`;
* candidates kept in order of appearance, without a sorter;
* T_max = 10, CRC-16 0x1021, and N = 1024 as the default.

This design's own choices:
* the architecture as a whole: memory organisation, the in-place partial
  sums, the single-cycle node decoders, the schedule and the interface;
* word lengths and P;
* the P-leaf limit on special nodes;
* the CRC framing;
* reading T_max as "T_max extra attempts after the first".

Also the design's own: the frozen set is an input. The paper uses the 5G
reliability sequence, which it does not list.

Left out:
* fast decoders for the (0011)/(0101) nodes, which the paper names but does
  not define;
* the channel estimator, which supplies `snr_db` from outside.

Falls short of the paper:
* throughput: about 490 cycles per first-attempt PC(1024,512) frame against
  roughly 308 implied by the paper's figures (section 3).

Not verified:
* error-rate curves (the testbenches check exactness against a model, not FER);
* clock frequency and area (no synthesis to a cell library).

## 7. Simulation

Every testbench is self-checking and prints
`TB_RESULT checks=<n> failures=<m>`. Example with plain Verilator (run from
the directory that holds `rtl/` and `tb/`):

    verilator --binary --timing --assert rtl/ftscf_pkg.sv tb/ftscf_ref_pkg.sv \
        tb/tb_ftscf_full.sv -y rtl --top-module tb_ftscf_full -o sim
    ./obj_dir/sim

| testbench | what it checks |
|-----------|----------------|
| `tb_ftscf_full` | 60 noisy PC(1024,512) frames, Eb/N0 1.0 – 2.25 dB, decoder at its default parameters |
| `tb_ftscf_decoder` | 120 PC(256,128) frames (P = 16), Eb/N0 1.0 – 3.5 dB |
| `tb_ftscf_codes` | 24 frames each of PC(64,16), PC(256,208), PC(256,128), PC(512,256), PC(512,128) and PC(1024,192), each on an instance of its own length with P = 64 (helper `ftscf_code_runner`) |
| `tb_omega_approx`, `tb_pe_array`, `tb_llr_mem`, `tb_psum_mem`, `tb_node_type`, `tb_rate1_node`, `tb_rep_node`, `tb_spc_node`, `tb_flip_list`, `tb_crc_check` | each block alone, against formulas or small models |

The three decoder testbenches compare the following with a bit-accurate model
(`tb/ftscf_ref_pkg.sv`):

* every frame's `u_hat`, `x_hat`, `crc_ok` and `attempts`;
* the latency in cycles.

The model uses per-stage arrays, sorting and a full polar transform rather
than the RTL's structures. Because it matches the decoder frame by frame,
cycle for cycle, its event counts stand for the decoder's.

The testbenches then require that each mechanism occurs at least once:

* every node kind, and every flip kind (Rate-1, Rep, SPC η1, SPC η2);
* a frame decoded on the first attempt, a frame recovered by flipping, and a
  frame that fails after T_max attempts;
* a full candidate list, input stalls, and special patterns larger than P.

Frames are generated inside the testbench: polarisation-weight frozen set,
random message plus CRC, polar encoding, BPSK over AWGN with Box–Muller noise.

To change the code, drive another `info_mask`. To change the length or
parallelism, set `N`, `P` (powers of two, P ≤ N) and `TMAX` on `ftscf_decoder`.
`tb_ftscf_decoder` shows a reduced instance.
