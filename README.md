# An output-stationary accelerator for BFV homomorphic convolutions

Running a neural network on encrypted activations turns every convolution and
fully connected layer into a large number of homomorphic dot products. In the
BFV scheme a ciphertext is a pair of polynomials in Z_q[x]/(x^n + 1). An
activation vector is packed into the n "slots" of one ciphertext, so a dot
product becomes a sum of *partials*. Each partial multiplies an input
ciphertext by a plaintext weight polynomial (HEMult). It then rotates the slots
of the product so that they line up with the output's slots (HERotate). The
rotation costs far more than the multiplication: it needs an inverse NTT, a
digit decomposition, several forward NTTs and key-switching products.

The design rests on one scheduling decision: **multiply first, rotate
second**. When a ciphertext is rotated and then multiplied, the rotation's
key-switching noise is multiplied by the weight. When it is multiplied and then
rotated, that noise is only added once. The second order keeps noise low
enough for smaller HE parameters, and smaller parameters mean cheaper
arithmetic. The hardware is built around this order:

* Every **lane** computes one complete partial: two multipliers, then the full
  rotation pipeline.
* A **processing engine (PE)** owns one output ciphertext. It feeds its lanes
  in lockstep and sums their aligned partials in a reduction tree. It then
  stores or accumulates the sum in an output ciphertext memory.
* The **top** holds several PEs behind a global command/response buffer. Each
  PE works on a different output ciphertext. The host feeds the top over a
  streaming link.

The defaults are 8 PEs × 512 lanes, n = 4096 and 60-bit words.

```
 host link ─► [in FIFO] ─► dispatcher ─┬─► PE 0 ─┐
                                       ├─► PE 1  │   (pe_mask broadcast)
 host link ◄─ [out FIFO] ◄─ read port ─┴─► ...  ─┘

 PE:  input CT SRAM ─┐                      ┌─ key SRAM
      weight SRAM  ──┼─► lane 0 … lane L-1 ─┤─ twiddle SRAM (shared)
                     │        │             │
                     │   partial reduction tree ─► output CT SRAM (= or +=)

 lane: c0·w ─► swap ───────────────────────────────────────────┐
       c1·w ─► swap ─► INTT ─► decompose ─► NTT ×L_CT ─► ·ksk0, ·ksk1 ─► compose ─► (c0', c1')
```

## What a lane computes

All polynomials travel in the **evaluation domain**. In that domain,
multiplication is slot by slot. The slot order is the one a Cooley–Tukey NTT
produces from coefficient order without a final reordering: slot j holds
a(ψ^(2·bitrev(j)+1)), where ψ is a primitive 2n-th root of unity mod q.
Everything stored in the machine uses this order: inputs, weights, keys and
outputs.

For input ciphertext (c0, c1), weight w and Galois element g, the lane computes:

1. **HEMult.** p0 = c0·w and p1 = c1·w, slot by slot (`simd_mult`, Barrett
   reduction).
2. **Swap.** Rotation is the automorphism a(x) → a(x^g), with g odd. For
   example, g = 3^r mod 2n rotates the slots by r. In the evaluation domain
   this only permutes slots: output slot j takes input slot
   bitrev(((2·bitrev(j)+1)·g mod 2n − 1)/2). `swap` buffers one polynomial and
   reads it out through that index map. No modular arithmetic is needed.
3. **INTT of the swapped p1.** This brings it back to coefficients
   (`ntt_unit`, inverse mode, Gentleman–Sande, scaled by n⁻¹ on the way out).
4. **Decompose.** Each coefficient is split into L_CT digits of `dbits` bits,
   base A = 2^dbits. The last digit keeps all remaining high bits, so the
   digits always recombine exactly.
5. **NTT of every digit.** L_CT forward NTTs run side by side.
6. **Key switching.** Each transformed digit D_j is multiplied by both
   components of the rotation key, ksk0_j and ksk1_j (2·L_CT multipliers).
7. **Compose.**

   ```
   c0' = swap(p0) + Σ_j D_j·ksk0_j
   c1' =            Σ_j D_j·ksk1_j
   ```

The keys are ordinary BFV key-switching keys for the Galois element g, with
ksk_j encrypting A^j times the rotated secret. Keys, like everything else, are
stored in evaluation order. The design never generates keys: the host writes
them.

### Streaming and timing

Every kernel is a valid/ready stage that moves one coefficient per cycle.
Stages that need a whole polynomial buffer one: the swap units and the NTT
units. Each NTT unit has an N-word memory and does one Harvey butterfly per
cycle. Its twiddle factor comes from the PE's twiddle SRAM in the same cycle.

For one partial with no back-pressure, the lane takes
**4N + N·log2 N + 3 cycles** from first input to last output:

* N cycles to fill the swap buffers.
* N cycles to move p1 into the INTT.
* (N/2)·log2 N cycles for the INTT butterflies.
* N cycles to move the digits into the NTTs.
* (N/2)·log2 N cycles for the NTT butterflies.
* N cycles to stream out through the key products and compose.

The `swap(p0)` branch waits in its swap buffer until compose needs it. The
testbench checks this latency exactly.

The digit NTTs receive their inputs together and stay in step, which an
assertion checks. Lane 0's NTT index therefore addresses the key memory for
all digits. All lanes of a PE also see identical stream timing, so one
twiddle read serves every lane. An assertion in the PE checks that all lanes
present the same twiddle addresses.

## Passes, accumulation and time multiplexing

A PE runs a **pass**, which works as follows:

* The PE streams slot i = 0…N−1 of every lane's selected input ciphertext
  and of the lane's weight into the lanes.
* The lanes return their aligned partials in slot order.
* `partial_reduction` sums the lanes that are marked active in that pass.
  It uses a binary tree of modular adders, padded to a power of two.
* The sum goes into the output ciphertext memory. The first pass
  (`START` with sel = 1) overwrites it. Later passes add into it.

A dot product with more partials than lanes is therefore split over several
passes on the same PE. A layer with more output ciphertexts than PEs is split
over rounds by the host. For example, one ResNet50 layer has
3×3 filters, 64×64 activations and 64 in/64 out channels. That layer needs
576 partials per output ciphertext, so it takes two passes of 512 lanes. Its
64 outputs take eight rounds of 8 PEs.

Each lane has a small configuration word (`lane_cfg_t`) holding:

* an active bit;
* its Galois element;
* the key set to use;
* the input ciphertext to read.

With these, any mapping of partials onto lanes can be expressed. One input
ciphertext can be shared by many lanes, and unused lanes are masked out of
the sum. A pass takes about 4N + N·log2 N + 6 cycles from the START command.
At N = 4096 that is 65,542 cycles, or 164 µs at 400 MHz.

Plaintext (weight) decomposition with base W_dcmp is not a separate unit.
Splitting w = Σ W^i·w_i turns one partial into several, with inputs W^i·c and
weights w_i. The host prepares these, and the PE runs them as extra lanes or
passes.

## Host command protocol

The host pushes `host_cmd_t` words into the input FIFO:
`{op, pe_mask[15:0], idx_a, idx_b, sel, sel2, addr, data[63:0]}`. It pops
64-bit words from the output FIFO. The dispatcher handles one command at a
time and sends it to every PE whose bit is set in `pe_mask`. Activations are
written to all PEs with one command. Weights, keys, lane settings and START
usually go to one PE.

| op | meaning | fields |
|----|---------|--------|
| `CMD_MOD_CFG` (1) | set a modulus constant | addr = field (q, μ, k, n⁻¹, n⁻¹′, dbits), data = value |
| `CMD_TWIDDLE` (2) | write a twiddle word | sel = inverse table, sel2 = Shoup companion, addr = index |
| `CMD_INPUT_CT` (3) | write an input-ciphertext coefficient | idx_a = ciphertext, sel = polynomial, addr = slot |
| `CMD_WEIGHT` (4) | write a weight coefficient | idx_a = lane, addr = slot |
| `CMD_KEY` (5) | write a key coefficient | idx_a = key set, idx_b = digit, sel = component, addr = slot |
| `CMD_LANE_CFG` (6) | configure a lane | idx_a = lane, data = `lane_cfg_t` |
| `CMD_START` (7) | run a pass | sel = 1 for the first pass of an output |
| `CMD_READ_OUT` (8) | read one output word | sel = polynomial, addr = slot; the lowest PE in the mask answers |

Dispatch rules:

* A command waits while any PE it targets is busy, and everything behind it
  waits too. The host may therefore queue the next pass's programming while a
  pass runs.
* A read also waits while a previous read is in flight or the output FIFO is
  full.
* `pe_busy` shows which PEs are running.

The host computes the constants it writes:

| constant | value |
|----------|-------|
| k | bit length of q |
| μ | ⌊2^(2k)/q⌋ |
| n⁻¹ | the inverse of n mod q, with its Shoup companion ⌊n⁻¹·2^64/q⌋ |
| forward twiddle k | ψ^bitrev(k), with companion ⌊w·2^64/q⌋ |
| inverse twiddle k | ψ^(−bitrev(k)), with companion ⌊w·2^64/q⌋ |

## Arithmetic

The modulus is a run-time value, because HE parameters are retuned per layer.
It must satisfy 2 ≤ q < 2^59, so that the sum of two residues fits in a word.
The arithmetic units are:

* **General products** (`barrett_mulmod`): Barrett reduction with the
  run-time k and μ. It computes q̂ = ((x ≫ (k−1))·μ) ≫ (k+1), then
  r = x − q̂·q, then at most two corrections. It is used by the HEMult and
  key-switching multipliers.
* **Products by a known constant** (`harvey_butterfly`, n⁻¹ scaling): Shoup's
  method with a precomputed w′ = ⌊w·2^64/q⌋. It takes three integer products
  and one correction.
  * Forward butterfly (Cooley–Tukey): (x + w·y, x − w·y).
  * Inverse butterfly (Gentleman–Sande): (x + y, w·(x − y)).
* **Additions** are followed by one conditional subtraction.

All of these are combinational. Pipelining them to reach 400 MHz is left to
the implementation.

## Parameters

| parameter | default | where from |
|-----------|---------|------------|
| `NUM_PE` | 8 | the ResNet50 design point of the paper's design-space study |
| `LANES` | 512 | same design point |
| `N` | 4096 | the paper's worked ResNet50 layer example |
| `COEF_W` | 60 | the 60-bit SRAM word width the paper gives |
| `L_CT` | 3 | own choice: 3 digits of 20 bits cover a 60-bit q |
| `IN_CTS` | 256 | own choice: the largest input-ciphertext count of a ResNet50 layer at n = 4096 |
| `KEYS` | 16 | own choice: at least the 9 rotations of a 3×3 filter |
| `FIFO_DEPTH` | 128 | own choice |

`dbits` (log2 of A_dcmp) is a run-time setting. Only N = 4096 polynomials run
on the default build, because the NTT length is fixed by the `N` parameter.
The paper picks n per layer, and a build for another n needs another `N`.

Memory per PE at the defaults:

* input ciphertexts: 2·256·4096 words;
* weights: 512·4096 words;
* keys: 16·2·3·4096 words;
* two twiddle tables;
* the output ciphertext.

Each lane also holds 2 + 1 + L_CT polynomial buffers, for the swaps and the
NTTs. All memories are written as plain arrays. The design does not tile them
into SRAM macros.

## Verification

Every block has a self-checking testbench in `tb/`. The testbenches compare
against reference arithmetic in `tb/tb_ref_pkg.sv`, which uses plain 128-bit
`*` and `%` and shares no arithmetic with the datapath. That package also contains a
direct O(n²) evaluation and interpolation of negacyclic polynomials and a
slot-by-slot reference of a whole partial. The test modulus is the 60-bit
prime 0xffffffffffc0001, which is 1 mod 2^18.

| testbench | what it checks |
|-----------|----------------|
| `tb_barrett_mulmod`, `tb_harvey_butterfly`, `tb_simd_mult` | random and edge operands against the reference products; back-pressure on the stream stage |
| `tb_ntt_unit` (N = 64) | forward result equal to direct evaluation in bit-reversed slot order; inverse restores the input; cycle count 2N + (N/2)·log2 N |
| `tb_swap` (N = 32) | slot permutation for several Galois elements against the exponent map computed in the testbench |
| `tb_decompose`, `tb_compose` | digit split and recombination; sums of the key products with stalls |
| `tb_partial_reduction` (6 lanes) | masked modular sums, padding of the tree |
| `tb_io_fifo` (depth 8) | order, full and empty, random push and pop |
| `tb_he_lane` (N = 16) | two partials against the full reference rotation; exact latency |
| `tb_he_pe` (N = 16, 4 lanes) | two passes (overwrite, then accumulate) with mixed Galois elements, keys, shared inputs and a masked lane |
| `tb_cheetah_top` (2 PEs, 4 lanes, N = 16) | a whole layer slice through the command FIFO |
| `tb_resnet_pe` (N = 4096, 3 lanes) | one PE at the ring size of the ResNet50 example layer; the rotations of a 3×3 filter on a 64-wide image (slot shifts 1, 63, 64, 65 and −1, Galois elements 3^r mod 2n); two passes; all 2·4096 output words and both pass latencies |

`tb_cheetah_top` writes broadcast activations and per-PE weights and keys. It
then runs passes on both PEs at once, including a second accumulating pass,
and reads every output word back. It counts each dispatcher mechanism and
fails if one never happens:

* broadcast;
* stall on a busy PE;
* both PEs busy;
* accumulation;
* a masked lane;
* output back-pressure;
* a read waiting for its PE.

Each testbench ends with a line `TB_RESULT checks=<n> failures=<n>`, and each
has a watchdog.

The largest configurations simulated are a single PE at the default
N = 4096 with 3 lanes (`tb_resnet_pe`, about a minute), and the top with 2 PEs
of 4 lanes at N = 16. A simulation of the whole top at its default size was
not run. Its memories alone take
several hundred megabytes, and one pass takes about 65k cycles with 4096 lane
instances. The parameterised code is the same at every size. Lint of the
default-size top needs about 2.6 MB of memory per lane instance, about 11 GB
for 8 × 512 lanes.

## Departures from the paper and limits

* The paper treats the NTT's parallelism as a design-space parameter. Here
  each NTT unit does one butterfly per cycle, and each kernel handles one
  coefficient per cycle. The throughput figures above are for this choice,
  not for the paper's tuned design points.
* Where rotation keys live is not described. Here each PE has a key SRAM
  indexed by `key_sel`.
* The swap stage is drawn without storage. Here it buffers one polynomial,
  which a streaming permutation needs.
* The PCIe-like host link is outside this RTL. The top exposes plain
  valid/ready command and response ports, and its command set is this
  design's own.
* The paper sizes the input ciphertext memory to hold all of a layer's inputs.
  256 ciphertexts do not hold every layer of every network. For example, the
  first layers of VGG16 need about 832 ciphertexts at n = 4096.
* Only one ciphertext modulus is supported (no RNS limbs), with q < 2^59.
  Modulus switching and all encryption, decryption and key generation are
  done by the host.

## Simulating

Every testbench needs the package files in front of it. For example:

```
verilator --binary --timing --assert -Irtl -Itb \
    rtl/cheetah_pkg.sv tb/tb_ref_pkg.sv tb/tb_he_lane.sv \
    --top-module tb_he_lane -Mdir obj_he_lane
./obj_he_lane/Vtb_he_lane
```

Verilator finds the other modules through `-Irtl`. The testbenches override
sizes through their own localparams: `N`, `LANES` and `NUM_PE` at the top of
each file. To try a larger configuration, raise these; `tb_ref_pkg` computes
the twiddle tables for any power-of-two N up to 2^17 (keys and data are random). The reference
polynomial evaluation is O(N²) per polynomial, so simulation time grows
quickly with N.
