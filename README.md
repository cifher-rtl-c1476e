# A chiplet-based CKKS accelerator with a composable NTT unit

Fully homomorphic encryption (CKKS) turns every multiplication of encrypted
data into thousands of multiplications of large integers modulo many small
primes. Accelerators for it have so far been single huge dies, because their
number-theoretic transform (NTT) unit is one fixed, very wide pipeline. This
design splits the accelerator into many small identical **core chiplets**
joined by a 2D mesh **network on package (NoP)**. What makes the core size
adjustable is a **composable NTT unit**: a small 16-lane NTT *submodule* that
can be stacked 1 to 16 times, so that the number of vector lanes per core can
be chosen freely while the total number of lanes in a package stays the same
(1,024).

The RTL here describes the package in its 16-core configuration: a 4 x 4 mesh
of cores with 64 lanes each, two I/O dies (with HBM) on the north and south
edges, CKKS ring degree N = 2^16, up to L = 48 ciphertext primes and K = 12
auxiliary primes, all arithmetic on 32-bit words, 256 MB of scratchpad
register file and 16 MB of auxiliary register file over the package.

## 1. Numbers and representation

A polynomial of degree < N is stored in residue number system (RNS) form: one
**limb** of N 32-bit residues per prime. Everything a core does operates on
limbs or on rows of limbs.

| quantity | value | where |
|---|---|---|
| N (ring degree) | 2^16 | `cifher_pkg::LOG_N`, derived from `P` in every unit (N = P^4) |
| word | 32 bits | `cifher_pkg::WORD` |
| P (lanes of one NTT submodule, = N^(1/4)) | 16 | `P` |
| S (submodules per core) | 4 | `S`; lanes per core = S*P = 64 |
| K (auxiliary primes, BConv chain length) | 12 | `K` |
| LM (largest BConv input limb count) | 48 | `LM` |
| cores | 4 x 4 | `DX`, `DY` of `cifher_top` |
| scratchpad RF | 65,536 rows x 64 lanes (16 MB) per core | `SP_DEPTH` |
| auxiliary RF | 4,096 rows x 64 lanes (1 MB) per core | `AUX_DEPTH` |

All modular products use Montgomery multiplication with R = 2^32
(`mont_mul`): `mont(a, b) = a*b*2^-32 mod q`. Constants that multiply data
(twiddle factors, BConv table entries, the second EFU operand) are kept in
Montgomery form (x*2^32 mod q), so a single Montgomery product gives the plain
result. Every prime is described by four words: q, -q^-1 mod 2^32,
2^64 mod q and a primitive N-th root of unity in Montgomery form
(`cifher_pkg::prime_t`). Primes must be below 2^32 and satisfy q = 1 mod 2N.

### The row layout of a limb

A limb of N coefficients occupies N/(S*P) rows of S*P words (1,024 rows of 64
words at the defaults). All units agree on one layout, which is the one the
NTT unit wants on input and produces on output:

    row t = u*P + c,   lane = s*P + l   holds coefficient   (S*u + s) + P^2*(c + P*l)

with 0 <= c, l < P, 0 <= s < S. (`cifher_pkg::layout_idx`; `layout_row` and
`layout_lane` are its inverse.) Read as a P^2 x P^2 matrix with element
(g, b) = coefficient g + P^2*b: submodule s receives, over P consecutive rows,
one whole matrix row g, its P lanes each covering P entries of that row.
Because the NTT output uses the same layout, the NTT can be followed by any
element-wise operation, automorphism or base conversion without reordering.

## 2. The composable NTT unit (`nttu`)

This is the most involved unit. It computes the cyclic N-point NTT
`X[k] = sum_j x[j] W^(jk)` of one limb, or the unscaled inverse
(`W^-1` instead of `W`; NTT followed by inverse NTT returns N*x, the factor
N^-1 being folded into a later element-wise multiplication).

**Four steps, twice.** The limb is viewed as a P^2 x P^2 matrix
(N = P^2 * P^2). A standard four-step NTT does P^2-point transforms along
one dimension, multiplies by twist factors W^(a*k), and does P^2-point
transforms along the other. Here each of those P^2-point transforms is itself
done with a four-step algorithm over a P x P matrix. That inner four-step
transform is the job of one half of a submodule (`ntt_half`):

1. a fully spatial P-point NTT on P lanes (`ntt_spatial`, log2 P registered
   butterfly stages, one row per cycle),
2. a twist by w^(c*k), w = W^(P^2) a P^2-th root of unity,
3. a P x P transpose (`ntt_transpose`, two register banks used in turn),
4. a second spatial P-point NTT.

Latency of a half: 2*log2(P) + 3 cycles (11 at P = 16), throughput one row of
P words per cycle.

**Submodules and the two passes.** A submodule is a row half plus a column
half; S submodules work side by side on S*P lanes. The row pass sends every
matrix row through a row half (submodule s takes rows g = s, S+s, ...); its
results are twisted by W^(a*k) and written into a one-limb buffer. The column
pass reads the buffer by columns, with stride P^2, and sends every column
through a column half. Output rows come out in the row layout above.

For the iNTT, the butterflies switch from Cooley-Tukey (x = a + wb,
y = a - wb) to Gentleman-Sande form (x = a + b, y = (a - b)w) with inverse
twiddles, and the two spatial NTT steps run their stages in reverse
(`butterfly_unit`).

**Twiddles.** When a new prime is configured (`cfg_valid`) the unit computes
the table W^e, e = 0..N-1, with a single multiplier in N cycles (`busy` is
high). The halves receive W^(P^2 e) for their inner steps, the twist uses
W^(a*k), and the inverse uses W^(N-e). A prime change therefore costs N
cycles; consecutive limbs under the same prime pay nothing.

**Timing.** At the defaults one pass of a limb takes N/(S*P) = 1,024 cycles;
a limb goes through the row pass and then the column pass, so one NTT takes
about 2 x 1,024 cycles plus the pipeline depth. `in_ready` drops while the
buffer is being emptied by the column pass.

**Departure.** In the original design the row-to-column exchange is a
streaming network (buffers, a perfect shuffle between submodules and quadrant
swap units) that lets both halves work at the same time, and that can also
spread one limb's NTT over up to 16 cores. Here the exchange is an addressed
one-limb buffer. The arithmetic and the results are the same, but row and
column passes of the same unit take turns, halving NTT throughput, and an NTT
over several cores is not possible.

## 3. Other functional units

**Base conversion (`bconvu`).** Base conversion computes, for every
coefficient, K new residues `out_j = sum_i T[j][i] * x_i mod p_j` from ell
input limbs (ell <= 48). Each lane has a chain of K = 12 multiply-accumulate
cells, output stationary: cell j owns output j; input words enter cell 0 and
move one cell per cycle, each cell multiplying by its own table entry
T[j][i] (Montgomery form, one K x LM table per core, written with
`CFG_BTBL`). When the last input row (`in_last`) has reached cell j its sum
is complete and is moved into a drain register; outputs leave one per cycle
in the order j = 0..K-1, output j two cycles after the last input row
reached cell j. Consecutive groups must start at least K cycles apart, so
that the drain of one group never collides with the next (an assertion
checks it). The core schedules a group every max(ell, K) cycles.

**Automorphism (`autou`).** A rotation by r slots maps coefficient i to
position i*k mod N, k = 5^r mod N. A limb is written into a one-limb buffer
at permuted addresses and read back in row order; the first output row
appears two cycles after the last input row.

**Element-wise unit (`efu`).** One cycle, per lane: `a+b`, `a-b`,
`mont(a,b)`, `mont(a,b)+c`, `c-mont(a,b)`, `-a`, `a`. Compound operations
save register-file traffic.

**Key generator (`prng`).** Produces rows of uniform residues mod q, used
for the random half of each evaluation key so that only half of the key
must come from memory. Each lane runs a 64-bit xorshift generator seeded by
splitmix64(seed + lane * 0x9E3779B97F4A7C15); the 64-bit state x is reduced
as mont(x_hi, 2^96 mod q) + mont(x_lo, 2^64 mod q) = x mod q in Montgomery
form. This is a statistical generator, not a cryptographic one.

**Register files (`regfile`).** Each lane has its own slice of the
scratchpad RF and the auxiliary RF. Each RF has three read and three write
ports (six of each per lane in total), synchronous read, and on a collision
the higher-numbered write port wins. A row address (`ADDR_W` = 20 bits)
selects the auxiliary RF with its top bit.

## 4. Network on package

**Flits.** Every packet is one flit: a header (destination x, y and a
destination RF row) plus one RF row of payload (64 words). A transfer is a
remote write: the receiving core puts the payload into the named row as soon
as the flit arrives, without involving its sequencer.

**Router (`router`).** Five ports (local, north, east, south, west), four
virtual channels per input port with a 4-flit FIFO each, XY
dimension-order routing (first x, then y; y grows southward), which is free
of deadlock on a mesh. A flit keeps its VC from source to destination.
Allocation is separable, input first, round robin at both levels. Flow
control is credit based: an output may only send on a VC for which it holds
a credit; the receiving router returns one credit each time it removes a
flit from that VC's FIFO. A flit is on the output port two cycles after it
arrives (FIFO write, output register); an assertion checks that no FIFO
overflows.

**PHY (`nop_phy`).** Behavioural model of the die-to-die PHY on each mesh
edge: a fixed LAT-cycle pipeline (LAT = 2) for flits one way and credits the
other way. Credit flow control makes the network independent of this
latency. Serialisation onto the physical lanes is not modelled.

**I/O dies.** The north and south I/O dies, which hold the HBM controllers,
are not part of the RTL. They sit at mesh rows 0 and DY+1 and connect to the
north (south) link of each core in the first (last) row; these links are
ports of `cifher_top` (`io_n_*`, `io_s_*`). Data loaded from HBM is a stream
of flits addressed to a core and RF row; data stored goes to an I/O row
address (x, 0) or (x, DY+1).

## 5. The core (`core`) and its micro-operations

A core holds the NTT unit, BConv unit, automorphism unit, EFU, PRNG, the
two RFs, the router and four PHYs. A sequencer executes one micro-operation
(`cifher_pkg::cmd_t`) at a time, accepted with `cmd_valid`/`cmd_ready`;
`idle` is high when nothing runs. Scheduling of whole HE operations across
cores is left to whoever issues micro-operations.

| op | effect |
|---|---|
| `CFG_PRIME` | write field `sel` (q, -q^-1, 2^64 mod q, root) of prime-table entry `prime` (64 entries) |
| `CFG_BTBL` | BConv table entry [src0][src1] = imm |
| `NTT`, `INTT` | limb at rows src0.. -> rows dst.., modulus `prime` (twiddles regenerated on a prime change) |
| `EFU` | rows r < len: dst[r] = f(src0[r], src1[r], src2[r]), f = `sel` |
| `BCONV` | ell = imm limbs of len rows at src0 + i*len -> K limbs at dst + j*len, moduli prime .. prime+K-1 |
| `AUTO` | limb src0 -> dst, Galois element imm |
| `PRNG` | len rows of residues mod `prime` into dst, seed imm |
| `SEND` | rows src0..src0+len-1 to core/I-O position (dx, dy), rows dst.. there |

Reads use the RF read ports 0..2; unit results use write port 0 and
arriving flits write port 1, so remote writes never stall local work.
SEND injects one flit per cycle while the local router input has credits
(VCs used in turn).

How limbs are spread over cores is a matter of which micro-operations are
issued, not of hardware: distributing a polynomial by limbs or by
coefficients, exchanging limbs around a base conversion, or duplicating the
input limbs of a base conversion to every core of a cluster (a broadcast is
a SEND to each core) all map onto NTT/BCONV/SEND sequences. There is no
hardware multicast.

## 6. The package (`cifher_top`)

`cifher_top` instantiates DX x DY cores (core (x, y) at mesh position
(x, y+1)), connects neighbours through their PHYs, ties off the unused east
and west edges, and exposes one micro-operation port per core and the I/O-die
links. Parameters: `DX`, `DY`, `P`, `S`, `K`, `SP_DEPTH`, `AUX_DEPTH`; the
defaults are the 16-core configuration. The simulation-visible memory at the
defaults is about 272 MB of RF plus the NTT and automorphism buffers.

Reset is asynchronous, active low, everywhere.

## 7. Verification

Each unit has a self-checking testbench in `tb/` that compares against
arithmetic written independently in the testbench (`tb_util_pkg`: modular
arithmetic, Montgomery constants, roots of unity) and prints
`TB_RESULT checks=<n> failures=<m>`:

| testbench | what it checks |
|---|---|
| `tb_mont_mul` | random and edge operands on three primes |
| `tb_butterfly_unit` | both butterfly forms |
| `tb_ntt_transpose` | transpose of back-to-back and gapped blocks, first column registered on the edge after the last row |
| `tb_ntt_half` | P^2-point (i)NTT against a direct DFT, latency 2 log2 P + 3 |
| `tb_nttu` | N = 256 (P = 4, S = 2) NTT and iNTT against a direct DFT, back-to-back limbs, pass time |
| `tb_bconvu` | ell = 5 and 14 into K = 12, order and drain timing |
| `tb_autou` | four Galois elements, back-to-back limbs, latency |
| `tb_efu`, `tb_prng`, `tb_regfile`, `tb_nop_phy` | against reference models |
| `tb_router` | random traffic with back-pressure: XY port, VC, order, credits, no loss, 2-cycle latency |
| `tb_core` | one core (N = 16): NTT, iNTT, AUTO, EFU, BCONV, PRNG, aux RF, remote writes and SEND over a link |
| `tb_cifher_top` | 2 x 2 package, two NTT submodules per core (N = 256): HBM-style loads through both I/O dies, NTT on one core, transfer across the mesh, iNTT on another, AUTO, EFU and PRNG in parallel on a third, stores to both I/O dies; every mechanism is counted |

The package testbench's scenario is in `tb/tb_top_body.svh`; the including
module only sets the sizes, so the same scenario can be run at other sizes.

To run one with Verilator 5 from the directory holding `rtl/` and `tb/`:

    verilator --binary --timing --assert -Wno-fatal -Irtl -Itb \
      rtl/cifher_pkg.sv tb/tb_util_pkg.sv $(ls rtl/*.sv | grep -v cifher_pkg) \
      tb/tb_core.sv --top-module tb_core -o sim
    ./obj_dir/sim

The largest configuration simulated is the 2 x 2 package of `tb_cifher_top`
(P = 4, S = 2, N = 256); single units were simulated up to the same N. At
the default sizes (4 x 4 cores of 64 lanes, N = 2^16) Verilator's C++
output for the package is about 500 large files; in ten minutes the C++
compiler got through about 20 of them, so no simulation at the defaults was
run and the defaults are checked by lint and elaboration only. Going up in size means setting `P`, `S`, `DX`,
`DY` in the including module of `tb_top_body.svh`.

## 8. Where this RTL departs from the original design

* **Row/column exchange of the NTT unit**: an addressed buffer instead of the
  perfect-shuffle and quadrant-swap network; the two passes alternate, and a
  limb cannot be transformed jointly by several cores (section 2).
* **Montgomery reduction**: textbook unsigned Montgomery product with one
  final subtraction, not a word-level signed Montgomery reduction circuit.
* **EFU**: no double-word accumulation or other special-purpose circuits.
* **PRNG**: statistical xorshift generator, not a cryptographic one.
* **Register files**: plain multi-ported arrays, no bank interleaving.
* **Control**: the micro-operation set and the one-at-a-time sequencer are
  this design's own; the original leaves control to a scheduler and does not
  describe it. Data dependencies between cores are the issuer's concern
  (for example, wait until all rows of a SEND have arrived).
* **NoP details**: single-flit packets, FIFO depth 4, credits, allocator and
  PHY latency are this design's choices; only the 5-port, 4-VC, XY-routed
  mesh is given.
* **Not built**: the I/O dies, HBM controllers and HBM stacks (ports only),
  the analog part of the PHYs, the 4-, 8-, 32- and 64-core configurations
  are reachable only through the `DX`, `DY`, `S` parameters and were not
  simulated.
