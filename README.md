# Taiyi: RTL for a CKKS key-switching accelerator

CKKS, the homomorphic encryption scheme for approximate arithmetic, spends
most of its time in *key switching*. The KLSS variant of key switching
changes the cost. It does far fewer modular multiplications than the older
methods, but most of the remaining work moves into one inner product (IP)
between a decomposed ciphertext and the evaluation keys. Taiyi is built
around that shift. Each compute cluster has a wide output-stationary
inner-product array (HP-IP). It also has a multi-step NTT unit whose
twiddle factors stay fixed for a whole limb. A configurable stream network
joins these units so that the key-switch steps run back to back without
trips to memory:

    gadget decomposition    C-Buffer -> BConvU (Q -> T) -> NTTU -> HP-IP
    BSGS rotations          C-Buffer -> BConvU -> NTTU -> AUTOU -> HP-IP
    Recover-Limbs, ModDown  HP-IP -> NTTU (inverse) -> BConvU (T -> Q)

This repository holds synthesizable SystemVerilog for that datapath at the
main configuration:

- ring degree N = 2^16;
- 36-bit residues ("limbs");
- 4 clusters of 256 lanes each;
- 16-point NTT lanes;
- HP-IP of 4 input limbs x 6 keys.

It also holds self-checking testbenches for every block and for the whole
chip. The units are fed by an instruction scheduler that decides, cycle by
cycle, which unit takes which stream. That scheduler, the key generator
(PRNG), the double-prime scaling unit (DSU) and the HBM interface are not
included. Their connections are top-level ports.

## Numbers and layout

| quantity | value | where it comes from |
|---|---|---|
| polynomial length N | 65536 | CKKS instance of the design |
| word width | 36 bit | residues of 36-bit primes |
| lanes per cluster | 256 (1024 in total) | one batch = 256 words = 1152 bytes |
| one limb | 256 batches = 288 KiB | |
| C-Buffer per cluster | 23040 rows = 90 limbs | total on-chip memory minus E-Key Buffers, split over 4 clusters (own derivation) |
| E-Key Buffer per cluster | 24 banks x 256 rows = 6.75 MiB | one limb per (input limb, key) pair |
| HP-IP | 256 vector PEs x 4 rows x 6 MACs, 128-bit accumulators | |

`taiyi_pkg` holds the shared pieces:

- the word types;
- the modular helpers `mod_add`, `mod_sub` and `mod_mul`;
- the operation and stream-source enums;
- the per-cycle command struct `ksu_cmd_t`.

Modular multiplication is written as `(a*b) % q` on the 72-bit product. The
RTL fixes no particular reduction circuit (Barrett, Montgomery or a special
prime form). A synthesis flow must choose one.

A limb is stored as 256 rows of 256 lanes. The NTT unit reads it in
*strided* order: row n2 carries coefficients x[n1*256 + n2] for
n1 = 0..255. It writes the result so that output row k1 carries
X[k1 + 256*k2] for k2 = 0..255. The inverse transform takes exactly that
output order, so a limb can go NTT -> HP-IP -> INTT with no reordering.

## The multi-step NTT unit (`nttu`)

This is the most intricate block. The negacyclic transform

    X[k] = sum_n x[n] * psi^(n(2k+1))      (psi a primitive 2N-th root)

is computed as a four-step transform, N = P x P with P = 256. Each
P-point step is split again, into two R-point steps with R = 16, and a
fixed wiring. The pipeline is:

1. **pre-twist** `of_twist`: x[n] * psi^n.
2. **first P-point step** `ntt_vec`:
   - 16 lanes `ntt_lane` of 16 points each, with 4 radix-2 butterfly
     layers per lane;
   - an intra-transpose `intra_transpose`, which is wiring plus a
     Hadamard product by rho^(b*k);
   - a second set of 16 lanes.
3. **inter-step twist** `of_twist`: w^(n2*k1), with w = psi^2.
4. **transpose** `transpose_buffer`: a ping-pong buffer of 256 x 256 words.
   One half fills row by row while the other half is read out column by
   column.
5. **second P-point step**: same structure as the first.
6. **post-twist** `of_twist`: 1 for the forward transform, N^-1 * psi^-k
   for the inverse.

Every butterfly in a lane uses one twiddle for the whole limb. Lane
butterfly j of layer s uses rho^(R * j * R/2^s), where rho = w^P has order
P. This is the fixed-twiddle property the design relies on. No twiddle
memory is swept during a limb.

The twist factors change along the vector stream. `of_twist` makes them on
the fly: the factor for vector r is base ⊙ step^r. It is kept as one running
product per lane and restarts every P vectors. The only tables are a base
vector and a step vector.

The unit is configured per limb through `cfg_sel`. The formulas are for the
forward transform. The inverse uses psi^-1 in place of psi.

| sel | table | contents (element e, or index j / b*R+k) |
|---|---|---|
| 0 | lane twiddles (R/2) | rho^(R*j) |
| 1 | intra twist (P) | rho^(b*k) at b*R+k |
| 2 / 3 | pre-twist base / step | psi^(e*P) / psi (inverse: 1 / 1) |
| 4 | inter-step twist step | w^e (the base is 1) |
| 5 / 6 | post-twist base / step | 1 / 1 (inverse: N^-1 psi^(-eP) / psi^-1) |

**Timing.**

- Latency from the first input row to the first output row is
  P + 2*(2*log2 R + 1) + 4 cycles: 278 at R = 16.
- The unit accepts one row per cycle. A new limb can start every P cycles.
- The testbench checks both numbers at R = 4.

## Inner product: HP-IP and the E-Key Buffer

`hpip` is a grid of `hpip_pe`:

- 4 rows, one per T-limb of the decomposed digit;
- 256 columns, one per lane;
- 6 multiply-accumulate cells per PE, one per key.

Each cell holds a 128-bit accumulator, so a whole sum of digits adds up
without reduction. The sum is reduced once, when it is drained.

**Operation.**

- `start` clears the accumulators on the first digit.
- Each further digit adds `ct * key`.
- `drain` reduces every accumulator modulo the prime of its row.
- The 24 results stay in place until the next drain.

**Key reads.**

- For every input batch, `ekey_buffer` reads all 24 banks at one address.
- Bank h*6+i feeds row h, key i.
- The keys arrive one cycle after the read.
- The ciphertext batch is delayed by one cycle to match.
- Results are valid two cycles after `drain`.

In the cluster, `hp_load` first stages four batches, one per row. These can
come straight from the NTTU or from the AUTOU, which are the two fused
paths. `hp_fire` then sends them into the array. The PE row primes are
latched at `hp_start`, so the drain may come much later.

## Basis conversion (`bconvu`)

Fast base conversion from primes {q_i} to primes {p_j} runs in two steps.
First, y_i = x_i * (Q/q_i)^-1 mod q_i, one input limb per batch. Then,
out_j = sum_i y_i * (Q/q_i mod p_j) mod p_j.

Input limbs stream in with `in_first`, `in_idx` and `in_last`. Up to
MAXOUT = 8 output accumulators per lane build all outputs at once. The
output count is sampled together with `in_last`. The results leave one
limb per cycle, starting two cycles after the last input.

The constant tables cover both directions:

- Q -> T for the decomposition;
- T -> Q, the conversion that the design fuses before ModDown.

They are loaded per conversion through the configuration port. MAXOUT and
MAXIN = 8 are this design's choice. They cover alpha' = 4 and the alpha = 7
that the main parameter set implies.

## Other units

- **EWE** (`ewe`): modular ADD, SUB, MUL and MAC (a*b + c) over 256 lanes.
  It takes one cycle.
- **AUTOU** (`autou`): automorphism X -> X^g in the evaluation domain,
  out[k] = in[((2k+1)g mod 2N - 1)/2].
  - It stores one limb. Rows can be written in strided (NTT output) order
    or in natural order.
  - Each row read fetches 256 arbitrary addresses.
  - It gives the same permutation as the eight-stage MUX network of the
    original design. It does not reproduce that network, whose structure is
    not described.
- **C-Buffer** (`coeff_buffer`): the per-cluster scratchpad. It has one
  write port and one read port, with a read latency of one cycle.
- **NoC** (`noc`): a one-stage 4 x 4 crossbar of row transfers between
  clusters. Per destination, the lowest-index source wins, and `src_ready`
  tells a sender it was accepted. Topology and arbitration are this design's
  choice. The original only names the NoC.

## The cluster and the chip

**`ksu`** (one cluster) instantiates all units. Each unit's input is chosen
by a `src_e` field of the command:

- C-Buffer read data;
- EWE, BConvU, NTTU or AUTOU output;
- an HP-IP result.

A unit takes a batch when its enable bit is set and the chosen source is
valid that cycle. There is no back-pressure. The scheduler must know the
latencies listed above, which the testbenches also use.

The command fields and their roles are documented at the head of
`taiyi_pkg.sv` and `ksu.sv`. Write-back into the C-Buffer is itself a
source selection. An external write (HBM or NoC) takes precedence, and an
assertion flags a collision.

**Moduli.** They come from a 16-entry prime table addressed by the command.
The NTTU and BConvU constant tables hold one prime set at a time.

**`taiyi_top`** holds four clusters and the NoC. A cluster can forward the
row it is reading to another cluster's C-Buffer (`noc_send`). The top also
has ports for:

- C-Buffer fill from HBM (`hbm_*`);
- E-Key Buffer fill (`key_*`, the PRNG/HBM side);
- table configuration with a cluster mask (`cfg_*`).

## Where this RTL departs from the original design

- **Quadrant-swap units.** The intra-transpose is fixed wiring. The
  original describes it with quadrant-swap units from 16x16 down to 2x2,
  which give the same permutation.
- **AUTOU structure.** See above.
- **Constant tables.** The NTT constant tables are per limb. A limb with a
  different prime can enter only after a table reload. The original's
  storage of per-limb constants is not described.
- **Prime table size.** The prime table holds 16 entries. The full
  parameter set uses 39 Q-primes and 4 T-primes, so the scheduler reloads it
  as levels change.
- **Not built.** The DSU, the PRNG key generator, the HBM interface and the
  software scheduler/compiler are not built.
- **Assumed sizes.** The C-Buffer depth is derived from the total on-chip
  capacity and is not given directly. BConvU's MAC count is also assumed.
- **No handshake.** There is no ready/valid handshake inside a cluster. A
  stream is a valid bit and a batch, and the command issuer owns the timing.

**Capacity check.** At the main parameters, a ciphertext at the top level is
2 x 39 limbs. That is 78 limbs, which fits in one cluster's C-Buffer of
90 limbs. The average IP working set of about 103 MB fits within the
4 x 26.5 MB of C-Buffer. The evaluation keys (about 189 MB) do not fit on
chip. They stream through the E-Key Buffers 24 limbs at a time.

## Simulation

All files are plain SystemVerilog 2017 and run with Verilator 5:

    verilator --binary --timing --assert rtl/taiyi_pkg.sv rtl/*.sv \
        tb/tb_nttu.sv --top-module tb_nttu
    ./obj_dir/Vtb_nttu

Every testbench ends with a line `TB_RESULT checks=<n> failures=<m>`. It
has a watchdog, and it draws its stimulus from `$urandom`. Reference values
(NTT by direct summation, base conversion by CRT, and so on) are computed
inside the testbench.

| testbench | block | size |
|---|---|---|
| `tb_ntt_lane`, `tb_intra_transpose`, `tb_of_twist`, `tb_transpose_buffer` | NTT pieces | R = 16 |
| `tb_nttu` | NTTU: forward on two limbs, latency, INTT round trip | R = 4 (N = 256) |
| `tb_hpip_pe`, `tb_ekey_buffer`, `tb_hpip` | inner product | 8 lanes, 16 key rows |
| `tb_bconvu` | 3 -> 4 and 4 -> 7 limb conversions | 4 lanes |
| `tb_ewe`, `tb_coeff_buffer`, `tb_autou`, `tb_noc` | other units | |
| `tb_ksu` | one cluster through the whole key-switch sequence | 16 lanes, N = 256 |
| `tb_taiyi_top` | the chip, including NoC transfers | 4 clusters, 16 lanes, N = 256 |
| `tb_taiyi_full` | the chip at its default size | N = 2^16 |

The two chip-level tests play a key-switch-shaped command schedule on
cluster 0, in this order:

1. off-chip fill;
2. NoC copy;
3. EWE;
4. BConv Q -> T;
5. forward NTT with the direct NTT -> HP-IP load;
6. automorphism into HP-IP;
7. two-digit inner product and drain;
8. INTT round trip;
9. BConv T -> Q.

They check every result row and count each mechanism. A mechanism that
never happened counts as a failure.

At full size, the testbench compares only two of the 256 forward-NTT output
columns against direct summation, because direct summation costs O(N) per
output. All other results are compared in full. With Verilator this test
builds in about 9 CPU-minutes (5 minutes with 4 parallel jobs) and runs in
about 3 minutes. It makes about 730,000 checks.
