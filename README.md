# A MatMul accelerator core for oblivious message retrieval

In oblivious message retrieval, a server scans a public board of N messages on
behalf of a receiver without learning which ones concern them. Most of the
server's time goes into one homomorphic operation: multiplying a plaintext
matrix by an encrypted vector (MatMul). The scheme is BFV with ring dimension
N = 2^16 and a ciphertext modulus Q of 1,140 bits. This RTL is a hardware core
for that product. It is built around one rotation engine, a few parallel
plaintext multipliers, and one-limb staging buffers to a high-bandwidth
off-chip memory.

The SystemVerilog follows a published FPGA accelerator design (an HLS design
for an AMD Alveo U55C at 200 MHz). It adds the details that design leaves open:
the arithmetic, the key-switching algorithm, the control and the memory
interface. The parameter defaults are the published configuration:

| | value |
|---|---|
| ring dimension N | 2^16 |
| RNS limbs L | 19 limbs of 60 bits |
| plaintext modulus t | 786,433 |
| parallelism | PC = 16, PI = 2, PB = 64 |
| baby-step / giant-step counts (b~ / g~) | 46 / 23 |

Every block is simulated against an independent reference model. The whole
core is simulated end to end at a reduced size.

## 1. The computation

A BFV ciphertext is a pair of polynomials of degree < N. Each polynomial is
stored in RNS form: L "limbs", where limb i holds the coefficients modulo a
60-bit prime q_i. Limbs are independent for addition and multiplication, so
the hardware always works on one limb at a time.

The three operations the core needs are:

* **CCadd** adds two ciphertexts coefficient by coefficient, mod q_i.
* **PCmul** multiplies each polynomial of a ciphertext by a plaintext
  polynomial (20-bit coefficients below t), coefficient by coefficient, mod q_i.
  The core applies it exactly so, to the same coefficient-form residues that Rot
  takes. It performs no NTT around PCmul, so the software that prepares m_j
  must choose its representation to match (see section 6).
* **Rot** rotates the encrypted vector. It is made of two steps:
  * *ApplyGalois* permutes the coefficients by X → X^g. Coefficient i moves to
    i·g mod N and is negated when i·g mod 2N ≥ N.
  * *KeySwitch* removes the dependence on the permuted secret key, using a
    rotation key. Rot is the expensive operation.

A matrix-vector product with k diagonals normally needs k rotations. The
baby-step giant-step form needs only b~ + g~ rotations and two rotation keys:

```
ct_0 = ct_in
for b = 1 .. b~-1:    ct_b = Rot^1(ct_(b-1))                      # baby steps
for g = g~-1 .. 0:                                                 # giant steps
    ct_sum = sum_b PCmul(m_(g*b~+b), ct_b)
    ct_out = ct_sum                        if g = g~-1
           = CCadd(Rot^b~(ct_out), ct_sum) otherwise
```

The plaintexts m_j are the matrix diagonals, pre-rotated by −g·b~. They are
prepared in software.

The Galois element is 3 for Rot^1 and 3^b~ mod 2N for Rot^b~. Both are inputs
to the core.

## 2. Architecture

```
                  off-chip memory port (tagged reads, writes)
                                   |
                            hbm_xbar (round robin)
     ______________________________|_______________________________________
    |         |          |          |            |            |             |
 ct_b buf  matrix buf  ...  matrix buf PI    ct_sum buf   ct_out buf   key / twiddle
 (PI sub-  |           |                     |   ^          |   ^       streams
  buffers) v           v                     |   |          |   |         |
    |--> PCmul 1 ... PCmul PI                 |   |          |   |         |
    |         \        /                      |   |          |   |         |
    |        CCadd tree (PI-1 CCadds)         |   |          |   |         |
    |               |                         |   |          |   |         |
    |        CCadd (accumulate) <-------------+   |          |   |         |
    |               +-----------------------------+          |   |         |
    |                                                        |   |         |
    +--> mux (ct_b | ct_out) --> Rot ------------------------+---|---------+
                                  |  \--> back to ct_b (baby steps)
                                  v
                           CCadd (Rot + ct_sum) --> mux (ct_sum | sum) --> ct_out buf
```

`matmul_core` is the top. It holds the following blocks:

* One `rot` core, used by both phases.
* PI `pcmul` cores, each with its own `matrix_buffer`.
* A `ccadd_tree` of PI−1 adders.
* Two more `ccadd` cores. One accumulates into ct_sum. The other adds Rot's
  output to ct_sum.
* Three double-buffered `ct_buffer`s: ct_b, ct_sum and ct_out.
* The `hbm_xbar` interconnect, with 5 + PI read clients and 3 write clients.

All data paths are PC coefficients wide. A "word" everywhere is PC residues of
60 bits.

**Data-transfer buffers.** A ciphertext is 2 × 19 × 2^16 × 60 bits, about
18.7 MB, so it never sits in a buffer whole.

* Each buffer holds one limb of both polynomials (2N/PC words) in each of two
  banks.
* The compute side reads and writes the current bank.
* A DMA engine fills or drains the other bank from off-chip memory.
* A swap pulse exchanges the two banks.
* The ct_b buffer is split into PI sub-buffers. Each PCmul core then multiplies
  a different baby-step ciphertext, so PI × PC coefficients are processed per
  cycle.

**Matrix buffers.** Each PCmul core has its own matrix buffer with two slots of
one plaintext each. Two slots are far from the 1,058 plaintexts of the
algorithm, so the idle slot is refilled from off-chip memory (see section 6).

**Controller.** The controller has two phases.

*Phase A (baby steps).* For b = 1 .. b~−1:

1. Stream ct_(b−1) limb by limb from memory through the ct_b buffer into Rot.
2. Collect Rot's output limb by limb in the ct_b buffer.
3. Store it as ct_b.

*Phase B (giant steps).* For each g, limb and group of PI baby steps:

1. Load the PI ct_b limbs and the PI plaintexts.
2. Stream them through the PCmul cores, the tree and the accumulating CCadd into
   ct_sum. The first group of a giant step writes ct_sum without adding.
3. At the end of each limb, one of two things happens:
   * On the first giant step, the ct_out mux copies ct_sum straight into ct_out.
     This is the bypass.
   * Otherwise ct_sum is stored. Later each limb is reloaded and added to the
     matching output limb of Rot^b~(ct_out).

For every giant step but the first, Rot^b~ takes in ct_out *before* the PCmul
loop. Key switching then runs during the loop, because the two do not depend on
each other. Its output is consumed after the loop.

## 3. The Rot core and key switching

`rot` is the largest and least obvious block. It works in three steps.

**Ingest.** The input streams in limb by limb. PC `galois_unit` lanes scatter
each coefficient to its image under X → X^g. The result goes into an on-chip
copy of the whole ciphertext, both polynomials and all L limbs. Rot must hold
the whole ciphertext, because every output limb depends on every input limb of
polynomial 1.

**Key switching.** This is RNS hybrid key switching with one special prime p,
the variant used by SEAL. The target moduli are p first, then q_0 .. q_(L−1).
For each target modulus t_m:

1. For each limb j of the rotated polynomial c1:
   * reduce c1_j to t_m;
   * forward NTT on the NTT unit;
   * multiply by the two key polynomials K[t_m][j][0] and K[t_m][j][1], and add
     into two accumulators.
2. The key words are streamed through a `key_buffer`. This is a prefetching FIFO
   with credit-based flow control: at most DEPTH words are stored or in flight.
   Only a small window of the two keys is ever on chip. The keys are 374 MB each
   in this layout.
3. Both accumulators go through the inverse NTT. What happens next depends on
   the target:
   * For p, the result plus ⌊p/2⌋ is kept.
   * For q_i, the mod-down step gives the switched limb:

     `out = (acc_i − ((acc_p + ⌊p/2⌋) mod q_i − ⌊p/2⌋ mod q_i)) · p⁻¹ mod q_i`

     (a rounded division by p). Polynomial 0 also gets c0_i added.
4. The limbs of step 1 are pipelined:
   * While limb j+1 is written into the NTT unit, the transformed limb j is
     copied out into a one-limb buffer.
   * The key multiply-accumulate of limb j then reads that copy, while the NTT
     transforms limb j+1.
   * With PB = 64 the NTT (8,256 cycles) and the multiply-accumulate (8,192
     cycles, two key words per data word) are almost equal, so the overlap
     nearly halves the time of key switching.

**Emit.** The two output polynomials of limb i stream out as soon as they are
ready.

The NTT unit keeps one twiddle table. The table is reloaded from memory whenever
the (modulus, direction) pair it needs changes. That happens twice per target
modulus.

Per-modulus constants come in on the `mods` array, one `mod_cfg_t` per modulus:

| field | meaning |
|---|---|
| q | the modulus |
| mu | Barrett constant ⌊2^120/q⌋ |
| ninv | N⁻¹ mod q |
| pinv | p⁻¹ mod q |
| phalf | ⌊p/2⌋ mod q |

`mods[L]` describes p.

The testbench checks Rot against a software model built from direct polynomial
arithmetic. That model does not use the NTT.

## 4. NTT unit and arithmetic

`ntt_core` is an iterative radix-2 negacyclic transform over one limb.

* **Forward.** Cooley-Tukey butterflies. Stage s uses twiddle tf[2^s + i], with
  tf[k] = ψ^brv(k), where ψ is a primitive 2N-th root of unity. The output is
  in bit-reversed evaluation order.
* **Inverse.** Gentleman-Sande butterflies with the inverse table, followed by
  a pass that multiplies by N⁻¹.
* PB butterflies are issued per cycle into the multiplier pipeline. The pipeline
  drains between stages.
* A forward transform takes log2(N) · (N/(2·PB) + 4) cycles. The inverse takes
  N/PB + 4 cycles more. The testbench checks both counts.

`modmul` is a 3-stage Barrett multiplier for moduli with 2^59 < q < 2^60. It
estimates the quotient from the top 61 bits of the product and mu, then applies
at most two corrective subtractions. It is used for every modular product:
PCmul, the butterflies, the key multiply-accumulate and the mod-down step.

## 5. Off-chip memory layout

Addresses are in words of PC × 60 bits. Below, NW = N/PC and LW = 2·NW.

| data | word address |
|---|---|
| ciphertext c, limb l, polynomial o, word w of a region | `base + (c·L + l)·LW + o·NW + w` |
| ct_in | ciphertext 0 of the `ctb_base` region, which also receives ct_1 .. ct_(b~−1) |
| ct_sum, ct_out | ciphertext 0 of their own regions |
| plaintext m_j, word w | `mat_base + j·NW + w`; each coefficient sits in the low 20 bits of a lane |
| rotation key (target tt, limb j, word w, polynomial o) | `key_base + ((tt·L + j)·NW + w)·2 + o`, in NTT form; tt = 0 is p and tt = i+1 is q_i |
| twiddle table (tt, direction d) | `tf_base + (tt·2 + d)·NW`; d = 1 is the inverse table |

The memory port is valid/ready for read requests and writes. Each read request
carries a tag. Read data must come back in order, with its tag, and it is always
accepted.

## 6. Where this design departs from the published one

**Transfers are not overlapped with compute.** The double buffers exist and the
controller swaps banks, but it waits for each limb transfer before computing.
Overlapping them is a controller change only. With a single memory port it
would gain little in phase B, where each compute word already needs about 2.5
words of transfer.

**Latency.** These numbers are estimated from the control structure, not
simulated:

* One Rot takes about 6.1 M cycles (30.6 ms at 200 MHz), against a published
  31.35 ms.
* The whole MatMul takes about 626 M cycles (3.1 s), against a published
  2.15 s. The gap comes mainly from the serialised transfers of phase B.

**Key switching uses one special prime.** The published log PQ − log Q = 600
bits implies about ten 60-bit special primes, with keys of 55 MB. This RTL uses
one, as SEAL does, and its keys are 374 MB.

**The matrix buffers are refilled from memory.** The published text keeps all
plaintexts on chip, distributed over the PI matrix buffers. At 1,058 plaintexts
× 1.28 Mb that is about 1.35 Gb, far above the 357 Mb of on-chip RAM. Here each
matrix buffer has two slots, and the idle slot is refilled through the
interconnect.

**The number of diagonals is g~ × b~.** The published parameter table gives
k = 50, which conflicts with k = g~·b~ = 1,058. The RTL follows g~ and b~.

**One NTT unit does both directions.** The published design has separate NTT
and INTT modules.

**The Rot core keeps the whole input ciphertext on chip.** This takes 149 Mb,
62% of the on-chip storage of the design.

**PCmul is a plain coefficient-wise product.** It follows the published
definition of PCmul literally, and it works on the coefficient-form
ciphertexts that Rot consumes. A BFV library would normally multiply in NTT
form. Doing that here would need an NTT/INTT pair around the PCmul stage, which
the published block diagram does not show.

**Other choices are this design's own.** The published design does not specify:

* the interconnect (round robin with read tags);
* the memory layout;
* combinational buffer reads (an FPGA build would register them);
* the Barrett variant and pipeline depths;
* the start/done handshake.

At the default parameters the design needs about 241 Mb of on-chip storage,
against 357 Mb of URAM and BRAM on the target card. It needs about 2.2 GB of
off-chip data.

## 7. Verification and simulation

Each block has a self-checking testbench in `tb/`. Each compares against values
computed independently in `tb/omr_ref_pkg.sv`, which holds software modular
arithmetic, a direct-evaluation NTT, negacyclic products and a complete
reference Rot.

| testbench | what it covers |
|---|---|
| `modmul_tb` | random and edge operands on several 60-bit primes |
| `ccadd_tb`, `pcmul_tb`, `ccadd_tree_tb` | throughput of one beat per cycle, latency, modular edge cases |
| `galois_unit_tb` | index mapping and sign for several Galois elements |
| `ntt_core_tb` | forward and inverse NTT against direct evaluation, round trip, cycle counts (N = 64, PB = 4) |
| `key_buffer_tb`, `hbm_xbar_tb`, `ct_buffer_tb`, `matrix_buffer_tb` | ordering, back-pressure, arbitration, response routing, bank swaps, against a stalling memory model (`tb/hbm_model.sv`) |
| `rot_tb` | two rotations (Galois elements 3 and 17) at N = 16, L = 2, PC = 4, PB = 2; checks every output coefficient, twiddle reloads, key-buffer back-pressure and that the key multiply-accumulate overlaps the NTT |
| `matmul_core_tb` | end to end, described below |

`matmul_core_tb` runs a whole MatMul at N = 256, L = 4, PC = 8, PI = 2, PB = 4,
b~ = 4, g~ = 3 (two combining giant steps) on the stalling memory model. It checks:

* the result ct_out;
* every baby-step ciphertext ct_1 .. ct_3 written to memory.

It also counts the following mechanisms, and fails if any never happened:

* baby-step and giant-step rotations;
* key switching overlapping the PCmul stream;
* Rot's limb pipelining (key multiply-accumulate beside the NTT);
* the ct_sum bypass;
* the final CCadd;
* accumulation;
* bank swaps of every buffer;
* interconnect contention;
* memory stalls;
* key-buffer back-pressure.

This is the largest configuration simulated for the whole core. The MatMul
takes about 68,000 cycles there. A MatMul at the default parameters is not simulated: it is
estimated at about 626 M cycles, far beyond what an RTL simulator can run in a
reasonable time.

To simulate with Verilator 5, from the directory that holds `rtl/` and `tb/`:

```
verilator --binary --timing --assert -Wno-fatal --top-module matmul_core_tb \
    rtl/omr_pkg.sv tb/omr_ref_pkg.sv $(ls rtl/*.sv | grep -v omr_pkg) \
    tb/hbm_model.sv tb/matmul_core_tb.sv -o sim
./obj_dir/sim
```

Replace `matmul_core_tb` with any other testbench name. Every testbench ends
with a line of the form `TB_RESULT checks=<n> failures=<m>`.

The testbenches are two-state and seed nothing from the environment. They use
`$urandom` only.

To change sizes, override the top's parameters:

| parameter | meaning | constraint |
|---|---|---|
| N | ring dimension | power of two |
| L | number of limbs | |
| PC | coefficients per word | divides N |
| PI | number of PCmul cores | power of two, divides BT |
| PB | butterflies per cycle | |
| GT, BT | giant and baby steps | |
| KDEPTH | key-buffer depth | power of two |

The moduli must be 60-bit primes ≡ 1 mod 2N.

## Files

* `rtl/omr_pkg.sv`: shared widths, defaults, `mod_cfg_t` and modular helpers.
* `rtl/modmul.sv`, `ccadd.sv`, `pcmul.sv`, `ccadd_tree.sv`: arithmetic cores.
* `rtl/ntt_core.sv`, `galois_unit.sv`, `key_buffer.sv`, `rot.sv`: the Rot core.
* `rtl/ct_buffer.sv`, `matrix_buffer.sv`, `dma_engine.sv`: buffers and their
  transfer engine.
* `rtl/hbm_xbar.sv`: the interconnect.
* `rtl/matmul_core.sv`: the top.
* `tb/`: one testbench per block, the reference package and the memory model.
