# HE² — an xPU + near-memory accelerator for CKKS key switching, in SystemVerilog

Homomorphic encryption with CKKS spends most of its time in *key switching*.
Key switching has three parts:

- **ModUp**, which is compute-heavy: inverse NTT, basis conversion, then NTT.
- **Inner product (IP)** with a very large evaluation key (evk), which is memory-heavy.
- **ModDown**, which is compute-heavy again.

This design splits that work between two kinds of hardware:

- **xPU**, a compute chip: NTT units, basis-conversion units, an element-wise engine and a scratchpad.
- **xMU**, small processing elements placed next to the banks of an HBM stack. They run the memory-bound operations: IP, plaintext multiply and ciphertext add.

The cost of this split is traffic between the two halves. After ModUp, the
extended ciphertext (48 limbs × 2^16 words per decomposed group) has to
travel to the HBM, where the xMU multiplies it with the key. The central
hardware idea is that the xPU does not try to be fast per operation. It
works *group by group* and keeps several groups in flight:

- while group *g* is streamed to HBM, group *g+1* is in basis conversion and NTT, and group *g+2* is being loaded and inverse-transformed;
- the NTT and basis-conversion units are sized so that one feeds the other without stalling.

This hides the transfer behind computation. The same data path can also fetch
an evk from HBM into the scratchpad, the "evk-flowing" alternative, for
operations where moving the key is cheaper than moving the intermediate
results.

The RTL implements:

- the arithmetic units;
- the memory system of the xPU;
- the bank-level xMU processing elements;
- a top level that runs a complete ModUp in hardware and streams its results into HBM for the xMU.

## Number format and modular arithmetic

All data are 36-bit words: residues modulo 36-bit primes *q* with
2^35 < q < 2^36 and q ≡ 1 (mod 2^17), so that a 2^17-th root of unity ψ exists
for the negacyclic NTT of length N = 2^16.

`he2_pkg` holds the shared arithmetic: `mod_add`, `mod_sub` and `mod_mul`.
`mod_mul` uses Barrett reduction with μ = ⌊2^72/q⌋:
1. q1 is the top 37 bits of the 72-bit product.
2. q3 is the top bits of q1·μ.
3. The remainder is x − q3·q, computed on 38 bits.
4. At most two conditional subtractions finish the reduction.

Each modulus travels as a `modulus_t` struct {q, μ}.

## The xPU

### NTT unit (`nttu`, `radix16_pe`, `bfu`, `of_twist`)

Each of the 96 NTT units owns a polynomial buffer of N words, organised as
2048 rows of 32 words. A transform makes LOGN/4 = 4 passes over the buffer.
Each pass streams one row per cycle through `NPE` = 2 radix-16 PEs:

- Each PE is four pipelined columns of eight radix-2 butterflies, so one pass does four radix-2 stages.
- Column *c* pairs lanes at distance 8>>c.
- Between passes, the unit re-reads its buffer with a stride, so that each pass sees the next four stages.

Both directions use the same butterfly and the same wiring:

- **NTT** uses Cooley–Tukey butterflies (x = a + wb, y = a − wb). It takes coefficients in natural order and produces evaluations in bit-reversed order: output *i* = Σ_j a_j ψ^((2·brev(i)+1)·j).
- **INTT** uses Gentleman–Sande butterflies (x = a + b, y = (a − b)w). It takes that bit-reversed order back to natural order. Its last pass multiplies every word by a `scale` input, which lets the controller fold N⁻¹ and the basis-conversion constant q̂⁻¹ into the transform.

Twiddle factors are computed on the fly by `of_twist` rather than stored per
stage:
- ψ^e = ψ^(e mod 2^8) · ψ^(2^8·⌊e/2^8⌋), one table lookup in each of two small tables and one modular multiplication.
- The tables are rebuilt at every start, taking 2^8 + 2^9 cycles, so a unit can switch modulus from one limb to the next.

Timing: one row enters the PEs per cycle. A 2^16 transform is therefore
4 passes × 2048 rows ≈ 8.2 k cycles, plus the table fill and a short drain.

### Basis-conversion unit (`bconvu`)

Basis conversion turns the α = 12 limbs of one decomposed group into the
other 36 limbs of the extended basis. One unit computes, for one coefficient
position and one target prime p,

  y = Σ_i [x_i]_p · (q̂_i mod p)  (mod p)

Its structure:

- It receives the same coefficient position from all 12 source limbs at once.
- Each source value is reduced into [0, p).
- Each is multiplied by its constant.
- A registered adder tree sums the 12 products, giving a latency of 1 + ⌈log₂12⌉ = 5 cycles.

The 672 units form an array of 32 lanes × 21 targets:
- Every cycle, the 12 inverse-transformed source units present one row (32 positions).
- The array produces that row for 21 target limbs at once.
- The 36 targets therefore take two *batches* over the 2048 rows.
- Results go straight into the row write ports of the NTT units that will transform the targets.

### Element-wise engine (`eweu`, `ewe_engine`)

The element-wise engine has 512 lanes, and each lane has four modular
multipliers and two adders. It supports:
- plaintext multiply;
- ciphertext add and subtract;
- IP multiply-accumulate;
- the three-output tensor product of two ciphertexts.

`ewe_engine` feeds it from the scratchpad in chunks of 16 rows:
1. Gather the operand rows.
2. Run one engine cycle.
3. Write the result rows back.

### Scratchpad, NoC and streaming controller

- **Scratchpad (`scratchpad`).** 250 single-port banks × 2447 rows × 32 words.
  - That is 84 MiB of storage.
  - One row per bank per cycle gives 36 TB/s at 1 GHz.
  - The smaller variant (about 44 MB, enough for ciphertexts but not for a key) is `DEPTH = 1282`.
- **NoC (`noc`).** A crossbar from clients to banks.
  - A global row address is interleaved as bank = addr mod 250, row = addr / 250, so consecutive rows of a limb fall into consecutive banks.
  - Each bank grants one client per cycle with rotating priority.
  - A client sees its grant in the cycle of the request and holds the request until it is granted.
  - Read data return two cycles after the grant.
- **Streaming controller (`stream_mem_ctrl`).** Moves rows between the xPU and the HBM. It has three job types:
  - **unit → HBM**: reads an NTT unit's row port and writes one row per cycle. This is how ModUp results flow out without being stored first.
  - **scratchpad → HBM**: reads through the NoC.
  - **HBM → scratchpad**: keeps one row in flight. It is used for key preloading and for bringing results back.

### Group pipeline (`xpu_controller`, `nttu_allocator`)

ModUp of one polynomial with 36 limbs runs as dnum = 3 groups of 12 limbs.
Each group goes through three stages:

| stage | work | units |
|---|---|---|
| 0 | load 12 limbs from the scratchpad, INTT with scale N⁻¹·q̂⁻¹ | 12 INTT-role NTTUs |
| 1 | basis conversion in 2 batches, then NTT of the 36 new limbs | BConvU array → 36 NTT-role NTTUs |
| 2 | stream the 36 new limbs (NTTU → HBM) and copy the 12 original limbs (scratchpad → HBM) | streaming controller |

The controller starts group *g* in stage *s* when all four of these hold:
1. The group has finished stage *s−1*.
2. The stage is idle.
3. Group *g−1* has already entered the stage.
4. Group *g−2* has left stage *s+1*.

Rule 4 is double buffering. The allocator splits the 96 NTT units into two
halves of 48, and consecutive groups alternate between the halves. Inside a
half, the split is in proportion to the work on each path: 12 units for the
inverse transforms and 36 for the forward ones.

The controller counts two things:
- cycles in which two or more stages are busy (`overlap_cycles`);
- cycles in which a ready group waited (`wait_cycles`).

Group *g*'s extended limb *e* lands at HBM rows
`hbm_base + (g·48 + e)·2048`. That is exactly the layout the xMU needs for
the inner product.

## The xMU (`xmu`, `xmu_pe`)

One PE sits beside each of the 512 HBM banks, and all PEs execute the same
command. The layout is row-major over all banks, so that every PE finds its
operands in its own bank:
- The HBM address space is cut into 256-bit beats of four 36-bit words.
- Beat *j* lives in bank *j* mod 512.
- A limb of 2^16 words is 32 beats per bank.

A command (`op, m, a_base, b_base, p_base, y_base, a_stride, b_stride, nacc, nbeat`)
runs, for each of `nbeat` beats per bank, `nacc` accumulation steps over
strided operands. Examples:

- **IP**: `nacc = dnum`, with A = the ModUp output and B = the key. The result is Σ_g ct_g·evk_g.
- **Fused IP + PMul** (`XM_IP_PMUL`): one more beat brings the plaintext, and the PE multiplies its accumulator by it before writing back. This saves writing the IP result and reading it again.
- **Element-wise** (CAdd, CSub, PMul): use `nacc = 1`.

Each PE:
- takes two 256-bit operand beats per cycle, standing in for the PE's local buffer;
- has four 36-bit lanes, each a modular multiplier and an adder with accumulator feedback;
- writes a result beat after the last step.

While a command runs, `hbm_ready` is low: the PEs own the banks, and
transfers from the xPU must wait. The host port carries 32-word rows, one
row being 8 beats in 8 consecutive banks.

## Top level (`he2_top`)

`he2_top` connects the units above and exposes these ports:

- a scratchpad port for the host (NoC client 0);
- per-limb constants: moduli, roots, INTT scale factors and basis-conversion constants;
- four commands:
  - `modup_*`: the built-in ModUp described above;
  - `ewe_*`: an element-wise operation on scratchpad rows;
  - `dma_*`: a scratchpad ↔ HBM transfer;
  - `xmu_*`: an xMU command;
- the bank ports of the HBM (the DRAM itself is outside);
- statistics: overlap and wait cycles, rows streamed, BConv batches, fused operations.

Only ModUp is sequenced in hardware. Everything else is a sequence of these
commands issued by the host. That includes the IP after ModUp, ModDown, and
whole programs.

## Parameters

| parameter | default | meaning |
|---|---|---|
| `LOGN` | 16 | log₂ N |
| `NPE` | 2 | radix-16 PEs per NTTU (sets the 32-word row) |
| `ALPHA` | 12 | limbs per decomposed group |
| `DNUM` | 3 | groups |
| `KSP` | 12 | special primes; extended basis = ALPHA·DNUM + KSP = 48 |
| `NUM_NTTU` | 96 | NTT units (two halves of 48) |
| `NUM_BCONVU` | 672 | basis-conversion units (32 lanes × 21 targets) |
| `EWE_LANES` | 512 | element-wise lanes |
| `NBANK`, `DEPTH` | 250, 2447 | scratchpad banks and rows (84 MiB) |
| `XMU_NPE` | 512 | HBM banks / xMU PEs |
| `GAW`, `HAW`, `BAW` | 20, 26, 20 | scratchpad-row, HBM-row and bank-beat address widths |

`NPE` must stay 2 at the top level, because the xMU host port is 32 words wide.

## Where this design departs from or goes beyond its source

These choices are this design's own; the architecture description does not fix them:

- the Barrett arithmetic and the prime range;
- the row and pass organisation of the NTT unit;
- the two-table twiddle generator;
- the 32 × 21 shape of the basis-conversion array;
- the NoC interleaving and arbitration;
- the streaming controller's job types;
- the three-stage split of ModUp with double-buffered NTT halves;
- the xMU command format;
- the HBM address layout.

The unit counts and throughputs, the word width and the FHE parameters are the source's.

What is not built:

- **ModDown and INTT-resident ModUp.** There is no hardware sequence for either. INTT-resident ModUp keeps ciphertexts in the coefficient domain and runs BConv→NTT and NTT as two parallel paths. The allocator can split units between any two paths, but the top only sequences the NTT-resident form.
- **Automorphism inside the DRAM, and evaluation-key generation.** Both live in the HBM device or come from another design.
- **A second xMU.** The full system has one xPU and two xMUs; the top instantiates one xMU.
- **Clock domains.** The xMU runs on the same clock as the xPU, not on its own slower one.
- **The DRAM, its PHY and the host.** These are outside the RTL. The testbenches model the DRAM banks behaviourally.

## Verification

Every unit has a self-checking testbench in `tb/`. Each compares against
plain `%` arithmetic and an independent software NTT or basis conversion, and
prints `TB_RESULT checks=… failures=…`. Where a rate or latency is defined,
it is checked:

- PE latency: 4 cycles;
- BConvU latency: 5 cycles;
- one row per cycle from NTTU to HBM;
- the xMU issuing one beat per bank per cycle;
- an INTT round trip and a cycle budget for a full transform;
- a pipelined ModUp schedule shorter than the sequential one.

`tb_he2_top` runs the whole flow end to end at a reduced size: N = 256,
α = 2, dnum = 3, 7 extended limbs, 14 NTTUs, 64 BConvUs, 4 scratchpad banks
and 8 HBM banks. The flow:

1. The host writes a ciphertext, a key and a plaintext into the scratchpad.
2. DMA copies the key and plaintext into HBM.
3. ModUp runs, while the host also uses the scratchpad.
4. The xMU computes the inner products, one of them fused with the plaintext multiplication, plus an add.
5. The results come back through the HBM-to-scratchpad path.
6. The element-wise engine runs a multiply and an add.

Every word is checked, and the testbench counts that each mechanism
happened:

- INTT and NTT;
- twiddle-table fills;
- BConv batches;
- the NTTU allocation;
- group overlap;
- streaming from the NTT units;
- the original-limb copy;
- the IP, the fused IP+PMul and an element-wise xMU operation;
- all banks working at once;
- HBM-to-scratchpad rows;
- element-wise engine cycles;
- NoC arbitration waits.

The counts come from the top's `events` output, a per-cycle struct that
flags unit starts, the allocation, each kind of transfer row, NoC refusals,
all-bank xMU activity and element-wise engine issue. The testbench therefore
also compiles against a top that has the same ports but no contents.

No testbench runs the top at its default size (N = 2^16, 36 + 12 limbs,
96 NTTUs, 672 BConvUs, 250 banks). Its Verilator C++ build alone takes more
than a quarter of an hour. The largest simulated configuration is the one in
`tb_he2_top`:

- N = 256;
- alpha = 2 and dnum = 3, with one special prime;
- 14 NTTUs and 64 BConvUs;
- a 4-bank scratchpad and an 8-PE xMU.

Unit testbenches pick their own small sizes, given at the top of each file. The datapath widths
(36-bit words, 32-word rows) are not scaled down anywhere.

To simulate a testbench with Verilator 5:

```
verilator --binary --timing --assert -Irtl -Itb rtl/he2_pkg.sv tb/tb_util_pkg.sv \
          $(ls rtl/*.sv | grep -v he2_pkg) tb/tb_he2_top.sv \
          --top-module tb_he2_top -o sim && ./obj_dir/sim
```

List `he2_pkg.sv` first. For a single unit, list only the files it uses.
