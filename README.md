# DNA-HHE in SystemVerilog

This is a synthesizable SystemVerilog model of DNA-HHE, a dual-mode near-network accelerator for hybrid homomorphic encryption on edge devices. It follows the architecture of "DNA-HHE: Dual-mode Near-network Accelerator for Hybrid Homomorphic Encryption on the Edge".

It runs two kinds of encryption on one shared datapath:

- **RNS-CKKS**: N = 8192 with 54-bit residues. It covers NTT/INTT, FFT/IFFT, point-wise arithmetic and sampling.
- **Rubato**: the symmetric cipher. It covers MixColumns, MixRows, Feistel, ARK and round-constant sampling, with v = 4, 6 or 8.

The chip also packs ciphertext into network packets and exchanges them directly with a NIC.

All RTL is in `rtl/` (one module per file) and all testbenches are in `tb/`. The default top-level parameters are the full-size configuration (N = 8192).

## Block overview

```
 inst stream ──► inst_fifo ──► task_manager ──► config_unit (cfg_t to all units)
                                   │ start/task, done
        ┌──────────┬───────────────┼───────────┬───────────┐
       dau        rsu             ucu         dtu         niu
   (system bus) (SHAKE128 +   (2 x cm_bfu,  (buffer to   (64-bit NIC
                 samplers)    ucu_poly,      buffer copy)  stream)
                              ucu_rubato)
        └──────────┴─────── five buf_cluster crossbars ─────┴───────────┘
      BUF0 Key: RAM0a/0b/1a/1b   BUF1 Message: RAM2    BUF2 Compute: RAM3..RAM6
      BUF3 Regfile: RF0..RF2     BUF4 NIC: RAM7
```

| File | Role |
|---|---|
| `dna_pkg.sv` | Word, address and instruction types, buffer ids, configuration register map |
| `barrett_reduce.sv` | DSP-efficient Barrett reduction for q = 2^54 − 2N·bnd + 1 (4 stages) |
| `mf_mult.sv` | Multi-field multiplier: Karatsuba 56×56, complex fixed point, Z_t Barrett (3 stages) |
| `cm_bfu.sv` | Multi-field butterfly unit: CT, GS, Mul, Add, Sub, MAC over Z_q, Z_t and complex |
| `ucu_poly.sv` | Scheduler for NTT/INTT, FFT/IFFT and point-wise Mul/Add/Sub on two BFUs |
| `ucu_rubato.sv` | Scheduler for Rubato MixColumns, MixRows and Feistel on two BFUs |
| `ucu.sv` | Unified Crypto Unit: two `cm_bfu` plus the two schedulers |
| `keccak_f1600.sv` | Keccak-f[1600], one round per cycle |
| `rsu.sv` | RNG & Sampling Unit: SHAKE128 and uniform, ternary and error samplers |
| `dau.sv` | DMA Unit: reader and writer between system memory and the buffers |
| `dtu.sv` | Data Transfer Unit: copies between any two buffers |
| `niu.sv` | NIC Interface Unit: send a packet from RAM7 and receive one into it |
| `config_unit.sv` | Parameter registers (moduli, Barrett constants, t, v, m0, nonce, packet sizes) |
| `inst_fifo.sv` | Instruction FIFO |
| `task_manager.sv` | Out-of-order dispatch with Unit Busy and BUF Busy tables |
| `sram_mp.sv` | Multi-port RAM array with one-cycle read latency |
| `buf_cluster.sv` | Crossbar plus banks of one buffer cluster |
| `dna_hhe.sv` | Top level |

## Programming model

Software sends a stream of 128-bit task words (`inst_t` in `dna_pkg.sv`):

```
unit[3] op[5] field[2] dom[2] buf_a[4] buf_b[4] buf_c[4] addr_a[16] addr_b[16] addr_c[16] len[16] imm[40]
```

The instruction types are:

- **Configuration** (`unit = U_CFG`): writes configuration register `op` with `{addr_b, addr_c, imm[31:0]}`.
- **Functional** (DAU, RSU, UCU, DTU, NIU):
  - A functional task reads buffers `buf_a` and `buf_b` from `addr_a` and `addr_b`, and writes `buf_c` from `addr_c`.
  - `len` is the number of words.
  - `dom` selects the RNS domain: the modulus slot, and which RAM0/RAM1 bank holds it.
  - `field` selects Z_q, complex or Z_t.
  - For the DAU, `imm` is the system byte address.
  - For the RSU, `imm[15:0]` is the sampling counter.

UCU operations:

| Operation | Field | Buffers | Note |
|---|---|---|---|
| NTT / INTT | Z_q | A ping-pong pair, twiddles in `buf_b` | Inverse includes the 1/N scaling |
| FFT / IFFT | complex | Same op codes as NTT / INTT | Selected by the complex field |
| PW-Mul / PW-Add / PW-Sub | Z_q, complex or Z_t | Any | — |
| MixColumns, MixRows, Feistel | Z_t | Register files | — |

ARK (x + k ⊙ rc) is a PW-Mul followed by a PW-Add in Z_t.

Twiddle tables are stored bit-reversed:

- forward powers at `[0, L)`
- inverse powers at `[L, 2L)`

Forward transforms use Cooley-Tukey stages and inverse transforms use Gentleman-Sande stages. Each stage reads one buffer and writes the other. The result therefore ends in `buf_a` after an even number of stages and in `buf_c` after an odd number. N = 8192 has 13 stages, so the result is in `buf_c`.

Buffer ids:

| Id | Buffer | Id | Buffer |
|---|---|---|---|
| 0, 1 | RAM0 bank a/b | 7 | RAM5 (FFT twiddles) |
| 2, 3 | RAM1 bank a/b | 8 | RAM6 (NTT twiddles, 2N words) |
| 4 | RAM2 | 9, 10, 11 | Regfile0–2 |
| 5, 6 | RAM3, RAM4 | 12 | RAM7 (NIC) |

Every buffer word is 64 bits. It holds one of:

- one residue
- one complex number `{re[57:29], im[28:0]}`, in signed fixed point with 26 fraction bits
- two Rubato words `{x1[55:28], x0[27:0]}`

A Rubato state word x(r,c) has index r·v+c. Register entry e holds words 2e and 2e+1.

## How the blocks work

**Barrett reduction.** Each modulus q = 2^k − 2N·bnd + 1 has the Barrett constant μ = 2^k + {d′, 12'b0} − 1. Both constant products therefore reduce to a k×12 and a k×10 multiplication plus shifts and adds. The remainder lies below 3q, and a final selection among r, r−q and r−2q brings it into range. The remainder is kept at k+2 bits.

**Multiplier.** The integer multiplier is a three-multiplier Karatsuba on 28-bit halves. The same three multipliers serve two more modes:

- the complex product (three real products)
- the Z_t product, followed by a Barrett reduction with shift k_t and constant μ_t

**Butterfly unit.** The unit uses one multiplier and one reducer. Pipeline latency:

| Field | Latency (cycles) |
|---|---|
| Z_q | 7 |
| complex | 3 |
| Z_t | 3 |

A field tag travels with each operation, so switching fields never mislabels results still in the pipeline. GS butterflies halve both outputs, which folds the 1/N of the inverse transform into the stages.

**UCU.**

- `ucu_poly` issues two butterflies per cycle. RAM3 and RAM4 are each split into two dual-port banks selected by the XOR of all address bits, which gives every stage two accesses per bank per cycle.
- Point-wise operations run at two elements per cycle when the buffers allow it. In Z_t, the two BFUs take the two halves of a register entry.
- `ucu_rubato` follows the paper's column-oriented MixColumns: each BFU accumulates one state column with MACs against the circulant matrix generated from m0, and the last MAC writes the packed result directly. MixRows uses the same loop along rows.
- Feistel reads one entry per cycle and keeps the previous word in a register, so the two BFUs compute x_{2e} + x_{2e−1}² and x_{2e+1} + x_{2e}² every cycle.

**RSU.** The seed block is the 128-bit nonce, the domain and a 16-bit counter, with SHAKE128 padding. It is permuted by `keccak_f1600`. Each squeezed 64-bit lane gives at most one sample:

- uniform by rejection (Rubato round constants)
- ternary {0, 1, −1}
- centered binomial error with 21 coin pairs

**Task Manager.** It holds a window of four instructions and dispatches the oldest entry that meets all of these conditions:

- its unit is free
- no running task holds any of its buffers
- no older waiting entry names any of those buffers

Configuration writes act as barriers. Counters report dispatches, out-of-order dispatches and stall cycles.

**Data movers.**

- The DAU keeps up to four reads in flight on a valid/ready request port, and responses return in order.
- The DTU moves one word per cycle between clusters, and one word per two cycles inside a cluster.
- The NIU streams `header + segment` words from RAM7 with keep and last, and stores a received packet until `last`.

**Buffer clusters.** Each cluster routes unit requests by buffer id and address. Read data returns one cycle later. An assertion flags any cycle in which a bank gets more requests than it has ports.

## Verification

Every module has a self-checking testbench `tb/tb_<module>.sv`. Each one:

- prints `TB_RESULT checks=<n> failures=<n>`
- stops through a watchdog if it hangs

Each testbench was also run against a copy of its module with one deliberate bug, and the failure count was non-zero in every case.

| Testbench | What is checked | Checks |
|---|---|---|
| tb_barrett_reduce | random and extreme products against a reference modulo for several primes | 40361 |
| tb_mf_mult | all three modes against reference products | 10000 |
| tb_cm_bfu | every operation in every field, with field switches | 18001 |
| tb_ucu | see below | 896 |
| tb_keccak_f1600 | FIPS 202 permutation vectors | 4 |
| tb_rsu | samples against a SHAKE128 reference model in the testbench | 420 |
| tb_dau, tb_dtu, tb_niu | moved data and protocol timing | 151, 356, 51 |
| tb_config_unit, tb_inst_fifo | registers; FIFO order and full/empty behaviour | 146, 1442 |
| tb_task_manager | 300 random instructions against a reference ordering (66 out-of-order dispatches) | 888 |
| tb_buf_cluster | bank routing and read latency | 1400 |

tb_ucu covers:

- NTT at L = 16, 64 and 128, checked against direct evaluation, plus the inverse round trip
- FFT/IFFT round trip
- point-wise operations in all fields
- Rubato layers for v = 4, 6 and 8 against a reference
- whole Rubato round functions chained r+1 times for Par-128S/M/L, against a reference
- that no bank is overloaded

`tb_dna_hhe` is both the end-to-end and the full-size test. It uses the top with its default parameters (N = 8192) and runs a 57-instruction program through the instruction port:

- configuration
- DMA loads of pk, twiddles and message
- ternary sampling
- a forward and an inverse NTT
- a point-wise product
- DMA stores
- packet assembly and sending with the DTU and NIU, and receiving a packet
- a Rubato round layer
- an IFFT/FFT round trip

It checks every result word against models in the testbench. It also counts the mechanisms exercised:

| Event | Count |
|---|---|
| Instructions | 57 |
| Cycles | 239080 |
| Out-of-order dispatches | 15 |
| UCU field switches | 2 |
| Transforms | 4 |
| Cycles with two or more units busy | 91523 |
| DMA words read / written | 36884 / 36888 |
| NIC flits sent / received | 76 / 8 |
| Checks | 24701 |
| Failures | 0 |

The largest FFT(IFFT(m)) error is 5037 LSB of 2^−26.

Measured UCU cycles:

- NTT, L = 128: 282 cycles
- Rubato v = 4: MixColumns 45, MixRows 41, Feistel 14
- Rubato v = 6: 131 / 122 / 24
- Rubato v = 8: 293 / 277 / 38

Run one test with Verilator 5, for example:

```
verilator --binary --timing --top-module tb_dna_hhe rtl/dna_pkg.sv rtl/*.sv tb/tb_mem_model.sv tb/tb_dna_hhe.sv
./obj_dir/Vtb_dna_hhe
```

The RTL also elaborates in Yosys with the slang frontend.

## Sizes and workloads

**RNS-CKKS, N = 8192, 3×54-bit moduli.** This is the setting of the paper's comparison.

- Sizes: one residue polynomial is 8192 words (64 KiB). Each RAM holds one, RAM0/RAM1 hold two domains, and RAM6 holds both twiddle tables (2N words). A ciphertext is 2 × 3 × 8192 = 49152 words, so the third domain reuses the banks.
- Cycles: one NTT is 13 stages × 4096 butterflies / 2 BFUs = 26624 butterfly cycles, plus about 8 cycles of pipeline drain per stage.

**Rubato Par-128S/M/L (v = 4/6/8, n = 16/36/64).**

- Sizes: the state needs 8/18/32 register entries, and each register file has 32.
- Cycles: `tb_ucu` chains r+1 = 6/4/3 round functions. Each is Feistel, MixRows, MixColumns and ARK, and the last one has no Feistel. They take 754/1276/2014 cycles, against the paper's 1235/2087/3036. The paper's figures also include sampling the round constants, which these counts leave out.

**Network packets.** RAM7 holds 2048 words, so a ciphertext goes out as at least 25 segments. The header size and segment length are configuration registers, as in the paper.

**Message lengths 12/32/60/512/4096.**

- 12, 32 and 60 are the Rubato output sizes and fit one keystream block.
- 4096 = N/2 complex slots is the largest CKKS message, and it fits one buffer.

## Differences from the paper

- **Host interface.** The host interface is a valid/ready stream of task words plus a simple DMA request/response port, not a TileLink MMIO peripheral. The NIC side is a generic 64-bit stream with keep and last, not IceNet. The SoC, the bus and the NIC are not part of this design.
- **Memories.** SRAMs are inferred arrays, not compiled macros.
- **Barrett remainder width.** After the subtraction the remainder is k+2 bits wide, not the printed k+1. For q close to 2^k the remainder can reach 3q, which needs k+2 bits; a test case failed with k+1. The comparators are r ≥ q and r ≥ 2q rather than the printed > q and > 2q, so that r = q also reduces to 0.
- **Not specified by the paper** (chosen here):
  - pipeline depths
  - the NTT loop order and the twiddle layout
  - the RAM3/RAM4 bank mapping
  - the MixRows schedule
  - the instruction encoding and the configuration register map
  - the seed layout, error distribution and ternary mapping of the RSU
  - the window size and ordering rule of the Task Manager
  - all buffer depths
- **DAU reach.** The architecture figure draws no DAU link to Compute BUF2. Data for RAM3–RAM6 therefore enters through RAM1 or RAM2 and is moved by the DTU, and results leave the same way.
- **ARK.** ARK is two point-wise tasks, not a dedicated operation.
- **Domains in flight.** Only one UCU task runs at a time. Tasks of two RNS domains overlap only across different units, for example DMA in one domain while the UCU works on the other.
- **Rubato key stream.** Rubato runs as a sequence of layer tasks plus round-constant sampling, not as a single keystream instruction. The round functions are tested chained at the UCU level. The full keystream, including the RSU, is not run end to end. The final truncation to l words is left to software.

## Not implemented

- The vendor SRAM macros.
- The NIC (IceNet).
- The SoC bus and CPU.

These are outside the accelerator. The top level exposes their ports instead.
