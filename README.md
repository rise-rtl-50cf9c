# RISE: a CKKS encryption/decryption engine for edge devices

An edge device that sends data to a cloud server under homomorphic encryption
spends nearly all of its time on a few polynomial operations. It encrypts a
message polynomial into a ciphertext `(c0, c1)` and decrypts results that come
back. This RTL is a small accelerator for exactly those operations, for the
CKKS scheme. It follows the RISE architecture (a RISC-V SoC with an
en/decryption accelerator). The host core stays in charge of encoding, key
handling and the RNS decomposition. Each time it is called, the accelerator
produces one half of a ciphertext, or one decrypted polynomial, for one RNS
limb (a modulus `q` of up to 30 bits), at any ring size `N = 2^5 .. 2^14`.

The design rests on five ideas:

1. **One datapath for everything.** A single pipelined butterfly unit (BFU)
   does NTT butterflies, pointwise modular additions and pointwise modular
   multiplications. Which one it does is set by a two-bit mode.
2. **Two polynomials on chip, never more.** Encryption touches eight
   polynomials, but the operations are scheduled so that only two live at a
   time. The memory is two *bank groups*, BG0 and BG1, each holding one
   polynomial.
3. **Single-port SRAM banks with a one-word write buffer.** Each bank group
   is four 1RW banks. An in-place NTT normally needs large write buffers or
   dual-port memory. Here the order of butterflies and write-backs
   (*NTT_swap4*) guarantees that every bank is idle every other cycle.
4. **Twiddle factors computed on the fly**, by a second modular multiplier.
   No twiddle table is stored.
5. **Error sampling in hardware.** A Keccak-f[1600] PRNG feeds a centred
   binomial sampler (for `e0`, `e1`) and a ternary rejection sampler (for
   `mu`).

## What one call computes

All products are taken in the NTT domain. `NTT(x)[k] = sum_i x[i] w^(ik) mod q`,
where `w` is a primitive N-th root of unity supplied by the host.

| command (CTRL.op) | result written to `ADDR_OUT` |
|---|---|
| `ENC_C1` (2) | `c1 = NTT(pk1) * NTT(mu) + NTT(e1)` |
| `ENC_C0` (1) | `c0 = NTT(pk0) * NTT(mu) + NTT(m + e0)` |
| `DEC` (3) | `m' = N^-1 * INTT(c0 + c1 * s)` |

Inputs:

- `pk0`/`pk1` and `m` are read from memory in the coefficient domain.
- `c0`, `c1` and the secret `s` are read in the NTT domain. These are the
  forms the encryption produces and in which the host keeps `s`.
- `mu` (ternary), `e0` and `e1` (centred binomial, variance 21/2) are drawn
  on chip from a 1600-bit seed in the CSRs.
- A domain byte is XORed into the top byte of the seed: 0 for `mu`, 1 for
  `e0`, 2 for `e1`. As a result the `ENC_C1` and `ENC_C0` calls of one
  encryption use the same `mu` while `e0 != e1`.

The transform is the cyclic NTT, which is what the butterfly network
computes. It is also what the testbenches check. For the negacyclic ring
`Z_q[x]/(x^N+1)` the host multiplies by powers of a 2N-th root `psi` before
encryption (and by the inverse powers after decryption), as usual. The
accelerator does not do this twist. A full encrypt → decrypt round trip
with a real key pair `pk = (-a*s + e, a)` (cyclic ring) is one of the
end-to-end tests.

## Block diagram

```
             CSR bus                                      memory port
                |                                              |
           +---------+  cfg, seed   +--------------------------+-----+
   irq <---| rise_csr|------------->|                dma              |
           +---------+              |  load: word i -> pos bitrev(i)  |
                | cmd               |  (+ sampler stream, mod q)      |
           +---------+  step table  |  store: pos phy_addr(i) -> word |
           | io_ctrl |------------->+--------------------------------+
           +---------+                 ^ stream          |  ^
             |      |                  |                 v  | BG1 read
             |   +--------------------------------+   +-----------------+
             |   | error_sampler                  |-->| bank_group BG0  |
             |   | keccak_prng -> io_buffer ->    |   | bank_group BG1  |
             |   | width_converter -> binomial /  |   | 4 x sram_bank + |
             |   | uniform sampler                |   | 1-word wr buffer|
             |   +--------------------------------+   +-----------------+
             v                                          |  read   ^ write
        +-----------+  mode, omega, tags   +-----+      v         |
        | comp_ctrl |--------------------->| bfu |--> reorder_unit (RU)
        +-----------+                      +-----+
             |  setup/step      ^
             v                  | omega
        +-------------+---------+
        | twiddle_gen |
        +-------------+
```

| file | block |
|---|---|
| `rise_pkg.sv` | widths, enums, `bitrev_n()` and `phy_addr()` |
| `rise_top.sv` | top: CSR bus + memory port, routing of bank ports and BFU operands |
| `rise_csr.sv` | register file, command start, done/irq |
| `io_ctrl.sv` | step sequencer (sampling, DMA, compute) for the three commands |
| `comp_ctrl.sv` | NTT_swap4 / INTT / pointwise FSM, twiddle control, stall counting |
| `bfu.sv`, `modmul.sv` | unified butterfly unit; 4-stage Barrett multiplier |
| `twiddle_gen.sv` | on-the-fly twiddles with its own multiplier |
| `reorder_unit.sv` | the NTT_swap4 write-back reordering |
| `bank_group.sv`, `sram_bank.sv` | 4 × 1RW banks with write buffers; one bank |
| `dma.sv` | memory ↔ bank group transfers |
| `error_sampler.sv` | the sampling chain below |
| `keccak_prng.sv`, `keccak_round.sv` | Keccak-f[1600], one round per cycle |
| `io_buffer.sv`, `width_converter.sv` | one-block buffer; 1088-bit block → 42- or 8-bit words |
| `binomial_sampler.sv`, `uniform_sampler.sv` | the two samplers (combinational) |

## Memory layout and the NTT_swap4 schedule

This is the heart of the design and the part most worth reading slowly.

**Layout.** A polynomial occupies one bank group. Position `p` lives in bank
`p[1:0]`, row `p >> 2`. The DMA and the sampler write coefficient `i` to
position `bitrev(i)`, because the NTT takes its input in bit-reversed order.

**Stages.** The NTT runs `log2 N` stages. A stage issues `N/2` butterflies,
one per cycle, in the order of three nested loops:

```
for j in 0, 4, 8, .. < 2m:            (m = 2 in stage 0, doubles each stage,
  for k in 0, 4m, 8m, .. < N:          and wraps from N/4 back to 2)
    for l in 0..3:
      idx = j + k + {0, 2, 2m, 2m+2}[l]
      butterfly on positions (idx, idx+1)
```

Positions `idx` and `idx+1` are always in the same row and in banks
`{0,1}` or `{2,3}`. Butterflies `l = 0,1` and `l = 2,3` alternate between
those two bank pairs. So **in every cycle two banks are read and the other
two are free.** The testbench of `comp_ctrl` checks that two consecutive
butterflies never use the same pair.

**Write-back (the swap).** The four butterflies of one `l` group produce
`(x_l, y_l)`. The re-ordering unit collects all eight values and writes them
back transposed:

- `x_0..x_3` go to banks 0..3 of the row read by butterfly 0.
- `y_0..y_3` go to banks 0..3 of the row read by butterfly 2.

Where an element lands is therefore not where it was read from. The
permutation is chosen so that the next stage again finds its butterfly pairs
side by side, in the same row, in adjacent banks. After the last stage the
result sits at the positions
`phy_addr(k) = {k[logN-3:2], k[logN-1:logN-2], k[1:0]}`.
The DMA reads that position for output word `k`, so the stored polynomial is
in natural order.

**Why one write-buffer entry per bank is enough.** The RU has two halves of
four pairs each: one fills while the other drains. A half needs two writes
per bank, and a bank is free for writing in every cycle in which its pair is
not read, i.e. every other cycle. So a half drains in the four cycles the
other half takes to fill. A write that collides with a read waits one cycle
in the bank's buffer, and the buffer is free again before the next write to
that bank arrives. The RU asserts that it never overflows. Every NTT in every
testbench runs with these assertions on.

**Between stages** the controller waits until the BFU pipeline, the RU and
the write buffers are empty, about 20–30 cycles per stage. This keeps
stage `s+1` from reading an element that stage `s` has not yet written.

**INTT** is the same schedule with `w^-1`. The factor `N^-1` is a separate
pointwise pass (SCALE) before the store.

### Twiddle factors and stalls

Stage `s` needs `w_m = w^(2^(logN-1-s))`. It multiplies the current twiddle
by `w_m` after every `N / 2^(s+1)` butterflies, and starts each stage at
`omega = 1`.

`twiddle_gen` forms `w_m` by repeated squaring at the start of the stage.
It then always has the *next* twiddle computed in advance. When twiddle
updates come less than one multiplier latency (about 5 cycles) apart, the
butterfly that needs the new twiddle waits. This happens in the last three
stages, where the update period is 4, 2 and 1 butterflies. These stall cycles
are counted (`stall_cycles`). Measured NTT times:

| N | 256 | 512 | 1024 | 2048 | 4096 | 8192 | 16384 |
|---|---|---|---|---|---|---|---|
| cycles | 2258 | 4556 | 9355 | 19407 | 40472 | 84582 | 176825 |
| N/2 · log N | 1024 | 2304 | 5120 | 11264 | 24576 | 53248 | 114688 |

The rest is twiddle stalls (about `3N`) plus the per-stage drain.

## The unified butterfly unit

`bfu` takes `u`, `v`, `w` and a mode. It uses one Barrett multiplier, one
modular adder and one modular subtractor. Three select bits come from the
mode:

| mode | s0 | s1 | s2 | out0 | out1 |
|---|---|---|---|---|---|
| `00`/`01` | 0 | 0 | 0 | `u + v·w` | `u − v·w` |
| `10` | – | 1 | 0 | `u + v` | – |
| `11` | 1 | – | 1 | `u · v` | – |

- `s0` makes the multiplier compute `v·u` instead of `v·w`.
- `s1` feeds `v` instead of the product into the adder.
- `s2` selects the product as `out0`.

The multiplier (`modmul`) is Barrett with `mu = floor(2^60 / q)` from a CSR,
so any odd `q < 2^30` works. Its stages are multiply → quotient estimate →
subtract → one conditional subtraction. The whole BFU has a latency of 5
cycles and accepts one operation per cycle. A row/bank tag travels through
the pipeline with the operands.

## Memory reuse: the step sequence

`io_ctrl` turns one command into eight steps. A step starts when the units
of the previous step are done and the write buffers of the bank group it
depends on are empty.

Encryption (shown for `c1`):

| step | BG0 | BG1 |
|---|---|---|
| 1 | sample `mu` (ternary) | start loading `pk1` |
| 2 | NTT | (load continues) |
| 3 | – | NTT (waits for the load) |
| 4 | read | MUL: BG1 ← BG0·BG1 |
| 5 | sample `e1` (binomial) | – |
| 6 | NTT | – |
| 7 | read | ADD: BG1 ← BG0+BG1 |
| 8 | – | store → `ADDR_OUT` |

For `c0` the same steps load `pk0`. In step 5 the DMA loads `m` into BG0 and
adds the `e0` stream to it word by word, so `m + e0` never exists in memory.

Decryption:

| step | action |
|---|---|
| 1 | load `c1` → BG0 |
| 2 | load `s` → BG1 |
| 3 | MUL |
| 4 | load `c0` → BG0 |
| 5 | ADD |
| 6 | INTT BG1 |
| 7 | SCALE BG1 by `N^-1` |
| 8 | store |

## Error sampling

- `keccak_prng` loads the seed (XOR domain byte) as the Keccak state. It runs
  24 rounds, one per cycle, and presents the first 1088 bits of the state as
  a block. Further blocks come from further permutations of the same state.
- `io_buffer` holds one block, so the next permutation overlaps the use of
  the current block.
- `width_converter` cuts each block LSB-first:
  - for the binomial sampler, 25 words of 42 bits;
  - for the ternary sampler, 136 bytes.
  - Bits left over at the end of a block are dropped.
- `binomial_sampler` returns `HW(r[20:0]) − HW(r[41:21])` mod q.
- `uniform_sampler` rejects the byte 255 and maps `r mod 3` to `{0, 1, q−1}`.
  The mod-3 reduction is a branch-free digit-sum circuit.

The stream runs at up to one coefficient per cycle. N samples take at most
about N + N/10 cycles, the gap being the permutations the buffer cannot hide. Coefficient `i` goes to position `bitrev(i)` of BG0,
or into the DMA adder (for `e0`).

## Host interface

CSR bus: `csr_en`, `csr_we`, `csr_addr` (8-bit word address), 64-bit data,
combinational read. Registers:

| addr | register |
|---|---|
| 0x00 | CTRL: bit 0 start (ignored while busy), bits 2:1 op |
| 0x01 | STATUS: bit 0 busy, bit 1 done (write 1 to clear; also drives `irq`) |
| 0x02 | LOGN (5..14) |
| 0x03 | Q |
| 0x04 | MU = floor(2^60/q) |
| 0x05 | W_N |
| 0x06 | W_N_INV |
| 0x07 | N_INV |
| 0x08–0x0B | ADDR_A, ADDR_B, ADDR_C, ADDR_OUT (word addresses) |
| 0x10–0x28 | seed, 25 lanes of 64 bits (lane 0 first) |

Operand addresses per command:

- `ENC_C1`: `pk1` at A.
- `ENC_C0`: `pk0` at A, `m` at B.
- `DEC`: `c1` at A, `s` at B, `c0` at C.

Memory port: one 32-bit word per request. `mem_req` with
`mem_we`/`mem_addr`/`mem_wdata` is held until `mem_gnt`. Read data comes
later with `mem_rvalid`. The DMA keeps one request in flight, so a
transfer costs about 3 cycles per word plus memory latency.

A programming sequence: write LOGN, Q, MU, W_N, W_N_INV, N_INV, the
addresses and the seed; write CTRL = `1 | op<<1`; wait for `irq`; write
STATUS = 2.

## Performance

Cycle counts per limb, measured in simulation with a memory that grants 3 of
4 requests and answers reads in 1–3 cycles:

| N | ENC_C1 | ENC_C0 | DEC |
|---|---|---|---|
| 1024 | 35.7k | 40.2k | 29.2k |
| 4096 | 151.7k | 169.3k | 119.7k |
| 16384 | 651.6k | 721.8k | 493.9k |

A parameter set with `log Q` bits needs `log Q / 30` limbs. Each limb is one
call per ciphertext half (and one call for decryption), with its own `q`,
`MU` and roots. For example, N = 16384 with log Q = 390 is 13 limbs.

## Where this RTL departs from the paper, and what it leaves out

- **Parallel BFUs are not built.** The paper's high-performance variant
  scales to 32 BFUs with `4 × #BFU` banks and a wider reordering. This RTL
  is the single-BFU architecture, so the NTT cycle counts above are those of
  one BFU.
- **A separate twiddle multiplier.** The paper's single-BFU design shares
  the BFU's multiplier for twiddles. Here a second multiplier (the paper's
  choice for its parallel design) computes them. Stalls still occur in the
  last three stages.
- **Stage count.** Algorithm 1 in the paper bounds the stage loop by
  `log N − 1`. Its N = 32 example figure shows five stages, and only
  `log N` stages give the transform. This RTL runs `log N` stages.
- **Things the paper does not spell out, chosen here:**
  - the `N^-1` scaling pass;
  - the cyclic (not negacyclic) transform;
  - the seed domain bytes;
  - the on-the-fly `m + e0` addition in the DMA;
  - the order in which the sampler writes;
  - the CSR map;
  - the memory port;
  - the per-stage drain;
  - the width converter's handling of leftover bits.
- **DMA.** There is a single channel, so the decryption loads of `c1` and
  `s` run one after the other, not side by side.
- **SRAM.** Banks are plain synchronous arrays. A foundry 1RW macro with
  the same ports would replace `sram_bank`.
- **Not included:** the host core, the interconnect and the TRNG. Their
  connection points are the top's CSR bus, memory port and seed registers.

## Verification and simulation

Every block has a self-checking testbench in `tb/`. Each one prints
`TB_RESULT checks=… failures=…` and has a watchdog. Reference values are
computed independently in the testbench:

- `keccak_ref_pkg` is a software-style Keccak with LFSR-generated round
  constants.
- `rise_tb_host` computes the NTT by direct summation.
- Prime moduli and roots are found by search.

| testbench | what it shows |
|---|---|
| `tb_keccak_prng` | first two blocks equal the standard SHAKE256 output; 24 cycles per permutation |
| `tb_error_sampler` | full sample streams equal the software model, for both distributions, domain bytes and back-pressure |
| `tb_bfu`, `tb_modmul`, `tb_twiddle_gen` | arithmetic against direct computation |
| `tb_reorder_unit`, `tb_bank_group`, `tb_sram_bank`, `tb_io_buffer`, `tb_width_converter`, samplers | unit behaviour and handshakes |
| `tb_comp_ctrl` | NTT/INTT at N = 32..128 on the real datapath against the DFT sum; pointwise ops; butterfly count; bank alternation |
| `tb_dma`, `tb_io_ctrl`, `tb_rise_csr` | address permutations; step schedules; register map |
| `tb_rise_top` | end to end at LOGN_MAX = 8, N = 32, 64 and 256 (details below) |
| `tb_rise_top_full` | default parameters at N = 16384: ENC_C1 and DEC, all 16384 coefficients checked |
| `tb_rise_workloads` | N = 256 … 16384 with 1–13 limbs, spot-checked, with cycle counts |

`tb_rise_top` covers:

- all three commands, checked exactly;
- an encrypt/decrypt round trip with a real key pair;
- a count of every mechanism: twiddle stalls, BFU mode switches, RU swaps
  and bypasses, write-buffer holds, ternary rejections, the `e0` add during
  load, the load running on during an NTT, and memory back-pressure.

To run one testbench with Verilator 5:

```
verilator --binary --timing --assert -Irtl -Itb -y rtl -y tb \
    rtl/rise_pkg.sv tb/tb_rise_top.sv --top-module tb_rise_top
./obj_dir/Vtb_rise_top
```

`tb_rise_top_full` and `tb_rise_workloads` each take well under a minute.

## Parameters

| parameter | default | meaning |
|---|---|---|
| `LOGN_MAX` (top) | 14 | largest ring, 2^14 coefficients; bank depth 2^(LOGN_MAX−2) |
| `Q_W` (package) | 30 | coefficient / modulus width |
| `BINOM_K` | 21 | bits per Hamming weight (variance 10.5) |
| `STATE_W` / `RATE_W` | 1600 / 1088 | Keccak state / PRNG output block |
| `BOUND` (ternary) | 255 | bytes ≥ BOUND are rejected |

To change `LOGN_MAX`, override it on `rise_top`. The smallest run-time
ring is N = 32.
