# CIPHERMATCH in-flash search data path

This RTL searches a homomorphically encrypted database inside an SSD without moving the
ciphertexts out of the flash chips. The database and the query are packed and encrypted
with BFV (ring dimension n = 1024, 32-bit ciphertext coefficients, 16 plaintext bits per
coefficient). The search then needs only one operation: homomorphic **addition**, which is
coefficient-wise 32-bit addition. The client encrypts the *bitwise complement* of its
query, replicated to fill the polynomial. A stored chunk equal to the query therefore
decrypts to all ones after addition. The client also supplies the encryption of that
all-ones value, the *match polynomial*. The server finds the coefficients whose sum equals
the match polynomial's coefficient and returns their positions. It never decrypts
anything.

The design does the addition where the data already sits, in the page latches of every
flash plane. The latches run one bit position at a time, on all 32768 bitlines of all 128
planes at once. The comparison with the match polynomial is folded into the same
bit-serial stream.

## Vertical layout

A flash read senses one wordline: one bit per bitline, 4 KiB per plane. To add 32-bit
numbers with bitwise latch operations, the operands are stored **vertically**. Coefficient
`k` of a group lives on bitline `k`, and its bit `b` is on wordline `wl_base + b`. One
group of 32 wordlines in one plane holds 32768 coefficients, i.e. 16 ciphertexts of 2048
coefficients (C0 and C1). Reading wordline `wl_base + b` returns bit `b` of all of them.
The carry of every bitline stays in that bitline's own data latch from one bit position to
the next.

The host works with ordinary 32-bit words, so `transpose_unit` converts between the two
layouts, 4 KB (1024 words) at a time:

* Write path: 1024 words arrive, one per cycle. The unit returns 32 bit slices of 1024 bits
  each, and each slice becomes one column chunk of one wordline.
* Read path: 32 slices go in and 1024 words come out.

A 32768-bit page is 32 such column chunks. The `chunk` field of a command selects one.

## The adder in the latches

Each plane has one sensing latch, **S**, and three data latches, **D0**, **D1** and **D2**,
one bit each per bitline. The latch circuit supports five operations:

| operation | effect | latency (paper) | cycles at 100 MHz |
|---|---|---|---|
| READ | S ← cells of wordline | 22.5 µs (SLC read) | 2250 |
| LOAD_S / OUT | S ← controller page / controller ← latch | 3.3 µs (channel DMA) | 330 |
| S2D, D2S, RST_D | S → Dn, Dn → S, Dn ← 0 | 20 ns (latch transfer) | 2 |
| AND / OR | S ← S & Dn / Dn ← Dn \| S | 20 ns | 2 |
| XOR | D1 ← D1 ^ D2 (fixed circuit between two D-latches) | 30 ns | 3 |

The carry C lives in D2. It is cleared once before bit 0. For each bit position the
sequencer issues 13 commands to every plane in lockstep. Here A is the stored bit and B
the query bit:

| # | command | latch state after it |
|---|---|---|
| 1 | LOAD_S | S = B (query slice b, from the controller) |
| 2 | S2D → D1 | D1 = B |
| 3 | AND D2 | S = B·C |
| 4 | XOR | D1 = B ⊕ C |
| 5 | S2D → D0 | D0 = B·C |
| 6 | READ wl_base+b | S = A |
| 7 | S2D → D2 | D2 = A |
| 8 | AND D1 | S = A·(B ⊕ C) |
| 9 | XOR | D1 = A ⊕ B ⊕ C (the sum bit) |
| 10 | S2D → D2 | D2 = A·(B ⊕ C) |
| 11 | D2S D0 | S = B·C |
| 12 | OR D2 | D2 = A·(B ⊕ C) + B·C (the carry out) |
| 13 | OUT D1 | the sum slice goes to the controller |

Step 7 overwrites the carry in D2 with A. That is safe because steps 3–5 have already used
C: D1 holds B ⊕ C and D0 holds B·C.

Step 9 needs A in D2, and step 4 needs C in D2. That is why the fixed XOR pair is D1/D2.

One bit position costs one READ, two DMAs, two XORs, five transfers and three AND/OR
operations. That is 2932 cycles, plus one cycle for the sequencer to hand off, so
**2933 cycles (29.33 µs) per bit**. The 32-bit addition of a whole group across all planes
takes 32 × 2933 + 2 = 93,858 cycles.

This figure differs from the source description in two places:

* Its latency formula counts four AND/OR operations per bit. Its step list has three. The
  RTL follows the step list.
* Its quoted per-bit time of 29.38 µs matches neither count exactly. Four AND/ORs give
  29.34 µs.

The addition wraps modulo 2^32. The final carry is dropped.

## Comparing without storing the sum

The sum comes out one slice at a time, so the comparison also works one slice at a time.
`index_gen_unit` keeps one *mismatch* flag per bitline per plane:

```
mism |= sum_slice ^ match_slice
```

After bit 31, a bitline whose flag is still clear holds a coefficient equal to the match
polynomial's coefficient. The flags take NUM_PLANES × PAGE_BITS bits, which is 0.5 MB at
the defaults. That is exactly the result space such an SSD reserves in its internal DRAM.
No 32-bit result is ever reassembled.

The flags are then scanned 64 bitlines per cycle, and every match is emitted on a
valid/ready stream as (plane, bitline), lowest first. At the defaults a scan takes
128 × 32768 / 64 = 65,536 cycles, plus one cycle per match. A complete CM_SEARCH therefore
takes about 159,400 cycles (1.6 ms at 100 MHz).

## Query and match buffers

Two `slice_buffer`s hold the query ciphertext and the match polynomial in vertical form:
32 rows of 2048 bits. The sequencer's bit index selects row `b`.

A 2048-coefficient ciphertext is narrower than a page. The row is therefore repeated 16
times across the 32768 bitlines, so all 16 ciphertexts stored side by side in a wordline
group are searched with the same query in one pass.

## Blocks and interfaces

```
 host words ──► transpose_unit ──► slices ──► arr_prog_* (CM_WRITE)
                      ▲   │                ──► query / match slice_buffer (CM_LOAD_*)
 arr_rd_data ─────────┘   └──► host words (CM_READ)

 bop_add_sequencer ──cmd──► page_latch_bank × NUM_PLANES ◄── arr_rd_data[p]
        │ bit_idx                 ▲ din = query slice          │ dout = sum slice
        └──► slice_buffers ───────┘                            ▼
                          match slice ──────────────► index_gen_unit ──► idx_*
```

The blocks are:

* **`cm_pkg`** holds the geometry, the latencies, the latch command enum `latch_op_e`, the
  host command enum `cm_op_e`, and the command struct `cm_cmd_t {op, plane, wl_base, chunk}`.
* **`page_latch_bank`** is one plane's S, D0, D1 and D2. It takes one command at a time:
  `cmd_ready` is low for the command's latency. An assertion rejects latch-to-latch
  commands that address S.
* **`bop_add_sequencer`** is the 13-step micro-program. For each bit position `b` it drives
  `rd_wl = wl_base + b` and `bit_idx = b`. It flags the cycle when the planes' `dout` holds
  a sum slice (`sum_valid`, with `sum_last` on bit 31).
* **`index_gen_unit`** is the bit-serial comparison and the index scan.
* **`transpose_unit`** converts word↔slice. Each direction takes 1024 + 32 cycles per 4 KB
  chunk, and the unit is half duplex.
* **`slice_buffer`** is the query or match store described above.
* **`ciphermatch_ssd`** is the top. It takes the host commands below, one at a time, each
  ending with a `done` pulse.

The top's host commands:

| command | action |
|---|---|
| `CM_WRITE` | 1024 words on `wdata`; programs 32 partial pages (plane, wl_base+b, chunk) |
| `CM_READ` | reads wl_base … wl_base+31 of a plane (READ + DMA latency each); 1024 words on `rdata` |
| `CM_LOAD_QUERY` / `CM_LOAD_MATCH` | 1024 coefficients into one chunk of the query or match buffer |
| `CM_SEARCH` | bit-serial addition over every plane at `wl_base`, then the index scan on `idx_*` |

The NAND cell arrays are not part of the RTL. They are reached through `arr_rd_wl` and
`arr_rd_data[NUM_PLANES]`, with the same wordline sensed in every plane, and through
`arr_prog_*`, which programs one 1024-bit column chunk of one wordline.

## How faithful it is

The following follow the source design:

* the BFV sizes;
* the SSD geometry (8 channels × 8 dies × 2 planes, 2048 blocks of 196 wordlines, 4 KiB
  pages);
* the latencies;
* the S/D latch operations and the 13-step bit-serial addition;
* the vertical layout over 32 wordlines;
* 4 KB transposition granularity;
* index generation against an encrypted match polynomial;
* the 0.5 MB result space.

The following are this design's own choices:

* **Clock.** A 100 MHz clock, so that every latency is a whole number of cycles.
* **Query delivery.** The query is delivered by separate load commands rather than inside
  the search command.
* **Index generation.** It is hardware and bit-serial. The source does it in software on
  the SSD controller cores.
* **Transposition.** It is hardware. The source's main configuration uses software, and
  proposes hardware only as an option. The source quotes 158 ns per 4 KB for its hardware
  unit. This one streams one word per cycle, about 10.6 µs per 4 KB.
* **Step 8.** It is an in-place AND (S = A, so S & D1 gives A·(B ⊕ C)). The prose describes
  it as a transfer from D1.
* **Sum output.** The sum slice is read out of D1, as the prose of the source describes.
  Its drawing of the same sequence shows the sum leaving through the S-latch instead.
* **Index format.** A match is reported as (plane, bitline). Which database record that
  position belongs to is up to the firmware's layout.

The following are **not** built:

* the NAND arrays (enhanced-SLC programming included);
* the flash channel controllers;
* the FTL and its two mapping tables;
* the controller cores;
* the internal DRAM;
* the NVMe interface;
* the client's packing and encryption;
* the AES-256 engine that would encrypt the returned indices;
* the conventional TLC region, page-fault and write-back handling.

A search covers one 32-wordline group in every plane. Walking a whole database is a loop of
CM_SEARCH over base wordlines, issued by firmware.

## Capacity

At the defaults the CIPHERMATCH region in SLC mode holds
128 planes × 2048 blocks × 196 wordlines × 4 KiB = 210 GB.

* A 32 GB database grows to 128 GB once encrypted, so it fits. That takes 7,629 searches
  of 16 MiB each.
* The 2–32 GB databases (8–128 GB encrypted) also fit.
* Queries of 16–256 bits occupy at most 16 coefficients of a ciphertext, which fits easily
  in the 2048-coefficient query buffer.

## Verification

Each block has a self-checking testbench in `tb/`. Each prints
`TB_RESULT checks=N failures=M`.

| testbench | what it checks |
|---|---|
| `tb_page_latch_bank` | random commands against a reference model of the four latches; every latch read back after every command; every command's latency |
| `tb_bop_add_sequencer` | sequencer plus one bank over a cell-array model; every sum bit of random and corner-case (overflow, all-ones) additions; 2933 cycles per bit |
| `tb_index_gen_unit` | planted matches come out exactly, in order, under random back-pressure; empty searches report none |
| `tb_transpose_unit` | both directions with and without back-pressure; chunk latency |
| `tb_slice_buffer` | every row and chunk, replication, partial overwrite |
| `tb_ciphermatch_ssd` | whole data path at reduced size (2 planes × 256 bitlines, short latencies) |
| `tb_ciphermatch_full` | the same flow with every top parameter at its default: 128 planes × 32768 bitlines, 22.5 µs reads |

The two end-to-end benches do the following:

1. Write database chunks through CM_WRITE and check the vertical layout in the array model.
2. Read a chunk back with CM_READ.
3. Load a query and a match polynomial.
4. Plant coefficients that must match, some of them needing a carry that wraps past 2^32.
5. Check that CM_SEARCH returns exactly the expected positions.

They count each mechanism (write, read, query and match load, search, carries, wrapped
sums, index back-pressure stalls, a search with no match) and fail if any never happened.

The full-size bench runs two searches in about 40 s of simulation time. The cell arrays
are modelled by `tb/nand_array_model.sv`, a sparse behavioural model used only by
testbenches.

To run a testbench with plain Verilator:

```
verilator --binary --timing --assert -Wno-fatal rtl/cm_pkg.sv rtl/*.sv \
    tb/nand_array_model.sv tb/tb_ciphermatch_ssd.sv --top-module tb_ciphermatch_ssd
./obj_dir/Vtb_ciphermatch_ssd
```

## Synthesis size

At the defaults the top holds about 21 million flip-flops:

* 4 × 32768 latch bits in each of 128 planes;
* 4 Mbit of match flags;
* 128 kbit of query and match buffers.

The latch banks stand in for circuitry that already exists beside each flash plane. They
are modelled as registers only so that the data path can be simulated. Elaborating and
linting the full-size top is quick. A generic synthesis flow is slow at this size because
of the sheer number of state bits.

Lint reports replication warnings for the `'0` resets of 32768-bit vectors. These are
intended: the vectors really are that wide.
