# KVNAND in SystemVerilog: LLM decoding inside compute-enabled 3D NAND

On-device LLM inference is limited by memory, not arithmetic: during decoding every
generated token needs one pass over all weights and over the whole key/value (KV) cache,
and with long contexts the KV cache alone can exceed the DRAM of a phone or laptop.
KVNAND removes DRAM from the decoding path. Weights and the KV cache both live in 3D NAND
flash dies that have a logic die bonded on top ("in-flash computing", IFC). Each flash
plane gets a small processing element (PE) next to its page register, so a GEMV (matrix-vector
product) is computed where the page is read, and only small result vectors leave the die.

This RTL models that system: the SoC-side flash controller and KV write path, the
per-die logic (command distribution, vector broadcast, result collection into a 260 KB
global buffer, block manager), and per plane the page register pipeline, on-die BCH ECC,
the 16-FMAC PE and an 8 KB KV buffer, with a behavioural model of the NAND array itself.

## The two ways to place the KV cache

* **Discrete (KVNAND-D)**: the dies are split into two groups. Group 1 (G1) holds the weights
  and computes the QKV and FFN GEMVs; group 2 (G2) holds the KV cache and computes attention.
  New K/V vectors are collected in a 5 MB buffer on the SoC, encoded there and programmed into
  G2 a page at a time. The main configuration is 8 channels with one die each, 4 + 4.
* **Compact (KVNAND-C)**: every die holds weights and KV cache. New K/V vectors go to the
  8 KB KV buffer in the plane that owns the head; the plane encodes and programs them itself
  when a 1 KB sector is full.

The two differ in scheduling, and `hg_scheduler` implements both (below).

## Head groups and overlap

Attention can only start for a group of heads once its Q, K and V are known. The
scheduler splits the heads into head groups (HG). In the discrete mode, G1 computes QKV for
HG i+1 while G2 computes attention for HG i, so the two stages overlap. In the compact mode
there is only one group of dies, so the stages alternate: all QKV head groups first, then
attention, using all dies for each. `hg_scheduler` issues `qkv_start`/`att_start` pulses,
waits for the matching `*_done`, and counts overlapped cycles (`n_overlap`) and mode switches
between the two kinds of work (`n_switch`).

## Data path of one plane (`ifc_plane`)

```
 flash_plane ──tR──► data register ──► cache register ──► bch_decoder (in place)
   (array)                 (page_register)                      │
                                                                ▼
   vector register (broadcast) ─────────────────────────► fmac_pe (2 lanes x 8 heads)
                                                                │ results
                                                                ▼
                                                  die result collector → global_buffer
```

* A page is 4 KB of data plus 448 B of spare, 1136 words of 32 bits (two BF16 values per word).
* Read time tR is 4 µs, or 1600 cycles at 400 MHz. The array fills the data register during the last
  1136 cycles. The page then moves to the cache register in one cycle, so the next read can
  start while the current page is corrected and consumed (two-stage register pipeline).
* The decoder checks the four 1 KB codewords in place. An error-free page takes 4 × 284 cycles.
* The PE then takes one word per cycle: 2 BF16 weights × 8 query heads = 16 multiply-accumulates
  per cycle. Products are BF16 × BF16, and sums are kept in FP32. At 400 MHz this consumes a
  4 KB page in 1024 cycles, inside tR.
  * In GEMV mode a result is produced every `row_len` elements.
  * In attention-value mode (ATTEND) the PE keeps up to 16 accumulators per head.
* When the die's result collector is busy with other planes, `in_ready` drops and the PE stalls.
  `n_pe_stall` counts these stalls.
* Plane commands are GEMV, ATTEND, PROGRAM (weights written from the link) and KV_APP
  (K/V words into the KV buffer).

## ECC: BCH(9088, 8192, 64)

Each 1 KB sector (8192 bits) gets 896 parity bits, so four sectors fill the 448 B spare
area. The field is GF(2^14) with the polynomial x^14 + x^10 + x^6 + x + 1. The generator
polynomial is the product of the minimal polynomials of α^1, α^3, …, α^127.

* Page layout: codeword c has data words c·256 … c·256+255 and parity words
  1024 + c·28 … 1024 + c·28 + 27. Bit 31 of each word goes first.
* Encoder (`bch_encoder`): an LFSR that takes 32 bits per cycle. It is used by the planes
  for KV sectors and by the SoC controller for KV pages.
* Decoder (`bch_decoder`):
  1. Odd syndromes are computed by Horner's rule, 32 bits per cycle. The 14×32 and 14×14
     constant matrices are listed in `bch_tables_pkg`; each entry is a power of α.
  2. Even syndromes are formed by squaring.
  3. Inversion-free Berlekamp–Massey runs one coefficient per cycle.
  4. Chien search tests one bit position per cycle. The errors are fixed only if the
     number of roots equals the degree of the locator; otherwise the codeword is flagged
     uncorrectable.
* Throughput: an error-free page is checked at 12.8 Gb/s. A codeword with errors costs
  about 17.7k extra cycles. The paper's decoder reaches 14.6 Gb/s per plane. This design
  trades that speed for area and simulator size.

## KV buffers and block management

* `kv_buffer` holds slots of one 1 KB sector each: 8 slots in a plane, 1280 slots of
  4 KB in the SoC's 5 MB buffer.
* When a slot fills, it is streamed out with its block/page/column mapping.
  * The plane encodes the sector and programs it with a partial-page program.
  * The SoC controller encodes a full page and sends it to a G2 die.
* When a stream needs a new block, it asks `block_manager`.
  * The block manager starts from a pseudo-random block (LFSR), which spreads wear between
    requests, and takes the first free block that is not worn out.
  * It keeps a P/E counter and a read counter for every block.
  * When a block's read counter reaches 10^6 reads, it raises a refresh request. Migrating
    the data is left to firmware.
* The SoC uses one block manager entry as a superblock: the same block number in every
  G2 plane.

## Blocks and files

| file | block |
|---|---|
| `kvnand_pkg.sv` | sizes, timing, command types, GF(2^14), BF16/FP32 arithmetic |
| `bch_tables_pkg.sv` | constant GF matrices for the syndrome and Chien steps |
| `fmac.sv`, `fmac_pe.sv` | BF16×BF16→FP32 multiply-add; the 2×8 PE with accumulators |
| `page_register.sv` | data + cache register pair with an XOR fix port |
| `bch_encoder.sv`, `bch_decoder.sv` | ECC |
| `kv_buffer.sv` | slot buffer with mapping table and flush stream |
| `block_manager.sv` | randomised allocation, P/E and read-disturb counters |
| `global_buffer.sv` | 260 KB result SRAM of a die |
| `flash_plane.sv` | behavioural NAND plane (not synthesizable) |
| `ifc_plane.sv` | plane sequencer tying the above together |
| `ifc_die.sv` | 32 planes, command fan-out, vector broadcast, collector, block manager |
| `hg_scheduler.sv` | head-group pipelining, discrete or compact |
| `flash_controller.sv` | SoC multi-channel controller with the KV page path |
| `kvnand_top.sv` | SoC controller, 5 MB KV buffer, scheduler and the dies |

Not modelled: the NPU (its side is the top's ports), the ONFI physical layer (replaced by a
plain synchronous word link per channel), and the hybrid bonding between the two dies.

## Timing and sizes

* The clock is 400 MHz. `T_READ_CYC` = 1600 (tR = 4 µs) and `T_PROG_CYC` = 30000 (tP = 75 µs).
* The flash geometry follows the paper: 768 pages per block, 177 blocks per plane, 32 planes per die, SLC.
* `kvnand_top` defaults to **4 dies (2 + 2)**, where the paper's main configuration has 8 (4 + 4).
  * Verilator gives every plane instance its own code. Linting one 32-plane die takes
    about 3.4 GB, so 8 dies would need more memory than the build machine has.
  * Set `NUM_DIES` = 8 and `G1_DIES` = 4 to get the paper's system.
* No testbench runs the top at its defaults, for the same reason.
  * The largest top simulated is 2 dies (1 + 1) with 2 planes per die, in `tb_kvnand_top`.
  * The largest die simulated is 4 planes, in `tb_ifc_die`. A single plane, `tb_ifc_plane`,
    runs at full timing.
  * Several testbenches shorten tP to keep the runs short.

## Simulating

Every testbench is self-checking. It ends with the line `TB_RESULT checks=N failures=M`.

```
cd rtl
verilator --binary --timing -Wno-fatal --top-module tb_ifc_plane \
  kvnand_pkg.sv bch_tables_pkg.sv $(ls *.sv | grep -v _pkg) ../tb/tb_ifc_plane.sv
./obj_dir/Vtb_ifc_plane
```

The testbenches compute their references themselves:

* integer-valued BF16 data, so the expected sums are exact;
* a bit-serial BCH encoder;
* the tests inject bit errors through `inj_err`, which flips that many bits in every codeword read.

## Where this design departs from the paper

* The decoder's speed is below the paper's 14.6 Gb/s when errors are present.
* The link between the SoC and the dies is not ONFI.
* The default number of dies is scaled down, as described under "Timing and sizes".
* The paper does not specify:
  * the number formats of the PE;
  * the layout of the ECC parity;
  * the slot size of the KV buffers;
  * the command set;
  * the result addressing in the global buffer;
  * the arbitration between planes.

  All of these are choices made for this design.
* Refresh migration and releasing blocks at the end of a request are firmware tasks. The
  block manager provides the counters, the refresh request and a release port.
