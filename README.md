# UMDAM: one weight layout for an NPU and bank-level PIM

An edge LLM accelerator that pairs an NPU with processing-in-memory (PIM) DRAM
runs the prefill phase (matrix-matrix products) on the NPU and the decode
phase (matrix-vector products) on small processing units that sit next to
each DRAM bank. The two want opposite things from memory:

* the NPU wants consecutive addresses spread over all channels, so that a
  stream of weights uses the full bandwidth (interleaving);
* a PIM unit can only read its own bank, so it wants a whole weight column
  inside one bank.

The usual answers are two copies of the weights, a re-layout between phases,
or turning interleaving off. UMDAM avoids all three with one layout and one
DRAM address mapping that suit both sides. This RTL implements the hardware
part of the scheme: the address translation in the memory controller, the
generator that places a weight matrix in the layout, and the controller
front end that joins them.

## The address map

A physical address is cut into fields, most significant first:

    Row | Col_M | Bank | Rank | Channel | Col_L | Offset

The DRAM column (which 32-byte burst of the 2 KB row) is `{Col_M, Col_L}`.
The important point is where the channel sits: just above a small group of
low column bits. For the default LPDDR5 configuration (4 channels, 1 rank,
16 banks per channel, 2 KB rows, 32 B bursts) and a 256 B interleaving
granularity (`Col_L` = 3 bits) the fields are:

| field   | bits    | width | from                          |
|---------|---------|-------|-------------------------------|
| Offset  | 4:0     | 5     | 32 B burst                    |
| Col_L   | 7:5     | 3     | 256 B / 32 B                  |
| Channel | 9:8     | 2     | 4 channels                    |
| Rank    | -       | 0     | 1 rank                        |
| Bank    | 13:10   | 4     | 16 banks                      |
| Col_M   | 16:14   | 3     | remaining column bits (6 - 3) |
| Row     | 32:17   | 16    | capacity choice, see below    |

So a sequential stream changes channel every 256 bytes and bank every
1 KiB. The split of the six column bits between `Col_L` and `Col_M` is a
run-time value `col_l_bits` (0 to 6). With `col_l_bits = 0` the map becomes
`Row | Col | Bank | Rank | Channel | Offset`, the conventional NPU mapping,
so the same logic covers both the conventional and the UMDAM mapping and any
granularity in between. Translation is a pure bit-field extraction: a few
shifters and masks, no table (`rtl/umdam_addr_map.sv`).

## The weight layout

The layout is what makes the map useful. A weight matrix of K rows and N
columns (FP16) is cut into tiles:

* tile height = the interleaving granularity in elements: 2^(5+Col_L) bytes,
  128 FP16 values for 256 B;
* tile width = the number of banks in the whole system: 16 x 1 x 4 = 64.

Inside a tile the elements are stored column by column. The local row of an
element gives its `Col_L` and `Offset` bits (its byte position inside the
256 B unit); its local column gives the `Bank`, `Rank` and `Channel` bits.
The tiles are numbered column-major (all tiles of the first 64 columns, top
to bottom, then the next 64 columns), and the tile number gives the
`{Row, Col_M}` bits:

    seq          = base_tile + tile_col * num_tile_row + tile_row
    address      = { seq , local_col , local_row * 2 }
                     |       |           '-- Col_L, Offset
                     |       '-- Bank, Rank, Channel
                     '-- Row, Col_M

Two consequences follow directly from the bit positions:

* **PIM locality.** All elements of matrix column `c` have the same local
  column `c mod 64`, hence the same bank, rank and channel. The PIM unit of
  that bank finds the whole column at rows/columns given by the tile numbers
  of one tile column, in order of increasing matrix row.
* **NPU interleaving.** One tile is 16 KiB of consecutive addresses. The NPU
  reading a tile front to back gets 256 B (one tile column) from one
  channel, then the next 256 B from the next channel, and so on: all four
  channels and all banks are used. Inside the tile the data are column-major
  blocks of 128 x 64, a tile format an NPU can consume directly.

Worked example: a 256 x 128 matrix at `base_tile = 10` has 2 x 2 tiles.
Element (200, 70) is in tile row 1, tile column 1, local row 72, local
column 6. `seq = 10 + 1*2 + 1 = 13`, so Row = 1, Col_M = 5; local column 6
gives Channel = 2, Bank = 1; byte 144 gives Col_L = 4, Offset = 16. The
physical address is `0x34690`. Every element of column 70 lands in channel
2, bank 1.

`rtl/umdam_layout_agen.sv` produces these addresses in hardware, one
element per cycle, walking tile column, tile row, local column, local row,
which is ascending address order. It hands out the (row, column) of the
element it wants, so the weight source only has to answer a lookup.

## The memory-controller front end (top level)

`rtl/umdam_mc_frontend.sv` is the top. It has two request sources:

* the **weight loader** (`ld_*` ports), an instance of the layout generator,
  used at model initialisation to write every weight to its UMDAM address;
* the **NPU port** (`npu_*`), carrying physical addresses that the page table
  has already produced.

The selected request goes through `umdam_addr_map` and into a one-entry
output register. From there it is presented to the channel its `Channel`
field names: `dram_valid[c]` is raised for that channel only, and the
request leaves when `dram_ready[c]` is high. The command fields
(`dram_row`, `dram_col`, `dram_bank`, `dram_rank`, `dram_ch`, `dram_off`,
`dram_we`, `dram_wdata`, `dram_src`) are shared by all channels.

Rules and timing:

* A request accepted in cycle t appears on the DRAM side in cycle t+1 and
  stays unchanged until its channel takes it. The register refills in the
  cycle it drains, so the path carries one request per cycle.
* While the loader is busy it owns the path and `npu_ready` is low: the NPU
  is stalled until the matrix is placed.
* `col_l_bits` is a register, reset to 3. A write through `cfg_we` is taken
  only when nothing is in flight (`cfg_ready`); a write at any other time is
  dropped, so software must retry it. The loader latches the value when it
  starts.
* Each request carries one FP16 element. Read data go back from the DRAM to
  the requester directly; the front end does not return them.

Assertions in the top check the handshake: a presented request holds still
until taken, at most one channel is addressed at a time, and the NPU is
never granted while the loader runs.

## Sizes and defaults

| parameter    | default | meaning                                    |
|--------------|---------|--------------------------------------------|
| `ROW_BITS`   | 16      | row address bits (64 Ki rows per bank)     |
| `COL_BITS`   | 6       | bursts per 2 KB row                        |
| `BANK_BITS`  | 4       | 16 banks per channel                       |
| `RANK_BITS`  | 0       | 1 rank (zero-width field; port is 1 bit, always 0) |
| `CH_BITS`    | 2       | 4 channels                                 |
| `OFF_BITS`   | 5       | 32 B burst                                 |
| `COL_L_RST`  | 3       | reset value of `col_l_bits` (256 B)        |
| `ELEM_BYTES` | 2       | FP16 weights                               |
| `TCNT_W`     | 16      | width of the tile counts of the loader     |

The physical address is 33 bits wide (8 GiB). The channel, bank, rank,
burst and row-size numbers are those of the LPDDR5-PIM system the scheme was
evaluated on. The row count is not part of that description. 16 row bits
(a 16 Gb x16 device per channel) is a choice here. At that size the FP16
weights of OPT-125M (0.25 GB) and OPT-1.3B (2.6 GB) fit. OPT-6.7B
(13.4 GB) needs `ROW_BITS = 17`, and OPT-30B (60 GB) needs `ROW_BITS = 19`.
Matrix dimensions of the OPT family are multiples of 128 and 64, so they
tile without padding. The largest, 7168 x 28672, is 56 x 448 tiles, well
within `TCNT_W`.

## Choices made here

The field order, the configurable `Col_L`/`Col_M` split, the tile shape,
the column-major order inside tiles and of the tiles, and the
`{Row, Col_M} = tile number` rule come from the UMDAM scheme itself. The
following are choices of this RTL:

* The column is `{Col_M, Col_L}`, with Col_M as the high half.
* The split is a run-time register, not only a parameter. Its value 0 is
  the conventional map, so no separate mapping multiplexer is needed.
* The placement walk, described as software run at initialisation, is done
  here by a hardware address generator. It has a `base_tile` offset so that
  several matrices can share memory. Matrix sizes are given in whole tiles.
* The local row is scaled by the element size before it becomes the
  `Col_L`/`Offset` bits. The tile height is therefore 256 bytes, as the
  scheme requires, rather than 256 elements.
* Arbitration (the loader first), the idle-only configuration write, the
  valid/ready handshakes, the one-element data path and the one-entry
  output register are not part of the scheme and were chosen for
  simplicity.

## What is outside this RTL

The NPU, the page table, the DRAM with its per-bank PIM units, and the rest
of the memory controller (command scheduling, bank timing, PHY) are not
included. The scheme uses them unchanged. The DRAM timing set it was
evaluated with (tCK = 1.25 ns, nCL = 20, nRCD = 15, nRPpb = 15, nRAS = 34,
nRC = 30, nCCD = 4, nWR = 28, nBL = 4) therefore appears nowhere in the
RTL. The top's ports are where those parts connect. The top-level testbench
contains a small behavioural stand-in for the DRAM and its PIM units.

## Files

| file                               | content                                      |
|------------------------------------|----------------------------------------------|
| `rtl/umdam_pkg.sv`                 | default sizes, width helpers, request-source enum |
| `rtl/umdam_addr_map.sv`            | physical-to-DRAM address translation         |
| `rtl/umdam_layout_agen.sv`         | weight-placement address generator           |
| `rtl/umdam_mc_frontend.sv`         | top: loader + NPU port + translation + channel steering |
| `tb/tb_umdam_addr_map.sv`          | random and directed field checks, all `Col_L` widths |
| `tb/tb_umdam_layout_agen.sv`       | address of every element, rate, back-pressure, column-in-one-bank |
| `tb/tb_umdam_mc_frontend.sv`       | end-to-end at default sizes                  |
| `tb/tb_umdam_opt_block.sv`         | workload: all weights of one OPT decoder block |

## Verification

Each testbench works out the expected values itself and prints
`TB_RESULT checks=<n> failures=<n>`. A watchdog ends a hung run as a
failure.

* `tb_umdam_addr_map`: 4000 random addresses at every `Col_L` width
  against a reference with fixed bit positions. It also checks a 256 B
  sequential stream (channel every 256 B, bank every 1 KiB), one fixed
  address, and the conventional map.
* `tb_umdam_layout_agen`: five matrices with different tile counts, bases
  and `Col_L` widths, with and without random back-pressure. The k-th
  element's address is rebuilt from k alone. The test also checks that every
  column stays in one bank, that the address range has no gaps, that N
  elements take N cycles, and that an empty matrix ends at once.
* `tb_umdam_mc_frontend`: end-to-end with all parameters at their
  defaults, in well under a second of simulation:
  1. Loads a 256 x 128 matrix while the NPU tries to write, which stalls
     it. Random per-channel back-pressure is applied throughout.
  2. The NPU streams one 16 KiB tile and checks every element and the
     63 channel changes.
  3. Each of the 64 bank-local PIM units computes its columns of y = Wᵀx
     from its own bank only. The result is compared with a direct product.
  4. The mapping is switched to the conventional map and back, with NPU
     writes and reads. A configuration write during the load is refused.
  The test counts each of these events and fails if one never happened.
* `tb_umdam_opt_block`: a workload test at default sizes. It places the
  six weight matrices of one OPT-125M decoder block (four 768 x 768
  attention projections, 768 x 3072 and 3072 x 768 feed-forward). That is
  7,077,888 FP16 weights in 864 tiles, placed back to back. The checks:
  * each matrix loads at exactly one weight per cycle;
  * every write, seen from its DRAM address alone by the bank's PIM model,
    carries the right weight;
  * the 6,912 bank-local GEMV results are all correct;
  * the NPU streams the last tile of every matrix correctly, changing
    channel every 256 B.
  It runs in about 6 s. Setting its `D` to 2048 gives an OPT-1.3B block
  (50.3 M weights, 6,144 tiles), which also passes, in about 50 s.

For each block, a copy broken in one way was run against its testbench to
confirm that the testbench fails:
* `umdam_addr_map` with Bank and Channel swapped;
* `umdam_layout_agen` with tiles numbered row-major;
* `umdam_mc_frontend` taking configuration writes while busy.

To simulate with Verilator (from the directory holding `rtl/` and `tb/`):

    verilator --binary --timing --assert -Wno-fatal -y rtl rtl/umdam_pkg.sv \
        tb/tb_umdam_mc_frontend.sv --top-module tb_umdam_mc_frontend
    ./obj_dir/Vtb_umdam_mc_frontend

Use the same command with `tb_umdam_addr_map` or `tb_umdam_layout_agen` for
the block tests. For lint only: `verilator --lint-only -Wall -y rtl
rtl/umdam_pkg.sv rtl/umdam_mc_frontend.sv`. The lint warnings left are
intentional: the Col_M/Col_L observation outputs of the mapper are left open
in the top, and the package holds defaults that not every module uses.
