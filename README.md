# Triangular block interleaver in DRAM with a bank-, page- and offset-aware mapping

Optical downlinks from low-earth-orbit satellites see fades that last
milliseconds. To correct them at rates beyond 100 Gbit/s, the receiver needs
an interleaver holding millions of code-word symbols, far more than on-chip
SRAM can hold, so the interleaver array lives in external DRAM. A triangular
block interleaver writes its array row by row and reads it column by column.
If the array is placed in DRAM row-major, as an SRAM implementation would
place it, the writes stream through pages but almost every column-wise read
opens a new page. That read phase can then fall below half of the DRAM's peak
bandwidth.

This RTL implements the alternative: a mapping from index-space position
(row, column) to DRAM (bank, column, row) that treats both directions alike.
It is built from three rules:

1. **Bank rotation.** The bank advances by one with every step along a row
   *and* along a column. The low bank bits are taken to be the bank group, so
   consecutive bursts always go to a different bank group. DDR4, DDR5, LPDDR5
   and HBM need this for full bandwidth.
2. **Square-ish pages.** Inside a bank, the positions are grouped into small
   rectangles of PAGE_H x PAGE_W bursts, one rectangle per DRAM page. A
   row-wise walk then meets a page miss every PAGE_W bursts of a bank, and a
   column-wise walk every PAGE_H bursts.
3. **Staggered misses.** Each bank's part of the index space is shifted
   circularly by an offset that depends on the bank. The page misses of
   different banks therefore fall at different times, and the controller can
   hide one bank's activate behind hits on the others.

The mapping needs only shifts, masks, a compare-and-subtract and one
multiply by a constant. That makes it cheap enough to sit in the address path
of the interleaver controller.

## Structure

```
 symbols      +------------------------+  bursts  +------------------------------------+  requests
 -(170x3 b)-->| sram_block_interleaver |--------->| tbi_controller                     |-----------> memory
  valid/ready | LANES code words x     | 512 b    |  tbi_index_gen -> bcr_mapper ->    |  bank/row/  controller
              | CW_LEN, ping-pong      |          |  request register                  |  col/data   + DRAM
              +------------------------+          |  read data -> out                  |<----------- (external)
                                                  +------------------------------------+  read data
                                tbi_dram_top                          | out (bursts, column-wise order)
```

* `rtl/tbi_pkg.sv` holds the shared types (`scan_e`, `phase_e`) and the
  default sizes.
* `rtl/sram_block_interleaver.sv` is stage 1. A DRAM burst (512 bits) holds
  far more than one 3-bit symbol. This small block interleaver makes sure the
  170 symbols of each burst come from 170 different code words. It is
  described in its own section below.
* `rtl/tbi_index_gen.sv` walks the triangle `r + c <= N-1`, row-wise for
  writing and column-wise for reading, one position per cycle.
* `rtl/bcr_mapper.sv` is the mapping (combinational).
* `rtl/tbi_controller.sv` sequences the phases and owns the DRAM request
  port.
* `rtl/tbi_dram_top.sv` connects stage 1 to the controller. Its ports to the
  memory controller are plain signals.

The memory controller and the DRAM are not part of the RTL. Any
JEDEC controller that accepts (bank, row, column) burst requests and returns
read data in order will do.

## The mapping in detail

Let the index space be a DIM x DIM square, one DRAM burst per position, with
NB banks and pages of PAGE_H x PAGE_W bursts. For position (r, c):

```
bank   b  = (r + c) mod NB
phase  p  = r mod NB                      -- which of NB interleaved sub-grids
local  r' = r div NB,  c' = c div NB      -- coordinates inside the sub-grid, 0..L-1, L = DIM/NB
offset     r'' = (r' + b) mod L,  c'' = (c' + b) mod L
column     = (r'' mod PAGE_H) * PAGE_W + (c'' mod PAGE_W)
row        = ((r'' div PAGE_H) * NB + p) * (L / PAGE_W) + (c'' div PAGE_W)
```

Within one row r, bank b holds every NB-th position. Within one column it
likewise holds every NB-th position. For fixed b, the row phase p picks out
one of NB disjoint sub-grids of size L x L. The sub-grid is tiled into pages.
Pages are numbered first by page row, then by phase, then by page column.
Adding the offset b to both local coordinates keeps the bank and the phase of
every position. It only moves where bank b's page boundaries fall relative to
the other banks.

Worked example: 2 banks, 2 x 2 pages (4 columns), an 8 x 8 index space, with
the offset. Each cell is bank/column/row.

```
      c=0    c=1    c=2    c=3    c=4    c=5    c=6    c=7
r=0  B0C0R0 B1C3R0 B0C1R0 B1C2R1 B0C0R1 B1C3R1 B0C1R1 B1C2R0
r=1  B1C3R2 B0C0R2 B1C2R3 B0C1R2 B1C3R3 B0C0R3 B1C2R2 B0C1R3
r=2  B0C2R0 B1C1R4 B0C3R0 B1C0R5 B0C2R1 B1C1R5 B0C3R1 B1C0R4
r=3  B1C1R6 B0C2R2 B1C0R7 B0C3R2 B1C1R7 B0C2R3 B1C0R6 B0C3R3
r=4  B0C0R4 B1C3R4 B0C1R4 B1C2R5 B0C0R5 B1C3R5 B0C1R5 B1C2R4
...
```

Walk row 0. Bank 0 first misses at its third access (c = 4). Bank 1 first
misses at its second access (c = 3), one access earlier. This is the
staggering. Bank 1's entries in column 7 and row 6 are the ones that wrapped
around. Without the offset (`COL_OFFSET_EN = 0`), row 0 would read
`B0C0R0 B1C0R0 B0C1R0 B1C1R0 B0C0R1 ...`, and both banks would miss at the
same time.

The published description of this mapping gives the three rules and a
printed example for 2 banks and 4-column pages, but not the general
formulas. The formulas above reproduce every cell of that example exactly.
They go beyond it in three choices. The offset of bank b is b local steps for
any number of banks. The wrap-around is modulo the sub-grid side L. Row
numbering follows the order given above. These choices are this
implementation's. For more than two banks, check them against your own DRAM
simulation before you rely on them.

## Triangle walk and phases

The triangle has side TRI_N. Row r holds TRI_N - r positions, so a block has
TRI_N(TRI_N+1)/2 positions. `tbi_controller` runs through these phases:

| phase        | what happens |
|--------------|--------------|
| `PH_START_W` | restart the walker in row-wise mode (1 cycle) |
| `PH_WRITE`   | each accepted stage-1 burst is written to the mapped address of the next row-wise position |
| `PH_START_R` | restart the walker in column-wise mode (1 cycle) |
| `PH_READ`    | one read request per cycle, in column-wise order; input is held off |
| `PH_DRAIN`   | all reads issued; wait for the last read data, then start the next block |

Read data must come back in request order. It is passed to `out_*` one cycle
later, so the output stream is the block in column-wise order, and `out_last`
marks its final burst. The controller uses a single block buffer in DRAM: the
next block is written only after the previous one has been read completely.
Stage 1 keeps accepting symbols until both of its buffers are full.

Handshakes: `in_*`, stage 1's output, and `req_*` are valid/ready. A request
stays stable while `req_valid` is high and `req_ready` is low (an assertion
checks this). `rsp_*` and `out_*` have no back-pressure.

Throughput: stage 1 takes one 170-symbol word per cycle and delivers one
burst per cycle. The controller issues one burst request per cycle when the
memory controller does not stall. Both phases of a block therefore take
about TRI_N(TRI_N+1)/2 cycles plus the stalls. At 3 bits per symbol and a
clock f, the input rate is 510 f bit/s, e.g. 102 Gbit/s at 200 MHz. Whether
the DRAM sustains one burst per cycle in both phases is what the mapping is
for.

## Stage 1: a transpose at full rate

Stage 1 receives code words back to back, 170 consecutive symbols of one
code word per cycle. It must emit, also once per cycle, a burst holding
symbol j of each of 170 code words. Taken over a block of 170 code words,
this is a matrix transpose. A single wide memory cannot do it: one input
word would have to go to 170 different output words.

The storage is therefore 170 banks, each one symbol wide and 2*CW_LEN deep
(two ping-pong buffers). Input word t of code word k holds symbols
t*170 + i. It is rotated by k lanes before writing, so symbol i lands in
bank (i + k) mod 170, at address (buffer, t, k). To produce output word
t*170 + i, bank m reads address (buffer, t, (m - i) mod 170). That location
holds symbol i of code word (m - i) mod 170. Rotating the read word back by
i lanes puts code word k on lane k. Each bank is written once and read once
per cycle, so both sides run at one word per cycle. The read path has two
register stages (bank output, then rotated output), and a block's first
output word appears two cycles after the block is complete. The rotators
are word rotations by a multiple of the symbol width, i.e. barrel shifters.

## Parameters and sizes

| parameter | default | meaning / origin |
|-----------|---------|------------------|
| `SYM_W` | 3 | symbol width, from the design's example |
| `BURST_W` | 512 | DRAM burst, from the design's example (64-bit channel, BL8) |
| `LANES` | 170 | code words per burst = floor(512/3); bits 510..511 are zero |
| `CW_LEN` | 680 | code word length in symbols, a multiple of LANES (own choice; no code is fixed) |
| `TRI_N` | 5000 | triangle side; 12,502,500 positions for a 12.5 M-element interleaver |
| `DIM` | 5120 | mapped square: TRI_N rounded up to a multiple of NB*max(PAGE_H,PAGE_W) |
| `NUM_BANKS` | 16 | DDR4: 4 bank groups x 4 banks (own choice of target) |
| `PAGE_H`, `PAGE_W` | 8, 16 | 128 bursts per page (DDR4, 64-bit rank, BL8) |
| `COL_OFFSET_EN` | 1 | the bank-dependent offset (rule 3) |

The constraints are: NUM_BANKS, PAGE_H and PAGE_W are powers of two; DIM is
a multiple of NUM_BANKS*PAGE_H and of NUM_BANKS*PAGE_W; TRI_N <= DIM.
Elaboration stops with an error otherwise. At the defaults the ports are
4 bank bits, 7 column bits and 14 row bits (12,800 rows per bank). The whole
square takes 1.68 GB. A 64-bit DDR4 rank of 8 Gb x8 devices has 65,536 rows
per bank, so the square fits easily.

Other DRAM families need other values. DDR3 needs NUM_BANKS = 8. DDR5
sub-channels have 64-burst pages, so they need PAGE_H = PAGE_W = 8. LPDDR4
needs BURST_W = 256, 8 banks and 64-burst pages. The mapping itself does not
change.

## Where this departs from the published design

* **Storage for the triangle.** The RTL maps the whole DIM x DIM square, so
  about half of the mapped DRAM is never used. The published design stores
  the triangle more compactly: it uses fewer DRAM rows towards the bottom of
  the index space. That placement is not described in enough detail to
  implement.
* **General mapping formulas.** They are derived from a two-bank example; see
  the caveat above.
* **Stage 1.** Only its purpose is given. The organisation (a block of 170
  code words, ping-pong buffers, skewed banks, one word per cycle) is this
  design's own.
* **Control.** The single block buffer, the drain phase and the request and
  read-data interfaces are this design's own choices.
* **Bandwidth.** The published results are DRAM bandwidth utilisations from
  a cycle-accurate DRAM simulator: over 90 % in both phases for ten DDR3/4/5
  and LPDDR4/5 configurations. The remaining few per cent are lost to
  refresh. This RTL generates the address stream those figures rest on. It
  does not reproduce the figures themselves.
* **Reset.** Reset is synchronous and active low. The symbol memory is not
  reset, because every word is written before it is read.

## Verification

Each testbench in `tb/` checks its block and prints
`TB_RESULT checks=N failures=M`:

| testbench | what it checks |
|-----------|----------------|
| `tb_bcr_mapper` | every cell of the two-bank example, with and without the offset; a full sweep of a 512 x 512 space with 16 banks and 8 x 16 pages (no two positions share an address, the bank changes along every row and column, every address matches an integer reference model); 20,000 random positions at the default size; a full sweep of a 256 x 256 space with 32 banks and 8 x 8 pages, where there are more banks than the local side L = 8 and the offset wraps |
| `tb_tbi_index_gen` | both walk orders against nested loops, with and without stalls, and one position per cycle |
| `tb_sram_block_interleaver` | three blocks with random gaps and stalls against the expected transposition; two blocks taken at one word per cycle, then input held off when both buffers are full; one output word per cycle when nothing stalls |
| `tb_tbi_controller` | three blocks at the two-bank example size: every request (address, direction, data) and every output burst against the reference walk and mapping; the drain phase and DRAM stalls are seen |
| `tb_workloads` | one block for each of four DRAM organisations, run side by side by `workload_run`, with a triangle of side 500 in 512 x 512: data, addresses, the bank changing within every line, and page-miss rates in both phases against a row-major placement of the same array |
| `tb_tbi_dram_top_full` | one complete block at the top's default parameters (triangle of side 5000, 12,502,500 bursts of 512 bits): every write's address and data, every read's address, every output, and under 1.1 cycles per burst in each phase with the DRAM accepting 15 of 16 requests. The DRAM side keeps only a 32-bit rank per address and recomputes burst contents from a hash of the symbol index |
| `tb_tbi_dram_top` | the whole two-stage path: 8 code words x 16 symbols per stage-1 block, 24-bit bursts, triangle of side 30 in a 32 x 32 space, 4 banks, 2 x 4 pages, three DRAM blocks. Requests and outputs are checked against a reference permutation of the input symbols. It counts, and requires at least once: bank switches, page misses in each phase, offset wrap-arounds, DRAM back-pressure, input held off during reading, drain, and both phase changes |

`tb/dram_model.sv` is a behavioural memory controller plus DRAM. It stores
bursts in an associative array and returns reads in order after a fixed
latency. It drops `req_ready` at random, and it counts page hits and misses
with one open row per bank. `tb/tbi_ref_pkg.sv` holds the reference
functions.

`tb_workloads` prints page-miss rates for four organisations, with one open
row per bank. The bank counts and page sizes are those of common parts of
each DRAM family:

| organisation | banks | page (bursts) | optimized write / read | row-major write / read |
|--------------|-------|---------------|------------------------|------------------------|
| DDR4 (default) | 16 | 8 x 16 | 12.1 % / 18.0 % | 1.0 % / 99.99 % |
| DDR3 | 8 | 8 x 16 | 8.4 % / 15.3 % | 1.0 % / 100 % |
| DDR5 | 32 | 8 x 8 | 23.3 % / 23.3 % | 1.8 % / 99.99 % |
| LPDDR4 | 8 | 8 x 8 | 15.3 % / 15.3 % | 1.8 % / 100 % |

The DDR5 case has more banks than the local side L = 512/32 = 16 allows
offsets for, so the offset is the bank number modulo L. At this small size
the lines are short (16 to 64 bursts per bank per line), so a line change
costs a miss of its own. Longer lines bring the two rates towards 1/PAGE_W
and 1/PAGE_H. These are page-miss counts, not bandwidth: timing, refresh and
bank-group constraints need a real DRAM model.

To run a testbench with Verilator (from the directory that holds `rtl/` and
`tb/`):

```
verilator --binary --timing --assert -Wno-fatal --top-module tb_tbi_dram_top \
    -y rtl -y tb rtl/tbi_pkg.sv tb/tbi_ref_pkg.sv tb/tb_tbi_dram_top.sv
./obj_dir/Vtb_tbi_dram_top
```

The other testbenches run the same way with their own name as the top module.
`tb_tbi_dram_top_full` simulates about 27 M cycles. It takes about a minute
and a half and uses about 110 MB.
`tb_bcr_mapper`, `tb_tbi_index_gen` and `tb_sram_block_interleaver` do not
need `tb/tbi_ref_pkg.sv`, but it does no harm.
