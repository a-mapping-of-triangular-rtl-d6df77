// bcr_mapper: optimized mapping of one position of the interleaver index
// space to a DRAM address (bank, column, row).
//
// The index space is a DIM x DIM square; position (r, c) is one DRAM burst.
// Three rules are combined, in this order:
//  1. Bank rotation: bank = (r + c) mod NUM_BANKS, so the bank (and with the
//     low bank bits being the bank group, the bank group) changes with every
//     access, both along a row and along a column (diagonal pattern).
//  2. Rectangular pages: inside one bank the positions form NUM_BANKS
//     interleaved sub-grids ("phases", p = r mod NUM_BANKS) of side
//     L = DIM/NUM_BANKS, with local coordinates r' = r div NUM_BANKS and
//     c' = c div NUM_BANKS. Each sub-grid is cut into PAGE_H x PAGE_W
//     rectangles; one rectangle is one DRAM page (row), and the column inside
//     the page is (r' mod PAGE_H)*PAGE_W + (c' mod PAGE_W). Page misses are
//     thus split evenly between row-wise and column-wise access.
//  3. Column offset: when COL_OFFSET_EN is set, the local coordinates of a
//     position in bank b are shifted circularly by b in both directions,
//     r' -> (r' + b) mod L, c' -> (c' + b) mod L, which staggers the page
//     misses of different banks.
// DRAM row = ((r' div PAGE_H) * NUM_BANKS + p) * (L/PAGE_W) + (c' div PAGE_W).
//
// The paper shows these rules only by example (2 banks, 4-column pages,
// an 8 x 8 index space) and states that the real rules use only additions,
// shifts and bitwise operations; the closed form above is this design's
// reading of those examples and reproduces them position by position. The
// paper's storage-saving variant for the triangle (fewer DRAM rows towards
// the bottom) is not given and not built: the whole square is mapped.
//
// Interface: purely combinational, no clock. NUM_BANKS, PAGE_H and PAGE_W
// must be powers of two and DIM a multiple of NUM_BANKS*PAGE_H and of
// NUM_BANKS*PAGE_W. The multiplication by the constant L/PAGE_W is a
// constant multiply (shifts and adds).
module bcr_mapper #(
  parameter int unsigned DIM           = tbi_pkg::DIM_DEF,
  parameter int unsigned NUM_BANKS     = tbi_pkg::NUM_BANKS_DEF,
  parameter int unsigned PAGE_H        = tbi_pkg::PAGE_H_DEF,
  parameter int unsigned PAGE_W        = tbi_pkg::PAGE_W_DEF,
  parameter bit          COL_OFFSET_EN = 1'b1,
  localparam int unsigned IDX_W  = $clog2(DIM),
  localparam int unsigned BANK_W = (NUM_BANKS > 1) ? $clog2(NUM_BANKS) : 1,
  localparam int unsigned COL_W  = (PAGE_H * PAGE_W > 1) ? $clog2(PAGE_H * PAGE_W) : 1,
  localparam int unsigned LOC    = DIM / NUM_BANKS,
  localparam int unsigned NPC    = LOC / PAGE_W,
  localparam int unsigned ROWS   = (LOC / PAGE_H) * NUM_BANKS * NPC,
  localparam int unsigned ROW_W  = (ROWS > 1) ? $clog2(ROWS) : 1
) (
  input  logic [IDX_W-1:0]  idx_row,   // r, 0 .. DIM-1
  input  logic [IDX_W-1:0]  idx_col,   // c, 0 .. DIM-1
  output logic [BANK_W-1:0] bank,
  output logic [COL_W-1:0]  col,
  output logic [ROW_W-1:0]  row
);

  localparam int unsigned SB   = $clog2(NUM_BANKS);  // bank shift
  localparam int unsigned SH   = $clog2(PAGE_H);
  localparam int unsigned SW   = $clog2(PAGE_W);
  localparam int unsigned LW   = IDX_W + 1;          // local coordinate + carry
  localparam int unsigned RW   = (ROW_W > LW) ? ROW_W : LW;
  // The offset is the bank number modulo L; a reduction is only needed when
  // there are more banks than the local side L (otherwise OFS_MOD is the
  // bank count and the modulo is the identity).
  localparam int unsigned OFS_MOD = (NUM_BANKS > LOC) ? LOC : NUM_BANKS;

  if (NUM_BANKS != (1 << SB) || PAGE_H != (1 << SH) || PAGE_W != (1 << SW)) begin : gen_chk_pow2
    $error("bcr_mapper: NUM_BANKS, PAGE_H and PAGE_W must be powers of two");
  end
  if ((DIM % (NUM_BANKS * PAGE_H)) != 0 || (DIM % (NUM_BANKS * PAGE_W)) != 0) begin : gen_chk_dim
    $error("bcr_mapper: DIM must be a multiple of NUM_BANKS*PAGE_H and NUM_BANKS*PAGE_W");
  end

  logic [IDX_W-1:0] rc_sum;
  logic [LW-1:0]    r_loc, c_loc, ofs, r_sh, c_sh;
  logic [LW-1:0]    phase;
  logic [LW-1:0]    page_r, page_c;

  // Circular add inside the local side L: a + b with a, b < L.
  function automatic logic [LW-1:0] add_mod_l(input logic [LW-1:0] a, input logic [LW-1:0] b);
    logic [LW-1:0] s;
    s = a + b;
    if (s >= LW'(LOC)) s = s - LW'(LOC);
    return s;
  endfunction

  always_comb begin
    rc_sum = idx_row + idx_col;                       // modulo 2^IDX_W, low bits kept
    bank   = BANK_W'(rc_sum & IDX_W'(NUM_BANKS - 1));
    phase  = LW'(idx_row & IDX_W'(NUM_BANKS - 1));
    r_loc  = LW'(idx_row >> SB);
    c_loc  = LW'(idx_col >> SB);
    ofs    = COL_OFFSET_EN ? LW'(bank) % LW'(OFS_MOD) : '0;
    r_sh   = add_mod_l(r_loc, ofs);
    c_sh   = add_mod_l(c_loc, ofs);
    col    = COL_W'(((r_sh & LW'(PAGE_H - 1)) << SW) | (c_sh & LW'(PAGE_W - 1)));
    page_r = r_sh >> SH;
    page_c = c_sh >> SW;
    row    = ROW_W'(((RW'(page_r) << SB) + RW'(phase)) * RW'(NPC) + RW'(page_c));
  end

endmodule
