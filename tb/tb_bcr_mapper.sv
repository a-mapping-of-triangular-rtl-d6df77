// tb_bcr_mapper: self-checking test of the bank/column/row mapping.
//
// 1. The 5 x 5 corner of the example mapping (2 banks, 4-column pages of
//    2 x 2 bursts, 8 x 8 index space) is compared cell by cell with the two
//    printed example tables: without column offset and with it.
// 2. A mid-size DDR4-like configuration (16 banks, 8 x 16 pages, 512 x 512)
//    is swept completely: every position must land on a distinct address
//    inside the DRAM, the bank must be (r + c) mod 16, and the address must
//    match a reference model written here with integer arithmetic.
// 3. The default-size mapper is checked on random positions against the
//    same reference model.
// 4. A configuration with more banks than the local side L (32 banks,
//    8 x 8 pages, 256 x 256, so L = 8 and the offset wraps) is swept
//    completely against the reference model and for distinct addresses.
module tb_bcr_mapper;

  int checks = 0, failures = 0;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL: %s", what);
    end
  endtask

  // Reference model: bank, column, row of position (r, c).
  function automatic void ref_map(input int dim, input int nb, input int ph, input int pw,
                                  input bit ofs_en, input int r, input int c,
                                  output int bank, output int col, output int row);
    int l, rl, cl, o, p;
    l    = dim / nb;
    bank = (r + c) % nb;
    p    = r % nb;
    o    = ofs_en ? bank : 0;
    rl   = (r / nb + o) % l;
    cl   = (c / nb + o) % l;
    col  = (rl % ph) * pw + (cl % pw);
    row  = ((rl / ph) * nb + p) * (l / pw) + (cl / pw);
  endfunction

  // ---------------- 1. example tables ----------------
  logic [2:0] ex_r, ex_c;
  logic [0:0] ex3_b, ex4_b;
  logic [1:0] ex3_col, ex4_col;
  logic [2:0] ex3_row, ex4_row;

  bcr_mapper #(.DIM(8), .NUM_BANKS(2), .PAGE_H(2), .PAGE_W(2), .COL_OFFSET_EN(1'b0)) u_ex3 (
    .idx_row(ex_r), .idx_col(ex_c), .bank(ex3_b), .col(ex3_col), .row(ex3_row));
  bcr_mapper #(.DIM(8), .NUM_BANKS(2), .PAGE_H(2), .PAGE_W(2), .COL_OFFSET_EN(1'b1)) u_ex4 (
    .idx_row(ex_r), .idx_col(ex_c), .bank(ex4_b), .col(ex4_col), .row(ex4_row));

  // Each cell as bank*100 + column*10 + row, rows of the printed tables.
  int fig_bcr [5][5] = '{
    '{  0, 100,  10, 110,   1},
    '{102,   2, 112,  12, 103},
    '{ 20, 120,  30, 130,  21},
    '{122,  22, 132,  32, 123},
    '{  4, 104,  14, 114,   5}};
  int fig_ofs [5][5] = '{
    '{  0, 130,  10, 121,   1},
    '{132,   2, 123,  12, 133},
    '{ 20, 114,  30, 105,  21},
    '{116,  22, 107,  32, 117},
    '{  4, 134,  14, 125,   5}};

  // ---------------- 2. mid-size sweep ----------------
  localparam int MD = 512, MNB = 16, MPH = 8, MPW = 16;
  localparam int M_ROWS = (MD / MNB / MPH) * MNB * (MD / MNB / MPW);
  logic [8:0] m_r, m_c;
  logic [3:0] m_b;
  logic [6:0] m_col;
  logic [$clog2(M_ROWS)-1:0] m_row;
  bcr_mapper #(.DIM(MD), .NUM_BANKS(MNB), .PAGE_H(MPH), .PAGE_W(MPW)) u_mid (
    .idx_row(m_r), .idx_col(m_c), .bank(m_b), .col(m_col), .row(m_row));
  bit used [MNB * M_ROWS * MPH * MPW];

  // ---------------- 3. default size ----------------
  localparam int DD = tbi_pkg::DIM_DEF;
  localparam int D_ROWS = (DD / 16 / 8) * 16 * (DD / 16 / 16);
  logic [12:0] d_r, d_c;
  logic [3:0]  d_b;
  logic [6:0]  d_col;
  logic [$clog2(D_ROWS)-1:0] d_row;
  bcr_mapper u_def (.idx_row(d_r), .idx_col(d_c), .bank(d_b), .col(d_col), .row(d_row));

  // ---------------- 4. more banks than L ----------------
  localparam int WD = 256, WNB = 32, WPH = 8, WPW = 8;
  localparam int W_ROWS = (WD / WNB / WPH) * WNB * (WD / WNB / WPW);
  logic [7:0] w_r, w_c;
  logic [4:0] w_b;
  logic [5:0] w_col;
  logic [$clog2(W_ROWS)-1:0] w_row;
  bcr_mapper #(.DIM(WD), .NUM_BANKS(WNB), .PAGE_H(WPH), .PAGE_W(WPW)) u_wrap (
    .idx_row(w_r), .idx_col(w_c), .bank(w_b), .col(w_col), .row(w_row));
  bit w_used [WNB * W_ROWS * WPH * WPW];

  initial begin
    #1_000_000_000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int b, cl, rw, prev_b, dup;
    // 1. example tables
    for (int r = 0; r < 5; r++)
      for (int c = 0; c < 5; c++) begin
        ex_r = 3'(r); ex_c = 3'(c);
        #1;
        check(int'(ex3_b) * 100 + int'(ex3_col) * 10 + int'(ex3_row) == fig_bcr[r][c],
              $sformatf("no-offset table (%0d,%0d): got B%0d C%0d R%0d", r, c, ex3_b, ex3_col, ex3_row));
        check(int'(ex4_b) * 100 + int'(ex4_col) * 10 + int'(ex4_row) == fig_ofs[r][c],
              $sformatf("offset table (%0d,%0d): got B%0d C%0d R%0d", r, c, ex4_b, ex4_col, ex4_row));
      end
    // 2. mid-size sweep, row-wise order
    dup = 0;
    foreach (used[i]) used[i] = 1'b0;
    for (int r = 0; r < MD; r++) begin
      prev_b = -1;
      for (int c = 0; c < MD; c++) begin
        m_r = 9'(r); m_c = 9'(c);
        #1;
        ref_map(MD, MNB, MPH, MPW, 1'b1, r, c, b, cl, rw);
        if (int'(m_b) != b || int'(m_col) != cl || int'(m_row) != rw || int'(m_row) >= M_ROWS) begin
          check(1'b0, $sformatf("mid (%0d,%0d): got B%0d C%0d R%0d want B%0d C%0d R%0d",
                                r, c, m_b, m_col, m_row, b, cl, rw));
        end
        if (c > 0 && int'(m_b) == prev_b) check(1'b0, "bank not switched along a row");
        prev_b = int'(m_b);
        if (used[(int'(m_b) * M_ROWS + int'(m_row)) * (MPH * MPW) + int'(m_col)]) dup++;
        used[(int'(m_b) * M_ROWS + int'(m_row)) * (MPH * MPW) + int'(m_col)] = 1'b1;
      end
      checks++;  // one check per swept row
    end
    check(dup == 0, $sformatf("mid sweep: %0d positions share an address", dup));
    // bank switching along a column
    for (int c = 0; c < MD; c += 37) begin
      prev_b = -1;
      for (int r = 0; r < MD; r++) begin
        m_r = 9'(r); m_c = 9'(c);
        #1;
        if (r > 0 && int'(m_b) == prev_b) check(1'b0, "bank not switched along a column");
        prev_b = int'(m_b);
      end
      checks++;
    end
    // 3. default size, random positions
    for (int k = 0; k < 20000; k++) begin
      int r, c;
      r = int'($urandom_range(DD - 1));
      c = int'($urandom_range(DD - 1));
      d_r = 13'(r); d_c = 13'(c);
      #1;
      ref_map(DD, 16, 8, 16, 1'b1, r, c, b, cl, rw);
      check(int'(d_b) == b && int'(d_col) == cl && int'(d_row) == rw && int'(d_row) < D_ROWS,
            $sformatf("default (%0d,%0d): got B%0d C%0d R%0d want B%0d C%0d R%0d",
                      r, c, d_b, d_col, d_row, b, cl, rw));
    end
    // 4. more banks than L, full sweep
    dup = 0;
    foreach (w_used[i]) w_used[i] = 1'b0;
    for (int r = 0; r < WD; r++) begin
      for (int c = 0; c < WD; c++) begin
        w_r = 8'(r); w_c = 8'(c);
        #1;
        ref_map(WD, WNB, WPH, WPW, 1'b1, r, c, b, cl, rw);
        if (int'(w_b) != b || int'(w_col) != cl || int'(w_row) != rw || int'(w_row) >= W_ROWS) begin
          check(1'b0, $sformatf("wrap (%0d,%0d): got B%0d C%0d R%0d want B%0d C%0d R%0d",
                                r, c, w_b, w_col, w_row, b, cl, rw));
        end
        if (w_used[(int'(w_b) * W_ROWS + int'(w_row)) * (WPH * WPW) + int'(w_col)]) dup++;
        w_used[(int'(w_b) * W_ROWS + int'(w_row)) * (WPH * WPW) + int'(w_col)] = 1'b1;
      end
      checks++;  // one check per swept row
    end
    check(dup == 0, $sformatf("wrap sweep: %0d positions share an address", dup));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
