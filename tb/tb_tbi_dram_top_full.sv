// tb_tbi_dram_top_full: one complete block through the two-stage
// interleaver at its default size: 170 code words of 680 three-bit symbols
// per stage-1 block, 512-bit bursts, a triangle of side 5000 (12,502,500
// bursts) in the 5120 x 5120 mapped square, 16 banks, 8 x 16 burst pages.
//
// Symbol n of the input stream (code word n / CW_LEN, position n % CW_LEN)
// is a hash of n, so any burst can be recomputed instead of stored. The
// DRAM side is modelled here: each write is checked (address against the
// reference walk and mapping, data against the recomputed burst) and only
// the burst's row-wise rank is kept per DRAM address; a read is checked for
// address and for returning the rank of the position it asks for, and
// answers with the recomputed burst after a fixed latency. Every output
// burst is compared with the read data and out_last with the block end.
// The DRAM takes a request in 15 of 16 cycles (random), so the run also
// checks that the design keeps close to one burst per cycle in both phases.
module tb_tbi_dram_top_full;
  import tbi_pkg::*;
  import tbi_ref_pkg::*;

  localparam int SYM_W = SYM_W_DEF, BW = BURST_W_DEF, LANES = BW / SYM_W, CW_LEN = 4 * LANES;
  localparam int N = TRI_N_DEF, DIM = DIM_DEF, NB = NUM_BANKS_DEF, PH = PAGE_H_DEF, PW = PAGE_W_DEF;
  localparam longint TRI = longint'(N) * (N + 1) / 2;
  localparam int ROWS = (DIM / NB / PH) * NB * (DIM / NB / PW);
  localparam int LAT = 6;

  logic clk = 0, rst_n = 0;
  logic in_valid = 0, in_ready;
  logic [LANES*SYM_W-1:0] in_data = '0;
  logic req_valid, req_ready = 0, req_we, out_valid, out_last;
  logic rsp_valid = 0;
  logic [3:0] req_bank;
  logic [13:0] req_row;
  logic [6:0] req_col;
  logic [BW-1:0] req_wdata, out_data, rsp_data = '0;
  phase_e phase;
  longint checks = 0, failures = 0;

  tbi_dram_top dut (
    .clk, .rst_n, .in_valid, .in_ready, .in_data,
    .dram_req_valid(req_valid), .dram_req_ready(req_ready), .dram_req_we(req_we),
    .dram_req_bank(req_bank), .dram_req_row(req_row), .dram_req_col(req_col),
    .dram_req_wdata(req_wdata), .dram_rsp_valid(rsp_valid), .dram_rsp_data(rsp_data),
    .out_valid, .out_data, .out_last, .phase);

  always #1 clk = ~clk;

  function automatic logic [SYM_W-1:0] symf(input longint unsigned n);
    longint unsigned h;
    h = (n + 1) * 64'h9E37_79B9_7F4A_7C15;
    return SYM_W'(h >> 61);
  endfunction

  // Burst m of the stage-1 output stream.
  function automatic logic [BW-1:0] burst(input longint m);
    logic [BW-1:0] w = '0;
    longint base = (m / CW_LEN) * LANES * CW_LEN + m % CW_LEN;
    for (int k = 0; k < LANES; k++) w[k*SYM_W +: SYM_W] = symf(base + longint'(k) * CW_LEN);
    return w;
  endfunction

  task automatic fail(input string s);
    failures++;
    if (failures < 20) $display("FAIL: %s", s);
  endtask

  int unsigned rank_at [];                  // burst rank per DRAM address
  logic [BW-1:0] pend_d [$];
  longint        pend_t [$];
  logic [BW-1:0] rsp_hist [$];              // read data not yet seen at out
  longint cyc = 0, in_words = 0, nwr = 0, nrd = 0, nout = 0;
  longint t_wr0 = -1, t_wr1 = 0, t_rd0 = -1, t_rd1 = 0;
  int wr_r = 0, wr_c = 0, rd_r = 0, rd_c = 0;

  initial begin
    repeat (80_000_000) @(posedge clk);
    fail("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) begin
    cyc++;
    if (rst_n) begin
      // input: next stage-1 input word when the previous one was taken
      if (in_valid && in_ready) in_words++;
      in_valid <= (in_words < TRI * 2);     // more than one block's worth
      for (int i = 0; i < LANES; i++)
        in_data[i*SYM_W +: SYM_W] <= symf(in_words * LANES + i);
      // DRAM requests
      if (req_valid && req_ready) begin
        int b, cl, rw;
        longint a;
        a = (longint'(req_bank) * ROWS + longint'(req_row)) * (PH * PW) + longint'(req_col);
        if (req_we && nwr >= TRI) begin
          // next block has started; this test covers one block
        end else if (req_we) begin
          if (t_wr0 < 0) t_wr0 = cyc;
          t_wr1 = cyc;
          ref_map(DIM, NB, PH, PW, wr_r, wr_c, b, cl, rw);
          checks++;
          if (int'(req_bank) != b || int'(req_col) != cl || int'(req_row) != rw)
            fail($sformatf("write %0d (%0d,%0d) wrong address", nwr, wr_r, wr_c));
          checks++;
          if (req_wdata != burst(nwr)) fail($sformatf("write %0d wrong data", nwr));
          rank_at[a] = int'(nwr);
          nwr++;
          if (wr_r + wr_c == N - 1) begin wr_r++; wr_c = 0; end else wr_c++;
        end else begin
          longint q;
          if (t_rd0 < 0) t_rd0 = cyc;
          t_rd1 = cyc;
          ref_map(DIM, NB, PH, PW, rd_r, rd_c, b, cl, rw);
          q = longint'(rd_r) * N - longint'(rd_r) * (rd_r - 1) / 2 + rd_c;
          checks++;
          if (int'(req_bank) != b || int'(req_col) != cl || int'(req_row) != rw || longint'(rank_at[a]) != q)
            fail($sformatf("read %0d (%0d,%0d) wrong address or data", nrd, rd_r, rd_c));
          pend_d.push_back(burst(longint'(rank_at[a])));
          pend_t.push_back(cyc + LAT);
          nrd++;
          if (rd_r + rd_c == N - 1) begin rd_c++; rd_r = 0; end else rd_r++;
        end
      end
      req_ready <= ($urandom_range(15) != 0);
      if (pend_t.size() > 0 && pend_t[0] <= cyc) begin
        rsp_valid <= 1'b1;
        rsp_data  <= pend_d[0];
        rsp_hist.push_back(pend_d[0]);
        void'(pend_t.pop_front());
        void'(pend_d.pop_front());
      end else begin
        rsp_valid <= 1'b0;
      end
      if (out_valid) begin
        checks++;
        if (rsp_hist.size() == 0 || out_data != rsp_hist[0] || out_last != (nout == TRI - 1))
          fail($sformatf("output %0d wrong", nout));
        if (rsp_hist.size() > 0) void'(rsp_hist.pop_front());
        nout++;
      end
    end
  end

  initial begin
    rank_at = new[NB * ROWS * PH * PW];
    repeat (4) @(posedge clk);
    rst_n <= 1;
    wait (nout == TRI);
    repeat (4) @(posedge clk);
    $display("write phase: %0d bursts in %0d cycles; read phase: %0d bursts in %0d cycles",
             nwr, t_wr1 - t_wr0 + 1, nrd, t_rd1 - t_rd0 + 1);
    checks++;
    if (nwr != TRI || nrd != TRI) fail("incomplete block");
    // 15/16 DRAM acceptance: each phase should take under 1.1 cycles per burst.
    checks++;
    if ((t_wr1 - t_wr0 + 1) * 10 > TRI * 11 || (t_rd1 - t_rd0 + 1) * 10 > TRI * 11)
      fail("a phase ran slower than 1.1 cycles per burst");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
