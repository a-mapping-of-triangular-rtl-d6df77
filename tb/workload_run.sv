// workload_run: runs one complete interleaver block through tbi_dram_top
// for one DRAM organisation (NB banks, PH x PW burst pages) with a triangle
// of side N in a DIM x DIM index space, against the behavioural DRAM model.
// Stage 1 is kept narrow (4 code words of 16 symbols, 12-bit bursts) so that
// the run is short; the DRAM address stream does not depend on it. Input
// and DRAM run at full rate apart from random DRAM back-pressure.
//
// It checks every request address and every output burst against the
// reference walk, mapping and permutation, and then compares page
// behaviour, counted by the DRAM model with one open row per bank, with a
// row-major placement of the same array (address = r*DIM + c, PH*PW bursts
// per page, pages spread over the banks) evaluated here on the same two
// walks. Required: no two consecutive requests in one line hit the same
// bank, the page-miss rate of both phases stays below 2/PH, and the read
// phase misses at least three times less often than under row-major
// placement. 'done' rises when the block is through; checks and failures
// are then final.
module workload_run #(
  parameter string NAME = "DDR4",
  parameter int N = 500, DIM = 512, NB = 16, PH = 8, PW = 16
) (
  input  logic clk,
  output logic done,
  output int   checks,
  output int   failures
);
  import tbi_pkg::*;
  import tbi_ref_pkg::*;

  localparam int SYM_W = 3, LANES = 4, BW = 12, CW_LEN = 16;
  localparam int TRI = N * (N + 1) / 2;
  localparam int BANK_W = $clog2(NB), COL_W = $clog2(PH * PW);
  localparam int ROW_W = $clog2((DIM / NB / PH) * NB * (DIM / NB / PW));

  logic rst_n = 0;
  logic in_valid = 0, in_ready;
  logic [LANES*SYM_W-1:0] in_data = '0;
  logic req_valid, req_ready, req_we, rsp_valid, out_valid, out_last;
  logic [BANK_W-1:0] req_bank;
  logic [ROW_W-1:0] req_row;
  logic [COL_W-1:0] req_col;
  logic [BW-1:0] req_wdata, rsp_data, out_data;
  phase_e phase;

  tbi_dram_top #(
    .SYM_W(SYM_W), .BURST_W(BW), .LANES(LANES), .CW_LEN(CW_LEN),
    .TRI_N(N), .DIM(DIM), .NUM_BANKS(NB), .PAGE_H(PH), .PAGE_W(PW)
  ) dut (
    .clk, .rst_n, .in_valid, .in_ready, .in_data,
    .dram_req_valid(req_valid), .dram_req_ready(req_ready), .dram_req_we(req_we),
    .dram_req_bank(req_bank), .dram_req_row(req_row), .dram_req_col(req_col),
    .dram_req_wdata(req_wdata), .dram_rsp_valid(rsp_valid), .dram_rsp_data(rsp_data),
    .out_valid, .out_data, .out_last, .phase);

  dram_model #(.BANK_W(BANK_W), .ROW_W(ROW_W), .COL_W(COL_W), .BURST_W(BW), .LATENCY(20), .STALL_PCT(10)) u_dram (
    .clk, .rst_n, .req_valid, .req_ready, .req_we, .req_bank, .req_row, .req_col, .req_wdata,
    .rsp_valid, .rsp_data);


  logic [SYM_W-1:0] syms [$];
  int nreq = 0, nout = 0, prev_bank = -1, same_bank = 0;

  function automatic logic [BW-1:0] burst(input int m);
    logic [BW-1:0] w = '0;
    for (int k = 0; k < LANES; k++)
      w[k*SYM_W +: SYM_W] = syms[((m / CW_LEN) * LANES + k) * CW_LEN + m % CW_LEN];
    return w;
  endfunction

  // Page misses of a row-major placement on one walk of the triangle.
  function automatic int row_major_misses(input bit col_wise);
    int open [NB];
    int miss = 0;
    foreach (open[b]) open[b] = -1;
    for (int k = 0; k < TRI; k++) begin
      int r, c, a, b, rw;
      tri_pos(N, col_wise, k, r, c);
      a  = r * DIM + c;
      b  = (a / (PH * PW)) % NB;
      rw = a / (PH * PW * NB);
      if (open[b] != rw) begin miss++; open[b] = rw; end
    end
    return miss;
  endfunction

  task automatic fail(input string s);
    failures++;
    if (failures < 20) $display("FAIL: %s", s);
  endtask


  always @(posedge clk) if (rst_n) begin
    if (in_valid && in_ready)
      for (int i = 0; i < LANES; i++) syms.push_back(in_data[i*SYM_W +: SYM_W]);
    if (req_valid && req_ready && nreq < 2 * TRI) begin
      int k, r, c, b, cl, rw;
      bit wr;
      wr = (nreq < TRI);
      k  = wr ? nreq : nreq - TRI;
      tri_pos(N, !wr, k, r, c);
      ref_map(DIM, NB, PH, PW, r, c, b, cl, rw);
      if (req_we != wr || int'(req_bank) != b || int'(req_col) != cl || int'(req_row) != rw) begin
        checks++;
        fail($sformatf("%s req %0d pos (%0d,%0d) wrong address", NAME, nreq, r, c));
      end
      if ((wr ? c : r) > 0 && int'(req_bank) == prev_bank) same_bank++;
      prev_bank = int'(req_bank);
      nreq++;
    end
    if (out_valid && nout < TRI) begin
      int r, c;
      tri_pos(N, 1'b1, nout, r, c);
      checks++;
      if (out_data != burst(row_rank(N, r, c)) || out_last != (nout == TRI - 1))
        fail($sformatf("out %0d pos (%0d,%0d) wrong", nout, r, c));
      nout++;
    end
  end

  initial begin
    int rm_w, rm_r;
    real w_rate, r_rate;
    checks = 0;
    failures = 0;
    done = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    while (nout < TRI) begin
      @(negedge clk);
      if (!(in_valid && !in_ready)) begin
        in_valid = 1'b1;
        for (int i = 0; i < LANES; i++) in_data[i*SYM_W +: SYM_W] = SYM_W'($urandom);
      end
    end
    in_valid = 0;
    rm_w = row_major_misses(1'b0);
    rm_r = row_major_misses(1'b1);
    w_rate = real'(u_dram.wr_misses) / TRI;
    r_rate = real'(u_dram.rd_misses) / TRI;
    $display("%s: %0d banks, %0d x %0d pages, %0d bursts per phase", NAME, NB, PH, PW, TRI);
    $display("page misses  optimized: write %0d (%.2f %%) read %0d (%.2f %%)",
             u_dram.wr_misses, 100.0 * w_rate, u_dram.rd_misses, 100.0 * r_rate);
    $display("page misses  row-major: write %0d (%.2f %%) read %0d (%.2f %%)",
             rm_w, 100.0 * rm_w / TRI, rm_r, 100.0 * rm_r / TRI);
    checks++;
    if (same_bank != 0) fail($sformatf("%0d in-line requests repeated the bank", same_bank));
    checks++;
    if (w_rate >= 2.0 / PH || r_rate >= 2.0 / PH) fail("page-miss rate too high");
    checks++;
    if (3 * u_dram.rd_misses >= rm_r) fail("read phase not clearly better than row-major");
    checks++;
    if (u_dram.bad_reads != 0) fail("read of unwritten DRAM address");
    done = 1;
  end
endmodule
