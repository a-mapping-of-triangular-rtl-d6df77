// tb_tbi_dram_top: end-to-end test of the two-stage interleaver.
//
// Symbols (3 bits, random) enter stage 1 LANES per word with random gaps;
// the DRAM side is the behavioural memory model with random back-pressure.
// Size: 8 code words of 16 symbols per burst block, 24-bit bursts,
// triangle of side 30 (465 bursts) in a 32 x 32 index space, 4 banks,
// 2 x 4 burst pages. Three DRAM blocks are checked completely:
//  - each DRAM request against the reference walk and mapping,
//  - each output burst against the reference two-stage permutation of the
//    input symbols, and out_last.
// Mechanisms that must each be seen at least once (counted, reported, and
// a failure if zero): bank switched on every access within a line, page
// misses in the write and in the read phase, a circular wrap caused by the
// bank offset, DRAM back-pressure, input held off while the DRAM block is
// being read, the drain phase, and phase changes write->read and read->write.
module tb_tbi_dram_top;
  import tbi_pkg::*;
  import tbi_ref_pkg::*;

  localparam int SYM_W = 3, BW = 24, LANES = 8, CW_LEN = 16;
  localparam int N = 30, DIM = 32, NB = 4, PH = 2, PW = 4;
  localparam int L = DIM / NB;
  localparam int TRI = N * (N + 1) / 2;
  localparam int BLOCKS = 3;

  logic clk = 0, rst_n = 0;
  logic in_valid = 0, in_ready;
  logic [LANES*SYM_W-1:0] in_data = '0;
  logic req_valid, req_ready, req_we, rsp_valid, out_valid, out_last;
  logic [1:0] req_bank;
  logic [4:0] req_row;
  logic [2:0] req_col;
  logic [BW-1:0] req_wdata, rsp_data, out_data;
  phase_e phase, phase_d;
  int checks = 0, failures = 0;

  tbi_dram_top #(
    .SYM_W(SYM_W), .BURST_W(BW), .LANES(LANES), .CW_LEN(CW_LEN),
    .TRI_N(N), .DIM(DIM), .NUM_BANKS(NB), .PAGE_H(PH), .PAGE_W(PW)
  ) dut (
    .clk, .rst_n, .in_valid, .in_ready, .in_data,
    .dram_req_valid(req_valid), .dram_req_ready(req_ready), .dram_req_we(req_we),
    .dram_req_bank(req_bank), .dram_req_row(req_row), .dram_req_col(req_col),
    .dram_req_wdata(req_wdata), .dram_rsp_valid(rsp_valid), .dram_rsp_data(rsp_data),
    .out_valid, .out_data, .out_last, .phase);

  dram_model #(.BANK_W(2), .ROW_W(5), .COL_W(3), .BURST_W(BW), .LATENCY(8), .STALL_PCT(20)) u_dram (
    .clk, .rst_n, .req_valid, .req_ready, .req_we, .req_bank, .req_row, .req_col, .req_wdata,
    .rsp_valid, .rsp_data);

  always #5 clk = ~clk;

  logic [SYM_W-1:0] syms [$];
  int nreq = 0, nout = 0, prev_bank = -1;
  int n_bank_sw = 0, n_wrap = 0, n_in_held = 0, n_drain = 0, n_w2r = 0, n_r2w = 0;

  // Burst m as stage 1 builds it: symbol j = m % CW_LEN of the LANES code
  // words of stage-1 block m / CW_LEN.
  function automatic logic [BW-1:0] burst(input int m);
    logic [BW-1:0] w = '0;
    for (int k = 0; k < LANES; k++)
      w[k*SYM_W +: SYM_W] = syms[((m / CW_LEN) * LANES + k) * CW_LEN + m % CW_LEN];
    return w;
  endfunction

  task automatic fail(input string s);
    failures++;
    if (failures < 20) $display("FAIL: %s", s);
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    fail("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (rst_n) begin
    phase_d <= phase;
    if (phase_d == PH_WRITE && phase == PH_START_R) n_w2r++;
    if (phase_d != PH_START_W && phase == PH_START_W && nout > 0) n_r2w++;
    if (phase == PH_DRAIN) n_drain++;
    if (in_valid && in_ready)
      for (int i = 0; i < LANES; i++) syms.push_back(in_data[i*SYM_W +: SYM_W]);
    if (in_valid && !in_ready && (phase == PH_READ || phase == PH_DRAIN)) n_in_held++;
    if (req_valid && req_ready && nreq < BLOCKS * 2 * TRI) begin
      int blk, k, kk, r, c, b, cl, rw;
      bit wr;
      blk = nreq / (2 * TRI);
      k   = nreq % (2 * TRI);
      wr  = (k < TRI);
      kk  = wr ? k : k - TRI;
      tri_pos(N, !wr, kk, r, c);
      ref_map(DIM, NB, PH, PW, r, c, b, cl, rw);
      checks++;
      if (req_we != wr || int'(req_bank) != b || int'(req_col) != cl || int'(req_row) != rw)
        fail($sformatf("req %0d pos (%0d,%0d): got we%0d B%0d C%0d R%0d want we%0d B%0d C%0d R%0d",
                       nreq, r, c, req_we, req_bank, req_col, req_row, wr, b, cl, rw));
      if (wr) begin
        checks++;
        if (req_wdata != burst(blk * TRI + kk)) fail($sformatf("req %0d wrong write data", nreq));
      end
      // bank switch within a line (not across the wrap to the next line)
      if ((wr ? c : r) > 0) begin
        if (int'(req_bank) == prev_bank) fail($sformatf("req %0d: bank not switched", nreq));
        else n_bank_sw++;
      end
      prev_bank = int'(req_bank);
      if (r / NB + b >= L || c / NB + b >= L) n_wrap++;
      nreq++;
    end
    if (out_valid && nout < BLOCKS * TRI) begin
      int blk, k, r, c;
      logic [BW-1:0] exp;
      blk = nout / TRI;
      k   = nout % TRI;
      tri_pos(N, 1'b1, k, r, c);
      exp = burst(blk * TRI + row_rank(N, r, c));
      checks++;
      if (out_data != exp || out_last != (k == TRI - 1))
        fail($sformatf("out %0d pos (%0d,%0d): got %h last %0d want %h", nout, r, c,
                       out_data, out_last, exp));
      nout++;
    end
  end

  task automatic need(input int n, input string what);
    checks++;
    $display("  %-36s %0d", what, n);
    if (n == 0) fail({what, " never happened"});
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    while (nout < BLOCKS * TRI) begin
      @(negedge clk);
      if (!(in_valid && !in_ready)) begin
        in_valid = ($urandom_range(9) != 0);
        for (int i = 0; i < LANES; i++) in_data[i*SYM_W +: SYM_W] = SYM_W'($urandom);
      end
    end
    in_valid = 0;
    $display("mechanism counts:");
    need(n_bank_sw, "bank switches within a line");
    need(u_dram.wr_misses, "page misses, write phase");
    need(u_dram.rd_misses, "page misses, read phase");
    need(n_wrap, "circular wraps from the bank offset");
    need(u_dram.stalls, "DRAM back-pressure cycles");
    need(n_in_held, "input held off during read phase");
    need(n_drain, "drain-phase cycles");
    need(n_w2r, "write->read phase changes");
    need(n_r2w, "read->write phase changes");
    checks++;
    if (u_dram.bad_reads != 0) fail("read of unwritten DRAM address");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
