// tb_tbi_controller: runs three blocks through the DRAM interleaver
// controller at the example size (2 banks, 2 x 2 burst pages, 8 x 8 index
// space, triangle of side 8 = 36 bursts) against the behavioural DRAM model
// with random back-pressure and random input gaps. Every DRAM request is
// compared with the reference walk and mapping (address, write flag, write
// data) and every output burst with the burst that was written at that
// triangle position. It also requires that the drain phase (waiting for
// the last read data) was seen and that the DRAM stalled at least once.
module tb_tbi_controller;
  import tbi_pkg::*;
  import tbi_ref_pkg::*;

  localparam int N = 8, DIM = 8, NB = 2, PH = 2, PW = 2, BW = 16;
  localparam int TRI = N * (N + 1) / 2;
  localparam int BLOCKS = 3;

  logic clk = 0, rst_n = 0;
  logic in_valid = 0, in_ready;
  logic [BW-1:0] in_data = '0;
  logic req_valid, req_ready, req_we, rsp_valid, out_valid, out_last;
  logic [0:0] req_bank;
  logic [2:0] req_row;
  logic [1:0] req_col;
  logic [BW-1:0] req_wdata, rsp_data, out_data;
  phase_e phase;
  int checks = 0, failures = 0;

  tbi_controller #(.TRI_N(N), .DIM(DIM), .NUM_BANKS(NB), .PAGE_H(PH), .PAGE_W(PW), .BURST_W(BW)) dut (
    .clk, .rst_n, .in_valid, .in_ready, .in_data,
    .req_valid, .req_ready, .req_we, .req_bank, .req_row, .req_col, .req_wdata,
    .rsp_valid, .rsp_data, .out_valid, .out_data, .out_last, .phase);

  dram_model #(.BANK_W(1), .ROW_W(3), .COL_W(2), .BURST_W(BW), .LATENCY(5), .STALL_PCT(25)) u_dram (
    .clk, .rst_n, .req_valid, .req_ready, .req_we, .req_bank, .req_row, .req_col, .req_wdata,
    .rsp_valid, .rsp_data);

  always #5 clk = ~clk;

  logic [BW-1:0] sent [$];
  int nreq = 0, nout = 0, drains = 0;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic fail(input string s);
    failures++;
    if (failures < 20) $display("FAIL: %s", s);
  endtask

  always @(posedge clk) if (rst_n) begin
    if (phase == PH_DRAIN) drains++;
    if (in_valid && in_ready) sent.push_back(in_data);
    if (req_valid && req_ready) begin
      int blk, k, r, c, b, cl, rw;
      bit wr;
      blk = nreq / (2 * TRI);
      k   = nreq % (2 * TRI);
      wr  = (k < TRI);
      tri_pos(N, !wr, wr ? k : k - TRI, r, c);
      ref_map(DIM, NB, PH, PW, r, c, b, cl, rw);
      checks++;
      if (req_we != wr || int'(req_bank) != b || int'(req_col) != cl || int'(req_row) != rw)
        fail($sformatf("req %0d pos (%0d,%0d): got we%0d B%0d C%0d R%0d want we%0d B%0d C%0d R%0d",
                       nreq, r, c, req_we, req_bank, req_col, req_row, wr, b, cl, rw));
      if (wr) begin
        checks++;
        if (req_wdata != sent[blk * TRI + k]) fail($sformatf("req %0d wrong write data", nreq));
      end
      nreq++;
    end
    if (out_valid) begin
      int blk, k, r, c;
      blk = nout / TRI;
      k   = nout % TRI;
      tri_pos(N, 1'b1, k, r, c);
      checks++;
      if (out_data != sent[blk * TRI + row_rank(N, r, c)] || out_last != (k == TRI - 1))
        fail($sformatf("out %0d pos (%0d,%0d): got %h last %0d want %h", nout, r, c, out_data,
                       out_last, sent[blk * TRI + row_rank(N, r, c)]));
      nout++;
    end
  end

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    while (nout < BLOCKS * TRI) begin
      @(negedge clk);
      if (!(in_valid && !in_ready)) begin   // keep data stable while offered
        in_valid = ($urandom_range(4) != 0);
        in_data  = BW'($urandom);
      end
    end
    in_valid = 0;
    repeat (20) @(negedge clk);
    checks++;
    if (nreq != BLOCKS * 2 * TRI) fail($sformatf("%0d requests", nreq));
    checks++;
    if (drains == 0) fail("drain phase never seen");
    checks++;
    if (u_dram.stalls == 0) fail("DRAM never stalled");
    checks++;
    if (u_dram.bad_reads != 0) fail("read of unwritten DRAM address");
    $display("requests %0d, drain cycles %0d, DRAM stalls %0d, page misses wr %0d rd %0d",
             nreq, drains, u_dram.stalls, u_dram.wr_misses, u_dram.rd_misses);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
