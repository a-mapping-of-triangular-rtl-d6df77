// tb_sram_block_interleaver: feeds three blocks of LANES code words (random
// symbols, LANES symbols of one code word per input word, random input gaps,
// random output stalls) and checks that output word j of a block holds
// symbol j of each of its code words, lane k in bits [k*SYM_W +: SYM_W],
// zero padding above, and out_last on word CW_LEN-1. A fourth phase stalls
// the output completely and checks that two blocks are taken at one input
// word per cycle and that the input is then held off; a final phase checks
// one output word per cycle when neither side stalls.
module tb_sram_block_interleaver;

  localparam int SYM_W = 3, BURST_W = 16, LANES = 5, CW_LEN = 10;
  localparam int BLOCKS = 3;

  logic clk = 0, rst_n = 0;
  logic in_valid = 0, in_ready, out_valid, out_ready = 0, out_last;
  logic [LANES*SYM_W-1:0] in_data = '0;
  logic [BURST_W-1:0] out_data;
  int checks = 0, failures = 0;
  bit gaps = 1;

  sram_block_interleaver #(.SYM_W(SYM_W), .BURST_W(BURST_W), .LANES(LANES), .CW_LEN(CW_LEN)) dut (
    .clk, .rst_n, .in_valid, .in_ready, .in_data, .out_valid, .out_ready, .out_data, .out_last);

  always #5 clk = ~clk;

  logic [SYM_W-1:0] syms [$];        // every symbol sent, in order
  int nout = 0;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Output checker: word nout = block nout/CW_LEN, column nout%CW_LEN.
  always @(posedge clk) begin
    if (rst_n && out_valid && out_ready) begin
      int blk, j;
      logic [BURST_W-1:0] exp;
      blk = nout / CW_LEN;
      j   = nout % CW_LEN;
      exp = '0;
      for (int k = 0; k < LANES; k++)
        exp[k*SYM_W +: SYM_W] = syms[(blk * LANES + k) * CW_LEN + j];
      checks++;
      if (out_data !== exp || out_last !== (j == CW_LEN - 1)) begin
        failures++;
        $display("FAIL word %0d: got %h last %0d want %h", nout, out_data, out_last, exp);
      end
      nout++;
    end
  end

  bit force_ready = 0;
  always @(negedge clk) out_ready <= force_ready ? 1'b1 : gaps ? ($urandom_range(3) != 0) : 1'b0;

  task automatic send(input int n);
    int sent = 0;
    while (sent < n) begin
      @(negedge clk);
      in_valid = gaps ? ($urandom_range(4) != 0) : 1'b1;
      for (int i = 0; i < LANES; i++) in_data[i*SYM_W +: SYM_W] = SYM_W'($urandom);
      #1;
      if (in_valid && in_ready) begin
        for (int i = 0; i < LANES; i++) syms.push_back(in_data[i*SYM_W +: SYM_W]);
        sent++;
      end
      @(posedge clk);
    end
    @(negedge clk); in_valid = 0;
  endtask

  initial begin
    int t0, held;
    repeat (3) @(negedge clk);
    rst_n = 1;
    send(BLOCKS * CW_LEN);
    wait (nout == BLOCKS * CW_LEN);
    repeat (5) @(negedge clk);
    // Output stalled: two blocks fit, then in_ready must fall.
    gaps = 0;
    @(negedge clk);
    t0 = $time;
    send(2 * CW_LEN);
    checks++;
    if (($time - t0) / 10 != 2 * CW_LEN + 1) begin
      failures++;
      $display("FAIL: %0d input words took %0d cycles", 2 * CW_LEN, ($time - t0) / 10);
    end
    in_valid = 1;
    held = 0;
    repeat (10) begin @(negedge clk); if (!in_ready) held++; end
    in_valid = 0;
    checks++;
    if (held != 10) begin failures++; $display("FAIL: input not held off with both buffers full"); end
    // Release the output at full rate: 2*CW_LEN words in 2*CW_LEN cycles.
    @(negedge clk);
    force_ready = 1;
    t0 = $time;
    wait (nout == (BLOCKS + 2) * CW_LEN);
    checks++;
    if (($time - t0) / 10 > 2 * CW_LEN + 3) begin
      failures++;
      $display("FAIL: %0d output words took %0d cycles", 2 * CW_LEN, ($time - t0) / 10);
    end
    force_ready = 0;
    gaps = 1;
    repeat (10) @(negedge clk);
    checks++;
    if (out_valid) begin failures++; $display("FAIL: extra output"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
