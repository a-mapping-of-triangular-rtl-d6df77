// tb_tbi_index_gen: checks the row-wise and column-wise walk over the
// triangle r + c <= N-1 against nested loops, with random gaps in 'adv',
// for N = 7, and that an uninterrupted walk delivers one position per cycle.
module tb_tbi_index_gen;
  import tbi_pkg::*;

  localparam int N = 7;
  localparam int IW = 4;

  logic clk = 0, rst_n = 0, start = 0, adv = 0;
  scan_e mode = SCAN_ROW;
  logic valid, last;
  logic [IW-1:0] r, c;
  int checks = 0, failures = 0;

  tbi_index_gen #(.TRI_N(N), .IDX_W(IW)) dut (
    .clk, .rst_n, .start, .mode, .adv, .valid, .idx_row(r), .idx_col(c), .last);

  always #5 clk = ~clk;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic walk(input scan_e m, input bit gaps);
    int er[$], ec[$];
    int n, t0;
    for (int a = 0; a < N; a++)
      for (int b = 0; b < N - a; b++) begin
        if (m == SCAN_ROW) begin er.push_back(a); ec.push_back(b); end
        else               begin er.push_back(b); ec.push_back(a); end
      end
    @(negedge clk); start = 1; mode = m;
    @(negedge clk); start = 0;
    n = 0; t0 = $time;
    while (n < er.size()) begin
      adv = gaps ? ($urandom_range(3) != 0) : 1'b1;
      #1;
      checks++;
      if (!valid || int'(r) != er[n] || int'(c) != ec[n] || last != (n == er.size() - 1)) begin
        failures++;
        $display("FAIL mode %0d step %0d: got (%0d,%0d) v%0d l%0d want (%0d,%0d)",
                 m, n, r, c, valid, last, er[n], ec[n]);
      end
      @(negedge clk);
      if (adv) n++;
    end
    adv = 0;
    #1;
    checks++;
    if (valid) begin failures++; $display("FAIL: valid after last"); end
    if (!gaps) begin
      checks++;
      if (($time - t0) / 10 != er.size()) begin
        failures++;
        $display("FAIL: %0d positions took %0d cycles", er.size(), ($time - t0) / 10);
      end
    end
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    walk(SCAN_ROW, 1'b0);
    walk(SCAN_COL, 1'b0);
    walk(SCAN_ROW, 1'b1);
    walk(SCAN_COL, 1'b1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
