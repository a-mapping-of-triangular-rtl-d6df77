// tb_workloads: the interleaver block for four DRAM organisations, scaled
// down to a triangle of side 500 in a 512 x 512 index space (one block,
// 125,250 bursts per phase each), all run in parallel:
//   DDR4   16 banks (4 bank groups x 4), 128-burst pages as 8 x 16
//   DDR3    8 banks, no bank groups, 128-burst pages as 8 x 16
//   DDR5   32 banks (8 bank groups x 4), 64-burst pages as 8 x 8
//   LPDDR4  8 banks, no bank groups, 64-burst pages as 8 x 8
// (bank counts and page sizes are those of common JEDEC parts). Each run
// is checked by workload_run; this bench collects the counts.
module tb_workloads;

  logic clk = 0;
  logic [3:0] done;
  int c [4], f [4];
  int checks, failures;

  always #5 clk = ~clk;

  workload_run #(.NAME("DDR4"),   .NB(16), .PH(8), .PW(16)) u_ddr4   (.clk, .done(done[0]), .checks(c[0]), .failures(f[0]));
  workload_run #(.NAME("DDR3"),   .NB(8),  .PH(8), .PW(16)) u_ddr3   (.clk, .done(done[1]), .checks(c[1]), .failures(f[1]));
  workload_run #(.NAME("DDR5"),   .NB(32), .PH(8), .PW(8))  u_ddr5   (.clk, .done(done[2]), .checks(c[2]), .failures(f[2]));
  workload_run #(.NAME("LPDDR4"), .NB(8),  .PH(8), .PW(8))  u_lpddr4 (.clk, .done(done[3]), .checks(c[3]), .failures(f[3]));

  task automatic report(input int extra_fail);
    checks = 0;
    failures = extra_fail;
    for (int i = 0; i < 4; i++) begin checks += c[i]; failures += f[i]; end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
  endtask

  initial begin
    repeat (3_000_000) @(posedge clk);
    $display("FAIL: watchdog");
    report(1);
    $finish;
  end

  initial begin
    #1;
    wait (&done);
    report(0);
    $finish;
  end
endmodule
