// dram_model: behavioural model (not synthesizable) of a DRAM memory
// controller plus DRAM device, for testbenches only.
//
// It accepts burst requests on a valid/ready port, stores written bursts in
// an associative array keyed by {bank, row, column}, and returns read data
// in request order LATENCY cycles after the request. With STALL_PCT > 0 it
// drops req_ready at random, which exercises the requester's back-pressure.
// It also keeps one open row per bank and counts page hits and misses and
// how often two consecutive requests went to the same bank, so a testbench
// can see what the address mapping does to the DRAM. Reading an address
// that was never written is counted in bad_reads.
module dram_model #(
  parameter int unsigned BANK_W    = 1,
  parameter int unsigned ROW_W     = 3,
  parameter int unsigned COL_W     = 2,
  parameter int unsigned BURST_W   = 16,
  parameter int unsigned LATENCY   = 6,
  parameter int unsigned STALL_PCT = 20
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               req_valid,
  output logic               req_ready,
  input  logic               req_we,
  input  logic [BANK_W-1:0]  req_bank,
  input  logic [ROW_W-1:0]   req_row,
  input  logic [COL_W-1:0]   req_col,
  input  logic [BURST_W-1:0] req_wdata,
  output logic               rsp_valid,
  output logic [BURST_W-1:0] rsp_data
);

  typedef struct {
    longint unsigned due;
    logic [BURST_W-1:0] data;
  } rsp_t;

  logic [BURST_W-1:0] store [longint unsigned];
  rsp_t               pend [$];
  int                 open_row [1 << BANK_W];
  longint unsigned    cycle = 0;
  int                 last_bank = -1;

  // statistics, read by testbenches
  int writes = 0, reads = 0, page_hits = 0, page_misses = 0;
  int same_bank = 0, stalls = 0, bad_reads = 0;
  int wr_misses = 0, rd_misses = 0;

  always @(posedge clk) begin
    cycle <= cycle + 1;
    if (!rst_n) begin
      req_ready <= 1'b0;
      rsp_valid <= 1'b0;
      rsp_data  <= '0;
      pend.delete();
      foreach (open_row[b]) open_row[b] = -1;
      last_bank = -1;
    end else begin
      if (req_valid && req_ready) begin
        longint unsigned key;
        key = {req_bank, req_row, req_col};
        if (open_row[req_bank] == int'(req_row)) page_hits++;
        else begin
          page_misses++;
          if (req_we) wr_misses++; else rd_misses++;
          open_row[req_bank] = int'(req_row);
        end
        if (int'(req_bank) == last_bank) same_bank++;
        last_bank = int'(req_bank);
        if (req_we) begin
          store[key] = req_wdata;
          writes++;
        end else begin
          rsp_t r;
          reads++;
          r.due = cycle + LATENCY;
          if (store.exists(key)) r.data = store[key];
          else begin r.data = '0; bad_reads++; end
          pend.push_back(r);
        end
      end
      if (req_valid && !req_ready) stalls++;
      req_ready <= ($urandom_range(99) >= STALL_PCT);
      if (pend.size() > 0 && pend[0].due <= cycle) begin
        rsp_valid <= 1'b1;
        rsp_data  <= pend[0].data;
        void'(pend.pop_front());
      end else begin
        rsp_valid <= 1'b0;
      end
    end
  end

endmodule
