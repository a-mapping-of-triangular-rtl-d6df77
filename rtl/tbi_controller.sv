// tbi_controller: DRAM triangular block interleaver controller.
//
// Takes burst words from the first (SRAM) interleaving stage and stores one
// block of TRI_N*(TRI_N+1)/2 bursts in DRAM, row-wise over the triangular
// index space (write phase); it then reads the block back column-wise (read
// phase) and hands the bursts on in that order. Every index-space position
// goes through bcr_mapper, the optimized bank/column/row mapping, before it
// becomes a DRAM request, so both phases switch the bank group with every
// burst and meet page misses at the same rate.
//
// The paper describes the interleaver order and the mapping; this block's
// phase sequencing is this design's simplest choice: one block buffer in
// DRAM, the write phase of block n+1 starts only after all read data of
// block n has come back, and input is held off (in_ready low) meanwhile.
//
// Interface (valid/ready where named so):
//  - in_*  : burst words to interleave.
//  - req_* : DRAM requests to the memory controller, held stable while
//            req_valid is high and req_ready low. req_we=1 writes req_wdata.
//  - rsp_* : read data, in request order, one word per rsp_valid; the
//            memory controller must return every read. No back-pressure.
//  - out_* : interleaved bursts, column-wise order, out_last on the last
//            burst of a block. No back-pressure: out_valid follows rsp_valid
//            with one register stage.
// Timing: one request per cycle when neither side stalls; the index walker
// needs one cycle to restart between phases.
module tbi_controller
  import tbi_pkg::*;
#(
  parameter int unsigned TRI_N         = tbi_pkg::TRI_N_DEF,
  parameter int unsigned DIM           = tbi_pkg::DIM_DEF,
  parameter int unsigned NUM_BANKS     = tbi_pkg::NUM_BANKS_DEF,
  parameter int unsigned PAGE_H        = tbi_pkg::PAGE_H_DEF,
  parameter int unsigned PAGE_W        = tbi_pkg::PAGE_W_DEF,
  parameter int unsigned BURST_W       = tbi_pkg::BURST_W_DEF,
  parameter bit          COL_OFFSET_EN = 1'b1,
  localparam int unsigned IDX_W  = $clog2(DIM),
  localparam int unsigned BANK_W = (NUM_BANKS > 1) ? $clog2(NUM_BANKS) : 1,
  localparam int unsigned COL_W  = (PAGE_H * PAGE_W > 1) ? $clog2(PAGE_H * PAGE_W) : 1,
  localparam int unsigned LOC    = DIM / NUM_BANKS,
  localparam int unsigned ROWS   = (LOC / PAGE_H) * NUM_BANKS * (LOC / PAGE_W),
  localparam int unsigned ROW_W  = (ROWS > 1) ? $clog2(ROWS) : 1
) (
  input  logic               clk,
  input  logic               rst_n,
  // burst words from the first stage
  input  logic               in_valid,
  output logic               in_ready,
  input  logic [BURST_W-1:0] in_data,
  // DRAM request port
  output logic               req_valid,
  input  logic               req_ready,
  output logic               req_we,
  output logic [BANK_W-1:0]  req_bank,
  output logic [ROW_W-1:0]   req_row,
  output logic [COL_W-1:0]   req_col,
  output logic [BURST_W-1:0] req_wdata,
  // DRAM read data
  input  logic               rsp_valid,
  input  logic [BURST_W-1:0] rsp_data,
  // interleaved output
  output logic               out_valid,
  output logic [BURST_W-1:0] out_data,
  output logic               out_last,
  // status
  output phase_e             phase
);

  localparam longint unsigned TRI_LEN = longint'(TRI_N) * (longint'(TRI_N) + 1) / 2;
  localparam int unsigned     CNT_W   = $clog2(TRI_LEN + 1);

  initial if (TRI_N > DIM) $error("tbi_controller: TRI_N must not exceed DIM");

  phase_e            phase_q;
  logic              gen_start, gen_valid, gen_last, gen_adv;
  scan_e             gen_mode;
  logic [IDX_W-1:0]  gen_r, gen_c;
  logic [BANK_W-1:0] map_bank;
  logic [COL_W-1:0]  map_col;
  logic [ROW_W-1:0]  map_row;
  logic              slot_free, issue;
  logic [CNT_W-1:0]  rsp_cnt_q;
  logic              rsp_last;

  tbi_index_gen #(.TRI_N(TRI_N), .IDX_W(IDX_W)) u_idx (
    .clk, .rst_n,
    .start   (gen_start),
    .mode    (gen_mode),
    .adv     (gen_adv),
    .valid   (gen_valid),
    .idx_row (gen_r),
    .idx_col (gen_c),
    .last    (gen_last)
  );

  bcr_mapper #(
    .DIM(DIM), .NUM_BANKS(NUM_BANKS), .PAGE_H(PAGE_H), .PAGE_W(PAGE_W),
    .COL_OFFSET_EN(COL_OFFSET_EN)
  ) u_map (
    .idx_row (gen_r),
    .idx_col (gen_c),
    .bank    (map_bank),
    .col     (map_col),
    .row     (map_row)
  );

  assign phase     = phase_q;
  assign gen_start = (phase_q == PH_START_W) || (phase_q == PH_START_R);
  assign gen_mode  = (phase_q == PH_START_R) ? SCAN_COL : SCAN_ROW;
  // The request register can take a new request when empty or being drained.
  assign slot_free = !req_valid || req_ready;
  assign issue     = gen_valid && slot_free &&
                     ((phase_q == PH_WRITE && in_valid) || phase_q == PH_READ);
  assign gen_adv   = issue;
  assign in_ready  = (phase_q == PH_WRITE) && gen_valid && slot_free;
  assign rsp_last  = rsp_valid && (rsp_cnt_q == CNT_W'(TRI_LEN - 1));

  // Phase sequencing.
  always_ff @(posedge clk) begin
    if (!rst_n) begin
      phase_q <= PH_IDLE;
    end else begin
      unique case (phase_q)
        PH_IDLE:    phase_q <= PH_START_W;
        PH_START_W: phase_q <= PH_WRITE;
        PH_WRITE:   if (issue && gen_last) phase_q <= PH_START_R;
        PH_START_R: phase_q <= PH_READ;
        PH_READ:    if (issue && gen_last) phase_q <= rsp_last ? PH_START_W : PH_DRAIN;
        PH_DRAIN:   if (rsp_last) phase_q <= PH_START_W;
        default:    phase_q <= PH_IDLE;
      endcase
    end
  end

  // Request register.
  always_ff @(posedge clk) begin
    if (!rst_n) begin
      req_valid <= 1'b0;
      req_we    <= 1'b0;
      req_bank  <= '0;
      req_row   <= '0;
      req_col   <= '0;
      req_wdata <= '0;
    end else if (slot_free) begin
      req_valid <= issue;
      if (issue) begin
        req_we    <= (phase_q == PH_WRITE);
        req_bank  <= map_bank;
        req_row   <= map_row;
        req_col   <= map_col;
        req_wdata <= (phase_q == PH_WRITE) ? in_data : '0;
      end
    end
  end

  // Read data path.
  always_ff @(posedge clk) begin
    if (!rst_n) begin
      rsp_cnt_q <= '0;
      out_valid <= 1'b0;
      out_data  <= '0;
      out_last  <= 1'b0;
    end else begin
      out_valid <= rsp_valid;
      out_last  <= rsp_last;
      if (rsp_valid) begin
        out_data  <= rsp_data;
        rsp_cnt_q <= rsp_last ? '0 : rsp_cnt_q + 1'b1;
      end
    end
  end

  // Handshake rules of the request port.
  assert property (@(posedge clk) disable iff (!rst_n)
    req_valid && !req_ready |=> req_valid && $stable({req_we, req_bank, req_row, req_col, req_wdata}));
  // Read data only arrives in the read and drain phases.
  assert property (@(posedge clk) disable iff (!rst_n)
    rsp_valid |-> (phase_q == PH_READ || phase_q == PH_DRAIN || phase_q == PH_START_W));

endmodule
