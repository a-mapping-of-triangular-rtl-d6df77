// tbi_dram_top: two-stage interleaver for an optical satellite downlink.
//
// Stage 1, sram_block_interleaver, spreads the symbols of LANES code words
// over one DRAM burst word, so that no burst holds two symbols of the same
// code word. Stage 2, tbi_controller, is the large triangular block
// interleaver kept in external DRAM: a block of TRI_N*(TRI_N+1)/2 bursts is
// written row-wise and read back column-wise, every position placed in
// DRAM by the optimized bank/column/row mapping (bcr_mapper) so that both
// phases run near full DRAM bandwidth. The memory controller and the DRAM
// are external: their request and read-data signals are ports.
//
// Defaults: 3-bit symbols and 512-bit bursts (paper example), a triangle of
// side 5000 (12.5 M positions, the paper's evaluated size), a 5120 x 5120
// mapped square, 16 banks and 8 x 16 burst pages (DDR4, own choice), code
// words of 4*170 = 680 symbols (own choice).
//
// Interface: in_* one word of LANES symbols of one code word per cycle,
// valid/ready (symbol i of the word in bits [i*SYM_W +: SYM_W]); dram_req_* and
// dram_rsp_* as in tbi_controller; out_* interleaved burst words, no
// back-pressure; phase tells which phase the DRAM interleaver is in.
module tbi_dram_top
  import tbi_pkg::*;
#(
  parameter int unsigned SYM_W     = tbi_pkg::SYM_W_DEF,
  parameter int unsigned BURST_W   = tbi_pkg::BURST_W_DEF,
  parameter int unsigned LANES     = BURST_W / SYM_W,
  parameter int unsigned CW_LEN    = 4 * LANES,
  parameter int unsigned TRI_N     = tbi_pkg::TRI_N_DEF,
  parameter int unsigned DIM       = tbi_pkg::DIM_DEF,
  parameter int unsigned NUM_BANKS = tbi_pkg::NUM_BANKS_DEF,
  parameter int unsigned PAGE_H    = tbi_pkg::PAGE_H_DEF,
  parameter int unsigned PAGE_W    = tbi_pkg::PAGE_W_DEF,
  localparam int unsigned BANK_W = (NUM_BANKS > 1) ? $clog2(NUM_BANKS) : 1,
  localparam int unsigned COL_W  = (PAGE_H * PAGE_W > 1) ? $clog2(PAGE_H * PAGE_W) : 1,
  localparam int unsigned LOC    = DIM / NUM_BANKS,
  localparam int unsigned ROWS   = (LOC / PAGE_H) * NUM_BANKS * (LOC / PAGE_W),
  localparam int unsigned ROW_W  = (ROWS > 1) ? $clog2(ROWS) : 1
) (
  input  logic               clk,
  input  logic               rst_n,
  // code word symbols, LANES per word, code words back to back
  input  logic                   in_valid,
  output logic                   in_ready,
  input  logic [LANES*SYM_W-1:0] in_data,
  // to the DRAM memory controller
  output logic               dram_req_valid,
  input  logic               dram_req_ready,
  output logic               dram_req_we,
  output logic [BANK_W-1:0]  dram_req_bank,
  output logic [ROW_W-1:0]   dram_req_row,
  output logic [COL_W-1:0]   dram_req_col,
  output logic [BURST_W-1:0] dram_req_wdata,
  input  logic               dram_rsp_valid,
  input  logic [BURST_W-1:0] dram_rsp_data,
  // interleaved bursts
  output logic               out_valid,
  output logic [BURST_W-1:0] out_data,
  output logic               out_last,
  output phase_e             phase
);

  logic               s1_valid, s1_ready, s1_last;
  logic [BURST_W-1:0] s1_data;

  sram_block_interleaver #(
    .SYM_W(SYM_W), .BURST_W(BURST_W), .LANES(LANES), .CW_LEN(CW_LEN)
  ) u_stage1 (
    .clk, .rst_n,
    .in_valid, .in_ready, .in_data,
    .out_valid (s1_valid),
    .out_ready (s1_ready),
    .out_data  (s1_data),
    .out_last  (s1_last)
  );

  tbi_controller #(
    .TRI_N(TRI_N), .DIM(DIM), .NUM_BANKS(NUM_BANKS), .PAGE_H(PAGE_H),
    .PAGE_W(PAGE_W), .BURST_W(BURST_W), .COL_OFFSET_EN(1'b1)
  ) u_stage2 (
    .clk, .rst_n,
    .in_valid  (s1_valid),
    .in_ready  (s1_ready),
    .in_data   (s1_data),
    .req_valid (dram_req_valid),
    .req_ready (dram_req_ready),
    .req_we    (dram_req_we),
    .req_bank  (dram_req_bank),
    .req_row   (dram_req_row),
    .req_col   (dram_req_col),
    .req_wdata (dram_req_wdata),
    .rsp_valid (dram_rsp_valid),
    .rsp_data  (dram_rsp_data),
    .out_valid, .out_data, .out_last,
    .phase
  );

  // Block boundaries of stage 1 do not need to line up with DRAM blocks.
  logic unused_s1_last;
  assign unused_s1_last = s1_last;

endmodule
