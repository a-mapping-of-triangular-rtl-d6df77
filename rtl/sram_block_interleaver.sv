// sram_block_interleaver: first interleaving stage, in on-chip SRAM.
//
// One DRAM burst carries far more bits than one symbol, so before the DRAM
// triangular interleaver a small block interleaver makes sure that the
// symbols inside one burst word come from different code words. A block is
// LANES code words of CW_LEN symbols. Output word j (j = 0..CW_LEN-1) holds
// symbol j of each of the LANES code words, code word k in bits
// [k*SYM_W +: SYM_W]; bits above LANES*SYM_W are zero. The paper gives only
// this purpose; the organisation below is this design's own.
//
// Rate: the input is one word of LANES consecutive symbols of one code word
// per cycle and the output one burst word per cycle, so this stage keeps up
// with a DRAM interface that takes one burst per cycle.
//
// How: writing LANES symbols of one code word and reading one symbol of
// LANES code words per cycle is a transpose. The storage is LANES narrow
// banks (one symbol wide, 2*CW_LEN deep: two ping-pong buffers). Input word
// t of code word k (symbols t*LANES + i) is rotated by k lanes, so symbol i
// goes to bank (i + k) mod LANES, at address {buffer, t, k}. To build output
// word t*LANES + i, bank m reads address {buffer, t, (m - i) mod LANES},
// which holds symbol i of code word (m - i) mod LANES; rotating the read
// word back by i lanes puts code word k on lane k. Every bank is written
// and read at most once per cycle.
//
// Interface: valid/ready on both sides. Code words arrive back to back, each
// as CW_LEN/LANES input words (CW_LEN must be a multiple of LANES), symbol
// t*LANES + i of the code word in in_data[i*SYM_W +: SYM_W]. out_data is a
// register; read latency from a full buffer to the first output word is two
// cycles. While one buffer is read the other is filled; in_ready falls only
// when both buffers are full. Reset: synchronous, active low; the symbol
// banks are not reset (every word is written before it is read).
module sram_block_interleaver #(
  parameter int unsigned SYM_W   = tbi_pkg::SYM_W_DEF,
  parameter int unsigned BURST_W = tbi_pkg::BURST_W_DEF,
  parameter int unsigned LANES   = BURST_W / SYM_W,
  parameter int unsigned CW_LEN  = 4 * LANES
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     in_valid,
  output logic                     in_ready,
  input  logic [LANES*SYM_W-1:0]   in_data,
  output logic                     out_valid,
  input  logic                     out_ready,
  output logic [BURST_W-1:0]       out_data,
  output logic                     out_last      // last word of a block
);

  localparam int unsigned WORD_W = LANES * SYM_W;
  localparam int unsigned T      = CW_LEN / LANES;          // input words per code word
  localparam int unsigned T_W    = (T > 1) ? $clog2(T) : 1;
  localparam int unsigned K_W    = (LANES > 1) ? $clog2(LANES) : 1;
  localparam int unsigned DEPTH  = 2 * CW_LEN;
  localparam int unsigned A_W    = $clog2(DEPTH);

  initial begin
    if (WORD_W > BURST_W) $error("sram_block_interleaver: LANES*SYM_W exceeds BURST_W");
    if (CW_LEN % LANES != 0) $error("sram_block_interleaver: CW_LEN must be a multiple of LANES");
  end

  // Rotate a word of LANES symbols: result symbol m = w[(m - k) mod LANES].
  function automatic logic [WORD_W-1:0] rot_up(input logic [WORD_W-1:0] w, input logic [K_W-1:0] k);
    return (w << (k * SYM_W)) | (w >> (WORD_W - k * SYM_W));
  endfunction

  // Rotate the other way: result symbol m = w[(m + k) mod LANES].
  function automatic logic [WORD_W-1:0] rot_down(input logic [WORD_W-1:0] w, input logic [K_W-1:0] k);
    return (w >> (k * SYM_W)) | (w << (WORD_W - k * SYM_W));
  endfunction

  logic [1:0]       full_q;
  logic             wb_q, rb_q;              // buffer being written / read
  logic [K_W-1:0]   wk_q;                    // code word being written
  logic [T_W-1:0]   wt_q, rt_q;              // word within code word / output group
  logic [K_W-1:0]   ri_q;                    // output word = rt*LANES + ri
  logic             wr, rd, adv, wr_done, rd_done;
  logic [A_W-1:0]   waddr;
  logic [WORD_W-1:0] wword, rword_q;
  logic             s1_valid_q, s1_last_q;   // read stage: bank outputs valid
  logic [K_W-1:0]   s1_i_q;

  assign in_ready = !full_q[wb_q];
  assign wr       = in_valid && in_ready;
  assign wr_done  = wr && (wt_q == T_W'(T - 1)) && (wk_q == K_W'(LANES - 1));
  assign adv      = !out_valid || out_ready;     // the read pipeline moves
  assign rd       = adv && full_q[rb_q];
  assign rd_done  = rd && (rt_q == T_W'(T - 1)) && (ri_q == K_W'(LANES - 1));
  assign waddr    = A_W'((wb_q ? CW_LEN : 0) + wt_q * LANES + wk_q);
  assign wword    = rot_up(in_data, wk_q);

  // LANES symbol banks, each with its own read address.
  for (genvar m = 0; m < LANES; m++) begin : gen_bank
    logic [SYM_W-1:0] bank [DEPTH];
    logic [K_W-1:0]   k_m;                   // code word this bank serves
    logic [A_W-1:0]   raddr;
    assign k_m   = (K_W'(m) >= ri_q) ? K_W'(m) - ri_q : K_W'(m + LANES) - ri_q;
    assign raddr = A_W'((rb_q ? CW_LEN : 0) + rt_q * LANES + k_m);
    always_ff @(posedge clk) begin
      if (wr) bank[waddr] <= wword[m*SYM_W +: SYM_W];
      if (rd) rword_q[m*SYM_W +: SYM_W] <= bank[raddr];
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      full_q     <= '0;
      wb_q       <= 1'b0;
      rb_q       <= 1'b0;
      wk_q       <= '0;
      wt_q       <= '0;
      rt_q       <= '0;
      ri_q       <= '0;
      s1_valid_q <= 1'b0;
      s1_last_q  <= 1'b0;
      s1_i_q     <= '0;
      out_valid  <= 1'b0;
      out_data   <= '0;
      out_last   <= 1'b0;
    end else begin
      if (wr) begin
        if (wt_q == T_W'(T - 1)) begin
          wt_q <= '0;
          wk_q <= (wk_q == K_W'(LANES - 1)) ? '0 : wk_q + 1'b1;
        end else begin
          wt_q <= wt_q + 1'b1;
        end
        if (wr_done) wb_q <= !wb_q;
      end
      if (rd) begin
        if (ri_q == K_W'(LANES - 1)) begin
          ri_q <= '0;
          rt_q <= (rt_q == T_W'(T - 1)) ? '0 : rt_q + 1'b1;
        end else begin
          ri_q <= ri_q + 1'b1;
        end
        if (rd_done) rb_q <= !rb_q;
      end
      if (adv) begin
        s1_valid_q <= rd;
        s1_last_q  <= rd_done;
        s1_i_q     <= ri_q;
        out_valid  <= s1_valid_q;
        out_last   <= s1_last_q;
        if (s1_valid_q) out_data <= BURST_W'(rot_down(rword_q, s1_i_q));
      end
      // full flags: set by a finished write, cleared by a finished read
      // (never the same buffer in one cycle).
      for (int b = 0; b < 2; b++) begin
        if (wr_done && wb_q == b[0]) full_q[b] <= 1'b1;
        else if (rd_done && rb_q == b[0]) full_q[b] <= 1'b0;
      end
    end
  end

  // A buffer is never written while it is full.
  assert property (@(posedge clk) disable iff (!rst_n) wr |-> !full_q[wb_q]);

endmodule
