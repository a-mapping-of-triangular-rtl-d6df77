// tbi_index_gen: walks the triangular index space of the block interleaver.
//
// The triangle is the upper-left half of a TRI_N x TRI_N square, i.e. all
// positions (r, c) with r + c <= TRI_N-1; row r holds TRI_N-r positions.
// In SCAN_ROW mode (write phase) positions come row by row, left to right;
// in SCAN_COL mode (read phase) column by column, top to bottom. This is the
// classic triangular block interleaver order described in the paper.
//
// Interface: a one-cycle 'start' (with 'mode') loads position (0,0) and
// raises 'valid' from the next cycle. Each cycle with 'valid' and 'adv' moves
// to the next position; 'last' marks the final one (TRI_N*(TRI_N+1)/2
// positions in all), after which 'valid' falls. No bubbles: one position per
// cycle. Reset is active low and synchronous to clk (own choice).
module tbi_index_gen
  import tbi_pkg::*;
#(
  parameter int unsigned TRI_N = tbi_pkg::TRI_N_DEF,
  parameter int unsigned IDX_W = $clog2(tbi_pkg::DIM_DEF)
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             start,
  input  scan_e            mode,
  input  logic             adv,
  output logic             valid,
  output logic [IDX_W-1:0] idx_row,
  output logic [IDX_W-1:0] idx_col,
  output logic             last
);

  localparam logic [IDX_W-1:0] NM1 = IDX_W'(TRI_N - 1);

  initial if (TRI_N < 1 || TRI_N > (1 << IDX_W))
    $error("tbi_index_gen: TRI_N must fit in IDX_W bits");

  scan_e            mode_q;
  logic [IDX_W-1:0] r_q, c_q;
  logic             end_of_line;

  // The line ends on the anti-diagonal r + c = TRI_N-1.
  assign end_of_line = (IDX_W'(r_q + c_q) == NM1);
  assign last        = valid && end_of_line &&
                       ((mode_q == SCAN_ROW) ? (r_q == NM1) : (c_q == NM1));
  assign idx_row     = r_q;
  assign idx_col     = c_q;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      valid  <= 1'b0;
      mode_q <= SCAN_ROW;
      r_q    <= '0;
      c_q    <= '0;
    end else if (start) begin
      valid  <= 1'b1;
      mode_q <= mode;
      r_q    <= '0;
      c_q    <= '0;
    end else if (valid && adv) begin
      if (last) begin
        valid <= 1'b0;
      end else if (mode_q == SCAN_ROW) begin
        if (end_of_line) begin r_q <= r_q + 1'b1; c_q <= '0; end
        else             c_q <= c_q + 1'b1;
      end else begin
        if (end_of_line) begin c_q <= c_q + 1'b1; r_q <= '0; end
        else             r_q <= r_q + 1'b1;
      end
    end
  end

endmodule
