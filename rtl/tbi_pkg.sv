// tbi_pkg: types and default sizes shared by the two-stage triangular block
// interleaver (SRAM block interleaver + DRAM triangular interleaver).
//
// The symbol width (3 bits) and the DRAM burst width (512 bits) are the
// example numbers of the paper ("512 bits vs. 3 bits"). The default DRAM
// organisation (16 banks in 4 bank groups, 128 bursts per page) is a DDR4
// 64-bit channel with burst length 8; it is this design's choice, the paper
// evaluates ten DRAM configurations without listing their organisation.
package tbi_pkg;

  // Paper example sizes.
  localparam int unsigned SYM_W_DEF   = 3;
  localparam int unsigned BURST_W_DEF = 512;

  // Triangle side for the evaluated interleaver of 12.5 M elements:
  // N*(N+1)/2 = 12 502 500 >= 12.5 M for N = 5000.
  localparam int unsigned TRI_N_DEF = 5000;

  // DRAM organisation (DDR4, 64-bit channel, BL8): own choice.
  localparam int unsigned NUM_BANKS_DEF = 16;
  localparam int unsigned PAGE_H_DEF    = 8;    // page rectangle height (bursts)
  localparam int unsigned PAGE_W_DEF    = 16;   // page rectangle width (bursts)

  // Side of the square index space the mapping covers: TRI_N rounded up to a
  // multiple of NUM_BANKS*max(PAGE_H,PAGE_W) = 256.
  localparam int unsigned DIM_DEF = 5120;

  // Order in which the index space is walked.
  typedef enum logic {
    SCAN_ROW = 1'b0,   // write phase: row-wise
    SCAN_COL = 1'b1    // read phase: column-wise
  } scan_e;

  // Phase of the DRAM interleaver controller.
  typedef enum logic [2:0] {
    PH_IDLE    = 3'd0,
    PH_START_W = 3'd1,
    PH_WRITE   = 3'd2,
    PH_START_R = 3'd3,
    PH_READ    = 3'd4,
    PH_DRAIN   = 3'd5
  } phase_e;

endpackage
