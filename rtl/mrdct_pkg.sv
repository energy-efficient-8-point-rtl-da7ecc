// mrdct_pkg: constants and types shared by the pruned 8-point MRDCT blocks.
//
// The transform works on 8-sample vectors and 8x8 blocks. Each 1-D pass is a
// three-stage adder pipeline (one register per stage); the transpose buffer
// adds one register between the passes. The latency constants below are the
// figures the testbenches check; they follow from the pipeline structure
// chosen in this implementation, the source describes the stages but gives no
// cycle counts.
package mrdct_pkg;

  // Transform length (8-point DCT approximation).
  localparam int unsigned N = 8;

  // Register stages of one 1-D pass: butterfly, second butterfly, final add.
  localparam int unsigned STAGES_1D = 3;

  // Cycles from the last row of a block entering the 2-D core to column 0
  // leaving it: row pass, one transpose read register, column pass.
  localparam int unsigned LAT_2D_LAST_ROW = STAGES_1D + 1 + STAGES_1D;

  // Bit growth of one 1-D pass (one bit per adder stage).
  localparam int unsigned GROWTH_1D = 3;

  // Index of a row or column inside an 8x8 block.
  typedef logic [2:0] idx_t;

  // Additions used by the K-coefficient pruned MRDCT (K + 6).
  function automatic int unsigned adders_1d(input int unsigned k);
    return k + 6;
  endfunction

endpackage
