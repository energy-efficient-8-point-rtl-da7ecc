// mrdct2d_top: separable 2-D pruned MRDCT of 8x8 blocks.
//
// Computes B = T_K A T_K^T for each 8x8 block A, where T_K is the first K
// rows of the 8x8 MRDCT matrix (see mrdct_1d). B is delivered as an 8x8
// block whose entries outside the top-left K x K corner are zero. The
// scaling matrix that makes the approximation orthogonal is not applied; it
// is meant to be folded into the quantiser that follows.
//
// Structure: a row pass (mrdct_1d on one image row per clock), a ping-pong
// transpose buffer, and a column pass (a second mrdct_1d, same K) fed one
// buffered column per clock. The column pass sees only K non-zero inputs per
// column, but all eight lanes are kept so that both passes are the same
// block.
//
// Interface: in_row carries row r of A (rows 0..7 in order, signed IN_W-bit
// samples, e.g. level-shifted pixels) whenever in_valid is high; every eight
// valid rows make one block, and rows may be sent back to back or with
// gaps. out_col carries column out_idx of B (entries B[0..7][out_idx],
// IN_W + 6 bits) whenever out_valid is high; the eight columns of a block
// leave on eight consecutive clocks.
//
// Timing: column 0 of a block appears LAT_2D_LAST_ROW = 7 clocks after its
// row 7 was accepted; sustained throughput is one 8x8 block every 8 clocks.
//
// The row-then-column order, the reuse of the same pruned 1-D block for both
// passes and the transpose buffer between them follow the source design;
// widths, framing by row count and the valid handshake are this
// implementation's.
module mrdct2d_top
  import mrdct_pkg::*;
#(
  parameter int unsigned K     = 6,
  parameter int unsigned IN_W  = 8,
  parameter int unsigned OUT_W = IN_W + 2 * GROWTH_1D
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    in_valid,
  input  logic signed [IN_W-1:0]  in_row [N],
  output logic                    out_valid,
  output idx_t                    out_idx,
  output logic signed [OUT_W-1:0] out_col [N]
);

  localparam int unsigned MID_W = IN_W + GROWTH_1D;

  // Row pass.
  logic                    row_valid;
  logic signed [MID_W-1:0] row_coef [N];

  mrdct_1d #(.K(K), .IN_W(IN_W), .OUT_W(MID_W)) u_row_pass (
    .clk       (clk),
    .rst_n     (rst_n),
    .in_valid  (in_valid),
    .x         (in_row),
    .out_valid (row_valid),
    .y         (row_coef)
  );

  // Transposition.
  logic                    tr_valid;
  idx_t                    tr_idx;
  logic signed [MID_W-1:0] tr_col [N];

  transpose_buffer #(.K(K), .W(MID_W)) u_transpose (
    .clk       (clk),
    .rst_n     (rst_n),
    .in_valid  (row_valid),
    .row       (row_coef),
    .out_valid (tr_valid),
    .out_idx   (tr_idx),
    .col       (tr_col)
  );

  // Column pass.
  mrdct_1d #(.K(K), .IN_W(MID_W), .OUT_W(OUT_W)) u_col_pass (
    .clk       (clk),
    .rst_n     (rst_n),
    .in_valid  (tr_valid),
    .x         (tr_col),
    .out_valid (out_valid),
    .y         (out_col)
  );

  // Column index travels alongside the column pass pipeline.
  idx_t idx_pipe [STAGES_1D];
  always_ff @(posedge clk) begin
    if (!rst_n) begin
      for (int s = 0; s < int'(STAGES_1D); s++) idx_pipe[s] <= '0;
    end else begin
      idx_pipe[0] <= tr_idx;
      for (int s = 1; s < int'(STAGES_1D); s++) idx_pipe[s] <= idx_pipe[s-1];
    end
  end
  assign out_idx = idx_pipe[STAGES_1D-1];

endmodule
