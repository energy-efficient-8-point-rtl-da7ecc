// transpose_buffer: row-in, column-out 8x8 block transposition between the
// two passes of the separable 2-D pruned MRDCT.
//
// Rows of a block arrive one per valid cycle, in order 0..7; every eighth
// valid row closes a block. The block is then read out as eight columns on
// eight consecutive clocks, column k carrying entry k of rows 0..7. Two
// register banks alternate (ping-pong): while one bank is read, the next
// block is written into the other, so a continuous stream of one row per
// clock comes out as a continuous stream of one column per clock.
//
// After the row pass only coefficients 0..K-1 of a row can be non-zero, so a
// bank holds just 8 x K words; columns K..7 are emitted as zeros without
// being stored. Entries K..7 of an incoming row are ignored.
//
// Timing: column 0 of a block is valid on the clock after the one in which
// its row 7 was accepted, and columns 1..7 follow on the next seven clocks.
// out_idx gives the column number. There is no backpressure: the input may
// pause between rows at any time, and a new block can never overtake the
// read of the previous one because the read needs 8 clocks and the next
// block at least 8 rows (an assertion checks this).
//
// The source only states that a transpose buffer sits between the two 1-D
// blocks; the ping-pong organisation, the K-column storage and the framing
// by row count are choices of this implementation.
module transpose_buffer
  import mrdct_pkg::*;
#(
  parameter int unsigned K = 6,
  parameter int unsigned W = 11
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                in_valid,
  input  logic signed [W-1:0] row [N],
  output logic                out_valid,
  output idx_t                out_idx,
  output logic signed [W-1:0] col [N]
);

  initial begin
    assert (K >= 1 && K <= N) else $fatal(1, "transpose_buffer: K must be 1..8");
  end

  // Storage: bank, row, column (only the K possibly non-zero columns).
  logic signed [W-1:0] mem [2][N][K];

  logic wr_bank;   // bank the next row goes to
  idx_t wr_row;    // row index of the next row
  logic rd_bank;   // bank being read
  logic rd_active; // a column is read this cycle
  idx_t rd_col;    // column read this cycle

  wire last_row = in_valid && (wr_row == idx_t'(N - 1));

  // ------------------------------------------------------------- write side
  always_ff @(posedge clk) begin
    if (in_valid) begin
      for (int c = 0; c < int'(K); c++) mem[wr_bank][wr_row][c] <= row[c];
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      wr_bank <= 1'b0;
      wr_row  <= '0;
    end else if (in_valid) begin
      wr_row <= wr_row + 1'b1;
      if (last_row) wr_bank <= ~wr_bank;
    end
  end

  // ------------------------------------------------------------- read side
  always_ff @(posedge clk) begin
    if (!rst_n) begin
      rd_active <= 1'b0;
      rd_bank   <= 1'b0;
      rd_col    <= '0;
    end else if (last_row) begin
      rd_active <= 1'b1;
      rd_bank   <= wr_bank;
      rd_col    <= '0;
    end else if (rd_active) begin
      rd_col <= rd_col + 1'b1;
      if (rd_col == idx_t'(N - 1)) rd_active <= 1'b0;
    end
  end

  // Column selected by rd_col; columns at or beyond K are the pruned zeros.
  logic signed [W-1:0] rd_data [N];
  always_comb begin
    for (int r = 0; r < int'(N); r++) begin
      rd_data[r] = '0;
      for (int c = 0; c < int'(K); c++) begin
        if (int'(rd_col) == c) rd_data[r] = mem[rd_bank][r][c];
      end
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_idx   <= '0;
    end else begin
      out_valid <= rd_active;
      out_idx   <= rd_col;
    end
  end

  // Registered column output.
  always_ff @(posedge clk) begin
    if (rd_active) col <= rd_data;
  end

  // A block must be read out completely before its bank is written again.
  property p_no_overrun;
    @(posedge clk) disable iff (!rst_n)
      (in_valid && rd_active) |-> (wr_bank != rd_bank);
  endproperty
  a_no_overrun : assert property (p_no_overrun)
    else $error("transpose_buffer: bank overwritten while being read");

endmodule
