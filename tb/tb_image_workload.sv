// tb_image_workload: one 512 x 512 8-bit grey-scale image through the 2-D
// pruned MRDCT at every pruning level K = 1..8.
//
// The image is generated in the testbench from a formula (smooth gradients,
// a sinusoid-like ramp pattern and pseudo-random texture), level-shifted by
// -128 and cut into 4096 8x8 blocks in raster order. Eight instances of
// mrdct2d_top, one per K, receive the same rows back to back, one row per
// clock, as a codec would feed them. For each block the testbench computes
// the full B = T A T^T by two matrix products and checks every output of the
// K instance against B masked to its top-left K x K corner, together with
// the column index and the output cycle (LAT_2D_LAST_ROW after the block's
// last row). It also reports the share of coefficient energy that each K
// retains on this image; these figures depend on the synthetic image and
// are for information only, they are not checked.
module tb_image_workload;
  import mrdct_pkg::*;
  import mrdct_ref_pkg::*;

  localparam int IMG    = 512;
  localparam int NBLK   = (IMG / 8) * (IMG / 8);
  localparam int IN_W   = 8;
  localparam int OUT_W  = IN_W + 6;
  localparam int NCYC   = NBLK * 8 + 40;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  logic in_valid = 1'b0;
  logic signed [IN_W-1:0]  in_row [N];
  logic                    out_valid [8];
  idx_t                    out_idx   [8];
  logic signed [OUT_W-1:0] out_col   [8][N];

  always #5 clk = ~clk;

  for (genvar g = 0; g < 8; g++) begin : g_dut
    mrdct2d_top #(.K(g + 1)) dut (
      .clk(clk), .rst_n(rst_n), .in_valid(in_valid), .in_row(in_row),
      .out_valid(out_valid[g]), .out_idx(out_idx[g]), .out_col(out_col[g])
    );
  end

  int checks = 0;
  int failures = 0;
  blk_t full_b [NBLK];       // unpruned 2-D coefficients of every block
  int   end_cyc [NBLK];      // cycle at which row 7 of the block was set
  int   nout [8];            // columns received per instance
  longint energy [8];
  int cyc = 0;

  function automatic int pixel(input int px, input int py);
    int v = (px / 2) + (py / 3) + 64 * (((px / 16) + (py / 16)) % 2)
            + ((px * 7 + py * 13) % 23);
    return v % 256;
  endfunction

  initial begin
    repeat (NCYC + 400) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Output side: compare every received column with the reference.
  always @(negedge clk) begin
    if (rst_n) begin
      for (int g = 0; g < 8; g++) begin
        if (out_valid[g]) begin
          automatic int b = nout[g] / 8;
          automatic int k = nout[g] % 8;
          checks++;
          if (b >= NBLK || int'(out_idx[g]) != k ||
              cyc != end_cyc[b] + 1 + int'(LAT_2D_LAST_ROW) + k) begin
            failures++;
            if (failures < 20)
              $display("K=%0d: column %0d of block %0d at cycle %0d, index %0d", g + 1, k, b, cyc, out_idx[g]);
          end else begin
            for (int m = 0; m < 8; m++) begin
              automatic int e = (m <= g && k <= g) ? full_b[b][m][k] : 0;
              checks++;
              if (int'(out_col[g][m]) != e) begin
                failures++;
                if (failures < 20)
                  $display("K=%0d block %0d: B[%0d][%0d]=%0d expected %0d", g + 1, b, m, k, out_col[g][m], e);
              end
              energy[g] += longint'(e) * longint'(e);
            end
          end
          nout[g]++;
        end
      end
    end
  end

  initial begin
    foreach (in_row[i]) in_row[i] = '0;
    foreach (nout[i]) nout[i] = 0;
    foreach (energy[i]) energy[i] = 0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    for (int b = 0; b < NBLK; b++) begin
      automatic blk_t a;
      automatic blk_t y;
      automatic int bx = (b % (IMG / 8)) * 8;
      automatic int by = (b / (IMG / 8)) * 8;
      for (int r = 0; r < 8; r++)
        for (int c = 0; c < 8; c++) a[r][c] = pixel(bx + c, by + r) - 128;
      // Reference: Y = A T^T, then B = T Y.
      for (int r = 0; r < 8; r++)
        for (int k = 0; k < 8; k++) begin
          y[r][k] = 0;
          for (int n = 0; n < 8; n++) y[r][k] += a[r][n] * T[k][n];
        end
      for (int m = 0; m < 8; m++)
        for (int k = 0; k < 8; k++) begin
          full_b[b][m][k] = 0;
          for (int r = 0; r < 8; r++) full_b[b][m][k] += T[m][r] * y[r][k];
        end
      for (int r = 0; r < 8; r++) begin
        @(negedge clk);
        cyc++;
        in_valid = 1'b1;
        for (int c = 0; c < 8; c++) in_row[c] = IN_W'(a[r][c]);
        if (r == 7) end_cyc[b] = cyc;
      end
    end
    @(negedge clk);
    cyc++;
    in_valid = 1'b0;
    repeat (20) begin
      @(negedge clk);
      cyc++;
    end
    for (int g = 0; g < 8; g++) begin
      checks++;
      if (nout[g] != NBLK * 8) begin
        failures++;
        $display("K=%0d: %0d columns received, expected %0d", g + 1, nout[g], NBLK * 8);
      end
      $display("K=%0d: unscaled coefficient energy in the K x K corner %0d.%02d %% of the whole block (synthetic image)", g + 1,
               energy[g] * 100 / energy[7], (energy[g] * 10000 / energy[7]) % 100);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
