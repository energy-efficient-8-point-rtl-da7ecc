// tb_hevc_residual: the 2-D pruned MRDCT used as the 8x8 forward transform
// of a video coder, on one CIF luma frame of prediction residuals.
//
// Residuals of 8-bit video lie in -255..255, so the core is instantiated
// with IN_W = 9 (output IN_W + 6 = 15 bits) and the proposed K = 6. The
// frame is 352 x 288 samples = 1584 blocks in raster order, sent back to
// back. Residuals are generated in the testbench: mostly small random
// values, with some blocks at the extremes (all -255, all +255 and the
// +255/-255 sign pattern of T row 4) to reach both ends of the output
// range. Every output column is checked against B = T_K A T_K^T from the
// reference matrix, with its index and its cycle (LAT_2D_LAST_ROW after the
// block's last row).
module tb_hevc_residual;
  import mrdct_pkg::*;
  import mrdct_ref_pkg::*;

  localparam int FW    = 352;
  localparam int FH    = 288;
  localparam int NBLK  = (FW / 8) * (FH / 8);
  localparam int IN_W  = 9;
  localparam int OUT_W = IN_W + 6;
  localparam int KDEF  = 6;
  localparam int NCYC  = NBLK * 8 + 40;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  logic in_valid = 1'b0;
  logic signed [IN_W-1:0]  in_row [N];
  logic                    out_valid;
  idx_t                    out_idx;
  logic signed [OUT_W-1:0] out_col [N];

  always #5 clk = ~clk;

  mrdct2d_top #(.K(KDEF), .IN_W(IN_W)) dut (
    .clk(clk), .rst_n(rst_n), .in_valid(in_valid), .in_row(in_row),
    .out_valid(out_valid), .out_idx(out_idx), .out_col(out_col)
  );

  int checks = 0;
  int failures = 0;
  blk_t blocks [NBLK];
  int   end_cyc [NBLK];
  int   nout = 0;
  int   cyc = 0;
  int   n_min = 0;
  int   n_max = 0;

  initial begin
    repeat (NCYC + 400) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(negedge clk) begin
    if (rst_n && out_valid) begin
      automatic int b = nout / 8;
      automatic int k = nout % 8;
      checks++;
      if (b >= NBLK || int'(out_idx) != k || cyc != end_cyc[b] + 1 + int'(LAT_2D_LAST_ROW) + k) begin
        failures++;
        if (failures < 20) $display("column %0d of block %0d at cycle %0d, index %0d", k, b, cyc, out_idx);
      end else begin
        for (int m = 0; m < 8; m++) begin
          automatic int e = ref_2d(blocks[b], m, k, KDEF);
          checks++;
          if (int'(out_col[m]) != e) begin
            failures++;
            if (failures < 20) $display("block %0d: B[%0d][%0d]=%0d expected %0d", b, m, k, out_col[m], e);
          end
          if (e == -64 * 255) n_min++;
          if (e ==  64 * 255) n_max++;
        end
      end
      nout++;
    end
  end

  initial begin
    foreach (in_row[i]) in_row[i] = '0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    for (int b = 0; b < NBLK; b++) begin
      for (int r = 0; r < 8; r++)
        for (int c = 0; c < 8; c++) begin
          case (b % 50)
            5:  blocks[b][r][c] = -255;
            15: blocks[b][r][c] = 255;
            25: blocks[b][r][c] = (T[4][r] * T[4][c] > 0) ? 255 : -255;
            default: blocks[b][r][c] = int'($urandom_range(0, 64)) - 32;
          endcase
        end
      for (int r = 0; r < 8; r++) begin
        @(negedge clk);
        cyc++;
        in_valid = 1'b1;
        for (int c = 0; c < 8; c++) in_row[c] = IN_W'(blocks[b][r][c]);
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
    checks++;
    if (nout != NBLK * 8) begin
      failures++;
      $display("%0d columns received, expected %0d", nout, NBLK * 8);
    end
    $display("blocks=%0d min_reached=%0d max_reached=%0d", NBLK, n_min, n_max);
    if (n_min == 0 || n_max == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
