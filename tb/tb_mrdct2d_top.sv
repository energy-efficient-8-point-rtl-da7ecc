// tb_mrdct2d_top: end-to-end test of the 2-D pruned MRDCT core at its
// default parameters (K = 6, 8-bit signed input, 14-bit output).
//
// A stream of 8x8 blocks is sent row by row: random blocks, extreme blocks
// (all -128, which gives the most negative B[0][0] = -8192; all +127; a
// +127/-128 checkerboard; and the +127/-128 pattern of T row 4 in both
// directions, which gives the largest positive coefficient B[4][4] = 8160),
// runs of blocks sent back to back
// at one row per clock, and blocks with idle cycles between their rows. For
// every block the expected output B = T_K A T_K^T is computed from the
// reference matrix, and the eight columns are expected on the eight clocks
// that start LAT_2D_LAST_ROW clocks after row 7 was accepted. out_valid,
// out_idx and all 64 entries are checked on every cycle, so both the
// latency and the one-block-per-8-clocks rate are checked.
//
// Mechanisms counted (each must occur): back-to-back blocks, idle cycles
// inside a block, reads from each of the two transpose banks, extreme
// blocks, output values at both ends of the 14-bit range, and non-zero
// coefficients next to pruned (zero) positions.
module tb_mrdct2d_top;
  import mrdct_pkg::*;
  import mrdct_ref_pkg::*;

  localparam int IN_W  = 8;
  localparam int OUT_W = IN_W + 6;
  localparam int KDEF  = 6;
  localparam int NCYC  = 6000;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  logic in_valid = 1'b0;
  logic signed [IN_W-1:0]  in_row [N];
  logic                    out_valid;
  idx_t                    out_idx;
  logic signed [OUT_W-1:0] out_col [N];

  always #5 clk = ~clk;

  mrdct2d_top dut (
    .clk(clk), .rst_n(rst_n), .in_valid(in_valid), .in_row(in_row),
    .out_valid(out_valid), .out_idx(out_idx), .out_col(out_col)
  );

  int checks = 0;
  int failures = 0;
  blk_t blk;
  int nrow = 0;
  int nblocks = 0;
  int n_back_to_back = 0;
  int n_gap_in_block = 0;
  int n_extreme = 0;
  int n_bank_read [2] = '{0, 0};
  int n_pruned_nonzero = 0;
  int n_peak = 0;
  int last_block_end = -100;
  int blk_kind = 0;
  bit exp_v [NCYC + 32];
  int exp_i [NCYC + 32];
  blk_t exp_a [NCYC + 32];

  initial begin
    repeat (NCYC + 300) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Count which transpose bank each block is read from.
  always @(posedge clk) begin
    if (rst_n && dut.u_transpose.rd_active && dut.u_transpose.rd_col == 3'd0)
      n_bank_read[dut.u_transpose.rd_bank]++;
  end

  initial begin
    foreach (in_row[i]) in_row[i] = '0;
    foreach (exp_v[i]) exp_v[i] = 1'b0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    for (int c = 0; c < NCYC; c++) begin
      automatic bit v;
      @(negedge clk);
      checks++;
      if (out_valid !== exp_v[c]) begin
        failures++;
        $display("cycle %0d: out_valid=%0b expected %0b", c, out_valid, exp_v[c]);
      end
      if (exp_v[c]) begin
        checks++;
        if (int'(out_idx) != exp_i[c]) begin
          failures++;
          $display("cycle %0d: out_idx=%0d expected %0d", c, out_idx, exp_i[c]);
        end
        for (int m = 0; m < 8; m++) begin
          automatic int e = ref_2d(exp_a[c], m, exp_i[c], KDEF);
          checks++;
          if (int'(out_col[m]) != e) begin
            failures++;
            if (failures < 20)
              $display("cycle %0d: B[%0d][%0d]=%0d expected %0d", c, m, exp_i[c], out_col[m], e);
          end
          if (e == -8192 || e == 8160) n_peak++;
          if (e != 0 && m == KDEF - 1 && exp_i[c] == KDEF - 1) n_pruned_nonzero++;
        end
      end
      // Phases of 400 cycles alternate between continuous and gapped input.
      v = (c < NCYC - 40) && ((c / 400) % 2 == 0 || $urandom_range(0, 2) != 0);
      if (v && nrow == 0) blk_kind = (nblocks % 10 < 4) ? (nblocks % 10) + 1 : 0;
      in_valid = v;
      for (int i = 0; i < 8; i++) begin
        automatic int s;
        case (blk_kind)
          1: s = -128;
          2: s = 127;
          3: s = (((nrow + i) % 2) == 0) ? 127 : -128;
          4: s = (T[4][nrow] * T[4][i] > 0) ? 127 : -128;
          default: s = int'($urandom_range(0, 255)) - 128;
        endcase
        in_row[i] = IN_W'(s);
        if (v) blk[nrow][i] = s;
      end
      if (!v && nrow != 0) n_gap_in_block++;
      if (v) begin
        nrow++;
        if (nrow == 8) begin
          for (int k = 0; k < 8; k++) begin
            exp_v[c + 1 + LAT_2D_LAST_ROW + k] = 1'b1;
            exp_i[c + 1 + LAT_2D_LAST_ROW + k] = k;
            exp_a[c + 1 + LAT_2D_LAST_ROW + k] = blk;
          end
          if (c - last_block_end == 8) n_back_to_back++;
          if (blk_kind != 0) n_extreme++;
          last_block_end = c;
          nblocks++;
          nrow = 0;
        end
      end
    end
    $display("blocks=%0d back_to_back=%0d gaps_in_block=%0d bank0_reads=%0d bank1_reads=%0d extreme=%0d peak_values=%0d corner_nonzero=%0d",
             nblocks, n_back_to_back, n_gap_in_block, n_bank_read[0], n_bank_read[1],
             n_extreme, n_peak, n_pruned_nonzero);
    if (nblocks < 100)           begin failures++; $display("too few blocks"); end
    if (n_back_to_back == 0)     begin failures++; $display("no back-to-back blocks"); end
    if (n_gap_in_block == 0)     begin failures++; $display("no gaps inside a block"); end
    if (n_bank_read[0] == 0)     begin failures++; $display("bank 0 never read"); end
    if (n_bank_read[1] == 0)     begin failures++; $display("bank 1 never read"); end
    if (n_extreme == 0)          begin failures++; $display("no extreme blocks"); end
    if (n_peak == 0)             begin failures++; $display("extreme coefficient values never reached"); end
    if (n_pruned_nonzero == 0)   begin failures++; $display("corner coefficient never non-zero"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
