// tb_transpose_buffer: self-checking test of the ping-pong transpose buffer.
//
// Two instances, K = 6 and K = 8 (W = 11), receive the same stream of random
// rows, with back-to-back blocks as well as idle cycles inside and between
// blocks. Entries K..7 of every row are random too and must not reach the
// output. For every completed block the testbench schedules the eight
// expected columns on the eight clocks that follow the clock after row 7 was
// accepted, and checks out_valid, out_idx and every column entry against
// that schedule on every cycle.
module tb_transpose_buffer;
  import mrdct_pkg::*;

  localparam int W    = 11;
  localparam int NCYC = 4000;
  localparam int KS [2] = '{6, 8};

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  logic in_valid = 1'b0;
  logic signed [W-1:0] row [N];
  logic       out_valid [2];
  idx_t       out_idx   [2];
  logic signed [W-1:0] col [2][N];

  always #5 clk = ~clk;

  for (genvar g = 0; g < 2; g++) begin : g_dut
    transpose_buffer #(.K(KS[g]), .W(W)) dut (
      .clk(clk), .rst_n(rst_n), .in_valid(in_valid), .row(row),
      .out_valid(out_valid[g]), .out_idx(out_idx[g]), .col(col[g])
    );
  end

  int checks = 0;
  int failures = 0;
  int blk [8][8];
  int nrow = 0;
  int nblocks = 0;
  int n_back_to_back = 0;
  int last_block_end = -100;
  bit exp_v [NCYC + 16];
  int exp_i [NCYC + 16];
  int exp_c [NCYC + 16][8][8];   // cycle, row, column: full block kept

  initial begin
    repeat (NCYC + 200) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    foreach (row[i]) row[i] = '0;
    foreach (exp_v[i]) exp_v[i] = 1'b0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    for (int c = 0; c < NCYC; c++) begin
      automatic bit v;
      @(negedge clk);
      for (int g = 0; g < 2; g++) begin
        checks++;
        if (out_valid[g] !== exp_v[c]) begin
          failures++;
          $display("K=%0d cycle %0d: out_valid=%0b expected %0b", KS[g], c, out_valid[g], exp_v[c]);
        end
        if (exp_v[c]) begin
          checks++;
          if (int'(out_idx[g]) != exp_i[c]) begin
            failures++;
            $display("K=%0d cycle %0d: out_idx=%0d expected %0d", KS[g], c, out_idx[g], exp_i[c]);
          end
          for (int r = 0; r < 8; r++) begin
            automatic int e = (exp_i[c] < KS[g]) ? exp_c[c][r][exp_i[c]] : 0;
            checks++;
            if (int'(col[g][r]) != e) begin
              failures++;
              if (failures < 20)
                $display("K=%0d cycle %0d col %0d row %0d: %0d expected %0d",
                         KS[g], c, exp_i[c], r, col[g][r], e);
            end
          end
        end
      end
      // Stream: bursts of back-to-back rows, with occasional idle cycles.
      v = (c < NCYC - 30) && ((c / 200) % 2 == 0 || $urandom_range(0, 2) != 0);
      in_valid = v;
      for (int i = 0; i < 8; i++) begin
        automatic int s = int'($urandom_range(0, 2047)) - 1024;
        row[i] = W'(s);
        if (v) blk[nrow][i] = s;
      end
      if (v) begin
        nrow++;
        if (nrow == 8) begin
          // Accepted at the next posedge (c+1); column k visible at c+2+k.
          for (int k = 0; k < 8; k++) begin
            exp_v[c+2+k] = 1'b1;
            exp_i[c+2+k] = k;
            exp_c[c+2+k] = blk;
          end
          if (c - last_block_end == 8) n_back_to_back++;
          last_block_end = c;
          nblocks++;
          nrow = 0;
        end
      end
    end
    $display("blocks=%0d back_to_back=%0d", nblocks, n_back_to_back);
    if (nblocks < 100) failures++;
    if (n_back_to_back < 10) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
