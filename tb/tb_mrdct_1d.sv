// tb_mrdct_1d: self-checking test of the pruned 1-D MRDCT for every K.
//
// Eight instances, K = 1..8, receive the same vectors: random signed 8-bit
// samples, the extreme vectors (all -128, all +127, alternating signs) and
// random idle cycles. Each output vector is compared with the matrix product
// of the reference package, including the zeros of the pruned coefficients,
// and must appear exactly three clocks after its input (the pipeline depth),
// with out_valid high on those cycles only.
module tb_mrdct_1d;
  import mrdct_pkg::*;
  import mrdct_ref_pkg::*;

  localparam int IN_W  = 8;
  localparam int OUT_W = IN_W + 3;
  localparam int NCYC  = 3000;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  logic in_valid = 1'b0;
  logic signed [IN_W-1:0] x [N];
  logic out_valid [8];
  logic signed [OUT_W-1:0] y [8][N];

  always #5 clk = ~clk;

  for (genvar g = 0; g < 8; g++) begin : g_dut
    mrdct_1d #(.K(g + 1), .IN_W(IN_W)) dut (
      .clk(clk), .rst_n(rst_n), .in_valid(in_valid), .x(x),
      .out_valid(out_valid[g]), .y(y[g])
    );
  end

  int checks = 0;
  int failures = 0;
  vec_t hist_x [NCYC];
  bit   hist_v [NCYC];
  int   n_vectors = 0;

  // Watchdog.
  initial begin
    repeat (NCYC + 200) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    foreach (x[i]) x[i] = '0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    for (int c = 0; c < NCYC; c++) begin
      @(negedge clk);
      // Outputs now show the input set three negedges ago.
      for (int g = 0; g < 8; g++) begin
        automatic bit ev = (c >= 3) ? hist_v[c-3] : 1'b0;
        checks++;
        if (out_valid[g] !== ev) begin
          failures++;
          $display("K=%0d cycle %0d: out_valid=%0b expected %0b", g + 1, c, out_valid[g], ev);
        end
        if (ev) begin
          for (int k = 0; k < 8; k++) begin
            automatic int e = ref_1d(hist_x[c-3], k, g + 1);
            checks++;
            if (int'(y[g][k]) != e) begin
              failures++;
              if (failures < 20)
                $display("K=%0d cycle %0d: X%0d=%0d expected %0d", g + 1, c, k, y[g][k], e);
            end
          end
        end
      end
      // New input.
      hist_v[c] = (c < NCYC - 4) && ($urandom_range(0, 3) != 0);
      for (int i = 0; i < 8; i++) begin
        case (c % 97)
          10: hist_x[c][i] = -128;
          20: hist_x[c][i] = 127;
          30: hist_x[c][i] = (i % 2 == 0) ? 127 : -128;
          40: hist_x[c][i] = (i % 2 == 0) ? -128 : 127;
          default: hist_x[c][i] = int'($urandom_range(0, 255)) - 128;
        endcase
        x[i] = IN_W'(hist_x[c][i]);
      end
      in_valid = hist_v[c];
      if (hist_v[c]) n_vectors++;
    end
    $display("vectors=%0d", n_vectors);
    if (n_vectors < 1000) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
