// mrdct_1d: pruned 8-point modified rounded DCT (MRDCT), one vector per clock.
//
// Computes the first K coefficients of X = T x, where T is the 8x8 MRDCT
// matrix with entries in {0, +1, -1}:
//   X0 = x0+x1+x2+x3+x4+x5+x6+x7      X4 = x0-x1-x2+x3+x4-x5-x6+x7
//   X1 = x0-x7                         X5 = x6-x1
//   X2 = x0-x3-x4+x7                   X6 = x2+x5-x1-x6
//   X3 = x5-x2                         X7 = x4-x3
// The fast algorithm is a three-stage adder network, each stage followed by a
// register:
//   stage 1  a_i = x_i + x_{7-i} (i = 0..3), and the odd outputs
//            X1 = x0-x7, X3 = x5-x2, X5 = x6-x1, X7 = x4-x3
//   stage 2  c0 = a0+a3, c1 = a1+a2, X2 = a0-a3, X6 = a2-a1
//   stage 3  X0 = c0+c1, X4 = c0-c1
// Pruning keeps only the adders that the first K outputs need, which gives
// K + 6 additions (7 for K = 1 up to 14 for the full K = 8 transform, 12 for
// the default K = 6). Outputs K..7 are constant zero, so a pruned result is
// still an 8-entry vector with trailing null coefficients.
//
// Interface: x is an 8-entry vector of signed IN_W-bit samples, y the 8
// coefficients X0..X7 in natural order, OUT_W = IN_W + 3 bits (full
// precision, one bit of growth per stage). in_valid travels with the data;
// out_valid and y follow in_valid by exactly three clocks. There is no
// backpressure: the pipeline accepts a new vector every clock.
//
// The matrix, the stage structure and the adder counts per K follow the
// source design. Word lengths, the valid bit, the synchronous active-low
// reset of the valid pipeline, the natural output order and the equal
// three-register latency on every output lane are choices of this
// implementation.
module mrdct_1d
  import mrdct_pkg::*;
#(
  parameter int unsigned K     = 6,
  parameter int unsigned IN_W  = 8,
  parameter int unsigned OUT_W = IN_W + GROWTH_1D
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    in_valid,
  input  logic signed [IN_W-1:0]  x [N],
  output logic                    out_valid,
  output logic signed [OUT_W-1:0] y [N]
);

  localparam int unsigned W1 = IN_W + 1;  // after stage 1
  localparam int unsigned W2 = IN_W + 2;  // after stage 2
  localparam int unsigned W3 = IN_W + 3;  // after stage 3

  initial begin
    assert (K >= 1 && K <= N) else $fatal(1, "mrdct_1d: K must be 1..8");
    assert (OUT_W >= W3) else $fatal(1, "mrdct_1d: OUT_W too narrow");
  end

  // ---------------------------------------------------------------- valid
  logic v1, v2, v3;
  always_ff @(posedge clk) begin
    if (!rst_n) begin
      v1 <= 1'b0;
      v2 <= 1'b0;
      v3 <= 1'b0;
    end else begin
      v1 <= in_valid;
      v2 <= v1;
      v3 <= v2;
    end
  end
  assign out_valid = v3;

  // ---------------------------------------------------------------- stage 1
  // Even-part sums, needed by X0 for every K.
  logic signed [W1-1:0] a [4];
  always_ff @(posedge clk) begin
    if (in_valid) begin
      for (int i = 0; i < 4; i++) a[i] <= W1'(x[i]) + W1'(x[N-1-i]);
    end
  end

  // Odd outputs: each is one subtraction, then delayed to stage 3.
  logic signed [W1-1:0] s3_x1, s3_x3, s3_x5, s3_x7;

  if (K >= 2) begin : g_x1
    logic signed [W1-1:0] s1_x1, s2_x1;
    always_ff @(posedge clk) begin
      if (in_valid) s1_x1 <= W1'(x[0]) - W1'(x[7]);
      if (v1)       s2_x1 <= s1_x1;
      if (v2)       s3_x1 <= s2_x1;
    end
  end else begin : g_no_x1
    assign s3_x1 = '0;
  end

  if (K >= 4) begin : g_x3
    logic signed [W1-1:0] s1_x3, s2_x3;
    always_ff @(posedge clk) begin
      if (in_valid) s1_x3 <= W1'(x[5]) - W1'(x[2]);
      if (v1)       s2_x3 <= s1_x3;
      if (v2)       s3_x3 <= s2_x3;
    end
  end else begin : g_no_x3
    assign s3_x3 = '0;
  end

  if (K >= 6) begin : g_x5
    logic signed [W1-1:0] s1_x5, s2_x5;
    always_ff @(posedge clk) begin
      if (in_valid) s1_x5 <= W1'(x[6]) - W1'(x[1]);
      if (v1)       s2_x5 <= s1_x5;
      if (v2)       s3_x5 <= s2_x5;
    end
  end else begin : g_no_x5
    assign s3_x5 = '0;
  end

  if (K >= 8) begin : g_x7
    logic signed [W1-1:0] s1_x7, s2_x7;
    always_ff @(posedge clk) begin
      if (in_valid) s1_x7 <= W1'(x[4]) - W1'(x[3]);
      if (v1)       s2_x7 <= s1_x7;
      if (v2)       s3_x7 <= s2_x7;
    end
  end else begin : g_no_x7
    assign s3_x7 = '0;
  end

  // ---------------------------------------------------------------- stage 2
  logic signed [W2-1:0] c0, c1;
  always_ff @(posedge clk) begin
    if (v1) begin
      c0 <= W2'(a[0]) + W2'(a[3]);
      c1 <= W2'(a[1]) + W2'(a[2]);
    end
  end

  logic signed [W2-1:0] s3_x2, s3_x6;

  if (K >= 3) begin : g_x2
    logic signed [W2-1:0] s2_x2;
    always_ff @(posedge clk) begin
      if (v1) s2_x2 <= W2'(a[0]) - W2'(a[3]);
      if (v2) s3_x2 <= s2_x2;
    end
  end else begin : g_no_x2
    assign s3_x2 = '0;
  end

  if (K >= 7) begin : g_x6
    logic signed [W2-1:0] s2_x6;
    always_ff @(posedge clk) begin
      if (v1) s2_x6 <= W2'(a[2]) - W2'(a[1]);
      if (v2) s3_x6 <= s2_x6;
    end
  end else begin : g_no_x6
    assign s3_x6 = '0;
  end

  // ---------------------------------------------------------------- stage 3
  logic signed [W3-1:0] s3_x0, s3_x4;
  always_ff @(posedge clk) begin
    if (v2) s3_x0 <= W3'(c0) + W3'(c1);
  end

  if (K >= 5) begin : g_x4
    always_ff @(posedge clk) begin
      if (v2) s3_x4 <= W3'(c0) - W3'(c1);
    end
  end else begin : g_no_x4
    assign s3_x4 = '0;
  end

  // ---------------------------------------------------------------- output
  // Sign-extend every lane to OUT_W, natural coefficient order.
  always_comb begin
    y[0] = OUT_W'(s3_x0);
    y[1] = OUT_W'(s3_x1);
    y[2] = OUT_W'(s3_x2);
    y[3] = OUT_W'(s3_x3);
    y[4] = OUT_W'(s3_x4);
    y[5] = OUT_W'(s3_x5);
    y[6] = OUT_W'(s3_x6);
    y[7] = OUT_W'(s3_x7);
  end

endmodule
