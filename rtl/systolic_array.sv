// Weight-stationary systolic array, the computing core of the matrix unit.
//
// ROWS x COLS processing elements. PE(i,j) holds weight w[i][j]: row i
// works on input channel i, column j on output channel j, as the paper
// assigns them, so the array multiplies one input feature vector (one point)
// by a ROWS x COLS weight matrix. Feature element i enters row i from the
// left and moves one PE to the right per cycle; partial sums move one PE
// down per cycle and leave at the bottom. The caller must skew the input
// (element i delayed by i cycles); the bottom of column j then carries
// sum_i a[i]*w[i][j] ROWS+j cycles after element 0 entered.
// Weights are written one row per cycle through w_we/w_row/w_data; the
// caller does not change them while data is in flight. Every PE is a
// multiplier, an adder and three registers; only weights are not reset.
module systolic_array
  import pointacc_pkg::*;
#(
  parameter int ROWS = 64,
  parameter int COLS = 64,
  localparam int RW = (ROWS > 1) ? $clog2(ROWS) : 1
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     w_we,
  input  logic [RW-1:0]            w_row,
  input  logic signed [FEAT_W-1:0] w_data [COLS],
  input  logic signed [FEAT_W-1:0] a_left [ROWS],   // skewed features
  output logic signed [PSUM_W-1:0] p_bot  [COLS]
);
  logic signed [FEAT_W-1:0] w_r [ROWS][COLS];
  logic signed [FEAT_W-1:0] a_r [ROWS][COLS];
  logic signed [PSUM_W-1:0] p_r [ROWS][COLS];

  for (genvar i = 0; i < ROWS; i++) begin : g_row
    for (genvar j = 0; j < COLS; j++) begin : g_col
      logic signed [FEAT_W-1:0] a_in;
      logic signed [PSUM_W-1:0] p_in;
      if (j == 0) begin : g_al
        assign a_in = a_left[i];
      end else begin : g_ai
        assign a_in = a_r[i][j-1];
      end
      if (i == 0) begin : g_pt
        assign p_in = '0;
      end else begin : g_pi
        assign p_in = p_r[i-1][j];
      end

      always_ff @(posedge clk) begin
        if (w_we && w_row == RW'(i)) w_r[i][j] <= w_data[j];
      end

      always_ff @(posedge clk or negedge rst_n) begin
        if (!rst_n) begin
          a_r[i][j] <= '0;
          p_r[i][j] <= '0;
        end else begin
          a_r[i][j] <= a_in;
          p_r[i][j] <= p_in + PSUM_W'(a_in * w_r[i][j]);
        end
      end
    end
  end

  for (genvar j = 0; j < COLS; j++) begin : g_out
    assign p_bot[j] = p_r[ROWS-1][j];
  end
endmodule
