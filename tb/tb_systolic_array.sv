// Testbench for systolic_array (4 x 5): loads random weights, feeds one
// random feature vector with the input skew done here (element i in cycle
// i), and checks that the bottom of column j carries sum_i a[i]*w[i][j]
// exactly ROWS+j cycles after element 0 entered. Repeated for many vectors.
module tb_systolic_array;
  import pointacc_pkg::*;
  localparam int ROWS = 4, COLS = 5;
  logic clk = 0, rst_n = 0, w_we;
  logic [1:0] w_row;
  logic signed [FEAT_W-1:0] w_data [COLS], a_left [ROWS];
  logic signed [PSUM_W-1:0] p_bot [COLS];
  int checks = 0, failures = 0;
  int wm [ROWS][COLS], av [ROWS], ex [COLS];

  systolic_array #(.ROWS(ROWS), .COLS(COLS)) dut (.clk, .rst_n, .w_we, .w_row, .w_data, .a_left, .p_bot);
  always #5 clk = ~clk;

  initial begin
    w_we = 0; w_row = 0;
    for (int i = 0; i < ROWS; i++) a_left[i] = 0;
    for (int j = 0; j < COLS; j++) w_data[j] = 0;
    repeat (2) @(posedge clk); rst_n = 1; #1;
    for (int i = 0; i < ROWS; i++) begin
      w_we = 1; w_row = 2'(i);
      for (int j = 0; j < COLS; j++) begin wm[i][j] = $urandom_range(0, 255) - 128; w_data[j] = 8'(wm[i][j]); end
      @(posedge clk); #1;
    end
    w_we = 0;
    repeat (100) begin
      for (int i = 0; i < ROWS; i++) av[i] = $urandom_range(0, 255) - 128;
      for (int j = 0; j < COLS; j++) begin
        ex[j] = 0;
        for (int i = 0; i < ROWS; i++) ex[j] += av[i] * wm[i][j];
      end
      // cycle t: row i gets element i when t == i
      for (int t = 0; t < ROWS + COLS + 1; t++) begin
        for (int i = 0; i < ROWS; i++) a_left[i] = (t == i) ? 8'(av[i]) : 8'sd0;
        @(posedge clk); #1;
        // after the edge closing cycle t, column j = t - ROWS + 1 is complete
        for (int j = 0; j < COLS; j++) if (t == ROWS - 1 + j) begin
          checks++;
          if (p_bot[j] != ex[j]) begin failures++; $display("FAIL col %0d %0d vs %0d", j, p_bot[j], ex[j]); end
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
