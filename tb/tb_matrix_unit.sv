// Testbench for matrix_unit (8 x 6 array): loads a random weight matrix,
// streams random feature vectors back to back with gaps, and checks each
// output vector (sum_i a[i]*w[i][j], computed here), its tag, and that it
// leaves exactly ROWS+COLS-1 cycles after it entered. Then reloads new
// weights after the array drains and repeats.
module tb_matrix_unit;
  import pointacc_pkg::*;
  localparam int ROWS = 8, COLS = 6, LAT = ROWS + COLS - 1;
  logic clk = 0, rst_n = 0, w_we, in_valid, out_valid;
  logic [2:0] w_row;
  logic signed [FEAT_W-1:0] w_data [COLS], in_vec [ROWS];
  logic signed [PSUM_W-1:0] out_vec [COLS];
  logic [IDX_W-1:0] in_tag, out_tag;
  logic [$clog2(LAT+2)-1:0] in_flight;
  int checks = 0, failures = 0, cyc = 0;
  int wm [ROWS][COLS];

  matrix_unit #(.ROWS(ROWS), .COLS(COLS)) dut (.clk, .rst_n, .w_we, .w_row, .w_data,
    .in_valid, .in_vec, .in_tag, .out_valid, .out_vec, .out_tag, .in_flight);
  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  typedef struct { int t; int tag; int exp [COLS]; } pend_t;
  pend_t pq [$];

  always @(negedge clk) if (rst_n && out_valid) begin
    pend_t p;
    checks++;
    if (pq.size() == 0) begin failures++; $display("FAIL unexpected output"); end
    else begin
      p = pq.pop_front();
      if (cyc - p.t != LAT) begin failures++; $display("FAIL latency %0d", cyc - p.t); end
      if (out_tag != IDX_W'(p.tag)) begin failures++; $display("FAIL tag"); end
      for (int j = 0; j < COLS; j++) if (out_vec[j] != p.exp[j]) begin
        failures++; $display("FAIL col %0d: %0d vs %0d", j, out_vec[j], p.exp[j]); break;
      end
    end
  end

  task automatic load_w();
    for (int i = 0; i < ROWS; i++) begin
      w_we = 1; w_row = 3'(i);
      for (int j = 0; j < COLS; j++) begin wm[i][j] = $urandom_range(0, 255) - 128; w_data[j] = 8'(wm[i][j]); end
      @(posedge clk); #1;
    end
    w_we = 0;
  endtask

  initial begin
    w_we = 0; in_valid = 0; w_row = 0; in_tag = 0;
    for (int i = 0; i < ROWS; i++) in_vec[i] = 0;
    for (int j = 0; j < COLS; j++) w_data[j] = 0;
    repeat (2) @(posedge clk); rst_n = 1; #1;
    repeat (3) begin
      load_w();
      repeat (60) begin
        pend_t p;
        in_valid = ($urandom_range(0, 3) != 0);
        in_tag = IDX_W'($urandom);
        for (int i = 0; i < ROWS; i++) in_vec[i] = 8'($urandom);
        if (in_valid) begin
          p.t = cyc; p.tag = int'(in_tag);
          for (int j = 0; j < COLS; j++) begin
            p.exp[j] = 0;
            for (int i = 0; i < ROWS; i++) p.exp[j] += int'(in_vec[i]) * wm[i][j];
          end
          pq.push_back(p);
        end
        @(posedge clk); #1;
      end
      in_valid = 0;
      while (in_flight != 0) @(posedge clk);
      #1;
    end
    repeat (LAT + 2) @(posedge clk);
    checks++; if (pq.size() != 0) begin failures++; $display("FAIL missing outputs"); end
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
