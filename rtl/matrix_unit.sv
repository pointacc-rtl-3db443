// Matrix unit (MXU): a systolic array with input skew, output de-skew and a
// tag pipeline.
//
// One input feature vector (ROWS channels of one point) may enter per cycle
// with in_valid; it carries a tag (the output point index it contributes
// to). Exactly LAT = ROWS + COLS - 1 cycles later the vector of COLS
// partial sums for that point leaves on out_vec with out_valid and the same
// tag, so the memory management unit can add it into the output buffer
// without any scatter network: one output point per cycle, as the paper
// argues. Cycles without in_valid push zeros. in_flight counts vectors
// inside; weights may only be (re)loaded when it is zero, which keeps the
// array weight stationary. Weight rows are loaded one per cycle.
module matrix_unit
  import pointacc_pkg::*;
#(
  parameter int ROWS  = 64,
  parameter int COLS  = 64,
  parameter int TAG_W = IDX_W,
  localparam int RW   = (ROWS > 1) ? $clog2(ROWS) : 1,
  localparam int LAT  = ROWS + COLS - 1
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     w_we,
  input  logic [RW-1:0]            w_row,
  input  logic signed [FEAT_W-1:0] w_data  [COLS],
  input  logic                     in_valid,
  input  logic signed [FEAT_W-1:0] in_vec  [ROWS],
  input  logic [TAG_W-1:0]         in_tag,
  output logic                     out_valid,
  output logic signed [PSUM_W-1:0] out_vec [COLS],
  output logic [TAG_W-1:0]         out_tag,
  output logic [$clog2(LAT+2)-1:0] in_flight
);
  logic signed [FEAT_W-1:0] a_left [ROWS];
  logic signed [PSUM_W-1:0] p_bot  [COLS];

  // input skew: row i delayed by i cycles
  for (genvar i = 0; i < ROWS; i++) begin : g_skew
    if (i == 0) begin : g_d0
      assign a_left[0] = in_valid ? in_vec[0] : '0;
    end else begin : g_dn
      logic signed [FEAT_W-1:0] sr [i];
      always_ff @(posedge clk or negedge rst_n) begin
        if (!rst_n) begin
          for (int k = 0; k < i; k++) sr[k] <= '0;
        end else begin
          sr[0] <= in_valid ? in_vec[i] : '0;
          for (int k = 1; k < i; k++) sr[k] <= sr[k-1];
        end
      end
      assign a_left[i] = sr[i-1];
    end
  end

  systolic_array #(.ROWS(ROWS), .COLS(COLS)) u_sa (
    .clk, .rst_n, .w_we, .w_row, .w_data, .a_left, .p_bot);

  // output de-skew: column j delayed by COLS-1-j cycles
  for (genvar j = 0; j < COLS; j++) begin : g_desk
    if (j == COLS - 1) begin : g_e0
      assign out_vec[j] = p_bot[j];
    end else begin : g_en
      localparam int D = COLS - 1 - j;
      logic signed [PSUM_W-1:0] sr [D];
      always_ff @(posedge clk or negedge rst_n) begin
        if (!rst_n) begin
          for (int k = 0; k < D; k++) sr[k] <= '0;
        end else begin
          sr[0] <= p_bot[j];
          for (int k = 1; k < D; k++) sr[k] <= sr[k-1];
        end
      end
      assign out_vec[j] = sr[D-1];
    end
  end

  // valid / tag pipeline of the same latency
  logic             v_sr [LAT];
  logic [TAG_W-1:0] t_sr [LAT];
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int k = 0; k < LAT; k++) begin v_sr[k] <= 1'b0; t_sr[k] <= '0; end
      in_flight <= '0;
    end else begin
      v_sr[0] <= in_valid;
      t_sr[0] <= in_tag;
      for (int k = 1; k < LAT; k++) begin v_sr[k] <= v_sr[k-1]; t_sr[k] <= t_sr[k-1]; end
      in_flight <= in_flight + ($clog2(LAT+2))'(in_valid) - ($clog2(LAT+2))'(v_sr[LAT-1]);
    end
  end
  assign out_valid = v_sr[LAT-1];
  assign out_tag   = t_sr[LAT-1];

  assert property (@(posedge clk) disable iff (!rst_n) w_we |-> in_flight == '0);
endmodule
