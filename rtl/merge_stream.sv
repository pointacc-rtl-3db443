// MergeSort of arbitrary length: N merger with a forwarding loop.
//
// Two ascending streams A (the shifted input cloud) and B (the output cloud)
// arrive one window of W = N/2 elements each. Every cycle the two current
// windows are merged by the N merger and exactly one window is consumed:
// the one whose last element is smaller (A on a tie). That smaller last key
// is the threshold: merged elements above it could still be preceded by
// elements of the next window, so only the elements <= threshold are valid.
// There are W + m of them. The first W are emitted; the next m are kept in
// the forwarding register. In the next cycle the m elements of the window
// that was not consumed reappear at the front of the merge result, and are
// replaced by the m held elements. This is the scheme of the paper's
// MergeSort-of-arbitrary-length example; the tie rule and the end handling
// are this design's own.
//
// End of a stream: the caller raises a_done / b_done and the module feeds
// sentinel windows in its place. One cycle with both streams done flushes
// the held elements; then `finished` rises.
//
// Interface: a_win/b_win are the current windows (valid while !x_done).
// adv_a/adv_b (combinational) say which window is consumed in this cycle
// when en is high; the caller shows the next window of that stream in the
// next cycle. en low stalls everything. start clears the state.
// Timing: out_win/out_valid are registered, one cycle after the windows.
module merge_stream
  import pointacc_pkg::*;
#(
  parameter int W = 32
) (
  input  logic clk,
  input  logic rst_n,
  input  logic en,
  input  logic start,
  input  cmp_t a_win [W],
  input  logic a_done,
  input  cmp_t b_win [W],
  input  logic b_done,
  output logic adv_a,
  output logic adv_b,
  output cmp_t out_win [W],
  output logic out_valid,
  output logic finished
);
  localparam int CW = $clog2(2 * W + 1);

  cmp_t A [W], B [W], res [2*W], held [W];
  logic [CW-1:0] h_q, cnt;
  logic [KEY_W-1:0] thr;
  logic flushing;

  always_comb begin
    for (int i = 0; i < W; i++) begin
      A[i] = a_done ? cmp_sentinel() : a_win[i];
      B[i] = b_done ? cmp_sentinel() : b_win[i];
    end
    adv_a = !a_done && (b_done || A[W-1].key <= B[W-1].key);
    adv_b = !b_done && !adv_a;
    thr   = (A[W-1].key <= B[W-1].key) ? A[W-1].key : B[W-1].key;
    flushing = a_done && b_done;
  end

  bitonic_merger #(.W(W)) u_merger (.a(A), .b(B), .out(res));

  always_comb begin
    cnt = '0;
    for (int i = 0; i < 2 * W; i++) cnt = cnt + CW'(res[i].key <= thr);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      h_q       <= '0;
      out_valid <= 1'b0;
      finished  <= 1'b0;
      for (int i = 0; i < W; i++) begin
        held[i]    <= cmp_sentinel();
        out_win[i] <= cmp_sentinel();
      end
    end else if (start) begin
      h_q       <= '0;
      out_valid <= 1'b0;
      finished  <= 1'b0;
    end else if (en && !finished) begin
      for (int i = 0; i < W; i++) begin
        out_win[i] <= (CW'(i) < h_q) ? held[i] : res[i];
        held[i]    <= res[W+i];
      end
      h_q       <= cnt - CW'(W);
      out_valid <= 1'b1;
      finished  <= flushing;
    end else if (en) begin
      out_valid <= 1'b0;
    end
  end

  // The consumed window always lies entirely below the threshold.
  assert property (@(posedge clk) disable iff (!rst_n)
                   (en && !finished && !start) |-> cnt >= CW'(W));
endmodule
