// Map FIFO between the mapping unit and the memory management unit.
//
// Holds maps (p index, q index, w index), the three fields of the paper's
// Map FIFO. Valid/ready on both sides: a push happens when push_valid and
// push_ready, a pop when pop_valid and pop_ready. pop_data is the head,
// visible in the same cycle (first-word fall-through). Depth is this
// design's choice and must be a power of two. Registered pointers, reset to empty.
module map_fifo
  import pointacc_pkg::*;
#(
  parameter int DEPTH = 64
) (
  input  logic clk,
  input  logic rst_n,
  input  logic push_valid,
  output logic push_ready,
  input  map_t push_data,
  output logic pop_valid,
  input  logic pop_ready,
  output map_t pop_data,
  output logic [$clog2(DEPTH+1)-1:0] level
);
  localparam int AW = $clog2(DEPTH);
  localparam int LW = $clog2(DEPTH + 1);
  map_t mem [DEPTH];
  logic [AW-1:0] rd_q, wr_q;
  logic do_push, do_pop;

  assign push_ready = level < DEPTH[$clog2(DEPTH+1)-1:0];
  assign pop_valid  = level != '0;
  assign pop_data   = mem[rd_q];
  assign do_push    = push_valid && push_ready;
  assign do_pop     = pop_valid && pop_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rd_q <= '0; wr_q <= '0; level <= '0;
    end else begin
      if (do_push) wr_q <= wr_q + 1'b1;
      if (do_pop)  rd_q <= rd_q + 1'b1;
      level <= level + LW'(do_push) - LW'(do_pop);
    end
  end

  always_ff @(posedge clk) begin
    if (do_push) mem[wr_q] <= push_data;
  end

  assert property (@(posedge clk) disable iff (!rst_n) !(push_valid && !push_ready && level == '0));
endmodule
