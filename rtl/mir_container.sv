// MIR container: the set of Memory Meta Info Registers of the MMU.
//
// ENTRIES registers of type mir_t, used in one of three ways chosen by mode:
//  * MIR_TAG   - direct-mapped tag array. lookup_idx selects an entry, and
//                lookup_hit says whether it is valid and its tile_id equals
//                lookup_tag. wr_en writes entry wr_idx (cache fill).
//  * MIR_FIFO  - push appends at the tail, pop removes the head; head_mir
//                is the oldest entry.
//  * MIR_STACK - push puts an entry on top, pop removes the top; head_mir
//                is the top entry (the layer being computed).
// upd_en overwrites the head (FIFO) or top (STACK) entry with upd_mir, which
// is how the owner shrinks a tile's occupancy as its data is used.
// clear empties the container. All updates take effect at the clock edge;
// lookups and head_mir are combinational. The three uses follow the paper;
// the port set is this design's.
module mir_container
  import pointacc_pkg::*;
#(
  parameter int ENTRIES = 64,
  localparam int AW = $clog2(ENTRIES),
  localparam int CW = $clog2(ENTRIES + 1)
) (
  input  logic                clk,
  input  logic                rst_n,
  input  mir_mode_e           mode,
  input  logic                clear,
  // tag array
  input  logic [AW-1:0]       lookup_idx,
  input  logic [TILEID_W-1:0] lookup_tag,
  output logic                lookup_hit,
  output mir_t                lookup_mir,
  input  logic                wr_en,
  input  logic [AW-1:0]       wr_idx,
  input  mir_t                wr_mir,
  // FIFO / stack
  input  logic                push,
  input  mir_t                push_mir,
  input  logic                pop,
  input  logic                upd_en,
  input  mir_t                upd_mir,
  output mir_t                head_mir,
  output logic [CW-1:0]       count,
  output logic                full,
  output logic                empty
);
  mir_t          ent [ENTRIES];
  logic [AW-1:0] rd_q, wr_q;
  logic [AW-1:0] top_idx, head_idx;

  assign lookup_mir = ent[lookup_idx];
  assign lookup_hit = ent[lookup_idx].valid && ent[lookup_idx].tile_id == lookup_tag;
  assign full       = count == CW'(ENTRIES);
  assign empty      = count == '0;
  assign top_idx    = wr_q - 1'b1;
  assign head_idx   = (mode == MIR_STACK) ? top_idx : rd_q;
  assign head_mir   = ent[head_idx];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rd_q <= '0; wr_q <= '0; count <= '0;
      for (int i = 0; i < ENTRIES; i++) ent[i] <= '0;
    end else if (clear) begin
      rd_q <= '0; wr_q <= '0; count <= '0;
      for (int i = 0; i < ENTRIES; i++) ent[i].valid <= 1'b0;
    end else begin
      unique case (mode)
        MIR_TAG: begin
          if (wr_en) ent[wr_idx] <= wr_mir;
        end
        MIR_FIFO: begin
          if (upd_en) ent[rd_q] <= upd_mir;
          if (push && !full) begin
            ent[wr_q] <= push_mir;
            wr_q <= wr_q + 1'b1;
          end
          if (pop && !empty) begin
            ent[rd_q].valid <= 1'b0;
            rd_q <= rd_q + 1'b1;
          end
          count <= count + CW'(push && !full) - CW'(pop && !empty);
        end
        MIR_STACK: begin
          // push and pop in the same cycle replace the top entry
          if (pop && !empty && push) begin
            ent[top_idx] <= push_mir;
          end else if (push && !full) begin
            if (upd_en && !empty) ent[top_idx] <= upd_mir;
            ent[wr_q] <= push_mir;
            wr_q  <= wr_q + 1'b1;
            count <= count + 1'b1;
          end else if (pop && !empty) begin
            ent[top_idx].valid <= 1'b0;
            wr_q  <= wr_q - 1'b1;
            count <= count - 1'b1;
          end else if (upd_en && !empty) begin
            ent[top_idx] <= upd_mir;
          end
        end
        default: ;
      endcase
    end
  end
endmodule
