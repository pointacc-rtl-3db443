// Testbench for mir_container (8 entries), one phase per mode:
//  * tag array: random fills and lookups against a reference tag table;
//  * FIFO: random push/pop/update against a queue (head = oldest);
//  * stack: the paper's three-layer fusion walk (push layer 0, 1, 2, halve
//    layer 1, pop back to it) plus random push/pop against a queue used as a
//    stack (head = newest).
module tb_mir_container;
  import pointacc_pkg::*;
  localparam int E = 8;
  logic clk = 0, rst_n = 0, clear, lookup_hit, wr_en, push, pop, upd_en, full, empty;
  mir_mode_e mode;
  logic [2:0] lookup_idx, wr_idx;
  logic [TILEID_W-1:0] lookup_tag;
  mir_t lookup_mir, wr_mir, push_mir, upd_mir, head_mir;
  logic [3:0] count;
  int checks = 0, failures = 0;

  mir_container #(.ENTRIES(E)) dut (.clk, .rst_n, .mode, .clear, .lookup_idx, .lookup_tag,
    .lookup_hit, .lookup_mir, .wr_en, .wr_idx, .wr_mir, .push, .push_mir, .pop, .upd_en,
    .upd_mir, .head_mir, .count, .full, .empty);
  always #5 clk = ~clk;

  function automatic mir_t rnd_mir();
    mir_t m;
    m = mir_t'({$urandom, $urandom, $urandom});
    m.valid = 1'b1;
    return m;
  endfunction

  task automatic idle();
    clear = 0; wr_en = 0; push = 0; pop = 0; upd_en = 0;
  endtask

  initial begin
    mir_t q [$];
    logic [TILEID_W-1:0] tags [E];
    bit vld [E];
    idle(); mode = MIR_TAG; lookup_idx = 0; lookup_tag = 0; wr_idx = 0;
    wr_mir = '0; push_mir = '0; upd_mir = '0;
    repeat (2) @(posedge clk); rst_n = 1; #1;
    // ---------------- tag array
    for (int i = 0; i < E; i++) vld[i] = 0;
    repeat (500) begin
      lookup_idx = 3'($urandom); lookup_tag = TILEID_W'($urandom_range(0, 3));
      #1; checks++;
      if (lookup_hit != (vld[lookup_idx] && tags[lookup_idx] == lookup_tag)) begin failures++; $display("FAIL tag hit"); end
      wr_en = 1'($urandom); wr_idx = 3'($urandom); wr_mir = rnd_mir();
      wr_mir.tile_id = TILEID_W'($urandom_range(0, 3));
      @(posedge clk); #1;
      if (wr_en) begin vld[wr_idx] = 1; tags[wr_idx] = wr_mir.tile_id; end
      wr_en = 0;
    end
    // ---------------- FIFO
    mode = MIR_FIFO; clear = 1; @(posedge clk); #1; idle();
    repeat (500) begin
      push = 1'($urandom); pop = 1'($urandom); upd_en = ($urandom_range(0, 3) == 0) && !pop;
      push_mir = rnd_mir(); upd_mir = rnd_mir();
      #1; checks++;
      if (count != q.size() || empty != (q.size() == 0) || full != (q.size() == E) ||
          (q.size() > 0 && head_mir !== q[0])) begin failures++; $display("FAIL fifo"); end
      @(posedge clk); #1;
      begin
        int s0;
        s0 = q.size();
        if (upd_en && s0 > 0) q[0] = upd_mir;
        if (pop && s0 > 0) void'(q.pop_front());
        if (push && s0 < E) q.push_back(push_mir);
      end
    end
    // ---------------- stack: fusion walk of three layers, 64-point tile
    mode = MIR_STACK; clear = 1; @(posedge clk); #1; idle();
    q.delete();
    push = 1; push_mir = '{valid: 1, tile_id: 0, capacity: 64, offset: 0, occupancy: 64, tail: 64};
    @(posedge clk); #1;
    push_mir = '{valid: 1, tile_id: 1, capacity: 64, offset: 64, occupancy: 64, tail: 64};
    @(posedge clk); #1; idle();
    checks++; if (head_mir.tile_id != 1 || count != 2) begin failures++; $display("FAIL stack push"); end
    // layer 1 used half its data: shrink it and push layer 2
    upd_en = 1; upd_mir = head_mir; upd_mir.occupancy = 32;
    push = 1; push_mir = '{valid: 1, tile_id: 2, capacity: 32, offset: 128, occupancy: 32, tail: 32};
    @(posedge clk); #1; idle();
    checks++; if (head_mir.tile_id != 2 || count != 3) begin failures++; $display("FAIL stack push 2"); end
    pop = 1; @(posedge clk); #1; idle();
    checks++; if (head_mir.tile_id != 1 || head_mir.occupancy != 32) begin failures++; $display("FAIL stack back to layer 1"); end
    // random stack traffic
    clear = 1; @(posedge clk); #1; idle();
    repeat (500) begin
      push = 1'($urandom); pop = 1'($urandom); upd_en = 0;
      push_mir = rnd_mir();
      #1; checks++;
      if (count != q.size() || (q.size() > 0 && head_mir !== q[$])) begin failures++; $display("FAIL stack"); end
      @(posedge clk); #1;
      if (pop && push && q.size() > 0) q[$] = push_mir;
      else if (push && q.size() < E) q.push_back(push_mir);
      else if (pop && q.size() > 0) void'(q.pop_back());
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
