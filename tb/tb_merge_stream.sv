// Testbench for merge_stream (W = 4, the paper's N = 8 example).
// 1. The two 8-element clouds of the paper's MergeSort-of-arbitrary-length
//    example: the first two output windows must be (-1,3)(0,2)(0,2)(0,5)
//    and (1,1)(1,1)(1,4)(1,4), as printed in the example.
// 2. Random sorted streams of random lengths, with random stalls: the
//    concatenated valid outputs must equal a reference merge, and the merge
//    must take exactly one active cycle per window plus one flush cycle.
module tb_merge_stream;
  import pointacc_pkg::*;
  localparam int W = 4;
  logic clk = 0, rst_n = 0, en, start;
  cmp_t a_win [W], b_win [W], out_win [W];
  logic a_done, b_done, adv_a, adv_b, out_valid, finished;
  int checks = 0, failures = 0;

  merge_stream #(.W(W)) dut (.clk, .rst_n, .en, .start, .a_win, .a_done, .b_win, .b_done,
                             .adv_a, .adv_b, .out_win, .out_valid, .finished);
  always #5 clk = ~clk;

  logic [KEY_W-1:0] ka [$], kb [$];
  int pa, pb, na, nb;
  logic [KEY_W-1:0] got [$];

  function automatic logic [KEY_W-1:0] k2(int x, int y);
    return coord_key(coord_t'(x), coord_t'(y), '0);
  endfunction

  always_comb begin
    for (int i = 0; i < W; i++) begin
      int ia, ib;
      ia = pa * W + i; ib = pb * W + i;
      a_win[i] = (ia < ka.size()) ? '{key: ka[ia], valid: 1'b1, src: 1'b1, idx: IDX_W'(ia)} : cmp_sentinel();
      b_win[i] = (ib < kb.size()) ? '{key: kb[ib], valid: 1'b1, src: 1'b0, idx: IDX_W'(ib)} : cmp_sentinel();
    end
    a_done = pa >= na;
    b_done = pb >= nb;
  end

  always @(posedge clk) if (rst_n && en && !start && !finished) begin
    if (adv_a) pa <= pa + 1;
    if (adv_b) pb <= pb + 1;
  end

  task automatic run(int stall_pct, output int active, output int wins);
    got.delete();
    na = (ka.size() + W - 1) / W; nb = (kb.size() + W - 1) / W;
    pa = 0; pb = 0; active = 0; wins = 0;
    start = 1; en = 0; @(posedge clk); #1; start = 0;
    while (!finished) begin
      en = ($urandom_range(0, 99) >= stall_pct);
      if (en) active++;
      @(posedge clk); #1;
      if (en && out_valid) begin
        wins++;
        for (int i = 0; i < W; i++) if (out_win[i].valid) got.push_back(out_win[i].key);
      end
    end
  endtask

  initial begin
    int act, wins;
    en = 0; start = 0; pa = 0; pb = 0; na = 0; nb = 0;
    repeat (2) @(posedge clk); rst_n = 1; #1;
    // ---- paper example
    ka = '{k2(0,2), k2(1,1), k2(1,4), k2(2,0), k2(2,3), k2(3,2), k2(3,3), k2(4,2)};
    kb = '{k2(-1,3), k2(0,2), k2(0,5), k2(1,1), k2(1,4), k2(2,3), k2(2,4), k2(3,3)};
    na = 2; nb = 2;
    start = 1; @(posedge clk); #1; start = 0;
    checks++; if (!adv_b || adv_a) begin failures++; $display("FAIL: output window should advance first"); end
    en = 1; @(posedge clk); #1;
    begin
      logic [KEY_W-1:0] e0 [W], e1 [W];
      e0 = '{k2(-1,3), k2(0,2), k2(0,2), k2(0,5)};
      e1 = '{k2(1,1), k2(1,1), k2(1,4), k2(1,4)};
      for (int i = 0; i < W; i++) begin checks++; if (out_win[i].key !== e0[i]) begin failures++; $display("FAIL it0 %0d", i); end end
      @(posedge clk); #1;
      for (int i = 0; i < W; i++) begin checks++; if (out_win[i].key !== e1[i]) begin failures++; $display("FAIL it1 %0d", i); end end
    end
    en = 0;
    // ---- random streams
    repeat (60) begin
      int n1, n2, stall;
      logic [KEY_W-1:0] all [$];
      logic [KEY_W-1:0] v;
      ka.delete(); kb.delete();
      n1 = $urandom_range(1, 23); n2 = $urandom_range(1, 23);
      v = KEY_W'($urandom_range(0, 3));
      for (int i = 0; i < n1; i++) begin v += KEY_W'($urandom_range(1, 4)); ka.push_back(v); end
      v = KEY_W'($urandom_range(0, 3));
      for (int i = 0; i < n2; i++) begin v += KEY_W'($urandom_range(1, 4)); kb.push_back(v); end
      all = {ka, kb}; all.sort();
      stall = $urandom_range(0, 1) ? 0 : 30;
      run(stall, act, wins);
      checks++;
      if (got.size() != all.size()) begin failures++; $display("FAIL size %0d vs %0d", got.size(), all.size()); end
      else foreach (all[i]) if (got[i] !== all[i]) begin failures++; $display("FAIL order at %0d", i); break; end
      checks++;
      if (wins != na + nb + 1) begin failures++; $display("FAIL cycles %0d vs %0d", wins, na + nb + 1); end
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
