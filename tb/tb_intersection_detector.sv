// Testbench for intersection_detector (W = 8): random merged windows made
// of ascending keys where a key may repeat once from the other cloud, with
// the previous window's last element in front. The expected maps are found
// here by scanning adjacent pairs and must appear, compacted and in order,
// at the front of the output.
module tb_intersection_detector;
  import pointacc_pkg::*;
  localparam int W = 8;
  cmp_t prev_last, win [W];
  map_t maps [W];
  logic [$clog2(W+1)-1:0] count;
  logic [WIDX_W-1:0] widx;
  int checks = 0, failures = 0;

  intersection_detector #(.W(W)) dut (.prev_last, .win, .widx, .maps, .count);

  initial begin
    repeat (2000) begin
      cmp_t e [W+1];
      map_t exp [$];
      logic [KEY_W-1:0] k;
      exp.delete();
      k = KEY_W'($urandom_range(0, 100));
      for (int i = 0; i <= W; i++) begin
        if (i > 0 && e[i-1].valid && $urandom_range(0, 2) == 0 &&
            !(i > 1 && e[i-2].key == e[i-1].key)) begin
          e[i] = '{key: e[i-1].key, valid: 1'b1, src: ~e[i-1].src, idx: IDX_W'($urandom)};
        end else begin
          k += KEY_W'($urandom_range(1, 3));
          e[i] = '{key: k, valid: 1'b1, src: 1'($urandom), idx: IDX_W'($urandom)};
          if ($urandom_range(0, 9) == 0) e[i] = cmp_sentinel();
        end
      end
      widx = WIDX_W'($urandom);
      prev_last = e[0];
      for (int i = 0; i < W; i++) win[i] = e[i+1];
      for (int i = 0; i < W; i++)
        if (e[i].valid && e[i+1].valid && e[i].key == e[i+1].key && e[i].src != e[i+1].src)
          exp.push_back('{p: e[i].src ? e[i].idx : e[i+1].idx, q: e[i].src ? e[i+1].idx : e[i].idx, w: widx});
      #1;
      checks++;
      if (count != exp.size()) begin failures++; $display("FAIL count %0d vs %0d", count, exp.size()); end
      else foreach (exp[j]) begin
        checks++;
        if (maps[j] !== exp[j]) begin failures++; $display("FAIL map %0d", j); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
