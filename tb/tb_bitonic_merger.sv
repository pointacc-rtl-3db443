// Testbench for bitonic_merger at its default width: two random ascending
// arrays; the output must equal a reference merge computed here (keys).
module tb_bitonic_merger;
  import pointacc_pkg::*;
  localparam int W = 32;
  cmp_t a [W], b [W], out [2*W];
  int checks = 0, failures = 0;

  bitonic_merger #(.W(W)) dut (.a, .b, .out);

  initial begin
    repeat (300) begin
      logic [KEY_W-1:0] ka [W], kb [W], r [2*W];
      int ia, ib, bad;
      ka[0] = KEY_W'($urandom_range(0, 20)); kb[0] = KEY_W'($urandom_range(0, 20));
      for (int i = 1; i < W; i++) begin
        ka[i] = ka[i-1] + KEY_W'($urandom_range(0, 5));
        kb[i] = kb[i-1] + KEY_W'($urandom_range(0, 5));
      end
      for (int i = 0; i < W; i++) begin
        a[i] = '{key: ka[i], valid: 1'b1, src: 1'b1, idx: IDX_W'(i)};
        b[i] = '{key: kb[i], valid: 1'b1, src: 1'b0, idx: IDX_W'(i)};
      end
      ia = 0; ib = 0;
      for (int i = 0; i < 2 * W; i++) begin
        if (ib >= W || (ia < W && ka[ia] <= kb[ib])) begin r[i] = ka[ia]; ia++; end
        else begin r[i] = kb[ib]; ib++; end
      end
      #1;
      bad = 0;
      for (int i = 0; i < 2 * W; i++) if (out[i].key !== r[i]) bad++;
      checks++; if (bad) begin failures++; $display("FAIL %0d keys differ", bad); end
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
