// Testbench for bitonic_sorter at its default width: random keys (with
// many repeats), checks ascending order and that the output is a
// permutation of the input (via a sum and xor of a per-element signature).
module tb_bitonic_sorter;
  import pointacc_pkg::*;
  localparam int W = 32;
  cmp_t in [W], out [W];
  int checks = 0, failures = 0;

  bitonic_sorter #(.W(W)) dut (.in, .out);

  initial begin
    repeat (300) begin
      longint si, so; logic [63:0] xi, xo; bit ok;
      si = 0; so = 0; xi = 0; xo = 0;
      for (int i = 0; i < W; i++) begin
        in[i].key = ($urandom_range(0, 1)) ? KEY_W'($urandom_range(0, 15)) : KEY_W'({$urandom, $urandom});
        in[i].valid = 1'b1; in[i].src = 1'($urandom); in[i].idx = IDX_W'(i);
        si += longint'(in[i].key[31:0]) + i; xi ^= {in[i].key[31:0], 32'(i)};
      end
      #1;
      ok = 1;
      for (int i = 0; i < W; i++) begin
        so += longint'(out[i].key[31:0]) + longint'(out[i].idx); xo ^= {out[i].key[31:0], 32'(out[i].idx)};
        if (i > 0 && out[i-1].key > out[i].key) ok = 0;
      end
      checks++; if (!ok) begin failures++; $display("FAIL order"); end
      checks++; if (si != so || xi != xo) begin failures++; $display("FAIL permutation"); end
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
