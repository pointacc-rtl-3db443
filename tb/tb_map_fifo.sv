// Testbench for map_fifo (DEPTH = 8): random pushes and pops against a
// queue; checks data order, level, full (push_ready low) and empty.
module tb_map_fifo;
  import pointacc_pkg::*;
  localparam int DEPTH = 8;
  logic clk = 0, rst_n = 0, push_valid, push_ready, pop_valid, pop_ready;
  map_t push_data, pop_data;
  logic [$clog2(DEPTH+1)-1:0] level;
  map_t q [$];
  int checks = 0, failures = 0, fulls = 0;

  map_fifo #(.DEPTH(DEPTH)) dut (.clk, .rst_n, .push_valid, .push_ready, .push_data,
                                 .pop_valid, .pop_ready, .pop_data, .level);
  always #5 clk = ~clk;

  initial begin
    push_valid = 0; pop_ready = 0; push_data = '0;
    repeat (2) @(posedge clk); rst_n = 1; #1;
    repeat (3000) begin
      bit pu, po;
      push_valid = ($urandom_range(0, 99) < 55);
      pop_ready  = ($urandom_range(0, 99) < 45);
      push_data  = map_t'({$urandom, $urandom});
      #1;
      checks++;
      if (level != q.size() || pop_valid != (q.size() > 0) || push_ready != (q.size() < DEPTH)) begin
        failures++; $display("FAIL status level=%0d ref=%0d", level, q.size());
      end
      if (pop_valid) begin
        checks++;
        if (pop_data !== q[0]) begin failures++; $display("FAIL data"); end
      end
      if (!push_ready) fulls++;
      pu = push_valid && push_ready; po = pop_valid && pop_ready;
      @(posedge clk); #1;
      if (po) void'(q.pop_front());
      if (pu) q.push_back(push_data);
    end
    checks++; if (fulls == 0) begin failures++; $display("FAIL never full"); end
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
