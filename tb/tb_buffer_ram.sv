// Testbench for buffer_ram: random writes and two-port reads against a
// reference array kept here; checks one-cycle read latency, hold while
// ren is low, and old-data-on-collision.
module tb_buffer_ram;
  localparam int DEPTH = 64, DW = 32, NR = 2;
  logic clk = 0, we;
  logic [5:0] waddr, raddr [NR];
  logic [DW-1:0] wdata, rdata [NR];
  logic ren [NR];
  logic [DW-1:0] ref_mem [DEPTH];
  int checks = 0, failures = 0;

  buffer_ram #(.DEPTH(DEPTH), .DW(DW), .NR(NR)) dut (.clk, .we, .waddr, .wdata, .ren, .raddr, .rdata);
  always #5 clk = ~clk;

  initial begin
    logic [DW-1:0] exp [NR], held [NR];
    we = 1;
    for (int a = 0; a < DEPTH; a++) begin
      waddr = 6'(a); wdata = $urandom; ref_mem[a] = wdata;
      ren[0] = 0; ren[1] = 0; raddr[0] = 0; raddr[1] = 0;
      @(posedge clk); #1;
    end
    for (int r = 0; r < NR; r++) held[r] = rdata[r];
    repeat (2000) begin
      we = 1'($urandom); waddr = 6'($urandom); wdata = $urandom;
      for (int r = 0; r < NR; r++) begin
        ren[r] = 1'($urandom); raddr[r] = 6'($urandom);
        exp[r] = ren[r] ? ref_mem[raddr[r]] : held[r];
      end
      @(posedge clk); #1;
      if (we) ref_mem[waddr] = wdata;
      for (int r = 0; r < NR; r++) begin
        checks++;
        if (rdata[r] !== exp[r]) begin failures++; $display("FAIL port %0d", r); end
        held[r] = rdata[r];
      end
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
