// On-chip buffer memory (sorter, merger, input feature, output feature and
// weight buffers all use it).
//
// DEPTH words of DW bits, one write port and NR read ports. Reads are
// synchronous: rdata[i] shows the word at raddr[i] one cycle after the
// address, holding its value while ren[i] is low. A read of the word being
// written returns the old contents. Written as a register array; a chip
// would use SRAM macros of the same shape. Contents are not reset.
module buffer_ram #(
  parameter int DEPTH = 64,
  parameter int DW    = 32,
  parameter int NR    = 1,
  localparam int AW   = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic          clk,
  input  logic          we,
  input  logic [AW-1:0] waddr,
  input  logic [DW-1:0] wdata,
  input  logic          ren   [NR],
  input  logic [AW-1:0] raddr [NR],
  output logic [DW-1:0] rdata [NR]
);
  logic [DW-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
  end

  for (genvar r = 0; r < NR; r++) begin : g_rd
    always_ff @(posedge clk) begin
      if (ren[r]) rdata[r] <= mem[raddr[r]];
    end
  end
endmodule
