// Behavioural model of the off-chip DRAM (not synthesisable, testbench
// only). Two word-addressed arrays: `fmem` holds input feature rows (FW bits,
// read side) and `omem` receives output rows (PWD bits, write side); the
// testbench fills and checks them hierarchically.
// Read protocol: a request (rd_req_valid & rd_req_ready, address, length in
// rows) is queued; after a random latency of 2..LAT_MAX cycles the rows are
// returned in order, one per rd_resp_valid pulse, with random gaps. Requests
// are served one after another. rd_req_ready and wr_ready are random. Counts
// requests, rows read and rows written.
module dram_model #(
  parameter int FW      = 512,
  parameter int PWD     = 2048,
  parameter int DAW     = 32,
  parameter int FDEPTH  = 4096,
  parameter int ODEPTH  = 4096,
  parameter int LAT_MAX = 12
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic           rd_req_valid,
  output logic           rd_req_ready,
  input  logic [DAW-1:0] rd_req_addr,
  input  logic [8:0]     rd_req_len,
  output logic           rd_resp_valid,
  output logic [FW-1:0]  rd_resp_data,
  input  logic           wr_valid,
  output logic           wr_ready,
  input  logic [DAW-1:0] wr_addr,
  input  logic [PWD-1:0] wr_data
);
  logic [FW-1:0]  fmem [FDEPTH];
  logic [PWD-1:0] omem [ODEPTH];
  int n_req = 0, n_rows_rd = 0, n_rows_wr = 0;

  typedef struct { longint a; int len; } req_t;
  req_t rq [$];
  int wait_c = 0, pos = 0;

  initial begin
    for (int i = 0; i < FDEPTH; i++) fmem[i] = '0;
    for (int i = 0; i < ODEPTH; i++) omem[i] = '0;
    rd_req_ready = 0; wr_ready = 0; rd_resp_valid = 0; rd_resp_data = '0;
  end

  always @(posedge clk) begin
    rd_resp_valid <= 1'b0;
    if (!rst_n) begin
      rq.delete(); wait_c = 0; pos = 0;
      rd_req_ready <= 1'b0; wr_ready <= 1'b0;
    end else begin
      if (rd_req_valid && rd_req_ready) begin
        req_t r;
        r.a = longint'(rd_req_addr); r.len = int'(rd_req_len);
        if (rq.size() == 0) wait_c = $urandom_range(2, LAT_MAX);
        rq.push_back(r); n_req++;
      end
      if (rq.size() > 0) begin
        if (wait_c > 0) wait_c--;
        else if ($urandom_range(0, 3) != 0) begin
          rd_resp_valid <= 1'b1;
          rd_resp_data  <= fmem[int'((rq[0].a + longint'(pos)) % FDEPTH)];
          pos++; n_rows_rd++;
          if (pos == rq[0].len) begin
            void'(rq.pop_front()); pos = 0;
            wait_c = $urandom_range(2, LAT_MAX);
          end
        end
      end
      if (wr_valid && wr_ready) begin
        omem[int'(longint'(wr_addr) % ODEPTH)] = wr_data;
        n_rows_wr++;
      end
      rd_req_ready <= ($urandom_range(0, 3) != 0);
      wr_ready     <= ($urandom_range(0, 3) != 0);
    end
  end
endmodule
