// ddr_model: behavioural model of the off-chip DDR memory for the testbenches
// (not synthesizable). It holds WORDS 64-bit words and serves NP read ports
// and NP write ports. A read request is accepted when rd_req_ready is high
// (ready is withdrawn at random, about one cycle in STALL_PCT percent); its data
// comes back LAT cycles later on rd_resp_valid, in request order, and cannot
// be stalled. Writes are accepted when wr_ready is high (also random). The
// testbench fills and inspects `mem` directly by hierarchical reference.
module ddr_model #(
  parameter int unsigned NP        = 2,
  parameter int unsigned WORDS     = 65536,
  parameter int unsigned LAT       = 4,
  parameter int unsigned STALL_PCT = 20
) (
  input  logic              clk,
  input  logic              rd_req_valid  [NP],
  input  logic [31:0]       rd_req_addr   [NP],
  output logic              rd_req_ready  [NP],
  output logic              rd_resp_valid [NP],
  output logic [63:0]       rd_resp_data  [NP],
  input  logic              wr_valid      [NP],
  input  logic [31:0]       wr_addr       [NP],
  input  logic [63:0]       wr_data       [NP],
  output logic              wr_ready      [NP]
);
  logic [63:0] mem [WORDS];
  int unsigned stalls;          // cycles a valid request or write met ready low
  int unsigned reads, writes;

  typedef struct { longint unsigned due; logic [63:0] data; } resp_t;
  resp_t       q [NP][$];
  longint unsigned cyc;

  initial begin
    cyc = 0; stalls = 0; reads = 0; writes = 0;
    for (int p = 0; p < NP; p++) begin
      rd_req_ready[p] = 1'b1; wr_ready[p] = 1'b1; rd_resp_valid[p] = 1'b0; rd_resp_data[p] = '0;
    end
  end

  always @(posedge clk) begin
    cyc <= cyc + 1;
    for (int p = 0; p < NP; p++) begin
      if (rd_req_valid[p] && rd_req_ready[p]) begin
        q[p].push_back('{cyc + LAT, mem[rd_req_addr[p] % WORDS]});
        reads++;
      end
      if (rd_req_valid[p] && !rd_req_ready[p]) stalls++;
      if (wr_valid[p] && wr_ready[p]) begin
        mem[wr_addr[p] % WORDS] <= wr_data[p];
        writes++;
      end
      if (wr_valid[p] && !wr_ready[p]) stalls++;
      if (q[p].size() != 0 && q[p][0].due <= cyc) begin
        rd_resp_valid[p] <= 1'b1;
        rd_resp_data[p]  <= q[p][0].data;
        void'(q[p].pop_front());
      end else rd_resp_valid[p] <= 1'b0;
      rd_req_ready[p] <= ($urandom_range(99) >= STALL_PCT);
      wr_ready[p]     <= ($urandom_range(99) >= STALL_PCT);
    end
  end
endmodule
