// tb_dma_rd: three fetches of 128-bit words (two beats each) from a DDR model
// with random stalls and a 4-cycle latency into 3 banks with a bank stride;
// every buffer write (bank, address, data) is compared with the DDR contents,
// and the number of writes and the done pulse are checked.
`include "tb_util.svh"
module tb_dma_rd;
  localparam int BUFW = 128, NBMAX = 4;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic start, busy, done, wr_en;
  logic [31:0] ddr_base;
  logic [23:0] bank_stride;
  logic [15:0] words, buf_base, wr_addr;
  logic [2:0]  nbanks;
  logic [1:0]  wr_bank;
  logic [BUFW-1:0] wr_data;
  logic rq_v [1], rq_r [1], rs_v [1], wv [1], wr [1];
  logic [31:0] rq_a [1], wa [1];
  logic [63:0] rs_d [1], wd [1];
  logic rd_req_valid, rd_req_ready, rd_resp_valid;
  logic [31:0] rd_req_addr;
  logic [63:0] rd_resp_data;
  int nwr;

  ddr_model #(.NP(1), .WORDS(4096), .LAT(4), .STALL_PCT(30)) ddr (
    .clk(clk), .rd_req_valid(rq_v), .rd_req_addr(rq_a), .rd_req_ready(rq_r),
    .rd_resp_valid(rs_v), .rd_resp_data(rs_d), .wr_valid(wv), .wr_addr(wa), .wr_data(wd), .wr_ready(wr));
  assign rq_v[0] = rd_req_valid; assign rq_a[0] = rd_req_addr; assign rd_req_ready = rq_r[0];
  assign rd_resp_valid = rs_v[0]; assign rd_resp_data = rs_d[0];
  assign wv[0] = 1'b0; assign wa[0] = '0; assign wd[0] = '0;

  dma_rd #(.BUFW(BUFW), .NBMAX(NBMAX)) dut (.*);

  always @(posedge clk) if (rst_n && wr_en) begin
    logic [31:0] a;
    nwr++;
    a = ddr_base + 32'(wr_bank) * 32'(bank_stride) + 32'(wr_addr - buf_base) * 2;
    `CHECK(wr_data == {ddr.mem[a + 1], ddr.mem[a]}, "assembled word")
    `CHECK(wr_addr >= buf_base && wr_addr < buf_base + words, "buffer address range")
    `CHECK(32'(wr_bank) < 32'(nbanks), "bank range")
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++; $display("watchdog"); `TB_FINISH
  end

  initial begin
    for (int i = 0; i < 4096; i++) ddr.mem[i] = {$urandom, $urandom};
    start = 0; ddr_base = 0; bank_stride = 0; words = 0; buf_base = 0; nbanks = 0; nwr = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 3; t++) begin
      @(negedge clk);
      ddr_base = 32'(100 + 300 * t); bank_stride = 24'(40 + t); words = 16'(5 + 3 * t);
      buf_base = 16'(7 * t); nbanks = 3'(2 + t % 2); nwr = 0;
      start = 1;
      @(negedge clk); start = 0;
      while (!done) @(negedge clk);
      @(negedge clk);
      `CHECK(nwr == int'(words) * int'(nbanks), "word count")
      `CHECK(!busy, "idle after done")
    end
    `CHECK(ddr.stalls > 0, "DDR stalls exercised")
    `TB_FINISH
  end
endmodule
