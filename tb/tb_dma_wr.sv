// tb_dma_wr: a 3 x 4 result tile (two beats per row) is written to DDR with a
// row stride, against random write stalls; the DDR contents are compared
// beat by beat and the untouched gap between rows must stay unchanged.
`include "tb_util.svh"
module tb_dma_wr;
  localparam int R = 3, C = 4;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic start, busy, done, rb_rd_en, wr_valid, wr_ready;
  logic [31:0] ddr_base, wr_addr;
  logic [23:0] row_stride;
  logic [15:0] beats;
  logic [1:0]  rb_rd_row;
  logic [0:0]  rb_rd_beat;
  logic [63:0] rb_rd_data, wr_data;
  logic [63:0] tile [R][C/2];
  logic rq_v [1], rq_r [1], rs_v [1], wv [1], wr [1];
  logic [31:0] rq_a [1], wa [1];
  logic [63:0] rs_d [1], wd [1];

  ddr_model #(.NP(1), .WORDS(1024), .LAT(2), .STALL_PCT(40)) ddr (
    .clk(clk), .rd_req_valid(rq_v), .rd_req_addr(rq_a), .rd_req_ready(rq_r),
    .rd_resp_valid(rs_v), .rd_resp_data(rs_d), .wr_valid(wv), .wr_addr(wa), .wr_data(wd), .wr_ready(wr));
  assign rq_v[0] = 1'b0; assign rq_a[0] = '0;
  assign wv[0] = wr_valid; assign wa[0] = wr_addr; assign wd[0] = wr_data; assign wr_ready = wr[0];

  dma_wr #(.ROWS(R), .COLS(C)) dut (.*);

  always @(posedge clk) if (rb_rd_en) rb_rd_data <= tile[rb_rd_row][rb_rd_beat];

  initial begin
    repeat (5000) @(posedge clk);
    failures++; $display("watchdog"); `TB_FINISH
  end

  initial begin
    for (int i = 0; i < 1024; i++) ddr.mem[i] = 64'hdead;
    for (int r = 0; r < R; r++) for (int b = 0; b < C/2; b++) tile[r][b] = {$urandom, $urandom};
    start = 0; ddr_base = 0; row_stride = 0; beats = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    ddr_base = 200; row_stride = 5; beats = 2; start = 1;
    @(negedge clk); start = 0;
    while (!done) @(negedge clk);
    for (int r = 0; r < R; r++) begin
      for (int b = 0; b < C/2; b++) `CHECK(ddr.mem[200 + 5*r + b] == tile[r][b], "result beat in DDR")
      `CHECK(ddr.mem[200 + 5*r + 2] == 64'hdead, "gap untouched")
    end
    `CHECK(ddr.writes == R * C / 2, "write count")
    `TB_FINISH
  end
endmodule
