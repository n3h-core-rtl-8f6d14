// tb_lut_core: a 2 x 3 DPU array with K = 64 multiplies a random signed
// 3-bit activation matrix by a random signed 4-bit weight matrix, one Execute
// instruction per plane pair as the instruction generator would issue them.
// The committed accumulators are compared with an integer matrix product;
// the start-to-done latency of every instruction must be chunks + 2 cycles.
`include "tb_util.svh"
module tb_lut_core;
  import n3h_pkg::*;
  localparam int M = 2, N = 3, K = 64, D = 16, C = 3, BA = 3, BW = 4, KD = C * K;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic start, busy, done, act_rd_en, w_rd_en, commit_o;
  exec_instr_t ex;
  logic [3:0] act_rd_addr, w_rd_addr;
  logic [K-1:0] act_data [M];
  logic [K-1:0] w_data [N];
  logic signed [31:0] acc [M][N];
  logic [K-1:0] abuf [M][D];
  logic [K-1:0] wbuf [N][D];
  int A [M][KD];
  int W [KD][N];
  int commits;

  lut_core #(.M(M), .N(N), .K(K), .DEPTH_A(D), .DEPTH_W(D)) dut (.*);

  always @(posedge clk) begin
    if (act_rd_en) for (int m = 0; m < M; m++) act_data[m] <= abuf[m][act_rd_addr];
    if (w_rd_en)   for (int n = 0; n < N; n++) w_data[n]   <= wbuf[n][w_rd_addr];
    if (commit_o) commits++;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++; $display("watchdog"); `TB_FINISH
  end

  initial begin
    start = 0; ex = '0; commits = 0;
    // random operands; activation plane i at buffer address i*C, weight plane j at j*C
    for (int m = 0; m < M; m++) for (int e = 0; e < KD; e++) A[m][e] = $urandom_range(7) - 4;
    for (int e = 0; e < KD; e++) for (int n = 0; n < N; n++) W[e][n] = $urandom_range(15) - 8;
    for (int i = 0; i < BA; i++) for (int c = 0; c < C; c++) for (int m = 0; m < M; m++)
      for (int b = 0; b < K; b++) abuf[m][i*C + c][b] = 1'((A[m][c*K + b] >>> i) & 1);
    for (int j = 0; j < BW; j++) for (int c = 0; c < C; c++) for (int n = 0; n < N; n++)
      for (int b = 0; b < K; b++) wbuf[n][j*C + c][b] = 1'((W[c*K + b][n] >>> j) & 1);
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int rep = 0; rep < 2; rep++)
    for (int j = 0; j < BW; j++) for (int i = 0; i < BA; i++) begin
      int t0, lat;
      @(negedge clk);
      ex = '0;
      ex.op = OP_EXEC; ex.lhs_addr = 16'(i * C); ex.rhs_addr = 16'(j * C); ex.chunks = 16'(C);
      ex.shift = 5'(i + j); ex.negate = (i == BA - 1) ^ (j == BW - 1);
      ex.clear = (i == 0 && j == 0); ex.commit = (i == BA - 1 && j == BW - 1);
      start = 1;
      t0 = $time / 10;
      @(negedge clk); start = 0;
      while (!done) @(negedge clk);
      lat = $time / 10 - t0;
      `CHECK(lat == C + 3, "execute latency")
    end
    @(negedge clk);
    for (int m = 0; m < M; m++) for (int n = 0; n < N; n++) begin
      automatic int s = 0;
      for (int e = 0; e < KD; e++) s += A[m][e] * W[e][n];
      `CHECK(acc[m][n] == s, "bit-serial product")
    end
    `CHECK(commits == 2, "one commit per product")
    `TB_FINISH
  end
endmodule
