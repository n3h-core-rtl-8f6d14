// tb_dsp_core: a 3-row DSP-core multiplies unsigned 4-bit activations by
// signed 4-bit weights over two chunks of 16 (inner dimension 32), in two
// Execute instructions (clear on the first, commit on the second), and the
// result tile is compared with an integer product. Each instruction must take
// 3 + 16 cycles per chunk plus one.
`include "tb_util.svh"
module tb_dsp_core;
  import n3h_pkg::*;
  localparam int R = 3, CA = 16, CW = 16, D = 8, C = 2, KD = 2 * C * CA;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic start, busy, done, act_rd_en, w_rd_en, commit_o;
  exec_instr_t ex;
  logic [2:0] act_rd_addr, w_rd_addr;
  logic [63:0] act_data [R];
  logic [63:0] w_data [CW/2];
  logic signed [31:0] acc [R][CW];
  logic [63:0] abuf [R][D];
  logic [63:0] wbuf [CW/2][D];
  int A [R][KD];
  int W [KD][CW];

  dsp_core #(.ROWS(R), .COLS_A(CA), .COLS_W(CW), .DEPTH_A(D), .DEPTH_W(D)) dut (.*);

  always @(posedge clk) begin
    if (act_rd_en) for (int r = 0; r < R; r++) act_data[r] <= abuf[r][act_rd_addr];
    if (w_rd_en)   for (int b = 0; b < CW/2; b++) w_data[b] <= wbuf[b][w_rd_addr];
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++; $display("watchdog"); `TB_FINISH
  end

  initial begin
    start = 0; ex = '0;
    for (int r = 0; r < R; r++) for (int e = 0; e < KD; e++) A[r][e] = (e == 0) ? 15 : $urandom_range(15);
    for (int e = 0; e < KD; e++) for (int n = 0; n < CW; n++) W[e][n] = (e == 0) ? -8 : $urandom_range(15) - 8;
    // chunk c (of all 2*C) of row r at address c; weights: column pair b, chunk c at 2c (even col), 2c+1 (odd)
    for (int c = 0; c < 2 * C; c++) begin
      for (int r = 0; r < R; r++) for (int k = 0; k < CA; k++) abuf[r][c][4*k +: 4] = 4'(A[r][c*CA + k]);
      if (c < 4) for (int b = 0; b < CW/2; b++) for (int k = 0; k < CA; k++) begin
        wbuf[b][2*c][4*k +: 4]     = 4'(W[c*CA + k][2*b]);
        wbuf[b][2*c + 1][4*k +: 4] = 4'(W[c*CA + k][2*b + 1]);
      end
    end
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int p = 0; p < 2; p++) begin
      int t0, lat;
      @(negedge clk);
      ex = '0; ex.op = OP_EXEC; ex.lhs_addr = 16'(p * C); ex.rhs_addr = 16'(2 * p * C);
      ex.chunks = 16'(C); ex.clear = (p == 0); ex.commit = (p == 1);
      start = 1; t0 = $time / 10;
      @(negedge clk); start = 0;
      while (!done) @(negedge clk);
      lat = $time / 10 - t0;
      `CHECK(lat == C * (3 + CA) + 2, "execute latency")
      `CHECK(commit_o == (p == 1), "commit pulse with done")
    end
    for (int r = 0; r < R; r++) for (int n = 0; n < CW; n++) begin
      automatic int s = 0;
      for (int e = 0; e < KD; e++) s += A[r][e] * W[e][n];
      `CHECK(acc[r][n] == s, "dsp tile product")
    end
    `TB_FINISH
  end
endmodule
