// tb_result_buffer: loads two random tiles and reads every beat back,
// checking the packing of two results per beat and that a tile stays put
// while the accumulator inputs change.
`include "tb_util.svh"
module tb_result_buffer;
  localparam int R = 3, C = 4;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic load, rd_en;
  logic signed [31:0] acc_in [R][C];
  logic [1:0] rd_row;
  logic [0:0] rd_beat;
  logic [63:0] rd_data;
  logic [31:0] tile [R][C];

  result_buffer #(.ROWS(R), .COLS(C)) dut (.*);

  initial begin
    repeat (5000) @(posedge clk);
    failures++; $display("watchdog"); `TB_FINISH
  end

  initial begin
    load = 0; rd_en = 0; rd_row = 0; rd_beat = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 2; t++) begin
      @(negedge clk);
      for (int r = 0; r < R; r++) for (int c = 0; c < C; c++) begin
        acc_in[r][c] = $urandom; tile[r][c] = acc_in[r][c];
      end
      load = 1;
      @(negedge clk); load = 0;
      for (int r = 0; r < R; r++) for (int c = 0; c < C; c++) acc_in[r][c] = $urandom;
      for (int r = 0; r < R; r++) for (int b = 0; b < C/2; b++) begin
        rd_en = 1; rd_row = 2'(r); rd_beat = 1'(b);
        @(negedge clk); rd_en = 0;
        `CHECK(rd_data == {tile[r][2*b+1], tile[r][2*b]}, "beat packing")
      end
    end
    `TB_FINISH
  end
endmodule
