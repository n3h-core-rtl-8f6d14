// tb_dpu: random K-bit plane chunks, shifts and signs; the accumulator is
// compared with an integer model of AND-popcount-shift-accumulate, including
// the clear that starts a new dot product.
`include "tb_util.svh"
module tb_dpu;
  localparam int K = 128;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic clear, valid, negate;
  logic [K-1:0] a, w;
  logic [4:0] shift;
  logic signed [31:0] acc;
  longint model;

  dpu #(.K(K), .ACC_W(32)) dut (.*);

  initial begin
    repeat (10000) @(posedge clk);
    failures++; $display("watchdog"); `TB_FINISH
  end

  initial begin
    clear = 0; valid = 0; negate = 0; a = 0; w = 0; shift = 0; model = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 2000; t++) begin
      int pc;
      @(negedge clk);
      valid  = ($urandom_range(9) < 8);
      clear  = ($urandom_range(19) == 0);
      negate = $urandom_range(1);
      shift  = 5'($urandom_range(14));
      for (int i = 0; i < K / 32; i++) begin
        a[32*i +: 32] = $urandom;
        w[32*i +: 32] = (t % 3 == 0) ? 32'hffffffff : $urandom;
      end
      pc = 0;
      for (int i = 0; i < K; i++) pc += (a[i] && w[i]) ? 1 : 0;
      if (clear) model = 0;
      if (valid) model = negate ? model - (longint'(pc) << shift) : model + (longint'(pc) << shift);
      @(posedge clk); #1;
      `CHECK(acc == 32'(model), "accumulator")
    end
    `TB_FINISH
  end
endmodule
