// tb_sync_fifo: random pushes and pops against a queue reference; checks
// order, full/empty flags and count.
`include "tb_util.svh"
module tb_sync_fifo;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic in_valid, in_ready, out_valid, out_ready;
  logic [7:0] in_data, out_data;
  logic [3:0] count;
  logic [7:0] ref_q [$];

  sync_fifo #(.WIDTH(8), .DEPTH(5)) dut (.*);

  initial begin
    repeat (20000) @(posedge clk);
    failures++; $display("watchdog"); `TB_FINISH
  end

  initial begin
    in_valid = 0; out_ready = 0; in_data = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 3000; t++) begin
      @(negedge clk);
      `CHECK(count == ref_q.size(), "count")
      `CHECK(out_valid == (ref_q.size() != 0), "out_valid")
      `CHECK(in_ready == (ref_q.size() < 5), "in_ready")
      if (out_valid && ref_q.size() != 0) `CHECK(out_data == ref_q[0], "data order")
      in_valid  = ($urandom_range(99) < ((t / 500) % 2 ? 70 : 40));
      out_ready = ($urandom_range(99) < ((t / 500) % 2 ? 40 : 70));
      in_data   = 8'($urandom);
      @(posedge clk);
      #1;
    end
    `TB_FINISH
  end

  always @(posedge clk) if (rst_n) begin
    if (out_valid && out_ready) void'(ref_q.pop_front());
    if (in_valid && in_ready) ref_q.push_back(in_data);
  end
endmodule
