// tb_buffer_bank: writes random words to random banks and addresses, then
// reads every address and compares all banks with a reference copy; also
// checks the one-cycle read latency.
`include "tb_util.svh"
module tb_buffer_bank;
  localparam int NB = 4, DEPTH = 16, W = 24;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic wr_en, rd_en;
  logic [1:0] wr_bank;
  logic [3:0] wr_addr, rd_addr;
  logic [W-1:0] wr_data;
  logic [W-1:0] rd_data [NB];
  logic [W-1:0] ref_m [NB][DEPTH];

  buffer_bank #(.NB(NB), .DEPTH(DEPTH), .W(W)) dut (.*);

  initial begin
    repeat (5000) @(posedge clk);
    failures++; $display("watchdog"); `TB_FINISH
  end

  initial begin
    wr_en = 0; rd_en = 0; wr_bank = 0; wr_addr = 0; rd_addr = 0; wr_data = 0;
    // fill everything once, then random overwrites
    for (int i = 0; i < NB * DEPTH + 200; i++) begin
      @(negedge clk);
      wr_en   = 1;
      wr_bank = (i < NB * DEPTH) ? 2'(i / DEPTH) : 2'($urandom);
      wr_addr = (i < NB * DEPTH) ? 4'(i % DEPTH) : 4'($urandom);
      wr_data = W'($urandom);
      ref_m[wr_bank][wr_addr] = wr_data;
    end
    @(negedge clk); wr_en = 0;
    for (int a = 0; a < DEPTH; a++) begin
      @(negedge clk); rd_en = 1; rd_addr = 4'(a);
      @(negedge clk); rd_en = 0; rd_addr = 4'(a + 5);
      for (int b = 0; b < NB; b++) `CHECK(rd_data[b] == ref_m[b][a], "bank read")
      @(negedge clk);   // data must hold while rd_en is low
      for (int b = 0; b < NB; b++) `CHECK(rd_data[b] == ref_m[b][a], "read hold")
    end
    `TB_FINISH
  end
endmodule
