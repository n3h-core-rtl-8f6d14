// tb_result_engine: Sync wait (execute) ; Result ; Sync signal (execute) for a
// 2 x 4 result tile. Nothing may be written to DDR before the token arrives;
// afterwards the tile must be in DDR at base + row*offset and one token must
// go back to the execute engine.
`include "tb_util.svh"
module tb_result_engine;
  import n3h_pkg::*;
  localparam int R = 2, C = 4;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic instr_valid, instr_ready, tok_out_valid, tok_out_ready, tok_in_valid, tok_in_ready;
  logic [127:0] instr;
  logic [2:0] tok_out_data;
  logic rb_rd_en, wr_valid, wr_ready;
  logic [0:0] rb_rd_row, rb_rd_beat;
  logic [63:0] rb_rd_data, wr_data;
  logic [31:0] wr_addr;
  eng_state_e state;
  logic [63:0] tile [R][C/2];
  logic rq_v [1], rq_r [1], rs_v [1], wv [1], wr [1];
  logic [31:0] rq_a [1], wa [1];
  logic [63:0] rs_d [1], wd [1];
  logic [127:0] prog [3];
  int pc, toks, early_writes;

  ddr_model #(.NP(1), .WORDS(1024), .LAT(2), .STALL_PCT(30)) ddr (
    .clk(clk), .rd_req_valid(rq_v), .rd_req_addr(rq_a), .rd_req_ready(rq_r),
    .rd_resp_valid(rs_v), .rd_resp_data(rs_d), .wr_valid(wv), .wr_addr(wa), .wr_data(wd), .wr_ready(wr));
  assign rq_v[0] = 1'b0; assign rq_a[0] = '0;
  assign wv[0] = wr_valid; assign wa[0] = wr_addr; assign wd[0] = wr_data; assign wr_ready = wr[0];

  result_engine #(.ROWS(R), .COLS(C)) dut (.*);

  always @(posedge clk) begin
    if (rb_rd_en) rb_rd_data <= tile[rb_rd_row][rb_rd_beat];
    if (instr_valid && instr_ready) pc++;
    if (rst_n && tok_out_valid && tok_out_ready) toks++;
    if (rst_n && wr_valid && pc < 2) early_writes++;
  end
  assign instr_valid = (pc < 3);
  assign instr = prog[pc < 3 ? pc : 0];

  initial begin
    repeat (5000) @(posedge clk);
    failures++; $display("watchdog"); `TB_FINISH
  end

  initial begin
    mem_instr_t f;
    sync_instr_t s;
    for (int i = 0; i < 1024; i++) ddr.mem[i] = '0;
    for (int r = 0; r < R; r++) for (int b = 0; b < C/2; b++) tile[r][b] = {$urandom, $urandom};
    s = '0; s.op = OP_SYNC; s.cur_state = 1'b0; s.next_state = ENG_EXEC; prog[0] = 128'(s);
    f = '0; f.op = OP_RESULT; f.ddr_base = 32'd300; f.ddr_offset = 24'd7; f.ddr_range = 16'd2; prog[1] = 128'(f);
    s.cur_state = 1'b1; s.flag = 3'b100; prog[2] = 128'(s);
    pc = 3; toks = 0; early_writes = 0; tok_in_valid = 0; tok_out_ready = 1;
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(negedge clk); pc = 0;
    repeat (30) @(negedge clk);
    `CHECK(state == ES_WAIT && ddr.writes == 0, "no write before the execute token")
    tok_in_valid = 1;
    @(negedge clk); tok_in_valid = 0;
    wait (pc == 3 && state == ES_IDLE);
    repeat (2) @(negedge clk);
    for (int r = 0; r < R; r++) for (int b = 0; b < C/2; b++)
      `CHECK(ddr.mem[300 + 7*r + b] == tile[r][b], "tile in DDR")
    `CHECK(toks == 1 && tok_out_data == 3'b100, "token back to execute engine")
    `CHECK(early_writes == 0, "no early writes")
    `TB_FINISH
  end
endmodule
