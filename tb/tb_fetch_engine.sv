// tb_fetch_engine: a fetch engine with 2 activation and 3 weight banks runs
//   Fetch(act) ; Sync signal ; Sync wait ; Fetch(weight) ; Sync signal
// against a stalling DDR model. Checks: buffer contents of both targets, two
// tokens towards the execute engine, and that while the wait token is held
// back the engine stays in the wait state and issues no DDR request.
`include "tb_util.svh"
module tb_fetch_engine;
  import n3h_pkg::*;
  localparam int BUFW = 128, NA = 2, NW = 3, D = 16;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic instr_valid, instr_ready, tok_out_valid, tok_out_ready, tok_in_valid, tok_in_ready;
  logic [127:0] instr;
  logic [2:0] tok_out_data;
  logic rd_req_valid, rd_req_ready, rd_resp_valid;
  logic [31:0] rd_req_addr;
  logic [63:0] rd_resp_data;
  logic act_wr_en, w_wr_en;
  logic [0:0] act_wr_bank;
  logic [1:0] w_wr_bank;
  logic [3:0] act_wr_addr, w_wr_addr;
  logic [BUFW-1:0] wr_data;
  eng_state_e state;
  logic [BUFW-1:0] abuf [NA][D];
  logic [BUFW-1:0] wbuf [NW][D];
  logic rq_v [1], rq_r [1], rs_v [1], wv [1], wr [1];
  logic [31:0] rq_a [1], wa [1];
  logic [63:0] rs_d [1], wd [1];
  logic [127:0] prog [5];
  int pc, tokens, wait_cycles, reqs_in_wait;

  ddr_model #(.NP(1), .WORDS(2048), .LAT(3), .STALL_PCT(25)) ddr (
    .clk(clk), .rd_req_valid(rq_v), .rd_req_addr(rq_a), .rd_req_ready(rq_r),
    .rd_resp_valid(rs_v), .rd_resp_data(rs_d), .wr_valid(wv), .wr_addr(wa), .wr_data(wd), .wr_ready(wr));
  assign rq_v[0] = rd_req_valid; assign rq_a[0] = rd_req_addr; assign rd_req_ready = rq_r[0];
  assign rd_resp_valid = rs_v[0]; assign rd_resp_data = rs_d[0];
  assign wv[0] = 1'b0; assign wa[0] = '0; assign wd[0] = '0;

  fetch_engine #(.BUFW(BUFW), .NB_A(NA), .NB_W(NW), .DEPTH_A(D), .DEPTH_W(D)) dut (.*);

  function automatic logic [127:0] f_mem(logic w, logic [15:0] bb, logic [31:0] base, logic [23:0] off, logic [15:0] rng);
    mem_instr_t f; f = '0; f.op = OP_FETCH; f.stage = {2'b0, w}; f.buf_rw = 1'b1;
    f.buf_base = bb; f.ddr_base = base; f.ddr_offset = off; f.ddr_range = rng;
    return 128'(f);
  endfunction
  function automatic logic [127:0] f_sync(logic send);
    sync_instr_t s; s = '0; s.op = OP_SYNC; s.cur_state = send; s.next_state = ENG_EXEC; s.flag = 3'b001;
    return 128'(s);
  endfunction

  always @(posedge clk) begin
    if (act_wr_en) abuf[act_wr_bank][act_wr_addr] <= wr_data;
    if (w_wr_en)   wbuf[w_wr_bank][w_wr_addr]     <= wr_data;
    if (tok_out_valid && tok_out_ready) begin
      tokens++;
      `CHECK(tok_out_data == 3'b001, "token flag")
    end
    if (instr_valid && instr_ready) pc++;
    if (state == ES_WAIT) begin
      wait_cycles++;
      if (rd_req_valid) reqs_in_wait++;
    end
  end
  assign instr_valid = (pc < 5);
  assign instr = prog[pc < 5 ? pc : 0];

  initial begin
    repeat (20000) @(posedge clk);
    failures++; $display("watchdog"); `TB_FINISH
  end

  initial begin
    for (int i = 0; i < 2048; i++) ddr.mem[i] = {$urandom, $urandom};
    prog[0] = f_mem(1'b0, 16'd1, 32'd64, 24'd20, 16'd3);
    prog[1] = f_sync(1'b1);
    prog[2] = f_sync(1'b0);
    prog[3] = f_mem(1'b1, 16'd4, 32'd512, 24'd9, 16'd4);
    prog[4] = f_sync(1'b1);
    pc = 5; tokens = 0; wait_cycles = 0; reqs_in_wait = 0;
    tok_out_ready = 1; tok_in_valid = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(negedge clk); pc = 0;
    wait (state == ES_WAIT);
    repeat (40) @(negedge clk);
    `CHECK(state == ES_WAIT && pc == 3, "held in wait without token")
    tok_in_valid = 1;
    @(negedge clk); tok_in_valid = 0;
    wait (pc == 5 && state == ES_IDLE);
    repeat (3) @(negedge clk);
    for (int b = 0; b < NA; b++) for (int w = 0; w < 3; w++)
      `CHECK(abuf[b][1 + w] == {ddr.mem[64 + 20*b + 2*w + 1], ddr.mem[64 + 20*b + 2*w]}, "activation buffer word")
    for (int b = 0; b < NW; b++) for (int w = 0; w < 4; w++)
      `CHECK(wbuf[b][4 + w] == {ddr.mem[512 + 9*b + 2*w + 1], ddr.mem[512 + 9*b + 2*w]}, "weight buffer word")
    `CHECK(tokens == 2, "two tokens signalled")
    `CHECK(wait_cycles >= 40, "waited")
    `CHECK(reqs_in_wait == 0, "no DDR traffic while waiting")
    `TB_FINISH
  end
endmodule
