// tb_exec_engine: runs Execute, signal-fetch, signal-result, wait-fetch,
// wait-result, Execute against a stand-in core that finishes after 6 cycles.
// Checks: each Execute reaches the core once with its fields intact, the engine
// stays in run until the core is done, tokens go to the right neighbour, and
// each wait holds the engine until the right queue offers a token.
`include "tb_util.svh"
module tb_exec_engine;
  import n3h_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic instr_valid, instr_ready;
  logic [127:0] instr;
  logic tf_out_valid, tf_out_ready, tf_in_valid, tf_in_ready;
  logic tr_out_valid, tr_out_ready, tr_in_valid, tr_in_ready;
  logic [2:0] tok_out_data;
  logic core_start, core_done;
  exec_instr_t core_instr;
  eng_state_e state;
  logic [127:0] prog [6];
  int pc, starts, ftok, rtok, busy_cnt, run_cycles;

  exec_engine dut (.*);

  function automatic logic [127:0] e_ex(logic [15:0] l, logic [15:0] r);
    exec_instr_t x; x = '0; x.op = OP_EXEC; x.lhs_addr = l; x.rhs_addr = r; x.chunks = 16'd3; x.shift = 5'd2;
    return 128'(x);
  endfunction
  function automatic logic [127:0] e_sync(logic send, eng_e peer);
    sync_instr_t s; s = '0; s.op = OP_SYNC; s.cur_state = send; s.next_state = peer; s.flag = 3'b010;
    return 128'(s);
  endfunction

  assign instr_valid = (pc < 6);
  assign instr = prog[pc < 6 ? pc : 0];

  always @(posedge clk) begin
    if (instr_valid && instr_ready) pc++;
    if (core_start) begin
      starts++;
      `CHECK(core_instr.lhs_addr == 16'(starts * 10) && core_instr.rhs_addr == 16'(starts * 10 + 1), "execute fields")
      busy_cnt <= 6;
    end else if (busy_cnt > 0) busy_cnt <= busy_cnt - 1;
    core_done <= (busy_cnt == 1);
    if (state == ES_RUN) run_cycles++;
    if (tf_out_valid && tf_out_ready) ftok++;
    if (tr_out_valid && tr_out_ready) rtok++;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++; $display("watchdog"); `TB_FINISH
  end

  initial begin
    prog[0] = e_ex(16'd10, 16'd11);
    prog[1] = e_sync(1'b1, ENG_FETCH);
    prog[2] = e_sync(1'b1, ENG_RESULT);
    prog[3] = e_sync(1'b0, ENG_FETCH);
    prog[4] = e_sync(1'b0, ENG_RESULT);
    prog[5] = e_ex(16'd20, 16'd21);
    pc = 6; starts = 0; ftok = 0; rtok = 0; busy_cnt = 0; core_done = 0; run_cycles = 0;
    tf_out_ready = 1; tr_out_ready = 1; tf_in_valid = 0; tr_in_valid = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(negedge clk); pc = 0;
    wait (pc == 4);
    repeat (20) @(negedge clk);
    `CHECK(state == ES_WAIT && pc == 4, "waiting for fetch token")
    `CHECK(ftok == 1 && rtok == 1, "signals routed to their neighbours")
    tr_in_valid = 1;           // wrong queue: must not release the wait
    repeat (5) @(negedge clk);
    `CHECK(pc == 4, "result token does not satisfy fetch wait")
    tf_in_valid = 1;
    @(negedge clk); tf_in_valid = 0;
    @(negedge clk);
    // the result token already on offer releases the next wait at once
    @(negedge clk); tr_in_valid = 0;
    wait (pc == 6 && state == ES_IDLE);
    repeat (3) @(negedge clk);
    `CHECK(starts == 2, "two executes")
    `CHECK(run_cycles >= 12, "run until core done")
    `TB_FINISH
  end
endmodule
