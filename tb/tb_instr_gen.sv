// tb_instr_gen: the three instruction streams of the generator are compared,
// word by word, with a reference built in the testbench from the schedule
// rule (fetch R0, L0, SE, L1, SE, ...; a WE before each weight-group refill;
// execute WF before the first use of every fetched plane, SF after each
// released group, SE/WE with the result engine; result WE, Result, SE).
// Five programmes are run: 2x4 signed, 1x1 (bit-parallel DSP-core), 3x3,
// 4x8 and 2x2, the last three with random back-pressure. With all queues ready the
// generator must emit one instruction per cycle per stream: `done` follows
// the last instruction of the longest stream by two cycles.
`include "tb_util.svh"
module tb_instr_gen;
  import n3h_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic start, busy, done, f_valid, f_ready, e_valid, e_ready, r_valid, r_ready;
  logic [127:0] f_instr, e_instr, r_instr;
  gen_cfg_t cfg;
  logic [127:0] qf [$], qe [$], qr [$];
  int stall_pct, n_wait_we, n_sf;

  instr_gen dut (.*);

  function automatic logic [127:0] sy(input logic send, input eng_e peer, input logic [2:0] flag);
    sync_instr_t s;
    s = '0; s.op = OP_SYNC; s.cur_state = send; s.next_state = peer; s.flag = flag;
    return 128'(s);
  endfunction

  function automatic logic [127:0] mm(input op_e op, input int bb, input logic w,
                                      input logic [31:0] base, input int off, input int rng);
    mem_instr_t f;
    f = '0; f.op = op; f.buf_base = 16'(bb); f.stage = {2'b0, w}; f.buf_rw = (op == OP_FETCH);
    f.ddr_base = base; f.ddr_offset = 24'(off); f.ddr_range = 16'(rng);
    return 128'(f);
  endfunction

  task automatic build(input gen_cfg_t c);
    int g;
    g = (c.bw + 1) / 2;
    qf.delete(); qe.delete(); qr.delete();
    for (int j = 0; j < c.bw; j++) begin
      if (j > 0 && j % g == 0) begin
        qf.push_back(sy(1'b0, ENG_EXEC, 3'b010));
        qe.push_back(sy(1'b1, ENG_FETCH, 3'b010));
      end
      qf.push_back(mm(OP_FETCH, (j % g) * c.w_words, 1'b1, c.w_base + 32'(j) * c.w_plane_stride,
                      c.w_bank_stride, c.w_words));
      if (j == 0)
        for (int i = 0; i < c.ba; i++) begin
          qf.push_back(mm(OP_FETCH, i * c.a_words, 1'b0, c.act_base + 32'(i) * c.act_plane_stride,
                          c.act_bank_stride, c.a_words));
          qf.push_back(sy(1'b1, ENG_EXEC, 3'b001));
        end
      else qf.push_back(sy(1'b1, ENG_EXEC, 3'b001));
      for (int i = 0; i < c.ba; i++) begin
        exec_instr_t x;
        if (j == 0 || i == 0) qe.push_back(sy(1'b0, ENG_FETCH, 3'b001));
        x = '0; x.op = OP_EXEC;
        x.lhs_addr = 16'(i * c.a_words); x.rhs_addr = 16'((j % g) * c.w_words);
        x.chunks = c.chunks; x.shift = 5'(i + j);
        x.negate = (c.a_signed && i == c.ba - 1) ^ (c.w_signed && j == c.bw - 1);
        x.clear = (i == 0 && j == 0); x.commit = (i == c.ba - 1 && j == c.bw - 1);
        qe.push_back(128'(x));
      end
    end
    qe.push_back(sy(1'b1, ENG_RESULT, 3'b100));
    qe.push_back(sy(1'b0, ENG_RESULT, 3'b100));
    qr.push_back(sy(1'b0, ENG_EXEC, 3'b100));
    qr.push_back(mm(OP_RESULT, 0, 1'b0, c.res_base, c.res_row_stride, c.res_beats));
    qr.push_back(sy(1'b1, ENG_EXEC, 3'b100));
  endtask

  always @(negedge clk) begin
    f_ready = ($urandom_range(99) >= stall_pct);
    e_ready = ($urandom_range(99) >= stall_pct);
    r_ready = ($urandom_range(99) >= stall_pct);
  end

  always @(posedge clk) if (rst_n) begin
    if (f_valid && f_ready) begin
      `CHECK(qf.size() > 0 && f_instr == qf[0], "fetch stream")
      if (qf.size() > 0) void'(qf.pop_front());
      if (f_instr[127:126] == 2'(OP_SYNC) && !f_instr[5] && f_instr[2:0] == 3'b010) n_wait_we++;
    end
    if (e_valid && e_ready) begin
      `CHECK(qe.size() > 0 && e_instr == qe[0], "execute stream")
      if (qe.size() > 0) void'(qe.pop_front());
      if (e_instr[127:126] == 2'(OP_SYNC) && e_instr[2:0] == 3'b010) n_sf++;
    end
    if (r_valid && r_ready) begin
      `CHECK(qr.size() > 0 && r_instr == qr[0], "result stream")
      if (qr.size() > 0) void'(qr.pop_front());
    end
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++; $display("watchdog"); `TB_FINISH
  end

  task automatic run(input int ba, input int bw, input logic sa, input logic sw, input int stall);
    int t0, t1, longest;
    cfg = '0;
    cfg.ba = 4'(ba); cfg.bw = 4'(bw); cfg.a_signed = sa; cfg.w_signed = sw;
    cfg.chunks = 16'($urandom_range(1, 9)); cfg.a_words = 16'($urandom_range(1, 50));
    cfg.w_words = 16'($urandom_range(1, 50));
    cfg.act_base = $urandom; cfg.act_plane_stride = $urandom_range(1, 1 << 20);
    cfg.act_bank_stride = 24'($urandom); cfg.w_base = $urandom;
    cfg.w_plane_stride = $urandom_range(1, 1 << 20); cfg.w_bank_stride = 24'($urandom);
    cfg.res_base = $urandom; cfg.res_row_stride = 24'($urandom); cfg.res_beats = 16'($urandom_range(1, 8));
    build(cfg);
    longest = qf.size() > qe.size() ? qf.size() : qe.size();
    stall_pct = stall;
    @(negedge clk); start = 1; t0 = $time / 10;
    @(negedge clk); start = 0;
    `CHECK(busy, "busy after start")
    while (!done) @(negedge clk);
    t1 = $time / 10;
    `CHECK(qf.size() == 0 && qe.size() == 0 && qr.size() == 0, "all streams complete")
    if (stall == 0) `CHECK(t1 - t0 == longest + 2, "one instruction per cycle")
    @(negedge clk);
    `CHECK(!busy && !done, "idle after done")
  endtask

  initial begin
    start = 0; stall_pct = 0; n_wait_we = 0; n_sf = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    run(2, 4, 1'b1, 1'b1, 0);
    run(1, 1, 1'b0, 1'b1, 0);
    run(3, 3, 1'b0, 1'b0, 40);
    run(4, 8, 1'b1, 1'b1, 60);
    run(2, 2, 1'b1, 1'b0, 30);
    `CHECK(n_wait_we == 4 && n_sf == 4, "group refills seen")
    `TB_FINISH
  end
endmodule
