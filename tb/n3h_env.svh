// n3h_env.svh: shared body of the accelerator-level testbenches, included
// inside the testbench module after it has declared the localparams
//   M, N, K (LUT-core), DR (DSP-core rows), A0, A1, LWB, DWB (DDR region
//   bases), WORDS (DDR size), IQ (instruction queue depth)
// and instantiated the accelerator as `dut`. It provides the DDR model, the
// layer driver and the reference model:
//   * run_layer(...) writes the layer's activations (LUT bit planes and DSP
//     packed 4-bit rows) into the current activation region and its weights
//     at the two weight pointers, hands the descriptor over, waits for
//     layer_done and compares both result tiles in the other region with an
//     integer matrix product;
//   * the DDR layout mirrors the one produced by the address generator:
//     LUT plane i, row m, chunk c at base + (i*M + m)*C*B + c*B (B beats per
//     K-bit word, beat 0 = bits 63:0), LUT weight plane j, filter n likewise
//     with N; DSP row r, chunk c at base + r*Cd + c after the LUT planes; DSP
//     weights of column pair b, chunk c at w + b*2*Cd + 2c (+1 odd column);
//     results row-major, two 32-bit sums per beat, LUT tile then DSP tile.
  localparam int CW  = 16;
  localparam int BPW = K / 64;

  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;     // a real edge, so the flops reset before the first clock
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic        init, layer_valid, layer_ready, layer_done, busy, act_region_sel;
  layer_desc_t layer;
  logic [5:0]  lut_eng_states, dsp_eng_states;
  logic        lut_rd_req_valid, lut_rd_req_ready, lut_rd_resp_valid, lut_wr_valid, lut_wr_ready;
  logic        dsp_rd_req_valid, dsp_rd_req_ready, dsp_rd_resp_valid, dsp_wr_valid, dsp_wr_ready;
  logic [31:0] lut_rd_req_addr, lut_wr_addr, dsp_rd_req_addr, dsp_wr_addr;
  logic [63:0] lut_rd_resp_data, lut_wr_data, dsp_rd_resp_data, dsp_wr_data;
  logic [31:0] act_region0, act_region1, lut_w_region, dsp_w_region;

  logic        rq_v [2], rq_r [2], rs_v [2], wv [2], wr [2];
  logic [31:0] rq_a [2], wa [2];
  logic [63:0] rs_d [2], wd [2];

  ddr_model #(.NP(2), .WORDS(WORDS), .LAT(6), .STALL_PCT(20)) ddr (
    .clk(clk), .rd_req_valid(rq_v), .rd_req_addr(rq_a), .rd_req_ready(rq_r),
    .rd_resp_valid(rs_v), .rd_resp_data(rs_d), .wr_valid(wv), .wr_addr(wa), .wr_data(wd), .wr_ready(wr));
  assign rq_v[0] = lut_rd_req_valid; assign rq_a[0] = lut_rd_req_addr; assign lut_rd_req_ready = rq_r[0];
  assign lut_rd_resp_valid = rs_v[0]; assign lut_rd_resp_data = rs_d[0];
  assign wv[0] = lut_wr_valid; assign wa[0] = lut_wr_addr; assign wd[0] = lut_wr_data; assign lut_wr_ready = wr[0];
  assign rq_v[1] = dsp_rd_req_valid; assign rq_a[1] = dsp_rd_req_addr; assign dsp_rd_req_ready = rq_r[1];
  assign dsp_rd_resp_valid = rs_v[1]; assign dsp_rd_resp_data = rs_d[1];
  assign wv[1] = dsp_wr_valid; assign wa[1] = dsp_wr_addr; assign wd[1] = dsp_wr_data; assign dsp_wr_ready = wr[1];

  // ---- mechanism counters ----------------------------------------------------
  int n_layers, n_both, n_lut_only, n_dsp_only, n_swaps, n_neg_lut, n_exec_lut, n_exec_dsp;
  int c_exec_wait, c_fetch_wait, c_result_wait, c_overlap, c_barrier, c_iq_full, c_wr_lut, c_wr_dsp;
  logic prev_sel = 1'b0;

  always @(posedge clk) if (rst_n) begin
    prev_sel <= act_region_sel;
    if (act_region_sel != prev_sel) n_swaps++;
    if (lut_eng_states[3:2] == 2'(ES_WAIT) || dsp_eng_states[3:2] == 2'(ES_WAIT)) c_exec_wait++;
    if (lut_eng_states[1:0] == 2'(ES_WAIT) || dsp_eng_states[1:0] == 2'(ES_WAIT)) c_fetch_wait++;
    if (lut_eng_states[5:4] == 2'(ES_WAIT) || dsp_eng_states[5:4] == 2'(ES_WAIT)) c_result_wait++;
    if (lut_eng_states[3:2] == 2'(ES_RUN) && dsp_eng_states[3:2] == 2'(ES_RUN)) c_overlap++;
    if (busy && (dut.lut_idle != dut.dsp_idle)) c_barrier++;
    if (dut.u_lut_eq.count == IQ || dut.u_lut_fq.count == IQ || dut.u_dsp_fq.count == IQ) c_iq_full++;
    if (dut.l_core_start) begin
      n_exec_lut++;
      if (dut.l_core_instr.negate) n_neg_lut++;
    end
    if (dut.d_core_start) n_exec_dsp++;
    if (lut_wr_valid && lut_wr_ready) c_wr_lut++;
    if (dsp_wr_valid && dsp_wr_ready) c_wr_dsp++;
  end

  // ---- layer driver and reference ----------------------------------------------
  logic [31:0] ap, op, lw, dw;   // testbench copies of the address generator's pointers

  task automatic run_layer(input bit lut_en, input bit dsp_en, input int ba, input int bw,
                           input bit sa, input bit sw, input int lc, output int cycles);
    int dc, KD, KDd, t0;
    int A [][], W [][], Ad [][], Wd [][];
    dc  = lc * K / 16;
    KD  = lc * K;
    KDd = dc * 16;
    A = new[M]; W = new[KD]; Ad = new[DR]; Wd = new[KDd];
    for (int m = 0; m < M; m++) begin
      A[m] = new[KD];
      for (int e = 0; e < KD; e++)
        A[m][e] = sa ? $urandom_range((1 << ba) - 1) - (1 << (ba - 1)) : $urandom_range((1 << ba) - 1);
    end
    for (int e = 0; e < KD; e++) begin
      W[e] = new[N];
      for (int n = 0; n < N; n++)
        W[e][n] = sw ? $urandom_range((1 << bw) - 1) - (1 << (bw - 1)) : $urandom_range((1 << bw) - 1);
    end
    // the DSP-core sees the same pixels where the LUT activations fit 4 unsigned bits
    for (int r = 0; r < DR; r++) begin
      Ad[r] = new[KDd];
      for (int e = 0; e < KDd; e++)
        Ad[r][e] = (r < M && !sa && ba <= 4) ? A[r][e] : $urandom_range(15);
    end
    for (int e = 0; e < KDd; e++) begin
      Wd[e] = new[CW];
      for (int n = 0; n < CW; n++) Wd[e][n] = $urandom_range(15) - 8;
    end
    // DDR images
    for (int i = 0; i < ba; i++) for (int m = 0; m < M; m++) for (int c = 0; c < lc; c++)
      for (int b = 0; b < BPW; b++) begin
        logic [63:0] wd64;
        for (int p = 0; p < 64; p++) wd64[p] = 1'((A[m][c * K + b * 64 + p] >>> i) & 1);
        ddr.mem[ap + (i * M + m) * lc * BPW + c * BPW + b] = wd64;
      end
    for (int j = 0; j < bw; j++) for (int n = 0; n < N; n++) for (int c = 0; c < lc; c++)
      for (int b = 0; b < BPW; b++) begin
        logic [63:0] wd64;
        for (int p = 0; p < 64; p++) wd64[p] = 1'((W[c * K + b * 64 + p][n] >>> j) & 1);
        ddr.mem[lw + (j * N + n) * lc * BPW + c * BPW + b] = wd64;
      end
    for (int r = 0; r < DR; r++) for (int c = 0; c < dc; c++) begin
      logic [63:0] wd64;
      for (int k = 0; k < 16; k++) wd64[4 * k +: 4] = 4'(Ad[r][c * 16 + k]);
      ddr.mem[ap + ba * M * lc * BPW + r * dc + c] = wd64;
    end
    for (int bb = 0; bb < CW / 2; bb++) for (int c = 0; c < dc; c++) for (int s = 0; s < 2; s++) begin
      logic [63:0] wd64;
      for (int k = 0; k < 16; k++) wd64[4 * k +: 4] = 4'(Wd[c * 16 + k][2 * bb + s]);
      ddr.mem[dw + bb * 2 * dc + 2 * c + s] = wd64;
    end
    for (int a = 0; a < M * N / 2 + DR * CW / 2; a++) ddr.mem[op + a] = 64'hbad0_bad0_bad0_bad0;
    // hand over
    @(negedge clk);
    layer = '0;
    layer.lut_en = lut_en; layer.dsp_en = dsp_en; layer.lut_ba = 4'(ba); layer.lut_bw = 4'(bw);
    layer.a_signed = sa; layer.w_signed = sw; layer.lut_chunks = 16'(lc); layer.dsp_chunks = 16'(dc);
    layer_valid = 1;
    `CHECK(layer_ready, "accelerator idle between layers")
    t0 = $time / 10;
    @(negedge clk); layer_valid = 0;
    `CHECK(!layer_ready, "no second layer while one runs")
    while (!layer_done) @(negedge clk);
    cycles = $time / 10 - t0;
    @(negedge clk);
    // compare
    for (int m = 0; m < M; m++) for (int n = 0; n < N; n += 2) begin
      logic [63:0] exp64, got64;
      int s0, s1;
      s0 = 0; s1 = 0;
      for (int e = 0; e < KD; e++) begin s0 += A[m][e] * W[e][n]; s1 += A[m][e] * W[e][n + 1]; end
      exp64 = lut_en ? {32'(s1), 32'(s0)} : 64'hbad0_bad0_bad0_bad0;
      got64 = ddr.mem[op + m * N / 2 + n / 2];
      if (got64 != exp64 && failures < 4)
        $display("lut m%0d n%0d got %h exp %h", m, n, got64, exp64);
      `CHECK(got64 == exp64, "LUT-core result tile")
    end
    for (int r = 0; r < DR; r++) for (int n = 0; n < CW; n += 2) begin
      logic [63:0] exp64, got64;
      int s0, s1;
      s0 = 0; s1 = 0;
      for (int e = 0; e < KDd; e++) begin s0 += Ad[r][e] * Wd[e][n]; s1 += Ad[r][e] * Wd[e][n + 1]; end
      exp64 = dsp_en ? {32'(s1), 32'(s0)} : 64'hbad0_bad0_bad0_bad0;
      got64 = ddr.mem[op + M * N / 2 + r * CW / 2 + n / 2];
      if (got64 != exp64 && failures < 4)
        $display("dsp r%0d n%0d got %h exp %h", r, n, got64, exp64);
      `CHECK(got64 == exp64, "DSP-core result tile")
    end
    n_layers++;
    if (lut_en && dsp_en) n_both++;
    else if (lut_en) n_lut_only++;
    else n_dsp_only++;
    // pointer bookkeeping as the address generator does it
    if (lut_en) lw += bw * N * lc * BPW;
    if (dsp_en) dw += CW * dc;
    begin logic [31:0] t; t = ap; ap = op; op = t; end
  endtask

  // Place the next step anywhere in DDR: load new region bases (a tile of a
  // layer larger than one tile per core is issued this way).
  task automatic place(input logic [31:0] a_in, input logic [31:0] a_out, input logic [31:0] lwb,
                       input logic [31:0] dwb);
    @(negedge clk);
    act_region0 = a_in; act_region1 = a_out; lut_w_region = lwb; dsp_w_region = dwb;
    init = 1;
    @(negedge clk); init = 0;
    ap = a_in; op = a_out; lw = lwb; dw = dwb;
    prev_sel = 1'b0;
    `CHECK(!act_region_sel, "re-initialised steps read region 0")
  endtask

  task automatic reset_and_init();
    init = 0; layer_valid = 0; layer = '0;
    n_layers = 0; n_both = 0; n_lut_only = 0; n_dsp_only = 0; n_swaps = 0; n_neg_lut = 0;
    n_exec_lut = 0; n_exec_dsp = 0; c_exec_wait = 0; c_fetch_wait = 0; c_result_wait = 0;
    c_overlap = 0; c_barrier = 0; c_iq_full = 0; c_wr_lut = 0; c_wr_dsp = 0;
    act_region0 = A0; act_region1 = A1; lut_w_region = LWB; dsp_w_region = DWB;
    ap = A0; op = A1; lw = LWB; dw = DWB;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(negedge clk); init = 1;
    @(negedge clk); init = 0;
    `CHECK(!busy && layer_ready && !act_region_sel, "idle after init")
  endtask
