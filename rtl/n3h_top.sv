// n3h_top: the heterogeneous accelerator. A layer's GEMM is split by filters
// between a LUT-core (bit-serial, 1..8-bit weights and activations, M x N DPU
// array) and a DSP-core (bit-parallel, 4-bit, ROWS x 16 DSP array). Each core
// has its own instruction generator, three instruction queues (Fetch, Execute,
// Result), three engines that exchange synchronisation tokens through four
// token queues, activation / weight / result buffers, a read DMA and a write
// DMA. The two cores run independently inside a layer (intra-layer
// asynchronous) and meet at a barrier at the end of it (inter-layer
// synchronous): the next layer descriptor is only taken when both cores have
// drained. The address generator keeps the cores' DDR partitions apart and
// swaps the activation regions after each layer.
// Interface: `init` loads the DDR region bases; a layer is handed over with
// layer_valid/layer_ready; layer_done pulses when both cores have written their
// result tiles. Each core has its own DDR read port (requests valid/ready,
// responses in order) and DDR write port (valid/ready). A core whose enable
// bit is 0 in the descriptor sits the layer out (split ratio 0 or 1).
// Block structure, data flow and the two-level synchronisation follow the
// published architecture; queue depths, port protocols and the layer barrier
// logic are this design's choice.
// Lint: the counts and the payloads of some token queues, the generators'
// `done` and the cores' `busy` are left unconnected on purpose: the engines
// only need a token to be present, and the barrier uses the queue and engine
// states instead. `rst_n` also feeds the assertions' disable condition, which
// is why it is reported as both a synchronous and an asynchronous signal.
module n3h_top
  import n3h_pkg::*;
#(
  // LUT-core (published configuration for ResNet-18 on XC7Z020, 35 ms target)
  parameter int unsigned M        = 8,
  parameter int unsigned N        = 16,
  parameter int unsigned K        = 128,
  parameter int unsigned D_LA     = 1024,
  parameter int unsigned D_LW     = 1024,
  // DSP-core
  parameter int unsigned D_ROWS   = 13,
  parameter int unsigned D_COLS_A = 16,
  parameter int unsigned D_COLS_W = 16,
  parameter int unsigned D_DA     = 2048,
  parameter int unsigned D_DW     = 1024,
  // queues
  parameter int unsigned IQ_DEPTH = 16,
  parameter int unsigned TQ_DEPTH = 8
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              init,
  input  logic [DDR_AW-1:0] act_region0,
  input  logic [DDR_AW-1:0] act_region1,
  input  logic [DDR_AW-1:0] lut_w_region,
  input  logic [DDR_AW-1:0] dsp_w_region,
  input  logic              layer_valid,
  output logic              layer_ready,
  input  layer_desc_t       layer,
  output logic              layer_done,
  output logic              busy,
  output logic              act_region_sel,  // activation region read by the current layer
  output logic [5:0]        lut_eng_states,  // {result, execute, fetch}
  output logic [5:0]        dsp_eng_states,
  // LUT-core DDR ports
  output logic              lut_rd_req_valid,
  output logic [DDR_AW-1:0] lut_rd_req_addr,
  input  logic              lut_rd_req_ready,
  input  logic              lut_rd_resp_valid,
  input  logic [DDR_DW-1:0] lut_rd_resp_data,
  output logic              lut_wr_valid,
  output logic [DDR_AW-1:0] lut_wr_addr,
  output logic [DDR_DW-1:0] lut_wr_data,
  input  logic              lut_wr_ready,
  // DSP-core DDR ports
  output logic              dsp_rd_req_valid,
  output logic [DDR_AW-1:0] dsp_rd_req_addr,
  input  logic              dsp_rd_req_ready,
  input  logic              dsp_rd_resp_valid,
  input  logic [DDR_DW-1:0] dsp_rd_resp_data,
  output logic              dsp_wr_valid,
  output logic [DDR_AW-1:0] dsp_wr_addr,
  output logic [DDR_DW-1:0] dsp_wr_data,
  input  logic              dsp_wr_ready
);
  localparam int unsigned DBW = 4 * D_COLS_A;   // DSP-core buffer word
  localparam int unsigned QCW = $clog2(IQ_DEPTH + 1);
  localparam int unsigned TCW = $clog2(TQ_DEPTH + 1);

  // ---------------------------------------------------------------- layer barrier
  typedef enum logic [1:0] {L_IDLE, L_RUN, L_ADV} lstate_e;
  lstate_e     lst;
  layer_desc_t layer_q, layer_ag;
  gen_cfg_t    lut_cfg, dsp_cfg;
  logic        lut_idle, dsp_idle, lut_start, dsp_start;
  logic        cur_region;

  assign layer_ready = (lst == L_IDLE);
  assign lut_start   = layer_valid && layer_ready && layer.lut_en;
  assign dsp_start   = layer_valid && layer_ready && layer.dsp_en;
  assign layer_ag    = (lst == L_IDLE) ? layer : layer_q;
  assign busy        = (lst != L_IDLE);
  assign act_region_sel = cur_region;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      lst        <= L_IDLE;
      layer_q    <= '0;
      layer_done <= 1'b0;
    end else begin
      layer_done <= 1'b0;
      case (lst)
        L_IDLE: if (layer_valid) begin
          layer_q <= layer;
          lst     <= L_RUN;
        end
        L_RUN:  if (lut_idle && dsp_idle) lst <= L_ADV;
        L_ADV:  begin
          layer_done <= 1'b1;
          lst        <= L_IDLE;
        end
        default: lst <= L_IDLE;
      endcase
    end
  end

  addr_gen #(.M(M), .N(N), .K(K), .COLS_W(D_COLS_W)) u_addr_gen (
    .clk(clk), .rst_n(rst_n), .init(init),
    .act_region0(act_region0), .act_region1(act_region1),
    .lut_w_region(lut_w_region), .dsp_w_region(dsp_w_region),
    .layer(layer_ag), .advance(lst == L_ADV),
    .lut_cfg(lut_cfg), .dsp_cfg(dsp_cfg), .cur_region(cur_region)
  );

  // ================================================================ LUT-core side
  logic               l_gf_v, l_gf_r, l_ge_v, l_ge_r, l_gr_v, l_gr_r, l_gen_busy, l_gen_done;
  logic [INSTR_W-1:0] l_gf_d, l_ge_d, l_gr_d;
  logic               l_qf_v, l_qf_r, l_qe_v, l_qe_r, l_qr_v, l_qr_r;
  logic [INSTR_W-1:0] l_qf_d, l_qe_d, l_qr_d;
  logic [QCW-1:0]     l_qf_n, l_qe_n, l_qr_n;

  instr_gen u_lut_gen (
    .clk(clk), .rst_n(rst_n), .start(lut_start), .cfg(lut_cfg),
    .busy(l_gen_busy), .done(l_gen_done),
    .f_valid(l_gf_v), .f_ready(l_gf_r), .f_instr(l_gf_d),
    .e_valid(l_ge_v), .e_ready(l_ge_r), .e_instr(l_ge_d),
    .r_valid(l_gr_v), .r_ready(l_gr_r), .r_instr(l_gr_d)
  );

  sync_fifo #(.WIDTH(INSTR_W), .DEPTH(IQ_DEPTH)) u_lut_fq (
    .clk(clk), .rst_n(rst_n), .in_valid(l_gf_v), .in_ready(l_gf_r), .in_data(l_gf_d),
    .out_valid(l_qf_v), .out_ready(l_qf_r), .out_data(l_qf_d), .count(l_qf_n));
  sync_fifo #(.WIDTH(INSTR_W), .DEPTH(IQ_DEPTH)) u_lut_eq (
    .clk(clk), .rst_n(rst_n), .in_valid(l_ge_v), .in_ready(l_ge_r), .in_data(l_ge_d),
    .out_valid(l_qe_v), .out_ready(l_qe_r), .out_data(l_qe_d), .count(l_qe_n));
  sync_fifo #(.WIDTH(INSTR_W), .DEPTH(IQ_DEPTH)) u_lut_rq (
    .clk(clk), .rst_n(rst_n), .in_valid(l_gr_v), .in_ready(l_gr_r), .in_data(l_gr_d),
    .out_valid(l_qr_v), .out_ready(l_qr_r), .out_data(l_qr_d), .count(l_qr_n));

  // token queues: f2e, e2f, e2r, r2e
  logic             l_f2e_iv, l_f2e_ir, l_f2e_ov, l_f2e_or;
  logic             l_e2f_iv, l_e2f_ir, l_e2f_ov, l_e2f_or;
  logic             l_e2r_iv, l_e2r_ir, l_e2r_ov, l_e2r_or;
  logic             l_r2e_iv, l_r2e_ir, l_r2e_ov, l_r2e_or;
  logic [TOK_W-1:0] l_f_tok, l_e_tok, l_r_tok;
  logic [TOK_W-1:0] l_f2e_od, l_e2f_od, l_e2r_od, l_r2e_od;
  logic [TCW-1:0]   l_f2e_n, l_e2f_n, l_e2r_n, l_r2e_n;

  sync_fifo #(.WIDTH(TOK_W), .DEPTH(TQ_DEPTH)) u_lut_f2e (
    .clk(clk), .rst_n(rst_n), .in_valid(l_f2e_iv), .in_ready(l_f2e_ir), .in_data(l_f_tok),
    .out_valid(l_f2e_ov), .out_ready(l_f2e_or), .out_data(l_f2e_od), .count(l_f2e_n));
  sync_fifo #(.WIDTH(TOK_W), .DEPTH(TQ_DEPTH)) u_lut_e2f (
    .clk(clk), .rst_n(rst_n), .in_valid(l_e2f_iv), .in_ready(l_e2f_ir), .in_data(l_e_tok),
    .out_valid(l_e2f_ov), .out_ready(l_e2f_or), .out_data(l_e2f_od), .count(l_e2f_n));
  sync_fifo #(.WIDTH(TOK_W), .DEPTH(TQ_DEPTH)) u_lut_e2r (
    .clk(clk), .rst_n(rst_n), .in_valid(l_e2r_iv), .in_ready(l_e2r_ir), .in_data(l_e_tok),
    .out_valid(l_e2r_ov), .out_ready(l_e2r_or), .out_data(l_e2r_od), .count(l_e2r_n));
  sync_fifo #(.WIDTH(TOK_W), .DEPTH(TQ_DEPTH)) u_lut_r2e (
    .clk(clk), .rst_n(rst_n), .in_valid(l_r2e_iv), .in_ready(l_r2e_ir), .in_data(l_r_tok),
    .out_valid(l_r2e_ov), .out_ready(l_r2e_or), .out_data(l_r2e_od), .count(l_r2e_n));

  // buffers
  logic                      l_a_we, l_w_we, l_a_re, l_w_re;
  logic [$clog2(M)-1:0]      l_a_wb;
  logic [$clog2(N)-1:0]      l_w_wb;
  logic [$clog2(D_LA)-1:0]   l_a_wa, l_a_ra;
  logic [$clog2(D_LW)-1:0]   l_w_wa, l_w_ra;
  logic [K-1:0]              l_wd;
  logic [K-1:0]              l_a_rd [M];
  logic [K-1:0]              l_w_rd [N];
  eng_state_e                l_fs, l_es, l_rs;

  fetch_engine #(.BUFW(K), .NB_A(M), .NB_W(N), .DEPTH_A(D_LA), .DEPTH_W(D_LW)) u_lut_fetch (
    .clk(clk), .rst_n(rst_n),
    .instr_valid(l_qf_v), .instr_ready(l_qf_r), .instr(l_qf_d),
    .tok_out_valid(l_f2e_iv), .tok_out_ready(l_f2e_ir), .tok_out_data(l_f_tok),
    .tok_in_valid(l_e2f_ov), .tok_in_ready(l_e2f_or),
    .rd_req_valid(lut_rd_req_valid), .rd_req_addr(lut_rd_req_addr), .rd_req_ready(lut_rd_req_ready),
    .rd_resp_valid(lut_rd_resp_valid), .rd_resp_data(lut_rd_resp_data),
    .act_wr_en(l_a_we), .act_wr_bank(l_a_wb), .act_wr_addr(l_a_wa),
    .w_wr_en(l_w_we), .w_wr_bank(l_w_wb), .w_wr_addr(l_w_wa), .wr_data(l_wd),
    .state(l_fs));

  buffer_bank #(.NB(M), .DEPTH(D_LA), .W(K)) u_lut_abuf (
    .clk(clk), .wr_en(l_a_we), .wr_bank(l_a_wb), .wr_addr(l_a_wa), .wr_data(l_wd),
    .rd_en(l_a_re), .rd_addr(l_a_ra), .rd_data(l_a_rd));
  buffer_bank #(.NB(N), .DEPTH(D_LW), .W(K)) u_lut_wbuf (
    .clk(clk), .wr_en(l_w_we), .wr_bank(l_w_wb), .wr_addr(l_w_wa), .wr_data(l_wd),
    .rd_en(l_w_re), .rd_addr(l_w_ra), .rd_data(l_w_rd));

  logic                     l_core_start, l_core_done, l_core_busy, l_commit;
  exec_instr_t              l_core_instr;
  logic signed [ACC_W-1:0]  l_acc [M][N];

  exec_engine u_lut_exec (
    .clk(clk), .rst_n(rst_n),
    .instr_valid(l_qe_v), .instr_ready(l_qe_r), .instr(l_qe_d),
    .tf_out_valid(l_e2f_iv), .tf_out_ready(l_e2f_ir), .tf_in_valid(l_f2e_ov), .tf_in_ready(l_f2e_or),
    .tr_out_valid(l_e2r_iv), .tr_out_ready(l_e2r_ir), .tr_in_valid(l_r2e_ov), .tr_in_ready(l_r2e_or),
    .tok_out_data(l_e_tok),
    .core_start(l_core_start), .core_instr(l_core_instr), .core_done(l_core_done),
    .state(l_es));

  lut_core #(.M(M), .N(N), .K(K), .DEPTH_A(D_LA), .DEPTH_W(D_LW)) u_lut_core (
    .clk(clk), .rst_n(rst_n), .start(l_core_start), .ex(l_core_instr),
    .busy(l_core_busy), .done(l_core_done),
    .act_rd_en(l_a_re), .act_rd_addr(l_a_ra), .act_data(l_a_rd),
    .w_rd_en(l_w_re), .w_rd_addr(l_w_ra), .w_data(l_w_rd),
    .commit_o(l_commit), .acc(l_acc));

  logic                     l_rb_re;
  logic [$clog2(M)-1:0]     l_rb_row;
  logic [$clog2(N/2)-1:0]   l_rb_beat;
  logic [DDR_DW-1:0]        l_rb_data;

  result_buffer #(.ROWS(M), .COLS(N)) u_lut_rbuf (
    .clk(clk), .rst_n(rst_n), .load(l_commit), .acc_in(l_acc),
    .rd_en(l_rb_re), .rd_row(l_rb_row), .rd_beat(l_rb_beat), .rd_data(l_rb_data));

  result_engine #(.ROWS(M), .COLS(N)) u_lut_result (
    .clk(clk), .rst_n(rst_n),
    .instr_valid(l_qr_v), .instr_ready(l_qr_r), .instr(l_qr_d),
    .tok_out_valid(l_r2e_iv), .tok_out_ready(l_r2e_ir), .tok_out_data(l_r_tok),
    .tok_in_valid(l_e2r_ov), .tok_in_ready(l_e2r_or),
    .rb_rd_en(l_rb_re), .rb_rd_row(l_rb_row), .rb_rd_beat(l_rb_beat), .rb_rd_data(l_rb_data),
    .wr_valid(lut_wr_valid), .wr_addr(lut_wr_addr), .wr_data(lut_wr_data), .wr_ready(lut_wr_ready),
    .state(l_rs));

  assign lut_idle = !l_gen_busy && !lut_start && (l_qf_n == '0) && (l_qe_n == '0) && (l_qr_n == '0)
                  && (l_fs == ES_IDLE) && (l_es == ES_IDLE) && (l_rs == ES_IDLE);
  assign lut_eng_states = {l_rs, l_es, l_fs};

  // ================================================================ DSP-core side
  logic               d_gf_v, d_gf_r, d_ge_v, d_ge_r, d_gr_v, d_gr_r, d_gen_busy, d_gen_done;
  logic [INSTR_W-1:0] d_gf_d, d_ge_d, d_gr_d;
  logic               d_qf_v, d_qf_r, d_qe_v, d_qe_r, d_qr_v, d_qr_r;
  logic [INSTR_W-1:0] d_qf_d, d_qe_d, d_qr_d;
  logic [QCW-1:0]     d_qf_n, d_qe_n, d_qr_n;

  instr_gen u_dsp_gen (
    .clk(clk), .rst_n(rst_n), .start(dsp_start), .cfg(dsp_cfg),
    .busy(d_gen_busy), .done(d_gen_done),
    .f_valid(d_gf_v), .f_ready(d_gf_r), .f_instr(d_gf_d),
    .e_valid(d_ge_v), .e_ready(d_ge_r), .e_instr(d_ge_d),
    .r_valid(d_gr_v), .r_ready(d_gr_r), .r_instr(d_gr_d)
  );

  sync_fifo #(.WIDTH(INSTR_W), .DEPTH(IQ_DEPTH)) u_dsp_fq (
    .clk(clk), .rst_n(rst_n), .in_valid(d_gf_v), .in_ready(d_gf_r), .in_data(d_gf_d),
    .out_valid(d_qf_v), .out_ready(d_qf_r), .out_data(d_qf_d), .count(d_qf_n));
  sync_fifo #(.WIDTH(INSTR_W), .DEPTH(IQ_DEPTH)) u_dsp_eq (
    .clk(clk), .rst_n(rst_n), .in_valid(d_ge_v), .in_ready(d_ge_r), .in_data(d_ge_d),
    .out_valid(d_qe_v), .out_ready(d_qe_r), .out_data(d_qe_d), .count(d_qe_n));
  sync_fifo #(.WIDTH(INSTR_W), .DEPTH(IQ_DEPTH)) u_dsp_rq (
    .clk(clk), .rst_n(rst_n), .in_valid(d_gr_v), .in_ready(d_gr_r), .in_data(d_gr_d),
    .out_valid(d_qr_v), .out_ready(d_qr_r), .out_data(d_qr_d), .count(d_qr_n));

  logic             d_f2e_iv, d_f2e_ir, d_f2e_ov, d_f2e_or;
  logic             d_e2f_iv, d_e2f_ir, d_e2f_ov, d_e2f_or;
  logic             d_e2r_iv, d_e2r_ir, d_e2r_ov, d_e2r_or;
  logic             d_r2e_iv, d_r2e_ir, d_r2e_ov, d_r2e_or;
  logic [TOK_W-1:0] d_f_tok, d_e_tok, d_r_tok;
  logic [TOK_W-1:0] d_f2e_od, d_e2f_od, d_e2r_od, d_r2e_od;
  logic [TCW-1:0]   d_f2e_n, d_e2f_n, d_e2r_n, d_r2e_n;

  sync_fifo #(.WIDTH(TOK_W), .DEPTH(TQ_DEPTH)) u_dsp_f2e (
    .clk(clk), .rst_n(rst_n), .in_valid(d_f2e_iv), .in_ready(d_f2e_ir), .in_data(d_f_tok),
    .out_valid(d_f2e_ov), .out_ready(d_f2e_or), .out_data(d_f2e_od), .count(d_f2e_n));
  sync_fifo #(.WIDTH(TOK_W), .DEPTH(TQ_DEPTH)) u_dsp_e2f (
    .clk(clk), .rst_n(rst_n), .in_valid(d_e2f_iv), .in_ready(d_e2f_ir), .in_data(d_e_tok),
    .out_valid(d_e2f_ov), .out_ready(d_e2f_or), .out_data(d_e2f_od), .count(d_e2f_n));
  sync_fifo #(.WIDTH(TOK_W), .DEPTH(TQ_DEPTH)) u_dsp_e2r (
    .clk(clk), .rst_n(rst_n), .in_valid(d_e2r_iv), .in_ready(d_e2r_ir), .in_data(d_e_tok),
    .out_valid(d_e2r_ov), .out_ready(d_e2r_or), .out_data(d_e2r_od), .count(d_e2r_n));
  sync_fifo #(.WIDTH(TOK_W), .DEPTH(TQ_DEPTH)) u_dsp_r2e (
    .clk(clk), .rst_n(rst_n), .in_valid(d_r2e_iv), .in_ready(d_r2e_ir), .in_data(d_r_tok),
    .out_valid(d_r2e_ov), .out_ready(d_r2e_or), .out_data(d_r2e_od), .count(d_r2e_n));

  logic                         d_a_we, d_w_we, d_a_re, d_w_re;
  logic [$clog2(D_ROWS)-1:0]    d_a_wb;
  logic [$clog2(D_COLS_W/2)-1:0] d_w_wb;
  logic [$clog2(D_DA)-1:0]      d_a_wa, d_a_ra;
  logic [$clog2(D_DW)-1:0]      d_w_wa, d_w_ra;
  logic [DBW-1:0]               d_wd;
  logic [DBW-1:0]               d_a_rd [D_ROWS];
  logic [DBW-1:0]               d_w_rd [D_COLS_W/2];
  eng_state_e                   d_fs, d_es, d_rs;

  fetch_engine #(.BUFW(DBW), .NB_A(D_ROWS), .NB_W(D_COLS_W/2), .DEPTH_A(D_DA), .DEPTH_W(D_DW)) u_dsp_fetch (
    .clk(clk), .rst_n(rst_n),
    .instr_valid(d_qf_v), .instr_ready(d_qf_r), .instr(d_qf_d),
    .tok_out_valid(d_f2e_iv), .tok_out_ready(d_f2e_ir), .tok_out_data(d_f_tok),
    .tok_in_valid(d_e2f_ov), .tok_in_ready(d_e2f_or),
    .rd_req_valid(dsp_rd_req_valid), .rd_req_addr(dsp_rd_req_addr), .rd_req_ready(dsp_rd_req_ready),
    .rd_resp_valid(dsp_rd_resp_valid), .rd_resp_data(dsp_rd_resp_data),
    .act_wr_en(d_a_we), .act_wr_bank(d_a_wb), .act_wr_addr(d_a_wa),
    .w_wr_en(d_w_we), .w_wr_bank(d_w_wb), .w_wr_addr(d_w_wa), .wr_data(d_wd),
    .state(d_fs));

  buffer_bank #(.NB(D_ROWS), .DEPTH(D_DA), .W(DBW)) u_dsp_abuf (
    .clk(clk), .wr_en(d_a_we), .wr_bank(d_a_wb), .wr_addr(d_a_wa), .wr_data(d_wd),
    .rd_en(d_a_re), .rd_addr(d_a_ra), .rd_data(d_a_rd));
  buffer_bank #(.NB(D_COLS_W/2), .DEPTH(D_DW), .W(DBW)) u_dsp_wbuf (
    .clk(clk), .wr_en(d_w_we), .wr_bank(d_w_wb), .wr_addr(d_w_wa), .wr_data(d_wd),
    .rd_en(d_w_re), .rd_addr(d_w_ra), .rd_data(d_w_rd));

  logic                     d_core_start, d_core_done, d_core_busy, d_commit;
  exec_instr_t              d_core_instr;
  logic signed [ACC_W-1:0]  d_acc [D_ROWS][D_COLS_W];

  exec_engine u_dsp_exec (
    .clk(clk), .rst_n(rst_n),
    .instr_valid(d_qe_v), .instr_ready(d_qe_r), .instr(d_qe_d),
    .tf_out_valid(d_e2f_iv), .tf_out_ready(d_e2f_ir), .tf_in_valid(d_f2e_ov), .tf_in_ready(d_f2e_or),
    .tr_out_valid(d_e2r_iv), .tr_out_ready(d_e2r_ir), .tr_in_valid(d_r2e_ov), .tr_in_ready(d_r2e_or),
    .tok_out_data(d_e_tok),
    .core_start(d_core_start), .core_instr(d_core_instr), .core_done(d_core_done),
    .state(d_es));

  dsp_core #(.ROWS(D_ROWS), .COLS_A(D_COLS_A), .COLS_W(D_COLS_W), .DEPTH_A(D_DA), .DEPTH_W(D_DW)) u_dsp_core (
    .clk(clk), .rst_n(rst_n), .start(d_core_start), .ex(d_core_instr),
    .busy(d_core_busy), .done(d_core_done),
    .act_rd_en(d_a_re), .act_rd_addr(d_a_ra), .act_data(d_a_rd),
    .w_rd_en(d_w_re), .w_rd_addr(d_w_ra), .w_data(d_w_rd),
    .commit_o(d_commit), .acc(d_acc));

  logic                          d_rb_re;
  logic [$clog2(D_ROWS)-1:0]     d_rb_row;
  logic [$clog2(D_COLS_W/2)-1:0] d_rb_beat;
  logic [DDR_DW-1:0]             d_rb_data;

  result_buffer #(.ROWS(D_ROWS), .COLS(D_COLS_W)) u_dsp_rbuf (
    .clk(clk), .rst_n(rst_n), .load(d_commit), .acc_in(d_acc),
    .rd_en(d_rb_re), .rd_row(d_rb_row), .rd_beat(d_rb_beat), .rd_data(d_rb_data));

  result_engine #(.ROWS(D_ROWS), .COLS(D_COLS_W)) u_dsp_result (
    .clk(clk), .rst_n(rst_n),
    .instr_valid(d_qr_v), .instr_ready(d_qr_r), .instr(d_qr_d),
    .tok_out_valid(d_r2e_iv), .tok_out_ready(d_r2e_ir), .tok_out_data(d_r_tok),
    .tok_in_valid(d_e2r_ov), .tok_in_ready(d_e2r_or),
    .rb_rd_en(d_rb_re), .rb_rd_row(d_rb_row), .rb_rd_beat(d_rb_beat), .rb_rd_data(d_rb_data),
    .wr_valid(dsp_wr_valid), .wr_addr(dsp_wr_addr), .wr_data(dsp_wr_data), .wr_ready(dsp_wr_ready),
    .state(d_rs));

  assign dsp_idle = !d_gen_busy && !dsp_start && (d_qf_n == '0) && (d_qe_n == '0) && (d_qr_n == '0)
                  && (d_fs == ES_IDLE) && (d_es == ES_IDLE) && (d_rs == ES_IDLE);
  assign dsp_eng_states = {d_rs, d_es, d_fs};

  // The token queues carry their flag for observation; every token a Sync
  // instruction waits for must be the kind it expects.
  a_lut_tok: assert property (@(posedge clk) disable iff (!rst_n)
    (l_f2e_ov && l_f2e_or) |-> l_f2e_od == 3'b001);
  a_dsp_tok: assert property (@(posedge clk) disable iff (!rst_n)
    (d_f2e_ov && d_f2e_or) |-> d_f2e_od == 3'b001);
endmodule
