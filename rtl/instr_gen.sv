// instr_gen: instruction generator of one core (LUT-core or DSP-core).
// From a per-layer programme (gen_cfg_t) it writes three instruction streams,
// one per engine queue, that compute one output tile with the schedule of
// the published timeline, generalised to BA activation and BW weight planes:
//   * all BA activation planes L0..L(BA-1) stay in the activation buffers;
//   * the weight buffer holds G = ceil(BW/2) weight planes (half of R), so R is
//     fetched in groups of G planes, a group overwriting the previous one only
//     after the execute engine has released it;
//   Fetch  : R0, L0, SE, L1, SE, ..., R1, SE, ..., [WE], R(G), SE, ...
//   Execute: for each weight plane j, for each activation plane i, L(i) x R(j),
//            waiting (WF) for a fetch token before the first use of every
//            fetched plane, sending SF after the last plane of a group (except
//            the final group), SE to the result engine after the last product,
//            then waiting for the result engine's token;
//   Result : WE, Result, signal back to the execute engine.
// (SE = signal execute, WE = wait execute, WF = wait fetch, SF = signal fetch.)
// Plane pair (i, j) is executed with shift i+j; it is subtracted when exactly
// one of the two is a sign plane. For the bit-parallel DSP-core the programme
// has BA = BW = 1, which gives R0, L0, SE / WF, L0 x R0, SE / WE, Result.
// The token after R(BW-1) is this design's addition: the timeline shown
// ends before it, and without it the last plane could be used before it has
// arrived. `start` is taken when idle; `done` pulses once all three streams
// have been accepted by their queues.
// Lint: `rst_n` is also used by the assertion's disable condition.
module instr_gen
  import n3h_pkg::*;
(
  input  logic               clk,
  input  logic               rst_n,
  input  logic               start,
  input  gen_cfg_t           cfg,
  output logic               busy,
  output logic               done,
  output logic               f_valid,
  input  logic               f_ready,
  output logic [INSTR_W-1:0] f_instr,
  output logic               e_valid,
  input  logic               e_ready,
  output logic [INSTR_W-1:0] e_instr,
  output logic               r_valid,
  input  logic               r_ready,
  output logic [INSTR_W-1:0] r_instr
);
  localparam logic [TOK_W-1:0] TK_DATA = 3'b001;  // data fetched
  localparam logic [TOK_W-1:0] TK_FREE = 3'b010;  // weight group released
  localparam logic [TOK_W-1:0] TK_TILE = 3'b100;  // tile committed / written

  function automatic logic [INSTR_W-1:0] mk_sync(input logic send, input eng_e peer,
                                                 input logic [TOK_W-1:0] flag);
    sync_instr_t s;
    s = '0;
    s.op = OP_SYNC; s.cur_state = send; s.next_state = peer; s.flag = flag;
    return INSTR_W'(s);
  endfunction

  function automatic logic [INSTR_W-1:0] mk_mem(input op_e op, input logic [15:0] buf_base,
      input logic w, input logic [31:0] base, input logic [23:0] offset, input logic [15:0] range);
    mem_instr_t f;
    f = '0;
    f.op = op; f.buf_base = buf_base; f.stage = {2'b0, w}; f.buf_rw = (op == OP_FETCH);
    f.ddr_base = base; f.ddr_offset = offset; f.ddr_range = range;
    return INSTR_W'(f);
  endfunction

  typedef enum logic [2:0] {F_IDLE, F_R, F_L, F_SEL, F_SER, F_WE, F_DONE} fst_e;
  typedef enum logic [2:0] {E_IDLE, E_WF, E_EX, E_SF, E_SR, E_WR, E_DONE} est_e;
  typedef enum logic [2:0] {R_IDLE, R_WE, R_RES, R_SE, R_DONE} rst_e;

  fst_e     fs;
  est_e     es;
  rst_e     rs;
  gen_cfg_t c;
  logic [3:0] g;                 // weight planes per buffer half
  logic [3:0] fi, fj, fjg;       // fetch: activation plane, weight plane, slot
  logic [3:0] ei, ej, ejg;       // execute: same
  logic       all_done;

  assign busy     = (fs != F_IDLE) || (es != E_IDLE) || (rs != R_IDLE);
  assign all_done = (fs == F_DONE) && (es == E_DONE) && (rs == R_DONE);

  // ---- stream contents -----------------------------------------------------
  always_comb begin
    f_valid = 1'b0;
    f_instr = '0;
    case (fs)
      F_R:   begin f_valid = 1'b1;
        f_instr = mk_mem(OP_FETCH, 16'(fjg) * c.w_words, 1'b1,
                         c.w_base + 32'(fj) * c.w_plane_stride, c.w_bank_stride, c.w_words); end
      F_L:   begin f_valid = 1'b1;
        f_instr = mk_mem(OP_FETCH, 16'(fi) * c.a_words, 1'b0,
                         c.act_base + 32'(fi) * c.act_plane_stride, c.act_bank_stride, c.a_words); end
      F_SEL, F_SER: begin f_valid = 1'b1; f_instr = mk_sync(1'b1, ENG_EXEC, TK_DATA); end
      F_WE:  begin f_valid = 1'b1; f_instr = mk_sync(1'b0, ENG_EXEC, TK_FREE); end
      default: ;
    endcase
  end

  always_comb begin
    exec_instr_t x;
    x = '0;
    x.op       = OP_EXEC;
    x.lhs_addr = 16'(ei) * c.a_words;
    x.rhs_addr = 16'(ejg) * c.w_words;
    x.chunks   = c.chunks;
    x.shift    = 5'(ei) + 5'(ej);
    x.negate   = (c.a_signed && ei == c.ba - 4'd1) ^ (c.w_signed && ej == c.bw - 4'd1);
    x.clear    = (ei == 4'd0) && (ej == 4'd0);
    x.commit   = (ei == c.ba - 4'd1) && (ej == c.bw - 4'd1);
    e_valid = 1'b0;
    e_instr = '0;
    case (es)
      E_WF: begin e_valid = 1'b1; e_instr = mk_sync(1'b0, ENG_FETCH,  TK_DATA); end
      E_EX: begin e_valid = 1'b1; e_instr = INSTR_W'(x); end
      E_SF: begin e_valid = 1'b1; e_instr = mk_sync(1'b1, ENG_FETCH,  TK_FREE); end
      E_SR: begin e_valid = 1'b1; e_instr = mk_sync(1'b1, ENG_RESULT, TK_TILE); end
      E_WR: begin e_valid = 1'b1; e_instr = mk_sync(1'b0, ENG_RESULT, TK_TILE); end
      default: ;
    endcase
  end

  always_comb begin
    r_valid = 1'b0;
    r_instr = '0;
    case (rs)
      R_WE:  begin r_valid = 1'b1; r_instr = mk_sync(1'b0, ENG_EXEC, TK_TILE); end
      R_RES: begin r_valid = 1'b1;
        r_instr = mk_mem(OP_RESULT, 16'd0, 1'b0, c.res_base, c.res_row_stride, c.res_beats); end
      R_SE:  begin r_valid = 1'b1; r_instr = mk_sync(1'b1, ENG_EXEC, TK_TILE); end
      default: ;
    endcase
  end

  // ---- sequencing ------------------------------------------------------------
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      fs <= F_IDLE; es <= E_IDLE; rs <= R_IDLE;
      c  <= '0; g <= '0; done <= 1'b0;
      fi <= '0; fj <= '0; fjg <= '0; ei <= '0; ej <= '0; ejg <= '0;
    end else begin
      done <= 1'b0;
      if (!busy && start) begin
        c  <= cfg;
        g  <= (cfg.bw + 4'd1) >> 1;
        fs <= F_R; es <= E_WF; rs <= R_WE;
        fi <= '0; fj <= '0; fjg <= '0; ei <= '0; ej <= '0; ejg <= '0;
      end
      if (all_done) begin
        fs <= F_IDLE; es <= E_IDLE; rs <= R_IDLE;
        done <= 1'b1;
      end

      // fetch stream
      if (f_valid && f_ready) begin
        case (fs)
          F_R:   if (fj == 4'd0) begin fi <= '0; fs <= F_L; end
                 else fs <= F_SER;
          F_L:   fs <= F_SEL;
          F_SEL, F_SER: begin
            if (fs == F_SEL && fi + 4'd1 < c.ba) begin
              fi <= fi + 4'd1;
              fs <= F_L;
            end else if (fj + 4'd1 == c.bw) fs <= F_DONE;
            else begin
              fj <= fj + 4'd1;
              if (fjg + 4'd1 == g) begin fjg <= '0; fs <= F_WE; end
              else begin fjg <= fjg + 4'd1; fs <= F_R; end
            end
          end
          F_WE:  fs <= F_R;
          default: ;
        endcase
      end

      // execute stream
      if (e_valid && e_ready) begin
        case (es)
          E_WF: es <= E_EX;
          E_EX: begin
            if (ei + 4'd1 < c.ba) begin
              ei <= ei + 4'd1;
              es <= (ej == 4'd0) ? E_WF : E_EX;
            end else begin
              ei <= '0;
              if (ej + 4'd1 == c.bw) es <= E_SR;
              else begin
                ej <= ej + 4'd1;
                if (ejg + 4'd1 == g) begin ejg <= '0; es <= E_SF; end
                else begin ejg <= ejg + 4'd1; es <= E_WF; end
              end
            end
          end
          E_SF: es <= E_WF;
          E_SR: es <= E_WR;
          E_WR: es <= E_DONE;
          default: ;
        endcase
      end

      // result stream
      if (r_valid && r_ready) begin
        case (rs)
          R_WE:  rs <= R_RES;
          R_RES: rs <= R_SE;
          R_SE:  rs <= R_DONE;
          default: ;
        endcase
      end
    end
  end

  a_planes: assert property (@(posedge clk) disable iff (!rst_n)
    (!busy && start) |-> (cfg.ba != 0 && cfg.bw != 0 && cfg.ba <= 4'd8 && cfg.bw <= 4'd8));
endmodule
