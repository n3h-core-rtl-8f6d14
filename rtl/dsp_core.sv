// dsp_core: the DSP-based bit-parallel GEMM core for 4-bit operands.
// It computes an ROWS x COLS_W output tile. For every chunk of 16 (COLS_A)
// inner-dimension elements it loads the activation register array
// (ROWS x COLS_A, one row from each activation buffer, all rows in one cycle)
// and the weight register array (COLS_A x COLS_W; each weight buffer fills two
// columns, so this takes two cycles), then runs COLS_A multiply-accumulate
// steps on the ROWS x COLS_W array of DSP MAC slots, one inner index per cycle.
// Activations are unsigned 4-bit (narrower ones are zero-padded); weights are
// signed 4-bit. One Execute instruction consumes `chunks` chunks starting at
// lhs_addr (activation buffers) and rhs_addr (weight buffers; two words per
// chunk, for column 2b then 2b+1). `clear` zeroes the accumulators first;
// `commit` presents them on `acc` with a one-cycle `commit_o` pulse.
// Timing: 3 + COLS_A cycles per chunk; `done` pulses (3 + COLS_A)*chunks + 2
// cycles after the start cycle.
// The buffer counts, widths and register array shapes follow the published
// DSP-core; the one-MAC-per-cycle DSP slot and ROWS*COLS_W slots are this
// design's reading of the DSP array, whose insides are not published.
// Lint: fields of the Execute word that this core does not use (shift,
// negate) are reported as unused bits; `rst_n` is also used by the assertion.
module dsp_core
  import n3h_pkg::*;
#(
  parameter int unsigned ROWS    = 13,
  parameter int unsigned COLS_A  = 16,
  parameter int unsigned COLS_W  = 16,
  parameter int unsigned DEPTH_A = 2048,
  parameter int unsigned DEPTH_W = 1024
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic                       start,
  input  exec_instr_t                ex,
  output logic                       busy,
  output logic                       done,
  output logic                       act_rd_en,
  output logic [$clog2(DEPTH_A)-1:0] act_rd_addr,
  input  logic [4*COLS_A-1:0]        act_data [ROWS],
  output logic                       w_rd_en,
  output logic [$clog2(DEPTH_W)-1:0] w_rd_addr,
  input  logic [4*COLS_A-1:0]        w_data [COLS_W/2],
  output logic                       commit_o,
  output logic signed [ACC_W-1:0]    acc [ROWS][COLS_W]
);
  typedef enum logic [2:0] {S_IDLE, S_RD, S_LDA, S_LDW, S_MAC, S_FIN} state_e;
  state_e      state;
  exec_instr_t cur;
  logic [15:0] chunk;
  logic [$clog2(COLS_A)-1:0] k;
  logic [3:0]  areg [ROWS][COLS_A];
  logic [3:0]  wreg [COLS_A][COLS_W];

  // One DSP slot product: unsigned 4-bit activation times signed 4-bit weight.
  function automatic logic signed [8:0] mac4(input logic [3:0] a, input logic [3:0] w);
    logic signed [8:0] aa, ww;
    aa = $signed({5'b0, a});
    ww = $signed({{5{w[3]}}, w});
    return aa * ww;
  endfunction

  assign busy        = (state != S_IDLE);
  assign act_rd_en   = (state == S_RD);
  assign act_rd_addr = $clog2(DEPTH_A)'(cur.lhs_addr + chunk);
  assign w_rd_en     = (state == S_RD) || (state == S_LDA);
  assign w_rd_addr   = $clog2(DEPTH_W)'(cur.rhs_addr + (chunk << 1) + ((state == S_LDA) ? 16'd1 : 16'd0));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state    <= S_IDLE;
      cur      <= '0;
      chunk    <= '0;
      k        <= '0;
      done     <= 1'b0;
      commit_o <= 1'b0;
      for (int r = 0; r < ROWS; r++)
        for (int c = 0; c < COLS_W; c++) acc[r][c] <= '0;
    end else begin
      done     <= 1'b0;
      commit_o <= 1'b0;
      case (state)
        S_IDLE: if (start) begin
          cur   <= ex;
          chunk <= '0;
          state <= S_RD;
          if (ex.clear)
            for (int r = 0; r < ROWS; r++)
              for (int c = 0; c < COLS_W; c++) acc[r][c] <= '0;
        end
        S_RD:  state <= S_LDA;
        S_LDA: state <= S_LDW;
        S_LDW: begin
          k     <= '0;
          state <= S_MAC;
        end
        S_MAC: begin
          for (int r = 0; r < ROWS; r++)
            for (int c = 0; c < COLS_W; c++)
              acc[r][c] <= acc[r][c] + ACC_W'(mac4(areg[r][k], wreg[k][c]));
          k <= k + 1'b1;
          if (k == $clog2(COLS_A)'(COLS_A - 1)) begin
            chunk <= chunk + 16'd1;
            state <= (chunk + 16'd1 >= cur.chunks) ? S_FIN : S_RD;
          end
        end
        S_FIN: begin
          done     <= 1'b1;
          commit_o <= cur.commit;
          state    <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  // Register arrays: activation rows load in S_LDA (buffer data of the S_RD
  // read); weight column pairs load in S_LDA (column 2b) and S_LDW (2b+1).
  always_ff @(posedge clk) begin
    if (state == S_LDA)
      for (int r = 0; r < ROWS; r++)
        for (int i = 0; i < COLS_A; i++) areg[r][i] <= act_data[r][4*i +: 4];
    if (state == S_LDA)
      for (int b = 0; b < COLS_W / 2; b++)
        for (int i = 0; i < COLS_A; i++) wreg[i][2*b] <= w_data[b][4*i +: 4];
    if (state == S_LDW)
      for (int b = 0; b < COLS_W / 2; b++)
        for (int i = 0; i < COLS_A; i++) wreg[i][2*b+1] <= w_data[b][4*i +: 4];
  end

  a_chunks_nonzero: assert property (@(posedge clk) disable iff (!rst_n)
    (state == S_IDLE && start) |-> ex.chunks != '0);
endmodule
