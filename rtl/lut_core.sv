// lut_core: the LUT-based bit-serial GEMM core, an M x N array of DPUs.
// Row m of the array reads activation buffer m, column n reads weight buffer
// n; every DPU sees K bits of each per cycle, so the array handles M*K*N
// binary multiply-accumulates per cycle. One Execute instruction multiplies
// one activation bit plane (at lhs_addr) by one weight bit plane (at rhs_addr)
// over `chunks` buffer words, adding (or subtracting, for a sign plane) the
// result scaled by 2^shift into the M x N accumulators. With `commit` the
// accumulators are presented on `acc` with a one-cycle `commit_o` pulse for the
// result buffer. Timing: start is taken in IDLE; buffer reads are issued on
// the next `chunks` cycles, one per cycle; `done` pulses chunks+3 cycles after
// start. The array shape and buffer interface width K follow the published
// LUT-core (BISMO-style); the instruction fields and timing are this design's.
// Lint: the unused bits of the Execute word are reported; `rst_n` is also
// used by an assertion's disable condition.
module lut_core
  import n3h_pkg::*;
#(
  parameter int unsigned M       = 8,
  parameter int unsigned N       = 16,
  parameter int unsigned K       = 128,
  parameter int unsigned DEPTH_A = 1024,
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
  input  logic [K-1:0]               act_data [M],
  output logic                       w_rd_en,
  output logic [$clog2(DEPTH_W)-1:0] w_rd_addr,
  input  logic [K-1:0]               w_data [N],
  output logic                       commit_o,
  output logic signed [ACC_W-1:0]    acc [M][N]
);
  typedef enum logic [1:0] {S_IDLE, S_ISSUE, S_DRAIN, S_FIN} state_e;
  state_e      state;
  exec_instr_t cur;
  logic [15:0] cnt;
  logic        valid_q, clear_pend;

  assign busy        = (state != S_IDLE);
  assign act_rd_en   = (state == S_ISSUE);
  assign w_rd_en     = (state == S_ISSUE);
  assign act_rd_addr = $clog2(DEPTH_A)'(cur.lhs_addr + cnt);
  assign w_rd_addr   = $clog2(DEPTH_W)'(cur.rhs_addr + cnt);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state      <= S_IDLE;
      cur        <= '0;
      cnt        <= '0;
      valid_q    <= 1'b0;
      clear_pend <= 1'b0;
      done       <= 1'b0;
      commit_o   <= 1'b0;
    end else begin
      done     <= 1'b0;
      commit_o <= 1'b0;
      valid_q  <= (state == S_ISSUE);
      if (valid_q) clear_pend <= 1'b0;
      case (state)
        S_IDLE: if (start) begin
          cur        <= ex;
          cnt        <= '0;
          clear_pend <= ex.clear;
          state      <= S_ISSUE;
        end
        S_ISSUE: begin
          cnt <= cnt + 16'd1;
          if (cnt + 16'd1 >= cur.chunks) state <= S_DRAIN;
        end
        S_DRAIN: state <= S_FIN;
        S_FIN: begin
          done     <= 1'b1;
          commit_o <= cur.commit;
          state    <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  for (genvar m = 0; m < M; m++) begin : g_row
    for (genvar n = 0; n < N; n++) begin : g_col
      dpu #(.K(K), .ACC_W(ACC_W)) u_dpu (
        .clk    (clk),
        .rst_n  (rst_n),
        .clear  (clear_pend && valid_q),
        .valid  (valid_q),
        .a      (act_data[m]),
        .w      (w_data[n]),
        .shift  (cur.shift),
        .negate (cur.negate),
        .acc    (acc[m][n])
      );
    end
  end

  a_chunks_nonzero: assert property (@(posedge clk) disable iff (!rst_n)
    (state == S_IDLE && start) |-> ex.chunks != '0);
endmodule
