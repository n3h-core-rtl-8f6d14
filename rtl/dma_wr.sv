// dma_wr: write DMA of a result engine. For one Result instruction it copies
// `beats` 64-bit beats of every one of the ROWS result-buffer rows to DDR:
// row r goes to ddr_base + r*row_stride onwards. Each beat is read from the
// result buffer in one cycle and offered to the DDR write port in the next,
// held until the port is ready, so one beat leaves at most every two cycles.
// `done` pulses in the cycle after the last beat is accepted. The DMA and its
// base/offset/range addressing are published; the rest is this design's.
// Lint: `rst_n` is also used by the assertion's disable condition.
module dma_wr
  import n3h_pkg::*;
#(
  parameter int unsigned ROWS = 8,
  parameter int unsigned COLS = 16
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic                      start,
  input  logic [DDR_AW-1:0]         ddr_base,
  input  logic [23:0]               row_stride,
  input  logic [15:0]               beats,
  output logic                      busy,
  output logic                      done,
  output logic                      rb_rd_en,
  output logic [$clog2(ROWS)-1:0]   rb_rd_row,
  output logic [$clog2(COLS/2)-1:0] rb_rd_beat,
  input  logic [DDR_DW-1:0]         rb_rd_data,
  output logic                      wr_valid,
  output logic [DDR_AW-1:0]         wr_addr,
  output logic [DDR_DW-1:0]         wr_data,
  input  logic                      wr_ready
);
  typedef enum logic [1:0] {S_IDLE, S_RD, S_WR} state_e;
  state_e            state;
  logic [DDR_AW-1:0] row_ptr;
  logic [23:0]       stride_q;
  logic [15:0]       beats_q, bt;
  logic [$clog2(ROWS+1)-1:0] row;

  assign busy       = (state != S_IDLE);
  assign rb_rd_en   = (state == S_RD);
  assign rb_rd_row  = $clog2(ROWS)'(row);
  assign rb_rd_beat = $clog2(COLS/2)'(bt);
  assign wr_valid   = (state == S_WR);
  assign wr_addr    = row_ptr + DDR_AW'(bt);
  assign wr_data    = rb_rd_data;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE; row_ptr <= '0; stride_q <= '0; beats_q <= '0;
      bt <= '0; row <= '0; done <= 1'b0;
    end else begin
      done <= 1'b0;
      case (state)
        S_IDLE: if (start) begin
          row_ptr  <= ddr_base;
          stride_q <= row_stride;
          beats_q  <= beats;
          bt       <= '0;
          row      <= '0;
          if (beats == '0) done <= 1'b1;
          else             state <= S_RD;
        end
        S_RD: state <= S_WR;
        S_WR: if (wr_ready) begin
          if (bt + 16'd1 == beats_q) begin
            bt      <= '0;
            row_ptr <= row_ptr + DDR_AW'(stride_q);
            row     <= row + 1'b1;
            if (row + 1'b1 == ($clog2(ROWS+1))'(ROWS)) begin
              state <= S_IDLE;
              done  <= 1'b1;
            end else state <= S_RD;
          end else begin
            bt    <= bt + 16'd1;
            state <= S_RD;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  a_beats_fit: assert property (@(posedge clk) disable iff (!rst_n)
    (state == S_IDLE && start) |-> beats <= 16'(COLS / 2));
endmodule
