// result_buffer: per-core result buffer. When `load` pulses it captures the
// whole ROWS x COLS accumulator tile of its core in one cycle, so the core can
// go on with the next tile while the result DMA drains this one. The DMA reads
// it as 64-bit beats: beat b of row r holds results 2b (low half) and 2b+1
// (high half); data appears one cycle after rd_en. COLS must be even. The
// buffer itself is published; its register form and read format are this
// design's choice.
module result_buffer
  import n3h_pkg::*;
#(
  parameter int unsigned ROWS = 8,
  parameter int unsigned COLS = 16
) (
  input  logic                         clk,
  input  logic                         rst_n,
  input  logic                         load,
  input  logic signed [ACC_W-1:0]      acc_in [ROWS][COLS],
  input  logic                         rd_en,
  input  logic [$clog2(ROWS)-1:0]      rd_row,
  input  logic [$clog2(COLS/2)-1:0]    rd_beat,
  output logic [DDR_DW-1:0]            rd_data
);
  logic [ACC_W-1:0] res [ROWS][COLS];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rd_data <= '0;
      for (int r = 0; r < ROWS; r++)
        for (int c = 0; c < COLS; c++) res[r][c] <= '0;
    end else begin
      if (load)
        for (int r = 0; r < ROWS; r++)
          for (int c = 0; c < COLS; c++) res[r][c] <= acc_in[r][c];
      if (rd_en)
        rd_data <= {res[rd_row][2*rd_beat+1], res[rd_row][2*rd_beat]};
    end
  end
endmodule
