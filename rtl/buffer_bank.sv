// buffer_bank: one group of on-chip peripheral buffers, e.g. the M activation
// buffers of the LUT-core or the weight buffers of the DSP-core. It has NB
// banks of DEPTH words of W bits. The fetch DMA writes one word per cycle into
// the bank it names; the computing core reads the same address from every
// bank at once, getting NB words one cycle after rd_en (synchronous read, as in
// a block RAM). The bank counts, depths and widths follow the published buffer
// organisation; the single shared read address is this design's choice, since
// all rows (or columns) of a core step through their buffers in lock-step.
module buffer_bank #(
  parameter int unsigned NB    = 8,
  parameter int unsigned DEPTH = 1024,
  parameter int unsigned W     = 128
) (
  input  logic                     clk,
  input  logic                     wr_en,
  input  logic [$clog2(NB)-1:0]    wr_bank,
  input  logic [$clog2(DEPTH)-1:0] wr_addr,
  input  logic [W-1:0]             wr_data,
  input  logic                     rd_en,
  input  logic [$clog2(DEPTH)-1:0] rd_addr,
  output logic [W-1:0]             rd_data [NB]
);
  for (genvar b = 0; b < NB; b++) begin : g_bank
    logic [W-1:0] mem [DEPTH];
    always_ff @(posedge clk) begin
      if (wr_en && wr_bank == b[$clog2(NB)-1:0]) mem[wr_addr] <= wr_data;
      if (rd_en) rd_data[b] <= mem[rd_addr];
    end
  end
endmodule
