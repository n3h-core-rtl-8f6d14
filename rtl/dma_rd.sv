// dma_rd: read DMA of a fetch engine. For one Fetch instruction it copies
// `words` buffer words into each of `nbanks` banks. Bank b's words lie in DDR
// from ddr_base + b*bank_stride, each word being BUFW/64 consecutive 64-bit
// beats (lowest beat first, in the low bits); they are written at buffer
// addresses buf_base, buf_base+1, ... of that bank. Requests are issued one
// per cycle while the DDR port is ready, without waiting for responses, which
// must return in request order. `done` pulses together with the last buffer
// write. The DMA and its base/offset/range addressing are published; the
// port handshake and beat order are this design's choice.
// Lint: `rst_n` is also used by the assertion's disable condition.
module dma_rd
  import n3h_pkg::*;
#(
  parameter int unsigned BUFW  = 128,
  parameter int unsigned NBMAX = 16
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic                      start,
  input  logic [DDR_AW-1:0]         ddr_base,
  input  logic [23:0]               bank_stride,
  input  logic [15:0]               words,
  input  logic [$clog2(NBMAX+1)-1:0] nbanks,
  input  logic [15:0]               buf_base,
  output logic                      busy,
  output logic                      done,
  output logic                      rd_req_valid,
  output logic [DDR_AW-1:0]         rd_req_addr,
  input  logic                      rd_req_ready,
  input  logic                      rd_resp_valid,
  input  logic [DDR_DW-1:0]         rd_resp_data,
  output logic                      wr_en,
  output logic [$clog2(NBMAX)-1:0]  wr_bank,
  output logic [15:0]               wr_addr,
  output logic [BUFW-1:0]           wr_data
);
  localparam int unsigned BPW = BUFW / DDR_DW;
  localparam int unsigned BW  = (BPW > 1) ? $clog2(BPW) : 1;

  logic                     req_on, rsp_on;
  logic [DDR_AW-1:0]        bank_ptr;
  logic [23:0]              stride_q;
  logic [15:0]              words_q, bufb_q;
  logic [$clog2(NBMAX+1)-1:0] nb_q;
  // request side
  logic [$clog2(NBMAX+1)-1:0] qb;
  logic [15:0]              qw;
  logic [BW-1:0]            qbeat;
  // response side
  logic [$clog2(NBMAX+1)-1:0] sb;
  logic [15:0]              sw;
  logic [BW-1:0]            sbeat;
  logic [BUFW-1:0]          asm_q;

  assign busy         = req_on || rsp_on;
  assign rd_req_valid = req_on;
  assign rd_req_addr  = bank_ptr + DDR_AW'(qw) * DDR_AW'(BPW) + DDR_AW'(qbeat);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      req_on <= 1'b0; rsp_on <= 1'b0;
      bank_ptr <= '0; stride_q <= '0; words_q <= '0; bufb_q <= '0; nb_q <= '0;
      qb <= '0; qw <= '0; qbeat <= '0; sb <= '0; sw <= '0; sbeat <= '0;
      asm_q <= '0; wr_en <= 1'b0; wr_bank <= '0; wr_addr <= '0; wr_data <= '0; done <= 1'b0;
    end else begin
      wr_en <= 1'b0;
      done  <= 1'b0;
      if (start && !busy) begin
        bank_ptr <= ddr_base;
        stride_q <= bank_stride;
        words_q  <= words;
        bufb_q   <= buf_base;
        nb_q     <= nbanks;
        qb <= '0; qw <= '0; qbeat <= '0;
        sb <= '0; sw <= '0; sbeat <= '0;
        req_on <= (words != '0) && (nbanks != '0);
        rsp_on <= (words != '0) && (nbanks != '0);
        done   <= (words == '0) || (nbanks == '0);
      end
      // issue requests
      if (req_on && rd_req_ready) begin
        if (qbeat == BW'(BPW - 1)) begin
          qbeat <= '0;
          if (qw + 16'd1 == words_q) begin
            qw       <= '0;
            qb       <= qb + 1'b1;
            bank_ptr <= bank_ptr + DDR_AW'(stride_q);
            if (qb + 1'b1 == nb_q) req_on <= 1'b0;
          end else qw <= qw + 16'd1;
        end else qbeat <= qbeat + 1'b1;
      end
      // collect responses
      if (rsp_on && rd_resp_valid) begin
        asm_q[sbeat*DDR_DW +: DDR_DW] <= rd_resp_data;
        if (sbeat == BW'(BPW - 1)) begin
          sbeat   <= '0;
          wr_en   <= 1'b1;
          wr_bank <= $clog2(NBMAX)'(sb);
          wr_addr <= bufb_q + sw;
          wr_data <= asm_q;
          wr_data[sbeat*DDR_DW +: DDR_DW] <= rd_resp_data;
          if (sw + 16'd1 == words_q) begin
            sw <= '0;
            sb <= sb + 1'b1;
            if (sb + 1'b1 == nb_q) begin
              rsp_on <= 1'b0;
              done   <= 1'b1;
            end
          end else sw <= sw + 16'd1;
        end else sbeat <= sbeat + 1'b1;
      end
    end
  end

  a_resp_expected: assert property (@(posedge clk) disable iff (!rst_n)
    rd_resp_valid |-> rsp_on);
endmodule
