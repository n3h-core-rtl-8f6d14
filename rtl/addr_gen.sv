// addr_gen: address generator. It keeps the DDR partitions of the two cores
// apart and tells each core's instruction generator where its data lie:
//   * LUT-core weights and DSP-core weights live in two separate regions that
//     are read layer after layer; each pointer moves on by the weight volume
//     of the finished layer;
//   * activations live in two regions used alternately: a layer reads the
//     current one and both cores write their results into the other one,
//     which becomes the current one for the next layer.
// Within the activation region the LUT-core's bit planes come first (plane i
// of row m at i*M*C*B + m*C*B, C = chunks, B = K/64 beats per word), followed
// by the DSP-core's rows of packed 4-bit values (row r at r*Cd). In the
// result region the LUT-core tile (M rows of N/2 beats) precedes the DSP-core
// tile (its rows of COLS_W/2 beats). `init` loads the region bases, `advance`
// (one pulse at the end of a layer) moves the pointers; the outputs are
// combinational from the registers and the current layer descriptor.
// The division of DDR into these regions, and the base/stride role of this
// block, are published; the layout inside a region is this design's choice.
module addr_gen
  import n3h_pkg::*;
#(
  parameter int unsigned M      = 8,
  parameter int unsigned N      = 16,
  parameter int unsigned K      = 128,
  parameter int unsigned COLS_W = 16
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              init,
  input  logic [DDR_AW-1:0] act_region0,
  input  logic [DDR_AW-1:0] act_region1,
  input  logic [DDR_AW-1:0] lut_w_region,
  input  logic [DDR_AW-1:0] dsp_w_region,
  input  layer_desc_t       layer,
  input  logic              advance,
  output gen_cfg_t          lut_cfg,
  output gen_cfg_t          dsp_cfg,
  output logic              cur_region
);
  localparam int unsigned BPW = K / DDR_DW;

  logic [DDR_AW-1:0] reg0, reg1, lut_w_ptr, dsp_w_ptr;
  logic [DDR_AW-1:0] act_ptr, out_ptr, lut_word_beats;

  assign act_ptr        = cur_region ? reg1 : reg0;
  assign out_ptr        = cur_region ? reg0 : reg1;
  assign lut_word_beats = 32'(layer.lut_chunks) * 32'(BPW);

  always_comb begin
    lut_cfg                  = '0;
    lut_cfg.ba               = layer.lut_ba;
    lut_cfg.bw               = layer.lut_bw;
    lut_cfg.a_signed         = layer.a_signed;
    lut_cfg.w_signed         = layer.w_signed;
    lut_cfg.chunks           = layer.lut_chunks;
    lut_cfg.a_words          = layer.lut_chunks;
    lut_cfg.w_words          = layer.lut_chunks;
    lut_cfg.act_base         = act_ptr;
    lut_cfg.act_plane_stride = 32'(M) * lut_word_beats;
    lut_cfg.act_bank_stride  = 24'(lut_word_beats);
    lut_cfg.w_base           = lut_w_ptr;
    lut_cfg.w_plane_stride   = 32'(N) * lut_word_beats;
    lut_cfg.w_bank_stride    = 24'(lut_word_beats);
    lut_cfg.res_base         = out_ptr;
    lut_cfg.res_row_stride   = 24'(N / 2);
    lut_cfg.res_beats        = 16'(N / 2);

    dsp_cfg                  = '0;
    dsp_cfg.ba               = 4'd1;
    dsp_cfg.bw               = 4'd1;
    dsp_cfg.chunks           = layer.dsp_chunks;
    dsp_cfg.a_words          = layer.dsp_chunks;
    dsp_cfg.w_words          = 16'(2 * layer.dsp_chunks);
    dsp_cfg.act_base         = act_ptr + 32'(layer.lut_ba) * 32'(M) * lut_word_beats;
    dsp_cfg.act_bank_stride  = 24'(layer.dsp_chunks);
    dsp_cfg.w_base           = dsp_w_ptr;
    dsp_cfg.w_bank_stride    = 24'(2 * layer.dsp_chunks);
    dsp_cfg.res_base         = out_ptr + 32'(M * (N / 2));
    dsp_cfg.res_row_stride   = 24'(COLS_W / 2);
    dsp_cfg.res_beats        = 16'(COLS_W / 2);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      reg0 <= '0; reg1 <= '0; lut_w_ptr <= '0; dsp_w_ptr <= '0; cur_region <= 1'b0;
    end else if (init) begin
      reg0       <= act_region0;
      reg1       <= act_region1;
      lut_w_ptr  <= lut_w_region;
      dsp_w_ptr  <= dsp_w_region;
      cur_region <= 1'b0;
    end else if (advance) begin
      if (layer.lut_en) lut_w_ptr <= lut_w_ptr + 32'(layer.lut_bw) * 32'(N) * lut_word_beats;
      if (layer.dsp_en) dsp_w_ptr <= dsp_w_ptr + 32'(COLS_W) * 32'(layer.dsp_chunks);
      cur_region <= !cur_region;
    end
  end
endmodule
