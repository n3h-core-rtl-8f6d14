// tb_addr_gen: the address generator is initialised with four region bases
// and stepped through five layers of random shape. For every layer the
// LUT-core and DSP-core programmes are compared with the region layout
// computed in the testbench: activations read from the current region and
// results written to the other one, the regions swapping at each layer
// boundary, and each weight pointer moving on only by the volume of layers
// that used its core.
`include "tb_util.svh"
module tb_addr_gen;
  import n3h_pkg::*;
  localparam int M = 3, N = 6, K = 128, CW = 16, BPW = K / 64;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic init, advance, cur_region;
  logic [31:0] act_region0, act_region1, lut_w_region, dsp_w_region;
  layer_desc_t layer;
  gen_cfg_t lut_cfg, dsp_cfg;
  logic [31:0] lw, dw;
  int swaps;

  addr_gen #(.M(M), .N(N), .K(K), .COLS_W(CW)) dut (.*);

  initial begin
    repeat (2000) @(posedge clk);
    failures++; $display("watchdog"); `TB_FINISH
  end

  initial begin
    init = 0; advance = 0; layer = '0; swaps = 0;
    act_region0 = 32'h1000; act_region1 = 32'h9000; lut_w_region = 32'h20000; dsp_w_region = 32'h40000;
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(negedge clk); init = 1;
    @(negedge clk); init = 0;
    lw = lut_w_region; dw = dsp_w_region;
    for (int l = 0; l < 5; l++) begin
      logic [31:0] ap, op;
      logic prev;
      layer = '0;
      layer.lut_en = (l != 2); layer.dsp_en = (l != 1);
      layer.lut_ba = 4'($urandom_range(1, 4)); layer.lut_bw = 4'($urandom_range(1, 8));
      layer.a_signed = 1'($urandom); layer.w_signed = 1'($urandom);
      layer.lut_chunks = 16'($urandom_range(1, 20)); layer.dsp_chunks = 16'($urandom_range(1, 20));
      #1;
      ap = cur_region ? act_region1 : act_region0;
      op = cur_region ? act_region0 : act_region1;
      `CHECK(cur_region == 1'(l % 2), "region ping-pong")
      `CHECK(lut_cfg.ba == layer.lut_ba && lut_cfg.bw == layer.lut_bw && lut_cfg.chunks == layer.lut_chunks
             && lut_cfg.a_signed == layer.a_signed && lut_cfg.w_signed == layer.w_signed, "lut shape")
      `CHECK(lut_cfg.act_base == ap && lut_cfg.act_plane_stride == M * layer.lut_chunks * BPW
             && lut_cfg.act_bank_stride == layer.lut_chunks * BPW, "lut activation layout")
      `CHECK(lut_cfg.w_base == lw && lut_cfg.w_plane_stride == N * layer.lut_chunks * BPW
             && lut_cfg.w_bank_stride == layer.lut_chunks * BPW, "lut weight layout")
      `CHECK(lut_cfg.res_base == op && lut_cfg.res_row_stride == N / 2 && lut_cfg.res_beats == N / 2, "lut result layout")
      `CHECK(dsp_cfg.ba == 1 && dsp_cfg.bw == 1 && dsp_cfg.chunks == layer.dsp_chunks
             && dsp_cfg.a_words == layer.dsp_chunks && dsp_cfg.w_words == 2 * layer.dsp_chunks, "dsp shape")
      `CHECK(dsp_cfg.act_base == ap + layer.lut_ba * M * layer.lut_chunks * BPW
             && dsp_cfg.act_bank_stride == layer.dsp_chunks, "dsp activation layout")
      `CHECK(dsp_cfg.w_base == dw && dsp_cfg.w_bank_stride == 2 * layer.dsp_chunks, "dsp weight layout")
      `CHECK(dsp_cfg.res_base == op + M * N / 2 && dsp_cfg.res_row_stride == CW / 2
             && dsp_cfg.res_beats == CW / 2, "dsp result layout")
      prev = cur_region;
      @(negedge clk); advance = 1;
      @(negedge clk); advance = 0;
      if (cur_region != prev) swaps++;
      if (layer.lut_en) lw += layer.lut_bw * N * layer.lut_chunks * BPW;
      if (layer.dsp_en) dw += CW * layer.dsp_chunks;
    end
    `CHECK(swaps == 5, "a swap at every layer boundary")
    @(negedge clk); init = 1;
    @(negedge clk); init = 0;
    `CHECK(cur_region == 1'b0 && lut_cfg.w_base == lut_w_region && dsp_cfg.w_base == dsp_w_region, "re-init")
    `TB_FINISH
  end
endmodule
