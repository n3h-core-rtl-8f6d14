// tb_n3h_workloads: tiles of the two evaluated networks on the accelerator at
// its default size (no parameter overridden). Layer shapes are the standard
// ResNet-18 / MobileNet-V2 ones; the bit-widths are in the published ranges:
//   * ResNet-18 first layer, 7x7x3 inputs (147, padded to 256), 8-bit
//     activations and weights on the LUT-core;
//   * ResNet-18 last 3x3 convolution, inner dimension 3*3*512 = 4608 (36 LUT
//     chunks, 288 DSP chunks), 2-bit activations x 4-bit signed weights;
//   * MobileNet-V2 1x1 projection with 320 inputs (padded to 384), 3-bit
//     activations x 5-bit signed weights.
// Each step computes one 8 x 16 LUT tile and one 13 x 16 DSP tile, compared
// with an integer product; the buffer depths must hold the largest one.
`include "tb_util.svh"
module tb_n3h_workloads;
  import n3h_pkg::*;
  localparam int M = 8, N = 16, K = 128, DR = 13, IQ = 16;
  localparam int A0 = 0, A1 = 'h4000, LWB = 'h8000, DWB = 'hC000, WORDS = 'h10000;

  `include "n3h_env.svh"

  n3h_top dut (.*);

  initial begin
    repeat (400000) @(posedge clk);
    failures++; $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int cyc;
    reset_and_init();
    run_layer(1, 1, 8, 8, 0, 1, 2, cyc);  $display("resnet18 conv1 tile: %0d cycles", cyc);
    run_layer(1, 1, 2, 4, 0, 1, 36, cyc); $display("resnet18 conv5 tile: %0d cycles", cyc);
    `CHECK(cyc > 19 * 288 + 2, "conv5 no faster than the DSP-core execute")
    run_layer(1, 1, 3, 5, 0, 1, 3, cyc);  $display("mobilenetv2 1x1 tile: %0d cycles", cyc);
    `CHECK(n_layers == 3 && n_exec_lut == 64 + 8 + 15 && n_exec_dsp == 3, "all steps executed")
    `TB_FINISH
  end
endmodule
