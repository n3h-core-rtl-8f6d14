// tb_n3h_full: the accelerator at its default (published) size - LUT-core
// 8 x 16 DPUs of 128 bits, DSP-core 13 x 16, buffer depths 1024 / 2048 /
// 1024 - with no parameter overridden. Two layers run through the DDR model:
// 2-bit signed activations x 3-bit signed weights, then 4-bit unsigned
// activations x 4-bit weights, both cores active, inner dimension 256 (two
// 128-bit chunks for the LUT-core, sixteen 16-wide chunks for the DSP-core).
// Both result tiles are compared with an integer product, and the layer
// time is checked against the per-instruction latencies of the two cores.
`include "tb_util.svh"
module tb_n3h_full;
  import n3h_pkg::*;
  localparam int M = 8, N = 16, K = 128, DR = 13, IQ = 16;
  localparam int A0 = 0, A1 = 'h800, LWB = 'h1000, DWB = 'h2000, WORDS = 'h3000;

  `include "n3h_env.svh"

  n3h_top dut (.*);

  initial begin
    repeat (100000) @(posedge clk);
    failures++; $display("watchdog"); `TB_FINISH
  end

  initial begin
    int cyc;
    reset_and_init();
    run_layer(1, 1, 2, 3, 1, 1, 2, cyc);
    $display("layer 0: %0d cycles", cyc);
    // the DSP-core's single Execute takes 19 cycles per chunk plus 2
    `CHECK(cyc > 19 * 16 + 2, "layer no faster than the DSP-core execute")
    run_layer(1, 1, 4, 4, 0, 1, 2, cyc);
    $display("layer 1: %0d cycles", cyc);
    // LUT-core: 16 plane pairs of chunks + 3 cycles each
    `CHECK(cyc > 16 * (2 + 3), "layer no faster than the LUT-core executes")
    `CHECK(n_both == 2 && n_swaps == 2, "two layers, two region swaps")
    `CHECK(n_exec_lut == 2 * 3 + 4 * 4 && n_exec_dsp == 2, "execute counts")
    `CHECK(c_barrier > 0, "the earlier core waited at the layer barrier")
    `TB_FINISH
  end
endmodule
