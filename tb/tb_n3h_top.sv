// tb_n3h_top: end-to-end test of the accelerator at a reduced size (LUT-core
// 3 x 4 DPUs of 64 bits, DSP-core 2 rows, shallow queues). Seven layers run
// back to back through the DDR model with random stalls: both cores, LUT-core
// only and DSP-core only, signed and unsigned planes, 1 to 8 bits, one to
// three weight-group refills, then two tiles of one layer placed anywhere in
// DDR by loading new region bases before each. Each result tile is compared with an integer
// matrix product. The testbench also counts how often each mechanism of the
// design happened (execute waiting for fetch, fetch waiting for a released
// weight group, result engine waiting for execute, both cores computing in
// the same cycle, one core waiting at the layer barrier, activation region
// swaps, tiles placed by re-initialising the region bases, subtracted sign planes, full instruction queues, DDR stalls) and
// fails any that never did.
`include "tb_util.svh"
module tb_n3h_top;
  import n3h_pkg::*;
  localparam int M = 3, N = 4, K = 64, DR = 2, IQ = 4;
  localparam int A0 = 0, A1 = 'h1000, LWB = 'h2000, DWB = 'h4000, WORDS = 'h6000;

  `include "n3h_env.svh"

  n3h_top #(.M(M), .N(N), .K(K), .D_LA(64), .D_LW(32), .D_ROWS(DR), .D_DA(64), .D_DW(64),
            .IQ_DEPTH(IQ), .TQ_DEPTH(4)) dut (.*);

  initial begin
    repeat (200000) @(posedge clk);
    failures++; $display("watchdog"); `TB_FINISH
  end

  initial begin
    int cyc;
    reset_and_init();
    run_layer(1, 1, 2, 4, 1, 1, 2, cyc); $display("layer 0: %0d cycles", cyc);
    run_layer(1, 0, 3, 3, 0, 1, 3, cyc); $display("layer 1: %0d cycles", cyc);
    run_layer(0, 1, 2, 2, 0, 0, 2, cyc); $display("layer 2: %0d cycles", cyc);
    run_layer(1, 1, 4, 8, 1, 1, 1, cyc); $display("layer 3: %0d cycles", cyc);
    run_layer(1, 1, 1, 1, 0, 0, 4, cyc); $display("layer 4: %0d cycles", cyc);
    run_layer(1, 1, 2, 2, 1, 0, 2, cyc); $display("layer 5: %0d cycles", cyc);
    run_layer(1, 1, 4, 6, 0, 1, 2, cyc); $display("layer 6: %0d cycles", cyc);
    // two tiles of one layer placed by re-initialising the region bases
    place('h0800, 'h1800, 'h3000, 'h5000);
    run_layer(1, 1, 2, 3, 1, 1, 2, cyc); $display("tile 0: %0d cycles", cyc);
    place('h0900, 'h1900, 'h3400, 'h5400);
    run_layer(1, 1, 2, 3, 1, 1, 2, cyc); $display("tile 1: %0d cycles", cyc);
    $display("layers=%0d both=%0d lut_only=%0d dsp_only=%0d swaps=%0d", n_layers, n_both, n_lut_only,
             n_dsp_only, n_swaps);
    $display("lut_exec=%0d negated=%0d dsp_exec=%0d exec_wait=%0d fetch_wait=%0d result_wait=%0d",
             n_exec_lut, n_neg_lut, n_exec_dsp, c_exec_wait, c_fetch_wait, c_result_wait);
    $display("overlap=%0d barrier=%0d iq_full=%0d ddr_stalls=%0d", c_overlap, c_barrier, c_iq_full, ddr.stalls);
    `CHECK(n_both > 0 && n_lut_only > 0 && n_dsp_only > 0, "all split kinds ran")
    `CHECK(n_swaps == n_layers, "one region swap per layer")
    `CHECK(n_neg_lut > 0, "sign planes subtracted")
    `CHECK(n_exec_lut == 2*4 + 3*3 + 4*8 + 1 + 2*2 + 4*6 + 2*2*3, "one LUT execute per plane pair")
    `CHECK(n_exec_dsp == 8, "one DSP execute per layer")
    `CHECK(c_exec_wait > 0, "execute waited for fetch")
    `CHECK(c_fetch_wait > 0, "fetch waited for a released weight group")
    `CHECK(c_result_wait > 0, "result waited for execute")
    `CHECK(c_overlap > 0, "both cores computing at once")
    `CHECK(c_barrier > 0, "a core waited at the layer barrier")
    `CHECK(c_iq_full > 0, "instruction queue back-pressure")
    `CHECK(ddr.stalls > 0, "DDR stalls")
    `CHECK(c_wr_lut == 8 * M * N / 2 && c_wr_dsp == 8 * DR * CW / 2, "result beats written once")
    `TB_FINISH
  end
endmodule
