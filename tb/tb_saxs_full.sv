// tb_saxs_full -- end-to-end test of saxs_top at its full default size:
// 20 ASICs x 64 strips = 1280 pixels, 2048 time frames, 1280-clock (128 us)
// JAMEX cycles. Run A is a complete measurement of all 2048 time frames
// (1 to 3 JAMEX cycles each) started by an external trigger; every one of
// the 2048 x 1280 image words is checked. Runs B (16 frames, trigger before
// every frame) and C (STOP in READY and in RUN) follow, as in tb_saxs_top;
// see saxs_tb_body.svh.
`timescale 1ns / 1ps
module tb_saxs_full;
  import saxs_pkg::*;
  localparam int N_CHIPS = N_CHIPS_DEF, N_MUX = N_MUX_DEF, N_FRAMES = N_FRAMES_DEF;
  localparam int CYCLE_CLKS = CYCLE_CLKS_DEF;
  localparam int NF_A = N_FRAMES, NF_B = 16, NF_C = 4;
  localparam int WATCHDOG_CLKS = 12000000;

  saxs_top dut (.*);

  `include "saxs_tb_body.svh"
endmodule
