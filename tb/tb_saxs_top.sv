// tb_saxs_top -- end-to-end test of the acquisition core at reduced size:
// 4 ASICs x 4 strips, 8 time frames, 20-clock JAMEX cycles. Three
// measurements go through the command port: full INIT, START, trigger-in
// before the first frame (run A) or before every frame (run B, with a
// zero TFC entry), then a run that is stopped in READY and again in RUN
// (run C). Every image word, the trigger-out and real-time-vector pulses,
// the GET read-backs and each state transition are checked; see
// saxs_tb_body.svh.
`timescale 1ns / 1ps
module tb_saxs_top;
  import saxs_pkg::*;
  localparam int N_CHIPS = 4, N_MUX = 4, N_FRAMES = 8, CYCLE_CLKS = 20;
  localparam int NF_A = 8, NF_B = 6, NF_C = 4;
  localparam int WATCHDOG_CLKS = 200000;

  saxs_top #(.N_CHIPS(N_CHIPS), .N_MUX(N_MUX), .N_FRAMES(N_FRAMES),
             .CYCLE_CLKS(CYCLE_CLKS)) dut (.*);

  `include "saxs_tb_body.svh"
endmodule
