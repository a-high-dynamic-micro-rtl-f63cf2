// tb_detector_fsm -- self-checking test of the IDLE/READY/RUN state machine.
// Walks every transition (INIT, START, STOP from READY, STOP from RUN,
// natural end) and checks that START/STOP/natural end are ignored in the
// states where they do not apply, and the run_start/run_abort pulses.
module tb_detector_fsm;
  import saxs_pkg::*;
  logic clk = 0, rst_n = 0;
  logic init_done = 0, start = 0, stop = 0, meas_done = 0;
  det_state_e state;
  logic run_start, run_abort;
  int checks = 0, failures = 0;

  detector_fsm dut (.*);
  always #5 clk = ~clk;

  task automatic step(input logic i, s, p, d);
    init_done = i; start = s; stop = p; meas_done = d;
    @(posedge clk); #1;
    start = 0; stop = 0; meas_done = 0;
  endtask
  task automatic expect_state(input det_state_e e, input logic rs, ra, input string what);
    checks++;
    if (state !== e || run_start !== rs || run_abort !== ra) begin
      failures++;
      $display("FAIL %s: state=%s run_start=%0b run_abort=%0b expected %s %0b %0b",
               what, state.name(), run_start, run_abort, e.name(), rs, ra);
    end
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1; #1;
    expect_state(ST_IDLE, 0, 0, "reset");
    step(0, 1, 0, 0); expect_state(ST_IDLE, 0, 0, "START in IDLE ignored");
    step(0, 0, 1, 1); expect_state(ST_IDLE, 0, 0, "STOP/end in IDLE ignored");
    step(1, 0, 0, 0); expect_state(ST_READY, 0, 0, "INIT -> READY");
    step(1, 0, 0, 1); expect_state(ST_READY, 0, 0, "end in READY ignored");
    step(1, 0, 1, 0); expect_state(ST_IDLE, 0, 0, "STOP in READY -> IDLE");
    step(0, 0, 0, 0); expect_state(ST_IDLE, 0, 0, "stay IDLE");
    step(1, 0, 0, 0); expect_state(ST_READY, 0, 0, "INIT again");
    step(1, 1, 0, 0); expect_state(ST_RUN, 1, 0, "START -> RUN, run_start");
    step(0, 0, 0, 0); expect_state(ST_RUN, 0, 0, "stay RUN, pulse ends");
    step(1, 1, 0, 0); expect_state(ST_RUN, 0, 0, "START/INIT in RUN ignored");
    step(0, 0, 0, 1); expect_state(ST_IDLE, 0, 0, "natural end -> IDLE, no abort");
    step(1, 0, 0, 0); expect_state(ST_READY, 0, 0, "INIT");
    step(1, 1, 0, 0); expect_state(ST_RUN, 1, 0, "START");
    step(0, 0, 1, 0); expect_state(ST_IDLE, 0, 1, "STOP in RUN -> IDLE, run_abort");
    step(0, 0, 0, 0); expect_state(ST_IDLE, 0, 0, "abort pulse ends");
    step(1, 1, 1, 0); expect_state(ST_READY, 0, 0, "INIT+START+STOP in IDLE: only INIT acts");
    step(1, 1, 1, 0); expect_state(ST_IDLE, 0, 0, "STOP beats START in READY");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
