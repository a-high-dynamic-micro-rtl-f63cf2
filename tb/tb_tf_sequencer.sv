// tb_tf_sequencer -- self-checking test of the time-frame sequencer.
// A behavioural TFC table answers the sequencer's reads one clock later;
// JAMEX cycle starts come every PERIOD clocks. For several measurements
// (different TFC tables, a zero entry, every trigger mode, and a STOP in
// the middle) the test compares the frame / first / last information of
// every cycle, the natural-end pulse, trigger-out pulses and the waits for
// trigger-in with a model worked out from the TFC table.
module tb_tf_sequencer;
  import saxs_pkg::*;
  localparam int N_FRAMES = 8, FW = 3, PERIOD = 12;
  logic clk = 0, rst_n = 0;
  logic run_start = 0, run_abort = 0, trig_in = 0, cycle_start = 0;
  logic [FW:0] n_frames = 1;
  trig_mode_e trig_in_mode = TRIG_NONE, trig_out_mode = TRIG_NONE;
  logic tfc_rd_en; logic [FW-1:0] tfc_rd_addr; logic [31:0] tfc_rd_data = 0;
  cyc_info_t cyc;
  logic running, waiting_trig, meas_done, trig_out, err_tfc_zero;
  logic [FW-1:0] cur_frame; logic [31:0] cur_cycle;
  int checks = 0, failures = 0;
  logic [31:0] tfc [N_FRAMES];

  tf_sequencer #(.N_FRAMES(N_FRAMES)) dut (.*);
  always #5 clk = ~clk;
  always_ff @(posedge clk) if (tfc_rd_en) tfc_rd_data <= tfc[tfc_rd_addr];

  // free-running cycle starts
  int phase = 0;
  always @(posedge clk) begin
    phase <= (phase == PERIOD - 1) ? 0 : phase + 1;
    cycle_start <= (phase == PERIOD - 1);
  end

  // event counters
  int n_trig_out = 0, n_done = 0, n_zero = 0;
  always @(posedge clk) if (rst_n) begin
    n_trig_out += int'(trig_out);
    n_done     += int'(meas_done);
    n_zero     += int'(err_tfc_zero);
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL %s", what); end
  endtask

  // run one measurement; abort_after < 0 means run to the end
  task automatic run(input int nf, input trig_mode_e tin, input trig_mode_e tout, input int abort_after);
    int exp_cycles, seen, f, c, tfc_eff, to0, z0, d0, waits;
    exp_cycles = 0;
    for (int i = 0; i < nf; i++) exp_cycles += (tfc[i] == 0) ? 1 : tfc[i];
    n_frames = (FW+1)'(nf); trig_in_mode = tin; trig_out_mode = tout;
    to0 = n_trig_out; z0 = n_zero; d0 = n_done;
    @(negedge clk); run_start = 1; @(negedge clk); run_start = 0;
    seen = 0; f = 0; c = 0; waits = 0;
    while (n_done == d0) begin
      @(posedge clk); #1;
      if (waiting_trig) begin
        waits++;
        if (waits % 30 == 0) begin trig_in = 1; @(posedge clk); #1; trig_in = 0; end
      end
      if (cycle_start) begin
        // the information for the cycle that just started appears after this edge
        @(posedge clk); #1;
        if (cyc.active) begin
          tfc_eff = (tfc[f] == 0) ? 1 : tfc[f];
          check(cyc.frame == 16'(f) && cyc.first == (c == 0) && cyc.last == (c == tfc_eff - 1),
                $sformatf("cycle %0d: got f=%0d first=%0b last=%0b, expected f=%0d c=%0d of %0d",
                          seen, cyc.frame, cyc.first, cyc.last, f, c, tfc_eff));
          seen++;
          c++;
          if (c == tfc_eff) begin c = 0; f++; end
          if (seen == abort_after) begin
            @(negedge clk); run_abort = 1; @(negedge clk); run_abort = 0; #1;
            check(!running && !cyc.active, "STOP ends the run at once");
            repeat (3 * PERIOD) @(posedge clk);
            check(n_done == d0, "no natural end after STOP");
            check(!cyc.active, "no cycles after STOP");
            return;
          end
        end
      end
      if (seen > exp_cycles + 2) break;
    end
    check(seen == exp_cycles, $sformatf("measurement of %0d cycles saw %0d", exp_cycles, seen));
    check(n_done == d0 + 1, "one natural end");
    @(posedge clk); #1;
    check(!running, "sequencer idle after the end");
    check(n_trig_out - to0 == ((tout == TRIG_FRAME) ? nf : (tout == TRIG_START) ? 1 : 0),
          $sformatf("trigger-out pulses: %0d", n_trig_out - to0));
    check((tin == TRIG_NONE) == (waits == 0), $sformatf("trigger-in waits: %0d", waits));
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int z;
    repeat (3) @(posedge clk);
    rst_n = 1;
    tfc = '{2, 1, 3, 4, 1, 1, 5, 2};
    run(4, TRIG_NONE, TRIG_NONE, -1);
    run(8, TRIG_NONE, TRIG_FRAME, -1);
    run(1, TRIG_NONE, TRIG_START, -1);
    run(3, TRIG_START, TRIG_START, -1);
    run(5, TRIG_FRAME, TRIG_FRAME, -1);
    tfc = '{1, 1, 1, 1, 1, 1, 1, 1};
    run(8, TRIG_NONE, TRIG_NONE, -1);
    z = n_zero;
    tfc = '{3, 0, 2, 0, 1, 1, 1, 1};
    run(4, TRIG_NONE, TRIG_NONE, -1);
    check(n_zero - z == 2, "two zero TFC entries reported");
    tfc = '{4, 4, 4, 4, 4, 4, 4, 4};
    run(8, TRIG_NONE, TRIG_NONE, 6);
    run(2, TRIG_NONE, TRIG_NONE, -1);     // runs again after a STOP
    check(cur_frame == 3'(1), "GET ACTUAL LOOP frame after run");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
