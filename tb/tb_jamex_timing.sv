// tb_jamex_timing -- self-checking test of the JAMEX cycle timing at the
// full size (1280-clock cycle = 128 us at 10 MHz, 64 slots of 20 clocks).
// Checks the cycle period, the slot length, that the mux address counts
// 0..63 once per cycle, where the sample strobe falls, and that disabling
// holds the counter.
`timescale 1ns / 1ps
module tb_jamex_timing;
  localparam int CYCLE_CLKS = 1280, N_MUX = 64, SLOT = CYCLE_CLKS / N_MUX;
  logic clk = 0, rst_n = 0, enable = 0;
  logic cycle_start, mux_step, sample_strobe;
  logic [5:0] mux_addr;
  int checks = 0, failures = 0;

  jamex_timing #(.CYCLE_CLKS(CYCLE_CLKS), .N_MUX(N_MUX)) dut (.*);
  always #50 clk = ~clk;   // 10 MHz

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL %s", what); end
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int t, last_start, n_start, n_step, n_strobe;
    realtime t_start;
    last_start = -1; n_start = 0; n_step = 0; n_strobe = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    check(!cycle_start && !mux_step && !sample_strobe, "idle while disabled");
    enable = 1; #1;
    for (t = 0; t < 3 * CYCLE_CLKS; t++) begin
      // expected position in the cycle
      check(mux_addr == 6'((t % CYCLE_CLKS) / SLOT), $sformatf("mux_addr at t=%0d", t));
      check(mux_step == ((t % SLOT) == 0), $sformatf("mux_step at t=%0d", t));
      check(cycle_start == ((t % CYCLE_CLKS) == 0), $sformatf("cycle_start at t=%0d", t));
      check(sample_strobe == ((t % SLOT) == SLOT - 1), $sformatf("strobe at t=%0d", t));
      if (cycle_start) begin
        if (last_start >= 0) check(t - last_start == CYCLE_CLKS, "cycle period");
        if (n_start == 2) check($realtime - t_start == 128000.0, $sformatf("cycle lasts 128 us (%0t)", $realtime - t_start));
        if (n_start == 1) t_start = $realtime;
        last_start = t; n_start++;
      end
      n_step += int'(mux_step);
      n_strobe += int'(sample_strobe);
      @(negedge clk);
    end
    check(n_start == 3, "three cycles");
    check(n_step == 3 * N_MUX && n_strobe == 3 * N_MUX, "64 slots per cycle");
    // disable mid-cycle: counter returns to 0 and holds
    repeat (37) @(negedge clk);
    enable = 0;
    repeat (5) begin
      @(negedge clk);
      check(mux_addr == 0 && !cycle_start && !sample_strobe, "held while disabled");
    end
    enable = 1; #1;
    check(cycle_start, "restart at slot 0");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
