// saxs_tb_body.svh -- body shared by the end-to-end testbenches of saxs_top.
// The including module defines N_CHIPS, N_MUX, N_FRAMES, CYCLE_CLKS,
// WATCHDOG_CLKS, the frame counts of its runs (NF_A, NF_B, NF_C), and
// instantiates saxs_top as `dut` with .* connections.
//
// Environment: a 10 MHz clock; ADC c delivers, during JAMEX cycle g (counted
// here from the cycle_start output), the sample x(g, j) of pixel
// j = c * N_MUX + jamex_mux_addr, a fixed pseudo-random function; a
// behavioural image memory with one-clock read latency. The expected image is
// computed here from x(), the tables that were loaded and the trigger
// schedule, with the integration formula in 64-bit integers.
  localparam int N_PIX = N_CHIPS * N_MUX;
  localparam int PW  = $clog2(N_PIX);
  localparam int FW  = $clog2(N_FRAMES);
  localparam int MW  = $clog2(N_MUX);
  localparam int IAW = $clog2(N_PIX * N_FRAMES);

  logic clk = 0, rst_n = 0;
  logic cmd_valid = 0, cmd_ready, cmd_last = 0;
  cmd_e cmd_code = CMD_START;
  logic [23:0] cmd_addr = 0; logic [31:0] cmd_data = 0;
  logic rsp_valid, rsp_err; logic [31:0] rsp_data;
  logic [13:0] adc_data [N_CHIPS];
  logic jamex_cycle_start, jamex_mux_step; logic [MW-1:0] jamex_mux_addr;
  logic trig_in = 0, trig_out;
  logic img_we; logic [IAW-1:0] img_addr; logic [31:0] img_data;
  logic img_rd_en; logic [IAW-1:0] img_rd_addr; logic [31:0] img_rd_data = 0;
  logic [2:0] pga_gain [N_CHIPS];
  logic jcfg_valid, jcfg_last; logic [31:0] jcfg_data;
  logic auto_offset_start, testmode;
  logic vec_ready; logic [15:0] vec_frame;
  det_state_e state;
  err_e err_code;

  int checks = 0, failures = 0;
  always #50 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL %s", what); end
  endtask

  // ---------------- ADC model ----------------
  int g = 0;                                  // JAMEX cycle number
  always @(posedge clk) if (rst_n && jamex_cycle_start) g <= g + 1;
  function automatic int xval(input int gg, input int j);
    return ((gg * 7919) ^ (j * 104729) ^ ((gg * j) << 3)) & 16'h3FFF;
  endfunction
  always_comb
    for (int c = 0; c < N_CHIPS; c++) adc_data[c] = 14'(xval(g, c * N_MUX + int'(jamex_mux_addr)));

  // ---------------- image memory model ----------------
  logic [31:0] img_mem [N_PIX * N_FRAMES];
  int n_img_wr = 0;
  always @(posedge clk) begin
    if (rst_n && img_we) begin img_mem[img_addr] <= img_data; n_img_wr++; end
    if (img_rd_en) img_rd_data <= img_mem[img_rd_addr];
  end

  // ---------------- mechanism counters ----------------
  int n_init = 0, n_start = 0, n_end = 0, n_stop_ready = 0, n_stop_run = 0;
  int n_trig_frame = 0, n_trig_out = 0, n_vec_ready = 0, n_multi = 0;
  int n_get_image = 0, n_get_vector = 0, n_get_loop = 0, n_err_tfc = 0;
  det_state_e prev_state = ST_IDLE;
  bit stop_sent = 0;
  always @(posedge clk) if (rst_n) begin
    n_trig_out  += int'(trig_out);
    n_vec_ready += int'(vec_ready);
    if (prev_state == ST_IDLE && state == ST_READY) n_init++;
    if (prev_state == ST_READY && state == ST_RUN) n_start++;
    if (prev_state == ST_RUN && state == ST_IDLE && !stop_sent) n_end++;
    if (prev_state == ST_RUN && state == ST_IDLE && stop_sent) n_stop_run++;
    if (prev_state == ST_READY && state == ST_IDLE) n_stop_ready++;
    prev_state <= state;
  end

  // ---------------- command port ----------------
  logic [31:0] r_data; logic r_err;
  task automatic send(input cmd_e code, input int addr, input logic [31:0] data, input bit last);
    int w;
    @(negedge clk);
    while (!cmd_ready) @(negedge clk);
    cmd_valid = 1; cmd_code = code; cmd_addr = 24'(addr); cmd_data = data; cmd_last = last;
    @(negedge clk); cmd_valid = 0;
    w = 0;
    while (!rsp_valid && w < 10) begin @(negedge clk); w++; end
    r_data = rsp_data; r_err = rsp_err;
    check(rsp_valid, "command answered");
  endtask

  // ---------------- one measurement ----------------
  longint dark [N_PIX], norm [N_PIX];
  int tfc [N_FRAMES];
  int tstart [N_FRAMES];                      // cycle number of each frame's first cycle

  function automatic longint sat32(input longint v);
    if (v > 64'sd2147483647) return 64'sd2147483647;
    if (v < -64'sd2147483648) return -64'sd2147483648;
    return v;
  endfunction

  task automatic load_tables(input int nf, input int seed);
    for (int i = 0; i < nf; i++) send(CMD_SET_INTTIME, i, 32'(tfc[i]), i == nf - 1);
    for (int j = 0; j < N_PIX; j++) begin
      dark[j] = (j * 37 + seed * 101) % 2500;
      send(CMD_SET_COMP_OFFSET, j, 32'(dark[j]), j == N_PIX - 1);
    end
    for (int j = 0; j < N_PIX; j++) begin
      norm[j] = 12000 + (j * 53 + seed * 7) % 9000;
      send(CMD_SET_COMP_NORM, j, 32'(norm[j]), j == N_PIX - 1);
    end
  endtask

  // wait until the middle of JAMEX cycle number gg, then pulse trig_in
  task automatic trigger_in_cycle(input int gg);
    while (g < gg) @(negedge clk);
    repeat (CYCLE_CLKS / 2) @(negedge clk);
    trig_in = 1; @(negedge clk); trig_in = 0;
  endtask

  task automatic check_image(input int nf);
    int bad;
    bad = 0;
    for (int i = 0; i < nf; i++) begin
      int n; n = (tfc[i] == 0) ? 1 : tfc[i];
      if (n > 1) n_multi++;
      for (int j = 0; j < N_PIX; j++) begin
        longint acc;
        acc = 0;
        for (int k = 0; k < n; k++)
          acc = sat32(acc + (((longint'(xval(tstart[i] + k, j)) - dark[j]) * norm[j]) >>> 14));
        if (img_mem[i * N_PIX + j] != 32'(acc)) begin
          bad++;
          if (bad < 5) $display("FAIL Image[%0d,%0d] = %0d expected %0d", i, j,
                                $signed(img_mem[i * N_PIX + j]), acc);
        end
      end
    end
    check(bad == 0, $sformatf("image of %0d frames x %0d pixels (%0d wrong)", nf, N_PIX, bad));
  endtask

  // mode: 0 = trigger before frame 0 only, 1 = trigger before every frame
  task automatic measure(input int nf, input int mode, input int seed);
    int to0, vr0, w0;
    for (int a = 0; a < nf * N_PIX; a++) img_mem[a] = 32'hDEAD_BEEF;
    load_tables(nf, seed);
    send(CMD_SET_TRIG_IN, 0, (mode == 1) ? 32'(TRIG_FRAME) : 32'(TRIG_START), 1);
    send(CMD_SET_TRIG_OUT, 0, (mode == 1) ? 32'(TRIG_FRAME) : 32'(TRIG_START), 1);
    send(CMD_SET_REALTIME_TX, 0, 1, 1);
    send(CMD_SET_PGA_GAINS, N_CHIPS - 1, 32'(seed & 7), 1);
    check(state == ST_READY, "READY after INIT");
    check(pga_gain[N_CHIPS - 1] == 3'(seed & 7), "PGA gain delivered");
    to0 = n_trig_out; vr0 = n_vec_ready; w0 = n_img_wr;
    send(CMD_START, 0, 0, 1);
    check(!r_err, "START accepted");
    @(negedge clk);
    check(state == ST_RUN, "RUN after START");
    // trigger schedule and frame start cycles
    tstart[0] = g + 2;
    trigger_in_cycle(tstart[0] - 1);
    n_trig_frame++;
    for (int i = 1; i < nf; i++) begin
      int last_c;
      last_c = tstart[i - 1] + ((tfc[i - 1] == 0) ? 1 : tfc[i - 1]) - 1;
      if (mode == 1) begin
        tstart[i] = last_c + 1 + (i % 2);     // frames separated by 0 or 1 idle cycle
        trigger_in_cycle(tstart[i] - 1);
        n_trig_frame++;
      end else begin
        tstart[i] = last_c + 1;
      end
      if (i == nf / 2 && mode == 0) begin
        while (g <= tstart[i]) @(negedge clk);
        send(CMD_GET_ACTUAL_LOOP, 0, 0, 1);
        // the frame counter moves on as the last cycle of a frame starts
        check(state == ST_RUN && (r_data == 32'(i) || r_data == 32'(i + 1)),
              $sformatf("ACTUAL LOOP frame %0d near %0d", r_data, i));
        n_get_loop++;
      end
    end
    while (state == ST_RUN) @(negedge clk);
    repeat (N_CHIPS + 6) @(negedge clk);
    check(n_img_wr - w0 == nf * N_PIX, $sformatf("%0d image words written", n_img_wr - w0));
    check(n_trig_out - to0 == ((mode == 1) ? nf : 1), "trigger-out pulses");
    check(n_vec_ready - vr0 == nf, "one real-time vector notice per frame");
    check_image(nf);
    // read-back through the command port
    send(CMD_GET_IMAGE, (nf - 1) * N_PIX + 1, 0, 1);
    check(!r_err && r_data == img_mem[(nf - 1) * N_PIX + 1], "GET IMAGE");
    n_get_image++;
    for (int j = 0; j < N_PIX; j += (N_PIX / 4)) begin
      send(CMD_GET_VECTOR, j, 0, 1);
      check(!r_err && r_data == img_mem[(nf - 1) * N_PIX + j], $sformatf("GET VECTOR %0d", j));
      n_get_vector++;
    end
  endtask

  initial begin
    repeat (WATCHDOG_CLKS) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    // run A: trigger before frame 0 only, cycles per frame 1..3
    for (int i = 0; i < N_FRAMES; i++) tfc[i] = 1 + (i % 3);
    measure(NF_A, 0, 1);
    check(n_end == 1, "natural end of run A");
    // run B: trigger before every frame, one TFC of zero (run as one cycle)
    for (int i = 0; i < N_FRAMES; i++) tfc[i] = (i == 1) ? 0 : 2 - (i % 2);
    measure(NF_B, 1, 2);
    send(CMD_GET_ERR_MESS, 0, 0, 1);
    check(r_data == 32'(ERR_TFC_ZERO), $sformatf("error message %0d", r_data));
    if (r_data == 32'(ERR_TFC_ZERO)) n_err_tfc++;
    // run C: INIT, STOP in READY, INIT again, START, STOP in RUN
    for (int i = 0; i < N_FRAMES; i++) tfc[i] = 3;
    load_tables(NF_C, 3);
    send(CMD_SET_TRIG_IN, 0, 32'(TRIG_NONE), 1);
    check(state == ST_READY, "READY for run C");
    send(CMD_STOP, 0, 0, 1);
    @(negedge clk);
    check(!r_err && state == ST_IDLE, "STOP in READY -> IDLE");
    send(CMD_START, 0, 0, 1);
    check(r_err, "START refused after STOP");
    load_tables(NF_C, 3);
    send(CMD_START, 0, 0, 1);
    @(negedge clk);
    check(state == ST_RUN, "RUN for run C");
    repeat (2 * CYCLE_CLKS) @(negedge clk);
    stop_sent = 1;
    send(CMD_STOP, 0, 0, 1);
    @(negedge clk);
    check(!r_err && state == ST_IDLE, "STOP in RUN -> IDLE at once");
    repeat (4 * CYCLE_CLKS) @(negedge clk);
    check(state == ST_IDLE, "stays IDLE after STOP");
    // mechanisms that must each have happened
    check(n_init >= 3,       $sformatf("INIT -> READY seen %0d times", n_init));
    check(n_start == 3,      $sformatf("START seen %0d times", n_start));
    check(n_end == 2,        $sformatf("natural end seen %0d times", n_end));
    check(n_stop_ready == 1, $sformatf("STOP in READY seen %0d times", n_stop_ready));
    check(n_stop_run == 1,   $sformatf("STOP in RUN seen %0d times", n_stop_run));
    check(n_trig_frame > 0 && n_trig_out > 0, "trigger in and out");
    check(n_vec_ready > 0,   "real-time vector notices");
    check(n_multi > 0,       "frames of several JAMEX cycles");
    check(n_get_image > 0 && n_get_vector > 0 && n_get_loop > 0 && n_err_tfc > 0, "GET commands");
    $display("mechanisms: init=%0d start=%0d end=%0d stop_ready=%0d stop_run=%0d trig_in=%0d trig_out=%0d vec=%0d multi=%0d",
             n_init, n_start, n_end, n_stop_ready, n_stop_run, n_trig_frame, n_trig_out, n_vec_ready, n_multi);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
