// tb_command_unit -- self-checking test of the user command interpreter at
// reduced size (4 ASICs x 4 strips, 8 frames). The detector state is driven
// by the test. Checked: which commands each state accepts, the INIT record
// and init_done, the table writes made by SET INTTIME / COMP OFFSET / COMP
// NORM / PGA GAINS, the forwarded settings, the START/STOP pulses, the
// answers and latencies of every GET command, address-range errors, unknown
// codes, and the first-error register read by GET ERR MESS.
module tb_command_unit;
  import saxs_pkg::*;
  localparam int N_CHIPS = 4, N_MUX = 4, N_FRAMES = 8;
  localparam int N_PIX = N_CHIPS * N_MUX, PW = 4, FW = 3, IAW = 7;
  logic clk = 0, rst_n = 0;
  logic cmd_valid = 0, cmd_ready, cmd_last = 0;
  cmd_e cmd_code = CMD_START;
  logic [23:0] cmd_addr = 0; logic [31:0] cmd_data = 0;
  logic rsp_valid, rsp_err; logic [31:0] rsp_data;
  det_state_e state = ST_IDLE;
  logic init_done, start, stop;
  logic tfc_we; logic [FW-1:0] tfc_addr; logic [31:0] tfc_data; logic [FW:0] n_frames;
  trig_mode_e trig_in_mode, trig_out_mode;
  logic jcfg_valid, jcfg_last; logic [31:0] jcfg_data;
  logic [2:0] pga_gain [N_CHIPS];
  logic auto_offset_start;
  logic dark_we, norm_we; logic [PW-1:0] dark_addr, norm_addr;
  logic [13:0] dark_data; logic [15:0] norm_data;
  logic rt_tx_en, testmode;
  logic img_rd_en; logic [IAW-1:0] img_rd_addr; logic [31:0] img_rd_data = 0;
  logic vec_rd_en; logic [PW-1:0] vec_rd_addr; logic [31:0] vec_rd_data = 0;
  logic [FW-1:0] loop_frame = 3'd5; logic [31:0] loop_cycle = 32'd1234;
  err_e err_in = ERR_NONE, err_code;
  int checks = 0, failures = 0;

  command_unit #(.N_CHIPS(N_CHIPS), .N_MUX(N_MUX), .N_FRAMES(N_FRAMES)) dut (.*);
  always #5 clk = ~clk;

  // behavioural image and vector memories (one clock read latency)
  always_ff @(posedge clk) begin
    if (img_rd_en) img_rd_data <= 32'hA000_0000 + 32'(img_rd_addr);
    if (vec_rd_en) vec_rd_data <= 32'hB000_0000 + 32'(vec_rd_addr);
  end
  // records of the writes
  logic [31:0] tfc_m [N_FRAMES]; logic [13:0] dark_m [N_PIX]; logic [15:0] norm_m [N_PIX];
  int n_start = 0, n_stop = 0, n_jcfg = 0, n_auto = 0;
  always @(posedge clk) if (rst_n) begin
    if (tfc_we)  tfc_m[tfc_addr]   = tfc_data;
    if (dark_we) dark_m[dark_addr] = dark_data;
    if (norm_we) norm_m[norm_addr] = norm_data;
    n_start += int'(start); n_stop += int'(stop);
    n_jcfg += int'(jcfg_valid); n_auto += int'(auto_offset_start);
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL %s", what); end
  endtask

  logic [31:0] r_data; logic r_err; int r_lat;
  task automatic send(input cmd_e code, input int addr, input logic [31:0] data, input bit last);
    @(negedge clk);
    while (!cmd_ready) @(negedge clk);
    cmd_valid = 1; cmd_code = code; cmd_addr = 24'(addr); cmd_data = data; cmd_last = last;
    @(negedge clk); cmd_valid = 0;
    r_lat = 1;
    while (!rsp_valid && r_lat < 10) begin @(negedge clk); r_lat++; end
    r_data = rsp_data; r_err = rsp_err;
    check(rsp_valid, $sformatf("answer to %s", code.name()));
    @(posedge clk); #1;   // let the write records see the strobes
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    // IDLE: START and STOP are refused
    send(CMD_START, 0, 0, 1);
    check(r_err && r_lat == 1, "START refused in IDLE");
    send(CMD_STOP, 0, 0, 1);
    check(r_err, "STOP refused in IDLE");
    check(n_start == 0 && n_stop == 0, "no start/stop pulse");
    send(CMD_GET_ERR_MESS, 0, 0, 1);
    check(!r_err && r_data == 32'(ERR_NOT_ALLOWED), "first error is NOT_ALLOWED");
    send(CMD_GET_ERR_MESS, 0, 0, 1);
    check(r_data == 32'(ERR_NONE), "error cleared by reading");
    // INIT phase
    for (int i = 0; i < 3; i++) begin
      send(CMD_SET_INTTIME, i, 32'(10 + i), i == 2);
      check(!r_err, "SET INTTIME accepted");
    end
    check(tfc_m[0] == 10 && tfc_m[1] == 11 && tfc_m[2] == 12, "TFC table written");
    check(n_frames == 4'd3, "n_frames from last INTTIME beat");
    check(!init_done, "INIT not complete after INTTIME alone");
    send(CMD_SET_INTTIME, 8, 0, 1);
    check(r_err, "INTTIME index out of range refused");
    for (int j = 0; j < N_PIX; j++) send(CMD_SET_COMP_OFFSET, j, 32'(100 + j), j == N_PIX - 1);
    check(!init_done, "INIT not complete without COMP NORM");
    for (int j = 0; j < N_PIX; j++) send(CMD_SET_COMP_NORM, j, 32'(16384 + j), j == N_PIX - 1);
    check(init_done, "INIT complete");
    check(dark_m[7] == 107 && norm_m[15] == 16384 + 15, "dark and norm tables written");
    send(CMD_SET_PGA_GAINS, 2, 32'd5, 1);
    check(!r_err && pga_gain[2] == 3'd5, "PGA gain of ADC 2");
    send(CMD_SET_PGA_GAINS, 4, 32'd1, 1);
    check(r_err, "PGA index out of range");
    send(CMD_SET_TRIG_IN, 0, 32'd2, 1);
    send(CMD_SET_TRIG_OUT, 0, 32'd1, 1);
    check(trig_in_mode == TRIG_FRAME && trig_out_mode == TRIG_START, "trigger modes");
    send(CMD_SET_REALTIME_TX, 0, 1, 1);
    send(CMD_SET_TESTMODE, 0, 1, 1);
    check(rt_tx_en && testmode, "real-time tx and test mode");
    send(CMD_SET_JAMEX_CONFIG, 0, 32'hCAFE, 0);
    send(CMD_SET_JAMEX_CONFIG, 1, 32'hBEEF, 1);
    check(n_jcfg == 2 && jcfg_data == 32'hBEEF && jcfg_last, "JAMEX config forwarded");
    send(CMD_SET_AUTO_OFFSET, 0, 0, 1);
    check(n_auto == 1, "auto offset strobe");
    // unknown code
    send(cmd_e'(5'd21), 0, 0, 1);
    check(r_err, "unknown code refused");
    // READY: START accepted, INIT record cleared
    state = ST_READY;
    send(CMD_START, 0, 0, 1);
    check(!r_err && n_start == 1 && !init_done, "START in READY");
    state = ST_RUN;
    send(CMD_SET_COMP_NORM, 0, 0, 1);
    check(r_err, "SET refused in RUN");
    send(CMD_GET_IMAGE, 37, 0, 1);
    check(!r_err && r_data == 32'hA000_0025 && r_lat == 3, $sformatf("GET IMAGE (lat %0d)", r_lat));
    send(CMD_GET_IMAGE, N_PIX * N_FRAMES, 0, 1);
    check(r_err, "GET IMAGE out of range");
    send(CMD_GET_VECTOR, 9, 0, 1);
    check(!r_err && r_data == 32'hB000_0009 && r_lat == 3, "GET VECTOR");
    send(CMD_GET_ACTUAL_LOOP, 0, 0, 1);
    check(r_data == 5, "ACTUAL LOOP frame");
    send(CMD_GET_ACTUAL_LOOP, 1, 0, 1);
    check(r_data == 1234, "ACTUAL LOOP cycle");
    send(CMD_GET_ACTUAL_LOOP, 2, 0, 1);
    check(r_data == 32'(ST_RUN), "ACTUAL LOOP state");
    send(CMD_GET_ERR_MESS, 0, 0, 1);
    check(r_data == 32'(ERR_ADDR_RANGE), "first error since last read");
    // hardware error event
    @(negedge clk); err_in = ERR_SATURATED; @(negedge clk); err_in = ERR_NONE;
    send(CMD_GET_ERR_MESS, 0, 0, 1);
    check(r_data == 32'(ERR_SATURATED), "reported error event");
    send(CMD_STOP, 0, 0, 1);
    check(!r_err && n_stop == 1, "STOP in RUN");
    state = ST_IDLE;
    check(!init_done, "new INIT needed after a measurement");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
