// saxs_top -- real-time acquisition and processing core of the SAXS
// micro-strip ionisation chamber.
//
// 1280 anode strips are read by 20 integrating ASICs (JAMEX), 64 strips each,
// multiplexed 64:1 onto 20 ADCs (14 bit, 10 MHz). This core
//   * interprets the user commands (command_unit) and keeps the detector in
//     one of the states IDLE / READY / RUN (detector_fsm);
//   * times the ASICs: 128 us JAMEX cycles, each split into 64 multiplexer
//     slots (jamex_timing);
//   * runs a measurement of n_frames time frames, frame i lasting TFC(i)
//     JAMEX cycles, with optional external trigger in/out (tf_sequencer and
//     the TFCycles table);
//   * integrates the dark-subtracted, gain-normalised samples of every pixel
//     over each time frame and writes the finished rows of the image to the
//     image memory (frame_integrator).
// The image memory (DSP memory bank, up to 2048 x 1280 32-bit words), the
// ADCs, the analog front end and the serial link to the board that drives
// the ASICs are outside: their signals are ports. The design clock is the
// ADC sample clock; adc_data[c] is the sample of ADC c on the present clock.
//
// Ports: cmd_*/rsp_* command port (see command_unit); jamex_* ASIC timing;
// trig_in/trig_out external triggers; img_* write port and img_rd_* read
// port (one clock latency) of the image memory; pga_gain, jcfg_*,
// auto_offset_start, testmode: settings for the analog board; vec_ready
// pulses with vec_frame when a time frame is complete and real-time
// transmission is enabled; state, err_code status.
module saxs_top
  import saxs_pkg::*;
#(
  parameter int unsigned N_CHIPS    = N_CHIPS_DEF,
  parameter int unsigned N_MUX      = N_MUX_DEF,
  parameter int unsigned N_FRAMES   = N_FRAMES_DEF,
  parameter int unsigned CYCLE_CLKS = CYCLE_CLKS_DEF,
  parameter int unsigned NORM_BITS  = NORM_BITS_DEF,
  parameter int unsigned NORM_FRAC  = NORM_FRAC_DEF,
  localparam int unsigned N_PIXELS  = N_CHIPS * N_MUX,
  localparam int unsigned PW        = $clog2(N_PIXELS),
  localparam int unsigned FW        = $clog2(N_FRAMES),
  localparam int unsigned MW        = $clog2(N_MUX),
  localparam int unsigned IAW       = $clog2(N_PIXELS * N_FRAMES)
) (
  input  logic                     clk,
  input  logic                     rst_n,
  // user commands
  input  logic                     cmd_valid,
  output logic                     cmd_ready,
  input  cmd_e                     cmd_code,
  input  logic [CMD_ADDR_BITS-1:0] cmd_addr,
  input  logic [WORD_BITS-1:0]     cmd_data,
  input  logic                     cmd_last,
  output logic                     rsp_valid,
  output logic [WORD_BITS-1:0]     rsp_data,
  output logic                     rsp_err,
  // ADC samples and ASIC timing
  input  logic [ADC_BITS-1:0]      adc_data [N_CHIPS],
  output logic                     jamex_cycle_start,
  output logic [MW-1:0]            jamex_mux_addr,
  output logic                     jamex_mux_step,
  // external triggers
  input  logic                     trig_in,
  output logic                     trig_out,
  // image memory
  output logic                     img_we,
  output logic [IAW-1:0]           img_addr,
  output logic [WORD_BITS-1:0]     img_data,
  output logic                     img_rd_en,
  output logic [IAW-1:0]           img_rd_addr,
  input  logic [WORD_BITS-1:0]     img_rd_data,
  // analog board settings
  output logic [PGA_BITS-1:0]      pga_gain [N_CHIPS],
  output logic                     jcfg_valid,
  output logic [WORD_BITS-1:0]     jcfg_data,
  output logic                     jcfg_last,
  output logic                     auto_offset_start,
  output logic                     testmode,
  // status
  output logic                     vec_ready,
  output logic [15:0]              vec_frame,
  output det_state_e               state,
  output err_e                     err_code
);
  // command unit <-> rest
  logic                 init_done, start, stop;
  logic                 tfc_we;
  logic [FW-1:0]        tfc_addr;
  logic [TFC_BITS-1:0]  tfc_data;
  logic [FW:0]          n_frames;
  trig_mode_e           trig_in_mode, trig_out_mode;
  logic                 dark_we, norm_we;
  logic [PW-1:0]        dark_addr, norm_addr;
  logic [ADC_BITS-1:0]  dark_data;
  logic [NORM_BITS-1:0] norm_data;
  logic                 rt_tx_en;
  logic                 vec_rd_en;
  logic [PW-1:0]        vec_rd_addr;
  logic [WORD_BITS-1:0] vec_rd_data;
  // sequencing
  logic                 run_start, run_abort, meas_done;
  logic                 cycle_start, mux_step, sample_strobe;
  logic [MW-1:0]        mux_addr;
  logic                 tfc_rd_en;
  logic [FW-1:0]        tfc_rd_addr;
  logic [TFC_BITS-1:0]  tfc_rd_data;
  cyc_info_t            cyc;
  logic                 running, waiting_trig, err_tfc_zero;
  logic [FW-1:0]        cur_frame;
  logic [TFC_BITS-1:0]  cur_cycle;
  // integrator status
  logic                 frame_done, err_sat, err_overrun, int_busy;
  logic [15:0]          done_frame;
  err_e                 err_in;

  command_unit #(
    .N_CHIPS(N_CHIPS), .N_MUX(N_MUX), .N_FRAMES(N_FRAMES), .NORM_BITS(NORM_BITS)
  ) u_cmd (
    .clk, .rst_n,
    .cmd_valid, .cmd_ready, .cmd_code, .cmd_addr, .cmd_data, .cmd_last,
    .rsp_valid, .rsp_data, .rsp_err,
    .state, .init_done, .start, .stop,
    .tfc_we, .tfc_addr, .tfc_data, .n_frames,
    .trig_in_mode, .trig_out_mode,
    .jcfg_valid, .jcfg_data, .jcfg_last,
    .pga_gain, .auto_offset_start,
    .dark_we, .dark_addr, .dark_data, .norm_we, .norm_addr, .norm_data,
    .rt_tx_en, .testmode,
    .img_rd_en, .img_rd_addr, .img_rd_data,
    .vec_rd_en, .vec_rd_addr, .vec_rd_data,
    .loop_frame(cur_frame), .loop_cycle(cur_cycle),
    .err_in, .err_code);

  detector_fsm u_fsm (
    .clk, .rst_n, .init_done, .start, .stop, .meas_done,
    .state, .run_start, .run_abort);

  // The ASICs are clocked continuously; measurements align to cycle starts.
  jamex_timing #(.CYCLE_CLKS(CYCLE_CLKS), .N_MUX(N_MUX)) u_jtime (
    .clk, .rst_n, .enable(1'b1),
    .cycle_start, .mux_addr, .mux_step, .sample_strobe);

  assign jamex_cycle_start = cycle_start;
  assign jamex_mux_addr    = mux_addr;
  assign jamex_mux_step    = mux_step;

  ram_1r1w #(.DEPTH(N_FRAMES), .WIDTH(TFC_BITS)) u_tfc (
    .clk, .we(tfc_we), .waddr(tfc_addr), .wdata(tfc_data),
    .rd_en(tfc_rd_en), .raddr(tfc_rd_addr), .rdata(tfc_rd_data));

  tf_sequencer #(.N_FRAMES(N_FRAMES)) u_seq (
    .clk, .rst_n, .run_start, .run_abort, .n_frames,
    .trig_in_mode, .trig_out_mode, .trig_in, .cycle_start,
    .tfc_rd_en, .tfc_rd_addr, .tfc_rd_data,
    .cyc, .running, .waiting_trig, .meas_done, .trig_out, .err_tfc_zero,
    .cur_frame, .cur_cycle);

  frame_integrator #(
    .N_CHIPS(N_CHIPS), .N_MUX(N_MUX), .N_FRAMES(N_FRAMES),
    .NORM_BITS(NORM_BITS), .NORM_FRAC(NORM_FRAC)
  ) u_int (
    .clk, .rst_n,
    .sample_strobe, .sample_ch(mux_addr), .adc_data, .cyc,
    .dark_we, .dark_addr, .dark_data, .norm_we, .norm_addr, .norm_data,
    .img_we, .img_addr, .img_data, .frame_done, .done_frame,
    .vec_rd_en, .vec_rd_addr, .vec_rd_data,
    .err_sat, .err_overrun, .busy(int_busy));

  always_comb begin
    if (err_overrun)       err_in = ERR_OVERRUN;
    else if (err_sat)      err_in = ERR_SATURATED;
    else if (err_tfc_zero) err_in = ERR_TFC_ZERO;
    else                   err_in = ERR_NONE;
  end

  assign vec_ready = frame_done && rt_tx_en;
  assign vec_frame = done_frame;

  // running, waiting_trig and int_busy are status signals kept for probing.
  logic unused_status;
  assign unused_status = running ^ waiting_trig ^ int_busy;
endmodule
