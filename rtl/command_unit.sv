// command_unit -- the user command interpreter of the detector.
//
// Commands arrive as beats on a valid/ready port: a code (cmd_e), an address
// and a 32-bit data word; a SET command that loads a table (TFCycles, Dark,
// Norm, PGA gains, JAMEX configuration) sends one beat per entry and flags
// its final beat with cmd_last. Every accepted beat gets exactly one answer
// on rsp_valid/rsp_data/rsp_err.
//
// The command set and its four categories follow the published detector:
// ACTIVITY (START, STOP), SET (the INIT phase) and GET (read-back); the debug
// WRITE commands are not given there and are not built. Choices of this
// design:
//   * SET commands are accepted in IDLE and READY and refused in RUN.
//   * The INIT phase is complete (init_done) once every SET command named in
//     REQUIRED_SET (a mask over the command codes; by default SET INTTIME,
//     SET COMP OFFSET and SET COMP NORM) has sent its last beat. The record is
//     cleared by START and STOP, so each measurement needs its own INIT.
//   * SET INTTIME beat i writes TFC(i); its last beat fixes the number of
//     time frames, n_frames = i + 1.
//   * START is accepted in READY, STOP in READY and RUN; GET in any state.
//   * The first error (refused command, bad address, or an event reported on
//     err_in) is kept until GET ERR MESS reads it, which clears it.
// Timing: SET/ACTIVITY/GET ACTUAL LOOP/GET ERR MESS answer on the clock after
// acceptance; GET IMAGE and GET VECTOR issue a registered read (data expected
// one clock after *_rd_en) and answer three clocks after acceptance, with
// cmd_ready low meanwhile. start/stop are one-clock pulses on the clock after
// acceptance.
module command_unit
  import saxs_pkg::*;
#(
  parameter int unsigned N_CHIPS   = N_CHIPS_DEF,
  parameter int unsigned N_MUX     = N_MUX_DEF,
  parameter int unsigned N_FRAMES  = N_FRAMES_DEF,
  parameter int unsigned NORM_BITS = NORM_BITS_DEF,
  parameter logic [15:0] REQUIRED_SET = 16'h0304,
  localparam int unsigned N_PIXELS = N_CHIPS * N_MUX,
  localparam int unsigned PW       = $clog2(N_PIXELS),
  localparam int unsigned FW       = $clog2(N_FRAMES),
  localparam int unsigned IAW      = $clog2(N_PIXELS * N_FRAMES),
  localparam int unsigned CW       = (N_CHIPS > 1) ? $clog2(N_CHIPS) : 1
) (
  input  logic                     clk,
  input  logic                     rst_n,
  // command and response
  input  logic                     cmd_valid,
  output logic                     cmd_ready,
  input  cmd_e                     cmd_code,
  input  logic [CMD_ADDR_BITS-1:0] cmd_addr,
  input  logic [WORD_BITS-1:0]     cmd_data,
  input  logic                     cmd_last,
  output logic                     rsp_valid,
  output logic [WORD_BITS-1:0]     rsp_data,
  output logic                     rsp_err,
  // state machine
  input  det_state_e               state,
  output logic                     init_done,
  output logic                     start,
  output logic                     stop,
  // configuration outputs
  output logic                     tfc_we,
  output logic [FW-1:0]            tfc_addr,
  output logic [TFC_BITS-1:0]      tfc_data,
  output logic [FW:0]              n_frames,
  output trig_mode_e               trig_in_mode,
  output trig_mode_e               trig_out_mode,
  output logic                     jcfg_valid,
  output logic [WORD_BITS-1:0]     jcfg_data,
  output logic                     jcfg_last,
  output logic [PGA_BITS-1:0]      pga_gain [N_CHIPS],
  output logic                     auto_offset_start,
  output logic                     dark_we,
  output logic [PW-1:0]            dark_addr,
  output logic [ADC_BITS-1:0]      dark_data,
  output logic                     norm_we,
  output logic [PW-1:0]            norm_addr,
  output logic [NORM_BITS-1:0]     norm_data,
  output logic                     rt_tx_en,
  output logic                     testmode,
  // read-back
  output logic                     img_rd_en,
  output logic [IAW-1:0]           img_rd_addr,
  input  logic [WORD_BITS-1:0]     img_rd_data,
  output logic                     vec_rd_en,
  output logic [PW-1:0]            vec_rd_addr,
  input  logic [WORD_BITS-1:0]     vec_rd_data,
  input  logic [FW-1:0]            loop_frame,
  input  logic [TFC_BITS-1:0]      loop_cycle,
  // errors
  input  err_e                     err_in,
  output err_e                     err_code
);
  logic        acc;
  logic        set_ok, is_set, bad_addr, allowed;
  logic [15:0] set_done;
  err_e        cmd_err;
  logic [1:0]  rd_wait;     // read in flight: 2 = addr out, 1 = data back
  logic        rd_img;

  assign cmd_ready = (rd_wait == 2'd0);
  assign acc       = cmd_valid && cmd_ready;
  assign init_done = ((set_done & REQUIRED_SET) == REQUIRED_SET);

  // classify the beat
  always_comb begin
    is_set   = (cmd_code >= CMD_SET_INTTIME) && (cmd_code <= CMD_SET_TESTMODE);
    set_ok   = (state == ST_IDLE) || (state == ST_READY);
    bad_addr = 1'b0;
    unique case (cmd_code)
      CMD_SET_INTTIME:                    bad_addr = cmd_addr >= CMD_ADDR_BITS'(N_FRAMES);
      CMD_SET_PGA_GAINS:                  bad_addr = cmd_addr >= CMD_ADDR_BITS'(N_CHIPS);
      CMD_SET_COMP_OFFSET,
      CMD_SET_COMP_NORM, CMD_GET_VECTOR:  bad_addr = cmd_addr >= CMD_ADDR_BITS'(N_PIXELS);
      CMD_GET_IMAGE:                      bad_addr = cmd_addr >= CMD_ADDR_BITS'(N_PIXELS * N_FRAMES);
      default:                            bad_addr = 1'b0;
    endcase
    unique case (cmd_code)
      CMD_START: allowed = (state == ST_READY);
      CMD_STOP:  allowed = (state == ST_READY) || (state == ST_RUN);
      default:   allowed = is_set ? set_ok : 1'b1;
    endcase
    if (cmd_code > CMD_GET_ERR_MESS) cmd_err = ERR_BAD_CODE;
    else if (!allowed)               cmd_err = ERR_NOT_ALLOWED;
    else if (bad_addr)               cmd_err = ERR_ADDR_RANGE;
    else                             cmd_err = ERR_NONE;
  end

  logic ok;
  assign ok = acc && (cmd_err == ERR_NONE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rsp_valid <= 1'b0; rsp_data <= '0; rsp_err <= 1'b0;
      start <= 1'b0; stop <= 1'b0;
      set_done <= '0;
      tfc_we <= 1'b0; tfc_addr <= '0; tfc_data <= '0;
      n_frames <= (FW+1)'(1);
      trig_in_mode <= TRIG_NONE; trig_out_mode <= TRIG_NONE;
      jcfg_valid <= 1'b0; jcfg_data <= '0; jcfg_last <= 1'b0;
      for (int c = 0; c < N_CHIPS; c++) pga_gain[c] <= '0;
      auto_offset_start <= 1'b0;
      dark_we <= 1'b0; dark_addr <= '0; dark_data <= '0;
      norm_we <= 1'b0; norm_addr <= '0; norm_data <= '0;
      rt_tx_en <= 1'b0; testmode <= 1'b0;
      img_rd_en <= 1'b0; img_rd_addr <= '0;
      vec_rd_en <= 1'b0; vec_rd_addr <= '0;
      rd_wait <= 2'd0; rd_img <= 1'b0;
      err_code <= ERR_NONE;
    end else begin
      // one-clock strobes
      rsp_valid <= 1'b0;
      start <= 1'b0; stop <= 1'b0;
      tfc_we <= 1'b0; dark_we <= 1'b0; norm_we <= 1'b0;
      jcfg_valid <= 1'b0; auto_offset_start <= 1'b0;
      img_rd_en <= 1'b0; vec_rd_en <= 1'b0;

      // error register: keep the first error until it is read
      if (err_code == ERR_NONE) begin
        if (acc && cmd_err != ERR_NONE) err_code <= cmd_err;
        else if (err_in != ERR_NONE)    err_code <= err_in;
      end

      // reads in flight
      if (rd_wait == 2'd2) rd_wait <= 2'd1;
      if (rd_wait == 2'd1) begin
        rd_wait   <= 2'd0;
        rsp_valid <= 1'b1;
        rsp_err   <= 1'b0;
        rsp_data  <= rd_img ? img_rd_data : vec_rd_data;
      end

      if (acc) begin
        rsp_data <= '0;
        rsp_err  <= (cmd_err != ERR_NONE);
        rsp_valid <= !(ok && (cmd_code == CMD_GET_IMAGE || cmd_code == CMD_GET_VECTOR));
      end

      if (ok) begin
        if (is_set && cmd_last) set_done[cmd_code[3:0]] <= 1'b1;
        unique case (cmd_code)
          CMD_START: begin start <= 1'b1; set_done <= '0; end
          CMD_STOP:  begin stop  <= 1'b1; set_done <= '0; end
          CMD_SET_INTTIME: begin
            tfc_we   <= 1'b1;
            tfc_addr <= FW'(cmd_addr);
            tfc_data <= cmd_data;
            if (cmd_last) n_frames <= (FW+1)'(cmd_addr) + 1'b1;
          end
          CMD_SET_TRIG_OUT:  trig_out_mode <= trig_mode_e'(cmd_data[1:0]);
          CMD_SET_TRIG_IN:   trig_in_mode  <= trig_mode_e'(cmd_data[1:0]);
          CMD_SET_JAMEX_CONFIG: begin
            jcfg_valid <= 1'b1; jcfg_data <= cmd_data; jcfg_last <= cmd_last;
          end
          CMD_SET_PGA_GAINS:   pga_gain[CW'(cmd_addr)] <= cmd_data[PGA_BITS-1:0];
          CMD_SET_AUTO_OFFSET: auto_offset_start <= 1'b1;
          CMD_SET_COMP_OFFSET: begin
            dark_we <= 1'b1; dark_addr <= PW'(cmd_addr); dark_data <= cmd_data[ADC_BITS-1:0];
          end
          CMD_SET_COMP_NORM: begin
            norm_we <= 1'b1; norm_addr <= PW'(cmd_addr); norm_data <= cmd_data[NORM_BITS-1:0];
          end
          CMD_SET_REALTIME_TX: rt_tx_en <= cmd_data[0];
          CMD_SET_TESTMODE:    testmode <= cmd_data[0];
          CMD_GET_IMAGE: begin
            img_rd_en <= 1'b1; img_rd_addr <= IAW'(cmd_addr);
            rd_img <= 1'b1; rd_wait <= 2'd2;
          end
          CMD_GET_VECTOR: begin
            vec_rd_en <= 1'b1; vec_rd_addr <= PW'(cmd_addr);
            rd_img <= 1'b0; rd_wait <= 2'd2;
          end
          CMD_GET_ACTUAL_LOOP: begin
            unique case (cmd_addr[1:0])
              2'd0:    rsp_data <= WORD_BITS'(loop_frame);
              2'd1:    rsp_data <= loop_cycle;
              default: rsp_data <= WORD_BITS'(state);
            endcase
          end
          CMD_GET_ERR_MESS: begin
            rsp_data <= WORD_BITS'(err_code);
            err_code <= (err_in != ERR_NONE) ? err_in : ERR_NONE;
          end
          default: ;
        endcase
      end
    end
  end
endmodule
