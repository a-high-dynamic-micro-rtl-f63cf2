// tf_sequencer -- runs one measurement as a sequence of time frames.
//
// Time frame i lasts TFC(i) JAMEX cycles, TFC being a table of 32-bit counts
// written by SET INTTIME; a measurement has n_frames frames (1..N_FRAMES).
// The sequencer counts JAMEX cycles (cycle_start pulses from jamex_timing) and,
// at every cycle start, publishes in `cyc` which frame the coming cycle
// belongs to and whether it is the first and/or last cycle of that frame. The
// frame integrator latches this with the samples. After the last cycle of the
// last frame has ended it pulses meas_done, the natural end of the
// measurement. run_abort (STOP) ends the measurement at once.
//
// TFC(i) is read from the table through a one-clock-latency read port: TFC(0)
// is fetched at run_start, TFC(1) right after it, and TFC(i+2) as soon as
// frame i+1 begins, so the count of the next frame is always ready. A TFC(i) of zero
// is run as one cycle and reported on err_tfc_zero.
//
// External trigger (this design's encoding of SET TRIG IN / SET TRIG OUT):
//   trig_in_mode  NONE: no wait; START: wait for trig_in before frame 0;
//                 FRAME: wait for trig_in before every frame.
//   trig_out_mode NONE: never; START: pulse trig_out when frame 0 begins;
//                 FRAME: pulse trig_out when every frame begins.
// After a trigger, the frame begins at the next JAMEX cycle start.
// cur_frame / cur_cycle (GET ACTUAL LOOP) give the frame in progress and the
// number of its cycles already started.
module tf_sequencer
  import saxs_pkg::*;
#(
  parameter int unsigned N_FRAMES = N_FRAMES_DEF,
  localparam int unsigned FW      = $clog2(N_FRAMES)
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                run_start,
  input  logic                run_abort,
  input  logic [FW:0]         n_frames,
  input  trig_mode_e          trig_in_mode,
  input  trig_mode_e          trig_out_mode,
  input  logic                trig_in,
  input  logic                cycle_start,
  // TFC table read port
  output logic                tfc_rd_en,
  output logic [FW-1:0]       tfc_rd_addr,
  input  logic [TFC_BITS-1:0] tfc_rd_data,
  // per-cycle information and status
  output cyc_info_t           cyc,
  output logic                running,
  output logic                waiting_trig,
  output logic                meas_done,
  output logic                trig_out,
  output logic                err_tfc_zero,
  output logic [FW-1:0]       cur_frame,
  output logic [TFC_BITS-1:0] cur_cycle
);
  typedef enum logic [2:0] {S_IDLE, S_LOAD, S_TRIG, S_RUN, S_DRAIN} seq_state_e;
  seq_state_e st;

  logic [TFC_BITS-1:0] tfc_cur, tfc_next;
  logic                rd_pending, rd_first;
  logic [FW-1:0]       frame;
  logic [TFC_BITS-1:0] cnt;
  logic                last_cyc, last_frame;
  logic [TFC_BITS-1:0] rd_fixed;

  assign rd_fixed   = (tfc_rd_data == '0) ? TFC_BITS'(1) : tfc_rd_data;
  assign last_cyc   = (cnt == tfc_cur - 1'b1);
  assign last_frame = ({1'b0, frame} == n_frames - 1'b1);

  assign running      = (st != S_IDLE);
  assign waiting_trig = (st == S_TRIG);
  assign cur_frame    = frame;
  assign cur_cycle    = cnt;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st           <= S_IDLE;
      tfc_cur      <= '0;
      tfc_next     <= '0;
      rd_pending   <= 1'b0;
      rd_first     <= 1'b0;
      frame        <= '0;
      cnt          <= '0;
      cyc          <= '0;
      meas_done    <= 1'b0;
      trig_out     <= 1'b0;
      err_tfc_zero <= 1'b0;
      tfc_rd_en    <= 1'b0;
      tfc_rd_addr  <= '0;
    end else begin
      meas_done    <= 1'b0;
      trig_out     <= 1'b0;
      err_tfc_zero <= 1'b0;
      tfc_rd_en    <= 1'b0;

      // capture a TFC read issued on the previous clock
      rd_pending <= tfc_rd_en;
      if (rd_pending) begin
        err_tfc_zero <= (tfc_rd_data == '0);
        if (rd_first) tfc_cur  <= rd_fixed;
        else          tfc_next <= rd_fixed;
      end

      if (cycle_start) cyc.active <= 1'b0;

      if (run_abort) begin
        st         <= S_IDLE;
        cyc.active <= 1'b0;
      end else begin
        unique case (st)
          S_IDLE: if (run_start) begin
            frame       <= '0;
            cnt         <= '0;
            tfc_rd_en   <= 1'b1;
            tfc_rd_addr <= '0;
            rd_first    <= 1'b1;
            st          <= S_LOAD;
          end
          S_LOAD: if (rd_pending) begin
            st <= (trig_in_mode == TRIG_NONE) ? S_RUN : S_TRIG;
            if (n_frames > 1) begin           // prefetch TFC(1)
              tfc_rd_en   <= 1'b1;
              tfc_rd_addr <= FW'(1);
              rd_first    <= 1'b0;
            end
          end
          S_TRIG: if (trig_in) st <= S_RUN;
          S_RUN: if (cycle_start) begin
            cyc.active <= 1'b1;
            cyc.first  <= (cnt == '0);
            cyc.last   <= last_cyc;
            cyc.frame  <= 16'(frame);
            if (cnt == '0) begin
              trig_out <= (trig_out_mode == TRIG_FRAME) ||
                          (trig_out_mode == TRIG_START && frame == '0);
            end
            if (last_cyc) begin
              cnt <= '0;
              if (last_frame) st <= S_DRAIN;
              else begin
                frame   <= frame + 1'b1;
                tfc_cur <= tfc_next;
                if (({1'b0, frame} + 2) < n_frames) begin  // prefetch TFC(i+2)
                  tfc_rd_en   <= 1'b1;
                  tfc_rd_addr <= frame + FW'(2);
                end
                if (trig_in_mode == TRIG_FRAME) st <= S_TRIG;
              end
            end else begin
              cnt <= cnt + 1'b1;
            end
          end
          S_DRAIN: if (cycle_start) begin     // last cycle has ended
            meas_done <= 1'b1;
            st        <= S_IDLE;
          end
          default: st <= S_IDLE;
        endcase
      end
    end
  end
endmodule
