// detector_fsm -- the three-state machine by which the user sees the SAXS
// detector: IDLE, READY and RUN.
//
//   IDLE  -> READY  when a valid INIT sequence has been completed (init_done)
//   READY -> RUN    on START
//   READY -> IDLE   on STOP
//   RUN   -> IDLE   on STOP (an immediate break) or at the natural end of the
//                   measurement (meas_done)
//
// States and transitions follow the detector's published behavioural model.
// The encoding, the reset to IDLE (the power-up state) and the two one-clock
// pulses run_start (entering RUN) and run_abort (STOP out of RUN) that start
// and break the acquisition hardware are this design's. Inputs are sampled on
// the rising clock edge; state, run_start and run_abort are registered.
module detector_fsm
  import saxs_pkg::*;
(
  input  logic       clk,
  input  logic       rst_n,
  input  logic       init_done,   // level: INIT phase complete
  input  logic       start,       // pulse: START accepted
  input  logic       stop,        // pulse: STOP accepted
  input  logic       meas_done,   // pulse: last time frame finished
  output det_state_e state,
  output logic       run_start,
  output logic       run_abort
);
  det_state_e state_n;

  always_comb begin
    state_n = state;
    unique case (state)
      ST_IDLE:  if (init_done) state_n = ST_READY;
      ST_READY: if (stop) state_n = ST_IDLE;
                else if (start) state_n = ST_RUN;
      ST_RUN:   if (stop || meas_done) state_n = ST_IDLE;
      default:  state_n = ST_IDLE;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state     <= ST_IDLE;
      run_start <= 1'b0;
      run_abort <= 1'b0;
    end else begin
      state     <= state_n;
      run_start <= (state == ST_READY) && (state_n == ST_RUN);
      run_abort <= (state == ST_RUN) && stop;
    end
  end
endmodule
