// saxs_pkg -- constants and types shared by the SAXS micro-strip detector
// acquisition core.
//
// The detector reads 1280 anode strips through 20 readout ASICs (JAMEX), each
// integrating 64 strips and multiplexing them 64:1 onto one output that is
// digitised by a 14-bit ADC running at 10 MHz. A measurement is an image of up
// to 2048 time frames by 1280 pixels of 32-bit words; each time frame lasts a
// programmable number (32-bit) of fixed 128 us JAMEX cycles. These numbers are
// the ones of the published detector. The design clock is taken to be the
// 10 MHz ADC sample clock, so one JAMEX cycle is 1280 clocks; that, the
// command encoding and the error codes below are choices of this design.
package saxs_pkg;

  // Detector geometry and word sizes
  localparam int unsigned N_CHIPS_DEF    = 20;    // readout ASICs / ADC channels in use
  localparam int unsigned N_MUX_DEF      = 64;    // strips per ASIC (64:1 multiplexer)
  localparam int unsigned N_FRAMES_DEF   = 2048;  // maximum number of time frames
  localparam int unsigned CYCLE_CLKS_DEF = 1280;  // 128 us JAMEX cycle at 10 MHz
  localparam int unsigned ADC_BITS       = 14;    // ADC resolution
  localparam int unsigned WORD_BITS      = 32;    // image word (DSP word)
  localparam int unsigned TFC_BITS       = 32;    // JAMEX cycles per time frame
  localparam int unsigned PGA_BITS       = 3;     // PGA gain code (-22 dB .. +20 dB, 6 dB steps)
  localparam int unsigned NORM_BITS_DEF  = 16;    // unsigned fixed-point gain normalisation
  localparam int unsigned NORM_FRAC_DEF  = 14;    // fraction bits of Norm (1.0 = 2**14)
  localparam int unsigned CMD_ADDR_BITS  = 24;    // command beat address (covers 2048*1280)

  // Detector state machine (IDLE / READY / RUN)
  typedef enum logic [1:0] {
    ST_IDLE  = 2'd0,
    ST_READY = 2'd1,
    ST_RUN   = 2'd2
  } det_state_e;

  // User commands. ACTIVITY: START, STOP. SET: the INIT phase. GET: read-back.
  typedef enum logic [4:0] {
    CMD_START           = 5'd0,
    CMD_STOP            = 5'd1,
    CMD_SET_INTTIME     = 5'd2,   // one beat per time frame: addr = i, data = TFC(i)
    CMD_SET_TRIG_OUT    = 5'd3,   // data[1:0] = trigger-out mode
    CMD_SET_TRIG_IN     = 5'd4,   // data[1:0] = trigger-in mode
    CMD_SET_JAMEX_CONFIG= 5'd5,   // configuration bitstream words, forwarded
    CMD_SET_PGA_GAINS   = 5'd6,   // addr = ADC channel, data[2:0] = gain code
    CMD_SET_AUTO_OFFSET = 5'd7,   // starts the offset calibration
    CMD_SET_COMP_OFFSET = 5'd8,   // addr = pixel, data[13:0] = Dark(j)
    CMD_SET_COMP_NORM   = 5'd9,   // addr = pixel, data[15:0] = Norm(j)
    CMD_SET_REALTIME_TX = 5'd10,  // data[0] = enable vector-ready notifications
    CMD_SET_TESTMODE    = 5'd11,  // data[0] = enable integrated test signal source
    CMD_GET_IMAGE       = 5'd12,  // addr = i*N_PIXELS + j
    CMD_GET_VECTOR      = 5'd13,  // addr = j, last completed time frame
    CMD_GET_ACTUAL_LOOP = 5'd14,  // addr 0: frame, 1: cycle in frame, 2: state
    CMD_GET_ERR_MESS    = 5'd15   // returns and clears the first error code
  } cmd_e;

  typedef enum logic [3:0] {
    ERR_NONE        = 4'd0,
    ERR_NOT_ALLOWED = 4'd1,   // command not allowed in the present state
    ERR_BAD_CODE    = 4'd2,   // unknown command code
    ERR_ADDR_RANGE  = 4'd3,   // table index out of range
    ERR_TFC_ZERO    = 4'd4,   // a time frame with TFC(i) = 0 (run as one cycle)
    ERR_SATURATED   = 4'd5,   // an image word saturated
    ERR_OVERRUN     = 4'd6    // samples arrived faster than they could be processed
  } err_e;

  // Trigger modes (SET TRIG IN / SET TRIG OUT)
  typedef enum logic [1:0] {
    TRIG_NONE  = 2'd0,
    TRIG_START = 2'd1,   // at the start of the measurement only
    TRIG_FRAME = 2'd2    // at the start of every time frame
  } trig_mode_e;

  // Per-JAMEX-cycle information from the time-frame sequencer
  typedef struct packed {
    logic        active;  // this JAMEX cycle belongs to the measurement
    logic        first;   // first cycle of its time frame
    logic        last;    // last cycle of its time frame
    logic [15:0] frame;   // time-frame index i
  } cyc_info_t;

endpackage
