// jamex_timing -- JAMEX control: the timing of the readout ASICs.
//
// A free-running counter divides the ADC sample clock into JAMEX cycles of
// CYCLE_CLKS clocks (128 us at 10 MHz = 1280 clocks). Each cycle is split into
// N_MUX equal slots, one per strip of the 64:1 multiplexer; mux_addr names the
// strip on the ASIC outputs during its slot. Outputs, all registered-state
// decodes of the counter:
//   cycle_start  one clock at the start of every JAMEX cycle (counter = 0)
//   mux_addr     multiplexer address of the present slot
//   mux_step     one clock at the start of every slot, to advance the ASIC mux
//   sample_strobe one clock on the last clock of a slot: the ADC sample on
//                this clock is the one kept for strip mux_addr
// The cycle length and the 64:1 multiplexing are the detector's; the even
// division into slots and taking the last sample of a slot (settled output)
// are this design's choices, since the ASIC clock waveforms are not published.
// enable = 0 holds the counter at 0.
module jamex_timing
  import saxs_pkg::*;
#(
  parameter int unsigned CYCLE_CLKS = CYCLE_CLKS_DEF,
  parameter int unsigned N_MUX      = N_MUX_DEF,
  localparam int unsigned SLOT_CLKS = CYCLE_CLKS / N_MUX,
  localparam int unsigned SW        = (SLOT_CLKS > 1) ? $clog2(SLOT_CLKS) : 1,
  localparam int unsigned MW        = $clog2(N_MUX)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          enable,
  output logic          cycle_start,
  output logic [MW-1:0] mux_addr,
  output logic          mux_step,
  output logic          sample_strobe
);
  logic [SW-1:0] slot_cnt;
  logic [MW-1:0] slot;

  // A cycle must hold a whole number of slots of at least two clocks
  initial begin
    assert (SLOT_CLKS * N_MUX == CYCLE_CLKS && SLOT_CLKS >= 2)
      else $error("jamex_timing: CYCLE_CLKS must be N_MUX times a slot of >= 2 clocks");
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      slot_cnt <= '0;
      slot     <= '0;
    end else if (!enable) begin
      slot_cnt <= '0;
      slot     <= '0;
    end else if (slot_cnt == SW'(SLOT_CLKS - 1)) begin
      slot_cnt <= '0;
      slot     <= (slot == MW'(N_MUX - 1)) ? '0 : slot + 1'b1;
    end else begin
      slot_cnt <= slot_cnt + 1'b1;
    end
  end

  assign mux_addr      = slot;
  assign mux_step      = enable && (slot_cnt == '0);
  assign cycle_start   = mux_step && (slot == '0);
  assign sample_strobe = enable && (slot_cnt == SW'(SLOT_CLKS - 1));
endmodule
