// ram_1r1w -- simple dual-port RAM: one synchronous write port and one
// synchronous read port (read data appears the clock after rd_en).
//
// Used for the per-frame cycle counts TFC(i) (2048 x 32 bit), the per-pixel
// dark and normalisation tables, the pixel accumulators and the last
// completed time-frame vector. A read of the address being written in the
// same clock returns the old contents. The contents are not reset; every
// entry is written before it is read in normal use. Storage organisation is
// this design's choice: the detector kept these tables in DSP memory.
module ram_1r1w #(
  parameter int unsigned DEPTH = 2048,
  parameter int unsigned WIDTH = 32,
  localparam int unsigned AW   = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic             clk,
  input  logic             we,
  input  logic [AW-1:0]    waddr,
  input  logic [WIDTH-1:0] wdata,
  input  logic             rd_en,
  input  logic [AW-1:0]    raddr,
  output logic [WIDTH-1:0] rdata
);
  logic [WIDTH-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
    if (rd_en) rdata <= mem[raddr];
  end
endmodule
