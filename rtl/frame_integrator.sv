// frame_integrator -- builds the image, one time frame (row) at a time:
//
//   Image[i,j] = sum over the TFC(i) JAMEX cycles k of frame i of
//                (JAMEXOUT(k,j) - Dark(j)) * Norm(j)
//
// for the N_PIXELS = N_CHIPS * N_MUX pixels. The equation is the detector's
// (its DSP did this in software); the hardware datapath is this design's.
//
// Input: on sample_strobe the N_CHIPS ADC words adc_data[] hold strip
// sample_ch of every readout ASIC; pixel j = chip * N_MUX + sample_ch. The
// words are latched together with the cycle information `cyc` and then
// processed one pixel per clock over the next N_CHIPS clocks, so strobes must
// be at least N_CHIPS clocks apart (err_overrun flags a violation, and the
// early strobe is dropped). With 20 ASICs and 20-clock multiplexer slots the
// datapath is busy on every clock of a measurement.
//
// Pipeline (one pixel per clock):
//   P0  read Dark(j), Norm(j) and the accumulator of pixel j (RAMs, 1 clock)
//   P1  term = ((x - Dark) * Norm) >>> NORM_FRAC ; acc = first ? term :
//       sat(acc + term); write acc back; on the frame's last cycle also
//       write acc to the image (img_we, address i*N_PIXELS + j) and to the
//       vector RAM, readable through vec_rd_* (GET VECTOR).
//   P2  registered image write port.
// The image word of pixel j leaves N_CHIPS + 3 clocks (at most) after the
// strobe that carried it. The first cycle of a frame loads the accumulator
// instead of adding, so no clearing pass is needed. Number formats are this
// design's: x and Dark are unsigned ADC counts, Norm is unsigned with
// NORM_FRAC fraction bits, and the 32-bit signed sum saturates (err_sat).
// frame_done pulses with the image write of the last pixel of a row.
module frame_integrator
  import saxs_pkg::*;
#(
  parameter int unsigned N_CHIPS   = N_CHIPS_DEF,
  parameter int unsigned N_MUX     = N_MUX_DEF,
  parameter int unsigned N_FRAMES  = N_FRAMES_DEF,
  parameter int unsigned NORM_BITS = NORM_BITS_DEF,
  parameter int unsigned NORM_FRAC = NORM_FRAC_DEF,
  localparam int unsigned N_PIXELS = N_CHIPS * N_MUX,
  localparam int unsigned PW       = $clog2(N_PIXELS),
  localparam int unsigned MW       = $clog2(N_MUX),
  localparam int unsigned KW       = (N_CHIPS > 1) ? $clog2(N_CHIPS) : 1,
  localparam int unsigned IAW      = $clog2(N_PIXELS * N_FRAMES)
) (
  input  logic                 clk,
  input  logic                 rst_n,
  // samples
  input  logic                 sample_strobe,
  input  logic [MW-1:0]        sample_ch,
  input  logic [ADC_BITS-1:0]  adc_data [N_CHIPS],
  input  cyc_info_t            cyc,
  // correction tables (SET COMP OFFSET / SET COMP NORM)
  input  logic                 dark_we,
  input  logic [PW-1:0]        dark_addr,
  input  logic [ADC_BITS-1:0]  dark_data,
  input  logic                 norm_we,
  input  logic [PW-1:0]        norm_addr,
  input  logic [NORM_BITS-1:0] norm_data,
  // image write port (towards the image memory)
  output logic                 img_we,
  output logic [IAW-1:0]       img_addr,
  output logic [WORD_BITS-1:0] img_data,
  output logic                 frame_done,
  output logic [15:0]          done_frame,
  // last completed vector (GET VECTOR)
  input  logic                 vec_rd_en,
  input  logic [PW-1:0]        vec_rd_addr,
  output logic [WORD_BITS-1:0] vec_rd_data,
  // status
  output logic                 err_sat,
  output logic                 err_overrun,
  output logic                 busy
);
  // ---------------- input latch and pixel sequencing ----------------
  logic [ADC_BITS-1:0] buf_q [N_CHIPS];
  logic [MW-1:0]       ch_q;
  cyc_info_t           cyc_q;
  logic [KW-1:0]       k;
  logic                k_last;
  assign k_last = (k == KW'(N_CHIPS - 1));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy        <= 1'b0;
      k           <= '0;
      ch_q        <= '0;
      cyc_q       <= '0;
      err_overrun <= 1'b0;
      for (int c = 0; c < N_CHIPS; c++) buf_q[c] <= '0;
    end else begin
      err_overrun <= 1'b0;
      if (sample_strobe && cyc.active && busy && !k_last) begin
        err_overrun <= 1'b1;
      end else if (sample_strobe && cyc.active) begin
        for (int c = 0; c < N_CHIPS; c++) buf_q[c] <= adc_data[c];
        ch_q  <= sample_ch;
        cyc_q <= cyc;
        k     <= '0;
        busy  <= 1'b1;
      end else if (busy) begin
        if (k_last) busy <= 1'b0;
        else k <= k + 1'b1;
      end
    end
  end

  // ---------------- P0: table and accumulator reads ----------------
  logic [PW-1:0]       pix0;
  assign pix0 = PW'(k) * PW'(N_MUX) + PW'(ch_q);

  logic                v1, first1, last1;
  logic [PW-1:0]       pix1;
  logic [ADC_BITS-1:0] x1;
  logic [15:0]         frame1;
  logic [ADC_BITS-1:0] dark1;
  logic [NORM_BITS-1:0] norm1;
  logic [WORD_BITS-1:0] acc1;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v1 <= 1'b0; first1 <= 1'b0; last1 <= 1'b0;
      pix1 <= '0; x1 <= '0; frame1 <= '0;
    end else begin
      v1     <= busy && cyc_q.active;
      first1 <= cyc_q.first;
      last1  <= cyc_q.last;
      pix1   <= pix0;
      x1     <= buf_q[k];
      frame1 <= cyc_q.frame;
    end
  end

  ram_1r1w #(.DEPTH(N_PIXELS), .WIDTH(ADC_BITS)) u_dark (
    .clk, .we(dark_we), .waddr(dark_addr), .wdata(dark_data),
    .rd_en(busy), .raddr(pix0), .rdata(dark1));
  ram_1r1w #(.DEPTH(N_PIXELS), .WIDTH(NORM_BITS)) u_norm (
    .clk, .we(norm_we), .waddr(norm_addr), .wdata(norm_data),
    .rd_en(busy), .raddr(pix0), .rdata(norm1));

  // ---------------- P1: correct, normalise, accumulate ----------------
  localparam int unsigned PRODW = ADC_BITS + 1 + NORM_BITS + 1;
  logic signed [ADC_BITS:0]    diff;
  logic signed [PRODW-1:0]     prod, term;
  logic signed [WORD_BITS+1:0] sum_wide;
  logic signed [WORD_BITS-1:0] acc_new;
  logic                        sat;

  localparam logic signed [WORD_BITS+1:0] MAXV = (WORD_BITS+2)'(2**(WORD_BITS-1) - 1);
  localparam logic signed [WORD_BITS+1:0] MINV = -(WORD_BITS+2)'(2**(WORD_BITS-1));

  always_comb begin
    diff     = $signed({1'b0, x1}) - $signed({1'b0, dark1});
    prod     = PRODW'(diff) * $signed({1'b0, norm1});
    term     = prod >>> NORM_FRAC;
    sum_wide = first1 ? (WORD_BITS+2)'(term)
                      : (WORD_BITS+2)'($signed(acc1)) + (WORD_BITS+2)'(term);
    sat      = 1'b0;
    if (sum_wide > MAXV) begin
      acc_new = WORD_BITS'(MAXV);
      sat     = 1'b1;
    end else if (sum_wide < MINV) begin
      acc_new = WORD_BITS'(MINV);
      sat     = 1'b1;
    end else begin
      acc_new = WORD_BITS'(sum_wide);
    end
  end

  ram_1r1w #(.DEPTH(N_PIXELS), .WIDTH(WORD_BITS)) u_acc (
    .clk, .we(v1), .waddr(pix1), .wdata(acc_new),
    .rd_en(busy), .raddr(pix0), .rdata(acc1));

  ram_1r1w #(.DEPTH(N_PIXELS), .WIDTH(WORD_BITS)) u_vec (
    .clk, .we(v1 && last1), .waddr(pix1), .wdata(acc_new),
    .rd_en(vec_rd_en), .raddr(vec_rd_addr), .rdata(vec_rd_data));

  // ---------------- P2: image write port ----------------
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      img_we     <= 1'b0;
      img_addr   <= '0;
      img_data   <= '0;
      err_sat    <= 1'b0;
      frame_done <= 1'b0;
      done_frame <= '0;
    end else begin
      img_we     <= v1 && last1;
      img_addr   <= IAW'(frame1) * IAW'(N_PIXELS) + IAW'(pix1);
      img_data   <= acc_new;
      err_sat    <= v1 && sat;
      frame_done <= v1 && last1 && (pix1 == PW'(N_PIXELS - 1));
      done_frame <= frame1;
    end
  end
endmodule
