// ssb_demod: single-sideband demodulator with frequency-tracking CIC filters.
//
// Shifts the baseband I/Q signal of one harmonic by +/- m*f_s so that each
// synchrotron sideband in turn lands at DC, and isolates it with a two-stage
// tracking CIC. A CORDIC produces cos/sin of theta = m*phi_s + offset, where
// the offset comes from the phase offset LUT (addressed by m*f_s, per
// sideband). The four products I*cos, I*sin, Q*sin, Q*cos are combined with
// the signs of the paper's Fig. 7:
//   I_USB = I cos - Q sin     Q_USB = I sin + Q cos    ( (I+jQ) e^{+j theta} )
//   I_LSB = I cos + Q sin     Q_LSB = Q cos - I sin    ( (I+jQ) e^{-j theta} )
// Each of the four is low-pass filtered by a tracking_cic clocked by the x32
// tick derived from the (unmultiplied) synchrotron phase, which places its
// notches on every multiple of f_s. The sideband select picks the USB or LSB
// pair as the signal for the feedback.
//
// Interface: bb_i is the held baseband sample; phase/frequency every clock.
// fb_o (selected sideband), usb_o and lsb_o update and valid_o pulses on every
// x32 tick, CORDIC_LAT + 7 clocks after the phase crossing that caused it.
// The mixer and sign structure, the CIC, the x32 clock and the LUT are the
// paper's (Fig. 7); the pipeline registers and word widths are this design's.
module ssb_demod
  import lmbf_pkg::*;
#(
  parameter int unsigned LUT_ADDR_W     = 8,
  parameter int unsigned LUT_ADDR_SHIFT = 7
) (
  input  logic                  clk,
  input  logic                  rst,
  input  iq_t                   bb_i,
  input  phase_t                phase_syn_i,
  input  phase_t                freq_syn_i,
  input  logic [2:0]            m_i,
  input  sideband_e             sideband_i,
  input  logic                  lut_we_i,
  input  sideband_e             lut_wsb_i,
  input  logic [LUT_ADDR_W-1:0] lut_waddr_i,
  input  logic [15:0]           lut_wdata_i,
  output iq_t                   fb_o,
  output iq_t                   usb_o,
  output iq_t                   lsb_o,
  output logic                  valid_o
);
  // phase pipeline: the LUT takes two clocks, so the multiplied phase is
  // delayed by two clocks to meet its offset
  localparam int unsigned LO_DLY   = 2 + 1 + CORDIC_LAT;
  localparam int unsigned TICK_DLY = LO_DLY + 2;

  logic [15:0] offset;
  iq_t bb_dly [LO_DLY];
  phase_t mphase [2];
  phase_t lo_phase;
  sample_t lo_cos, lo_sin;
  logic signed [31:0] p_ic, p_is, p_qs, p_qc;
  iq_t usb_mix, lsb_mix;
  logic tick;
  logic [TICK_DLY-1:0] tick_dly;
  logic [3:0] cic_valid;

  phase_offset_lut #(.ADDR_W(LUT_ADDR_W), .ADDR_SHIFT(LUT_ADDR_SHIFT)) u_lut (
    .clk, .freq_syn_i, .m_i, .sideband_i,
    .we_i(lut_we_i), .wsb_i(lut_wsb_i), .waddr_i(lut_waddr_i), .wdata_i(lut_wdata_i),
    .offset_o(offset));

  always_ff @(posedge clk) begin
    mphase[0] <= phase_syn_i * 32'(m_i);
    mphase[1] <= mphase[0];
    lo_phase  <= mphase[1] + {offset, 16'h0000};
  end

  cordic u_lo (.clk, .phase_i(lo_phase), .cos_o(lo_cos), .sin_o(lo_sin));

  // align the baseband sample with the oscillator built from the same phase
  always_ff @(posedge clk) begin
    bb_dly[0] <= bb_i;
    for (int k = 1; k < LO_DLY; k++) bb_dly[k] <= bb_dly[k-1];
  end

  always_ff @(posedge clk) begin
    p_ic <= qmul(bb_dly[LO_DLY-1].i, lo_cos);
    p_is <= qmul(bb_dly[LO_DLY-1].i, lo_sin);
    p_qs <= qmul(bb_dly[LO_DLY-1].q, lo_sin);
    p_qc <= qmul(bb_dly[LO_DLY-1].q, lo_cos);
  end

  // sums and differences, signs as printed in Fig. 7
  always_ff @(posedge clk) begin
    usb_mix.i <= sat16(48'(p_ic - p_qs));
    usb_mix.q <= sat16(48'(p_is + p_qc));
    lsb_mix.i <= sat16(48'(p_ic + p_qs));
    lsb_mix.q <= sat16(48'(p_qc - p_is));
  end

  x32_clock u_x32 (.clk, .rst, .phase_syn_i, .tick_o(tick));

  always_ff @(posedge clk) begin
    if (rst) tick_dly <= '0;
    else     tick_dly <= {tick_dly[TICK_DLY-2:0], tick};
  end

  tracking_cic u_cic_iusb (.clk, .rst, .tick_i(tick_dly[TICK_DLY-1]), .x_i(usb_mix.i), .y_o(usb_o.i), .valid_o(cic_valid[0]));
  tracking_cic u_cic_qusb (.clk, .rst, .tick_i(tick_dly[TICK_DLY-1]), .x_i(usb_mix.q), .y_o(usb_o.q), .valid_o(cic_valid[1]));
  tracking_cic u_cic_ilsb (.clk, .rst, .tick_i(tick_dly[TICK_DLY-1]), .x_i(lsb_mix.i), .y_o(lsb_o.i), .valid_o(cic_valid[2]));
  tracking_cic u_cic_qlsb (.clk, .rst, .tick_i(tick_dly[TICK_DLY-1]), .x_i(lsb_mix.q), .y_o(lsb_o.q), .valid_o(cic_valid[3]));

  assign fb_o    = (sideband_i == SB_USB) ? usb_o : lsb_o;
  assign valid_o = cic_valid[0];

  // the four filters share one tick and must stay in step
  a_cic_lockstep: assert property (@(posedge clk) disable iff (rst) cic_valid == '0 || cic_valid == '1);
endmodule
