// sfb_block: single-sideband feedback block for one revolution harmonic.
//
// The complete per-harmonic chain of the feedback processor:
//   baseband_demod  ADC samples -> baseband I/Q of harmonic h
//   ssb_demod       selected synchrotron sideband (m*f_s, USB or LSB) -> DC
//   pi_control x2   I and Q: PI control of (reference - detected sideband)
//   ssb_mod         feedback I/Q -> same sideband of the baseband
//   baseband_mod    baseband I/Q -> RF sample at h*f_rev +/- m*f_s
// The reference_pattern supplies the I/Q set point over the cycle. The
// feedback runs at the x32 tick rate (32 updates per synchrotron period);
// the modulators run every clock on the held feedback output.
//
// Interface: cfg_i selects harmonic, m, sideband, loop mode and gains;
// write ports load the phase offset LUT and the reference table; sync_i
// restarts the reference pattern. rf_o is one 16-bit RF sample per clock;
// det_o/det_valid_o show the detected sideband at each feedback update.
// The chain follows the paper's Fig. 6 and Fig. 7.
module sfb_block
  import lmbf_pkg::*;
#(
  parameter int unsigned LUT_ADDR_W     = 8,
  parameter int unsigned LUT_ADDR_SHIFT = 7,
  parameter int unsigned REF_DEPTH_LOG2 = 10,
  parameter int unsigned BB_TURN_LOG2   = 16
) (
  input  logic                      clk,
  input  logic                      rst,
  input  logic                      sync_i,
  input  sample_t                   adc_i,
  input  phase_t                    phase_rev_i,
  input  phase_t                    freq_rev_i,
  input  phase_t                    phase_syn_i,
  input  phase_t                    freq_syn_i,
  input  chan_cfg_t                 cfg_i,
  input  logic                      lut_we_i,
  input  sideband_e                 lut_wsb_i,
  input  logic [LUT_ADDR_W-1:0]     lut_waddr_i,
  input  logic [15:0]               lut_wdata_i,
  input  logic [31:0]               ref_step_i,
  input  logic                      ref_we_i,
  input  logic [REF_DEPTH_LOG2-1:0] ref_waddr_i,
  input  iq_t                       ref_wdata_i,
  output sample_t                   rf_o,
  output iq_t                       det_o,
  output logic                      det_valid_o,
  output iq_t                       fb_out_o
);
  iq_t  bb, usb, lsb, ref_iq, fb_out, bb_mod;
  logic bb_valid, fb_valid_i, fb_valid_q;
  logic [REF_DEPTH_LOG2-1:0] ref_index;

  baseband_demod #(.MAX_TURN_LOG2(BB_TURN_LOG2)) u_bbdemod (
    .clk, .rst, .adc_i, .phase_rev_i, .freq_rev_i, .harmonic_i(cfg_i.harmonic),
    .bb_o(bb), .valid_o(bb_valid));

  ssb_demod #(.LUT_ADDR_W(LUT_ADDR_W), .LUT_ADDR_SHIFT(LUT_ADDR_SHIFT)) u_ssbdemod (
    .clk, .rst, .bb_i(bb), .phase_syn_i, .freq_syn_i, .m_i(cfg_i.m),
    .sideband_i(cfg_i.sideband),
    .lut_we_i, .lut_wsb_i, .lut_waddr_i, .lut_wdata_i,
    .fb_o(det_o), .usb_o(usb), .lsb_o(lsb), .valid_o(det_valid_o));

  reference_pattern #(.DEPTH_LOG2(REF_DEPTH_LOG2)) u_ref (
    .clk, .rst, .start_i(sync_i), .step_i(ref_step_i),
    .we_i(ref_we_i), .waddr_i(ref_waddr_i), .wdata_i(ref_wdata_i),
    .ref_o(ref_iq), .index_o(ref_index));

  pi_control u_pi_i (
    .clk, .rst, .valid_i(det_valid_o), .meas_i(det_o.i), .ref_i(ref_iq.i),
    .fb_enable_i(cfg_i.fb_enable), .kp_i(cfg_i.kp), .ki_i(cfg_i.ki),
    .u_o(fb_out.i), .valid_o(fb_valid_i));

  pi_control u_pi_q (
    .clk, .rst, .valid_i(det_valid_o), .meas_i(det_o.q), .ref_i(ref_iq.q),
    .fb_enable_i(cfg_i.fb_enable), .kp_i(cfg_i.kp), .ki_i(cfg_i.ki),
    .u_o(fb_out.q), .valid_o(fb_valid_q));

  ssb_mod u_ssbmod (
    .clk, .fb_i(fb_out), .phase_syn_i, .m_i(cfg_i.m), .sideband_i(cfg_i.sideband),
    .bb_o(bb_mod));

  baseband_mod u_bbmod (
    .clk, .bb_i(bb_mod), .phase_rev_i, .harmonic_i(cfg_i.harmonic), .rf_o);

  assign fb_out_o = fb_out;

  // the baseband demodulator output is consumed as a held value; its strobe,
  // the unused sideband pair and the pattern index are kept for observation
  logic unused;
  assign unused = ^{bb_valid, usb, lsb, ref_index};

  a_pi_lockstep: assert property (@(posedge clk) disable iff (rst) fb_valid_i == fb_valid_q);
endmodule
