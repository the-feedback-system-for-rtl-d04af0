// lmbf_top: FPGA logic of the longitudinal mode-by-mode feedback processor.
//
// One DDS generates the revolution and synchrotron phases from the two
// frequency patterns; N_HARM = 6 single-sideband feedback blocks each detect
// one synchrotron sideband of one revolution harmonic in the 16-bit ADC
// stream, control it with a PI loop against a reference pattern and
// synthesize the correction at the same RF frequency; the SUM adds the
// enabled blocks into the 16-bit DAC word. Everything runs on the 144 MHz
// system clock (from the board PLL, outside this logic).
//
// Interface: adc_i in, dac_o out, one sample per clock. ftw_rev_i/ftw_syn_i are
// the frequency patterns as DDS tuning words (f = ftw * 144 MHz / 2^32),
// sync_i marks the start of a cycle. cfg_i holds the per-block settings; the
// LUT and reference write ports carry a block number. det_o/det_valid_o and
// fb_out_o expose each block's detected sideband and feedback output
// (monitoring for the control system). dac_sat_o flags a saturated sum.
// Latency ADC -> DAC through the modulators is not fixed: the sideband is
// filtered over one synchrotron period (see tracking_cic).
// The block structure is the paper's (Fig. 6 and Fig. 7); the register-level
// interface is this design's choice.
module lmbf_top
  import lmbf_pkg::*;
#(
  parameter int unsigned N              = N_HARM,
  parameter int unsigned LUT_ADDR_W     = 8,
  parameter int unsigned LUT_ADDR_SHIFT = 7,
  parameter int unsigned REF_DEPTH_LOG2 = 10,
  parameter int unsigned BB_TURN_LOG2   = 16
) (
  input  logic                      clk,
  input  logic                      rst,
  input  logic                      sync_i,
  input  sample_t                   adc_i,
  input  phase_t                    ftw_rev_i,
  input  phase_t                    ftw_syn_i,
  input  chan_cfg_t                 cfg_i [N],
  input  logic                      lut_we_i,
  input  logic [2:0]                lut_chan_i,
  input  sideband_e                 lut_wsb_i,
  input  logic [LUT_ADDR_W-1:0]     lut_waddr_i,
  input  logic [15:0]               lut_wdata_i,
  input  logic [31:0]               ref_step_i,
  input  logic                      ref_we_i,
  input  logic [2:0]                ref_chan_i,
  input  logic [REF_DEPTH_LOG2-1:0] ref_waddr_i,
  input  iq_t                       ref_wdata_i,
  output sample_t                   dac_o,
  output logic                      dac_sat_o,
  output iq_t                       det_o [N],
  output logic [N-1:0]              det_valid_o,
  output iq_t                       fb_out_o [N]
);
  phase_t freq_rev, phase_rev, freq_syn, phase_syn;
  sample_t rf [N];
  logic [N-1:0] out_en;

  dds u_dds (
    .clk, .rst, .sync(sync_i), .ftw_rev(ftw_rev_i), .ftw_syn(ftw_syn_i),
    .freq_rev, .phase_rev, .freq_syn, .phase_syn);

  for (genvar c = 0; c < N; c++) begin : g_harm
    sfb_block #(
      .LUT_ADDR_W(LUT_ADDR_W), .LUT_ADDR_SHIFT(LUT_ADDR_SHIFT),
      .REF_DEPTH_LOG2(REF_DEPTH_LOG2), .BB_TURN_LOG2(BB_TURN_LOG2)
    ) u_sfb (
      .clk, .rst, .sync_i, .adc_i,
      .phase_rev_i(phase_rev), .freq_rev_i(freq_rev), .phase_syn_i(phase_syn), .freq_syn_i(freq_syn),
      .cfg_i(cfg_i[c]),
      .lut_we_i(lut_we_i && lut_chan_i == 3'(c)), .lut_wsb_i, .lut_waddr_i, .lut_wdata_i,
      .ref_step_i,
      .ref_we_i(ref_we_i && ref_chan_i == 3'(c)), .ref_waddr_i, .ref_wdata_i,
      .rf_o(rf[c]), .det_o(det_o[c]), .det_valid_o(det_valid_o[c]), .fb_out_o(fb_out_o[c]));
    assign out_en[c] = cfg_i[c].out_enable;
  end

  fb_sum #(.N(N)) u_sum (.clk, .rst, .x_i(rf), .en_i(out_en), .sum_o(dac_o), .sat_o(dac_sat_o));




endmodule
