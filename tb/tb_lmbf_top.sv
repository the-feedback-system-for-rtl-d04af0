// tb_lmbf_top: end-to-end test of the feedback processor at its default size
// (six harmonic blocks), with a beam model that feeds the DAC output straight
// back into the ADC input (pickup -> processor -> kicker -> pickup, gain 1).
//
// The beam signal holds carriers at h = 8, 9 and 10 and a coupled-bunch
// oscillation of mode n = 8, which shows as the upper sideband of h = 8 and
// the lower sideband of h = 10 (MR: 9 buckets). Block 0 controls h = 8 USB,
// block 1 h = 10 LSB, blocks 2..5 only detect (h = 2, 4, 6, 11, outputs off).
// Steps, each counted as a mechanism that must occur at least once:
//   usb_detect / lsb_detect  open-loop detection of the two sidebands
//   pattern_step             the reference pattern steps through its table
//   excitation               a non-zero reference drives the DAC (open loop)
//   lut_calibration          the loop phase is measured and written to the LUT
//   p_control                closed loop, P only: the oscillation halves
//   pi_control               closed loop, PI: the oscillation is suppressed
//   dac_saturation           large references saturate the DAC sum
//   output_disable           a disabled block leaves the DAC silent
//   mr_synchrotron_freq      detection at the MR's own f_s = 350 Hz
// Most steps use f_s = 4.4 kHz (32768 clocks per period) to keep the run
// short; f_rev is the MR's 188 kHz throughout.
module tb_lmbf_top;
  import lmbf_pkg::*;
  localparam real PI = 3.14159265358979;
  localparam int PERIOD = 32768;
  function automatic real absr(input real v); return (v < 0.0) ? -v : v; endfunction

  logic clk = 0, rst = 1, sync = 0, dac_sat;
  sample_t adc, dac;
  phase_t ftw_rev, ftw_syn;
  chan_cfg_t cfg [N_HARM];
  logic lut_we = 0, ref_we = 0;
  logic [2:0] lut_chan, ref_chan;
  sideband_e lut_wsb;
  logic [7:0] lut_waddr;
  logic [15:0] lut_wdata;
  logic [31:0] ref_step;
  logic [9:0] ref_waddr;
  iq_t ref_wdata;
  iq_t det [N_HARM];
  iq_t fb_out [N_HARM];
  logic [N_HARM-1:0] det_valid;
  int checks = 0, failures = 0;

  typedef enum int {USB_DETECT, LSB_DETECT, PATTERN_STEP, EXCITATION, LUT_CALIBRATION,
                    P_CONTROL, PI_CONTROL, DAC_SATURATION, OUTPUT_DISABLE, MR_FS, N_MECH} mech_e;
  int mech [N_MECH];

  // beam model
  phase_t pr_m, ps_m;
  real d_amp, d_psi, loop_g;

  lmbf_top dut (
    .clk, .rst, .sync_i(sync), .adc_i(adc), .ftw_rev_i(ftw_rev), .ftw_syn_i(ftw_syn),
    .cfg_i(cfg), .lut_we_i(lut_we), .lut_chan_i(lut_chan), .lut_wsb_i(lut_wsb),
    .lut_waddr_i(lut_waddr), .lut_wdata_i(lut_wdata), .ref_step_i(ref_step),
    .ref_we_i(ref_we), .ref_chan_i(ref_chan), .ref_waddr_i(ref_waddr), .ref_wdata_i(ref_wdata),
    .dac_o(dac), .dac_sat_o(dac_sat), .det_o(det), .det_valid_o(det_valid), .fb_out_o(fb_out));

  always #5 clk = ~clk;

  initial begin
    repeat (8000000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // pickup signal: carriers, mode-8 oscillation (h=8 USB, h=10 LSB), kick fed
  // back. The beam is locked to the processor's DDS, as the DDS is to the beam
  // in the machine, so its phases are taken from there.
  always @(negedge clk) begin
    real pr, ps;
    pr_m = dut.phase_rev;
    ps_m = dut.phase_syn;
    pr = 2.0 * PI * real'(pr_m) / 4294967296.0;
    ps = 2.0 * PI * real'(ps_m) / 4294967296.0;
    adc = sample_t'(int'(6000.0 * $cos(8.0 * pr) + 3000.0 * $cos(9.0 * pr + 0.5)
                         + 5000.0 * $cos(10.0 * pr + 1.0)
                         + d_amp * $cos(8.0 * pr + ps + d_psi)
                         + d_amp * $cos(10.0 * pr - ps + d_psi + 0.4)
                         + loop_g * real'(dac)));
  end

  task automatic load_lut(input int c, input sideband_e s, input real off);
    for (int a = 0; a < 256; a++) begin
      @(negedge clk);
      lut_we = 1; lut_chan = 3'(c); lut_wsb = s; lut_waddr = 8'(a);
      lut_wdata = 16'(int'(off / (2.0 * PI) * 65536.0));
    end
    @(negedge clk) lut_we = 0;
  endtask

  task automatic load_ref(input int c, input int i0, input int q0, input int i1, input int q1);
    for (int a = 0; a < 1024; a++) begin
      @(negedge clk);
      ref_we = 1; ref_chan = 3'(c); ref_waddr = 10'(a);
      ref_wdata.i = sample_t'((a % 2 == 0) ? i0 : i1);
      ref_wdata.q = sample_t'((a % 2 == 0) ? q0 : q1);
    end
    @(negedge clk) ref_we = 0;
  endtask

  // mean detected vector of block c over one synchrotron period of len clocks
  task automatic measure(input int c, input int len, output real mi, output real mq);
    int n;
    mi = 0; mq = 0; n = 0;
    for (int t = 0; t < len; t++) begin
      @(posedge clk);
      if (det_valid[c]) begin mi += real'(det[c].i); mq += real'(det[c].q); n++; end
    end
    if (n > 0) begin mi /= n; mq /= n; end
  endtask

  function automatic bit vec_ok(input string what, input real gi, input real gq,
                                input real amp, input real ang, input real tol_rel, input real tol_ang);
    real gm, ga, da;
    gm = $sqrt(gi * gi + gq * gq);
    ga = $atan2(gq, gi);
    da = ga - ang;
    while (da > PI) da -= 2.0 * PI;
    while (da < -PI) da += 2.0 * PI;
    checks++;
    if (absr(gm - amp) > tol_rel * amp || absr(da) > tol_ang) begin
      failures++;
      $display("%s: got |%0.0f| at %0.3f rad, want |%0.0f| at %0.3f rad", what, gm, ga, amp, ang);
      return 0;
    end
    return 1;
  endfunction

  initial begin
    real mi, mq, rot, a0, a1;
    int nsat, maxdac;
    pr_m = 0; ps_m = 0; d_amp = 0; d_psi = 0; loop_g = 0;
    foreach (mech[k]) mech[k] = 0;
    ftw_rev = 32'd5607354;                           // 188 kHz
    ftw_syn = 32'(64'h1_0000_0000 / PERIOD);         // 4.4 kHz (sped up)
    rot = 2.0 * PI * real'(ftw_syn) / real'(ftw_rev);  // one-turn delay of the baseband
    ref_step = 0;
    cfg[0] = '{harmonic: 8'd8,  m: 3'd1, sideband: SB_USB, fb_enable: 1'b0, out_enable: 1'b1, kp: 16'sd0, ki: 16'sd0};
    cfg[1] = '{harmonic: 8'd10, m: 3'd1, sideband: SB_LSB, fb_enable: 1'b0, out_enable: 1'b1, kp: 16'sd0, ki: 16'sd0};
    for (int c = 2; c < N_HARM; c++)
      cfg[c] = '{harmonic: 8'(2 * c - 2 + (c == 5 ? 3 : 0)), m: 3'd1, sideband: SB_USB,
                 fb_enable: 1'b0, out_enable: 1'b0, kp: 16'sd0, ki: 16'sd0};
    repeat (3) @(posedge clk);
    @(negedge clk) rst = 0;
    for (int c = 0; c < N_HARM; c++) begin
      load_lut(c, SB_USB, 0.0);
      load_lut(c, SB_LSB, 0.0);
      load_ref(c, 0, 0, 0, 0);
    end
    @(negedge clk) sync = 1;
    @(negedge clk) sync = 0;

    // detection of both sidebands of mode 8, open loop
    d_amp = 2500.0; d_psi = 0.6;
    repeat (3 * PERIOD) @(posedge clk);
    measure(0, PERIOD, mi, mq);
    if (vec_ok("h8 USB", mi, mq, 2500.0, -0.6 + rot, 0.04, 0.06)) mech[USB_DETECT]++;
    measure(1, PERIOD, mi, mq);
    if (vec_ok("h10 LSB", mi, mq, 2500.0, -(0.6 + 0.4) - rot, 0.04, 0.06)) mech[LSB_DETECT]++;
    // a block looking at a harmonic without oscillation sees nothing
    measure(2, PERIOD, mi, mq);
    checks++;
    if ($sqrt(mi * mi + mq * mq) > 60.0) begin failures++; $display("h2 not quiet: %0.0f %0.0f", mi, mq); end

    // excitation: stepping reference pattern on block 0 drives the DAC
    d_amp = 0.0;
    load_ref(0, 4000, 0, 0, 4000);
    ref_step = PERIOD;
    @(negedge clk) sync = 1;
    @(negedge clk) sync = 0;
    begin
      int nchg;
      iq_t last;
      nchg = 0; last = fb_out[0]; maxdac = 0;
      for (int t = 0; t < 4 * PERIOD; t++) begin
        @(posedge clk);
        if (fb_out[0] != last) nchg++;
        last = fb_out[0];
        if (dac > maxdac) maxdac = dac;
      end
      checks++;
      if (nchg >= 3) mech[PATTERN_STEP]++;
      else begin failures++; $display("pattern did not step"); end
      checks++;
      if (maxdac > 3800 && maxdac < 4200) mech[EXCITATION]++;
      else begin failures++; $display("excitation peak %0d", maxdac); end
    end

    // LUT calibration of both blocks through the closed pickup-kicker path
    ref_step = 0;
    load_ref(0, 3000, 0, 3000, 0);
    load_ref(1, 3000, 0, 3000, 0);
    loop_g = 1.0;
    repeat (3 * PERIOD) @(posedge clk);
    measure(0, PERIOD, mi, mq);
    a0 = $atan2(mq, mi);
    measure(1, PERIOD, mi, mq);
    a1 = $atan2(mq, mi);
    load_lut(0, SB_USB, -a0);
    load_lut(1, SB_LSB, a1);   // the offset turns an LSB the other way
    repeat (3 * PERIOD) @(posedge clk);
    measure(0, PERIOD, mi, mq);
    if (vec_ok("h8 after LUT", mi, mq, 3000.0, 0.0, 0.06, 0.04)) begin
      measure(1, PERIOD, mi, mq);
      if (vec_ok("h10 after LUT", mi, mq, 3000.0, 0.0, 0.06, 0.04)) mech[LUT_CALIBRATION]++;
    end

    // closed loop on both blocks, P only, loop gain 1
    load_ref(0, 0, 0, 0, 0);
    load_ref(1, 0, 0, 0, 0);
    d_amp = 2500.0;
    for (int c = 0; c < 2; c++) begin cfg[c].fb_enable = 1'b1; cfg[c].kp = 16'sd256; cfg[c].ki = 16'sd0; end
    repeat (6 * PERIOD) @(posedge clk);
    measure(0, PERIOD, mi, mq);
    if (vec_ok("h8 P control", mi, mq, 1250.0, -0.6 + rot - a0, 0.12, 0.12)) begin
      measure(1, PERIOD, mi, mq);
      if (vec_ok("h10 P control", mi, mq, 1250.0, -1.0 - rot - a1, 0.12, 0.12)) mech[P_CONTROL]++;
    end

    // PI control
    for (int c = 0; c < 2; c++) cfg[c].ki = 16'sd8;
    repeat (10 * PERIOD) @(posedge clk);
    measure(0, PERIOD, mi, mq);
    checks++;
    if ($sqrt(mi * mi + mq * mq) < 250.0) begin
      measure(1, PERIOD, mi, mq);
      checks++;
      if ($sqrt(mi * mi + mq * mq) < 250.0) mech[PI_CONTROL]++;
      else begin failures++; $display("h10 PI left %0.0f", $sqrt(mi * mi + mq * mq)); end
    end else begin failures++; $display("h8 PI left %0.0f", $sqrt(mi * mi + mq * mq)); end

    // saturation of the DAC sum: open loop, large references on three blocks
    loop_g = 0.0; d_amp = 0.0;
    for (int c = 0; c < 2; c++) begin cfg[c].fb_enable = 1'b0; cfg[c].ki = 16'sd0; end
    cfg[2].out_enable = 1'b1;
    load_ref(0, 20000, 0, 20000, 0);
    load_ref(1, 20000, 0, 20000, 0);
    load_ref(2, 0, 20000, 0, 20000);
    nsat = 0;
    for (int t = 0; t < 20000; t++) begin
      @(posedge clk);
      if (dac_sat) begin
        nsat++;
        checks++;
        if (dac != 16'sh7fff && dac != 16'sh8000) failures++;
      end
    end
    if (nsat > 0) mech[DAC_SATURATION]++;

    // all outputs disabled: the DAC is silent
    for (int c = 0; c < N_HARM; c++) cfg[c].out_enable = 1'b0;
    repeat (10) @(posedge clk);
    maxdac = 0;
    for (int t = 0; t < 2000; t++) begin
      @(posedge clk);
      if (dac != 0) maxdac++;
    end
    checks++;
    if (maxdac == 0) mech[OUTPUT_DISABLE]++;
    else failures++;

    // detection at the MR's synchrotron frequency (350 Hz, 411k clocks per period)
    ftw_syn = 32'd10439;
    rot = 2.0 * PI * real'(ftw_syn) / real'(ftw_rev);
    d_amp = 2500.0; d_psi = -2.0;
    load_lut(0, SB_USB, 0.0);
    repeat (900000) @(posedge clk);
    measure(0, 420000, mi, mq);
    if (vec_ok("h8 USB at 350 Hz", mi, mq, 2500.0, 2.0 + rot, 0.03, 0.03)) mech[MR_FS]++;

    for (int k = 0; k < N_MECH; k++) begin
      $display("mechanism %s: %0d", mech_e'(k), mech[k]);
      checks++;
      if (mech[k] == 0) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
