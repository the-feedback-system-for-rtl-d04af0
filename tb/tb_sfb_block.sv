// tb_sfb_block: one harmonic feedback block against a simple beam model.
//
// The ADC input is a carrier at h f_rev, a neighbouring harmonic, an
// oscillation sideband D at h f_rev +/- m f_s, and the block's own RF output
// fed straight back (the "kick" seen again by the pickup, gain 1).
// Steps: (1) open loop, USB: the detected vector must match D; (2) open loop,
// LSB: same for a lower sideband, and the RF output is checked sample by
// sample against the reference pattern (excitation), whose entries step;
// (3) with D = 0 the excitation comes back through the loop and its phase is
// measured, then written into the phase offset LUT so that the detected
// vector lines up with the reference (the calibration of the LUT);
// (4) closed loop, P control with loop gain 1: the oscillation drops to 1/2;
// (5) PI control: it drops below 10 %.
// The synchrotron frequency is raised to 4.4 kHz (32768 clocks per period)
// to keep the run short; f_rev is the MR's 188 kHz.
module tb_sfb_block;
  import lmbf_pkg::*;
  localparam real PI = 3.14159265358979;
  localparam int PERIOD = 32768;
  localparam int LAT = CORDIC_LAT + 3;
  function automatic real absr(input real v); return (v < 0.0) ? -v : v; endfunction

  logic clk = 0, rst = 1, sync = 0, det_valid;
  sample_t adc, rf;
  phase_t phase_rev, phase_syn, ftw_rev, ftw_syn;
  chan_cfg_t cfg;
  logic lut_we = 0, ref_we = 0;
  sideband_e lut_wsb;
  logic [7:0] lut_waddr;
  logic [15:0] lut_wdata;
  logic [31:0] ref_step;
  logic [9:0] ref_waddr;
  iq_t ref_wdata, det, fb_out;
  int checks = 0, failures = 0;

  // beam model state
  real d_amp, d_psi, loop_g;
  int  d_side;  // +1 USB, -1 LSB
  phase_t prh [LAT+1];
  phase_t psh [LAT+1];

  sfb_block dut (
    .clk, .rst, .sync_i(sync), .adc_i(adc), .phase_rev_i(phase_rev), .freq_rev_i(ftw_rev),
    .phase_syn_i(phase_syn), .freq_syn_i(ftw_syn), .cfg_i(cfg),
    .lut_we_i(lut_we), .lut_wsb_i(lut_wsb), .lut_waddr_i(lut_waddr), .lut_wdata_i(lut_wdata),
    .ref_step_i(ref_step), .ref_we_i(ref_we), .ref_waddr_i(ref_waddr), .ref_wdata_i(ref_wdata),
    .rf_o(rf), .det_o(det), .det_valid_o(det_valid), .fb_out_o(fb_out));

  always #5 clk = ~clk;

  initial begin
    repeat (3000000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(negedge clk) begin
    real pr, ps, h;
    h = real'(cfg.harmonic);
    phase_rev = phase_rev + ftw_rev;
    phase_syn = phase_syn + ftw_syn;
    for (int k = LAT; k > 0; k--) begin prh[k] = prh[k-1]; psh[k] = psh[k-1]; end
    prh[0] = phase_rev; psh[0] = phase_syn;
    pr = 2.0 * PI * real'(phase_rev) / 4294967296.0;
    ps = 2.0 * PI * real'(cfg.m) * real'(phase_syn) / 4294967296.0;
    adc = sample_t'(int'(9000.0 * $cos(h * pr) + 4000.0 * $cos((h + 1.0) * pr + 0.3)
                         + d_amp * $cos(h * pr + real'(d_side) * ps + d_psi)
                         + loop_g * real'(rf)));
  end

  task automatic load_lut(input sideband_e s, input real off);
    for (int a = 0; a < 256; a++) begin
      @(negedge clk);
      lut_we = 1; lut_wsb = s; lut_waddr = 8'(a);
      lut_wdata = 16'(int'(off / (2.0 * PI) * 65536.0));
    end
    @(negedge clk) lut_we = 0;
  endtask

  task automatic load_ref(input int i0, input int q0, input int i1, input int q1);
    for (int a = 0; a < 1024; a++) begin
      @(negedge clk);
      ref_we = 1; ref_waddr = 10'(a);
      ref_wdata.i = sample_t'((a % 2 == 0) ? i0 : i1);
      ref_wdata.q = sample_t'((a % 2 == 0) ? q0 : q1);
    end
    @(negedge clk) ref_we = 0;
  endtask

  // average of the detected vector over one synchrotron period
  task automatic measure(output real mi, output real mq);
    int n;
    mi = 0; mq = 0; n = 0;
    for (int t = 0; t < PERIOD; t++) begin
      @(posedge clk);
      if (det_valid) begin mi += real'(det.i); mq += real'(det.q); n++; end
    end
    mi /= n; mq /= n;
  endtask

  function automatic void check_vec(input string what, input real gi, input real gq,
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
    end
  endfunction

  initial begin
    real mi, mq, alpha, rot;
    phase_rev = 0; phase_syn = 0;
    ftw_rev = 32'd5607354; ftw_syn = 32'(64'h1_0000_0000 / PERIOD);
    d_amp = 0; d_psi = 0; d_side = 1; loop_g = 0;
    cfg = '{harmonic: 8'd8, m: 3'd1, sideband: SB_USB, fb_enable: 1'b0, out_enable: 1'b1,
            kp: 16'sd0, ki: 16'sd0};
    ref_step = 0;
    // the one-turn baseband average and its hold delay the sideband by about
    // one revolution: a rotation of 2 pi m f_s / f_rev (+ for USB, - for LSB)
    rot = 2.0 * PI * real'(ftw_syn) / real'(ftw_rev);
    repeat (3) @(posedge clk);
    @(negedge clk) rst = 0;
    load_lut(SB_USB, 0.0);
    load_lut(SB_LSB, 0.0);
    load_ref(0, 0, 0, 0);
    @(negedge clk) sync = 1;
    @(negedge clk) sync = 0;

    // (1) USB detection, open loop
    d_amp = 3000.0; d_psi = 0.6; d_side = 1;
    repeat (3 * PERIOD) @(posedge clk);
    measure(mi, mq);
    check_vec("USB detect", mi, mq, 3000.0, -0.6 + rot, 0.03, 0.05);

    // (2) LSB detection and open-loop excitation from a stepping pattern
    cfg.sideband = SB_LSB; d_side = -1; d_psi = -1.1; cfg.m = 3'd2;
    load_ref(5000, -2000, -3000, 4000);
    ref_step = PERIOD / 2;
    @(negedge clk) sync = 1;
    @(negedge clk) sync = 0;
    repeat (3 * PERIOD) @(posedge clk);
    measure(mi, mq);
    check_vec("LSB detect", mi, mq, 3000.0, 1.1 - 2.0 * rot, 0.03, 0.05);
    begin
      int nchg;
      iq_t last;
      nchg = 0; last = fb_out;
      for (int t = 0; t < 2 * PERIOD; t++) begin
        real e, ps, pr, ci, cq;
        @(negedge clk);
        #1;  // after the beam model has stepped the phase history
        if (fb_out != last) nchg++;
        last = fb_out;
        // rf = I' cos(h phi_r) + Q' sin(h phi_r), (I'+jQ') = F e^{+j m phi_s} for LSB
        pr = 2.0 * PI * real'(32'(prh[LAT] * 32'(cfg.harmonic))) / 4294967296.0;
        ps = 2.0 * PI * real'(32'(psh[LAT] * 32'(cfg.m))) / 4294967296.0;
        ci = real'(fb_out.i) * $cos(ps) - real'(fb_out.q) * $sin(ps);
        cq = real'(fb_out.q) * $cos(ps) + real'(fb_out.i) * $sin(ps);
        e  = ci * $cos(pr) + cq * $sin(pr);
        if (t % 64 == 0) begin
          checks++;
          if (absr(real'(rf) - e) > 12.0) begin
            failures++;
            if (failures < 10) $display("rf %0d want %0.1f", rf, e);
          end
        end
      end
      checks++;
      if (nchg < 3) begin failures++; $display("reference pattern did not step (%0d)", nchg); end
    end

    // (3) LUT calibration: measure the phase of the excitation seen again
    cfg.sideband = SB_USB; cfg.m = 3'd1; d_amp = 0; loop_g = 1.0;
    load_ref(3000, 0, 3000, 0);
    repeat (3 * PERIOD) @(posedge clk);
    measure(mi, mq);
    alpha = $atan2(mq, mi);
    check_vec("excitation seen again", mi, mq, 3000.0, alpha, 0.05, 1.0);
    load_lut(SB_USB, -alpha);
    repeat (3 * PERIOD) @(posedge clk);
    measure(mi, mq);
    check_vec("after LUT", mi, mq, 3000.0, 0.0, 0.05, 0.03);

    // (4) closed loop, P only, loop gain 1: the oscillation halves
    load_ref(0, 0, 0, 0);
    d_amp = 3000.0; d_psi = 0.6; d_side = 1;
    cfg.fb_enable = 1'b1; cfg.kp = 16'sd256; cfg.ki = 16'sd0;
    repeat (6 * PERIOD) @(posedge clk);
    measure(mi, mq);
    check_vec("P control", mi, mq, 1500.0, -0.6 + rot - alpha, 0.1, 0.1);

    // (5) PI control: the oscillation is suppressed
    cfg.ki = 16'sd8;
    repeat (10 * PERIOD) @(posedge clk);
    measure(mi, mq);
    checks++;
    if ($sqrt(mi * mi + mq * mq) > 300.0) begin
      failures++;
      $display("PI control left %0.0f", $sqrt(mi * mi + mq * mq));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
