// tb_workload_cycle: the measurement sequence of the MR beam tests, run on a
// time-compressed acceleration cycle in which the synchrotron frequency falls
// and the revolution frequency rises, as they do during acceleration.
//
// f_s ramps from 5.6 kHz down to 700 Hz (the MR goes from 350 Hz to 30 Hz; the
// ratio is similar but the values are raised 16 to 23 times to keep the run
// short) while f_rev ramps from 185 to 191 kHz. The LUT bins are widened
// (LUT_ADDR_SHIFT = 10, 34 Hz per bin) to cover the raised f_s, and only two
// harmonic blocks are built. The beam model returns the kick to the pickup
// after a 300-clock (about 2 us) cable delay, so the return phase
// changes as f_rev rises; the f_s-addressed LUT follows it through the cycle.
//   pass 1  open loop, excitation of mode 8 (h = 8 USB) with a constant
//           reference: the phase difference between excitation and detected
//           oscillation is collected per LUT bin; it must vary by more than 10 deg
//           (the cable delay as f_rev rises, and the one-turn baseband
//           average by about pi f_s / f_rev, both turn it);
//   LUT     the negated mean phase of each bin is written to the table;
//   pass 2  the same ramp again: the phase difference must stay within
//           +-5 deg everywhere (the accuracy reported for the real LUT);
//   pass 3  an oscillation is present and the loop is closed with P control
//           of loop gain 1: its amplitude must fall to about one half, over
//           the whole ramp.
module tb_workload_cycle;
  import lmbf_pkg::*;
  localparam real PI = 3.14159265358979;
  localparam int NB = 2;
  localparam int RAMP = 3000000;               // clocks per compressed cycle
  localparam int DLY = 300;                    // kick cable delay in clocks
  localparam real FTW_S0 = 167000.0, FTW_S1 = 20900.0;      // 5.6 kHz -> 700 Hz
  localparam real FTW_R0 = 5517794.0, FTW_R1 = 5696753.0;   // 185 -> 191 kHz
  function automatic real absr(input real v); return (v < 0.0) ? -v : v; endfunction
  function automatic real wrap(input real a);
    real r;
    r = a;
    while (r > PI) r -= 2.0 * PI;
    while (r < -PI) r += 2.0 * PI;
    return r;
  endfunction

  logic clk = 0, rst = 1, sync = 0, dac_sat;
  sample_t adc, dac;
  phase_t ftw_rev, ftw_syn;
  chan_cfg_t cfg [NB];
  logic lut_we = 0, ref_we = 0;
  logic [2:0] lut_chan, ref_chan;
  sideband_e lut_wsb;
  logic [7:0] lut_waddr;
  logic [15:0] lut_wdata;
  logic [31:0] ref_step;
  logic [9:0] ref_waddr;
  iq_t ref_wdata;
  iq_t det [NB];
  iq_t fb_out [NB];
  logic [NB-1:0] det_valid;
  int checks = 0, failures = 0;

  real d_amp, loop_g;
  sample_t kick [DLY];
  real bin_i [256];
  real bin_q [256];
  int  bin_n [256];

  lmbf_top #(.N(NB), .LUT_ADDR_SHIFT(10)) dut (
    .clk, .rst, .sync_i(sync), .adc_i(adc), .ftw_rev_i(ftw_rev), .ftw_syn_i(ftw_syn),
    .cfg_i(cfg), .lut_we_i(lut_we), .lut_chan_i(lut_chan), .lut_wsb_i(lut_wsb),
    .lut_waddr_i(lut_waddr), .lut_wdata_i(lut_wdata), .ref_step_i(ref_step),
    .ref_we_i(ref_we), .ref_chan_i(ref_chan), .ref_waddr_i(ref_waddr), .ref_wdata_i(ref_wdata),
    .dac_o(dac), .dac_sat_o(dac_sat), .det_o(det), .det_valid_o(det_valid), .fb_out_o(fb_out));

  always #5 clk = ~clk;

  initial begin
    repeat (4 * RAMP + 2000000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // beam locked to the DDS: carriers, mode-8 oscillation on h = 8 USB, delayed kick
  always @(negedge clk) begin
    real pr, ps;
    pr = 2.0 * PI * real'(dut.phase_rev) / 4294967296.0;
    ps = 2.0 * PI * real'(dut.phase_syn) / 4294967296.0;
    for (int k = DLY - 1; k > 0; k--) kick[k] = kick[k-1];
    kick[0] = dac;
    adc = sample_t'(int'(6000.0 * $cos(8.0 * pr) + 3000.0 * $cos(9.0 * pr + 0.5)
                         + d_amp * $cos(8.0 * pr + ps + 0.8)
                         + loop_g * real'(kick[DLY-1])));
  end

  task automatic load_ref(input int c, input int i0, input int q0);
    for (int a = 0; a < 1024; a++) begin
      @(negedge clk);
      ref_we = 1; ref_chan = 3'(c); ref_waddr = 10'(a);
      ref_wdata.i = sample_t'(i0); ref_wdata.q = sample_t'(q0);
    end
    @(negedge clk) ref_we = 0;
  endtask

  task automatic load_lut_bin(input int a, input real off);
    @(negedge clk);
    lut_we = 1; lut_chan = 0; lut_wsb = SB_USB; lut_waddr = 8'(a);
    lut_wdata = 16'(int'(off / (2.0 * PI) * 65536.0));
    @(negedge clk) lut_we = 0;
  endtask

  // one compressed cycle; mode 1 collects per bin, 2 checks the phase, 3 the damping
  task automatic ramp(input int mode, output real worst, output real mean_amp);
    int nsum;
    worst = 0.0; mean_amp = 0.0; nsum = 0;
    for (int t = 0; t < RAMP; t++) begin
      @(negedge clk);
      if (t % 256 == 0) begin
        real x;
        x = real'(t) / real'(RAMP);
        ftw_syn = phase_t'(int'(FTW_S0 + (FTW_S1 - FTW_S0) * x));
        ftw_rev = phase_t'(int'(FTW_R0 + (FTW_R1 - FTW_R0) * x));
      end
      // skip the first 200k clocks while the filters fill
      if (det_valid[0] && t > 200000) begin
        real ph, amp;
        int b;
        ph  = $atan2(real'(det[0].q), real'(det[0].i));
        amp = $sqrt(real'(det[0].i) * real'(det[0].i) + real'(det[0].q) * real'(det[0].q));
        b   = int'(ftw_syn) >> 10;
        if (mode == 1) begin
          bin_i[b] += real'(det[0].i); bin_q[b] += real'(det[0].q); bin_n[b]++;
        end else if (mode == 2) begin
          if (absr(ph) > worst) worst = absr(ph);
        end else begin
          mean_amp += amp; nsum++;
          if (amp > worst) worst = amp;
        end
      end
    end
    if (nsum > 0) mean_amp /= nsum;
  endtask

  initial begin
    real worst, amp_open, amp_closed, dummy, last;
    int nlut;
    ftw_rev = phase_t'(int'(FTW_R0)); ftw_syn = phase_t'(int'(FTW_S0));
    d_amp = 0.0; loop_g = 1.0; ref_step = 0;
    foreach (kick[k]) kick[k] = 0;
    foreach (bin_n[b]) begin bin_i[b] = 0; bin_q[b] = 0; bin_n[b] = 0; end
    cfg[0] = '{harmonic: 8'd8, m: 3'd1, sideband: SB_USB, fb_enable: 1'b0, out_enable: 1'b1, kp: 16'sd0, ki: 16'sd0};
    cfg[1] = '{harmonic: 8'd10, m: 3'd1, sideband: SB_LSB, fb_enable: 1'b0, out_enable: 1'b0, kp: 16'sd0, ki: 16'sd0};
    repeat (3) @(posedge clk);
    @(negedge clk) rst = 0;
    for (int a = 0; a < 256; a++) load_lut_bin(a, 0.0);
    load_ref(0, 3000, 0);
    load_ref(1, 0, 0);
    @(negedge clk) sync = 1;
    @(negedge clk) sync = 0;

    // pass 1: excitation, phase difference per bin
    ramp(1, worst, dummy);
    begin
      real lo, hi, a0;
      lo = 10.0; hi = -10.0; a0 = 0.0;
      for (int a = 0; a < 256; a++)
        if (bin_n[a] > 0) begin a0 = $atan2(bin_q[a], bin_i[a]); break; end
      for (int a = 0; a < 256; a++)
        if (bin_n[a] > 0) begin
          real d;
          d = wrap($atan2(bin_q[a], bin_i[a]) - a0);
          if (d < lo) lo = d;
          if (d > hi) hi = d;
        end
      worst = hi - lo;
    end
    $display("pass 1: phase difference varies by %0.1f deg over the ramp", worst * 180.0 / PI);
    checks++;
    if (worst * 180.0 / PI < 10.0) begin
      failures++;
      $display("the phase response hardly varied over the cycle");
    end
    // write the LUT: measured bins, nearest measured bin elsewhere
    nlut = 0; last = 0.0;
    for (int a = 0; a < 256; a++)
      if (bin_n[a] > 0) begin last = $atan2(bin_q[a], bin_i[a]); break; end
    for (int a = 0; a < 256; a++) begin
      if (bin_n[a] > 0) begin last = $atan2(bin_q[a], bin_i[a]); nlut++; end
      load_lut_bin(a, -last);
    end
    $display("LUT: %0d bins measured", nlut);

    // pass 2: same excitation after the LUT adjustment
    @(negedge clk) sync = 1;
    @(negedge clk) sync = 0;
    ramp(2, worst, dummy);
    $display("pass 2: worst phase difference %0.2f deg", worst * 180.0 / PI);
    checks++;
    if (worst * 180.0 / PI > 5.0) failures++;

    // pass 3: an oscillation, loop open then closed with P control
    load_ref(0, 0, 0);
    d_amp = 2500.0;
    ramp(3, worst, amp_open);
    cfg[0].fb_enable = 1'b1; cfg[0].kp = 16'sd256;
    ramp(3, worst, amp_closed);
    $display("pass 3: oscillation %0.0f open loop, %0.0f with P feedback (worst %0.0f)",
             amp_open, amp_closed, worst);
    checks++;
    if (absr(amp_closed / amp_open - 0.5) > 0.08) failures++;
    checks++;
    if (worst > 0.65 * amp_open) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
