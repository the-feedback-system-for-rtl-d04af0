// tb_ssb_demod: the baseband input holds a carrier at DC, an upper sideband
// B_u exp(-j(m phi_s + psi_u)) and a lower sideband B_l exp(+j(m phi_s - psi_l)).
// After the filters settle, the USB output must be B_u exp(j(off_u - psi_u))
// and the LSB output B_l exp(-j(psi_l + off)), with off the LUT entry of the
// selected sideband (one CORDIC serves both), and
// the carrier and the other sideband must be gone. Checked for m = 1 and 2,
// both sideband selections, and the rate of 32 results per synchrotron period.
module tb_ssb_demod;
  import lmbf_pkg::*;
  localparam real PI = 3.14159265358979;
  function automatic real absr(input real v); return (v < 0.0) ? -v : v; endfunction
  localparam int PERIOD = 2048;           // clocks per synchrotron period
  logic clk = 0, rst = 1, valid, lut_we = 0;
  iq_t bb, fb, usb, lsb;
  phase_t phase, ftw;
  logic [2:0] m;
  sideband_e sb, lut_wsb;
  logic [7:0] lut_waddr;
  logic [15:0] lut_wdata;
  int checks = 0, failures = 0;
  real bu, pu, bl, pl;

  ssb_demod dut (.clk, .rst, .bb_i(bb), .phase_syn_i(phase), .freq_syn_i(ftw), .m_i(m),
    .sideband_i(sb), .lut_we_i(lut_we), .lut_wsb_i(lut_wsb), .lut_waddr_i(lut_waddr),
    .lut_wdata_i(lut_wdata), .fb_o(fb), .usb_o(usb), .lsb_o(lsb), .valid_o(valid));

  always #5 clk = ~clk;

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(negedge clk) begin
    real th, ci, cq;
    phase = phase + ftw;
    th = 2.0 * PI * real'(m) * real'(phase) / 4294967296.0;
    ci = 5000.0 + bu * $cos(-(th + pu)) + bl * $cos(th - pl);
    cq = -3000.0 + bu * $sin(-(th + pu)) + bl * $sin(th - pl);
    bb.i = sample_t'(int'(ci));
    bb.q = sample_t'(int'(cq));
  end

  task automatic load_lut(input real off_u, input real off_l);
    for (int s = 0; s < 2; s++)
      for (int a = 0; a < 256; a++) begin
        @(negedge clk);
        lut_we = 1; lut_wsb = sideband_e'(s); lut_waddr = 8'(a);
        lut_wdata = 16'(int'(((s == 0) ? off_u : off_l) / (2.0 * PI) * 65536.0));
      end
    @(negedge clk) lut_we = 0;
  endtask

  task automatic check(input real ou, input real ol, input int mm, input sideband_e s);
    int nv;
    real eui, euq, eli, elq;
    real off;
    m = 3'(mm); sb = s;
    // one CORDIC serves both pairs: both carry the selected sideband's offset
    off = (s == SB_USB) ? ou : ol;
    repeat (3 * PERIOD) @(posedge clk);
    eui = bu * $cos(off - pu); euq = bu * $sin(off - pu);
    eli = bl * $cos(-(pl + off)); elq = bl * $sin(-(pl + off));
    nv = 0;
    for (int t = 0; t < PERIOD; t++) begin
      @(posedge clk);
      if (valid) begin
        nv++;
        checks++;
        if (absr(real'(usb.i) - eui) > 40 || absr(real'(usb.q) - euq) > 40 ||
            absr(real'(lsb.i) - eli) > 40 || absr(real'(lsb.q) - elq) > 40 ||
            fb !== ((s == SB_USB) ? usb : lsb)) begin
          failures++;
          if (failures < 10)
            $display("m=%0d usb %0d %0d (%0.0f %0.0f) lsb %0d %0d (%0.0f %0.0f)",
                     mm, usb.i, usb.q, eui, euq, lsb.i, lsb.q, eli, elq);
        end
      end
    end
    checks++;
    if (nv != 32) begin failures++; $display("%0d results in one period", nv); end
  endtask

  initial begin
    phase = 0; ftw = 32'(64'h1_0000_0000 / PERIOD); m = 1; sb = SB_USB;
    bu = 8000.0; pu = 0.9; bl = 3000.0; pl = -2.2;
    repeat (3) @(posedge clk);
    @(negedge clk) rst = 0;
    load_lut(0.0, 0.0);
    check(0.0, 0.0, 1, SB_USB);
    check(0.0, 0.0, 2, SB_LSB);
    load_lut(0.5, -1.2);
    check(0.5, -1.2, 1, SB_LSB);
    bu = 2000.0; pu = -2.8; bl = 9000.0; pl = 0.3;
    check(0.5, -1.2, 2, SB_USB);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
