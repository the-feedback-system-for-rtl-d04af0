// tb_ssb_mod: holds a feedback vector F and checks every output sample
// against F exp(-j m phi_s) (USB) or F exp(+j m phi_s) (LSB), using the phase
// applied CORDIC_LAT + 2 clocks earlier (output register one clock later).
module tb_ssb_mod;
  import lmbf_pkg::*;
  localparam real PI = 3.14159265358979;
  localparam int LAT = CORDIC_LAT + 2;
  function automatic real absr(input real v); return (v < 0.0) ? -v : v; endfunction
  logic clk = 0;
  iq_t fb, bb;
  phase_t phase;
  phase_t hist [LAT+1];
  logic [2:0] m;
  sideband_e sb;
  int checks = 0, failures = 0;

  ssb_mod dut (.clk, .fb_i(fb), .phase_syn_i(phase), .m_i(m), .sideband_i(sb), .bb_o(bb));

  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    phase = 0; m = 1; sb = SB_USB; fb = '0;
    foreach (hist[k]) hist[k] = 0;
    for (int seg = 0; seg < 16; seg++) begin
      phase_t ftw;
      fb.i = sample_t'($urandom_range(0, 40000) - 20000);
      fb.q = sample_t'($urandom_range(0, 40000) - 20000);
      m  = 3'($urandom_range(1, 3));
      sb = sideband_e'(seg % 2);
      ftw = $urandom_range(0, 32'h0100_0000);
      for (int t = 0; t < 400; t++) begin
        @(negedge clk);
        if (t > LAT + 2) begin
          real th, ei, eq, fi, fq;
          th = 2.0 * PI * real'(32'(hist[LAT] * 32'(m))) / 4294967296.0;
          fi = real'(fb.i); fq = real'(fb.q);
          if (sb == SB_USB) begin
            ei = (fi * $cos(th) + fq * $sin(th)) * 32767.0 / 32768.0;
            eq = (fq * $cos(th) - fi * $sin(th)) * 32767.0 / 32768.0;
          end else begin
            ei = (fi * $cos(th) - fq * $sin(th)) * 32767.0 / 32768.0;
            eq = (fq * $cos(th) + fi * $sin(th)) * 32767.0 / 32768.0;
          end
          if (ei > 32767.0) ei = 32767.0;
          if (ei < -32768.0) ei = -32768.0;
          if (eq > 32767.0) eq = 32767.0;
          if (eq < -32768.0) eq = -32768.0;
          checks++;
          if (absr(real'(bb.i) - ei) > 6 || absr(real'(bb.q) - eq) > 6) begin
            failures++;
            if (failures < 10) $display("got %0d %0d want %0.1f %0.1f", bb.i, bb.q, ei, eq);
          end
        end
        for (int k = LAT; k > 0; k--) hist[k] = hist[k-1];
        phase = phase + ftw;
        hist[0] = phase;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
