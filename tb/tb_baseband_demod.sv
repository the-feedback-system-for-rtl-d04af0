// tb_baseband_demod: a beam-like signal (harmonic h with amplitude A and
// phase psi, a neighbouring harmonic and a DC offset) goes in; the one-turn
// average must return I + jQ = A exp(-j psi) for the selected harmonic and
// reject the rest. Runs with an integer number of samples per turn (exact)
// and with the real J-PARC MR revolution frequency (766.4 samples per turn),
// and checks that one result arrives per revolution.
module tb_baseband_demod;
  import lmbf_pkg::*;
  localparam real PI = 3.14159265358979;
  function automatic real absr(input real v); return (v < 0.0) ? -v : v; endfunction
  logic clk = 0, rst = 1, valid;
  sample_t adc;
  phase_t phase, ftw;
  logic [7:0] h;
  iq_t bb;
  int checks = 0, failures = 0;

  baseband_demod dut (.clk, .rst, .adc_i(adc), .phase_rev_i(phase), .freq_rev_i(ftw),
    .harmonic_i(h), .bb_o(bb), .valid_o(valid));

  always #5 clk = ~clk;

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  real amp, psi;
  int other;
  always @(negedge clk) begin
    real ph;
    phase = phase + ftw;
    ph = 2.0 * PI * real'(phase) / 4294967296.0;
    adc = sample_t'(int'(amp * $cos(real'(h) * ph + psi) + 6000.0 * $cos(real'(other) * ph + 1.0) + 1500.0));
  end

  task automatic run(input phase_t f, input int hh, input real a, input real p, input int tol);
    int n, t0, per;
    ftw = f; h = 8'(hh); amp = a; psi = p; other = hh + 1;
    // let two turns flush the old setting, then check four results
    n = 0; per = 0; t0 = 0;
    for (int t = 0; n < 6; t++) begin
      @(posedge clk);
      if (valid) begin
        n++;
        if (n >= 3) begin
          real ei, eq;
          ei = a * $cos(p);
          eq = -a * $sin(p);
          checks++;
          if (absr(real'(bb.i) - ei) > tol || absr(real'(bb.q) - eq) > tol) begin
            failures++;
            $display("h=%0d got %0d %0d want %0.0f %0.0f", hh, bb.i, bb.q, ei, eq);
          end
          // one result per turn: 2^32/ftw clocks apart (+-1)
          per = t - t0;
          checks++;
          if (absr(real'(per) - 4294967296.0 / real'(f)) > 1.01) begin
            failures++;
            $display("period %0d", per);
          end
        end
        t0 = t;
      end
    end
  endtask

  initial begin
    phase = 0; ftw = 32'd8388608; h = 8; amp = 0; psi = 0; other = 9;
    repeat (3) @(posedge clk);
    @(negedge clk) rst = 0;
    run(32'd8388608, 8, 10000.0, 0.7, 12);     // 512 samples per turn
    run(32'd8388608, 10, 7000.0, -2.5, 12);
    run(32'd5607354, 8, 10000.0, 2.0, 40);     // 188 kHz at 144 MHz
    run(32'd5607354, 10, 12000.0, -0.4, 40);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
