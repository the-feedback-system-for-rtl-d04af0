// tb_baseband_mod: random baseband vectors held for a while, checked sample
// by sample against I cos(h phi) + Q sin(h phi), with the phase applied
// CORDIC_LAT + 2 clocks earlier, for several harmonics.
module tb_baseband_mod;
  import lmbf_pkg::*;
  localparam real PI = 3.14159265358979;
  localparam int LAT = CORDIC_LAT + 2;
  function automatic real absr(input real v); return (v < 0.0) ? -v : v; endfunction
  logic clk = 0;
  iq_t bb;
  phase_t phase;
  phase_t hist [LAT+1];
  logic [7:0] h;
  sample_t rf;
  int checks = 0, failures = 0;

  baseband_mod dut (.clk, .bb_i(bb), .phase_rev_i(phase), .harmonic_i(h), .rf_o(rf));

  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    phase = 0; h = 8; bb = '0;
    foreach (hist[k]) hist[k] = 0;
    for (int seg = 0; seg < 16; seg++) begin
      bb.i = sample_t'($urandom_range(0, 30000) - 15000);
      bb.q = sample_t'($urandom_range(0, 30000) - 15000);
      h = 8'($urandom_range(1, 11));
      for (int t = 0; t < 400; t++) begin
        @(negedge clk);
        if (t > LAT + 2) begin
          real th, e;
          th = 2.0 * PI * real'(32'(hist[LAT] * 32'(h))) / 4294967296.0;
          e = (real'(bb.i) * $cos(th) + real'(bb.q) * $sin(th)) * 32767.0 / 32768.0;
          if (e > 32767.0) e = 32767.0;
          if (e < -32768.0) e = -32768.0;
          checks++;
          if (absr(real'(rf) - e) > 6) begin
            failures++;
            if (failures < 10) $display("h=%0d got %0d want %0.1f", h, rf, e);
          end
        end
        for (int k = LAT; k > 0; k--) hist[k] = hist[k-1];
        phase = phase + 32'd5607354;
        hist[0] = phase;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
