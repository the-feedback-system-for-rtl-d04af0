// baseband_mod: baseband-to-RF modulator for one revolution harmonic.
//
// Turns the baseband I/Q signal of harmonic h back into an RF sample,
//   rf = I cos(h phi_rev) + Q sin(h phi_rev),
// the inverse of baseband_demod: a baseband vector A*exp(-j*psi) becomes
// A*cos(h*phi_rev + psi). cos/sin come from one CORDIC.
//
// Interface: bb_i and phase_rev_i every clock; rf_o follows the phase by
// CORDIC_LAT + 3 clocks (bb_i is taken CORDIC_LAT + 1 clocks after the phase).
// The function is the paper's; the exact arithmetic is this design's.
module baseband_mod
  import lmbf_pkg::*;
(
  input  logic       clk,
  input  iq_t        bb_i,
  input  phase_t     phase_rev_i,
  input  logic [7:0] harmonic_i,
  output sample_t    rf_o
);
  phase_t lo_phase;
  sample_t lo_cos, lo_sin;
  logic signed [31:0] p_ic, p_qs;

  always_ff @(posedge clk) lo_phase <= phase_rev_i * 32'(harmonic_i);

  cordic u_lo (.clk, .phase_i(lo_phase), .cos_o(lo_cos), .sin_o(lo_sin));

  always_ff @(posedge clk) begin
    p_ic <= qmul(bb_i.i, lo_cos);
    p_qs <= qmul(bb_i.q, lo_sin);
    rf_o <= sat16(48'(p_ic + p_qs));
  end
endmodule
