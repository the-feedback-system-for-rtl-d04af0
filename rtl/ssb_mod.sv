// ssb_mod: single-sideband modulator.
//
// Moves the feedback output (a slowly varying I/Q vector at DC) back to the
// selected synchrotron sideband of the harmonic's baseband, the inverse of the
// demodulator shift. A CORDIC produces cos/sin of m*phi_s (no offset on this
// side) and the four products are combined with the signs of the paper's
// Fig. 7:
//   USB: I' = I cos + Q sin    Q' = Q cos - I sin    ( (I+jQ) e^{-j m phi_s} )
//   LSB: I' = I cos - Q sin    Q' = I sin + Q cos    ( (I+jQ) e^{+j m phi_s} )
// The sideband select picks which pair is the output.
//
// Interface: fb_i is held between feedback updates; bb_o is valid every clock,
// CORDIC_LAT + 3 clocks after the phase that produced it. The structure is the
// paper's; pipeline registers and rounding are this design's.
module ssb_mod
  import lmbf_pkg::*;
(
  input  logic       clk,
  input  iq_t        fb_i,
  input  phase_t     phase_syn_i,
  input  logic [2:0] m_i,
  input  sideband_e  sideband_i,
  output iq_t        bb_o
);
  phase_t lo_phase;
  sample_t lo_cos, lo_sin;
  logic signed [31:0] p_ic, p_is, p_qs, p_qc;

  always_ff @(posedge clk) lo_phase <= phase_syn_i * 32'(m_i);

  cordic u_lo (.clk, .phase_i(lo_phase), .cos_o(lo_cos), .sin_o(lo_sin));

  always_ff @(posedge clk) begin
    p_ic <= qmul(fb_i.i, lo_cos);
    p_is <= qmul(fb_i.i, lo_sin);
    p_qs <= qmul(fb_i.q, lo_sin);
    p_qc <= qmul(fb_i.q, lo_cos);
  end

  always_ff @(posedge clk) begin
    if (sideband_i == SB_USB) begin
      bb_o.i <= sat16(48'(p_ic + p_qs));
      bb_o.q <= sat16(48'(p_qc - p_is));
    end else begin
      bb_o.i <= sat16(48'(p_ic - p_qs));
      bb_o.q <= sat16(48'(p_is + p_qc));
    end
  end
endmodule
