// baseband_demod: converts the digitized beam signal into the complex
// baseband (I/Q) signal of one revolution harmonic h.
//
// The ADC sample x is mixed with cos and sin of h * phase_rev (one CORDIC),
// I = x*cos(h*phi_rev), Q = x*sin(h*phi_rev), and low-pass filtered by an
// accumulate-and-dump average over exactly one revolution: the sums are
// dumped when the revolution phase wraps. A one-turn average has a notch at
// every multiple of f_rev, so the other revolution harmonics of the beam and
// the 2h image of the mixer are removed, while the synchrotron sidebands
// (a few hundred Hz against ~190 kHz) pass. The sum is normalized without a
// divider: the number of samples in one turn is 2^32 / ftw_rev, so
// mean = sum * ftw_rev / 2^32. The result is scaled by 2 so that a beam
// component A*cos(h*phi_rev + psi) gives I + jQ = A*exp(-j*psi): the upper
// synchrotron sideband of harmonic h then appears at -m*f_s and the lower one
// at +m*f_s in the baseband.
//
// Interface: adc_i, phase_rev_i and freq_rev_i every clock; bb_o is updated,
// and valid_o pulses, once per revolution, CORDIC_LAT + 4 clocks after the
// wrap of the phase. The turn may hold at most 2^MAX_TURN_LOG2 samples.
// The paper gives the function (baseband I/Q of each harmonic component);
// the one-turn averaging filter and its normalization are this design's.
module baseband_demod
  import lmbf_pkg::*;
#(
  parameter int unsigned MAX_TURN_LOG2 = 16
) (
  input  logic       clk,
  input  logic       rst,
  input  sample_t    adc_i,
  input  phase_t     phase_rev_i,
  input  phase_t     freq_rev_i,
  input  logic [7:0] harmonic_i,
  output iq_t        bb_o,
  output logic       valid_o
);
  localparam int unsigned AW = 32 + MAX_TURN_LOG2;   // accumulator width
  localparam int unsigned PW = AW + 33;              // normalized product width
  localparam int unsigned DLY = CORDIC_LAT + 1;      // phase multiply + CORDIC

  phase_t  lo_phase, last_phase;
  sample_t lo_cos, lo_sin;
  sample_t x_dly [DLY];
  logic [DLY:0] wrap_dly;
  logic signed [31:0] mix_i, mix_q;
  logic signed [AW-1:0] acc_i, acc_q, sum_i, sum_q, dump_i, dump_q;
  logic signed [PW-1:0] norm_i, norm_q;
  logic dump;

  always_ff @(posedge clk) begin
    lo_phase   <= phase_rev_i * 32'(harmonic_i);
    last_phase <= phase_rev_i;
  end

  cordic u_lo (.clk, .phase_i(lo_phase), .cos_o(lo_cos), .sin_o(lo_sin));

  // align the sample and the turn marker with the local oscillator
  always_ff @(posedge clk) begin
    x_dly[0] <= adc_i;
    for (int k = 1; k < DLY; k++) x_dly[k] <= x_dly[k-1];
    if (rst) wrap_dly <= '0;
    else     wrap_dly <= {wrap_dly[DLY-1:0], phase_rev_i < last_phase};
  end

  always_ff @(posedge clk) begin
    mix_i <= x_dly[DLY-1] * lo_cos;
    mix_q <= x_dly[DLY-1] * lo_sin;
  end

  assign sum_i = acc_i + AW'(mix_i);
  assign sum_q = acc_q + AW'(mix_q);
  // mean * 2 back to Q1.15: sum * ftw / 2^32 / 2^15 * 2
  assign norm_i = (PW'(dump_i) * PW'(signed'({1'b0, freq_rev_i}))) >>> 46;
  assign norm_q = (PW'(dump_q) * PW'(signed'({1'b0, freq_rev_i}))) >>> 46;

  always_ff @(posedge clk) begin
    if (rst) begin
      acc_i   <= '0;
      acc_q   <= '0;
      dump_i  <= '0;
      dump_q  <= '0;
      dump    <= 1'b0;
      bb_o    <= '0;
      valid_o <= 1'b0;
    end else begin
      dump    <= wrap_dly[DLY];
      valid_o <= dump;
      if (wrap_dly[DLY]) begin
        // the sample arriving with the marker is the first of the new turn
        dump_i <= acc_i;
        dump_q <= acc_q;
        acc_i  <= AW'(mix_i);
        acc_q  <= AW'(mix_q);
      end else begin
        acc_i <= sum_i;
        acc_q <= sum_q;
      end
      if (dump) begin
        bb_o.i <= sat16(48'(norm_i));
        bb_o.q <= sat16(48'(norm_q));
      end
    end
  end
endmodule
