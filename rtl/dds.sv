// dds: direct digital synthesis of the revolution and synchrotron phases.
//
// Two 32-bit phase accumulators advance by their tuning words every clock,
// giving the revolution phase (f_rev = ftw_rev * f_clk / 2^32) and the
// synchrotron phase (f_s = ftw_syn * f_clk / 2^32). Both tuning words are
// supplied from outside, sample by sample, as the frequency patterns of the
// acceleration cycle; they are registered and passed on as the "frequency"
// outputs next to the phases. A pulse on sync (the start of a cycle) clears
// both phases.
//
// Timing: freq outputs follow the inputs by one clock; the phases step by
// the registered tuning word each clock (one clock after freq is updated).
// The paper names the DDS block and its four outputs (revolution frequency
// and phase, synchrotron frequency and phase); accumulator widths and the
// sync input are this design's choice.
module dds
  import lmbf_pkg::*;
(
  input  logic   clk,
  input  logic   rst,
  input  logic   sync,
  input  phase_t ftw_rev,
  input  phase_t ftw_syn,
  output phase_t freq_rev,
  output phase_t phase_rev,
  output phase_t freq_syn,
  output phase_t phase_syn
);
  always_ff @(posedge clk) begin
    if (rst) begin
      freq_rev  <= '0;
      freq_syn  <= '0;
      phase_rev <= '0;
      phase_syn <= '0;
    end else begin
      freq_rev <= ftw_rev;
      freq_syn <= ftw_syn;
      if (sync) begin
        phase_rev <= '0;
        phase_syn <= '0;
      end else begin
        phase_rev <= phase_rev + freq_rev;
        phase_syn <= phase_syn + freq_syn;
      end
    end
  end
endmodule
