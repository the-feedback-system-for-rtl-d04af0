// x32_clock: clock enable at 32 times the synchrotron frequency.
//
// Emits a one-clock tick each time the synchrotron phase crosses one of the
// 2^TICK_LOG2 equally spaced points of a turn (a change of its top TICK_LOG2
// bits), i.e. TICKS = 32 ticks per synchrotron period at the default. The
// ticks follow the synchrotron frequency pattern, so a filter clocked by them
// keeps its notches on multiples of f_s.
//
// Interface: phase_syn_i every clock; tick_o is registered (one clock after
// the crossing). The tuning word must stay below 2^(32-TICK_LOG2) so that no
// crossing is skipped. The x32 ratio is the paper's (Fig. 7); detecting it from
// the phase bits is this design's choice.
module x32_clock
  import lmbf_pkg::*;
#(
  parameter int unsigned TICK_LOG2 = 5
) (
  input  logic   clk,
  input  logic   rst,
  input  phase_t phase_syn_i,
  output logic   tick_o
);
  logic [TICK_LOG2-1:0] last;

  always_ff @(posedge clk) begin
    if (rst) begin
      last   <= '0;
      tick_o <= 1'b0;
    end else begin
      last   <= phase_syn_i[31 -: TICK_LOG2];
      tick_o <= (phase_syn_i[31 -: TICK_LOG2] != last);
    end
  end
endmodule
