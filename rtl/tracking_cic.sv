// tracking_cic: two-stage synchrotron-frequency tracking CIC low-pass filter.
//
// A CIC filter whose sample clock is the x32 tick (32 samples per
// synchrotron period) and whose comb delay is DELAY = 32 samples, so each
// stage is a moving sum over exactly one synchrotron period. Its transfer
// function, (sin(pi f/f_s) / (32 sin(pi f/(32 f_s))))^2, has its first notch
// at f_s and further notches at every multiple of f_s, and the notches move
// with the synchrotron frequency pattern. After the sideband mixers this
// removes the carrier (shifted to m*f_s) and the unwanted sideband (shifted to
// 2*m*f_s) while the wanted sideband sits at DC.
//
// Structure: two integrators and two combs, all enabled by tick_i, with
// wrap-around (modular) arithmetic; the output is divided by DELAY^2 (a shift).
// Interface: x_i is sampled on tick_i; y_o is updated and valid_o pulses one
// clock later. DC gain is 1, the step response settles in 2*DELAY-1 ticks.
// The paper gives the filter type (Molendijk's frequency tracking CIC), its
// two stages and the x32 clock; the word widths are this design's.
module tracking_cic
  import lmbf_pkg::*;
#(
  parameter int unsigned DELAY_LOG2 = 5
) (
  input  logic    clk,
  input  logic    rst,
  input  logic    tick_i,
  input  sample_t x_i,
  output sample_t y_o,
  output logic    valid_o
);
  localparam int unsigned DELAY = 1 << DELAY_LOG2;
  localparam int unsigned W     = SAMPLE_W + 2 * DELAY_LOG2;

  logic signed [W-1:0] int1, int2;
  logic signed [W-1:0] dl1 [DELAY];
  logic signed [W-1:0] dl2 [DELAY];
  logic [DELAY_LOG2-1:0] ptr;
  logic signed [W-1:0] int1_n, int2_n, comb1, comb2;

  // next integrator values and the comb outputs for this tick
  always_comb begin
    int1_n = int1 + W'(x_i);
    int2_n = int2 + int1_n;
    comb1  = int2_n - dl1[ptr];
    comb2  = comb1 - dl2[ptr];
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      int1    <= '0;
      int2    <= '0;
      ptr     <= '0;
      y_o     <= '0;
      valid_o <= 1'b0;
      for (int k = 0; k < DELAY; k++) begin
        dl1[k] <= '0;
        dl2[k] <= '0;
      end
    end else begin
      valid_o <= tick_i;
      if (tick_i) begin
        int1     <= int1_n;
        int2     <= int2_n;
        dl1[ptr] <= int2_n;
        dl2[ptr] <= comb1;
        ptr      <= ptr + 1'b1;
        y_o      <= comb2[W-1 -: SAMPLE_W];
      end
    end
  end
endmodule
