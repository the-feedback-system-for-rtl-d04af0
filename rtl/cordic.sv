// cordic: pipelined sine/cosine generator.
//
// Turns a 32-bit phase (fraction of a turn) into cos and sin in Q1.15 with
// amplitude 32767. It is a rotation-mode CORDIC: the phase is first folded
// into +/-90 deg by a 180 deg pre-rotation (remembered as a sign flip), then
// ITER micro-rotations by +/-atan(2^-i) drive the residual angle to zero while
// rotating the start vector (K*32767, 0), where K = 0.60725 cancels the
// CORDIC gain. The datapath carries GUARD extra fraction bits.
//
// Interface: phase_i is taken every clock; cos_o/sin_o belong to the phase
// presented ITER+2 clocks (lmbf_pkg::CORDIC_LAT at the default) earlier. No handshake, no reset needed for
// correctness (the pipeline flushes in LATENCY clocks).
//
// The paper uses CORDICs to generate the sine and cosine for the sideband
// mixers; the iteration count, guard bits and pipelining are this design's.
module cordic
  import lmbf_pkg::*;
#(
  parameter int unsigned ITER  = CORDIC_ITER,   // micro-rotations (<= 20)
  parameter int unsigned GUARD = 4     // extra fraction bits in the datapath
) (
  input  logic        clk,
  input  logic [31:0] phase_i,
  output logic signed [15:0] cos_o,
  output logic signed [15:0] sin_o
);
  localparam int unsigned XW      = 16 + GUARD + 1;

  // atan(2^-i) in units of 2^-32 turn
  localparam logic [31:0] ATAN [20] = '{
    32'd536870912, 32'd316933406, 32'd167458907, 32'd85004756, 32'd42667331,
    32'd21354465,  32'd10679838,  32'd5340245,   32'd2670163,  32'd1335087,
    32'd667544,    32'd333772,    32'd166886,    32'd83443,    32'd41722,
    32'd20861,     32'd10430,     32'd5215,      32'd2608,     32'd1304};

  // round(0.607253 * 32767 * 2^GUARD)
  localparam logic signed [XW-1:0] X0 = XW'(int'(19897.857 * real'(1 << GUARD) + 0.5));

  logic signed [XW-1:0] x [ITER+1];
  logic signed [XW-1:0] y [ITER+1];
  logic signed [31:0]   z [ITER+1];
  logic                 neg [ITER+1];

  // stage 0: fold the phase into [-90, +90) deg
  always_ff @(posedge clk) begin
    x[0]   <= X0;
    y[0]   <= '0;
    neg[0] <= phase_i[31] ^ phase_i[30];
    z[0]   <= (phase_i[31] ^ phase_i[30]) ? signed'({~phase_i[31], phase_i[30:0]})
                                          : signed'(phase_i);
  end

  for (genvar i = 0; i < ITER; i++) begin : g_stage
    always_ff @(posedge clk) begin
      if (!z[i][31]) begin
        x[i+1] <= x[i] - (y[i] >>> i);
        y[i+1] <= y[i] + (x[i] >>> i);
        z[i+1] <= z[i] - signed'(ATAN[i]);
      end else begin
        x[i+1] <= x[i] + (y[i] >>> i);
        y[i+1] <= y[i] - (x[i] >>> i);
        z[i+1] <= z[i] + signed'(ATAN[i]);
      end
      neg[i+1] <= neg[i];
    end
  end

  // output: undo the fold, drop the guard bits with rounding, saturate
  function automatic logic signed [15:0] finish(input logic signed [XW-1:0] v, input logic n);
    logic signed [XW:0] r;
    r = (n ? -(XW+1)'(v) : (XW+1)'(v)) + (XW+1)'(1 << (GUARD-1));
    r = r >>> GUARD;
    if (r > 32767)       return 16'sh7fff;
    else if (r < -32767) return -16'sh7fff;
    else                 return r[15:0];
  endfunction

  always_ff @(posedge clk) begin
    cos_o <= finish(x[ITER], neg[ITER]);
    sin_o <= finish(y[ITER], neg[ITER]);
  end

endmodule
