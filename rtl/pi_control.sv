// pi_control: proportional-integral controller for one component (I or Q).
//
// On each update (valid_i, one per x32 tick) it forms the error
// e = reference - measured (signs as in the paper's Fig. 7) and outputs
//   u = (kp * e + acc) / 2^GAIN_FRAC,   acc <- acc + ki * e,
// saturated to 16 bits. The integrator is clamped to the range that can
// still reach the output (anti-windup).
// With fb_enable_i low the loop is open: the integrator is cleared and the
// reference is passed straight to the output, which is how the reference
// pattern excites the beam.
//
// Interface: u_o and valid_o are registered, one clock after valid_i.
// The paper gives the P and I control and the reference; the gain format, the
// clamp and the open-loop pass-through are this design's choices.
module pi_control
  import lmbf_pkg::*;
(
  input  logic               clk,
  input  logic               rst,
  input  logic               valid_i,
  input  sample_t            meas_i,
  input  sample_t            ref_i,
  input  logic               fb_enable_i,
  input  logic signed [15:0] kp_i,
  input  logic signed [15:0] ki_i,
  output sample_t            u_o,
  output logic               valid_o
);
  localparam logic signed [39:0] ACC_MAX = 40'sd32767 <<< GAIN_FRAC;

  logic signed [16:0] err;
  logic signed [39:0] p_term, i_term, acc, acc_n, u_sum;

  always_comb begin
    err    = 17'(ref_i) - 17'(meas_i);
    p_term = 40'(kp_i) * 40'(err);
    i_term = 40'(ki_i) * 40'(err);
    acc_n  = acc + i_term;
    u_sum  = (p_term + acc) >>> GAIN_FRAC;
    if (acc_n > ACC_MAX)       acc_n = ACC_MAX;
    else if (acc_n < -ACC_MAX) acc_n = -ACC_MAX;
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      acc     <= '0;
      u_o     <= '0;
      valid_o <= 1'b0;
    end else begin
      valid_o <= valid_i;
      if (!fb_enable_i) begin
        acc <= '0;
        u_o <= ref_i;
      end else if (valid_i) begin
        acc <= acc_n;
        u_o <= sat16(48'(u_sum));
      end
    end
  end
endmodule
