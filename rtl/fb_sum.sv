// fb_sum: adds the RF outputs of the harmonic feedback blocks for the DAC.
//
// Sums the enabled inputs at full precision and saturates the total to the
// 16-bit DAC word. Interface: one sample per input per clock; sum_o and the
// saturation flag sat_o are registered (one clock latency).
// The SUM block is the paper's (Fig. 6); saturation is this design's choice.
module fb_sum
  import lmbf_pkg::*;
#(
  parameter int unsigned N = N_HARM
) (
  input  logic          clk,
  input  logic          rst,
  input  sample_t       x_i [N],
  input  logic [N-1:0]  en_i,
  output sample_t       sum_o,
  output logic          sat_o
);
  logic signed [SAMPLE_W+7:0] total;

  always_comb begin
    total = '0;
    for (int k = 0; k < N; k++)
      if (en_i[k]) total += (SAMPLE_W+8)'(x_i[k]);
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      sum_o <= '0;
      sat_o <= 1'b0;
    end else begin
      sum_o <= sat16(48'(total));
      sat_o <= (total > 32767) || (total < -32768);
    end
  end
endmodule
