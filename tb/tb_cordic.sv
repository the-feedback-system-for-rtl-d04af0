// tb_cordic: sweeps random and corner phases through the CORDIC and compares
// cos/sin with the real-valued functions (tolerance 4 LSB). It also checks the
// pipeline latency of lmbf_pkg::CORDIC_LAT clocks by tracking each phase.
module tb_cordic;
  import lmbf_pkg::*;
  logic clk = 0;
  logic [31:0] phase;
  logic signed [15:0] c, s;
  int checks = 0, failures = 0;
  localparam real PI = 3.14159265358979;
  logic [31:0] hist [CORDIC_LAT+1];

  cordic dut (.clk, .phase_i(phase), .cos_o(c), .sin_o(s));

  always #5 clk = ~clk;

  initial begin
    #2000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    phase = 0;
    for (int k = 0; k < 3000; k++) begin
      @(negedge clk);
      // the output now belongs to the phase applied CORDIC_LAT clocks ago
      if (k > CORDIC_LAT) begin
        real a, ec, es;
        a  = 2.0 * PI * real'(hist[CORDIC_LAT - 1]) / 4294967296.0;
        ec = 32767.0 * $cos(a);
        es = 32767.0 * $sin(a);
        checks++;
        if ((real'(c) - ec > 4.0) || (ec - real'(c) > 4.0) ||
            (real'(s) - es > 4.0) || (es - real'(s) > 4.0)) begin
          failures++;
          if (failures < 10)
            $display("phase %h: got %0d %0d want %0.1f %0.1f", hist[CORDIC_LAT-1], c, s, ec, es);
        end
      end
      for (int j = CORDIC_LAT; j > 0; j--) hist[j] = hist[j-1];
      case (k % 8)
        0: phase = 32'h0000_0000;
        1: phase = 32'h4000_0000;
        2: phase = 32'h8000_0000;
        3: phase = 32'hC000_0000;
        4: phase = 32'h3FFF_FFFF;
        default: phase = $urandom;
      endcase
      hist[0] = phase;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
