// tb_fb_sum: random inputs and enables into the six-input sum; checks the
// registered total, its saturation to 16 bits and the saturation flag.
module tb_fb_sum;
  import lmbf_pkg::*;
  logic clk = 0, rst = 1, sat;
  sample_t x [N_HARM];
  logic [N_HARM-1:0] en;
  sample_t s;
  int checks = 0, failures = 0, nsat = 0;

  fb_sum dut (.clk, .rst, .x_i(x), .en_i(en), .sum_o(s), .sat_o(sat));

  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int tot, want;
    foreach (x[k]) x[k] = 0;
    en = 0;
    repeat (3) @(posedge clk);
    @(negedge clk) rst = 0;
    for (int n = 0; n < 5000; n++) begin
      tot = 0;
      for (int k = 0; k < N_HARM; k++) begin
        x[k] = sample_t'((n < 2500) ? ($urandom_range(0, 20000) - 10000) : $urandom);
        en[k] = $urandom_range(0, 1);
        if (en[k]) tot += x[k];
      end
      want = tot > 32767 ? 32767 : (tot < -32768 ? -32768 : tot);
      @(negedge clk);
      checks++;
      if (s !== sample_t'(want) || sat !== (want != tot)) begin
        failures++;
        if (failures < 10) $display("got %0d want %0d", s, want);
      end
      if (sat) nsat++;
    end
    checks++;
    if (nsat == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
