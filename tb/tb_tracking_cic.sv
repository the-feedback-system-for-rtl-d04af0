// tb_tracking_cic: feeds random samples on irregular ticks and compares every
// output with a bit-exact model (two cascaded 32-sample moving sums, floor
// division by 1024). Then checks the frequency response: DC passes with gain
// 1, a tone at the tick rate / 32 (f_s) and at 2 f_s is notched.
module tb_tracking_cic;
  import lmbf_pkg::*;
  logic clk = 0, rst = 1, tick = 0, valid;
  sample_t x, y;
  int checks = 0, failures = 0;
  int xs [$];
  longint s1 [$];
  localparam real PI = 3.14159265358979;

  tracking_cic dut (.clk, .rst, .tick_i(tick), .x_i(x), .y_o(y), .valid_o(valid));

  always #5 clk = ~clk;

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // one tick with sample v; returns the filter output
  task automatic push(input int v, output int yo);
    @(negedge clk);
    x = sample_t'(v); tick = 1;
    @(negedge clk);
    tick = 0;
    yo = y;
    repeat ($urandom_range(0, 3)) @(negedge clk);
  endtask

  function automatic int model(input int v);
    longint a, b;
    xs.push_front(v);
    if (xs.size() > 32) void'(xs.pop_back());
    a = 0;
    foreach (xs[k]) a += xs[k];
    s1.push_front(a);
    if (s1.size() > 32) void'(s1.pop_back());
    b = 0;
    foreach (s1[k]) b += s1[k];
    return int'(b >>> 10);
  endfunction

  initial begin
    int yo, want, peak;
    x = 0;
    repeat (3) @(posedge clk);
    @(negedge clk) rst = 0;
    // bit-exact against the model, random full-range input
    for (int k = 0; k < 600; k++) begin
      int v;
      v = $urandom_range(0, 65535) - 32768;
      push(v, yo);
      want = model(v);
      checks++;
      if (yo != want) begin
        failures++;
        if (failures < 10) $display("k=%0d got %0d want %0d", k, yo, want);
      end
    end
    // DC gain
    for (int k = 0; k < 70; k++) push(12000, yo);
    checks++;
    if (yo != 12000) begin failures++; $display("DC gain: %0d", yo); end
    // notches at f_s and 2 f_s (32 and 16 ticks per period)
    for (int n = 1; n <= 2; n++) begin
      peak = 0;
      for (int k = 0; k < 200; k++) begin
        push(int'(20000.0 * $sin(2.0 * PI * real'(n * k) / 32.0)), yo);
        if (k > 70 && (yo > peak || -yo > peak)) peak = (yo > 0) ? yo : -yo;
      end
      checks++;
      if (peak > 2) begin failures++; $display("notch %0d f_s: residue %0d", n, peak); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
