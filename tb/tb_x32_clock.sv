// tb_x32_clock: steps a synchrotron phase with random tuning words and checks
// that a tick appears exactly one clock after each crossing of a 1/32-turn
// boundary, and that one full turn yields 32 ticks.
module tb_x32_clock;
  import lmbf_pkg::*;
  logic clk = 0, rst = 1, tick;
  phase_t phase, prev;
  logic want;
  int checks = 0, failures = 0, nticks = 0;

  x32_clock dut (.clk, .rst, .phase_syn_i(phase), .tick_o(tick));

  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    phase = 0; prev = 0; want = 0;
    repeat (3) @(posedge clk);
    @(negedge clk) rst = 0;
    // one exact turn with a fixed word: 2^32 / 2^20 = 4096 clocks
    for (int k = 0; k < 4096 + 4; k++) begin
      @(negedge clk);
      checks++;
      if (tick !== want) failures++;
      if (k >= 2 && k < 4096 + 2 && tick) nticks++;
      prev  = phase;
      phase = phase + 32'h0010_0000;
      want  = (phase[31:27] != prev[31:27]);
    end
    checks++;
    if (nticks != 32) begin
      failures++;
      $display("ticks in one turn: %0d", nticks);
    end
    for (int k = 0; k < 20000; k++) begin
      @(negedge clk);
      checks++;
      if (tick !== want) failures++;
      prev  = phase;
      phase = phase + $urandom_range(0, 32'h07ff_ffff);
      want  = (phase[31:27] != prev[31:27]);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
