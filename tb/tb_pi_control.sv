// tb_pi_control: random references, measurements and gains against an
// integer model of the PI law (error = reference - measured, output
// (kp e + acc)/256 saturated, integrator clamped), plus the open-loop
// pass-through and a long constant error that must saturate the output.
module tb_pi_control;
  import lmbf_pkg::*;
  logic clk = 0, rst = 1, valid = 0, fb_en = 0, vout;
  sample_t meas, refv, u;
  logic signed [15:0] kp, ki;
  longint acc;
  int checks = 0, failures = 0;

  pi_control dut (.clk, .rst, .valid_i(valid), .meas_i(meas), .ref_i(refv),
    .fb_enable_i(fb_en), .kp_i(kp), .ki_i(ki), .u_o(u), .valid_o(vout));

  always #5 clk = ~clk;

  function automatic int sat(input longint v);
    if (v > 32767) return 32767;
    if (v < -32768) return -32768;
    return int'(v);
  endfunction

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    longint e, lim, want;
    lim = 32767 * 256;
    meas = 0; refv = 0; kp = 0; ki = 0; acc = 0;
    repeat (3) @(posedge clk);
    @(negedge clk) rst = 0;
    // open loop: output follows the reference
    for (int k = 0; k < 50; k++) begin
      refv = sample_t'($urandom); meas = sample_t'($urandom);
      @(negedge clk);
      checks++;
      if (u !== refv) failures++;
    end
    fb_en = 1; acc = 0;
    for (int k = 0; k < 3000; k++) begin
      if (k % 500 == 0) begin kp = sample_t'($urandom_range(0, 1024)); ki = sample_t'($urandom_range(0, 64)); end
      refv = sample_t'($urandom_range(0, 4000) - 2000);
      meas = sample_t'($urandom_range(0, 4000) - 2000);
      valid = 1;
      e = longint'(refv) - longint'(meas);
      want = sat((longint'(kp) * e + acc) >>> 8);
      acc = acc + longint'(ki) * e;
      if (acc > lim) acc = lim;
      if (acc < -lim) acc = -lim;
      @(negedge clk);
      valid = 0;
      checks++;
      if (u !== sample_t'(want) || vout !== 1'b1) begin
        failures++;
        if (failures < 10) $display("k=%0d got %0d want %0d", k, u, want);
      end
      if (k % 7 == 0) begin
        // no update without valid
        refv = 100; meas = -100;
        @(negedge clk);
        checks++;
        if (u !== sample_t'(want) || vout !== 1'b0) failures++;
      end
    end
    // integral action on a constant error ends in saturation
    kp = 0; ki = 256; refv = 1000; meas = 0; valid = 1;
    repeat (100) @(negedge clk);
    checks++;
    if (u !== 16'sh7fff) begin failures++; $display("no saturation: %0d", u); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
