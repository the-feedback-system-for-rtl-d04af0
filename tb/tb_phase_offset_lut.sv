// tb_phase_offset_lut: loads distinct USB and LSB tables, then reads them
// back through the m*f_s addressing (including the clamp above the last bin)
// and checks the two-clock read latency.
module tb_phase_offset_lut;
  import lmbf_pkg::*;
  logic clk = 0, we = 0;
  phase_t freq;
  logic [2:0] m;
  sideband_e sb, wsb;
  logic [7:0] waddr;
  logic [15:0] wdata, off;
  int checks = 0, failures = 0;

  phase_offset_lut dut (.clk, .freq_syn_i(freq), .m_i(m), .sideband_i(sb),
    .we_i(we), .wsb_i(wsb), .waddr_i(waddr), .wdata_i(wdata), .offset_o(off));

  always #5 clk = ~clk;

  function automatic logic [15:0] content(input int s, input int a);
    return 16'((a * 251 + s * 17011 + 3) & 16'hffff);
  endfunction

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    freq = 0; m = 1; sb = SB_USB;
    for (int s = 0; s < 2; s++)
      for (int a = 0; a < 256; a++) begin
        @(negedge clk);
        we = 1; wsb = sideband_e'(s); waddr = 8'(a); wdata = content(s, a);
      end
    @(negedge clk) we = 0;
    for (int k = 0; k < 2000; k++) begin
      int bin, s;
      freq = $urandom_range(0, 40000);
      m    = 3'($urandom_range(1, 4));
      s    = $urandom_range(0, 1);
      sb   = sideband_e'(s);
      bin  = (int'(freq) * int'(m)) / 128;
      if (bin > 255) bin = 255;
      @(negedge clk);
      @(negedge clk);
      checks++;
      if (off !== content(s, bin)) begin
        failures++;
        if (failures < 10) $display("f=%0d m=%0d s=%0d got %h want %h", freq, m, s, off, content(s, bin));
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
