// tb_reference_pattern: loads a table, starts the pattern with a given step,
// and checks the entry shown at every clock, the hold at the last entry and
// the restart on a second start pulse.
module tb_reference_pattern;
  import lmbf_pkg::*;
  localparam int D = 4;   // 16-entry table keeps the run short
  logic clk = 0, rst = 1, start = 0, we = 0;
  logic [31:0] step;
  logic [D-1:0] waddr, index;
  iq_t wdata, refo;
  int checks = 0, failures = 0;

  reference_pattern #(.DEPTH_LOG2(D)) dut (.clk, .rst, .start_i(start), .step_i(step),
    .we_i(we), .waddr_i(waddr), .wdata_i(wdata), .ref_o(refo), .index_o(index));

  always #5 clk = ~clk;

  function automatic iq_t content(input int a);
    iq_t v;
    v.i = sample_t'(a * 1000 - 7000);
    v.q = sample_t'(3 - a * 77);
    return v;
  endfunction

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    step = 5;
    repeat (3) @(posedge clk);
    @(negedge clk) rst = 0;
    for (int a = 0; a < (1 << D); a++) begin
      @(negedge clk);
      we = 1; waddr = D'(a); wdata = content(a);
    end
    @(negedge clk) we = 0;
    for (int run = 0; run < 2; run++) begin
      @(negedge clk) start = 1;
      @(negedge clk) start = 0;
      // index e after start: entry e is shown from clock 5e+1 on
      for (int t = 0; t < 5 * (1 << D) + 30; t++) begin
        int e;
        e = t / 5;
        if (e > (1 << D) - 1) e = (1 << D) - 1;
        checks++;
        if (index !== D'(e)) failures++;
        @(negedge clk);
        checks++;
        if (refo !== content(e)) begin
          failures++;
          if (failures < 10) $display("t=%0d index=%0d ref=%h want %h", t, index, refo, content(e));
        end
      end
      step = 3;
      @(negedge clk) step = 5;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
