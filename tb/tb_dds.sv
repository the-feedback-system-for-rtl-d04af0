// tb_dds: drives random tuning words and sync pulses into the DDS and checks
// both phase accumulators and the frequency outputs against a model that
// accumulates the same words (one clock register on the frequency).
module tb_dds;
  import lmbf_pkg::*;
  logic clk = 0, rst = 1, sync = 0;
  phase_t ftw_rev, ftw_syn, freq_rev, phase_rev, freq_syn, phase_syn;
  phase_t m_frev, m_fsyn, m_prev, m_psyn;
  int checks = 0, failures = 0;

  dds dut (.clk, .rst, .sync, .ftw_rev, .ftw_syn, .freq_rev, .phase_rev, .freq_syn, .phase_syn);

  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    ftw_rev = 32'd5607354; ftw_syn = 32'd10000;
    m_frev = 0; m_fsyn = 0; m_prev = 0; m_psyn = 0;
    repeat (3) @(posedge clk);
    @(negedge clk) rst = 0;
    for (int k = 0; k < 2000; k++) begin
      @(posedge clk);
      // model of the registers updated at this edge
      if (!sync) begin
        m_prev = m_prev + m_frev;
        m_psyn = m_psyn + m_fsyn;
      end else begin
        m_prev = 0;
        m_psyn = 0;
      end
      m_frev = ftw_rev;
      m_fsyn = ftw_syn;
      @(negedge clk);
      checks++;
      if (phase_rev !== m_prev || phase_syn !== m_psyn || freq_rev !== m_frev || freq_syn !== m_fsyn) begin
        failures++;
        if (failures < 10) $display("k=%0d got %h %h want %h %h", k, phase_rev, phase_syn, m_prev, m_psyn);
      end
      if (k % 97 == 0) ftw_rev = $urandom;
      if (k % 53 == 0) ftw_syn = $urandom_range(0, 200000);
      sync = (k % 500 == 250);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
