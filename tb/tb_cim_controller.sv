// tb_cim_controller: records the control outputs tick by tick and checks the
// phase order and lengths (5, 4, 4, 1, 1, 3, 4 ticks = 22 ticks = 4.4 ns at a
// 200 ps tick), the one-hot phase controls, eMULTb low exactly in MULT and
// ACC, the add-shift strobe one tick after FINE, ready/load, an idle gap, and
// back-to-back operations every 22 ticks.
`timescale 1ps/1ps
module tb_cim_controller;
  import cim_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0, start = 1'b0;
  always #100 clk = ~clk;
  logic ready, load, pch, iact_en, e_dac, e_mult_b, rwl_en, e_acc, coarse_en, fine_en, addshift_en;
  phase_e phase;
  int checks = 0, failures = 0;

  cim_controller dut (.*);

  task automatic chk(input string what, input int got, input int want);
    checks++;
    if (got != want) begin failures++; if (failures < 20) $display("FAIL %s: got %0d want %0d", what, got, want); end
  endtask

  // Expected phase of tick t (0..21) after an accepted start.
  function automatic phase_e exp_phase(input int t);
    if (t < 5)  return PH_PCH;
    if (t < 9)  return PH_DAC_EVAL;
    if (t < 13) return PH_DAC_SHARE;
    if (t < 14) return PH_MULT;
    if (t < 15) return PH_ACC;
    if (t < 18) return PH_COARSE;
    return PH_FINE;
  endfunction

  task automatic check_op(input bool_next);
    for (int t = 0; t < 22; t++) begin
      phase_e p;
      p = exp_phase(t);
      chk($sformatf("phase t=%0d", t), int'(phase), int'(p));
      chk("pch", pch, p == PH_PCH);
      chk("iact_en", iact_en, p == PH_DAC_EVAL);
      chk("e_dac", e_dac, p == PH_DAC_SHARE);
      chk("e_mult_b", e_mult_b, !(p == PH_MULT || p == PH_ACC));
      chk("rwl_en", rwl_en, p == PH_MULT);
      chk("e_acc", e_acc, p == PH_ACC);
      chk("coarse_en", coarse_en, p == PH_COARSE);
      chk("fine_en", fine_en, p == PH_FINE);
      chk("ready", ready, t == 21);
      chk("addshift_en", addshift_en, t == 0 && bool_next);
      @(negedge clk);
    end
  endtask

  initial begin
    #1000000; failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    repeat (2) @(negedge clk);
    chk("reset idle", int'(phase), int'(PH_IDLE));
    rst_n = 1;
    repeat (3) @(negedge clk);
    chk("idle stays", int'(phase), int'(PH_IDLE));
    chk("idle ready", ready, 1);
    start = 1; #1;
    chk("load", load, 1);
    @(negedge clk); start = 0;
    check_op(1'b0);
    // After FINE with no start: add-shift strobe, then idle.
    chk("addshift after fine", addshift_en, 1);
    chk("back to idle", int'(phase), int'(PH_IDLE));
    @(negedge clk);
    chk("addshift one tick", addshift_en, 0);
    // Three back-to-back operations: start held high.
    start = 1;
    @(negedge clk);
    check_op(1'b0);
    check_op(1'b1);
    start = 0;
    check_op(1'b1);
    chk("final addshift", addshift_en, 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
