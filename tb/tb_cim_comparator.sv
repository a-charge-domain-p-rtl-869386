// tb_cim_comparator: checks the strobed comparator: q = (v_in <= v_ref)
// latched on en, held otherwise, cleared by reset.
`timescale 1ps/1ps
module tb_cim_comparator;
  import cim_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0, en = 1'b0;
  always #100 clk = ~clk;
  ablq_t v_in = '0, v_ref = '0;
  logic q;
  int checks = 0, failures = 0;

  cim_comparator dut (.*);

  task automatic chk(input string what, input int got, input int want);
    checks++;
    if (got != want) begin failures++; $display("FAIL %s: got %0d want %0d", what, got, want); end
  endtask

  initial begin
    #1000000; failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    @(negedge clk); chk("reset", q, 0);
    rst_n = 1;
    for (int i = 0; i < 200; i++) begin
      logic want;
      v_in  = ablq_t'($urandom_range(320, 0));
      v_ref = (i % 4 == 0) ? v_in : ablq_t'($urandom_range(320, 0));
      want  = (v_in <= v_ref);
      en = 1;
      @(negedge clk); en = 0;
      chk($sformatf("decide %0d vs %0d", v_in, v_ref), q, want);
      v_in = ~v_ref;
      @(negedge clk); chk("hold", q, want);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
