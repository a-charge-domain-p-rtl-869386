// tb_cim_abl_accum: checks column accumulation. After precharge the ABL holds
// 16*(16 + C_ABL) (all at VDD); after eACC it holds sum(CBL) + 16*C_ABL,
// which is kept until the next precharge or eACC.
`timescale 1ps/1ps
module tb_cim_abl_accum;
  import cim_pkg::*;
  logic clk = 1'b0;
  always #100 clk = ~clk;
  logic pch = 0, e_acc = 0;
  lvl_t cbl_lvl [16];
  ablq_t abl_q;
  int checks = 0, failures = 0;

  cim_abl_accum #(.ROWS(16), .C_ABL_UNITS(4)) dut (.*);

  task automatic chk(input string what, input int got, input int want);
    checks++;
    if (got != want) begin failures++; $display("FAIL %s: got %0d want %0d", what, got, want); end
  endtask

  initial begin
    #1000000; failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    for (int i = 0; i < 100; i++) begin
      int s;
      s = 0;
      for (int k = 0; k < 16; k++) begin
        cbl_lvl[k] = lvl_t'(i == 0 ? 0 : (i == 1 ? 16 : $urandom_range(16, 0)));
        s += int'(cbl_lvl[k]);
      end
      @(negedge clk); pch = 1;
      @(negedge clk); pch = 0; chk("precharge", abl_q, 16 * 20);
      e_acc = 1;
      @(negedge clk); e_acc = 0; chk("accumulate", abl_q, s + 64);
      for (int k = 0; k < 16; k++) cbl_lvl[k] = 5'd7;
      @(negedge clk); chk("hold", abl_q, s + 64);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
