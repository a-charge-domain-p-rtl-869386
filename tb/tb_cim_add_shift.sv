// tb_cim_add_shift: random and corner-case ADC codes; checks
// psum[g] = sum_b s_b * code[8g+b] * 2^b with s_7 = -1 (two's complement
// weights), registered on en and held otherwise.
`timescale 1ps/1ps
module tb_cim_add_shift;
  import cim_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0, en = 1'b0;
  always #100 clk = ~clk;
  code_t code [64];
  psum_t psum [8];
  int want [8];
  int checks = 0, failures = 0;

  cim_add_shift dut (.*);

  initial begin
    #1000000; failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    for (int c = 0; c < 64; c++) code[c] = '0;
    repeat (2) @(negedge clk);
    for (int g = 0; g < 8; g++) begin
      checks++; if (psum[g] != 0) failures++;
    end
    rst_n = 1;
    for (int i = 0; i < 200; i++) begin
      for (int c = 0; c < 64; c++)
        code[c] = (i == 0) ? 4'd15 : (i == 1 ? ((c % 8 == 7) ? 4'd15 : 4'd0) : code_t'($urandom));
      for (int g = 0; g < 8; g++) begin
        want[g] = 0;
        for (int b = 0; b < 8; b++) want[g] += (b == 7 ? -1 : 1) * int'(code[8*g+b]) * (1 << b);
      end
      en = 1;
      @(negedge clk); en = 0;
      for (int c = 0; c < 64; c++) code[c] = code_t'($urandom);
      @(negedge clk);
      for (int g = 0; g < 8; g++) begin
        checks++;
        if (int'(psum[g]) != want[g]) begin
          failures++;
          if (failures < 20) $display("FAIL psum[%0d]: got %0d want %0d", g, psum[g], want[g]);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
