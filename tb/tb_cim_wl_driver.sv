// tb_cim_wl_driver: checks that inputs are latched on load only, that X and
// X_REF = 1000b appear only under iact_en, that exactly CWL[row_sel] is low in
// every AMU row only under rwl_en, and that 8-row mode silences rows 8..15
// (reference rows stay driven, with X_REF8 = 0100b).
`timescale 1ps/1ps
module tb_cim_wl_driver;
  import cim_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0;
  always #100 clk = ~clk;
  logic load = 0, rows8 = 0, iact_en = 0, rwl_en = 0;
  x_t x_in [16];
  logic [3:0] row_sel = '0;
  x_t x_amu [16];
  x_t x_ref;
  logic [15:0] cwl_n [16];
  logic [15:0] cwl_ref_n [16];
  int checks = 0, failures = 0;

  cim_wl_driver dut (.*);

  task automatic chk(input string what, input int got, input int want);
    checks++;
    if (got != want) begin failures++; if (failures < 20) $display("FAIL %s: got %0h want %0h", what, got, want); end
  endtask

  initial begin
    #1000000; failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    x_t xs [16];
    int sel;
    bit r8;
    for (int k = 0; k < 16; k++) x_in[k] = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int i = 0; i < 50; i++) begin
      for (int k = 0; k < 16; k++) begin xs[k] = x_t'($urandom); x_in[k] = xs[k]; end
      sel = $urandom_range(15, 0); row_sel = 4'(sel);
      r8 = 1'(i % 2);  rows8 = r8;
      load = 1;
      @(negedge clk); load = 0;
      for (int k = 0; k < 16; k++) x_in[k] = ~xs[k];  // must not be taken
      row_sel = ~row_sel; rows8 = ~r8;
      @(negedge clk);
      for (int k = 0; k < 16; k++) begin
        chk("x idle", x_amu[k], 0);
        chk("cwl idle", cwl_n[k], 16'hffff);
        chk("cwl_ref idle", cwl_ref_n[k], 16'hffff);
      end
      chk("x_ref idle", x_ref, 0);
      iact_en = 1; #1;
      for (int k = 0; k < 16; k++) chk($sformatf("x row %0d", k), x_amu[k], (r8 && k >= 8) ? 0 : xs[k]);
      chk("x_ref", x_ref, r8 ? 4'b0100 : 4'b1000);
      iact_en = 0; rwl_en = 1; #1;
      for (int k = 0; k < 16; k++) begin
        chk($sformatf("cwl row %0d", k), cwl_n[k], (r8 && k >= 8) ? 16'hffff : int'(16'hffff ^ (16'(1) << sel)));
        chk($sformatf("cwl_ref row %0d", k), cwl_ref_n[k], int'(16'hffff ^ (16'(1) << sel)));
      end
      rwl_en = 0;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
