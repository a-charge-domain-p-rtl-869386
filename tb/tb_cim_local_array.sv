// tb_cim_local_array: drives one local array through precharge, input
// evaluation, sharing and multiplication, and checks the CBL level after each
// step: VDD after precharge, 0 after N0 evaluates a 1, the shared level after
// eDAC sharing, and after multiplication VDD where the selected cell stores 0
// and the DAC level where it stores 1. Also checks normal-mode write/read and
// the PG_DAC switch of a type B instance.
`timescale 1ps/1ps
module tb_cim_local_array;
  import cim_pkg::*;
  logic clk = 1'b0;
  always #100 clk = ~clk;

  logic pch = 0, dac_eval = 0, x_bit = 0, e_mult_b = 1, e_dac = 0, share_en = 0;
  lvl_t share_lvl = '0;
  logic [15:0] cwl_n = '1;
  logic wr_en = 0, wr_bit = 0;
  logic [3:0] wr_cell = '0, rd_cell = '0;
  logic rd_bit, pg_dac_on, pg_b;
  lvl_t cbl_lvl, cbl_b;
  logic [15:0] wmem;
  int checks = 0, failures = 0;

  cim_local_array #(.PERI_TYPE_B(1'b0)) dut (.*);
  cim_local_array #(.PERI_TYPE_B(1'b1)) dut_b (
    .clk, .pch, .dac_eval, .x_bit, .e_mult_b, .e_dac, .pg_dac_on(pg_b), .share_en,
    .share_lvl, .cwl_n, .wr_en, .wr_cell, .wr_bit, .rd_cell, .rd_bit(), .cbl_lvl(cbl_b));

  task automatic chk(input string what, input int got, input int want);
    checks++;
    if (got != want) begin failures++; $display("FAIL %s: got %0d want %0d", what, got, want); end
  endtask

  task automatic step(); @(negedge clk); endtask

  initial begin
    #1000000; failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    // Write and read back all cells.
    for (int c = 0; c < 16; c++) begin
      wmem[c] = 1'($urandom);
      step(); wr_en = 1; wr_cell = 4'(c); wr_bit = wmem[c];
    end
    step(); wr_en = 0;
    for (int c = 0; c < 16; c++) begin rd_cell = 4'(c); #1; chk("read", rd_bit, wmem[c]); end

    for (int i = 0; i < 60; i++) begin
      int xb, lvl, sel;
      xb  = $urandom_range(1, 0);
      lvl = $urandom_range(16, 0);
      sel = $urandom_range(15, 0);
      step(); pch = 1;
      step(); pch = 0; chk("precharge", cbl_lvl, 16);
      dac_eval = 1; x_bit = 1'(xb);
      step(); dac_eval = 0; x_bit = 0; chk("eval", cbl_lvl, xb ? 0 : 16);
      e_dac = 1; share_en = 1; share_lvl = lvl_t'(lvl); #1;
      chk("pg_dac type A", pg_dac_on, 0);
      chk("pg_dac type B", pg_b, 1);
      step(); e_dac = 0; share_en = 0; chk("share", cbl_lvl, lvl);
      e_mult_b = 0;
      step(); chk("disconnected, no CWL", cbl_lvl, lvl);
      share_en = 1; share_lvl = 5'd3;  // ignored while eMULTb is low
      cwl_n = ~(16'(1) << sel);
      step(); cwl_n = '1; share_en = 0;
      chk("mult", cbl_lvl, wmem[sel] ? lvl : 16);
      e_mult_b = 1;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
