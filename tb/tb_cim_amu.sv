// tb_cim_amu: runs an AMU through the full multiplication sequence for every
// 4-bit input with random weights and checks: after input evaluation the
// LAs of each binary-weighted segment are at 0 or VDD according to their input
// bit (LA[15] always VDD); after eDAC sharing every CBL is at
// V_DAC = (16 - X) VDD/16; after multiplication CBL[j] = 16 - X*W[j]
// where W[j] is the selected cell of LA j.
`timescale 1ps/1ps
module tb_cim_amu;
  import cim_pkg::*;
  logic clk = 1'b0;
  always #100 clk = ~clk;

  x_t x = '0;
  logic pch = 0, dac_eval = 0, e_dac = 0, e_mult_b = 1;
  logic [15:0] cwl_n = '1;
  logic wr_en = 0;
  logic [3:0] wr_cell = '0, rd_cell = '0;
  logic [15:0] wr_data = '0, rd_data;
  lvl_t cbl_lvl [16];
  logic [15:0] wmem [16];
  int checks = 0, failures = 0;

  cim_amu dut (.*);

  task automatic chk(input string what, input int got, input int want);
    checks++;
    if (got != want) begin failures++; if (failures < 20) $display("FAIL %s: got %0d want %0d", what, got, want); end
  endtask
  task automatic step(); @(negedge clk); endtask

  function automatic int seg_bit(input int j);
    return la_xbit(j);
  endfunction

  initial begin
    #5000000; failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    for (int c = 0; c < 16; c++) begin
      wmem[c] = 16'($urandom);
      step(); wr_en = 1; wr_cell = 4'(c); wr_data = wmem[c];
    end
    step(); wr_en = 0;
    for (int c = 0; c < 16; c++) begin rd_cell = 4'(c); #1; chk("read", int'(rd_data), int'(wmem[c])); end

    for (int rep = 0; rep < 3; rep++) begin
      for (int xv = 0; xv < 16; xv++) begin
        int sel;
        sel = $urandom_range(15, 0);
        step(); pch = 1;
        step(); pch = 0;
        x = x_t'(xv); dac_eval = 1;
        step(); step(); dac_eval = 0;
        for (int j = 0; j < 16; j++) begin
          int b;
          b = seg_bit(j);
          chk($sformatf("eval LA%0d x=%0d", j, xv), int'(cbl_lvl[j]), (b >= 0 && xv[b]) ? 0 : 16);
        end
        step();  // segments share among themselves with eDAC low
        for (int j = 0; j < 16; j++) begin
          int b;
          b = seg_bit(j);
          chk($sformatf("segment LA%0d x=%0d", j, xv), int'(cbl_lvl[j]), (b >= 0 && xv[b]) ? 0 : 16);
        end
        e_dac = 1;
        step(); step(); e_dac = 0;
        for (int j = 0; j < 16; j++) chk($sformatf("dac LA%0d x=%0d", j, xv), int'(cbl_lvl[j]), 16 - xv);
        e_mult_b = 0;
        cwl_n = ~(16'(1) << sel);
        step(); cwl_n = '1;
        step();
        for (int j = 0; j < 16; j++)
          chk($sformatf("mult LA%0d x=%0d", j, xv), int'(cbl_lvl[j]), 16 - xv * int'(wmem[sel][j]));
        e_mult_b = 1; x = '0;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
