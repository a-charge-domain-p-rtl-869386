// tb_cim_array: full 256 x 80 array with its phase controls driven directly.
// Writes random weights and the reference pattern, reads rows back, then for
// random inputs, row selects and row masks runs precharge, evaluation, eDAC
// sharing, multiplication and accumulation, and checks every ABL:
// abl_q[col] = 16*(16 + C_ABL) - sum_k X_k * W[16k + sel][col] and
// abl_ref_q[N] = 16*(16 + C_ABL) - 8N with X_REF = 1000b (4N with 0100b).
`timescale 1ps/1ps
module tb_cim_array;
  import cim_pkg::*;
  localparam int FULL = 16 * (16 + 4);
  logic clk = 1'b0;
  always #100 clk = ~clk;
  logic pch = 0, dac_eval = 0, e_dac = 0, e_mult_b = 1, e_acc = 0;
  x_t x_amu [16];
  x_t x_ref = '0;
  logic [15:0] cwl_n [16];
  logic [15:0] cwl_ref_n [16];
  logic sram_we = 0, sram_re = 0;
  logic [7:0] sram_addr = '0;
  logic [79:0] sram_wdata = '0, sram_rdata;
  ablq_t abl_q [64];
  ablq_t abl_ref_q [16];
  logic [79:0] mem [256];
  int checks = 0, failures = 0;

  cim_array dut (.*);

  task automatic chk(input string what, input int got, input int want);
    checks++;
    if (got != want) begin failures++; if (failures < 20) $display("FAIL %s: got %0d want %0d", what, got, want); end
  endtask

  initial begin
    #20000000; failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    x_t xs [16];
    for (int k = 0; k < 16; k++) begin x_amu[k] = '0; cwl_n[k] = '1; cwl_ref_n[k] = '1; end
    for (int r = 0; r < 256; r++) begin
      mem[r][63:0] = {$urandom, $urandom};
      for (int n = 0; n < 16; n++) mem[r][64 + n] = ((r / 16) < n);
      @(negedge clk); sram_we = 1; sram_addr = 8'(r); sram_wdata = mem[r];
    end
    @(negedge clk); sram_we = 0;
    for (int i = 0; i < 20; i++) begin
      int r;
      r = $urandom_range(255, 0);
      sram_re = 1; sram_addr = 8'(r);
      @(negedge clk); sram_re = 0;
      checks++;
      if (sram_rdata != mem[r]) begin failures++; $display("FAIL read row %0d", r); end
    end

    for (int i = 0; i < 20; i++) begin
      int sel;
      logic [15:0] on;
      sel = $urandom_range(15, 0);
      on  = (i % 3 == 0) ? 16'h00ff : 16'hffff;
      for (int k = 0; k < 16; k++) xs[k] = (i == 0) ? 4'd15 : x_t'($urandom);
      @(negedge clk); pch = 1;
      @(negedge clk); pch = 0;
      for (int k = 0; k < 16; k++) x_amu[k] = on[k] ? xs[k] : '0;
      x_ref = (i % 3 == 0) ? 4'b0100 : 4'b1000; dac_eval = 1;
      repeat (2) @(negedge clk);
      dac_eval = 0; x_ref = '0;
      for (int k = 0; k < 16; k++) x_amu[k] = '0;
      e_dac = 1;
      repeat (2) @(negedge clk);
      e_dac = 0; e_mult_b = 0;
      for (int k = 0; k < 16; k++) begin
        cwl_n[k] = on[k] ? ~(16'(1) << sel) : '1;
        cwl_ref_n[k] = ~(16'(1) << sel);
      end
      @(negedge clk);
      for (int k = 0; k < 16; k++) begin cwl_n[k] = '1; cwl_ref_n[k] = '1; end
      e_acc = 1;
      @(negedge clk); e_acc = 0; e_mult_b = 1;
      for (int col = 0; col < 64; col++) begin
        int p;
        p = 0;
        for (int k = 0; k < 16; k++) if (on[k]) p += int'(xs[k]) * int'(mem[16*k + sel][col]);
        chk($sformatf("abl[%0d]", col), int'(abl_q[col]), FULL - p);
      end
      for (int n = 0; n < 16; n++)
        chk($sformatf("abl_ref[%0d]", n), int'(abl_ref_q[n]), FULL - ((i % 3 == 0) ? 4 : 8) * n);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
