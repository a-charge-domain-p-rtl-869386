// tb_cim_cf_flash_adc: feeds the ADC with the 16 reference levels
// ABL_REF[N] = 16*(16 + C_ABL) - 8N and every ABL level for pMAC = 0..240,
// strobes coarse then fine, and checks code = min(floor(pMAC/8), 15)
// (MSB from the coarse comparator against ABL_REF[8], LSBs from the 7 fine
// comparators on the selected half of the references).
`timescale 1ps/1ps
module tb_cim_cf_flash_adc;
  import cim_pkg::*;
  localparam int FULL = 16 * (16 + 4);
  logic clk = 1'b0, rst_n = 1'b0, coarse_en = 1'b0, fine_en = 1'b0;
  always #100 clk = ~clk;
  ablq_t abl_q = '0;
  ablq_t ref_q [16];
  code_t code;
  int checks = 0, failures = 0, n_clip = 0, n_msb1 = 0;

  cim_cf_flash_adc dut (.*);

  task automatic chk(input string what, input int got, input int want);
    checks++;
    if (got != want) begin failures++; if (failures < 20) $display("FAIL %s: got %0d want %0d", what, got, want); end
  endtask

  initial begin
    #10000000; failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    for (int n = 0; n < 16; n++) ref_q[n] = ablq_t'(FULL - 8 * n);
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int p = 0; p <= 240; p++) begin
      int want;
      abl_q = ablq_t'(FULL - p);
      coarse_en = 1;
      repeat (2) @(negedge clk);
      coarse_en = 0; fine_en = 1;
      repeat (2) @(negedge clk);
      fine_en = 0;
      want = (p / 8 > 15) ? 15 : p / 8;
      if (p >= 128) n_clip++;
      if (want >= 8) n_msb1++;
      chk($sformatf("code pmac=%0d", p), int'(code), want);
      abl_q = '0;  // later ABL changes do not disturb the held code
      @(negedge clk);
      chk("hold", int'(code), want);
    end
    checks++;
    if (n_clip == 0 || n_msb1 == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
