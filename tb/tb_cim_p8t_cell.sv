// tb_cim_p8t_cell: checks the P-8T cell model. Writes 0 and 1 through the word
// line, checks the stored bit, that a write needs wl, and the pull-up truth
// table: the CBL is pulled to VDD only when CWL is low and the cell stores 0.
`timescale 1ps/1ps
module tb_cim_p8t_cell;
  logic clk = 1'b0;
  always #100 clk = ~clk;
  logic wl = 1'b0, bl_wdata = 1'b0, cwl_n = 1'b1;
  logic w, pull_up;
  int checks = 0, failures = 0;

  cim_p8t_cell dut (.*);

  task automatic chk(input string what, input logic got, input logic want);
    checks++;
    if (got !== want) begin failures++; $display("FAIL %s: got %b want %b", what, got, want); end
  endtask

  initial begin
    #100000; failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    for (int i = 0; i < 40; i++) begin
      logic v, c;
      v = 1'($urandom); c = 1'($urandom);
      @(negedge clk); wl = 1'b1; bl_wdata = v;
      @(negedge clk); wl = 1'b0; bl_wdata = ~v;
      chk("stored", w, v);
      @(negedge clk);
      chk("held without wl", w, v);
      cwl_n = c; #1;
      chk("pull_up", pull_up, ~v & ~c);
      cwl_n = 1'b1;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
