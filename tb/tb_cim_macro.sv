// tb_cim_macro: end-to-end test of the full-size CIM macro (default
// parameters).
//
// The bench writes random 8-bit weights (bit-sliced over the 64 pMAC columns)
// into all 256 rows, the reference pattern into columns 64..79, reads rows back
// in normal SRAM mode, then runs CIM operations with random and corner-case
// inputs: single operations (latency 23 ticks) and a back-to-back burst
// (one result every 22 ticks), with 16 and with 8 activated rows. For each
// operation it computes, from its own copy of the weights,
//   pMAC[col] = sum_k X_k * W[16k + row_sel][col],
//   code[col] = min(pMAC/step, 15), psum[g] = sum_b (+/-) code[8g+b] << b,
// with step = 8 for 16 rows and 4 for 8 rows, and compares codes and partial
// sums. It counts how often each mechanism occurs: coarse MSB 0 and 1,
// clipping (pMAC >= 128 with 16 rows, >= 64 with 8 rows), 8-row mode,
// back-to-back issue and SRAM read-back.
`timescale 1ps/1ps
module tb_cim_macro;
  import cim_pkg::*;

  localparam int TICK = 200;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #(TICK/2) clk = ~clk;

  logic                          start = 1'b0;
  logic                          ready;
  x_t                            x_in [AMU_ROWS];
  logic [3:0]                    row_sel = '0;
  logic                          rows8 = 1'b0;
  logic                          sram_we = 1'b0, sram_re = 1'b0;
  logic [7:0]                    sram_addr = '0;
  logic [ARRAY_COLS-1:0]         sram_wdata = '0;
  logic [ARRAY_COLS-1:0]         sram_rdata;
  code_t                         adc_code [MAC_COLS];
  logic                          psum_valid;
  psum_t                         psum [GROUPS];
  phase_e                        phase;

  cim_macro dut (.*);

  int checks = 0, failures = 0;
  int n_msb0 = 0, n_msb1 = 0, n_clip = 0, n_clip8 = 0, n_rows8 = 0, n_b2b = 0, n_rdback = 0;
  int unsigned tick = 0;
  always @(posedge clk) tick <= tick + 1;

  logic [ARRAY_COLS-1:0] mem [ARRAY_ROWS];

  // Expected results, queued at issue.
  typedef struct {
    int          pmac [MAC_COLS];
    int          code [MAC_COLS];
    int          psum [GROUPS];
    bit          r8;
    int unsigned t_issue;
  } exp_t;
  exp_t q [$];
  int unsigned last_valid = 0;
  int          n_results = 0;

  function automatic exp_t model(input x_t xv [AMU_ROWS], input int sel, input bit r8);
    exp_t e;
    int step;
    step = r8 ? 4 : 8;
    e.r8 = r8;
    for (int col = 0; col < MAC_COLS; col++) begin
      e.pmac[col] = 0;
      for (int k = 0; k < AMU_ROWS; k++)
        if (!r8 || k < 8) e.pmac[col] += int'(xv[k]) * int'(mem[16*k + sel][col]);
      e.code[col] = (e.pmac[col] / step > 15) ? 15 : e.pmac[col] / step;
    end
    for (int g = 0; g < GROUPS; g++) begin
      e.psum[g] = 0;
      for (int b = 0; b < WBITS; b++)
        e.psum[g] += (b == WBITS-1 ? -1 : 1) * (e.code[8*g + b] << b);
    end
    return e;
  endfunction

  task automatic check(input string what, input int got, input int want);
    checks++;
    if (got != want) begin
      failures++;
      if (failures < 20) $display("FAIL %s: got %0d want %0d", what, got, want);
    end
  endtask

  // Result monitor.
  always @(negedge clk) begin
    if (rst_n && psum_valid) begin
      exp_t e;
      if (q.size() == 0) begin
        checks++; failures++;
        if (failures < 20) $display("FAIL: unexpected psum_valid");
      end else begin
        e = q.pop_front();
        for (int col = 0; col < MAC_COLS; col++) begin
          check($sformatf("code[%0d] pmac=%0d", col, e.pmac[col]), int'(adc_code[col]), e.code[col]);
          if (e.pmac[col] >= (e.r8 ? 32 : 64)) n_msb1++; else n_msb0++;
          if (e.pmac[col] >= (e.r8 ? 64 : 128)) begin
            if (e.r8) n_clip8++; else n_clip++;
          end
        end
        for (int g = 0; g < GROUPS; g++) check($sformatf("psum[%0d]", g), int'(psum[g]), e.psum[g]);
        check("latency", int'(tick - e.t_issue), 23);
        if (n_results > 0 && tick - last_valid == 22) n_b2b++;
        last_valid = tick;
        n_results++;
      end
    end
  end

  // Issue one operation; returns at the negedge after acceptance.
  task automatic issue(input x_t xv [AMU_ROWS], input int sel, input bit r8, input bit keep_start);
    exp_t e;
    x_in    = xv;
    row_sel = 4'(sel);
    rows8   = r8;
    start   = 1'b1;
    @(posedge clk);
    while (!ready) @(posedge clk);
    e = model(xv, sel, r8);
    e.t_issue = tick + 1;  // tick increments on this edge
    q.push_back(e);
    if (r8) n_rows8++;
    @(negedge clk);
    if (!keep_start) start = 1'b0;
  endtask

  task automatic rand_x(output x_t xv [AMU_ROWS], input int maxv);
    for (int k = 0; k < AMU_ROWS; k++) xv[k] = x_t'($urandom_range(maxv, 0));
  endtask

  initial begin
    #(TICK * 400000);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    x_t xv [AMU_ROWS];
    for (int k = 0; k < AMU_ROWS; k++) x_in[k] = '0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;

    // Weights: random, with rows 0 of each AMU dense in the first group so that
    // pMAC reaches the clipping region; reference pattern in columns 64..79.
    for (int r = 0; r < ARRAY_ROWS; r++) begin
      for (int col = 0; col < MAC_COLS; col++) begin
        if ((r % 16) == 0 && col < 8)      mem[r][col] = 1'b1;
        else if ((r % 16) == 1)            mem[r][col] = ($urandom_range(3, 0) != 0);
        else                               mem[r][col] = 1'($urandom);
      end
      for (int n = 0; n < REF_COLS; n++) mem[r][MAC_COLS + n] = ((r / 16) < n);
      @(negedge clk);
      sram_we = 1'b1; sram_addr = 8'(r); sram_wdata = mem[r];
    end
    @(negedge clk); sram_we = 1'b0;

    // Normal SRAM mode read-back.
    for (int i = 0; i < 16; i++) begin
      int r;
      r = (i == 0) ? 0 : (i == 1 ? 255 : int'($urandom_range(255, 0)));
      sram_re = 1'b1; sram_addr = 8'(r);
      @(negedge clk);
      sram_re = 1'b0;
      checks++;
      if (sram_rdata !== mem[r]) begin failures++; $display("FAIL read row %0d", r); end
      else n_rdback++;
    end

    // Corner cases, one at a time.
    for (int k = 0; k < AMU_ROWS; k++) xv[k] = '0;
    issue(xv, 2, 1'b0, 1'b0);                       // all zero inputs
    for (int k = 0; k < AMU_ROWS; k++) xv[k] = 4'd15;
    issue(xv, 0, 1'b0, 1'b0);                       // full scale: clipping
    issue(xv, 0, 1'b1, 1'b0);                       // 8 rows
    for (int k = 0; k < AMU_ROWS; k++) xv[k] = 4'd8;
    issue(xv, 0, 1'b0, 1'b0);                       // pMAC exactly 128 / 64 steps
    repeat (30) @(negedge clk);

    // Random single operations over all row selects.
    for (int i = 0; i < 16; i++) begin
      rand_x(xv, 15);
      issue(xv, i, 1'($urandom_range(3, 0) == 0), 1'b0);
      repeat ($urandom_range(30, 0)) @(negedge clk);
    end

    // Back-to-back burst.
    for (int i = 0; i < 12; i++) begin
      rand_x(xv, 15);
      issue(xv, int'($urandom_range(15, 0)), 1'(i % 3 == 2), i != 11);
    end

    while (q.size() != 0) @(negedge clk);
    repeat (5) @(negedge clk);

    $display("mechanisms: msb0=%0d msb1=%0d clip16=%0d clip8=%0d rows8=%0d back_to_back=%0d sram_readback=%0d",
             n_msb0, n_msb1, n_clip, n_clip8, n_rows8, n_b2b, n_rdback);
    checks += 7;
    if (n_clip8 == 0) begin failures++; $display("FAIL: 8-row clipping never seen"); end
    if (n_msb0 == 0) begin failures++; $display("FAIL: coarse MSB 0 never seen"); end
    if (n_msb1 == 0) begin failures++; $display("FAIL: coarse MSB 1 never seen"); end
    if (n_clip == 0) begin failures++; $display("FAIL: clipping never seen"); end
    if (n_rows8 == 0) begin failures++; $display("FAIL: 8-row mode never used"); end
    if (n_b2b == 0) begin failures++; $display("FAIL: back-to-back issue never seen"); end
    if (n_rdback == 0) begin failures++; $display("FAIL: SRAM read-back never done"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
