// tb_cim_resnet20_tile: runs a tile of a ResNet-20 style 3x3 convolution
// layer on the full-size macro, in 16-row and in 8-row mode.
//
// Mapping: input channel k drives AMU row k; the weights of kernel tap t
// (t = 0..8) sit in cell row t of every local array; output channel g uses the
// 8 bit-slice columns 8g..8g+7 (two's complement int8 weights). One output
// pixel takes 9 operations (one per tap, row_sel = t), and the bench adds the
// 9 partial sums of each output channel. Activations are unsigned 4-bit
// (post-ReLU) on a 4x4 feature map, giving 2x2 output pixels. Weights and
// activations are synthetic random values skewed towards small magnitudes.
// The bench checks each accumulated output against its own model of the macro
// (per-column code = min(pMAC/step, 15) with step 8 for 16 rows and 4 for
// 8 rows, then add-shift) and reports how far the quantised result (times the
// step) lies from the exact convolution.
`timescale 1ps/1ps
module tb_cim_resnet20_tile;
  import cim_pkg::*;

  localparam int TICK = 200;
  localparam int H = 4, OUT = 2, TAPS = 9;

  logic clk = 1'b0, rst_n = 1'b0;
  always #(TICK/2) clk = ~clk;

  logic start = 1'b0, ready, rows8 = 1'b0, sram_we = 1'b0, sram_re = 1'b0;
  x_t x_in [AMU_ROWS];
  logic [3:0] row_sel = '0;
  logic [7:0] sram_addr = '0;
  logic [ARRAY_COLS-1:0] sram_wdata = '0, sram_rdata;
  code_t adc_code [MAC_COLS];
  logic psum_valid;
  psum_t psum [GROUPS];
  phase_e phase;

  cim_macro dut (.*);

  int checks = 0, failures = 0;
  int wt [GROUPS][AMU_ROWS][TAPS];   // int8 weights
  int act [AMU_ROWS][H][H];          // 4-bit activations
  logic [ARRAY_COLS-1:0] mem [ARRAY_ROWS];

  initial begin
    #(TICK * 200000); failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  // Sum of two uniform values: concentrated around 0, range -42..42.
  function automatic int small_signed();
    return int'($urandom_range(42, 0)) + int'($urandom_range(42, 0)) - 42;
  endfunction

  task automatic run_op(input int t, input bit r8, input int oy, input int ox, output int ps [GROUPS]);
    for (int k = 0; k < AMU_ROWS; k++) x_in[k] = x_t'(act[k][oy + t / 3][ox + t % 3]);
    row_sel = 4'(t); rows8 = r8; start = 1'b1;
    @(posedge clk);
    while (!ready) @(posedge clk);
    @(negedge clk); start = 1'b0;
    while (!psum_valid) @(negedge clk);
    for (int g = 0; g < GROUPS; g++) ps[g] = int'(psum[g]);
  endtask

  initial begin
    int ps [GROUPS];
    int acc [GROUPS], want [GROUPS], exact [GROUPS];
    int err_sum, err_max, n_out, n_clip;
    for (int k = 0; k < AMU_ROWS; k++) x_in[k] = '0;
    for (int g = 0; g < GROUPS; g++)
      for (int k = 0; k < AMU_ROWS; k++)
        for (int t = 0; t < TAPS; t++) wt[g][k][t] = small_signed();
    for (int k = 0; k < AMU_ROWS; k++)
      for (int y = 0; y < H; y++)
        for (int x = 0; x < H; x++)
          act[k][y][x] = ($urandom_range(2, 0) == 0) ? 0 : int'($urandom_range(15, 0)) >> $urandom_range(2, 0);
    for (int r = 0; r < ARRAY_ROWS; r++) begin
      int k, t;
      k = r / 16; t = r % 16;
      for (int g = 0; g < GROUPS; g++)
        for (int b = 0; b < WBITS; b++)
          mem[r][8*g + b] = (t < TAPS) ? 1'((wt[g][k][t] >>> b) & 1) : 1'b0;
      for (int n = 0; n < REF_COLS; n++) mem[r][MAC_COLS + n] = (k < n);
    end
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    for (int r = 0; r < ARRAY_ROWS; r++) begin
      sram_we = 1'b1; sram_addr = 8'(r); sram_wdata = mem[r];
      @(negedge clk);
    end
    sram_we = 1'b0;

    for (int mode = 0; mode < 2; mode++) begin
      bit r8;
      r8 = (mode == 1);
      err_sum = 0; err_max = 0; n_out = 0; n_clip = 0;
      for (int oy = 0; oy < OUT; oy++) begin
        for (int ox = 0; ox < OUT; ox++) begin
          for (int g = 0; g < GROUPS; g++) begin acc[g] = 0; want[g] = 0; exact[g] = 0; end
          for (int t = 0; t < TAPS; t++) begin
            run_op(t, r8, oy, ox, ps);
            for (int g = 0; g < GROUPS; g++) begin
              acc[g] += ps[g];
              for (int b = 0; b < WBITS; b++) begin
                int p, c;
                p = 0;
                for (int k = 0; k < (r8 ? 8 : 16); k++)
                  p += act[k][oy + t / 3][ox + t % 3] * int'(mem[16*k + t][8*g + b]);
                if (p >= (r8 ? 64 : 128)) n_clip++;
                c = (p / (r8 ? 4 : 8) > 15) ? 15 : p / (r8 ? 4 : 8);
                want[g] += (b == 7 ? -1 : 1) * (c << b);
              end
              for (int k = 0; k < (r8 ? 8 : 16); k++)
                exact[g] += act[k][oy + t / 3][ox + t % 3] * wt[g][k][t];
            end
          end
          for (int g = 0; g < GROUPS; g++) begin
            int e;
            checks++;
            if (acc[g] != want[g]) begin
              failures++;
              $display("FAIL out(%0d,%0d) ch%0d rows%0d: got %0d want %0d", oy, ox, g, r8 ? 8 : 16, acc[g], want[g]);
            end
            e = exact[g] - (r8 ? 4 : 8) * acc[g];
            if (e < 0) e = -e;
            err_sum += e; if (e > err_max) err_max = e; n_out++;
          end
        end
      end
      $display("rows=%0d outputs=%0d mean|exact-step*cim|=%0d max=%0d clipped_columns=%0d",
               r8 ? 8 : 16, n_out, err_sum / n_out, err_max, n_clip);
      checks++;
      if (n_out != OUT * OUT * GROUPS) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
