// cim_add_shift: add-shift stage that turns the 64 4-bit ADC codes of the
// bit-sliced weight columns into 8 multi-bit partial sums.
//
// Each 8-bit weight is stored bit-sliced over WBITS adjacent columns: column
// WBITS*g + b holds bit b of the weights of output g. The ADC code of that
// column approximates the partial MAC of the 16 inputs with weight bit b, so
//   psum[g] = sum_b s_b * code[WBITS*g + b] * 2^b
// with s_b = -1 for b = WBITS-1 when SIGNED_W (two's complement weights) and
// +1 otherwise. The result is in ADC code units, one code being 8 pMAC steps.
// The sum is registered on en, so psum is valid the tick after en.
// The add-shift function is the paper's; the column order, the signed weight
// option and the output scaling are this design's choices.
module cim_add_shift
  import cim_pkg::*;
#(
  parameter int unsigned N_GROUPS = GROUPS,
  parameter int unsigned N_WBITS  = WBITS,
  parameter bit          SIGNED_W = 1'b1
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  en,
  input  code_t code [N_GROUPS*N_WBITS],
  output psum_t psum [N_GROUPS]
);

  psum_t sum_d [N_GROUPS];

  always_comb begin
    for (int g = 0; g < int'(N_GROUPS); g++) begin
      sum_d[g] = '0;
      for (int b = 0; b < int'(N_WBITS); b++) begin
        if (SIGNED_W && b == int'(N_WBITS) - 1)
          sum_d[g] -= psum_t'(code[g*N_WBITS + b]) <<< b;
        else
          sum_d[g] += psum_t'(code[g*N_WBITS + b]) <<< b;
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int g = 0; g < int'(N_GROUPS); g++) psum[g] <= '0;
    end else if (en) begin
      psum <= sum_d;
    end
  end

endmodule
