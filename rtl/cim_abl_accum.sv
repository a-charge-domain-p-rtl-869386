// cim_abl_accum: behavioural model of column-wise accumulation on one
// accumulation bit line (ABL).
//
// The ABL is precharged to VDD together with the CBLs. When eACC closes, the
// CBLs of the ROWS local arrays on this column (one per AMU row) share charge
// with the ABL capacitance, so
//   V_ABL = (sum_i C_CBL*V_CBL,i + C_ABL*VDD) / (ROWS*C_CBL + C_ABL).
// The output is the numerator in units of C_CBL*VDD/16 (CBL levels are in
// VDD/16 units), i.e. abl_q = sum_i cbl_lvl[i] + 16*C_ABL_UNITS, held until the
// next precharge. With all CBLs holding 16 - X_i*W_i this is
// abl_q = 16*(ROWS + C_ABL_UNITS) - pMAC. The equation is the paper's; the
// C_ABL value (in units of C_CBL) is not given there and is a parameter.
// The same module builds the ABL_REF lines of the reference column.
module cim_abl_accum
  import cim_pkg::*;
#(
  parameter int unsigned ROWS        = AMU_ROWS,
  parameter int unsigned C_ABL_UNITS = 4
) (
  input  logic  clk,
  input  logic  pch,
  input  logic  e_acc,
  input  lvl_t  cbl_lvl [ROWS],
  output ablq_t abl_q
);

  function automatic ablq_t charge_sum(input lvl_t lv [ROWS]);
    int s;
    s = 16 * int'(C_ABL_UNITS);
    for (int i = 0; i < int'(ROWS); i++) s += int'(lv[i]);
    return ablq_t'(s);
  endfunction

  always_ff @(posedge clk) begin
    if (pch)        abl_q <= ablq_t'(16 * (ROWS + C_ABL_UNITS));
    else if (e_acc) abl_q <= charge_sum(cbl_lvl);
  end

endmodule
