// cim_amu: behavioural model of the analog multiplication unit (AMU).
//
// An AMU is LAS = 16 local arrays side by side. Their internal bit lines form
// binary-weighted segments: LA[0..7] (iBL[3], driven by X[3]), LA[8..11]
// (iBL[2], X[2]), LA[12..13] (iBL[1], X[1]), LA[14] (iBL[0], X[0]) and LA[15],
// which has no input and always stays precharged. Type B peripheral circuits at
// LA 7, 11, 13 and 14 separate the segments and join them when eDAC is high.
//
// Operation (one CIM cycle, driven by the controller):
//   1. pch: every CBL and iBL is precharged to VDD.
//   2. dac_eval: each segment whose input bit is 1 is discharged by its N0s.
//   3. e_dac: all 16 CBLs share charge, so every CBL sits at
//      V_DAC = (16 - X) * VDD/16 (16 - X charged capacitors out of 16).
//   4. e_mult_b low, one CWL low: each LA keeps V_DAC if its selected cell
//      stores 1, or is pulled to VDD if it stores 0, giving 16 - X*W[j].
// The same module, driven with X = 1000b, is an AMU_REF unit.
//
// Charge sharing is evaluated every tick while e_mult_b is high and neither
// pch nor dac_eval is active: each group of LAs connected through iBL and
// closed PG_DAC switches takes the mean of its levels. The LA-to-bit mapping and
// the segment structure follow the paper; the integer tick model is our own.
//
// Normal SRAM mode: wr_en writes wr_data[j] into cell wr_cell of LA j;
// rd_data[j] is cell rd_cell of LA j.
module cim_amu
  import cim_pkg::*;
(
  input  logic                    clk,
  input  x_t                      x,
  input  logic                    pch,
  input  logic                    dac_eval,
  input  logic                    e_dac,
  input  logic                    e_mult_b,
  input  logic [CELLS-1:0]        cwl_n,
  input  logic                    wr_en,
  input  logic [$clog2(CELLS)-1:0] wr_cell,
  input  logic [LAS-1:0]          wr_data,
  input  logic [$clog2(CELLS)-1:0] rd_cell,
  output logic [LAS-1:0]          rd_data,
  output lvl_t                    cbl_lvl [LAS]
);

  logic [LAS-1:0] pg_dac_on;
  lvl_t           share_lvl [LAS];
  logic           share_en;

  // join[j]: iBL of LA j is connected to iBL of LA j+1.
  logic [LAS-2:0] join_next;

  assign share_en = e_mult_b & ~pch & ~dac_eval;

  for (genvar j = 0; j < LAS; j++) begin : g_la
    localparam int XB = la_xbit(j);
    cim_local_array #(
      .N_CELLS    (CELLS),
      .PERI_TYPE_B(TYPE_B_MASK[j]),
      .HAS_N0     (XB >= 0)
    ) u_la (
      .clk      (clk),
      .pch      (pch),
      .dac_eval (dac_eval),
      .x_bit    ((XB >= 0) ? x[(XB >= 0) ? XB : 0] : 1'b0),
      .e_mult_b (e_mult_b),
      .e_dac    (e_dac),
      .pg_dac_on(pg_dac_on[j]),
      .share_en (share_en),
      .share_lvl(share_lvl[j]),
      .cwl_n    (cwl_n),
      .wr_en    (wr_en),
      .wr_cell  (wr_cell),
      .wr_bit   (wr_data[j]),
      .rd_cell  (rd_cell),
      .rd_bit   (rd_data[j]),
      .cbl_lvl  (cbl_lvl[j])
    );
    if (j < LAS - 1) begin : g_join
      // A type A peripheral passes iBL straight on; a type B one only through
      // its closed PG_DAC switch.
      assign join_next[j] = ~TYPE_B_MASK[j] | pg_dac_on[j];
    end
  end

  // Mean level of each connected group of iBL segments. seg[j] numbers the
  // groups from left to right.
  always_comb begin
    int seg [LAS];
    int sum, cnt;
    seg[0] = 0;
    for (int j = 1; j < LAS; j++) seg[j] = seg[j-1] + (join_next[j-1] ? 0 : 1);
    for (int j = 0; j < LAS; j++) begin
      sum = 0;
      cnt = 0;
      for (int k = 0; k < LAS; k++) begin
        if (seg[k] == seg[j]) begin
          sum += int'(cbl_lvl[k]);
          cnt += 1;
        end
      end
      share_lvl[j] = lvl_t'(sum / cnt);
    end
  end

endmodule
