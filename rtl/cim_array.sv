// cim_array: behavioural model of the 256 x 80 P-8T SRAM compute array.
//
// The array is AMU_ROWS x AMU_COLS = 16 x 5 analog multiplication units of
// 16 x 16 cells. AMU columns 0..3 hold weights and produce the 64 pMAC
// columns; AMU column 4 is the AMU_REF column that produces the 16 ADC
// reference lines. Array row r = 16*k + c is cell row c of AMU row k; array
// column 16*a + j is local array j of AMU column a (columns 64..79 are
// AMU_REF). Local array j of all 16 AMU rows of a column share one ABL, so
//   ABL[col] level = 16*(16 + C_ABL_UNITS) - pMAC[col],
//   pMAC[col]      = sum_k X_k * W[16*k + row_sel][col].
// The reference column is driven with X_REF = 1000b; when ABL_REF[N] stores '1'
// in AMU_REF rows 0..N-1 and '0' elsewhere (written by the user like any
// weight) its level stands for pMAC = 8*N.
//
// Normal SRAM mode: sram_we writes sram_wdata to row sram_addr on the rising
// edge; sram_re registers row sram_addr into sram_rdata on the rising edge.
// Phase controls come from the controller and input driver (see cim_amu).
// Structure and equations follow the paper; the address map and the SRAM port
// are this design's own.
module cim_array
  import cim_pkg::*;
#(
  parameter int unsigned C_ABL_UNITS = 4
) (
  input  logic                          clk,
  input  logic                          pch,
  input  logic                          dac_eval,
  input  logic                          e_dac,
  input  logic                          e_mult_b,
  input  logic                          e_acc,
  input  x_t                            x_amu [AMU_ROWS],
  input  x_t                            x_ref,
  input  logic [CELLS-1:0]              cwl_n [AMU_ROWS],
  input  logic [CELLS-1:0]              cwl_ref_n [AMU_ROWS],
  input  logic                          sram_we,
  input  logic                          sram_re,
  input  logic [$clog2(ARRAY_ROWS)-1:0] sram_addr,
  input  logic [ARRAY_COLS-1:0]         sram_wdata,
  output logic [ARRAY_COLS-1:0]         sram_rdata,
  output ablq_t                         abl_q [MAC_COLS],
  output ablq_t                         abl_ref_q [REF_COLS]
);

  localparam int unsigned CW = $clog2(CELLS);

  lvl_t                  cbl [AMU_ROWS][AMU_COLS][LAS];
  lvl_t                  col_cbl [ARRAY_COLS][AMU_ROWS];
  logic [ARRAY_COLS-1:0] row_rd [AMU_ROWS];
  logic [CW-1:0]         cell_sel;
  logic [$clog2(AMU_ROWS)-1:0] amu_sel;

  assign cell_sel = sram_addr[CW-1:0];
  assign amu_sel  = sram_addr[$clog2(ARRAY_ROWS)-1:CW];

  for (genvar k = 0; k < AMU_ROWS; k++) begin : g_row
    for (genvar a = 0; a < AMU_COLS; a++) begin : g_col
      localparam bit IsRef = (a == AMU_COLS - 1);
      cim_amu u_amu (
        .clk     (clk),
        .x       (IsRef ? x_ref : x_amu[k]),
        .pch     (pch),
        .dac_eval(dac_eval),
        .e_dac   (e_dac),
        .e_mult_b(e_mult_b),
        .cwl_n   (IsRef ? cwl_ref_n[k] : cwl_n[k]),
        .wr_en   (sram_we && (amu_sel == k)),
        .wr_cell (cell_sel),
        .wr_data (sram_wdata[a*LAS +: LAS]),
        .rd_cell (cell_sel),
        .rd_data (row_rd[k][a*LAS +: LAS]),
        .cbl_lvl (cbl[k][a])
      );
      for (genvar j = 0; j < LAS; j++) begin : g_wire
        assign col_cbl[a*LAS + j][k] = cbl[k][a][j];
      end
    end
  end

  for (genvar col = 0; col < ARRAY_COLS; col++) begin : g_abl
    ablq_t q;
    cim_abl_accum #(
      .ROWS       (AMU_ROWS),
      .C_ABL_UNITS(C_ABL_UNITS)
    ) u_abl (
      .clk    (clk),
      .pch    (pch),
      .e_acc  (e_acc),
      .cbl_lvl(col_cbl[col]),
      .abl_q  (q)
    );
    if (col < MAC_COLS) begin : g_mac
      assign abl_q[col] = q;
    end else begin : g_ref
      assign abl_ref_q[col - MAC_COLS] = q;
    end
  end

  always_ff @(posedge clk) begin
    if (sram_re) sram_rdata <= row_rd[amu_sel];
  end

endmodule
