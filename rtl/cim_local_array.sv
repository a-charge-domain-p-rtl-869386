// cim_local_array: behavioural model of one local array (LA) of an AMU.
//
// An LA is a column of CELLS P-8T bit-cells sharing one computing bit line
// (CBL) and a local peripheral circuit. The peripheral circuit holds the NMOS
// N0 (gate = one input activation bit), the eMULTb switch that ties the CBL to
// the AMU's internal bit line iBL, the eACC switch to the accumulation bit line
// and, in type B only, the PG_DAC switch that joins this iBL segment to the
// next one when eDAC is high (pg_dac_on). The charge sharing between the LAs
// that iBL and the PG_DAC switches connect is resolved one level up, in
// cim_amu; this module reports its CBL level and takes the shared level back.
//
// The CBL voltage is a register in VDD/16 units (16 = VDD), updated on the
// rising edge of the timing clock according to the phase controls:
//   pch                      CBL = VDD (precharge)
//   dac_eval & x_bit & HAS_N0  CBL = 0   (N0 discharges CBL through iBL)
//   share_en & e_mult_b      CBL = share_lvl (iBL charge sharing, eDAC)
//   ~e_mult_b & any pull_up  CBL = VDD (a selected cell stores 0)
// so that after a full sequence CBL = 16 - X*W. Reading the CBL onto the ABL
// (eACC) is done by cim_abl_accum from cbl_lvl.
//
// Normal SRAM mode: wr_en writes wr_bit into cell wr_cell; rd_bit is the
// content of cell rd_cell (combinational). The phase behaviour follows the
// paper's Fig. 2-4; the clocked, integer-level modelling is this design's own.
module cim_local_array
  import cim_pkg::*;
#(
  parameter int unsigned N_CELLS     = CELLS,
  parameter bit          PERI_TYPE_B = 1'b0,  // type B: has the PG_DAC switch
  parameter bit          HAS_N0      = 1'b1   // 0: N0 gate tied to VSS (LA[15])
) (
  input  logic                       clk,
  input  logic                       pch,
  input  logic                       dac_eval,
  input  logic                       x_bit,
  input  logic                       e_mult_b,
  input  logic                       e_dac,
  output logic                       pg_dac_on,
  input  logic                       share_en,
  input  lvl_t                       share_lvl,
  input  logic [N_CELLS-1:0]         cwl_n,
  input  logic                       wr_en,
  input  logic [$clog2(N_CELLS)-1:0] wr_cell,
  input  logic                       wr_bit,
  input  logic [$clog2(N_CELLS)-1:0] rd_cell,
  output logic                       rd_bit,
  output lvl_t                       cbl_lvl
);

  logic [N_CELLS-1:0] w;
  logic [N_CELLS-1:0] pull_up;

  for (genvar c = 0; c < N_CELLS; c++) begin : g_cell
    cim_p8t_cell u_cell (
      .clk     (clk),
      .wl      (wr_en && (wr_cell == c)),
      .bl_wdata(wr_bit),
      .cwl_n   (cwl_n[c]),
      .w       (w[c]),
      .pull_up (pull_up[c])
    );
  end

  assign rd_bit = w[rd_cell];

  // PG_DAC of a type B peripheral joins this iBL to the next LA's iBL.
  assign pg_dac_on = PERI_TYPE_B & e_dac;

  always_ff @(posedge clk) begin
    if (pch) begin
      cbl_lvl <= VDD_LVL;
    end else if (e_mult_b) begin
      if (dac_eval && x_bit && HAS_N0) cbl_lvl <= '0;
      else if (share_en)               cbl_lvl <= share_lvl;
    end else if (|pull_up) begin
      cbl_lvl <= VDD_LVL;
    end
  end

endmodule
