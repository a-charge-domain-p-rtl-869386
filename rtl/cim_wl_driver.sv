// cim_wl_driver: RWL / input-activation driver of the CIM macro.
//
// On load it latches the 16 4-bit input activations X0..X15 (one per AMU row),
// the cell row row_sel used as the weight row inside every local array, and the
// activated-row mode. It then drives the array under the controller's enables:
//   iact_en: X_k onto the N0 gates of AMU row k, and X_REF = 1000b onto the
//            AMU_REF column (half-VDD DAC level for reference generation);
//            X_REF8 = 0100b instead in 8-row mode (see below);
//   rwl_en:  compute word line CWL[row_sel] low (active low) in every AMU row.
// Outside these enables all X are 0 and all CWL are high. With rows8 set only
// AMU rows 0..7 are driven; rows 8..15 see X = 0 and no CWL, so their CBLs stay
// at VDD and add nothing to the ABLs. The AMU_REF column is always driven in
// full, but with X_REF8 = 0100b, so that every reference step is 4 instead of
// 8 pMAC and the ADC clips at pMAC 64: the cutoff of 0.5 that the paper uses
// for 8 rows (7-bit pMAC range, threshold 64). Outputs are combinational from
// the latched values and the enables. The driver's existence, X_REF = 1000b
// and the active-low CWL are from the paper; the shared row select, the way
// 8-row operation is made and X_REF8 are this design's own.
module cim_wl_driver
  import cim_pkg::*;
#(
  parameter int unsigned N_ROWS = AMU_ROWS,
  parameter x_t          X_REF  = 4'b1000,  // 16 rows: reference step 8 pMAC
  parameter x_t          X_REF8 = 4'b0100   // 8 rows: reference step 4 pMAC
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     load,
  input  x_t                       x_in [N_ROWS],
  input  logic [$clog2(CELLS)-1:0] row_sel,
  input  logic                     rows8,
  input  logic                     iact_en,
  input  logic                     rwl_en,
  output x_t                       x_amu [N_ROWS],
  output x_t                       x_ref,
  output logic [CELLS-1:0]         cwl_n [N_ROWS],
  output logic [CELLS-1:0]         cwl_ref_n [N_ROWS]
);

  x_t                       x_r [N_ROWS];
  logic [$clog2(CELLS)-1:0] sel_r;
  logic                     rows8_r;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int k = 0; k < int'(N_ROWS); k++) x_r[k] <= '0;
      sel_r   <= '0;
      rows8_r <= 1'b0;
    end else if (load) begin
      x_r     <= x_in;
      sel_r   <= row_sel;
      rows8_r <= rows8;
    end
  end

  logic [CELLS-1:0] cwl_sel_n;
  assign cwl_sel_n = rwl_en ? ~(CELLS'(1) << sel_r) : '1;

  always_comb begin
    for (int k = 0; k < int'(N_ROWS); k++) begin
      logic row_on;
      row_on       = !(rows8_r && k >= int'(N_ROWS / 2));
      x_amu[k]     = (iact_en && row_on) ? x_r[k] : '0;
      cwl_n[k]     = row_on ? cwl_sel_n : '1;
      cwl_ref_n[k] = cwl_sel_n;
    end
  end

  assign x_ref = !iact_en ? '0 : (rows8_r ? X_REF8 : X_REF);

endmodule
