// cim_macro: top level of the 256 x 80 charge-domain P-8T SRAM CIM macro.
//
// One operation multiplies 16 unsigned 4-bit input activations X0..X15 with
// the 8-bit weights stored in one cell row (row_sel) of every local array and
// returns 8 partial sums, i.e. 128 4b x 8b MACs. Inside, the controller walks
// the phases; the input driver puts X on the AMU rows and X_REF = 1000b on the
// AMU_REF column; each AMU turns its input into a bit-line voltage by charge
// sharing and multiplies it by one weight bit per column; each ABL sums 16
// such products by charge sharing; 64 coarse-fine flash ADCs read the ABLs
// against the 16 in-array reference lines; the add-shift stage weights the
// bit-slice columns by 2^b and adds them.
//
// Interface: start/ready handshake (start is taken when ready is high and
// latches x_in, row_sel and rows8); adc_code O0..O63 are valid from the
// end of the FINE phase until the next COARSE phase; psum_valid pulses for one tick
// when psum holds the new partial sums, 23 ticks after the accepted start, and
// back-to-back operations complete every 22 ticks. psum is in ADC code units:
// one code is 8 pMAC with 16 activated rows and 4 pMAC with rows8 set. Normal SRAM mode
// (sram_we/sram_re) must only be used while the macro is idle (asserted). The
// reference columns 64..79 must hold the reference pattern (see cim_array).
module cim_macro
  import cim_pkg::*;
#(
  parameter int unsigned C_ABL_UNITS = 4,
  parameter bit          SIGNED_W    = 1'b1
) (
  input  logic                          clk,
  input  logic                          rst_n,
  input  logic                          start,
  output logic                          ready,
  input  x_t                            x_in [AMU_ROWS],
  input  logic [$clog2(CELLS)-1:0]      row_sel,
  input  logic                          rows8,
  input  logic                          sram_we,
  input  logic                          sram_re,
  input  logic [$clog2(ARRAY_ROWS)-1:0] sram_addr,
  input  logic [ARRAY_COLS-1:0]         sram_wdata,
  output logic [ARRAY_COLS-1:0]         sram_rdata,
  output code_t                         adc_code [MAC_COLS],
  output logic                          psum_valid,
  output psum_t                         psum [GROUPS],
  output phase_e                        phase
);

  logic load, pch, iact_en, e_dac, e_mult_b, rwl_en, e_acc;
  logic coarse_en, fine_en, addshift_en;

  x_t               x_amu [AMU_ROWS];
  x_t               x_ref;
  logic [CELLS-1:0] cwl_n [AMU_ROWS];
  logic [CELLS-1:0] cwl_ref_n [AMU_ROWS];
  ablq_t            abl_q [MAC_COLS];
  ablq_t            abl_ref_q [REF_COLS];

  cim_controller u_ctrl (
    .clk        (clk),
    .rst_n      (rst_n),
    .start      (start),
    .ready      (ready),
    .load       (load),
    .pch        (pch),
    .iact_en    (iact_en),
    .e_dac      (e_dac),
    .e_mult_b   (e_mult_b),
    .rwl_en     (rwl_en),
    .e_acc      (e_acc),
    .coarse_en  (coarse_en),
    .fine_en    (fine_en),
    .addshift_en(addshift_en),
    .phase      (phase)
  );

  cim_wl_driver u_drv (
    .clk      (clk),
    .rst_n    (rst_n),
    .load     (load),
    .x_in     (x_in),
    .row_sel  (row_sel),
    .rows8    (rows8),
    .iact_en  (iact_en),
    .rwl_en   (rwl_en),
    .x_amu    (x_amu),
    .x_ref    (x_ref),
    .cwl_n    (cwl_n),
    .cwl_ref_n(cwl_ref_n)
  );

  cim_array #(
    .C_ABL_UNITS(C_ABL_UNITS)
  ) u_array (
    .clk       (clk),
    .pch       (pch),
    .dac_eval  (iact_en),
    .e_dac     (e_dac),
    .e_mult_b  (e_mult_b),
    .e_acc     (e_acc),
    .x_amu     (x_amu),
    .x_ref     (x_ref),
    .cwl_n     (cwl_n),
    .cwl_ref_n (cwl_ref_n),
    .sram_we   (sram_we),
    .sram_re   (sram_re),
    .sram_addr (sram_addr),
    .sram_wdata(sram_wdata),
    .sram_rdata(sram_rdata),
    .abl_q     (abl_q),
    .abl_ref_q (abl_ref_q)
  );

  for (genvar col = 0; col < MAC_COLS; col++) begin : g_adc
    cim_cf_flash_adc u_adc (
      .clk      (clk),
      .rst_n    (rst_n),
      .coarse_en(coarse_en),
      .fine_en  (fine_en),
      .abl_q    (abl_q[col]),
      .ref_q    (abl_ref_q),
      .code     (adc_code[col])
    );
  end

  cim_add_shift #(
    .SIGNED_W(SIGNED_W)
  ) u_addshift (
    .clk  (clk),
    .rst_n(rst_n),
    .en   (addshift_en),
    .code (adc_code),
    .psum (psum)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) psum_valid <= 1'b0;
    else        psum_valid <= addshift_en;
  end

  // Normal SRAM accesses are only allowed while no operation is in flight.
  a_sram_idle : assert property (@(posedge clk) disable iff (!rst_n)
    (sram_we || sram_re) |-> (phase == PH_IDLE))
    else $error("cim_macro: SRAM access during a CIM operation");

endmodule
