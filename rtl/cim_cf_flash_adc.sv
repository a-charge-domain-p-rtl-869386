// cim_cf_flash_adc: 4-bit coarse-fine flash ADC of one pMAC column.
//
// Eight comparators resolve a 4-bit code from the ABL voltage against the 16
// in-array reference lines ABL_REF[0..15], where ABL_REF[N] stands for
// pMAC = 8*N:
//   coarse (coarse_en): one comparator against ABL_REF[8] (pMAC 64, 48/64 VDD)
//                       latches the MSB O[3].
//   fine   (fine_en):   a switch array routes ABL_REF[1..7] (MSB = 0) or
//                       ABL_REF[9..15] (MSB = 1) to seven comparators; their
//                       thermometer outputs are counted into O[2:0].
// The code is therefore min(floor(pMAC/8), 15): pMAC values of 128 and above
// (rare in practice) all read as 15, which is the cutoff = 0.5 clipping of the
// paper. code is valid from the tick after the last fine_en strobe until the
// next coarse_en. The coarse/fine structure and the reference choice follow the
// paper; the counting encoder is the simplest choice, as the paper shows no
// encoder circuit.
module cim_cf_flash_adc
  import cim_pkg::*;
#(
  parameter int unsigned FINE_COMPS = 7
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  coarse_en,
  input  logic  fine_en,
  input  ablq_t abl_q,
  input  ablq_t ref_q [REF_COLS],
  output code_t code
);

  localparam int unsigned MID = FINE_COMPS + 1;  // ABL_REF index of the coarse step

  logic                  msb;
  logic [FINE_COMPS-1:0] fine_q;
  ablq_t                 fine_ref [FINE_COMPS];

  cim_comparator u_coarse (
    .clk  (clk),
    .rst_n(rst_n),
    .en   (coarse_en),
    .v_in (abl_q),
    .v_ref(ref_q[MID]),
    .q    (msb)
  );

  for (genvar i = 0; i < FINE_COMPS; i++) begin : g_fine
    // Reference switch array of Fig. 6(b): Ref<i+1> or Ref<i+1+MID>.
    assign fine_ref[i] = msb ? ref_q[i + 1 + MID] : ref_q[i + 1];
    cim_comparator u_fine (
      .clk  (clk),
      .rst_n(rst_n),
      .en   (fine_en),
      .v_in (abl_q),
      .v_ref(fine_ref[i]),
      .q    (fine_q[i])
    );
  end

  // Thermometer to binary: count the comparators that tripped.
  always_comb begin
    logic [ADC_BITS-2:0] cnt;
    cnt = '0;
    for (int i = 0; i < int'(FINE_COMPS); i++) cnt += (ADC_BITS-1)'(fine_q[i]);
    code = {msb, cnt};
  end

endmodule
