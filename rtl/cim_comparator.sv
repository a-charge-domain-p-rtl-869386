// cim_comparator: behavioural model of one strobed comparator of the
// coarse-fine flash ADC.
//
// On a rising clock edge with en high it latches q = 1 when the ABL voltage
// v_in is at or below the reference voltage v_ref, i.e. when the partial MAC
// value on the ABL is at or above the value the reference stands for (a lower
// ABL voltage means a larger pMAC). Both inputs are ABL charge numerators,
// which order the same way as the voltages because all ABLs have the same total
// capacitance. q holds between strobes. The model is ideal: no offset, no
// noise, and a tie resolves to 1 (the paper does not describe the comparator
// circuit or its tie behaviour).
module cim_comparator
  import cim_pkg::*;
(
  input  logic  clk,
  input  logic  rst_n,
  input  logic  en,
  input  ablq_t v_in,
  input  ablq_t v_ref,
  output logic  q
);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)  q <= 1'b0;
    else if (en) q <= (v_in <= v_ref);
  end

endmodule
