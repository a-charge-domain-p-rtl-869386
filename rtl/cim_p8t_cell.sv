// cim_p8t_cell: behavioural model of the PMOS-based 8T (P-8T) SRAM bit-cell.
//
// The cell is a conventional 6T cell plus two series PMOS devices between VDD
// and the computing bit line CBL: P0 is gated by the stored node W and P1 by
// the compute word line CWL (active low). During multiplication CWL goes low;
// a cell storing 0 then turns both devices on and pulls its CBL to VDD (the
// product is 0), while a cell storing 1 leaves the CBL at the DAC voltage.
//
// The 6T read/write path is abstracted to a storage bit written on the rising
// edge of clk while wl is high; w is the stored value for read-out. pull_up is
// combinational and is resolved by the local array that owns the CBL.
// The P0/P1 behaviour follows the paper; the clocked write abstraction is this
// model's own. There is no reset: like any SRAM the content is undefined until
// written.
module cim_p8t_cell (
  input  logic clk,
  input  logic wl,        // word line: write this cell
  input  logic bl_wdata,  // value driven on BL (BLB carries its complement)
  input  logic cwl_n,     // compute word line, active low (gate of P1)
  output logic w,         // stored weight bit (node W)
  output logic pull_up    // P0 and P1 both on: CBL pulled to VDD
);

  always_ff @(posedge clk) begin
    if (wl) w <= bl_wdata;
  end

  // P0 conducts when W = 0, P1 conducts when CWL = 0.
  assign pull_up = ~w & ~cwl_n;

endmodule
