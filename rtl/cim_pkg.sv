// cim_pkg: sizes, level types and the phase encoding shared by the charge-domain
// P-8T SRAM compute-in-memory macro.
//
// Analog nodes are carried as exact integers. A bit-line voltage (CBL, iBL) is a
// level in units of VDD/16, so 16 is VDD and 0 is ground. An accumulation bit
// line (ABL) is carried as its charge numerator in units of C_CBL*VDD/16: every
// ABL in the macro has the same total capacitance (16 C_CBL + C_ABL), so
// comparing numerators is the same as comparing voltages.
//
// The sizes (16 cells per local array, 16 local arrays per AMU, 16 x 5 AMUs,
// 4-bit inputs, 8-bit weights, 4-bit ADC) follow the paper's 256x80 macro.
// The timing clock period (200 ps) and the phase names are this design's own.
package cim_pkg;

  localparam int unsigned CELLS      = 16;  // P-8T cells per local array
  localparam int unsigned LAS        = 16;  // local arrays per AMU
  localparam int unsigned AMU_ROWS   = 16;  // AMU rows = activated rows
  localparam int unsigned AMU_COLS   = 5;   // 4 pMAC AMU columns + 1 AMU_REF column
  localparam int unsigned MAC_COLS   = 64;  // pMAC columns (ABL 0..63)
  localparam int unsigned REF_COLS   = 16;  // reference columns (ABL_REF 0..15)
  localparam int unsigned ARRAY_ROWS = AMU_ROWS * CELLS;     // 256
  localparam int unsigned ARRAY_COLS = MAC_COLS + REF_COLS;  // 80
  localparam int unsigned XBITS      = 4;   // input activation precision
  localparam int unsigned WBITS      = 8;   // weight precision
  localparam int unsigned ADC_BITS   = 4;   // coarse-fine flash ADC
  localparam int unsigned GROUPS     = MAC_COLS / WBITS;    // 8 partial sums

  localparam int unsigned LVL_W  = 5;   // bit-line level 0..16
  localparam int unsigned ABLQ_W = 12;  // ABL charge numerator
  localparam int unsigned PSUM_W = 13;  // signed partial sum in ADC code units

  localparam logic [LVL_W-1:0] VDD_LVL = LVL_W'(16);

  typedef logic [LVL_W-1:0]  lvl_t;
  typedef logic [ABLQ_W-1:0] ablq_t;
  typedef logic [XBITS-1:0]  x_t;
  typedef logic [ADC_BITS-1:0] code_t;
  typedef logic signed [PSUM_W-1:0] psum_t;

  // Phases of one CIM operation, in the order of the operation waveform.
  typedef enum logic [2:0] {
    PH_IDLE      = 3'd0,
    PH_PCH       = 3'd1,  // precharge CBL, iBL, ABL to VDD
    PH_DAC_EVAL  = 3'd2,  // input bits on N0 discharge their iBL segments
    PH_DAC_SHARE = 3'd3,  // eDAC joins the segments: charge-sharing DAC
    PH_MULT      = 3'd4,  // eMULTb low, CWL low: CBL pulled to VDD where W = 0
    PH_ACC       = 3'd5,  // eACC: column-wise charge sharing onto the ABL
    PH_COARSE    = 3'd6,  // coarse comparator decides the ADC MSB
    PH_FINE      = 3'd7   // 7 fine comparators decide O[2:0]
  } phase_e;

  // Which input bit drives local array j of an AMU (3..0), or -1 for LA[15]
  // whose N0 gate is tied low so that it always stays precharged.
  function automatic int la_xbit(input int j);
    if (j < 8)       return 3;
    else if (j < 12) return 2;
    else if (j < 14) return 1;
    else if (j < 15) return 0;
    else             return -1;
  endfunction

  // Local arrays with a type B peripheral circuit (PG_DAC switch to the next
  // iBL segment): LA 7, 11, 13 and 14.
  localparam logic [LAS-1:0] TYPE_B_MASK = 16'b0110_1000_1000_0000;

  // ABL charge numerator with every CBL and the ABL at VDD.
  function automatic ablq_t abl_full(input int c_abl_units);
    return ablq_t'((AMU_ROWS + c_abl_units) * 16);
  endfunction

endpackage
