// cim_controller: phase sequencer of the CIM macro.
//
// One operation walks through the phases of the multiplication waveform and the
// ADC read-out, each held for a fixed number of ticks of the timing clock:
//   PCH       T_PCH        pch        (precharge CBL, iBL, ABL)
//   DAC_EVAL  T_DAC_EVAL   iact_en    (input bits on N0)
//   DAC_SHARE T_DAC_SHARE  e_dac      (charge-sharing DAC)
//   MULT      T_MULT       e_mult_b=0, rwl_en (CWL low)
//   ACC       T_ACC        e_mult_b=0, e_acc  (column accumulation)
//   COARSE    T_COARSE     coarse_en  (ADC MSB)
//   FINE      T_FINE       fine_en    (ADC O[2:0])
// followed by addshift_en for the one tick after FINE, which overlaps the
// next operation's precharge. eMULTb is high (CBL tied to iBL) in every other
// phase. start is accepted when ready is high (in IDLE and in the last FINE
// tick, so operations can run back to back); accepting also raises load for
// the input driver. With the defaults a phase tick is 200 ps and one operation
// occupies 22 ticks = 4.4 ns, the macro cycle time at 0.9 V: precharge 1.0 ns,
// DAC 1.6 ns, MAC 0.4 ns and ADC 1.4 ns. The phase order and these four delays
// are the paper's; the split of DAC, MAC and ADC into sub-phases, the tick
// clock and the handshake are this design's own. Reset returns to IDLE.
module cim_controller
  import cim_pkg::*;
#(
  parameter int unsigned T_PCH       = 5,
  parameter int unsigned T_DAC_EVAL  = 4,
  parameter int unsigned T_DAC_SHARE = 4,
  parameter int unsigned T_MULT      = 1,
  parameter int unsigned T_ACC       = 1,
  parameter int unsigned T_COARSE    = 3,
  parameter int unsigned T_FINE      = 4
) (
  input  logic   clk,
  input  logic   rst_n,
  input  logic   start,
  output logic   ready,
  output logic   load,
  output logic   pch,
  output logic   iact_en,
  output logic   e_dac,
  output logic   e_mult_b,
  output logic   rwl_en,
  output logic   e_acc,
  output logic   coarse_en,
  output logic   fine_en,
  output logic   addshift_en,
  output phase_e phase
);

  localparam int unsigned CNT_W = 4;

  logic [CNT_W-1:0] cnt;
  phase_e           next_ph;

  function automatic logic [CNT_W-1:0] ticks(input phase_e p);
    case (p)
      PH_PCH:       return CNT_W'(T_PCH);
      PH_DAC_EVAL:  return CNT_W'(T_DAC_EVAL);
      PH_DAC_SHARE: return CNT_W'(T_DAC_SHARE);
      PH_MULT:      return CNT_W'(T_MULT);
      PH_ACC:       return CNT_W'(T_ACC);
      PH_COARSE:    return CNT_W'(T_COARSE);
      PH_FINE:      return CNT_W'(T_FINE);
      default:      return CNT_W'(1);
    endcase
  endfunction

  assign ready = (phase == PH_IDLE) || (phase == PH_FINE && cnt == CNT_W'(1));
  assign load  = ready && start;

  always_comb begin
    case (phase)
      PH_PCH:       next_ph = PH_DAC_EVAL;
      PH_DAC_EVAL:  next_ph = PH_DAC_SHARE;
      PH_DAC_SHARE: next_ph = PH_MULT;
      PH_MULT:      next_ph = PH_ACC;
      PH_ACC:       next_ph = PH_COARSE;
      PH_COARSE:    next_ph = PH_FINE;
      default:      next_ph = start ? PH_PCH : PH_IDLE;  // IDLE, end of FINE
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      phase       <= PH_IDLE;
      cnt         <= '0;
      addshift_en <= 1'b0;
    end else begin
      addshift_en <= (phase == PH_FINE) && (cnt == CNT_W'(1));
      if (phase == PH_IDLE || cnt == CNT_W'(1)) begin
        phase <= next_ph;
        cnt   <= ticks(next_ph);
      end else begin
        cnt <= cnt - CNT_W'(1);
      end
    end
  end

  assign pch         = (phase == PH_PCH);
  assign iact_en     = (phase == PH_DAC_EVAL);
  assign e_dac       = (phase == PH_DAC_SHARE);
  assign e_mult_b    = !((phase == PH_MULT) || (phase == PH_ACC));
  assign rwl_en      = (phase == PH_MULT);
  assign e_acc       = (phase == PH_ACC);
  assign coarse_en   = (phase == PH_COARSE);
  assign fine_en     = (phase == PH_FINE);

  // Every phase lasts at least one tick and fits the counter.
  initial begin
    assert (T_PCH > 0 && T_DAC_EVAL > 0 && T_DAC_SHARE > 0 && T_MULT > 0 &&
            T_ACC > 0 && T_COARSE > 0 && T_FINE > 0)
      else $error("cim_controller: phase lengths must be at least 1");
    assert (T_PCH < 16 && T_DAC_EVAL < 16 && T_DAC_SHARE < 16 && T_MULT < 16 &&
            T_ACC < 16 && T_COARSE < 16 && T_FINE < 16)
      else $error("cim_controller: phase lengths must be below 16");
  end

endmodule
