// rram_cell: BEHAVIOURAL MODEL of how one 1T1R hafnium-oxide memristor cell
// (one selector transistor in series with one memristor) responds to a
// programming pulse. It stands for an analog device and is not meant for
// synthesis. The crossbar model keeps the state of every device and passes
// the addressed device through this model when a pulse arrives, as the
// shared programming periphery of a real array does.
//
// The cell leaves fabrication in the pristine state, which conducts almost
// nothing. A one-time FORM pulse creates the first filament and leaves the
// device in a high-conductance state. Afterwards a RESET pulse brings it to
// the low-conductance state (LCS, level 0) and a SET pulse to a
// high-conductance state (HCS) whose conductance is chosen by the compliance
// current I_CC that the word-line (selector gate) voltage sets: the code
// icc = 1..8 selects one of the eight HCS levels, so a device has nine levels
// in all. These facts follow the paper.
//
// Model choices: conductance is the level code (LCS and pristine read as 0,
// HCS level k as k), with no variability. FORM leaves level 8. Pulses on a
// pristine device other than FORM do nothing. A SET never lowers the
// conductance of a device already in a higher HCS level (a set does not thin
// a filament), so the programming circuit resets a device before setting it.
// Combinational: the new state is taken by the array on the pulse's clock
// edge.
module rram_cell
  import meta_pkg::*;
(
  input  prog_op_e op,
  input  devl_t    icc,          // compliance current code for SET, 1..NMAX
  input  devl_t    level,        // present conductance level, 0 = LCS/pristine
  input  logic     formed,       // present forming state
  output devl_t    level_next,
  output logic     formed_next
);
  always_comb begin
    level_next  = level;
    formed_next = formed;
    unique case (op)
      PROG_FORM: begin
        formed_next = 1'b1;
        level_next  = devl_t'(NMAX);
      end
      PROG_RESET: if (formed) level_next = '0;
      PROG_SET: begin
        if (formed && icc > level)
          level_next = (icc > devl_t'(NMAX)) ? devl_t'(NMAX) : icc;
      end
      default: ;
    endcase
  end

endmodule
