// fase_llsf_decision: the line level selective flush (LLSF) decision for one
// cache line, evaluated while scflush walks the tag array.
//
// A valid line (M, E or S) is flushed only if its FaSe state bit is 0, that
// is, if the process that ran in the closing time slice did not access it
// since the last flush. Lines whose FaSe bit is 1 were brought in or touched
// by the current process and cannot give the next process a hit on its own
// data, so their flush is nullified. Invalid lines are never flushed. This is
// exactly the eight-row decision table of the paper.
//
// On top of the table, this design separates how a flush is carried out:
// a dirty (M) line needs a write-back before it is invalidated, a clean
// (E or S) line is only invalidated. Purely combinational.
module fase_llsf_decision
  import fase_pkg::*;
(
  input  coh_e coh,       // coherence bits of the line
  input  logic fase_bit,  // 1: line accessed in the current time slice
  output logic flush,     // line must be flushed
  output logic writeback  // flush must write the line back first
);

  always_comb begin
    unique case (coh)
      COH_M, COH_E, COH_S: flush = ~fase_bit;
      default:             flush = 1'b0;   // COH_I: nothing to flush
    endcase
    writeback = flush && (coh == COH_M);
  end

endmodule
