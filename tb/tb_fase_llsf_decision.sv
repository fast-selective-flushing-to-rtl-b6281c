// tb_fase_llsf_decision: checks the LLSF decision against the eight rows of
// the decision table (coherence x FaSe bit -> flush?), plus the write-back
// flag, which must be set only for a flushed dirty (M) line.
module tb_fase_llsf_decision;
  import fase_pkg::*;

  coh_e coh;
  logic fase_bit, flush, writeback;
  int   checks = 0, failures = 0;

  fase_llsf_decision dut (.coh, .fase_bit, .flush, .writeback);

  // table rows: {coherence, FaSe, flush expected}
  typedef struct { coh_e c; logic f; logic fl; } row_t;
  row_t rows [8] = '{
    '{COH_M, 1'b1, 1'b0}, '{COH_M, 1'b0, 1'b1},
    '{COH_E, 1'b1, 1'b0}, '{COH_E, 1'b0, 1'b1},
    '{COH_S, 1'b1, 1'b0}, '{COH_S, 1'b0, 1'b1},
    '{COH_I, 1'b1, 1'b0}, '{COH_I, 1'b0, 1'b0}
  };

  initial begin
    #1000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    foreach (rows[i]) begin
      coh      = rows[i].c;
      fase_bit = rows[i].f;
      #1;
      checks++;
      if (flush !== rows[i].fl) begin
        failures++;
        $display("FAIL row %0d: coh=%b fase=%b flush=%b expected %b", i + 2, coh, fase_bit, flush, rows[i].fl);
      end
      checks++;
      if (writeback !== (rows[i].fl && rows[i].c == COH_M)) begin
        failures++;
        $display("FAIL row %0d: writeback=%b", i + 2, writeback);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
