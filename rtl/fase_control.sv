// fase_control: the FaSe control of the L1 data cache. It has two jobs,
// matching the two phases of FaSe.
//
// User program execution. For every core access that the cache reports on
// acc_valid (a hit, or the refill that brings the line in), FaSe control sets
// the FaSe state bit of that line through the tag array's FaSe write port.
// If the access changed the line's coherence bits (acc_coh_change) while the
// core's csr.scf is 1, the access belongs to a CLSF critical segment and the
// one-bit CLSF flag is set.
//
// Flush instruction execution (flush_req, held by the core until flush_done).
//  * In CLSF mode the flag is read first. If it is 0 (no critical data came
//    into the cache since the last flush) the flush is nullified: the FaSe
//    bits are cleared, one set per clock, and no line is flushed. If it is 1,
//    the flush proceeds as LLSF.
//  * LLSF: a flush counter walks every line, line = {set, way}. Per line:
//    read its coherence and FaSe bits (tag array indexed by the counter,
//    one clock), apply the LLSF decision, clear its FaSe bit and either
//    nullify the flush of the line or flush it. A clean line (E, S) is
//    flushed by invalidating it in the same clock; a dirty line (M) is first
//    written back through the cache's write-back path (wb_req / wb_ack),
//    then invalidated. The counter then advances; after the last line the
//    flush is finished.
//  * At the end the CLSF flag is cleared, and flush_done pulses for a clock.
// The per-line flow, the decision table and the CLSF order (check flag,
// nullify or LLSF, clear flag) follow the paper. Cost, counted from the clock
// after flush_req is sampled until flush_done: 2 + 2*SETS*WAYS clocks plus
// the write-back time for an LLSF flush, 2 + SETS clocks for a flush that
// CLSF nullifies.
//
// The paper's text and its CLSF flowchart disagree on which flag value
// nullifies the flush; this module follows the flowchart and the CLSF
// definition (a flush is needed only when critical data was brought in).
// Choosing the mode per scflush (flush_mode) is this design's choice: the
// paper runs its experiments with LLSF alone or with CLSF but does not say
// how the mode is selected. The evt_* outputs are single-clock event strobes
// for observation and performance counting.
module fase_control
  import fase_pkg::*;
#(
  parameter int unsigned SETS   = DEF_SETS,
  parameter int unsigned WAYS   = DEF_WAYS,
  localparam int unsigned SET_W = $clog2(SETS),
  localparam int unsigned WAY_W = (WAYS > 1) ? $clog2(WAYS) : 1
) (
  input  logic             clk,
  input  logic             rst_n,
  // user program execution: access reports from the cache
  input  logic             acc_valid,
  input  logic [SET_W-1:0] acc_set,
  input  logic [WAY_W-1:0] acc_way,
  input  logic             acc_coh_change,
  input  logic             scf,            // csr.scf from the core
  output logic             clsf_flag,
  // flush instruction execution
  input  logic             flush_req,
  input  flush_mode_e      flush_mode,
  output logic             flush_busy,
  output logic             flush_done,
  // tag array read port (used during a flush)
  output logic             rd_en,
  output logic [SET_W-1:0] rd_set,
  input  coh_e             rd_coh [WAYS],
  input  logic [WAYS-1:0]  rd_fase,
  // tag array metadata write: invalidate a flushed line
  output logic             inv_we,
  output logic [SET_W-1:0] inv_set,
  output logic [WAY_W-1:0] inv_way,
  // tag array FaSe bit write
  output logic             fase_we,
  output logic [SET_W-1:0] fase_set,
  output logic [WAYS-1:0]  fase_way_mask,
  output logic             fase_val,
  // write-back of a dirty line, carried out by the cache
  output logic             wb_req,
  output logic [SET_W-1:0] wb_set,
  output logic [WAY_W-1:0] wb_way,
  input  logic             wb_ack,
  // event strobes
  output logic             evt_line_flush,    // a line was flushed
  output logic             evt_line_wb,       // ... and it needed a write-back
  output logic             evt_line_nullify,  // valid line kept (FaSe bit 1)
  output logic             evt_clsf_nullify   // whole flush nullified by CLSF
);

  typedef enum logic [2:0] {
    S_IDLE,
    S_CHECK_FLAG,
    S_NULLIFY,
    S_LINE_READ,
    S_LINE_CHECK,
    S_LINE_WB,
    S_FINISH
  } state_e;

  state_e            state;
  logic [SET_W-1:0]  cnt_set;
  logic [WAY_W-1:0]  cnt_way;
  flush_mode_e       mode_q;
  logic              line_flush, line_wb;
  logic              last_line;

  fase_llsf_decision u_decide (
    .coh      (rd_coh[cnt_way]),
    .fase_bit (rd_fase[cnt_way]),
    .flush    (line_flush),
    .writeback(line_wb)
  );

  assign last_line = (cnt_set == SET_W'(SETS - 1)) && (cnt_way == WAY_W'(WAYS - 1));
  assign flush_busy = (state != S_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state     <= S_IDLE;
      cnt_set   <= '0;
      cnt_way   <= '0;
      mode_q    <= FLUSH_LLSF;
      clsf_flag <= 1'b0;
    end else begin
      unique case (state)
        S_IDLE: begin
          if (acc_valid && acc_coh_change && scf) clsf_flag <= 1'b1;
          if (flush_req) begin
            mode_q  <= flush_mode;
            cnt_set <= '0;
            cnt_way <= '0;
            state   <= S_CHECK_FLAG;
          end
        end
        S_CHECK_FLAG: begin
          if (mode_q == FLUSH_CLSF && !clsf_flag) state <= S_NULLIFY;
          else                                     state <= S_LINE_READ;
        end
        S_NULLIFY: begin
          cnt_set <= cnt_set + 1'b1;
          if (cnt_set == SET_W'(SETS - 1)) state <= S_FINISH;
        end
        S_LINE_READ: state <= S_LINE_CHECK;
        S_LINE_CHECK: begin
          if (line_wb) begin
            state <= S_LINE_WB;
          end else begin
            {cnt_set, cnt_way} <= {cnt_set, cnt_way} + 1'b1;
            state <= last_line ? S_FINISH : S_LINE_READ;
          end
        end
        S_LINE_WB: begin
          if (wb_ack) begin
            {cnt_set, cnt_way} <= {cnt_set, cnt_way} + 1'b1;
            state <= last_line ? S_FINISH : S_LINE_READ;
          end
        end
        S_FINISH: begin
          clsf_flag <= 1'b0;
          state     <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  always_comb begin
    rd_en         = (state == S_LINE_READ);
    rd_set        = cnt_set;

    // FaSe bit: set on accesses in user mode, cleared line by line (LLSF)
    // or set by set (CLSF nullify) during a flush.
    fase_we       = 1'b0;
    fase_set      = cnt_set;
    fase_way_mask = '0;
    fase_val      = 1'b0;
    if (state == S_IDLE && acc_valid) begin
      fase_we       = 1'b1;
      fase_set      = acc_set;
      fase_way_mask = WAYS'(1) << acc_way;
      fase_val      = 1'b1;
    end else if (state == S_NULLIFY) begin
      fase_we       = 1'b1;
      fase_way_mask = '1;
    end else if (state == S_LINE_CHECK) begin
      fase_we       = 1'b1;
      fase_way_mask = WAYS'(1) << cnt_way;
    end

    // Invalidate a flushed line: clean lines at once, dirty ones after the
    // write-back has been acknowledged.
    inv_we  = (state == S_LINE_CHECK && line_flush && !line_wb) ||
              (state == S_LINE_WB && wb_ack);
    inv_set = cnt_set;
    inv_way = cnt_way;

    wb_req  = (state == S_LINE_WB);
    wb_set  = cnt_set;
    wb_way  = cnt_way;

    flush_done       = (state == S_FINISH);
    evt_line_flush   = inv_we;
    evt_line_wb      = (state == S_LINE_WB && wb_ack);
    evt_line_nullify = (state == S_LINE_CHECK) && !line_flush &&
                       (rd_coh[cnt_way] != COH_I);
    evt_clsf_nullify = (state == S_CHECK_FLAG) && (mode_q == FLUSH_CLSF) && !clsf_flag;
  end

endmodule
