// tb_fase_control: checks FaSe control together with a tag array at the
// default geometry (64 sets x 8 ways = 512 lines).
//  * user phase: access reports set the FaSe bit of exactly that line; the
//    CLSF flag is set only by an access that changes coherence while
//    csr.scf is 1;
//  * LLSF flush: after random coherence/FaSe contents, every line ends as the
//    decision table says (flushed lines invalid, kept lines unchanged), every
//    FaSe bit is 0, write-backs are requested for exactly the M lines with
//    FaSe 0, and the flush takes 2 + 2*512 + (write-backs x write-back
//    latency) clocks;
//  * CLSF flush with the flag clear: nothing flushed, FaSe bits cleared,
//    2 + 64 clocks; with the flag set: same result as LLSF; the flag is
//    cleared at the end of every flush.
module tb_fase_control;
  import fase_pkg::*;

  localparam int SETS = DEF_SETS, WAYS = DEF_WAYS;
  localparam int SET_W = $clog2(SETS), WAY_W = $clog2(WAYS);
  localparam int TAG_W = PADDR_BITS - SET_W - OFFSET_BITS;
  localparam int NCL = SETS * WAYS;
  localparam int WBLAT = 5;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  // tag array
  logic             init_done, t_rd_en, t_meta_we, t_fase_we, t_fase_val;
  logic [SET_W-1:0] t_rd_set, t_meta_set, t_fase_set;
  logic [WAY_W-1:0] t_meta_way;
  logic [TAG_W-1:0] t_meta_tag;
  coh_e             t_meta_coh;
  logic [WAYS-1:0]  t_fase_mask;
  logic [TAG_W-1:0] rd_tag [WAYS];
  coh_e             rd_coh [WAYS];
  logic [WAYS-1:0]  rd_fase;

  // testbench-side access to the tag array (outside flushes)
  logic             tb_rd_en = 0, tb_meta_we = 0;
  logic [SET_W-1:0] tb_rd_set = 0, tb_meta_set = 0;
  logic [WAY_W-1:0] tb_meta_way = 0;
  coh_e             tb_meta_coh = COH_I;
  logic [TAG_W-1:0] tb_meta_tag = 0;

  // control
  logic             acc_valid = 0, acc_coh_change = 0, scf = 0;
  logic [SET_W-1:0] acc_set = 0;
  logic [WAY_W-1:0] acc_way = 0;
  logic             clsf_flag, flush_req = 0, flush_busy, flush_done;
  flush_mode_e      flush_mode = FLUSH_LLSF;
  logic             c_rd_en, inv_we, wb_req, wb_ack;
  logic [SET_W-1:0] c_rd_set, inv_set, wb_set;
  logic [WAY_W-1:0] inv_way, wb_way;
  logic             evt_line_flush, evt_line_wb, evt_line_nullify, evt_clsf_nullify;

  fase_tag_array u_tags (
    .clk, .rst_n, .init_done,
    .rd_en(t_rd_en), .rd_set(t_rd_set), .rd_tag, .rd_coh, .rd_fase,
    .meta_we(t_meta_we), .meta_set(t_meta_set), .meta_way(t_meta_way),
    .meta_tag(t_meta_tag), .meta_coh(t_meta_coh),
    .fase_we(t_fase_we), .fase_set(t_fase_set), .fase_way_mask(t_fase_mask),
    .fase_val(t_fase_val)
  );

  fase_control dut (
    .clk, .rst_n, .acc_valid, .acc_set, .acc_way, .acc_coh_change, .scf, .clsf_flag,
    .flush_req, .flush_mode, .flush_busy, .flush_done,
    .rd_en(c_rd_en), .rd_set(c_rd_set), .rd_coh, .rd_fase,
    .inv_we, .inv_set, .inv_way,
    .fase_we(t_fase_we), .fase_set(t_fase_set), .fase_way_mask(t_fase_mask), .fase_val(t_fase_val),
    .wb_req, .wb_set, .wb_way, .wb_ack,
    .evt_line_flush, .evt_line_wb, .evt_line_nullify, .evt_clsf_nullify
  );

  always_comb begin
    t_rd_en    = flush_busy ? c_rd_en  : tb_rd_en;
    t_rd_set   = flush_busy ? c_rd_set : tb_rd_set;
    t_meta_we  = flush_busy ? inv_we   : tb_meta_we;
    t_meta_set = flush_busy ? inv_set  : tb_meta_set;
    t_meta_way = flush_busy ? inv_way  : tb_meta_way;
    t_meta_coh = flush_busy ? COH_I    : tb_meta_coh;
    t_meta_tag = flush_busy ? '0       : tb_meta_tag;
  end

  // write-back responder: acknowledge after WBLAT clocks of wb_req
  int wb_cnt = 0, n_wb_req = 0;
  bit wb_seen [NCL];
  assign wb_ack = wb_req && (wb_cnt == WBLAT - 1);
  always_ff @(posedge clk) begin
    if (wb_req) begin
      wb_cnt <= wb_ack ? 0 : wb_cnt + 1;
      if (wb_ack) begin
        n_wb_req <= n_wb_req + 1;
        wb_seen[{wb_set, wb_way}] <= 1'b1;
      end
    end
  end

  coh_e ref_coh  [NCL];
  logic ref_fase [NCL];
  int checks = 0, failures = 0;

  initial begin
    repeat (60000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic expect_true(bit cond, string what);
    checks++;
    if (!cond) begin
      failures++;
      $display("FAIL %s", what);
    end
  endtask

  // reads back every line and compares with the reference
  task automatic check_all(string what);
    int bad = 0;
    for (int s = 0; s < SETS; s++) begin
      @(negedge clk);
      tb_rd_en = 1; tb_rd_set = SET_W'(s);
      @(negedge clk);
      tb_rd_en = 0;
      for (int w = 0; w < WAYS; w++)
        if (rd_coh[w] != ref_coh[s*WAYS+w] || rd_fase[w] != ref_fase[s*WAYS+w]) begin
          if (bad < 5) $display("  set %0d way %0d: coh %b fase %b, expected %b %b", s, w,
                                rd_coh[w], rd_fase[w], ref_coh[s*WAYS+w], ref_fase[s*WAYS+w]);
          bad++;
        end
    end
    expect_true(bad == 0, {what, ": tag array contents"});
  endtask

  // random coherence states written by the testbench, FaSe bits set by
  // access reports through the control (scf = 0, no coherence change)
  task automatic fill_random();
    for (int l = 0; l < NCL; l++) begin
      @(negedge clk);
      tb_meta_we = 1; tb_meta_set = SET_W'(l / WAYS); tb_meta_way = WAY_W'(l % WAYS);
      tb_meta_coh = coh_e'($urandom_range(0, 3)); tb_meta_tag = TAG_W'($urandom);
      ref_coh[l] = tb_meta_coh;
      acc_valid = ($urandom_range(0, 1) == 1); acc_set = tb_meta_set; acc_way = tb_meta_way;
      acc_coh_change = 0;
      ref_fase[l] = acc_valid;  // all FaSe bits are 0 after the preceding flush
    end
    @(negedge clk);
    tb_meta_we = 0; acc_valid = 0;
  endtask

  // runs one flush, returns its length in clocks (flush_req to flush_done)
  task automatic run_flush(flush_mode_e mode, output int cycles);
    cycles = 0;
    @(negedge clk);
    flush_req = 1; flush_mode = mode;
    @(posedge clk);
    while (!flush_done) begin
      @(posedge clk);
      cycles++;
    end
    @(negedge clk);
    flush_req = 0;
  endtask

  initial begin
    int cycles, exp_wb, exp_flush, n_flush_evt, n_null_evt;
    repeat (2) @(posedge clk);
    rst_n = 1;
    wait (init_done);
    for (int l = 0; l < NCL; l++) begin ref_coh[l] = COH_I; ref_fase[l] = 0; end

    // ---------------- user phase: FaSe bit and CLSF flag
    @(negedge clk);
    acc_valid = 1; acc_set = 5; acc_way = 3; acc_coh_change = 1; scf = 0;
    @(negedge clk);
    acc_valid = 0;
    ref_fase[5*WAYS+3] = 1;
    expect_true(clsf_flag == 0, "flag must stay clear when scf = 0");
    acc_valid = 1; acc_set = 6; acc_way = 0; acc_coh_change = 0; scf = 1;
    @(negedge clk);
    acc_valid = 0;
    ref_fase[6*WAYS+0] = 1;
    expect_true(clsf_flag == 0, "flag must stay clear without a coherence change");
    check_all("access reports");
    @(negedge clk);
    acc_valid = 1; acc_set = 7; acc_way = 7; acc_coh_change = 1; scf = 1;
    @(negedge clk);
    acc_valid = 0; scf = 0;
    expect_true(clsf_flag == 1, "critical access with coherence change must set the flag");

    // ---------------- LLSF flushes over random contents
    for (int round = 0; round < 3; round++) begin
      // start from an all-zero FaSe state: run a flush first
      run_flush(FLUSH_LLSF, cycles);
      for (int l = 0; l < NCL; l++) begin ref_coh[l] = (ref_coh[l] != COH_I && !ref_fase[l]) ? COH_I : ref_coh[l]; ref_fase[l] = 0; end
      fill_random();
      check_all("random fill");
      exp_wb = 0; exp_flush = 0;
      for (int l = 0; l < NCL; l++) begin
        if (ref_coh[l] != COH_I && !ref_fase[l]) exp_flush++;
        if (ref_coh[l] == COH_M && !ref_fase[l]) exp_wb++;
        wb_seen[l] = 0;
      end
      n_wb_req = 0;
      n_flush_evt = 0; n_null_evt = 0;
      fork
        run_flush(FLUSH_LLSF, cycles);
        forever @(posedge clk) begin
          if (evt_line_flush) n_flush_evt++;
          if (evt_line_nullify) n_null_evt++;
        end
      join_any
      disable fork;
      expect_true(n_wb_req == exp_wb, $sformatf("LLSF write-backs %0d, expected %0d", n_wb_req, exp_wb));
      expect_true(n_flush_evt == exp_flush, $sformatf("LLSF lines flushed %0d, expected %0d", n_flush_evt, exp_flush));
      expect_true(cycles == 2 + 2*NCL + exp_wb*WBLAT,
                  $sformatf("LLSF flush took %0d clocks, expected %0d", cycles, 2 + 2*NCL + exp_wb*WBLAT));
      for (int l = 0; l < NCL; l++) begin
        expect_true(wb_seen[l] == (ref_coh[l] == COH_M && !ref_fase[l]),
                    $sformatf("write-back of line %0d", l));
        if (ref_coh[l] != COH_I && !ref_fase[l]) ref_coh[l] = COH_I;
        ref_fase[l] = 0;
      end
      check_all("after LLSF");
      expect_true(clsf_flag == 0, "flag cleared after flush");
    end

    // ---------------- CLSF with the flag clear: nullified
    fill_random();
    n_wb_req = 0;
    run_flush(FLUSH_CLSF, cycles);
    expect_true(n_wb_req == 0, "CLSF nullify must not write back");
    expect_true(cycles == 2 + SETS, $sformatf("CLSF nullify took %0d clocks, expected %0d", cycles, 2 + SETS));
    for (int l = 0; l < NCL; l++) ref_fase[l] = 0;
    check_all("after CLSF nullify");

    // ---------------- CLSF with the flag set: behaves as LLSF
    fill_random();
    @(negedge clk);
    acc_valid = 1; acc_set = 0; acc_way = 0; acc_coh_change = 1; scf = 1;
    ref_fase[0] = 1;
    @(negedge clk);
    acc_valid = 0; scf = 0;
    expect_true(clsf_flag == 1, "flag set before CLSF flush");
    exp_wb = 0;
    for (int l = 0; l < NCL; l++) if (ref_coh[l] == COH_M && !ref_fase[l]) exp_wb++;
    n_wb_req = 0;
    run_flush(FLUSH_CLSF, cycles);
    expect_true(n_wb_req == exp_wb, "CLSF with flag: write-backs as LLSF");
    expect_true(cycles == 2 + 2*NCL + exp_wb*WBLAT, "CLSF with flag: LLSF timing");
    for (int l = 0; l < NCL; l++) begin
      if (ref_coh[l] != COH_I && !ref_fase[l]) ref_coh[l] = COH_I;
      ref_fase[l] = 0;
    end
    check_all("after CLSF with flag");
    expect_true(clsf_flag == 0, "flag cleared after CLSF flush");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
