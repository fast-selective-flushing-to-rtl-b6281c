// tb_fase_dcache: checks the FaSe L1 data cache at its default geometry
// (32 KiB, 64 sets x 8 ways, 64-byte lines) against a behavioural memory.
//  * data: random loads and stores (with byte masks) over 24 tags x 4 sets,
//    so that lines are evicted and dirty victims written back; every load is
//    compared with a word-level reference memory;
//  * timing: a hit answers 3 clocks after it is accepted, a clean miss
//    LAT + 6 clocks;
//  * LLSF flush: lines accessed since the last flush stay (hit), every other
//    valid line is gone (miss), dirty ones are written back (memory write
//    count), and data survives the flush;
//  * CLSF: a flush in CLSF mode with no critical access is nullified (lines
//    stay); a critical refill sets the flag and the flush runs as LLSF;
//    a load hit in a critical segment does not set the flag, a store hit
//    that upgrades a shared line does.
module tb_fase_dcache;
  import fase_pkg::*;

  localparam int SETS = DEF_SETS, WAYS = DEF_WAYS;
  localparam int LAT = 6;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic                  ready, req_valid = 0, req_ready, req_store = 0, resp_valid;
  logic [PADDR_BITS-1:0] req_addr = 0;
  logic [XLEN-1:0]       req_wdata = 0, resp_rdata;
  logic [WORD_BYTES-1:0] req_wmask = 0;
  logic                  scf = 0, flush_req = 0, flush_busy, flush_done, clsf_flag;
  flush_mode_e           flush_mode = FLUSH_LLSF;
  logic                  evt_line_flush, evt_line_wb, evt_line_nullify, evt_clsf_nullify;
  logic                  mem_req_valid, mem_req_ready, mem_req_write, mem_resp_valid, mem_resp_shared;
  logic [PADDR_BITS-1:0] mem_req_addr;
  logic [LINE_BITS-1:0]  mem_req_wdata, mem_resp_rdata;
  logic                  shared_mode = 0;
  int                    n_reads, n_writes;

  fase_dcache dut (.*);
  fase_mem_model #(.LAT(LAT)) u_mem (.*);

  int checks = 0, failures = 0;
  logic [XLEN-1:0] ref_mem [logic [PADDR_BITS-1:0]];

  initial begin
    repeat (200000) @(posedge clk);
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

  function automatic logic [XLEN-1:0] ref_word(logic [PADDR_BITS-1:0] a);
    logic [PADDR_BITS-1:0] wa, la;
    wa = {a[PADDR_BITS-1:3], 3'b000};
    la = {a[PADDR_BITS-1:OFFSET_BITS], OFFSET_BITS'(0)};
    if (ref_mem.exists(wa)) return ref_mem[wa];
    return {32'(la), 32'(a[OFFSET_BITS-1:3]) ^ 32'h5A5A_0000};
  endfunction

  function automatic logic [PADDR_BITS-1:0] mk_addr(int tag, int set, int word);
    return {20'(tag), 6'(set), 3'(word), 3'b000};
  endfunction

  // one access; returns load data and the clocks from acceptance to response
  task automatic access(logic st, logic [PADDR_BITS-1:0] a, logic [XLEN-1:0] wd,
                        logic [7:0] m, output logic [XLEN-1:0] rd, output int lat);
    @(negedge clk);
    req_valid = 1; req_store = st; req_addr = a; req_wdata = wd; req_wmask = m;
    while (!req_ready) @(negedge clk);
    @(posedge clk);
    #1 req_valid = 0;
    lat = 0;
    do begin
      @(posedge clk);
      lat++;
    end while (!resp_valid);
    rd = resp_rdata;
    #1;
    if (st) begin
      logic [XLEN-1:0] w;
      w = ref_word(a);
      for (int b = 0; b < 8; b++) if (m[b]) w[b*8 +: 8] = wd[b*8 +: 8];
      ref_mem[{a[PADDR_BITS-1:3], 3'b000}] = w;
    end
  endtask

  task automatic load_check(logic [PADDR_BITS-1:0] a, output int lat);
    logic [XLEN-1:0] rd;
    access(0, a, '0, '0, rd, lat);
    expect_true(rd == ref_word(a), $sformatf("load %h = %h, expected %h", a, rd, ref_word(a)));
  endtask

  task automatic do_flush(flush_mode_e m);
    @(negedge clk);
    flush_req = 1; flush_mode = m;
    do @(posedge clk); while (!flush_done);
    #1 flush_req = 0;
  endtask

  int lat, w0, nflush, nnull, nclsf;
  always @(posedge clk) begin
    if (evt_line_flush) nflush++;
    if (evt_line_nullify) nnull++;
    if (evt_clsf_nullify) nclsf++;
  end

  initial begin
    logic [XLEN-1:0] rd;
    repeat (2) @(posedge clk);
    rst_n = 1;
    wait (ready);

    // ---------------- timing of a clean miss and of a hit
    load_check(mk_addr(1, 1, 0), lat);
    expect_true(lat == LAT + 6, $sformatf("clean miss latency %0d, expected %0d", lat, LAT + 6));
    load_check(mk_addr(1, 1, 3), lat);
    expect_true(lat == 3, $sformatf("hit latency %0d, expected 3", lat));

    // ---------------- random traffic with evictions
    for (int i = 0; i < 3000; i++) begin
      logic [PADDR_BITS-1:0] a;
      a = mk_addr($urandom_range(0, 23), $urandom_range(0, 3), $urandom_range(0, 7));
      if ($urandom_range(0, 2) == 0)
        access(1, a, {$urandom, $urandom}, 8'($urandom), rd, lat);
      else
        load_check(a, lat);
    end
    expect_true(n_writes > 0, "dirty victims were written back");

    // ---------------- LLSF: flush, then a new time slice
    do_flush(FLUSH_LLSF);
    // time slice: "spy" lines in set 10 (clean) and 11 (dirty)
    for (int t = 0; t < 8; t++) load_check(mk_addr(100 + t, 10, 0), lat);
    for (int t = 0; t < 8; t++) access(1, mk_addr(200 + t, 11, 1), 64'(t), 8'hFF, rd, lat);
    do_flush(FLUSH_LLSF);  // ends the spy's slice: its lines are now FaSe 0
    // "victim" slice touches 3 lines of set 10 and 2 of set 11
    load_check(mk_addr(300, 10, 0), lat);
    load_check(mk_addr(301, 10, 0), lat);
    load_check(mk_addr(302, 10, 0), lat);
    access(1, mk_addr(400, 11, 2), 64'h1234, 8'hFF, rd, lat);
    access(1, mk_addr(401, 11, 2), 64'h5678, 8'hFF, rd, lat);
    w0 = n_writes;
    nflush = 0; nnull = 0;
    do_flush(FLUSH_LLSF);
    // the 5 victim lines were kept; the 5 + 6 spy lines the victim did not
    // evict were flushed, the 6 dirty ones with a write-back
    expect_true(nnull == 5, $sformatf("lines kept %0d, expected 5", nnull));
    expect_true(nflush == 11, $sformatf("lines flushed %0d, expected 11", nflush));
    expect_true(n_writes - w0 == 6, $sformatf("flush write-backs %0d, expected 6", n_writes - w0));
    // victim lines still hit, spy lines all miss, data intact
    load_check(mk_addr(300, 10, 0), lat);
    expect_true(lat == 3, "victim line kept by LLSF hits");
    for (int t = 0; t < 8; t++) begin
      load_check(mk_addr(200 + t, 11, 1), lat);
      expect_true(lat > 3, $sformatf("spy line %0d misses after LLSF", t));
    end

    // ---------------- CLSF: no critical access -> nullified
    do_flush(FLUSH_LLSF);
    load_check(mk_addr(500, 20, 0), lat);
    nflush = 0; nclsf = 0;
    expect_true(clsf_flag == 0, "flag clear without critical access");
    do_flush(FLUSH_CLSF);
    expect_true(nclsf == 1 && nflush == 0, "CLSF flush nullified");
    load_check(mk_addr(500, 20, 0), lat);
    expect_true(lat == 3, "line survives a nullified flush");
    // critical load hit: no coherence change, flag stays clear
    scf = 1;
    load_check(mk_addr(500, 20, 0), lat);
    expect_true(clsf_flag == 0, "critical load hit does not set the flag");
    // critical refill sets the flag, flush runs as LLSF
    load_check(mk_addr(501, 20, 0), lat);
    scf = 0;
    expect_true(clsf_flag == 1, "critical refill sets the flag");
    nflush = 0; nclsf = 0;
    do_flush(FLUSH_CLSF);
    expect_true(nclsf == 0 && nflush > 0, "CLSF with flag flushes as LLSF");
    expect_true(clsf_flag == 0, "flag cleared by the flush");
    // shared refill, then critical store upgrade S -> M sets the flag
    shared_mode = 1;
    load_check(mk_addr(600, 30, 0), lat);
    shared_mode = 0;
    scf = 1;
    access(1, mk_addr(600, 30, 0), 64'hBEEF, 8'hFF, rd, lat);
    scf = 0;
    expect_true(lat == 3, "store upgrade on a hit takes hit time");
    expect_true(clsf_flag == 1, "critical store upgrade sets the flag");
    do_flush(FLUSH_CLSF);
    load_check(mk_addr(600, 30, 0), lat);

    // final data sweep
    for (int tg = 0; tg < 24; tg++)
      for (int s = 0; s < 4; s++) load_check(mk_addr(tg, s, tg % 8), lat);

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
