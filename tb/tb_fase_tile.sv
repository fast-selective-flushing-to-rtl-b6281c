// tb_fase_tile: end-to-end test of the FaSe tile at its default parameters
// (32 KiB, 8-way, 64-byte-line L1 data cache), built around a Prime+Probe
// attack on the data cache.
//
// A "spy" primes all 512 lines (64 sets x 8 tags), a "victim" touches three
// secret sets, the spy probes every line again and times each load (a hit
// answers in 3 clocks). The context switches spy -> victim -> spy are the
// flush points, where scflush runs when a mitigation is on. Four runs:
//  A. no flush:         the probe must reveal exactly the victim's sets;
//  B. LLSF:             every probe must miss, the victim's lines are kept
//                       by the flush (nullified), dirty spy lines are
//                       written back;
//  C. CLSF, victim code inside csrwi scf,1 / csrwi scf,0: the flag is set,
//                       the flush runs as LLSF, every probe must miss;
//  D. CLSF, victim code outside a critical segment: the flush is nullified,
//                       the probe again reveals the victim's sets (the
//                       accepted trade-off of CLSF).
// Loads are also checked for data against a reference memory. Every
// mechanism is counted (hit, miss, dirty eviction, flushed line, flush
// write-back, kept line, CLSF nullify, CLSF flag set, shared refill and
// upgrade, scflush stall, CSR write); one that never happens is a failure.
module tb_fase_tile;
  import fase_pkg::*;

  localparam int SETS = DEF_SETS, WAYS = DEF_WAYS, LAT = 6;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic                  ready, inst_valid = 0, inst_fase, inst_ready, scf;
  logic [31:0]           inst = 0;
  logic [XLEN-1:0]       rs1_val = 0, rd_val;
  logic                  req_valid = 0, req_ready, req_store = 0, resp_valid;
  logic [PADDR_BITS-1:0] req_addr = 0;
  logic [XLEN-1:0]       req_wdata = 0, resp_rdata;
  logic [WORD_BYTES-1:0] req_wmask = 0;
  logic                  flush_busy, clsf_flag;
  logic                  evt_line_flush, evt_line_wb, evt_line_nullify, evt_clsf_nullify;
  logic                  mem_req_valid, mem_req_ready, mem_req_write, mem_resp_valid, mem_resp_shared;
  logic [PADDR_BITS-1:0] mem_req_addr;
  logic [LINE_BITS-1:0]  mem_req_wdata, mem_resp_rdata;
  logic                  shared_mode = 0;
  int                    n_reads, n_writes;

  fase_tile dut (.*);
  fase_mem_model #(.LAT(LAT)) u_mem (.*);

  int checks = 0, failures = 0;
  logic [XLEN-1:0] ref_mem [logic [PADDR_BITS-1:0]];

  // mechanism counters
  int c_hit, c_miss, c_evict_wb, c_line_flush, c_flush_wb, c_line_kept, c_clsf_null,
      c_flag_set, c_shared, c_upgrade, c_stall, c_csr;
  logic flag_q;
  always @(posedge clk) begin
    if (evt_line_flush) c_line_flush++;
    if (evt_line_wb) c_flush_wb++;
    if (evt_line_nullify) c_line_kept++;
    if (evt_clsf_nullify) c_clsf_null++;
    if (clsf_flag && !flag_q) c_flag_set++;
    if (mem_resp_valid && mem_resp_shared) c_shared++;
    if (mem_req_valid && mem_req_ready && mem_req_write && !flush_busy) c_evict_wb++;
    if (inst_valid && inst_fase && !inst_ready) c_stall++;
    flag_q <= clsf_flag;
  end

  initial begin
    repeat (400000) @(posedge clk);
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

  function automatic logic [PADDR_BITS-1:0] mk_addr(int tag, int set);
    return {20'(tag), 6'(set), 6'd0};
  endfunction

  // one load or store through the data channel; returns its latency
  task automatic access(logic st, logic [PADDR_BITS-1:0] a, logic [XLEN-1:0] wd, output int lat);
    logic [XLEN-1:0] rd;
    @(negedge clk);
    req_valid = 1; req_store = st; req_addr = a; req_wdata = wd; req_wmask = '1;
    while (!req_ready) @(negedge clk);
    @(posedge clk);
    #1 req_valid = 0;
    lat = 0;
    do begin @(posedge clk); lat++; end while (!resp_valid);
    rd = resp_rdata;
    #1;
    if (lat == 3) c_hit++; else c_miss++;
    if (st) ref_mem[{a[PADDR_BITS-1:3], 3'b000}] = wd;
    else expect_true(rd == ref_word(a), $sformatf("load %h = %h, expected %h", a, rd, ref_word(a)));
  endtask

  // one instruction through the instruction channel
  task automatic exec(logic [31:0] i, logic [XLEN-1:0] r1);
    @(negedge clk);
    inst_valid = 1; inst = i; rs1_val = r1;
    #1;
    while (!inst_ready) begin @(negedge clk); #1; end
    if (i[6:0] == OPC_SYSTEM && i[31:20] == CSR_SCF) c_csr++;
    @(negedge clk);
    inst_valid = 0;
  endtask

  function automatic logic [31:0] csrwi_scf(logic v);
    return {CSR_SCF, 4'd0, v, 3'b101, 5'd0, OPC_SYSTEM};
  endfunction
  localparam logic [31:0] SCFLUSH = {12'hFC4, 5'd10, 3'b000, 5'd0, OPC_SYSTEM};

  int victim_sets [3] = '{3, 17, 42};
  int round_no = 0;

  // spy primes every line; sets 0..15 with stores (dirty lines), sets 48..63
  // from "shared" memory, one shared line then upgraded by a store
  task automatic prime();
    int lat;
    round_no++;
    for (int s = 0; s < SETS; s++) begin
      shared_mode = (s >= 48);
      for (int t = 0; t < WAYS; t++)
        access(s < 16, mk_addr(t + 1, s), 64'(round_no * 1000 + s * 8 + t), lat);
      shared_mode = 0;
    end
    access(1, mk_addr(1, 50), 64'hC0FFEE, lat);
    if (lat == 3) c_upgrade++;
  endtask

  task automatic victim();
    int lat;
    foreach (victim_sets[i]) access(0, mk_addr(1000 + round_no * 10 + i, victim_sets[i]), '0, lat);
  endtask

  // probe: returns which sets showed at least one miss
  task automatic probe(output bit missed [SETS], output int n_missed_lines);
    int lat;
    n_missed_lines = 0;
    for (int s = 0; s < SETS; s++) begin
      missed[s] = 0;
      for (int t = 0; t < WAYS; t++) begin
        access(0, mk_addr(t + 1, s), '0, lat);
        if (lat > 3) begin missed[s] = 1; n_missed_lines++; end
      end
    end
  endtask

  function automatic bit is_victim_set(int s);
    foreach (victim_sets[i]) if (victim_sets[i] == s) return 1;
    return 0;
  endfunction

  task automatic check_leak(bit missed [SETS], string what);
    int bad = 0;
    for (int s = 0; s < SETS; s++) if (missed[s] != is_victim_set(s)) bad++;
    expect_true(bad == 0, {what, ": probe reveals exactly the victim's sets"});
  endtask

  initial begin
    bit missed [SETS];
    int nm, f0, k0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    wait (ready);

    // ---- A: no mitigation
    prime();
    victim();
    probe(missed, nm);
    check_leak(missed, "no flush");

    // ---- B: LLSF at both switches
    prime();
    exec(SCFLUSH, 64'(FLUSH_LLSF));          // spy -> victim
    victim();
    f0 = c_line_flush; k0 = c_line_kept;
    exec(SCFLUSH, 64'(FLUSH_LLSF));          // victim -> spy
    expect_true(c_line_kept - k0 == 3, $sformatf("LLSF kept %0d victim lines, expected 3", c_line_kept - k0));
    expect_true(c_line_flush - f0 == SETS * WAYS - 3,
                $sformatf("LLSF flushed %0d lines, expected %0d", c_line_flush - f0, SETS * WAYS - 3));
    probe(missed, nm);
    expect_true(nm == SETS * WAYS, $sformatf("LLSF: %0d of %0d probes missed", nm, SETS * WAYS));

    // ---- C: CLSF, victim inside a critical segment
    prime();
    exec(SCFLUSH, 64'(FLUSH_CLSF));          // nothing critical: nullified
    exec(csrwi_scf(1), '0);
    expect_true(scf == 1, "csrwi scf,1");
    victim();
    exec(csrwi_scf(0), '0);
    expect_true(clsf_flag == 1, "critical victim set the CLSF flag");
    exec(SCFLUSH, 64'(FLUSH_CLSF));
    expect_true(clsf_flag == 0, "flag cleared by scflush");
    probe(missed, nm);
    expect_true(nm == SETS * WAYS, $sformatf("CLSF critical: %0d of %0d probes missed", nm, SETS * WAYS));

    // ---- D: CLSF, victim outside any critical segment
    prime();
    exec(SCFLUSH, 64'(FLUSH_CLSF));
    victim();
    expect_true(clsf_flag == 0, "non-critical victim leaves the flag clear");
    exec(SCFLUSH, 64'(FLUSH_CLSF));
    probe(missed, nm);
    check_leak(missed, "CLSF nullified");

    $display("mechanisms: hit %0d miss %0d evict-wb %0d flushed %0d flush-wb %0d kept %0d clsf-nullify %0d flag-set %0d shared %0d upgrade %0d stall %0d csr %0d",
             c_hit, c_miss, c_evict_wb, c_line_flush, c_flush_wb, c_line_kept, c_clsf_null,
             c_flag_set, c_shared, c_upgrade, c_stall, c_csr);
    expect_true(c_hit > 0, "hit happened");
    expect_true(c_miss > 0, "miss happened");
    expect_true(c_evict_wb > 0, "dirty eviction happened");
    expect_true(c_line_flush > 0, "line flush happened");
    expect_true(c_flush_wb > 0, "flush write-back happened");
    expect_true(c_line_kept > 0, "LLSF nullified line happened");
    expect_true(c_clsf_null > 0, "CLSF nullified flush happened");
    expect_true(c_flag_set > 0, "CLSF flag set happened");
    expect_true(c_shared > 0, "shared refill happened");
    expect_true(c_upgrade > 0, "store upgrade of a shared line happened");
    expect_true(c_stall > 0, "scflush stall happened");
    expect_true(c_csr > 0, "csr.scf write happened");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
