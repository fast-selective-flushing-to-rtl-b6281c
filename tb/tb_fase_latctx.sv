// tb_fase_latctx: a context-switch workload in the style of LMbench lat_ctx,
// run on the full-size FaSe tile (32 KiB, 8-way, 64-byte lines).
//
// P processes take turns on the core. In its time slice a process sums its
// own array of SZ bytes (one load per 64-bit word) and passes the token on;
// the kernel runs scflush in LLSF mode at every switch. SZ takes the sizes
// 0, 4, 8, 16, 32 and 64 KiB, P the counts 2 and 4, three rounds each.
// Checked:
//  * every load returns the right data and each slice's sum is right;
//  * temporal isolation: after a switch, the first access of the incoming
//    process to every one of its lines is a miss;
//  * which lines a switch flush keeps: for SZ up to 16 KiB exactly the
//    SZ/64 lines of the outgoing process (the incoming process finds room in
//    invalid ways, so it never evicts its own lines); for 32 and 64 KiB,
//    where random replacement also evicts the process's own lines, between
//    1 and 512 lines;
//  * with two processes of 16 KiB, which share the cache equally, each
//    switch flush after the first round keeps exactly half of the cache.
// It prints the lines flushed per switch against a full flush of all valid
// lines, and the flush clocks, for each size.
module tb_fase_latctx;
  import fase_pkg::*;

  localparam int SETS = DEF_SETS, WAYS = DEF_WAYS, LAT = 6, NCL = SETS * WAYS;
  localparam int ROUNDS = 3;

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
  int n_flushed = 0, n_kept = 0, flush_clocks = 0;
  always @(posedge clk) begin
    if (evt_line_flush) n_flushed++;
    if (evt_line_nullify) n_kept++;
    if (flush_busy) flush_clocks++;
  end

  initial begin
    repeat (3_000_000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic expect_true(bit cond, string what);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 20) $display("FAIL %s", what);
    end
  endtask

  // memory content of a word never written, as the memory model returns it
  function automatic logic [XLEN-1:0] mem_word(logic [PADDR_BITS-1:0] a);
    return {32'({a[PADDR_BITS-1:OFFSET_BITS], OFFSET_BITS'(0)}), 32'(a[OFFSET_BITS-1:3]) ^ 32'h5A5A_0000};
  endfunction

  task automatic load(logic [PADDR_BITS-1:0] a, output logic [XLEN-1:0] rd, output int lat);
    @(negedge clk);
    req_valid = 1; req_store = 0; req_addr = a; req_wmask = '0;
    while (!req_ready) @(negedge clk);
    @(posedge clk);
    #1 req_valid = 0;
    lat = 0;
    do begin @(posedge clk); lat++; end while (!resp_valid);
    rd = resp_rdata;
    #1;
  endtask

  localparam logic [31:0] SCFLUSH = {12'hFC4, 5'd10, 3'b000, 5'd0, OPC_SYSTEM};
  task automatic scflush_llsf();
    @(negedge clk);
    inst_valid = 1; inst = SCFLUSH; rs1_val = 64'(FLUSH_LLSF);
    #1;
    while (!inst_ready) begin @(negedge clk); #1; end
    @(negedge clk);
    inst_valid = 0;
  endtask

  function automatic logic [PADDR_BITS-1:0] base(int p);
    return PADDR_BITS'(p + 1) << 20;
  endfunction

  // one time slice of process p: sum the array, check first touches miss
  task automatic slice(int p, int sz_bytes, bit check_isolation);
    logic [XLEN-1:0] rd, sum, exp_sum;
    int lat, cold_misses;
    sum = 0; exp_sum = 0; cold_misses = 0;
    for (int off = 0; off < sz_bytes; off += WORD_BYTES) begin
      logic [PADDR_BITS-1:0] a;
      a = base(p) + PADDR_BITS'(off);
      load(a, rd, lat);
      sum += rd;
      exp_sum += mem_word(a);
      if (check_isolation && off % LINE_BYTES == 0 && lat > 3) cold_misses++;
    end
    expect_true(sum == exp_sum, $sformatf("process %0d sum", p));
    if (check_isolation)
      expect_true(cold_misses == sz_bytes / LINE_BYTES,
                  $sformatf("isolation: %0d of %0d first touches missed (P%0d)", cold_misses, sz_bytes / LINE_BYTES, p));
  endtask

  int sizes [6] = '{0, 4, 8, 16, 32, 64};
  int procs [2] = '{2, 4};

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    wait (ready);
    $display("  SZ(KiB) P   switches  lines flushed/switch  valid lines/switch  flush clocks/switch");
    foreach (sizes[si]) foreach (procs[pi]) begin
      int sz, np, sw, tot_fl, tot_valid, tot_clk;
      sz = sizes[si] * 1024; np = procs[pi];
      sw = 0; tot_fl = 0; tot_valid = 0; tot_clk = 0;
      // start each configuration from an empty FaSe state and cache
      scflush_llsf();
      scflush_llsf();
      for (int r = 0; r < ROUNDS; r++)
        for (int p = 0; p < np; p++) begin
          int f0, k0, c0;
          slice(p, sz, 1'b1);
          f0 = n_flushed; k0 = n_kept; c0 = flush_clocks;
          scflush_llsf();   // switch p -> next
          sw++;
          tot_fl += n_flushed - f0;
          tot_valid += (n_flushed - f0) + (n_kept - k0);
          tot_clk += flush_clocks - c0;
          if (sz <= 16 * 1024)
            expect_true(n_kept - k0 == sz / LINE_BYTES,
                        $sformatf("SZ %0d P %0d: kept %0d lines, expected %0d", sz, np, n_kept - k0, sz / LINE_BYTES));
          else
            expect_true(n_kept - k0 <= NCL && n_kept - k0 > 0, $sformatf("SZ %0d: kept %0d lines, expected 1..%0d", sz, n_kept - k0, NCL));
          if (sz == 16 * 1024 && np == 2 && r > 0)
            expect_true((n_kept - k0) * 2 == (n_kept - k0) + (n_flushed - f0),
                        "two 16 KiB processes: the flush keeps half of the cache");
        end
      $display("  %7d %-3d %8d  %20.1f  %17.1f  %19.1f", sizes[si], np, sw,
               real'(tot_fl) / sw, real'(tot_valid) / sw, real'(tot_clk) / sw);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
