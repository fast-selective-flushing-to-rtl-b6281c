// tb_fase_aes_clsf: a CLSF workload in the style of an AES file encryption,
// run on the full-size FaSe tile, with four flushing schemes:
//   none   no scflush (baseline);
//   LLSF   scflush in LLSF mode at every user/kernel switch;
//   CLSF1  CLSF mode; critical segment = key setup and the encrypt calls;
//   CLSF2  CLSF mode; critical segment = key setup and the whole encfile
//          function (buffer handling, random fill and encrypt).
// The program: key setup (reads a key, writes a 240-byte key schedule),
// then 12 system calls. Each even call returns a 256-byte input chunk
// (the kernel writes the I/O buffer, outside any critical segment); the
// program fills a 64-byte random block, encrypts the chunk (16 blocks x 40
// lookups in 4 KiB of tables, reading the key schedule) and writes the output
// buffer, whose write position advances by 256 bytes per call, so that
// encfile brings new lines into the cache every time. Odd calls are pure I/O slices (the program only touches its I/O
// buffer and a status word). The kernel clears csr.scf on entry and restores
// it on exit, as the software convention requires.
// Checked:
//  * all loads return the right data;
//  * under CLSF, a flush after a slice in which a critical access missed
//    (so a line's coherence changed) is not nullified, and a flush after a
//    slice with no critical access at all is nullified;
//  * LLSF and baseline never nullify a flush;
//  * CLSF1 and CLSF2 each take fewer clocks than LLSF; CLSF2, whose segment
//    also covers the output-buffer refills, nullifies fewer flushes and takes
//    more clocks than CLSF1; the baseline is fastest.
// Prints clocks relative to the baseline for each scheme.
module tb_fase_aes_clsf;
  import fase_pkg::*;

  localparam int LAT = 6;

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
  int n_clsf_null = 0;
  longint cyc = 0;
  always @(posedge clk) begin
    cyc++;
    if (evt_clsf_nullify) n_clsf_null++;
  end

  initial begin
    repeat (4_000_000) @(posedge clk);
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
    logic [PADDR_BITS-1:0] wa;
    wa = {a[PADDR_BITS-1:3], 3'b000};
    if (ref_mem.exists(wa)) return ref_mem[wa];
    return {32'({a[PADDR_BITS-1:OFFSET_BITS], OFFSET_BITS'(0)}), 32'(a[OFFSET_BITS-1:3]) ^ 32'h5A5A_0000};
  endfunction

  // program state for the slice being run
  bit in_crit;           // current code is inside the critical segment
  bit crit_miss;         // a critical access missed in this slice
  bit crit_any;          // any critical access in this slice

  task automatic access(logic st, logic [PADDR_BITS-1:0] a, logic [XLEN-1:0] wd);
    logic [XLEN-1:0] rd;
    int lat;
    @(negedge clk);
    req_valid = 1; req_store = st; req_addr = a; req_wdata = wd; req_wmask = '1;
    while (!req_ready) @(negedge clk);
    @(posedge clk);
    #1 req_valid = 0;
    lat = 0;
    do begin @(posedge clk); lat++; end while (!resp_valid);
    rd = resp_rdata;
    #1;
    if (scf) begin
      crit_any = 1;
      if (lat > 3) crit_miss = 1;
    end
    if (st) ref_mem[{a[PADDR_BITS-1:3], 3'b000}] = wd;
    else expect_true(rd == ref_word(a), $sformatf("load %h", a));
  endtask

  task automatic exec(logic [31:0] i, logic [XLEN-1:0] r1);
    @(negedge clk);
    inst_valid = 1; inst = i; rs1_val = r1;
    #1;
    while (!inst_ready) begin @(negedge clk); #1; end
    @(negedge clk);
    inst_valid = 0;
  endtask

  function automatic logic [31:0] csrwi_scf(logic v);
    return {CSR_SCF, 4'd0, v, 3'b101, 5'd0, OPC_SYSTEM};
  endfunction
  localparam logic [31:0] SCFLUSH = {12'hFC4, 5'd10, 3'b000, 5'd0, OPC_SYSTEM};

  // address map
  localparam logic [PADDR_BITS-1:0] TTAB = 32'h0010_0000;  // 4 KiB tables
  localparam logic [PADDR_BITS-1:0] KSCH = 32'h0020_0000;  // key schedule
  localparam logic [PADDR_BITS-1:0] IBUF = 32'h0030_0000;  // input buffer
  localparam logic [PADDR_BITS-1:0] OBUF = 32'h0031_0000;  // output buffer
  localparam logic [PADDR_BITS-1:0] RBUF = 32'h0040_0000;  // random block
  localparam logic [PADDR_BITS-1:0] KERN = 32'h0050_0000;  // kernel data

  typedef enum int { S_NONE, S_LLSF, S_CLSF1, S_CLSF2 } scheme_e;

  task automatic set_crit(bit on);
    if (on != in_crit) exec(csrwi_scf(on), '0);
    in_crit = on;
  endtask

  // user/kernel switch: the kernel saves and clears scf, flushes, works,
  // and restores scf on return
  task automatic syscall(scheme_e sch, int n, ref int nulls_exp, ref int nulls_forbid);
    bit saved;
    int n0;
    saved = in_crit;
    set_crit(0);
    n0 = n_clsf_null;
    if (sch != S_NONE) exec(SCFLUSH, (sch == S_LLSF) ? 64'(FLUSH_LLSF) : 64'(FLUSH_CLSF));
    if (sch == S_CLSF1 || sch == S_CLSF2) begin
      if (crit_miss) expect_true(n_clsf_null == n0, "flush after a critical refill must not be nullified");
      if (!crit_any) expect_true(n_clsf_null == n0 + 1, "flush after a slice without critical access is nullified");
    end else begin
      expect_true(n_clsf_null == n0, "no nullify outside CLSF");
    end
    crit_miss = 0; crit_any = 0;
    // kernel work: touch kernel data, and for even calls fill the input buffer
    for (int i = 0; i < 8; i++) access(0, KERN + 32'(i * 64), '0);
    if (n % 2 == 0)
      for (int i = 0; i < 32; i++) access(1, IBUF + 32'(i * 8), 64'(n * 100 + i));
    if (sch != S_NONE) exec(SCFLUSH, (sch == S_LLSF) ? 64'(FLUSH_LLSF) : 64'(FLUSH_CLSF));
    crit_miss = 0; crit_any = 0;
    set_crit(saved);
  endtask

  task automatic run(scheme_e sch, output longint clocks, output int nulls);
    longint c0;
    int n0, ne, nf;
    c0 = cyc; n0 = n_clsf_null;
    in_crit = 0; crit_miss = 0; crit_any = 0;
    // set_key: critical in CLSF1 and CLSF2
    if (sch == S_CLSF1 || sch == S_CLSF2) set_crit(1);
    for (int i = 0; i < 4; i++) void'(ref_word(IBUF + 32'(i * 8)));
    for (int i = 0; i < 4; i++) access(0, IBUF + 32'(i * 8), '0);
    for (int i = 0; i < 30; i++) access(1, KSCH + 32'(i * 8), 64'(i * 7 + 1));
    set_crit(0);
    for (int n = 0; n < 12; n++) begin
      syscall(sch, n, ne, nf);
      if (n % 2 == 0) begin
        // encfile
        if (sch == S_CLSF2) set_crit(1);
        for (int i = 0; i < 8; i++) access(1, RBUF + 32'(i * 8), 64'($urandom));       // fillrand
        for (int i = 0; i < 32; i++) access(0, IBUF + 32'(i * 8), '0);                  // read input
        if (sch == S_CLSF1) set_crit(1);
        for (int b = 0; b < 16; b++) begin                                               // encrypt
          for (int r = 0; r < 40; r++) access(0, TTAB + 32'($urandom_range(0, 511) * 8), '0);
          access(0, KSCH + 32'((b % 30) * 8), '0);
        end
        if (sch == S_CLSF1) set_crit(0);
        for (int i = 0; i < 32; i++) access(1, OBUF + 32'(n * 256 + i * 8), 64'(n * 1000 + i)); // write output
        if (sch == S_CLSF2) set_crit(0);
      end else begin
        // pure I/O slice
        for (int i = 0; i < 4; i++) access(0, OBUF + 32'(i * 8), '0);
        access(1, OBUF + 32'h8000, 64'(n));
      end
    end
    syscall(sch, 12, ne, nf);
    clocks = cyc - c0;
    nulls = n_clsf_null - n0;
  endtask

  initial begin
    longint c_none, c_llsf, c_clsf1, c_clsf2;
    int n_none, n_llsf, n_clsf1, n_clsf2;
    repeat (2) @(posedge clk);
    rst_n = 1;
    wait (ready);
    // each scheme starts from a flushed cache
    exec(SCFLUSH, 64'(FLUSH_LLSF)); exec(SCFLUSH, 64'(FLUSH_LLSF));
    run(S_NONE, c_none, n_none);
    exec(SCFLUSH, 64'(FLUSH_LLSF)); exec(SCFLUSH, 64'(FLUSH_LLSF));
    run(S_LLSF, c_llsf, n_llsf);
    exec(SCFLUSH, 64'(FLUSH_LLSF)); exec(SCFLUSH, 64'(FLUSH_LLSF));
    run(S_CLSF1, c_clsf1, n_clsf1);
    exec(SCFLUSH, 64'(FLUSH_LLSF)); exec(SCFLUSH, 64'(FLUSH_LLSF));
    run(S_CLSF2, c_clsf2, n_clsf2);
    $display("scheme  clocks   relative  nullified flushes");
    $display("none    %7d  %6.3f    %0d", c_none, 1.0, n_none);
    $display("LLSF    %7d  %6.3f    %0d", c_llsf, real'(c_llsf) / c_none, n_llsf);
    $display("CLSF1   %7d  %6.3f    %0d", c_clsf1, real'(c_clsf1) / c_none, n_clsf1);
    $display("CLSF2   %7d  %6.3f    %0d", c_clsf2, real'(c_clsf2) / c_none, n_clsf2);
    expect_true(n_none == 0 && n_llsf == 0, "no nullified flush without CLSF");
    expect_true(n_clsf1 > 0 && n_clsf2 > 0, "CLSF nullified some flushes");
    expect_true(n_clsf1 > n_clsf2, "the larger critical segment nullifies fewer flushes");
    expect_true(c_clsf1 < c_clsf2, "the larger critical segment costs more clocks");
    expect_true(c_clsf1 < c_llsf && c_clsf2 < c_llsf, "CLSF schemes faster than LLSF");
    expect_true(c_none < c_clsf1 && c_none < c_clsf2, "baseline fastest");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
