// tb_fase_core_ext: checks the core-side extension: all six CSR instruction
// forms on csr.scf (write, set, clear, immediate forms, read-only forms with
// rs1/zimm = 0, old value returned), that other CSR numbers and other
// instructions leave csr.scf alone, and the scflush handshake: flush_req
// and the mode taken from rs1 bit 0, the instruction stalled until
// flush_done, a following instruction held off meanwhile.
module tb_fase_core_ext;
  import fase_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic            inst_valid = 0, inst_fase, inst_ready, scf, flush_req, flush_done = 0;
  logic [31:0]     inst = 0;
  logic [XLEN-1:0] rs1_val = 0, rd_val;
  flush_mode_e     flush_mode;

  fase_core_ext dut (.*);

  int checks = 0, failures = 0;

  initial begin
    repeat (2000) @(posedge clk);
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

  function automatic logic [31:0] csr_inst(logic [11:0] csr, logic [2:0] f3, logic [4:0] rs1);
    return {csr, rs1, f3, 5'd10, OPC_SYSTEM};
  endfunction
  function automatic logic [31:0] scflush_inst(logic [4:0] rs1);
    return {12'hFC4, rs1, 3'b000, 5'd0, OPC_SYSTEM};
  endfunction

  // issue one CSR instruction; check the old value and the new csr.scf
  task automatic csr_op(logic [2:0] f3, logic [4:0] rs1, logic [XLEN-1:0] v, logic exp_new, string what);
    logic old;
    @(negedge clk);
    old = scf;
    inst_valid = 1; inst = csr_inst(CSR_SCF, f3, rs1); rs1_val = v;
    #1;
    expect_true(inst_fase && inst_ready, {what, ": accepted"});
    expect_true(rd_val == XLEN'(old), {what, ": old value"});
    @(negedge clk);
    inst_valid = 0;
    expect_true(scf == exp_new, $sformatf("%s: scf=%b expected %b", what, scf, exp_new));
  endtask

  initial begin
    int stall;
    repeat (2) @(posedge clk);
    rst_n = 1;
    expect_true(scf == 0 && flush_req == 0, "reset state");
    csr_op(3'b101, 5'd1, '0, 1'b1, "csrwi scf,1");
    csr_op(3'b101, 5'd0, '0, 1'b0, "csrwi scf,0");
    csr_op(3'b001, 5'd3, 64'h1, 1'b1, "csrw scf,x3=1");
    csr_op(3'b011, 5'd3, 64'h1, 1'b0, "csrc scf,x3=1");
    csr_op(3'b010, 5'd3, 64'h3, 1'b1, "csrs scf,x3=3");
    csr_op(3'b010, 5'd0, 64'h0, 1'b1, "csrr scf (csrrs x0)");
    csr_op(3'b110, 5'd0, '0, 1'b1, "csrrsi scf,0 reads only");
    csr_op(3'b111, 5'd1, '0, 1'b0, "csrrci scf,1");
    csr_op(3'b110, 5'd1, '0, 1'b1, "csrrsi scf,1");
    csr_op(3'b001, 5'd3, 64'h2, 1'b0, "csrw scf,x3=2 (bit 0 clear)");

    // another CSR number must not touch csr.scf
    @(negedge clk);
    inst_valid = 1; inst = csr_inst(12'h801, 3'b101, 5'd1);
    #1 expect_true(!inst_fase, "other CSR not decoded");
    @(negedge clk);
    inst_valid = 0;
    expect_true(scf == 0, "other CSR leaves scf");
    inst_valid = 1; inst = 32'h0000_0073;  // ecall
    #1 expect_true(!inst_fase, "ecall not decoded");
    @(negedge clk);
    inst_valid = 0;

    // scflush, LLSF mode, with a 7-clock flush
    for (int mode = 0; mode < 2; mode++) begin
      @(negedge clk);
      inst_valid = 1; inst = scflush_inst(5'd5); rs1_val = XLEN'(mode);
      #1 expect_true(inst_fase && !inst_ready, "scflush decoded and stalls");
      @(negedge clk);
      expect_true(flush_req == 1 && flush_mode == flush_mode_e'(mode), "flush request and mode");
      stall = 0;
      repeat (6) begin
        expect_true(!inst_ready && flush_req, "stalled while flushing");
        @(negedge clk);
        stall++;
      end
      flush_done = 1;
      #1 expect_true(inst_ready, "scflush completes with flush_done");
      @(negedge clk);
      flush_done = 0;
      inst_valid = 0;
      expect_true(flush_req == 0, "request dropped after done");
    end

    // a CSR write offered during a flush is held off
    @(negedge clk);
    inst_valid = 1; inst = scflush_inst(5'd0); rs1_val = 0;
    @(negedge clk);
    inst = csr_inst(CSR_SCF, 3'b101, 5'd1);
    #1 expect_true(!inst_ready, "CSR op held off during flush");
    @(negedge clk);
    expect_true(scf == 0, "no CSR write during flush");
    flush_done = 1;
    @(negedge clk);
    flush_done = 0;
    #1 expect_true(inst_ready, "CSR op accepted after flush");
    @(negedge clk);
    inst_valid = 0;
    expect_true(scf == 1, "CSR op done after flush");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
