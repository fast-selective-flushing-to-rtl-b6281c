// tb_fase_data_array: checks the 32 KiB data array at its default geometry:
// full-line writes, byte-masked partial writes and the one-clock read,
// against a reference copy of every line written.
module tb_fase_data_array;
  import fase_pkg::*;

  localparam int SETS = DEF_SETS, WAYS = DEF_WAYS;
  localparam int SET_W = $clog2(SETS), WAY_W = $clog2(WAYS);

  logic clk = 0;
  always #5 clk = ~clk;

  logic                  rd_en = 0, wr_en = 0;
  logic [SET_W-1:0]      rd_set = 0, wr_set = 0;
  logic [WAY_W-1:0]      rd_way = 0, wr_way = 0;
  logic [LINE_BITS-1:0]  rd_line, wr_line = '0;
  logic [LINE_BYTES-1:0] wr_mask = '0;

  fase_data_array dut (.*);

  logic [LINE_BITS-1:0] ref_line [WAYS*SETS];
  int checks = 0, failures = 0;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [LINE_BITS-1:0] rnd_line();
    logic [LINE_BITS-1:0] l;
    for (int i = 0; i < LINE_BITS / 32; i++) l[i*32 +: 32] = $urandom;
    return l;
  endfunction

  task automatic check(int idx);
    rd_en  <= 1'b1;
    rd_set <= SET_W'(idx % SETS);
    rd_way <= WAY_W'(idx / SETS);
    @(posedge clk);
    rd_en <= 1'b0;
    @(negedge clk);
    checks++;
    if (rd_line !== ref_line[idx]) begin
      failures++;
      $display("FAIL line %0d read back wrong", idx);
    end
  endtask

  initial begin
    @(negedge clk);
    // fill every line
    for (int i = 0; i < WAYS * SETS; i++) begin
      wr_en = 1; wr_set = SET_W'(i % SETS); wr_way = WAY_W'(i / SETS);
      wr_line = rnd_line(); wr_mask = '1;
      ref_line[i] = wr_line;
      @(negedge clk);
    end
    wr_en = 0;
    for (int i = 0; i < WAYS * SETS; i += 7) check(i);
    // masked writes
    for (int n = 0; n < 2000; n++) begin
      int i;
      i = $urandom_range(0, WAYS * SETS - 1);
      @(negedge clk);
      wr_en = 1; wr_set = SET_W'(i % SETS); wr_way = WAY_W'(i / SETS);
      wr_line = rnd_line();
      wr_mask = {$urandom, $urandom};
      for (int b = 0; b < LINE_BYTES; b++)
        if (wr_mask[b]) ref_line[i][b*8 +: 8] = wr_line[b*8 +: 8];
      @(negedge clk);
      wr_en = 0;
      if (n % 4 == 0) check(i);
    end
    for (int i = 0; i < WAYS * SETS; i++) check(i);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
