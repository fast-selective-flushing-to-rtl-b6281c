// tb_fase_tag_array: checks the tag array at the default geometry
// (64 sets x 8 ways): the reset initialiser (every line I, FaSe bit 0, done
// after SETS clocks), metadata writes, masked FaSe-bit writes that leave the
// tag and coherence bits alone, and the one-clock synchronous read, against
// a reference copy kept by the testbench.
module tb_fase_tag_array;
  import fase_pkg::*;

  localparam int SETS = DEF_SETS, WAYS = DEF_WAYS;
  localparam int SET_W = $clog2(SETS), WAY_W = $clog2(WAYS);
  localparam int TAG_W = PADDR_BITS - SET_W - OFFSET_BITS;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic             init_done, rd_en = 0, meta_we = 0, fase_we = 0, fase_val = 0;
  logic [SET_W-1:0] rd_set = 0, meta_set = 0, fase_set = 0;
  logic [WAY_W-1:0] meta_way = 0;
  logic [TAG_W-1:0] meta_tag = 0;
  coh_e             meta_coh = COH_I;
  logic [WAYS-1:0]  fase_way_mask = 0;
  logic [TAG_W-1:0] rd_tag [WAYS];
  coh_e             rd_coh [WAYS];
  logic [WAYS-1:0]  rd_fase;

  fase_tag_array dut (.*);

  logic [TAG_W-1:0] ref_tag [SETS][WAYS];
  coh_e             ref_coh [SETS][WAYS];
  logic             ref_fase[SETS][WAYS];
  int checks = 0, failures = 0, init_cycles = 0;

  initial begin
    repeat (40000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check_set(int s);
    rd_en  <= 1'b1;
    rd_set <= SET_W'(s);
    @(posedge clk);
    rd_en  <= 1'b0;
    @(negedge clk);
    for (int w = 0; w < WAYS; w++) begin
      checks++;
      if (rd_coh[w] != ref_coh[s][w] || rd_fase[w] != ref_fase[s][w] ||
          (ref_coh[s][w] != COH_I && rd_tag[w] != ref_tag[s][w])) begin
        failures++;
        $display("FAIL set %0d way %0d: tag %h coh %b fase %b, expected %h %b %b", s, w,
                 rd_tag[w], rd_coh[w], rd_fase[w], ref_tag[s][w], ref_coh[s][w], ref_fase[s][w]);
      end
    end
  endtask

  initial begin
    for (int s = 0; s < SETS; s++)
      for (int w = 0; w < WAYS; w++) begin
        ref_tag[s][w] = '0; ref_coh[s][w] = COH_I; ref_fase[s][w] = 1'b0;
      end
    repeat (2) @(posedge clk);
    rst_n <= 1'b1;
    @(posedge clk);
    while (!init_done) begin
      @(posedge clk);
      init_cycles++;
    end
    checks++;
    if (init_cycles != SETS) begin
      failures++;
      $display("FAIL initialisation took %0d clocks, expected %0d", init_cycles, SETS);
    end
    for (int s = 0; s < SETS; s++) check_set(s);

    // random metadata and FaSe writes, sometimes both in one clock
    for (int i = 0; i < 3000; i++) begin
      @(negedge clk);
      meta_we       = ($urandom_range(0, 1) == 1);
      meta_set      = SET_W'($urandom);
      meta_way      = WAY_W'($urandom);
      meta_tag      = TAG_W'($urandom);
      meta_coh      = coh_e'($urandom_range(0, 3));
      fase_we       = ($urandom_range(0, 1) == 1);
      fase_set      = SET_W'($urandom);
      fase_way_mask = WAYS'($urandom);
      fase_val      = 1'($urandom);
      @(posedge clk);
      if (meta_we) begin
        ref_tag[meta_set][meta_way] = meta_tag;
        ref_coh[meta_set][meta_way] = meta_coh;
      end
      if (fase_we)
        for (int w = 0; w < WAYS; w++) if (fase_way_mask[w]) ref_fase[fase_set][w] = fase_val;
      @(negedge clk);
      meta_we = 0;
      fase_we = 0;
      if (i % 10 == 0) check_set($urandom_range(0, SETS - 1));
    end
    for (int s = 0; s < SETS; s++) check_set(s);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
