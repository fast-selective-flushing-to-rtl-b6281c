// fase_data_array: line data store of the L1 data cache, SETS*WAYS lines of
// LINE_BITS bits (32 KiB at the default 64 sets x 8 ways x 64 bytes).
//
// Read port: rd_en with a set and a way returns the whole line one clock
// later (synchronous read). Write port: one line, with a per-byte write mask,
// so that a refill writes the whole line and a store writes only its bytes.
// The paper names the data array as the target of a line flush; its
// organisation here (line-wide ports, one read and one write port) is this
// design's choice. The array needs no reset: a line is only read after a
// refill has written it.
module fase_data_array
  import fase_pkg::*;
#(
  parameter int unsigned SETS      = DEF_SETS,
  parameter int unsigned WAYS      = DEF_WAYS,
  parameter int unsigned LINE_W    = LINE_BITS,
  localparam int unsigned SET_W    = $clog2(SETS),
  localparam int unsigned WAY_W    = (WAYS > 1) ? $clog2(WAYS) : 1,
  localparam int unsigned NBYTES   = LINE_W / 8
) (
  input  logic              clk,
  input  logic              rd_en,
  input  logic [SET_W-1:0]  rd_set,
  input  logic [WAY_W-1:0]  rd_way,
  output logic [LINE_W-1:0] rd_line,
  input  logic              wr_en,
  input  logic [SET_W-1:0]  wr_set,
  input  logic [WAY_W-1:0]  wr_way,
  input  logic [LINE_W-1:0] wr_line,
  input  logic [NBYTES-1:0] wr_mask
);

  logic [LINE_W-1:0] mem [WAYS*SETS];

  always_ff @(posedge clk) begin
    if (wr_en) begin
      for (int b = 0; b < NBYTES; b++)
        if (wr_mask[b]) mem[{wr_way, wr_set}][b*8 +: 8] <= wr_line[b*8 +: 8];
    end
    if (rd_en) rd_line <= mem[{rd_way, rd_set}];
  end

endmodule
