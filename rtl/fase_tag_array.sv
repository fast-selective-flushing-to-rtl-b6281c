// fase_tag_array: metadata store of the FaSe L1 data cache.
//
// Each of the SETS*WAYS lines has an entry of a TAG_BITS tag, two coherence
// bits and one FaSe state bit (20 + 2 + 1 bits at the default geometry, the
// entry layout of the paper). The FaSe bit says the line was accessed in the
// current time slice. One read port returns the entries of all ways of one
// set, one clock after rd_en (synchronous read, as an SRAM would). Two write
// ports: the metadata port writes tag and coherence of one way, the FaSe port
// writes the FaSe bit of the ways selected by a mask, so that FaSe control can
// set or clear FaSe bits without touching tags. Keeping the FaSe bits as a
// separately written field is this design's choice; the paper only says they
// are stored together with the tag and coherence bits.
//
// After reset an initialiser walks all sets, one per cycle, and writes every
// line to I with its FaSe bit cleared; init_done rises when it has finished
// (SETS cycles). Writes from the ports are ignored until then. When both the
// read and a write address the same set in one cycle the read returns the old
// contents.
module fase_tag_array
  import fase_pkg::*;
#(
  parameter int unsigned SETS     = DEF_SETS,
  parameter int unsigned WAYS     = DEF_WAYS,
  parameter int unsigned TAG_BITS = PADDR_BITS - $clog2(SETS) - OFFSET_BITS,
  localparam int unsigned SET_W   = $clog2(SETS),
  localparam int unsigned WAY_W   = (WAYS > 1) ? $clog2(WAYS) : 1
) (
  input  logic                clk,
  input  logic                rst_n,
  output logic                init_done,
  // read port
  input  logic                rd_en,
  input  logic [SET_W-1:0]    rd_set,
  output logic [TAG_BITS-1:0] rd_tag  [WAYS],
  output coh_e                rd_coh  [WAYS],
  output logic [WAYS-1:0]     rd_fase,
  // metadata (tag + coherence) write port
  input  logic                meta_we,
  input  logic [SET_W-1:0]    meta_set,
  input  logic [WAY_W-1:0]    meta_way,
  input  logic [TAG_BITS-1:0] meta_tag,
  input  coh_e                meta_coh,
  // FaSe state bit write port
  input  logic                fase_we,
  input  logic [SET_W-1:0]    fase_set,
  input  logic [WAYS-1:0]     fase_way_mask,
  input  logic                fase_val
);

  typedef struct packed {
    logic [TAG_BITS-1:0] tag;
    coh_e                coh;
  } meta_t;

  meta_t meta_mem [WAYS][SETS];
  logic  fase_mem [WAYS][SETS];

  logic [SET_W-1:0] init_cnt;
  logic             init_busy;

  assign init_done = ~init_busy;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      init_busy <= 1'b1;
      init_cnt  <= '0;
    end else if (init_busy) begin
      init_cnt <= init_cnt + 1'b1;
      if (init_cnt == SET_W'(SETS - 1)) init_busy <= 1'b0;
    end
  end

  for (genvar w = 0; w < WAYS; w++) begin : g_way
    always_ff @(posedge clk) begin
      if (init_busy) begin
        meta_mem[w][init_cnt] <= '{tag: '0, coh: COH_I};
        fase_mem[w][init_cnt] <= 1'b0;
      end else begin
        if (meta_we && meta_way == WAY_W'(w))
          meta_mem[w][meta_set] <= '{tag: meta_tag, coh: meta_coh};
        if (fase_we && fase_way_mask[w])
          fase_mem[w][fase_set] <= fase_val;
      end
      if (rd_en) begin
        rd_tag[w]  <= meta_mem[w][rd_set].tag;
        rd_coh[w]  <= meta_mem[w][rd_set].coh;
        rd_fase[w] <= fase_mem[w][rd_set];
      end
    end
  end

endmodule
