// fase_tile: the FaSe part of a processor tile, i.e. the core-side ISA
// extension (csr.scf and scflush) connected to the FaSe L1 data cache.
//
// The processor pipeline itself is not part of this RTL: its two channels
// into FaSe are ports of this module. The instruction channel (inst_*) takes
// the CSR instructions that read or write csr.scf and the scflush
// instruction, with their rs1 operand, and stalls scflush until the cache
// has finished the flush. The data channel (req_*/resp_*) is the core's
// load/store port into the L1 data cache. The memory channel (mem_*) goes to
// the next level of the memory hierarchy, one 64-byte line per transfer.
//
// Wiring: csr.scf goes straight to the cache, where FaSe control samples it
// on every access (CLSF critical segment); scflush's flush_req / flush_mode /
// flush_done run between the extension and the cache's FaSe control. The
// cache's event strobes and CLSF flag are brought out for counting. All
// sizes are those of the cache (defaults: 32 KiB, 8 ways, 64-byte lines).
// The pipeline must not issue a data request while an scflush is stalled;
// the cache also holds req_ready low while it flushes. The split into an
// extension in the core and additions to the data cache follows the paper's
// system overview; the shape of the three channels is this design's own.
module fase_tile
  import fase_pkg::*;
#(
  parameter int unsigned SETS = DEF_SETS,
  parameter int unsigned WAYS = DEF_WAYS
) (
  input  logic                  clk,
  input  logic                  rst_n,
  output logic                  ready,
  // instruction channel (FaSe instructions)
  input  logic                  inst_valid,
  input  logic [31:0]           inst,
  input  logic [XLEN-1:0]       rs1_val,
  output logic                  inst_fase,
  output logic                  inst_ready,
  output logic [XLEN-1:0]       rd_val,
  output logic                  scf,
  // data channel
  input  logic                  req_valid,
  output logic                  req_ready,
  input  logic                  req_store,
  input  logic [PADDR_BITS-1:0] req_addr,
  input  logic [XLEN-1:0]       req_wdata,
  input  logic [WORD_BYTES-1:0] req_wmask,
  output logic                  resp_valid,
  output logic [XLEN-1:0]       resp_rdata,
  // observation
  output logic                  flush_busy,
  output logic                  clsf_flag,
  output logic                  evt_line_flush,
  output logic                  evt_line_wb,
  output logic                  evt_line_nullify,
  output logic                  evt_clsf_nullify,
  // memory channel
  output logic                  mem_req_valid,
  input  logic                  mem_req_ready,
  output logic                  mem_req_write,
  output logic [PADDR_BITS-1:0] mem_req_addr,
  output logic [LINE_BITS-1:0]  mem_req_wdata,
  input  logic                  mem_resp_valid,
  input  logic [LINE_BITS-1:0]  mem_resp_rdata,
  input  logic                  mem_resp_shared
);

  logic        flush_req, flush_done;
  flush_mode_e flush_mode;

  fase_core_ext u_ext (
    .clk, .rst_n,
    .inst_valid, .inst, .rs1_val, .inst_fase, .inst_ready, .rd_val,
    .scf, .flush_req, .flush_mode, .flush_done
  );

  fase_dcache #(.SETS(SETS), .WAYS(WAYS)) u_dcache (
    .clk, .rst_n, .ready,
    .req_valid, .req_ready, .req_store, .req_addr, .req_wdata, .req_wmask,
    .resp_valid, .resp_rdata,
    .scf, .flush_req, .flush_mode, .flush_busy, .flush_done, .clsf_flag,
    .evt_line_flush, .evt_line_wb, .evt_line_nullify, .evt_clsf_nullify,
    .mem_req_valid, .mem_req_ready, .mem_req_write, .mem_req_addr,
    .mem_req_wdata, .mem_resp_valid, .mem_resp_rdata, .mem_resp_shared
  );

endmodule
