// fase_pkg: types and constants shared by the FaSe (fast selective flushing)
// L1 data cache and the core-side extension.
//
// The default geometry is the evaluated one: a 32 KiB, 8-way set-associative
// write-back L1 data cache with 64-byte lines, i.e. 64 sets and 512 lines,
// behind 32-bit physical addresses, which leaves a 20-bit tag (the tag width
// printed in the tag-array entry layout). The two coherence bits use the
// MESI-like encoding of the LLSF decision table: 11 M, 10 E, 01 S, 00 I.
//
// The CSR address of csr.scf and the encoding of scflush are not fixed by
// the source and are this design's choices: csr.scf sits in the user
// read/write custom CSR space at 0x800, scflush is a SYSTEM-opcode instruction
// with funct12 = 0xFC4 (next to Rocket's CFLUSH.D.L1 = 0xFC0 and
// DISCARD.D.L1 = 0xFC2).
package fase_pkg;

  localparam int unsigned XLEN        = 64;
  localparam int unsigned PADDR_BITS  = 32;
  localparam int unsigned LINE_BYTES  = 64;
  localparam int unsigned LINE_BITS   = LINE_BYTES * 8;
  localparam int unsigned WORD_BYTES  = XLEN / 8;
  localparam int unsigned LINE_WORDS  = LINE_BYTES / WORD_BYTES;
  localparam int unsigned OFFSET_BITS = $clog2(LINE_BYTES);
  localparam int unsigned DEF_SETS    = 64;
  localparam int unsigned DEF_WAYS    = 8;

  // Coherence state, two bits per line, encoded as in the LLSF table.
  typedef enum logic [1:0] {
    COH_I = 2'b00,
    COH_S = 2'b01,
    COH_E = 2'b10,
    COH_M = 2'b11
  } coh_e;

  // CSR number of the 1-bit csr.scf register (assumed, user custom RW space).
  localparam logic [11:0] CSR_SCF = 12'h800;

  // scflush: funct12 = 0xFC4, rs1, funct3 = 000, rd = 00000, opcode SYSTEM.
  localparam logic [11:0] SCFLUSH_FUNCT12 = 12'hFC4;
  localparam logic [6:0]  OPC_SYSTEM      = 7'b1110011;

  // Flush mode sent with a flush request.
  typedef enum logic {
    FLUSH_LLSF = 1'b0,  // line level selective flush only
    FLUSH_CLSF = 1'b1   // cache level selective flush, LLSF when the flag is set
  } flush_mode_e;

endpackage
