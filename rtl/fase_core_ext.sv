// fase_core_ext: the core-side part of FaSe, an ISA extension of the RISC-V
// core: the one-bit user CSR csr.scf and the scflush instruction.
//
// csr.scf marks a CLSF critical segment: while it is 1, data cache accesses
// count as critical (software writes it with csrwi scf,1 before and
// csrwi scf,0 after the critical code, and saves, clears and restores it on
// a context switch like any other CSR). All six Zicsr instructions are
// decoded on its CSR number: CSRRW/CSRRS/CSRRC take bit 0 of rs1_val,
// the immediate forms take bit 0 of the 5-bit zimm; CSRRS/CSRRC(I) with
// rs1/zimm field 0 only read. rd_val returns the old value, zero-extended.
//
// scflush starts a selective flush of the L1 data cache. It raises
// flush_req and stalls (inst_ready low) until the cache pulses flush_done,
// so no later instruction starts before the flush has finished. Bit 0 of
// rs1_val selects the mode: 0 for LLSF alone, 1 for CLSF (nullify the flush
// when the CLSF flag is clear, else LLSF).
//
// Interface: the pipeline offers one instruction on inst_valid with its rs1
// operand; inst_fase says that it is one of the FaSe instructions handled
// here; a CSR access completes in the clock it is offered (inst_ready high),
// scflush completes in the clock flush_done arrives. Other instructions are
// ignored. The CSR number (0x800), the scflush encoding (funct12 0xFC4 of the
// SYSTEM opcode) and the mode operand are this design's choices; the paper
// gives the CSR's width and use, the instruction's name and its purpose.
module fase_core_ext
  import fase_pkg::*;
(
  input  logic            clk,
  input  logic            rst_n,
  input  logic            inst_valid,
  input  logic [31:0]     inst,
  input  logic [XLEN-1:0] rs1_val,
  output logic            inst_fase,
  output logic            inst_ready,
  output logic [XLEN-1:0] rd_val,
  // to the data cache
  output logic            scf,
  output logic            flush_req,
  output flush_mode_e     flush_mode,
  input  logic            flush_done
);

  logic [6:0]  opcode;
  logic [2:0]  funct3;
  logic [4:0]  rs1_f, rd_f;
  logic [11:0] funct12;
  logic        is_csr, is_scflush;
  logic        src_bit, csr_wr, new_scf;
  logic        busy;

  assign opcode  = inst[6:0];
  assign rd_f    = inst[11:7];
  assign funct3  = inst[14:12];
  assign rs1_f   = inst[19:15];
  assign funct12 = inst[31:20];

  always_comb begin
    is_csr     = (opcode == OPC_SYSTEM) && (funct3[1:0] != 2'b00) &&
                 (funct12 == CSR_SCF);
    is_scflush = (opcode == OPC_SYSTEM) && (funct3 == 3'b000) &&
                 (rd_f == 5'd0) && (funct12 == SCFLUSH_FUNCT12);
    inst_fase  = is_csr || is_scflush;

    src_bit = funct3[2] ? rs1_f[0] : rs1_val[0];
    csr_wr  = 1'b0;
    new_scf = scf;
    unique case (funct3[1:0])
      2'b01:   begin csr_wr = 1'b1;            new_scf = src_bit;        end
      2'b10:   begin csr_wr = (rs1_f != 5'd0); new_scf = scf | src_bit;  end
      2'b11:   begin csr_wr = (rs1_f != 5'd0); new_scf = scf & ~src_bit; end
      default: begin csr_wr = 1'b0;            new_scf = scf;            end
    endcase

    inst_ready = is_scflush ? (busy && flush_done) : !busy;
    rd_val     = XLEN'(scf);
    flush_req  = busy;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      scf        <= 1'b0;
      busy       <= 1'b0;
      flush_mode <= FLUSH_LLSF;
    end else begin
      if (inst_valid && is_csr && !busy && csr_wr) scf <= new_scf;
      if (inst_valid && is_scflush && !busy) begin
        busy       <= 1'b1;
        flush_mode <= flush_mode_e'(rs1_val[0]);
      end else if (busy && flush_done) begin
        busy <= 1'b0;
      end
    end
  end

  // The cache answers only a flush that was asked for.
  a_done_only_when_busy: assert property (@(posedge clk) disable iff (!rst_n)
    flush_done |-> busy);

endmodule
