// macro_detect -- decoder extension that recognises macro-instructions.
//
// The core's decoder turns every instruction into an issue entry; a
// macro-instruction has no meaning to it and leaves the decoder flagged as an
// illegal instruction.  This block looks at the same 32-bit instruction word
// and, when it is a macro-instruction, clears that illegal-instruction
// exception, fills in the architectural rd/rs1/rs2 and reports the index idx
// of the micro-code sequence to run.  Anything else passes through unchanged.
//
// Encoding (this design's choice; the published description only says that a
// decoded macro-instruction carries an index idx): the RISC-V custom-0 major
// opcode 0001011 in R format, funct3 = 000, idx = funct7.  idx must be below
// P, otherwise the word stays an illegal instruction.  Fetch-side exceptions
// (any cause other than illegal instruction) also leave the entry untouched.
//
// Purely combinational.
module macro_detect
  import udec_pkg::*;
#(
  parameter int unsigned P     = 64,                       // number of macro-instructions
  parameter int unsigned IDX_W = (P > 1) ? $clog2(P) : 1
) (
  input  logic [31:0]      instr_i,     // uncompressed instruction word
  input  issue_entry_t     entry_i,     // decoder output for that word
  output issue_entry_t     entry_o,
  output logic             is_macro_o,
  output logic [IDX_W-1:0] idx_o
);

  logic [6:0] funct7;
  logic       fetch_ok;

  assign funct7   = instr_i[31:25];
  assign fetch_ok = !entry_i.sbe.ex.valid || (entry_i.sbe.ex.cause == CAUSE_ILLEGAL_INSTR);

  always_comb begin
    is_macro_o = (instr_i[6:0] == OPCODE_CUSTOM0) && (instr_i[14:12] == 3'b000)
                 && (32'(funct7) < P) && fetch_ok && !entry_i.sbe.is_compressed;
    idx_o      = IDX_W'(funct7);
    entry_o    = entry_i;
    if (is_macro_o) begin
      entry_o.sbe.rd       = REG_ADDR_W'(instr_i[11:7]);
      entry_o.sbe.rs1      = REG_ADDR_W'(instr_i[19:15]);
      entry_o.sbe.rs2      = REG_ADDR_W'(instr_i[24:20]);
      entry_o.sbe.ex       = '0;
      entry_o.is_ctrl_flow = 1'b0;
    end
  end

endmodule
