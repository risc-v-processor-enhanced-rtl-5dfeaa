// udec_tb_pkg -- reference models shared by the micro-decoder testbenches.
//
// Independent of the RTL: a behavioural model of the ALU operations the
// micro-code uses (64-bit integer semantics of the RISC-V instructions they
// stand for), the AES S-box affine transform the example sequence computes,
// the micro-instruction packing written out bit by bit, and helpers that
// build decoder-side issue entries.
package udec_tb_pkg;
  import udec_pkg::*;

  function automatic logic [63:0] sext32(input logic [31:0] w);
    return {{32{w[31]}}, w};
  endfunction

  // Execute one ALU operation; b is the register or the immediate operand.
  function automatic logic [63:0] alu(input logic [7:0] op, input logic [63:0] a, input logic [63:0] b);
    case (op)
      8'd0:    return a + b;                          // ADD
      8'd4:    return a ^ b;                          // XORL
      8'd5:    return a | b;                          // ORL
      8'd6:    return a & b;                          // ANDL
      8'd10:   return sext32(a[31:0] >> b[4:0]);      // SRLW
      8'd11:   return sext32(a[31:0] << b[4:0]);      // SLLW
      default: return 64'hDEAD_BEEF_DEAD_BEEF;
    endcase
  endfunction

  function automatic logic [7:0] rotl8(input logic [7:0] x, input int k);
    return (x << k) | (x >> (8 - k));
  endfunction

  // AES S-box affine transform: b ^ rotl1 ^ rotl2 ^ rotl3 ^ rotl4 ^ 0x63.
  function automatic logic [7:0] affine(input logic [7:0] b);
    return b ^ rotl8(b, 1) ^ rotl8(b, 2) ^ rotl8(b, 3) ^ rotl8(b, 4) ^ 8'h63;
  endfunction

  function automatic logic [31:0] pack_u(input int fu, input int op, input int rd, input int rs1,
                                         input int rs2, input int imm, input bit skip);
    logic [31:0] w;
    w        = '0;
    w[31:28] = 4'(fu);
    w[27:20] = 8'(op);
    w[19:17] = 3'(rd);
    w[16:14] = 3'(rs1);
    w[13:11] = 3'(rs2);
    w[10:1]  = 10'(imm);
    w[0]     = skip;
    return w;
  endfunction

  // The 18-word S-box sequence (register codes: t1=0 t2=1 t3=2 rd=5 rs1=6).
  function automatic logic [31:0] sbox_word(input int i);
    int k;
    if (i >= 16) begin
      if (i == 16) return pack_u(3, 4, 0, 0, 0, 99, 1);     // xori t1,t1,99
      else         return pack_u(3, 6, 5, 0, 0, 255, 0);    // andi rd,t1,255 (last)
    end
    k = i / 4 + 1;                                           // rotation amount
    case (i % 4)
      0: return pack_u(3, 10, 1, 6, 0, 8 - k, 1);            // srliw t2,rs1,8-k
      1: return pack_u(3, 11, 2, 6, 0, k, 1);                // slliw t3,rs1,k
      2: return pack_u(3, 5, 1, 1, 2, 0, 1);                 // or    t2,t2,t3
      default: return pack_u(3, 4, 0, (k == 1) ? 6 : 0, 1, 0, 1); // xor t1,(rs1|t1),t2
    endcase
  endfunction

  // Physical register of a code, written independently of the RTL's mapping.
  function automatic int phys(input int code, input int rd, input int rs1, input int rs2);
    if (code == 5) return rd;
    if (code == 6) return rs1;
    if (code == 7) return rs2;
    return 32 + code;
  endfunction

  function automatic issue_entry_t alu_entry(input logic [63:0] pc, input int op, input int rd,
                                             input int rs1, input int rs2, input logic [63:0] imm,
                                             input bit use_imm);
    issue_entry_t e;
    e                 = '0;
    e.valid           = 1'b1;
    e.sbe.pc          = pc;
    e.sbe.fu          = FU_ALU;
    e.sbe.op          = 8'(op);
    e.sbe.rd          = 6'(rd);
    e.sbe.rs1         = 6'(rs1);
    e.sbe.rs2         = 6'(rs2);
    e.sbe.result      = imm;
    e.sbe.use_imm     = use_imm;
    return e;
  endfunction

  // What the core's decoder produces for a word it does not know.
  function automatic issue_entry_t illegal_entry(input logic [63:0] pc, input logic [31:0] instr);
    issue_entry_t e;
    e              = '0;
    e.valid        = 1'b1;
    e.sbe.pc       = pc;
    e.sbe.ex.valid = 1'b1;
    e.sbe.ex.cause = 64'd2;
    e.sbe.ex.tval  = 64'(instr);
    return e;
  endfunction

  function automatic logic [31:0] macro_word(input int idx, input int rd, input int rs1, input int rs2);
    return {7'(idx), 5'(rs2), 5'(rs1), 3'b000, 5'(rd), 7'b0001011};
  endfunction

  function automatic logic [31:0] addi_word(input int rd, input int rs1, input int imm);
    return {12'(imm), 5'(rs1), 3'b000, 5'(rd), 7'b0010011};
  endfunction

endpackage
