// udec_pkg -- types and constants shared by the micro-decoder blocks.
//
// The micro-decoder sits between the decoder and the issue stage of a 64-bit
// CVA6-class RISC-V core.  Everything that crosses that boundary is an
// "issue entry": the decoded instruction in the core's scoreboard-entry layout
// plus a valid and a control-flow flag.  The layout below reproduces the
// CVA6 scoreboard entry (program counter, transaction id, functional unit,
// operation, three 6-bit register addresses, 64-bit result/immediate, operand
// flags, exception record, branch-prediction record, compressed flag), which
// adds up to the 364 bits the FIFO of the micro-decode stage is said to carry.
// The field widths are those of the CVA6 core; the total matches the published
// FIFO width.
//
// A micro-instruction is one 32-bit word of the micro-code memory:
//   [31:28] fu    functional unit (CVA6 fu_t code, 4 bits)
//   [27:20] op    operation       (CVA6 fu_op code, 8 bits)
//   [19:17] rd    3-bit register code
//   [16:14] rs1   3-bit register code
//   [13:11] rs2   3-bit register code
//   [10:1]  imm   10-bit immediate
//   [0]     skip  1: another micro-instruction follows, 0: last of the sequence
// The field positions are the published ones.  The 3-bit register codes name
// the macro-instruction's own rd/rs1/rs2 or one of five temporaries that only
// micro-instructions reach (t1..t5, register-file entries 32..36).
package udec_pkg;

  localparam int unsigned XLEN        = 64;
  localparam int unsigned REG_ADDR_W  = 6;   // CVA6 register address width
  localparam int unsigned TRANS_ID_W  = 3;   // 8 scoreboard entries
  localparam int unsigned NR_GPR      = 32;
  localparam int unsigned NR_TEMP     = 5;   // registers reachable only by micro-code
  localparam int unsigned UINSTR_W    = 32;  // micro-instruction width M

  // Functional unit codes (CVA6 numbering; ALU = 4'b0011 as in the micro-code).
  typedef enum logic [3:0] {
    FU_NONE      = 4'd0,
    FU_LOAD      = 4'd1,
    FU_STORE     = 4'd2,
    FU_ALU       = 4'd3,
    FU_CTRL_FLOW = 4'd4,
    FU_MULT      = 4'd5,
    FU_CSR       = 4'd6
  } fu_t;

  // ALU operation codes used by the micro-code (CVA6 fu_op numbering).
  localparam logic [7:0] OP_ADD  = 8'd0;
  localparam logic [7:0] OP_XORL = 8'd4;
  localparam logic [7:0] OP_ORL  = 8'd5;
  localparam logic [7:0] OP_ANDL = 8'd6;
  localparam logic [7:0] OP_SRLW = 8'd10;
  localparam logic [7:0] OP_SLLW = 8'd11;

  // Register codes of the micro-instruction format.
  localparam logic [2:0] RC_T1  = 3'd0;
  localparam logic [2:0] RC_T2  = 3'd1;
  localparam logic [2:0] RC_T3  = 3'd2;
  localparam logic [2:0] RC_T4  = 3'd3;
  localparam logic [2:0] RC_T5  = 3'd4;
  localparam logic [2:0] RC_RD  = 3'd5;
  localparam logic [2:0] RC_RS1 = 3'd6;
  localparam logic [2:0] RC_RS2 = 3'd7;

  typedef struct packed {
    logic [XLEN-1:0] cause;
    logic [XLEN-1:0] tval;
    logic            valid;
  } exception_t;                                   // 129 bits

  typedef enum logic [2:0] {
    CF_NONE, CF_BRANCH, CF_JUMP, CF_JUMPR, CF_RETURN
  } cf_t;

  typedef struct packed {
    cf_t             cf;
    logic [XLEN-1:0] predict_address;
  } branchpredict_sbe_t;                           // 67 bits

  typedef struct packed {
    logic [XLEN-1:0]       pc;
    logic [TRANS_ID_W-1:0] trans_id;
    fu_t                   fu;
    logic [7:0]            op;
    logic [REG_ADDR_W-1:0] rs1;
    logic [REG_ADDR_W-1:0] rs2;
    logic [REG_ADDR_W-1:0] rd;
    logic [XLEN-1:0]       result;     // immediate until executed
    logic                  valid;
    logic                  use_imm;
    logic                  use_zimm;
    logic                  use_pc;
    exception_t            ex;
    branchpredict_sbe_t    bp;
    logic                  is_compressed;
  } sb_entry_t;                                    // 362 bits

  typedef struct packed {
    logic      valid;
    sb_entry_t sbe;
    logic      is_ctrl_flow;
  } issue_entry_t;                                 // 364 bits

  typedef struct packed {
    fu_t        fu;
    logic [7:0] op;
    logic [2:0] rd;
    logic [2:0] rs1;
    logic [2:0] rs2;
    logic [9:0] imm;
    logic       skip;
  } uinstr_t;                                      // 32 bits

  localparam logic [XLEN-1:0] CAUSE_ILLEGAL_INSTR = 64'd2;
  localparam logic [6:0]      OPCODE_CUSTOM0      = 7'b0001011;

  // Physical register of a 3-bit register code, given the macro-instruction's
  // architectural registers.
  function automatic logic [REG_ADDR_W-1:0] map_reg(
      input logic [2:0] code,
      input logic [REG_ADDR_W-1:0] rd, rs1, rs2);
    unique case (code)
      RC_RD:   map_reg = rd;
      RC_RS1:  map_reg = rs1;
      RC_RS2:  map_reg = rs2;
      default: map_reg = REG_ADDR_W'(NR_GPR) + REG_ADDR_W'(code);  // t1..t5
    endcase
  endfunction

endpackage
