// udec_fsm -- bypass / micro-decode state machine with its address counter.
//
// Two states.  In BYPASS the block is a pipeline register: each decoded
// instruction accepted from the decoder is held for one stage and handed to
// the FIFO unchanged.  When the accepted instruction is a macro-instruction
// (in_is_macro_i), its fields are kept, the counter is loaded with the base
// address idx*N_P of its sequence and the machine enters UDEC.  In UDEC every
// cycle in which the FIFO accepts, the micro-instruction at the counter's
// address is turned into an issue entry and sent, and the address advances by
// one (@dr+1).  The sequence ends with the word whose skip bit is 0, or after
// N_P words, and the machine returns to BYPASS; a new instruction may be
// accepted in that last cycle.
//
// Building an issue entry from a micro-instruction: fu and op are copied;
// each 3-bit register code becomes the macro-instruction's rd, rs1 or rs2, or
// one of the temporaries t1..t5 (registers 32..36); the 10-bit immediate is
// sign-extended into the result field and selected as second operand when it
// is not zero; pc, compressed flag and exception record are the
// macro-instruction's.
//
// Memory interface: mem_addr_o is the address whose word must be on
// mem_rdata_i in the next cycle (synchronous-read memory).  With the FIFO
// always ready, a sequence of k micro-instructions leaves in k consecutive
// cycles, starting the cycle after the macro-instruction is accepted.
//
// Follows the published design: the two modes, entering the micro-decode
// state on a macro-instruction, base address idx*N_P, one micro-instruction
// per cycle, leaving on "32 or skip", the field layout and the register codes
// printed in the micro-code example.  This design's choices: the skip bit's
// polarity (taken from the printed example, where the last word has skip = 0),
// the codes of t4, t5 and rs2, the immediate rule and the handshakes.
module udec_fsm
  import udec_pkg::*;
#(
  parameter int unsigned P      = 64,
  parameter int unsigned N_P    = 32,
  localparam int unsigned IDX_W  = (P > 1) ? $clog2(P) : 1,
  localparam int unsigned ADDR_W = (P * N_P > 1) ? $clog2(P * N_P) : 1,
  localparam int unsigned CNT_W  = (N_P > 1) ? $clog2(N_P) : 1
) (
  input  logic                clk_i,
  input  logic                rst_ni,
  input  logic                flush_i,
  // from the decoder
  input  logic                in_valid_i,
  output logic                in_ready_o,
  input  issue_entry_t        in_entry_i,
  input  logic                in_is_macro_i,
  input  logic [IDX_W-1:0]    in_idx_i,
  // micro-code memory
  output logic [ADDR_W-1:0]   mem_addr_o,
  input  logic [UINSTR_W-1:0] mem_rdata_i,
  // to the FIFO
  output logic                out_valid_o,
  input  logic                out_ready_i,
  output issue_entry_t        out_entry_o,
  // status
  output logic                udec_o,        // in micro-decode state
  output logic                seq_end_o      // last micro-instruction sent this cycle
);

  typedef enum logic {BYPASS, UDEC} state_e;

  state_e            state_q, state_d;
  issue_entry_t      held_q;          // bypassed instruction or macro-instruction
  logic              held_valid_q;    // held_q waits to be sent (BYPASS only)
  logic [ADDR_W-1:0] addr_q;          // address of the word on mem_rdata_i
  logic [CNT_W-1:0]  cnt_q;           // position in the sequence
  uinstr_t           u;
  logic              push, accept, last;
  issue_entry_t      uop;

  assign u = uinstr_t'(mem_rdata_i);

  always_comb begin
    uop                   = held_q;
    uop.valid             = 1'b1;
    uop.is_ctrl_flow      = 1'b0;
    uop.sbe.trans_id      = '0;
    uop.sbe.fu            = u.fu;
    uop.sbe.op            = u.op;
    uop.sbe.rd            = map_reg(u.rd,  held_q.sbe.rd, held_q.sbe.rs1, held_q.sbe.rs2);
    uop.sbe.rs1           = map_reg(u.rs1, held_q.sbe.rd, held_q.sbe.rs1, held_q.sbe.rs2);
    uop.sbe.rs2           = map_reg(u.rs2, held_q.sbe.rd, held_q.sbe.rs1, held_q.sbe.rs2);
    uop.sbe.result        = {{(XLEN-10){u.imm[9]}}, u.imm};
    uop.sbe.valid         = 1'b0;
    uop.sbe.use_imm       = (u.imm != '0);
    uop.sbe.use_zimm      = 1'b0;
    uop.sbe.use_pc        = 1'b0;
    uop.sbe.bp            = '0;
  end

  assign out_valid_o = (state_q == UDEC) || held_valid_q;
  assign out_entry_o = (state_q == UDEC) ? uop : held_q;
  assign push        = out_valid_o && out_ready_i;
  assign last        = (state_q == UDEC) && (!u.skip || cnt_q == CNT_W'(N_P - 1));
  assign in_ready_o  = (state_q == UDEC) ? (push && last) : (!held_valid_q || push);
  assign accept      = in_valid_i && in_ready_o;
  assign udec_o      = (state_q == UDEC);
  assign seq_end_o   = push && last;

  always_comb begin
    state_d    = state_q;
    mem_addr_o = addr_q;
    if (accept && in_is_macro_i) begin
      state_d    = UDEC;
      mem_addr_o = ADDR_W'(in_idx_i) * ADDR_W'(N_P);
    end else if (state_q == UDEC && push) begin
      if (last) state_d = BYPASS;
      else      mem_addr_o = addr_q + 1'b1;
    end
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      state_q      <= BYPASS;
      held_valid_q <= 1'b0;
      held_q       <= '0;
      addr_q       <= '0;
      cnt_q        <= '0;
    end else if (flush_i) begin
      state_q      <= BYPASS;
      held_valid_q <= 1'b0;
    end else begin
      state_q <= state_d;
      addr_q  <= mem_addr_o;
      if (accept) begin
        held_q       <= in_entry_i;
        held_valid_q <= !in_is_macro_i;
        cnt_q        <= '0;
      end else begin
        if (push && state_q == BYPASS) held_valid_q <= 1'b0;
        if (push && state_q == UDEC)   cnt_q <= cnt_q + 1'b1;
      end
    end
  end

  // A macro-instruction carries no pending exception.
  a_macro_no_exception: assert property (@(posedge clk_i) disable iff (!rst_ni)
                                         (accept && in_is_macro_i) |-> !in_entry_i.sbe.ex.valid);

endmodule
