// secv_stage -- the micro-decode pipeline stage inserted between the decoder
// and the issue stage.
//
// Three parts, as in the published design: the bypass / micro-decode state
// machine with its address counter (udec_fsm), the micro-instruction memory
// (ucode_mem, P sequences of N_P 32-bit words) and a depth-2
// first-word-fall-through FIFO (fwft_fifo) of 364-bit issue entries that
// absorbs the one-instruction-per-cycle flow of injected micro-instructions
// when the issue stage stalls.
//
// Interface: the decoder side is a valid/ready handshake carrying the decoded
// entry and, for a macro-instruction, its index.  The issue side is the
// core's valid/acknowledge handshake: issue_valid_o with the entry on
// issue_entry_o, consumed by issue_ack_i.  ucode_we_i/ucode_waddr_i/
// ucode_wdata_i rewrite micro-code words.  flush_i (branch mispredict,
// exception) drops everything in the stage, including a sequence in flight.
//
// Timing: an ordinary instruction accepted in cycle c reaches the issue side
// in cycle c+2 (one cycle in the stage register, one in the FIFO).  A
// macro-instruction accepted in cycle c has its first micro-instruction there
// in cycle c+2 and the rest one per cycle while the issue stage keeps up.
module secv_stage
  import udec_pkg::*;
#(
  parameter int unsigned  P          = 64,
  parameter int unsigned  N_P        = 32,
  parameter int unsigned  FIFO_DEPTH = 2,
  parameter string        INIT_FILE  = "rtl/ucode_sbox.hex",
  localparam int unsigned IDX_W      = (P > 1) ? $clog2(P) : 1,
  localparam int unsigned ADDR_W     = (P * N_P > 1) ? $clog2(P * N_P) : 1
) (
  input  logic                clk_i,
  input  logic                rst_ni,
  input  logic                flush_i,
  input  logic                in_valid_i,
  output logic                in_ready_o,
  input  issue_entry_t        in_entry_i,
  input  logic                in_is_macro_i,
  input  logic [IDX_W-1:0]    in_idx_i,
  output logic                issue_valid_o,
  output issue_entry_t        issue_entry_o,
  input  logic                issue_ack_i,
  input  logic                ucode_we_i,
  input  logic [ADDR_W-1:0]   ucode_waddr_i,
  input  logic [UINSTR_W-1:0] ucode_wdata_i,
  output logic                udec_o,
  output logic                seq_end_o
);

  logic [ADDR_W-1:0]   mem_addr;
  logic [UINSTR_W-1:0] mem_rdata;
  logic                f_valid, f_ready;
  issue_entry_t        f_entry;

  udec_fsm #(.P(P), .N_P(N_P)) i_fsm (
    .clk_i, .rst_ni, .flush_i,
    .in_valid_i, .in_ready_o, .in_entry_i, .in_is_macro_i, .in_idx_i,
    .mem_addr_o  (mem_addr),
    .mem_rdata_i (mem_rdata),
    .out_valid_o (f_valid),
    .out_ready_i (f_ready),
    .out_entry_o (f_entry),
    .udec_o, .seq_end_o
  );

  ucode_mem #(.P(P), .N_P(N_P), .M(UINSTR_W), .INIT_FILE(INIT_FILE)) i_mem (
    .clk_i,
    .raddr_i (mem_addr),
    .rdata_o (mem_rdata),
    .we_i    (ucode_we_i),
    .waddr_i (ucode_waddr_i),
    .wdata_i (ucode_wdata_i)
  );

  fwft_fifo #(.T(issue_entry_t), .DEPTH(FIFO_DEPTH)) i_fifo (
    .clk_i, .rst_ni, .flush_i,
    .wvalid_i (f_valid),
    .wready_o (f_ready),
    .wdata_i  (f_entry),
    .rvalid_o (issue_valid_o),
    .rack_i   (issue_ack_i),
    .rdata_o  (issue_entry_o)
  );

endmodule
