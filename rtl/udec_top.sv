// udec_top -- the micro-decoder as it is wired into the core.
//
// Joins the three pieces the micro-decoder adds to a CVA6-class pipeline:
// the macro-instruction recognition added to the decoder (macro_detect), the
// micro-decode stage between decoder and issue (secv_stage: state machine,
// micro-code memory, FIFO) and the register file extended by five
// temporaries (regfile_ext).  The unmodified parts of the core -- frontend,
// decoder, issue stage with renaming and scoreboard, execution units and
// commit -- connect through the ports:
//   dec_*    : the decoder's output (32-bit instruction word and decoded entry)
//              with a valid/ready handshake;
//   issue_*  : entries toward renaming/scoreboard, valid/acknowledge;
//   rf_r*    : operand reads of the issue stage (6-bit register addresses);
//   rf_w*    : write-back from commit;
//   ucode_*  : micro-code update port;
//   flush_i  : pipeline flush.
// Latency from decoder to issue is two cycles; see secv_stage.
module udec_top
  import udec_pkg::*;
#(
  parameter int unsigned  P          = 64,
  parameter int unsigned  N_P        = 32,
  parameter int unsigned  FIFO_DEPTH = 2,
  parameter int unsigned  NR_READ    = 2,
  parameter int unsigned  NR_WRITE   = 2,
  parameter string        INIT_FILE  = "rtl/ucode_sbox.hex",
  localparam int unsigned ADDR_W     = (P * N_P > 1) ? $clog2(P * N_P) : 1
) (
  input  logic                                 clk_i,
  input  logic                                 rst_ni,
  input  logic                                 flush_i,
  input  logic                                 dec_valid_i,
  output logic                                 dec_ready_o,
  input  logic [31:0]                          dec_instr_i,
  input  issue_entry_t                         dec_entry_i,
  output logic                                 issue_valid_o,
  output issue_entry_t                         issue_entry_o,
  input  logic                                 issue_ack_i,
  input  logic [NR_READ-1:0][REG_ADDR_W-1:0]   rf_raddr_i,
  output logic [NR_READ-1:0][XLEN-1:0]         rf_rdata_o,
  input  logic [NR_WRITE-1:0][REG_ADDR_W-1:0]  rf_waddr_i,
  input  logic [NR_WRITE-1:0][XLEN-1:0]        rf_wdata_i,
  input  logic [NR_WRITE-1:0]                  rf_we_i,
  input  logic                                 ucode_we_i,
  input  logic [ADDR_W-1:0]                    ucode_waddr_i,
  input  logic [UINSTR_W-1:0]                  ucode_wdata_i,
  output logic                                 udec_o,
  output logic                                 seq_end_o
);

  localparam int unsigned IDX_W = (P > 1) ? $clog2(P) : 1;

  issue_entry_t     md_entry;
  logic             md_is_macro;
  logic [IDX_W-1:0] md_idx;

  macro_detect #(.P(P)) i_macro_detect (
    .instr_i    (dec_instr_i),
    .entry_i    (dec_entry_i),
    .entry_o    (md_entry),
    .is_macro_o (md_is_macro),
    .idx_o      (md_idx)
  );

  secv_stage #(.P(P), .N_P(N_P), .FIFO_DEPTH(FIFO_DEPTH), .INIT_FILE(INIT_FILE)) i_secv (
    .clk_i, .rst_ni, .flush_i,
    .in_valid_i    (dec_valid_i),
    .in_ready_o    (dec_ready_o),
    .in_entry_i    (md_entry),
    .in_is_macro_i (md_is_macro),
    .in_idx_i      (md_idx),
    .issue_valid_o, .issue_entry_o, .issue_ack_i,
    .ucode_we_i, .ucode_waddr_i, .ucode_wdata_i,
    .udec_o, .seq_end_o
  );

  regfile_ext #(.NR_READ(NR_READ), .NR_WRITE(NR_WRITE)) i_regfile (
    .clk_i, .rst_ni,
    .raddr_i (rf_raddr_i),
    .rdata_o (rf_rdata_o),
    .waddr_i (rf_waddr_i),
    .wdata_i (rf_wdata_i),
    .we_i    (rf_we_i)
  );

endmodule
