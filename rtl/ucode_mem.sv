// ucode_mem -- micro-instruction memory of the micro-decode stage.
//
// Holds P sequences of N_P micro-instructions of M bits, P*N_P words in all.
// The sequence of macro-instruction idx occupies addresses idx*N_P to
// (idx+1)*N_P-1.  One word is read per clock: the address presented in one
// cycle gives its word on rdata_o in the next (a synchronous read, the
// block-RAM style the FPGA mapping of larger memories implies).
//
// Contents: every word starts at zero; the file INIT_FILE (hex, one word per
// line) is then loaded from address 0.  The default file holds the 18-word
// AES S-box affine-transform sequence as sequence idx = 0.  A write port lets
// the micro-code be changed after reset; the published design calls the
// memory a ROM but motivates it by post-design micro-code updates, and how such
// updates reach the memory is this design's choice.  A write to the address
// being read returns the old word.
module ucode_mem #(
  parameter int unsigned P         = 64,   // macro-instructions
  parameter int unsigned N_P       = 32,   // micro-instructions per macro-instruction
  parameter int unsigned M         = 32,   // bits per micro-instruction
  parameter string       INIT_FILE = "rtl/ucode_sbox.hex",
  localparam int unsigned DEPTH    = P * N_P,
  localparam int unsigned ADDR_W   = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic              clk_i,
  input  logic [ADDR_W-1:0] raddr_i,
  output logic [M-1:0]      rdata_o,
  input  logic              we_i,
  input  logic [ADDR_W-1:0] waddr_i,
  input  logic [M-1:0]      wdata_i
);

  logic [M-1:0] mem [DEPTH];

  initial begin
    for (int unsigned i = 0; i < DEPTH; i++) mem[i] = '0;
    if (INIT_FILE != "") $readmemh(INIT_FILE, mem);
  end

  always_ff @(posedge clk_i) begin
    if (we_i) mem[waddr_i] <= wdata_i;
    rdata_o <= mem[raddr_i];
  end

endmodule
