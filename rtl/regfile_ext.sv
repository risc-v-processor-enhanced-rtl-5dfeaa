// regfile_ext -- integer register file extended with micro-code temporaries.
//
// NR_GPR architectural registers x0..x31 plus NR_TEMP temporaries at
// addresses 32..36, which only micro-instructions name (the instruction set's
// 5-bit register fields cannot reach them).  x0 reads as zero and ignores
// writes.  NR_READ asynchronous read ports for the issue stage's operand read,
// NR_WRITE write ports for the commit stage, written at the clock edge; when
// two ports write the same register the higher-numbered port wins.  All
// registers reset to zero.
//
// The five extra registers follow the published design; port counts (two
// read, two write, as in the CVA6 register file), reset values and write
// priority are this design's choices.
module regfile_ext
  import udec_pkg::*;
#(
  parameter int unsigned NR_READ  = 2,
  parameter int unsigned NR_WRITE = 2,
  parameter int unsigned NR_REGS  = NR_GPR + NR_TEMP
) (
  input  logic                                  clk_i,
  input  logic                                  rst_ni,
  input  logic [NR_READ-1:0][REG_ADDR_W-1:0]    raddr_i,
  output logic [NR_READ-1:0][XLEN-1:0]          rdata_o,
  input  logic [NR_WRITE-1:0][REG_ADDR_W-1:0]   waddr_i,
  input  logic [NR_WRITE-1:0][XLEN-1:0]         wdata_i,
  input  logic [NR_WRITE-1:0]                   we_i
);

  logic [XLEN-1:0] regs_q [NR_REGS];

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      for (int unsigned r = 0; r < NR_REGS; r++) regs_q[r] <= '0;
    end else begin
      for (int unsigned w = 0; w < NR_WRITE; w++) begin
        if (we_i[w] && waddr_i[w] != '0 && 32'(waddr_i[w]) < NR_REGS)
          regs_q[waddr_i[w]] <= wdata_i[w];
      end
    end
  end

  always_comb begin
    for (int unsigned r = 0; r < NR_READ; r++) begin
      rdata_o[r] = (32'(raddr_i[r]) < NR_REGS) ? regs_q[raddr_i[r]] : '0;
    end
  end

endmodule
