// tb_ucode_mem -- self-checking test of the micro-instruction memory.
//
// At the default size (64 sequences x 32 words): the reset contents hold the
// S-box sequence as sequence 0 (compared word by word with an encoding built
// field by field in the testbench) and zeros after it; reads have exactly one
// cycle of latency; random writes through the update port read back, and a
// sequence idx occupies addresses idx*32 .. idx*32+31.
module tb_ucode_mem;
  import udec_tb_pkg::*;
  localparam int P = 64, N = 32, DEPTH = P * N;
  logic        clk = 0;
  logic [10:0] raddr, waddr;
  logic [31:0] rdata, wdata;
  logic        we;
  int          checks = 0, failures = 0;
  logic [31:0] model [DEPTH];

  ucode_mem dut (.clk_i(clk), .raddr_i(raddr), .rdata_o(rdata),
                 .we_i(we), .waddr_i(waddr), .wdata_i(wdata));

  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    we = 0; raddr = 0; waddr = 0; wdata = 0;
    for (int i = 0; i < DEPTH; i++) model[i] = (i < 18) ? sbox_word(i) : 32'h0;
    // Initial contents, including one-cycle latency: address set before the edge.
    for (int i = 0; i < DEPTH; i++) begin
      @(negedge clk); raddr = 11'(i);
      @(posedge clk); #1;
      check(rdata == model[i], $sformatf("initial word %0d = %08x", i, rdata));
    end
    // Latency: changing the address without a clock edge must not change rdata.
    @(negedge clk); raddr = 11'd1;
    @(posedge clk); #1;
    raddr = 11'd0; #1;
    check(rdata == model[1], "read is registered");
    // Random updates of whole sequences, then read-back.
    for (int k = 0; k < 300; k++) begin
      int idx, pos;
      idx = $urandom % P; pos = $urandom % N;
      @(negedge clk);
      we = 1; waddr = 11'(idx * N + pos); wdata = $urandom;
      model[idx * N + pos] = wdata;
      @(posedge clk);
    end
    @(negedge clk); we = 0;
    for (int i = 0; i < DEPTH; i += 7) begin
      @(negedge clk); raddr = 11'(i);
      @(posedge clk); #1;
      check(rdata == model[i], $sformatf("word %0d after update", i));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
