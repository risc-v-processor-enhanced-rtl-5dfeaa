// tb_fwft_fifo -- self-checking test of the depth-2 first-word-fall-through FIFO.
//
// Random pushes and acknowledges against a queue model.  Checks every output
// word and its order, that the head is visible without a read cycle, that the
// FIFO reports full after exactly 2 entries, that a write into an empty FIFO
// is visible the next cycle, and that flush empties it.
module tb_fwft_fifo;
  logic        clk = 0, rst_n = 0, flush = 0;
  logic        wvalid, wready, rvalid, rack;
  logic [31:0] wdata, rdata;
  int          checks = 0, failures = 0;
  logic [31:0] model[$];
  int          cyc = 0;

  fwft_fifo #(.T(logic [31:0]), .DEPTH(2)) dut (
    .clk_i(clk), .rst_ni(rst_n), .flush_i(flush),
    .wvalid_i(wvalid), .wready_o(wready), .wdata_i(wdata),
    .rvalid_o(rvalid), .rack_i(rack), .rdata_o(rdata));

  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL @%0d: %s", cyc, what); end
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    wvalid = 0; rack = 0; wdata = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    // Fill: two writes, then it must be full.
    @(negedge clk);
    check(!rvalid && wready, "empty after reset");
    wvalid = 1; wdata = 32'h11;
    @(posedge clk); #1;
    check(rvalid && rdata == 32'h11, "write visible next cycle (fall-through)");
    @(negedge clk); wdata = 32'h22;
    @(posedge clk); #1;
    wvalid = 0;
    check(!wready, "full after two entries");
    check(rdata == 32'h11, "head unchanged while full");
    @(negedge clk); rack = 1;
    @(posedge clk); #1;
    check(rvalid && rdata == 32'h22, "second entry after pop");
    @(negedge clk); rack = 0; flush = 1;
    @(posedge clk); #1;
    flush = 0;
    check(!rvalid, "flush empties");
    // Random traffic.
    for (int i = 0; i < 5000; i++) begin
      @(negedge clk);
      cyc = i;
      wvalid = ($urandom % 3) != 0;
      wdata  = $urandom;
      rack   = rvalid && (($urandom % 3) != 0);
      #1;
      check(rvalid == (model.size() != 0), "valid matches occupancy");
      check(wready == (model.size() < 2 || rack), "ready matches occupancy");
      if (rvalid && model.size() != 0) check(rdata == model[0], "data order");
      @(posedge clk);
      if (rack && model.size() != 0) void'(model.pop_front());
      if (wvalid && (model.size() < 2)) model.push_back(wdata);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
