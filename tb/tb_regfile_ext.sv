// tb_regfile_ext -- self-checking test of the register file with five
// micro-code temporaries (37 registers, 2 read and 2 write ports).
//
// Random writes on both ports against an array model, x0 stays zero, the
// temporaries 32..36 hold data like any other register, addresses 37..63 read
// zero, and the higher write port wins a same-register conflict.
module tb_regfile_ext;
  logic             clk = 0, rst_n = 0;
  logic [1:0][5:0]  raddr, waddr;
  logic [1:0][63:0] rdata, wdata;
  logic [1:0]       we;
  logic [63:0]      model [64];
  int               checks = 0, failures = 0, temp_hits = 0;

  regfile_ext dut (.clk_i(clk), .rst_ni(rst_n), .raddr_i(raddr), .rdata_o(rdata),
                   .waddr_i(waddr), .wdata_i(wdata), .we_i(we));

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
    for (int r = 0; r < 64; r++) model[r] = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < 5000; i++) begin
      @(negedge clk);
      for (int p = 0; p < 2; p++) begin
        raddr[p] = 6'($urandom % 40);
        #0;
      end
      #1;
      for (int p = 0; p < 2; p++) begin
        check(rdata[p] == model[raddr[p]], $sformatf("read r%0d", raddr[p]));
        if (raddr[p] >= 32 && raddr[p] < 37 && model[raddr[p]] != 0) temp_hits++;
      end
      for (int p = 0; p < 2; p++) begin
        we[p]    = $urandom % 2;
        waddr[p] = 6'($urandom % 40);
        wdata[p] = {$urandom, $urandom};
      end
      if (i % 50 == 0) begin we = 2'b11; waddr[1] = waddr[0]; end
      @(posedge clk);
      for (int p = 0; p < 2; p++)
        if (we[p] && waddr[p] != 0 && waddr[p] < 37) model[waddr[p]] = wdata[p];
    end
    check(temp_hits > 50, "temporaries written and read back");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
