// tb_macro_detect -- self-checking test of macro-instruction recognition.
//
// Random instruction words, half of them in the custom-0 format, each with a
// decoder entry that is either legal, an illegal-instruction report or a
// fetch exception.  The expected flag, index and register fields are derived
// from the instruction bits by the testbench.
module tb_macro_detect;
  import udec_pkg::*;
  import udec_tb_pkg::*;
  localparam int P = 64;
  logic [31:0]  instr;
  issue_entry_t ein, eout;
  logic         is_macro;
  logic [5:0]   idx;
  int           checks = 0, failures = 0, nmacro = 0;

  macro_detect #(.P(P)) dut (.instr_i(instr), .entry_i(ein), .entry_o(eout),
                             .is_macro_o(is_macro), .idx_o(idx));

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s (instr %08x)", what, instr); end
  endtask

  initial begin
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < 4000; i++) begin
      bit exp;
      int kind;
      instr = $urandom;
      if ($urandom % 2) begin
        instr[6:0] = 7'b0001011;
        if ($urandom % 4) instr[14:12] = 3'b000;
        if ($urandom % 4) instr[31] = 1'b0;           // funct7 < 64 most of the time
      end
      kind = $urandom % 4;
      if (kind == 3)       ein = alu_entry(64'h8000_0000 + 4 * i, 0, 1, 2, 3, 0, 0);
      else if (kind == 2) begin
        ein = illegal_entry(64'h8000_0000, instr); ein.sbe.ex.cause = 64'd12;  // fetch page fault
      end else             ein = illegal_entry(64'h8000_0000 + 4 * i, instr);
      exp = (instr[6:0] == 7'h0B) && (instr[14:12] == 0) && (instr[31:25] < P) && (kind != 2);
      #1;
      check(is_macro == exp, "macro flag");
      if (exp) begin
        nmacro++;
        check(idx == instr[30:25], "index = funct7");
        check(eout.sbe.rd == instr[11:7] && eout.sbe.rs1 == instr[19:15] && eout.sbe.rs2 == instr[24:20],
              "register fields");
        check(!eout.sbe.ex.valid, "illegal-instruction exception cleared");
        check(eout.sbe.pc == ein.sbe.pc, "pc kept");
      end else begin
        check(eout == ein, "non-macro passes unchanged");
      end
    end
    check(nmacro > 100, "enough macro-instructions seen");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
