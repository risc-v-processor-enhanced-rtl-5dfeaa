// tb_udec_fsm -- self-checking test of the bypass / micro-decode state machine.
//
// A behavioural synchronous-read memory in the testbench holds the S-box
// sequence (idx 0), a 32-word sequence with no end marker (idx 1, ends by the
// length limit) and random sequences elsewhere.  A random mix of ordinary
// instructions and macro-instructions is driven with random back-pressure.
// Every output is compared with an expected stream the testbench expands
// itself from the memory contents: ordinary instructions unchanged,
// micro-instructions with fields, register mapping, sign-extended immediate
// and the macro-instruction's pc.  Also checked: with no back-pressure a
// macro-instruction's k micro-instructions leave in k consecutive cycles
// starting the cycle after it is accepted, and flush abandons a sequence.
module tb_udec_fsm;
  import udec_pkg::*;
  import udec_tb_pkg::*;
  localparam int P = 64, N = 32;

  logic         clk = 0, rst_n = 0, flush = 0;
  logic         in_valid, in_ready, in_is_macro, out_valid, out_ready, udec, seq_end;
  issue_entry_t in_entry, out_entry;
  logic [5:0]   in_idx;
  logic [10:0]  mem_addr;
  logic [31:0]  mem_rdata;
  logic [31:0]  mem [P * N];
  issue_entry_t exp_q[$];
  int           checks = 0, failures = 0, n_macro = 0, n_bypass = 0, n_limit = 0;
  int           cyc = 0;

  udec_fsm dut (.clk_i(clk), .rst_ni(rst_n), .flush_i(flush),
    .in_valid_i(in_valid), .in_ready_o(in_ready), .in_entry_i(in_entry),
    .in_is_macro_i(in_is_macro), .in_idx_i(in_idx),
    .mem_addr_o(mem_addr), .mem_rdata_i(mem_rdata),
    .out_valid_o(out_valid), .out_ready_i(out_ready), .out_entry_o(out_entry),
    .udec_o(udec), .seq_end_o(seq_end));

  always #5 clk = ~clk;
  always_ff @(posedge clk) mem_rdata <= mem[mem_addr];
  always_ff @(posedge clk) cyc <= cyc + 1;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL @%0d: %s", cyc, what); end
  endtask

  // Expected micro-instruction stream of a macro-instruction.
  task automatic expand(input issue_entry_t m, input int idx);
    for (int j = 0; j < N; j++) begin
      logic [31:0] w;
      issue_entry_t e;
      w = mem[idx * N + j];
      e = '0;
      e.valid       = 1;
      e.sbe.pc      = m.sbe.pc;
      e.sbe.fu      = fu_t'(w[31:28]);
      e.sbe.op      = w[27:20];
      e.sbe.rd      = 6'(phys(int'(w[19:17]), m.sbe.rd, m.sbe.rs1, m.sbe.rs2));
      e.sbe.rs1     = 6'(phys(int'(w[16:14]), m.sbe.rd, m.sbe.rs1, m.sbe.rs2));
      e.sbe.rs2     = 6'(phys(int'(w[13:11]), m.sbe.rd, m.sbe.rs1, m.sbe.rs2));
      e.sbe.result  = 64'($signed(w[10:1]));
      e.sbe.use_imm = (w[10:1] != 0);
      exp_q.push_back(e);
      if (!w[0]) break;
      if (j == N - 1) n_limit++;
    end
  endtask

  function automatic bit same_uop(input issue_entry_t a, input issue_entry_t b);
    return a.valid == b.valid && a.sbe.pc == b.sbe.pc && a.sbe.fu == b.sbe.fu && a.sbe.op == b.sbe.op
        && a.sbe.rd == b.sbe.rd && a.sbe.rs1 == b.sbe.rs1 && a.sbe.rs2 == b.sbe.rs2
        && a.sbe.result == b.sbe.result && a.sbe.use_imm == b.sbe.use_imm && !b.is_ctrl_flow;
  endfunction

  logic exp_is_uop[$];

  // Output checker.
  always @(posedge clk) if (rst_n && !flush && out_valid && out_ready) begin
    if (exp_q.size() == 0) check(0, "unexpected output");
    else begin
      issue_entry_t e; bit u;
      e = exp_q.pop_front(); u = exp_is_uop.pop_front();
      if (u) check(same_uop(e, out_entry), $sformatf("micro-instruction op=%0d rd=%0d", out_entry.sbe.op, out_entry.sbe.rd));
      else   check(e == out_entry, "bypassed instruction unchanged");
    end
  end

  task automatic send(input issue_entry_t e, input bit macro, input int idx);
    @(negedge clk);
    in_valid = 1; in_entry = e; in_is_macro = macro; in_idx = 6'(idx);
    #1;
    while (!in_ready) begin @(negedge clk); #1; end
    if (macro) begin
      int n0;
      n0 = exp_q.size();
      expand(e, idx);
      for (int i = n0; i < exp_q.size(); i++) exp_is_uop.push_back(1);
      n_macro++;
    end else begin
      exp_q.push_back(e); exp_is_uop.push_back(0); n_bypass++;
    end
    @(posedge clk);
    #1 in_valid = 0;
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < P * N; i++) begin
      mem[i] = $urandom;
      if (($urandom % 5) == 0) mem[i][0] = 1'b0; else mem[i][0] = 1'b1;
    end
    for (int i = 0; i < N; i++) mem[i] = (i < 18) ? sbox_word(i) : 32'h0;
    for (int i = 0; i < N; i++) mem[N + i] = pack_u(3, 0, i % 8, (i + 3) % 8, 7, i, 1);
    in_valid = 0; in_entry = '0; in_is_macro = 0; in_idx = 0; out_ready = 1;
    repeat (2) @(posedge clk);
    rst_n = 1;

    // 1. Timing with no back-pressure: S-box macro -> 18 consecutive outputs.
    begin
      int first, last_c, n;
      send(alu_entry(64'h1000, 0, 10, 11, 0, 0, 0), 1, 0);   // accepted at the edge just passed
      first = -1; n = 0; last_c = 0;
      for (int c = 0; c < 40; c++) begin
        #1;
        if (out_valid) begin if (first < 0) first = c; n++; last_c = c; end
        @(posedge clk);
      end
      check(first == 0, $sformatf("first micro-instruction the cycle after acceptance (%0d)", first));
      check(n == 18 && last_c == 17, $sformatf("18 micro-instructions in 18 cycles (%0d, %0d)", n, last_c));
      check(exp_q.size() == 0, "S-box sequence complete");
    end

    // 2. Length limit: idx 1 has no end marker.
    send(alu_entry(64'h2000, 0, 12, 13, 14, 0, 0), 1, 1);
    repeat (40) @(posedge clk);
    check(exp_q.size() == 0, "32-word sequence complete");

    // 3. Random mix with back-pressure.
    fork
      begin
        for (int i = 0; i < 600; i++) begin
          if ($urandom % 3 == 0)
            send(alu_entry(64'h8000_0000 + 4 * i, 0, $urandom % 32, $urandom % 32, $urandom % 32, 0, 0),
                 1, $urandom % P);
          else
            send(alu_entry(64'h8000_0000 + 4 * i, $urandom % 12, $urandom % 32, $urandom % 32,
                           $urandom % 32, {$urandom, $urandom}, $urandom % 2), 0, 0);
        end
      end
      begin
        forever begin @(negedge clk); out_ready = ($urandom % 4) != 0; end
      end
    join_any
    @(negedge clk); out_ready = 1;
    repeat (80) @(posedge clk);
    check(exp_q.size() == 0, "all expected outputs seen");

    // 4. Flush in the middle of a sequence.
    send(alu_entry(64'h3000, 0, 10, 11, 0, 0, 0), 1, 0);
    repeat (4) @(posedge clk);
    check(udec, "in micro-decode state n0 flush");
    @(negedge clk); flush = 1;
    @(posedge clk); #1 flush = 0;
    exp_q.delete(); exp_is_uop.delete();
    #1;
    check(!udec && !out_valid, "flush returns to bypass with nothing pending");
    send(alu_entry(64'h3004, 0, 1, 2, 3, 64'd5, 1), 0, 0);
    repeat (5) @(posedge clk);
    check(exp_q.size() == 0, "instruction after flush passes");

    check(n_macro > 100 && n_bypass > 300 && n_limit > 0, "mix covered");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
