// tb_udec_top -- end-to-end test of the micro-decoder at its default size
// (64 macro-instructions x 32 micro-instructions, depth-2 FIFO).
//
// The testbench plays the unmodified parts of the core: a decoder that
// hands over instruction words with their decoded entries (a macro-instruction
// arrives flagged illegal, as a stock decoder would report it), and an
// in-order issue/execute/commit model that acknowledges entries at random,
// reads operands from the extended register file, executes the ALU operation
// and writes the result back.
//
// Program: for every byte b, "addi x5,x0,b; sbox x6,x5; add x7,x7,x6", where
// sbox is macro-instruction 0 (the 18-word S-box sequence held in the memory
// from reset).  Every 16th byte also runs macro-instruction 1, loaded through
// the micro-code update port, whose 32 words have no end marker (it computes
// rd = rs1 + 32 through the temporaries) followed by "add x8,x8,x9".  The
// stream of architectural register writes is compared, in order, with one
// the testbench computes from the program (S-box values from the affine
// formula), and the final x0..x31 are read back.  One macro-instruction is
// flushed midway and re-sent, as after a mispredict.  Counted and required at
// least once: bypassed instructions, micro-decode sequences, sequence end by
// skip, end by the 32-word limit, stall on a full FIFO, micro-code update,
// flush, temporaries written; and with the issue side never stalling, an
// S-box macro-instruction issues its 18 micro-instructions in 18 cycles.
module tb_udec_top;
  import udec_pkg::*;
  import udec_tb_pkg::*;

  logic             clk = 0, rst_n = 0, flush = 0;
  logic             dec_valid, dec_ready, issue_valid, issue_ack, udec, seq_end;
  logic [31:0]      dec_instr;
  issue_entry_t     dec_entry, issue_entry;
  logic [1:0][5:0]  rf_raddr, rf_waddr;
  logic [1:0][63:0] rf_rdata, rf_wdata;
  logic [1:0]       rf_we;
  logic             uc_we;
  logic [10:0]      uc_waddr;
  logic [31:0]      uc_wdata;

  udec_top dut (
    .clk_i(clk), .rst_ni(rst_n), .flush_i(flush),
    .dec_valid_i(dec_valid), .dec_ready_o(dec_ready), .dec_instr_i(dec_instr), .dec_entry_i(dec_entry),
    .issue_valid_o(issue_valid), .issue_entry_o(issue_entry), .issue_ack_i(issue_ack),
    .rf_raddr_i(rf_raddr), .rf_rdata_o(rf_rdata), .rf_waddr_i(rf_waddr), .rf_wdata_i(rf_wdata),
    .rf_we_i(rf_we), .ucode_we_i(uc_we), .ucode_waddr_i(uc_waddr), .ucode_wdata_i(uc_wdata),
    .udec_o(udec), .seq_end_o(seq_end));

  always #5 clk = ~clk;

  int checks = 0, failures = 0, cyc = 0;
  int n_bypass = 0, n_udec = 0, n_skip_end = 0, n_limit_end = 0, n_full_stall = 0;
  int n_update = 0, n_flush = 0, n_temp_wr = 0, n_arch_wr = 0;
  bit go, final_rd, no_stall;
  logic [5:0] final_addr;
  int  exp_reg[$];
  logic [63:0] exp_val[$];
  logic [63:0] ref_x [32];
  int  seq_len;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL @%0d: %s", cyc, what); end
  endtask

  // ---- issue / execute / commit model ----
  always_comb begin
    issue_ack   = issue_valid && (go || no_stall) && !flush && !final_rd;
    rf_raddr[0] = final_rd ? final_addr : issue_entry.sbe.rs1;
    rf_raddr[1] = issue_entry.sbe.rs2;
    rf_we       = {1'b0, issue_ack};
    rf_waddr    = {6'd0, issue_entry.sbe.rd};
    rf_wdata[1] = '0;
    rf_wdata[0] = alu(issue_entry.sbe.op, rf_rdata[0],
                      issue_entry.sbe.use_imm ? issue_entry.sbe.result : rf_rdata[1]);
  end

  always @(negedge clk) go <= ($urandom % 4) != 0;

  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (rst_n) begin
      if (issue_ack) begin
        if (issue_entry.sbe.rd >= 32) n_temp_wr++;
        else if (issue_entry.sbe.rd != 0) begin
          n_arch_wr++;
          if (exp_reg.size() == 0) check(0, "unexpected architectural write");
          else begin
            int r; logic [63:0] v;
            r = exp_reg.pop_front(); v = exp_val.pop_front();
            check(issue_entry.sbe.rd == 6'(r) && rf_wdata[0] == v,
                  $sformatf("write x%0d=%0h, expected x%0d=%0h", issue_entry.sbe.rd, rf_wdata[0], r, v));
          end
        end
      end
      if (udec && !dut.i_secv.i_fsm.out_ready_i) n_full_stall++;
      if (seq_end) begin
        if (dut.i_secv.i_fsm.u.skip) n_limit_end++; else n_skip_end++;
      end
    end
  end

  // ---- decoder model ----
  task automatic send(input logic [31:0] instr, input issue_entry_t e);
    @(negedge clk);
    dec_valid = 1; dec_instr = instr; dec_entry = e;
    #1;
    while (!dec_ready) begin @(negedge clk); #1; end
    @(posedge clk);
    #1 dec_valid = 0;
  endtask

  task automatic expect_wr(input int r, input logic [63:0] v);
    exp_reg.push_back(r); exp_val.push_back(v); ref_x[r] = v;
  endtask

  int pc = 0;
  task automatic addi(input int rd, input int rs1, input int imm);
    send(addi_word(rd, rs1, imm), alu_entry(64'(4 * pc++), 0, rd, rs1, 0, 64'(imm), 1));
    expect_wr(rd, ref_x[rs1] + 64'(imm));
  endtask
  task automatic add(input int rd, input int rs1, input int rs2);
    send({7'd0, 5'(rs2), 5'(rs1), 3'd0, 5'(rd), 7'b0110011},
         alu_entry(64'(4 * pc++), 0, rd, rs1, rs2, 0, 0));
    expect_wr(rd, ref_x[rs1] + ref_x[rs2]);
  endtask
  task automatic macro(input int idx, input int rd, input int rs1, input logic [63:0] result);
    logic [31:0] w;
    w = macro_word(idx, rd, rs1, 0);
    send(w, illegal_entry(64'(4 * pc++), w));
    n_udec++;
    expect_wr(rd, result);
  endtask

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    dec_valid = 0; dec_instr = 0; dec_entry = '0; final_rd = 0; final_addr = 0; no_stall = 0;
    uc_we = 0; uc_waddr = 0; uc_wdata = 0;
    for (int r = 0; r < 32; r++) ref_x[r] = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;

    // Micro-code update: sequence 1 = rd <- rs1 + 32 in 32 words, no end marker.
    for (int j = 0; j < 32; j++) begin
      @(negedge clk);
      uc_we = 1; uc_waddr = 11'(32 + j);
      uc_wdata = (j == 0) ? pack_u(3, 0, 0, 6, 0, 1, 1) :
                 (j == 31) ? pack_u(3, 0, 5, 0, 0, 1, 1) : pack_u(3, 0, 0, 0, 0, 1, 1);
      @(posedge clk);
      n_update++;
    end
    @(negedge clk); uc_we = 0;

    for (int b = 0; b < 256; b++) begin
      addi(5, 0, b);
      if (b == 100) begin
        // Flush in the middle of the sequence, then the macro-instruction again.
        logic [31:0] w;
        int acks;
        w = macro_word(0, 6, 5, 0);
        send(w, illegal_entry(64'(4 * pc), w));
        acks = 0;
        while (acks < 3) begin @(posedge clk); if (issue_ack && issue_entry.sbe.pc == 64'(4 * pc)) acks++; end
        @(negedge clk); flush = 1;
        @(negedge clk); flush = 0;
        n_flush++;
        pc++;
      end
      macro(0, 6, 5, 64'(affine(8'(b))));
      add(7, 7, 6);
      if (b % 16 == 3) begin
        macro(1, 9, 6, ref_x[6] + 64'd32);
        add(8, 8, 9);
      end
    end

    // One-per-cycle injection with the issue side never stalling.
    repeat (20) @(posedge clk);
    no_stall = 1;
    addi(5, 0, 8'h53);
    repeat (10) @(posedge clk);
    begin
      int first, last_c, n;
      logic [63:0] mpc;
      first = -1; last_c = -1; n = 0; mpc = 64'(4 * pc);
      fork
        macro(0, 6, 5, 64'(affine(8'h53)));
        for (int c = 0; c < 40; c++) begin
          @(posedge clk);
          if (issue_ack && issue_entry.sbe.pc == mpc) begin
            if (first < 0) first = c;
            last_c = c; n++;
          end
        end
      join
      check(n == 18 && last_c - first == 17,
            $sformatf("18 micro-instructions in 18 consecutive cycles (n=%0d span=%0d)", n, last_c - first + 1));
    end
    repeat (20) @(posedge clk);
    check(exp_reg.size() == 0, "all architectural writes seen");

    // Final architectural state.
    final_rd = 1;
    for (int r = 0; r < 32; r++) begin
      @(negedge clk); final_addr = 6'(r); #1;
      check(rf_rdata[0] == ref_x[r], $sformatf("final x%0d", r));
    end

    n_bypass = n_arch_wr - n_udec;
    $display("bypass=%0d udec=%0d skip_end=%0d limit_end=%0d full_stall=%0d update=%0d flush=%0d temp_writes=%0d",
             n_bypass, n_udec, n_skip_end, n_limit_end, n_full_stall, n_update, n_flush, n_temp_wr);
    check(n_bypass > 0,     "bypass mode used");
    check(n_udec > 0,       "micro-decode mode used");
    check(n_skip_end > 0,   "sequence ended by skip");
    check(n_limit_end > 0,  "sequence ended by 32-word limit");
    check(n_full_stall > 0, "stall on full FIFO");
    check(n_update > 0,     "micro-code update");
    check(n_flush > 0,      "flush");
    check(n_temp_wr > 0,    "temporaries written");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
