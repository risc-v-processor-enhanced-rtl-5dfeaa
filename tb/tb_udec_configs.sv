// tb_udec_configs -- the three memory sizes evaluated for FPGA cost
// (P = 2, 32 and 64 macro-instructions of 32 words), each running the S-box
// macro-instruction.
//
// One udec_top per size, each with its own decoder stand-in and an
// issue/execute/commit model that acknowledges at random.  Each instance
// computes the S-box affine value of 64 bytes through sequence 0, then runs
// sequence P-1 (the highest index of that size), loaded through the update
// port as a one-word "rd = rs1 + 0x15" sequence.  Every architectural write is
// compared with the value the testbench computes.
module tb_udec_configs;
  import udec_pkg::*;
  import udec_tb_pkg::*;

  localparam int NCFG = 3;
  localparam int PS [NCFG] = '{2, 32, 64};

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  int checks [NCFG];
  int failures [NCFG];
  bit done [NCFG];

  for (genvar g = 0; g < NCFG; g++) begin : g_cfg
    localparam int P  = PS[g];
    localparam int AW = $clog2(P * 32);
    logic             dec_valid, dec_ready, issue_valid, issue_ack, udec, seq_end, go;
    logic [31:0]      dec_instr;
    issue_entry_t     dec_entry, issue_entry;
    logic [1:0][5:0]  rf_raddr, rf_waddr;
    logic [1:0][63:0] rf_rdata, rf_wdata;
    logic [1:0]       rf_we;
    logic             uc_we;
    logic [AW-1:0]    uc_waddr;
    logic [31:0]      uc_wdata;
    int               exp_reg[$];
    logic [63:0]      exp_val[$];

    udec_top #(.P(P)) dut (
      .clk_i(clk), .rst_ni(rst_n), .flush_i(1'b0),
      .dec_valid_i(dec_valid), .dec_ready_o(dec_ready), .dec_instr_i(dec_instr), .dec_entry_i(dec_entry),
      .issue_valid_o(issue_valid), .issue_entry_o(issue_entry), .issue_ack_i(issue_ack),
      .rf_raddr_i(rf_raddr), .rf_rdata_o(rf_rdata), .rf_waddr_i(rf_waddr), .rf_wdata_i(rf_wdata),
      .rf_we_i(rf_we), .ucode_we_i(uc_we), .ucode_waddr_i(uc_waddr), .ucode_wdata_i(uc_wdata),
      .udec_o(udec), .seq_end_o(seq_end));

    always_comb begin
      issue_ack   = issue_valid && go;
      rf_raddr[0] = issue_entry.sbe.rs1;
      rf_raddr[1] = issue_entry.sbe.rs2;
      rf_we       = {1'b0, issue_ack};
      rf_waddr    = {6'd0, issue_entry.sbe.rd};
      rf_wdata[1] = '0;
      rf_wdata[0] = alu(issue_entry.sbe.op, rf_rdata[0],
                        issue_entry.sbe.use_imm ? issue_entry.sbe.result : rf_rdata[1]);
    end

    always @(negedge clk) go <= ($urandom % 3) != 0;

    always @(posedge clk) if (rst_n && issue_ack && issue_entry.sbe.rd != 0 && issue_entry.sbe.rd < 32) begin
      checks[g]++;
      if (exp_reg.size() == 0) begin failures[g]++; $display("FAIL P=%0d: unexpected write", P); end
      else begin
        int r; logic [63:0] v;
        r = exp_reg.pop_front(); v = exp_val.pop_front();
        if (issue_entry.sbe.rd != 6'(r) || rf_wdata[0] != v) begin
          failures[g]++;
          $display("FAIL P=%0d: x%0d=%0h, expected x%0d=%0h", P, issue_entry.sbe.rd, rf_wdata[0], r, v);
        end
      end
    end

    task automatic send(input logic [31:0] instr, input issue_entry_t e);
      @(negedge clk);
      dec_valid = 1; dec_instr = instr; dec_entry = e;
      #1;
      while (!dec_ready) begin @(negedge clk); #1; end
      @(posedge clk);
      #1 dec_valid = 0;
    endtask

    initial begin
      logic [31:0] w;
      dec_valid = 0; dec_instr = 0; dec_entry = '0; uc_we = 0; uc_waddr = 0; uc_wdata = 0;
      @(posedge rst_n);
      @(negedge clk);
      uc_we = 1; uc_waddr = AW'((P - 1) * 32); uc_wdata = pack_u(3, 0, 5, 6, 0, 8'h15, 0);
      @(negedge clk); uc_we = 0;
      for (int b = 0; b < 64; b++) begin
        int v;
        v = (b * 37 + g) % 256;
        send(addi_word(5, 0, v), alu_entry(64'h100, 0, 5, 0, 0, 64'(v), 1));
        exp_reg.push_back(5); exp_val.push_back(64'(v));
        w = macro_word(0, 6, 5, 0);
        send(w, illegal_entry(64'h104, w));
        exp_reg.push_back(6); exp_val.push_back(64'(affine(8'(v))));
        w = macro_word(P - 1, 7, 6, 0);
        send(w, illegal_entry(64'h108, w));
        exp_reg.push_back(7); exp_val.push_back(64'(affine(8'(v))) + 64'h15);
      end
      repeat (100) @(posedge clk);
      checks[g]++;
      if (exp_reg.size() != 0) begin failures[g]++; $display("FAIL P=%0d: %0d writes missing", P, exp_reg.size()); end
      done[g] = 1;
    end
  end

  initial begin
    repeat (200000) @(posedge clk);
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks.sum(), failures.sum() + 1);
    $finish;
  end

  initial begin
    for (int g = 0; g < NCFG; g++) begin checks[g] = 0; failures[g] = 0; done[g] = 0; end
    repeat (3) @(posedge clk);
    rst_n = 1;
    wait (done[0] && done[1] && done[2]);
    for (int g = 0; g < NCFG; g++) $display("P=%0d: checks=%0d failures=%0d", PS[g], checks[g], failures[g]);
    $display("TB_RESULT checks=%0d failures=%0d", checks.sum(), failures.sum());
    $finish;
  end
endmodule
