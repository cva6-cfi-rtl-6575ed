// tb_cfi_decoder: self-checking testbench of the CFI decode extension.
//
// Instruction words are assembled here from their fields. Checked with
// the shadow stack / landing pads enabled and disabled: sspush x1/x5 and
// sspopchk x1/x5 become tagged stores/loads or no-ops; ssrdp becomes a read
// of ssp or writes zero; ssamoswap.w/d get their swap tags and are illegal
// below M-mode when disabled; lpad carries its label; other words, random
// and near-miss, are not claimed.
module tb_cfi_decoder;
  import cfi_pkg::*;

  logic [31:0] instr;
  priv_lvl_t priv;
  logic ss_en, lp_en;
  cfi_decoded_t d;

  cfi_decoder dut (.instr_i(instr), .priv_lvl_i(priv), .ss_en_i(ss_en), .lp_en_i(lp_en), .dec_o(d));

  int checks = 0, failures = 0;

  task automatic check(input logic cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      $display("FAIL: %s (instr=%h ss=%0d lp=%0d)", what, instr, ss_en, lp_en);
    end
  endtask

  function automatic logic [31:0] sspush(logic [4:0] r);
    return {7'b1100111, r, 5'd0, 3'b100, 5'd0, 7'b1110011};
  endfunction
  function automatic logic [31:0] mop_r28(logic [4:0] rs1, logic [4:0] rd);
    return {12'b110011011100, rs1, 3'b100, rd, 7'b1110011};
  endfunction
  function automatic logic [31:0] ssamoswap(logic d64, logic [4:0] rs2, logic [4:0] rs1, logic [4:0] rd);
    return {5'b01001, 2'b00, rs2, rs1, 2'b01, d64, rd, 7'b0101111};
  endfunction
  function automatic logic [31:0] lpad(logic [19:0] label);
    return {label, 5'd0, 7'b0010111};
  endfunction

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    priv = PRIV_LVL_U;
    for (int en = 0; en < 4; en++) begin
      {ss_en, lp_en} = 2'(en);
      for (int k = 0; k < 2; k++) begin
        logic [4:0] r;
        r = (k == 0) ? 5'd1 : 5'd5;
        instr = sspush(r); #1;
        check(d.valid, "sspush claimed");
        if (ss_en) check(d.fu == FU_STORE && d.op == OP_SSPUSH && d.rs2 == r &&
                         d.imm == -64'sd8, "sspush -> tagged store at ssp-8");
        else       check(d.fu == FU_ALU && d.op == OP_NOP && d.rd == 0, "sspush disabled -> nop");
        instr = mop_r28(r, 5'd0); #1;
        check(d.valid, "sspopchk claimed");
        if (ss_en) check(d.fu == FU_LOAD && d.op == OP_SSPCHK && d.rs2 == r, "sspopchk -> tagged load");
        else       check(d.op == OP_NOP && d.rd == 0, "sspopchk disabled -> nop");
      end
      instr = sspush(5'd2); #1;  check(!d.valid, "sspush x2 not a CFI instruction");
      instr = mop_r28(5'd2, 5'd0); #1; check(!d.valid, "mop.r.28 x2 not claimed");
      instr = mop_r28(5'd0, 5'd10); #1;
      check(d.valid && d.rd == 5'd10, "ssrdp claimed");
      if (ss_en) check(d.fu == FU_CSR && d.op == OP_CSRR && d.imm == 64'h011, "ssrdp reads ssp");
      else       check(d.fu == FU_ALU && d.op == OP_ADD && d.rs1 == 0 && d.imm == 0, "ssrdp disabled -> rd=0");
      for (int dd = 0; dd < 2; dd++)
        for (int p = 0; p < 2; p++) begin
          priv = p ? PRIV_LVL_M : PRIV_LVL_S;
          instr = ssamoswap(dd[0], 5'd11, 5'd12, 5'd10); #1;
          check(d.valid && d.fu == FU_STORE && d.rs1 == 12 && d.rs2 == 11 && d.rd == 10, "ssamoswap fields");
          check(d.op == (dd ? OP_SSAMOSWAP_D : OP_SSAMOSWAP_W), "ssamoswap width tag");
          check(d.illegal == (!ss_en && !p), "ssamoswap legality");
        end
      priv = PRIV_LVL_U;
      instr = {5'b00001, 2'b00, 5'd11, 5'd12, 3'b011, 5'd10, 7'b0101111}; #1;
      check(!d.valid, "amoswap.d not claimed");
      instr = lpad(20'habcde); #1;
      check(d.valid, "lpad claimed");
      if (lp_en) check(d.op == OP_ZICFI_LP && d.imm[31:12] == 20'habcde && d.rd == 0, "lpad label");
      else       check(d.op == OP_NOP, "lpad disabled -> nop");
      instr = {20'habcde, 5'd3, 7'b0010111}; #1;
      check(!d.valid, "auipc x3 not claimed");
    end
    // random words outside the SYSTEM/AMO/AUIPC opcodes are never claimed
    for (int i = 0; i < 2000; i++) begin
      instr = $urandom;
      if (instr[6:0] inside {7'b1110011, 7'b0101111, 7'b0010111}) instr[6:0] = 7'b0110011;
      {ss_en, lp_en} = 2'($urandom);
      #1;
      check(!d.valid, "random word not claimed");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
