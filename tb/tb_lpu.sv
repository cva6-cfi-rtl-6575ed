// tb_lpu: self-checking testbench of one landing pad unit.
//
// The unit is combinational. Directed cases cover each rule (jump sets
// ELP; x1/x5/x7 jumps do not; matching lpad clears ELP; wrong label,
// misaligned lpad or a non-lpad instruction faults; label zero matches any
// label; x7 writes update the label; sbe blocks the port; an instruction
// that already has an exception is left alone). Then 3000 random records
// are compared with a reference model written from the Zicfilp rules.
module tb_lpu;
  import cfi_pkg::*;

  logic lpe, elp_i, sbe_i, elp_o, sbe_o, fault;
  logic [LPL_BITS-1:0] lpl_i, lpl_o;
  scoreboard_entry_t ci, co;

  lpu dut (.lpe_i(lpe), .elp_i, .sbe_i, .lpl_i, .commit_instr_i(ci),
           .elp_o, .sbe_o, .lpl_o, .commit_instr_o(co), .lp_fault_o(fault));

  int checks = 0, failures = 0;

  task automatic check(input logic cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  // reference model
  typedef struct { logic elp, sbe, fault; logic [19:0] lpl; } ref_t;
  function automatic ref_t model(logic lpe_m, logic elp_m, logic sbe_m, logic [19:0] lpl_m,
                                 scoreboard_entry_t e);
    ref_t r;
    logic retire = e.valid && !e.ex.valid && !sbe_m;
    logic good_lpad = (e.op == OP_ZICFI_LP) && (e.pc % 4 == 0) &&
                      (e.result[31:12] == 20'd0 || e.result[31:12] == lpl_m);
    r.elp = elp_m; r.lpl = lpl_m; r.fault = 1'b0;
    r.sbe = sbe_m || (e.valid && e.ex.valid);
    if (!retire) return r;
    if (elp_m && !good_lpad) begin
      r.fault = 1'b1; r.sbe = 1'b1;
      return r;
    end
    r.elp = lpe_m && (e.op == OP_JALR) && (e.rs1 != 1) && (e.rs1 != 5) && (e.rs1 != 7);
    if (e.rd == 7 && e.op != OP_ZICFI_LP) r.lpl = e.result[31:12];
    return r;
  endfunction

  task automatic apply_and_check(input string what);
    ref_t r;
    #1;
    r = model(lpe, elp_i, sbe_i, lpl_i, ci);
    check(elp_o == r.elp, {what, ": elp"});
    check(sbe_o == r.sbe, {what, ": sbe"});
    check(lpl_o == r.lpl, {what, ": lpl"});
    check(fault == r.fault, {what, ": fault"});
    if (r.fault)
      check(co.ex.valid && co.ex.cause == 64'd18 && co.ex.tval == 64'd2, {what, ": exception record"});
    else
      check(co == ci, {what, ": record unchanged"});
  endtask

  function automatic scoreboard_entry_t mk(fu_op_t op, logic [4:0] rs1, logic [4:0] rd,
                                           logic [63:0] result, logic [63:0] pc);
    scoreboard_entry_t e = '0;
    e.op = op; e.rs1 = rs1; e.rd = rd; e.result = result; e.pc = pc; e.valid = 1'b1;
    e.fu = (op == OP_JALR) ? FU_CTRL_FLOW : FU_ALU;
    return e;
  endfunction

  initial begin
    lpe = 1; elp_i = 0; sbe_i = 0; lpl_i = 20'h00abc;

    // directed
    ci = mk(OP_JALR, 5'd10, 5'd1, 64'h0, 64'h1000); apply_and_check("jalr a0 sets elp");
    check(elp_o == 1'b1, "jalr a0 elp=1");
    ci = mk(OP_JALR, 5'd1, 5'd0, 64'h0, 64'h1000);  apply_and_check("ret via x1");
    check(elp_o == 1'b0, "ret does not set elp");
    ci = mk(OP_JALR, 5'd7, 5'd0, 64'h0, 64'h1000);  apply_and_check("jalr x7 software guarded");
    check(elp_o == 1'b0, "x7 jump does not set elp");
    elp_i = 1;
    ci = mk(OP_ZICFI_LP, 5'd0, 5'd0, 64'h00abc000, 64'h2000); apply_and_check("matching lpad");
    check(!fault && elp_o == 1'b0, "matching lpad clears elp");
    ci = mk(OP_ZICFI_LP, 5'd0, 5'd0, 64'h00abd000, 64'h2000); apply_and_check("wrong label");
    check(fault, "wrong label faults");
    ci = mk(OP_ZICFI_LP, 5'd0, 5'd0, 64'h0, 64'h2000);        apply_and_check("label 0");
    check(!fault, "label zero matches");
    ci = mk(OP_ZICFI_LP, 5'd0, 5'd0, 64'h00abc000, 64'h2002); apply_and_check("misaligned lpad");
    check(fault, "misaligned lpad faults");
    ci = mk(OP_ADD, 5'd0, 5'd5, 64'h0, 64'h2000);            apply_and_check("non-lpad target");
    check(fault, "non-lpad faults");
    sbe_i = 1; apply_and_check("blocked by sbe");
    check(!fault && sbe_o, "sbe blocks and propagates");
    sbe_i = 0; elp_i = 0;
    ci = mk(OP_ADD, 5'd0, 5'd7, 64'h12345678, 64'h2000);    apply_and_check("x7 write");
    check(lpl_o == 20'h12345, "label from x7[31:12]");
    ci.ex.valid = 1'b1; apply_and_check("excepting instruction");
    check(sbe_o && lpl_o == lpl_i, "excepting instruction stops and leaves label");
    lpe = 0;
    ci = mk(OP_JALR, 5'd10, 5'd1, 64'h0, 64'h1000); apply_and_check("lp disabled");
    check(elp_o == 1'b0, "jump with landing pads disabled");

    // random
    for (int i = 0; i < 3000; i++) begin
      fu_op_t ops [4] = '{OP_ADD, OP_JALR, OP_ZICFI_LP, OP_LD};
      logic [4:0] regs [6] = '{5'd0, 5'd1, 5'd5, 5'd7, 5'd10, 5'd12};
      logic [19:0] labels [3];
      labels = '{20'd0, 20'h00abc, 20'($urandom)};
      lpe   = 1'($urandom); elp_i = 1'($urandom); sbe_i = ($urandom % 5) == 0;
      lpl_i = ($urandom % 2) ? 20'h00abc : 20'($urandom);
      ci = mk(ops[$urandom % 4], regs[$urandom % 6], regs[$urandom % 6],
              {32'($urandom), labels[$urandom % 3], 12'($urandom)},
              {32'h0, 29'($urandom), (($urandom % 4) == 0) ? 3'($urandom) : 3'b000});
      ci.valid    = ($urandom % 8) != 0;
      ci.ex.valid = ($urandom % 10) == 0;
      apply_and_check($sformatf("random %0d", i));
    end

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #1000000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
