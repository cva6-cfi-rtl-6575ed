// tb_cva6_cfi: end-to-end testbench of the CFI extension logic.
//
// The testbench stands in for the rest of the core: a register file, a
// one-cycle LSU over a small memory with a page table (one shadow-stack
// region), the commit logic and the trap entry. Instructions are handed to
// the top as encoded words, go through its decoder, memory operations go
// through the shadow stack unit and the MMU page check, and every
// instruction is committed through the landing pad chain. The program is a
// call/return sequence with shadow stack and landing pad protection, then
// attacks and misuse:
//   - nested calls through function pointers with lpad targets, sspush of
//     the return address, sspopchk on return (32-bit and compressed forms);
//   - a jump and its lpad retiring in the same cycle (two commit ports);
//   - a corrupted return address (sspopchk mismatch);
//   - an indirect jump to a non-lpad instruction and to a wrong-label lpad;
//   - ssamoswap in M-mode; sspush with translation off; sspush to an
//     ordinary page; an ordinary store to a shadow-stack page;
//   - ssrdp; the CFI instructions with the extensions disabled;
//   - a trap saving ELP and mret restoring it;
//   - the push/pop issue interlock.
// Every exception is predicted by the testbench from the rules, and each
// mechanism is counted; one that never happened counts as a failure. The
// shadow stack pointer and memory contents are checked along the way.
module tb_cva6_cfi;
  import cfi_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  // ------------------------------------------------------------ DUT wiring
  priv_lvl_t priv;
  logic v;
  logic [3:0] satp_mode, vsatp_mode;
  logic [11:0] csr_addr;
  logic csr_we, csr_hit;
  logic [XLEN-1:0] csr_wdata, csr_rdata;
  logic trap, trap_v, mret, sret, sret_v, ret_lpe, flush;
  priv_lvl_t trap_priv;
  logic ss_en, lp_en, elp;
  logic [XLEN-1:0] ssp;
  logic [31:0] instr;
  cfi_decoded_t dec;
  logic lsu_valid_i, lsu_ready_o, ss_stall, lsu_valid_o, lsu_ready_i;
  fu_data_t fu;
  logic store_valid, load_valid, ss_store_valid;
  logic [TRANS_ID_BITS-1:0] store_tid, load_tid, ss_store_tid;
  exception_t store_ex, load_ex, ss_store_ex, ss_load_ex, mmu_ex;
  logic [XLEN-1:0] load_result;
  logic mmu_valid, mmu_xlat, mmu_is_ss, pte_r, pte_w, pte_x;
  logic [XLEN-1:0] mmu_va;
  scoreboard_entry_t ci [NR_COMMIT], co [NR_COMMIT];
  logic [NR_COMMIT-1:0] ack;
  logic lp_fault [NR_COMMIT];

  cva6_cfi dut (
    .clk_i(clk), .rst_ni(rst_n),
    .priv_lvl_i(priv), .v_i(v), .satp_mode_i(satp_mode), .vsatp_mode_i(vsatp_mode),
    .csr_addr_i(csr_addr), .csr_we_i(csr_we), .csr_wdata_i(csr_wdata),
    .csr_rdata_o(csr_rdata), .csr_hit_o(csr_hit),
    .trap_i(trap), .trap_priv_i(trap_priv), .trap_v_i(trap_v), .mret_i(mret),
    .sret_i(sret), .sret_v_i(sret_v), .ret_lpe_i(ret_lpe), .flush_i(flush),
    .nmi_i(1'b0), .mnret_i(1'b0), .debug_entry_i(1'b0), .dret_i(1'b0),
    .ss_en_o(ss_en), .lp_en_o(lp_en), .elp_o(elp), .ssp_o(ssp),
    .instr_i(instr), .dec_o(dec),
    .lsu_valid_i, .fu_data_i(fu), .lsu_ready_o, .ss_issue_stall_o(ss_stall),
    .lsu_valid_o, .lsu_ready_i,
    .store_valid_i(store_valid), .store_trans_id_i(store_tid), .store_ex_i(store_ex),
    .load_valid_i(load_valid), .load_trans_id_i(load_tid), .load_result_i(load_result),
    .load_ex_i(load_ex),
    .ss_store_valid_o(ss_store_valid), .ss_store_trans_id_o(ss_store_tid),
    .ss_store_ex_o(ss_store_ex), .ss_load_ex_o(ss_load_ex),
    .mmu_valid_i(mmu_valid), .mmu_translation_on_i(mmu_xlat), .mmu_is_zicfiss_i(mmu_is_ss),
    .pte_r_i(pte_r), .pte_w_i(pte_w), .pte_x_i(pte_x), .mmu_vaddr_i(mmu_va),
    .mmu_ss_ex_o(mmu_ex),
    .commit_instr_i(ci), .commit_ack_i(ack), .commit_instr_o(co), .lp_fault_o(lp_fault)
  );

  // ------------------------------------------------------------ bookkeeping
  int checks = 0, failures = 0;

  typedef enum int {
    M_LABEL_SET, M_LPAD_OK, M_SAME_CYCLE_LPAD, M_LP_FAULT, M_LP_LABEL_FAULT,
    M_SSPUSH, M_SSPCHK_OK, M_SSPCHK_MISMATCH, M_C_SSPUSH, M_C_SSPCHK,
    M_SSAMO_M_FAULT, M_BARE_FAULT, M_MMU_SS_FAULT, M_MMU_PLAIN_FAULT,
    M_SSRDP, M_DISABLED_NOP, M_ELP_SAVE_RESTORE, M_ISSUE_STALL, M_COUNT
  } mech_t;
  int mech [M_COUNT];

  task automatic check(input logic cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      $display("FAIL: %s (t=%0t)", what, $time);
    end
  endtask

  // architectural state of the surrounding core
  logic [XLEN-1:0] x [32];
  logic [XLEN-1:0] mem [logic [XLEN-1:0]];
  logic [XLEN-1:0] pc;
  logic [TRANS_ID_BITS-1:0] next_tid;

  localparam logic [XLEN-1:0] SS_BASE = 64'h0000_0000_9000_0000;  // shadow stack pages
  localparam logic [XLEN-1:0] SS_TOP  = 64'h0000_0000_9000_1000;

  function automatic logic is_ss_page(logic [XLEN-1:0] a);
    return a >= SS_BASE && a < SS_TOP;
  endfunction

  // instruction encodings
  function automatic logic [31:0] e_sspush(logic [4:0] r);
    return {7'b1100111, r, 5'd0, 3'b100, 5'd0, 7'b1110011};
  endfunction
  function automatic logic [31:0] e_sspopchk(logic [4:0] r);
    return {12'b110011011100, r, 3'b100, 5'd0, 7'b1110011};
  endfunction
  function automatic logic [31:0] e_ssrdp(logic [4:0] rd);
    return {12'b110011011100, 5'd0, 3'b100, rd, 7'b1110011};
  endfunction
  function automatic logic [31:0] e_ssamoswap_d(logic [4:0] rd, logic [4:0] rs1, logic [4:0] rs2);
    return {5'b01001, 2'b00, rs2, rs1, 3'b011, rd, 7'b0101111};
  endfunction
  function automatic logic [31:0] e_lpad(logic [19:0] label);
    return {label, 5'd0, 7'b0010111};
  endfunction
  localparam logic [31:0] C_SSPUSH_X1   = 32'h0000_6081;
  localparam logic [31:0] C_SSPOPCHK_X5 = 32'h0000_6281;

  // ---------------------------------------------------------- CSR helpers
  task automatic csr_write(input logic [11:0] a, input logic [XLEN-1:0] d);
    @(negedge clk);
    csr_addr = a; csr_wdata = d; csr_we = 1'b1;
    @(negedge clk);
    csr_we = 1'b0;
  endtask

  task automatic csr_read(input logic [11:0] a, output logic [XLEN-1:0] d);
    csr_addr = a; #1; d = csr_rdata;
  endtask

  // ---------------------------------------------------------- commit
  // Commit up to two records in one cycle; returns the exception of each.
  // A faulting record takes a trap into M-mode (ELP saved, flush).
  task automatic commit2(input scoreboard_entry_t e0, input logic v1,
                         input scoreboard_entry_t e1,
                         output exception_t ex0, output exception_t ex1);
    logic took_trap;
    @(negedge clk);
    ci[0] = e0; ci[1] = v1 ? e1 : '0;
    ack   = 2'b00;
    #1;
    ex0 = co[0].ex; ex1 = co[1].ex;
    // the commit logic retires in order up to the first exception
    ack[0] = 1'b1;
    ack[1] = v1 && !co[0].ex.valid;
    took_trap = co[0].ex.valid || (v1 && co[1].ex.valid);
    if (ack[0] && !co[0].ex.valid && e0.rd != 0) x[e0.rd] = e0.result;
    if (ack[1] && !co[1].ex.valid && e1.rd != 0) x[e1.rd] = e1.result;
    @(negedge clk);
    ci[0] = '0; ci[1] = '0; ack = '0;
    if (took_trap) begin
      trap = 1'b1; trap_priv = PRIV_LVL_M; flush = 1'b1;
      @(negedge clk);
      trap = 1'b0; flush = 1'b0;
    end
  endtask

  task automatic commit1(input scoreboard_entry_t e0, output exception_t ex0);
    exception_t dummy;
    commit2(e0, 1'b0, '0, ex0, dummy);
  endtask

  function automatic scoreboard_entry_t rec(fu_op_t op, logic [4:0] rs1, logic [4:0] rd,
                                            logic [XLEN-1:0] result);
    scoreboard_entry_t e = '0;
    e.valid = 1'b1; e.op = op; e.rs1 = rs1; e.rd = rd; e.result = result; e.pc = pc;
    pc = pc + 4;
    return e;
  endfunction

  // ------------------------------------------------------ execute via SSU
  // Decode a word, and for a memory operation run it through the SSU, the
  // MMU check and the LSU model. Returns the decoded record (commit form)
  // and the exception the execute stage reported for it.
  task automatic execute(input logic [31:0] word, output scoreboard_entry_t e,
                         output exception_t ex);
    cfi_decoded_t d;
    logic [XLEN-1:0] addr;
    logic [TRANS_ID_BITS-1:0] tid;
    logic is_store, is_load, issued;
    int waited;
    @(negedge clk);
    instr = word;
    #1;
    d  = dec;
    e  = '0;
    ex = NO_EX;
    e.valid = 1'b1; e.pc = pc; e.op = d.op; e.fu = d.fu;
    e.rs1 = d.rs1; e.rs2 = d.rs2; e.rd = d.rd;
    pc = pc + ((word[1:0] == 2'b11) ? 4 : 2);
    if (d.op == OP_ZICFI_LP) e.result = d.imm;
    if (d.op == OP_CSRR) begin
      csr_read(d.imm[11:0], e.result);
    end
    if (d.op == OP_ADD && d.fu == FU_ALU) e.result = '0;   // disabled ssrdp: rd <- 0
    if (!(d.fu inside {FU_LOAD, FU_STORE})) return;

    tid = next_tid; next_tid++;
    fu = '0;
    fu.fu = d.fu; fu.operation = d.op; fu.trans_id = tid;
    e.trans_id = tid;
    is_store = (d.fu == FU_STORE);
    is_load  = (d.fu == FU_LOAD);
    // issue, honouring the push/pop interlock
    lsu_valid_i = 1'b1;
    waited = 0;
    #1;
    while (!(lsu_ready_o && !ss_stall) && waited < 20) begin
      if (ss_stall) mech[M_ISSUE_STALL]++;
      @(negedge clk); waited++; #1;
    end
    // operands are read when the operation issues
    case (d.op)
      OP_SSPUSH: addr = ssp - 8;
      OP_SSPCHK: addr = ssp;
      default:   addr = x[d.rs1];
    endcase
    fu.operand_a = addr; fu.operand_b = x[d.rs2];
    #1;
    issued = lsu_valid_o;
    // the SSU's own fault comes back on the store port in the issue cycle
    if (ss_store_valid && ss_store_tid == tid && ss_store_ex.valid) ex = ss_store_ex;
    @(negedge clk);
    lsu_valid_i = 1'b0; fu = '0;
    if (issued) begin
      // MMU: translation and shadow-stack page check
      mmu_valid = 1'b1; mmu_xlat = (satp_mode != MODE_BARE) && (priv != PRIV_LVL_M);
      mmu_is_ss = is_zicfiss_op(d.op); mmu_va = addr;
      {pte_r, pte_w, pte_x} = is_ss_page(addr) ? 3'b010 : 3'b110;
      #1;
      // LSU responds one cycle after issue
      if (is_store) begin
        store_valid = 1'b1; store_tid = tid; store_ex = mmu_ex;
        if (!mmu_ex.valid) begin
          if (is_ssamo_op(d.op)) begin
            e.result = mem.exists(addr) ? mem[addr] : '0;
          end
          mem[addr] = x[d.rs2];
        end
        #1;
        check(ss_store_valid && ss_store_tid == tid, "store result forwarded to scoreboard");
        ex = ss_store_ex;
      end else begin
        load_valid = 1'b1; load_tid = tid; load_ex = mmu_ex;
        load_result = mem.exists(addr) ? mem[addr] : '0;
        #1;
        ex = ss_load_ex;
      end
      @(negedge clk);
      store_valid = 1'b0; load_valid = 1'b0; mmu_valid = 1'b0;
      store_ex = NO_EX; load_ex = NO_EX;
    end
  endtask

  // execute and commit one instruction, return the final exception
  task automatic run(input logic [31:0] word, output exception_t ex_final);
    scoreboard_entry_t e;
    exception_t ex;
    execute(word, e, ex);
    e.ex = ex;
    commit1(e, ex_final);
  endtask

  // ------------------------------------------------------- program pieces
  // call through a function pointer in a0 to a function starting with
  // "lpad label", with x7 = label set by the caller. When same_cycle, the
  // jump and the lpad retire together on the two commit ports.
  task automatic indirect_call(input logic [19:0] label, input logic [19:0] lpad_label,
                               input logic same_cycle, output exception_t ex);
    scoreboard_entry_t j, l;
    exception_t ex0, ex1, dummy;
    commit1(rec(OP_ADD, 5'd0, 5'd7, {32'h0, label, 12'h0}), dummy);   // lui x7, label
    mech[M_LABEL_SET]++;
    j = rec(OP_JALR, 5'd10, 5'd1, pc + 4);                            // jalr ra, 0(a0)
    execute(e_lpad(lpad_label), l, dummy);
    l.pc = 64'h0000_0000_8000_4000;
    if (same_cycle) begin
      commit2(j, 1'b1, l, ex0, ex1);
      ex = ex1;
    end else begin
      commit1(j, ex0);
      check(elp, "ELP set after the indirect jump");
      commit1(l, ex);
    end
  endtask

  // ------------------------------------------------------------- watchdog
  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // --------------------------------------------------------------- program
  initial begin
    exception_t ex;
    logic [XLEN-1:0] r, ssp0;
    scoreboard_entry_t e;

    foreach (x[i]) x[i] = '0;
    foreach (mech[i]) mech[i] = 0;
    priv = PRIV_LVL_M; v = 0; satp_mode = MODE_SV39; vsatp_mode = MODE_SV39;
    csr_addr = '0; csr_we = 0; csr_wdata = '0;
    trap = 0; trap_v = 0; mret = 0; sret = 0; sret_v = 0; ret_lpe = 1; flush = 0;
    trap_priv = PRIV_LVL_M;
    instr = 32'h0000_0013; lsu_valid_i = 0; fu = '0; lsu_ready_i = 1;
    store_valid = 0; load_valid = 0; store_tid = '0; load_tid = '0;
    store_ex = NO_EX; load_ex = NO_EX; load_result = '0;
    mmu_valid = 0; mmu_xlat = 0; mmu_is_ss = 0; pte_r = 0; pte_w = 0; pte_x = 0; mmu_va = '0;
    ci[0] = '0; ci[1] = '0; ack = '0;
    pc = 64'h0000_0000_8000_0000; next_tid = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;

    // ---- M-mode set-up: enable both extensions for U-mode, set ssp
    csr_write(CSR_MENVCFG, (64'h1 << ENVCFG_SSE) | (64'h1 << ENVCFG_LPE));
    csr_write(CSR_SENVCFG, (64'h1 << ENVCFG_SSE) | (64'h1 << ENVCFG_LPE));
    csr_write(CSR_SSP, SS_TOP);
    #1;
    check(!ss_en && !lp_en, "M-mode: shadow stack off, landing pads off (MLPE=0)");
    // ssamoswap in M-mode: store access fault from the SSU
    x[12] = SS_BASE + 64'h100; x[11] = 64'h55;
    run(e_ssamoswap_d(5'd10, 5'd12, 5'd11), ex);
    check(ex.valid && ex.cause == ST_ACCESS_FAULT, "ssamoswap in M-mode faults");
    if (ex.valid && ex.cause == ST_ACCESS_FAULT) mech[M_SSAMO_M_FAULT]++;

    // ---- drop to U-mode
    @(negedge clk); priv = PRIV_LVL_U; #1;
    check(ss_en && lp_en, "U-mode: both extensions on");

    // ---- ssrdp
    run(e_ssrdp(5'd10), ex);
    check(!ex.valid && x[10] == SS_TOP, "ssrdp reads ssp");
    if (x[10] == SS_TOP) mech[M_SSRDP]++;

    // ---- call chain main -> f -> g, returns g -> f -> main
    x[1] = 64'h0000_0000_8000_0104;              // main's return address into caller
    for (int depth = 0; depth < 3; depth++) begin
      logic [19:0] lab;
      lab = 20'h00100 + 20'(depth);
      ssp0 = ssp;
      // prologue of the caller: sspush ra (compressed form every other level)
      if (depth % 2 == 0) run(e_sspush(5'd1), ex);
      else begin
        run(C_SSPUSH_X1, ex);
        mech[M_C_SSPUSH]++;
      end
      check(!ex.valid, "sspush ok");
      check(ssp == ssp0 - 8, "ssp moved down by 8");
      check(mem.exists(ssp) && mem[ssp] == x[1], "return address on the shadow stack");
      if (!ex.valid) mech[M_SSPUSH]++;
      // call through a pointer
      indirect_call(lab, (depth == 1) ? 20'h0 : lab, depth == 2, ex);
      check(!ex.valid, "lpad with matching (or zero) label accepted");
      check(!elp, "ELP cleared by the lpad");
      if (!ex.valid) mech[M_LPAD_OK]++;
      if (!ex.valid && depth == 2) mech[M_SAME_CYCLE_LPAD]++;
    end
    // returns: sspopchk x1 (x5 with the compressed form, ra copied to t0)
    for (int depth = 2; depth >= 0; depth--) begin
      ssp0 = ssp;
      x[1] = mem[ssp];                           // the regular stack held the same value
      if (depth == 1) begin
        x[5] = x[1];
        run(C_SSPOPCHK_X5, ex);
        mech[M_C_SSPCHK]++;
      end else run(e_sspopchk(5'd1), ex);
      check(!ex.valid, "sspopchk with intact return address");
      check(ssp == ssp0 + 8, "ssp moved up by 8");
      if (!ex.valid) mech[M_SSPCHK_OK]++;
      commit1(rec(OP_JALR, 5'd1, 5'd0, '0), ex);   // ret: no landing pad needed
      check(!ex.valid && !elp, "return does not expect a landing pad");
    end
    check(ssp == SS_TOP, "shadow stack balanced");

    // ---- attack 1: return address overwritten on the regular stack
    run(e_sspush(5'd1), ex);
    x[1] = 64'h0000_0000_dead_beef;
    run(e_sspopchk(5'd1), ex);
    check(ex.valid && ex.cause == SW_CHECK_EX && ex.tval == TVAL_SS_FAULT,
          "corrupted return address -> software-check exception");
    if (ex.valid && ex.cause == SW_CHECK_EX) mech[M_SSPCHK_MISMATCH]++;
    check(ssp == SS_TOP - 8, "faulting sspopchk does not move ssp");
    csr_write(CSR_SSP, SS_TOP);

    // ---- attack 2: indirect jump to a gadget that is not an lpad
    commit1(rec(OP_JALR, 5'd10, 5'd1, '0), ex);
    check(elp, "ELP expected");
    commit1(rec(OP_ADD, 5'd11, 5'd12, 64'h1), ex);
    check(ex.valid && ex.cause == SW_CHECK_EX && ex.tval == TVAL_LP_FAULT,
          "jump to non-lpad -> software-check exception");
    if (ex.valid) mech[M_LP_FAULT]++;
    check(!elp, "trap clears ELP");
    csr_read(CSR_MSTATUS, r);
    check(r[STATUS_MPELP], "ELP saved in MPELP");
    // mret back: ELP restored, the handler's return target must be an lpad
    @(negedge clk); mret = 1; ret_lpe = 1;
    @(negedge clk); mret = 0;
    check(elp, "mret restores ELP");
    csr_read(CSR_MSTATUS, r);
    check(!r[STATUS_MPELP], "MPELP cleared");
    execute(e_lpad(20'h00102), e, ex);   // label register still holds 0x00102
    commit1(e, ex);
    check(!ex.valid && !elp, "resumed at the lpad");
    if (!ex.valid) mech[M_ELP_SAVE_RESTORE]++;

    // ---- attack 3: lpad with the wrong label
    indirect_call(20'h00abc, 20'h00abd, 1'b0, ex);
    check(ex.valid && ex.cause == SW_CHECK_EX && ex.tval == TVAL_LP_FAULT, "wrong label faults");
    if (ex.valid) mech[M_LP_LABEL_FAULT]++;

    // ---- sspush to an ordinary page: MMU store access fault
    csr_write(CSR_SSP, 64'h0000_0000_8800_0000);
    run(e_sspush(5'd1), ex);
    check(ex.valid && ex.cause == ST_ACCESS_FAULT, "sspush to ordinary page faults");
    if (ex.valid) mech[M_MMU_SS_FAULT]++;
    check(ssp == 64'h8800_0000, "faulting sspush does not move ssp");
    csr_write(CSR_SSP, SS_TOP);

    // ---- ordinary store into the shadow stack: MMU store access fault
    begin
      scoreboard_entry_t st;
      st = '0;
      // a plain store is not decoded by the CFI decoder; issue it directly
      @(negedge clk);
      fu = '0; fu.fu = FU_STORE; fu.operation = OP_SD; fu.trans_id = next_tid;
      fu.operand_a = SS_TOP - 8; lsu_valid_i = 1;
      #1;
      check(lsu_valid_o, "plain store passes the SSU");
      @(negedge clk);
      lsu_valid_i = 0;
      mmu_valid = 1; mmu_xlat = 1; mmu_is_ss = 0; mmu_va = SS_TOP - 8;
      {pte_r, pte_w, pte_x} = 3'b010;
      #1;
      check(mmu_ex.valid && mmu_ex.cause == ST_ACCESS_FAULT, "plain store to shadow-stack page faults");
      if (mmu_ex.valid) mech[M_MMU_PLAIN_FAULT]++;
      @(negedge clk); mmu_valid = 0;
      next_tid++;
    end

    // ---- push/pop interlock: second sspush issued while the first is
    //      not yet retired
    begin
      scoreboard_entry_t e1, e2;
      exception_t x1e, x2e, d0, d1;
      int stall_before;
      stall_before = mech[M_ISSUE_STALL];
      execute(e_sspush(5'd1), e1, x1e);
      fork
        execute(e_sspush(5'd1), e2, x2e);
        begin
          repeat (3) @(negedge clk);
          e1.ex = x1e;
          commit1(e1, d0);
        end
      join
      e2.ex = x2e;
      commit1(e2, d1);
      check(mech[M_ISSUE_STALL] > stall_before, "second push waited for the first to retire");
      check(!d0.valid && !d1.valid && ssp == SS_TOP - 16, "two pushes, ssp down by 16");
      check(mem[SS_TOP - 16] == x[1] && mem[SS_TOP - 8] == x[1], "both pushed with distinct addresses");
      csr_write(CSR_SSP, SS_TOP);
    end

    // ---- translation off below M: SSU store access fault
    @(negedge clk); satp_mode = MODE_BARE;
    run(e_sspush(5'd1), ex);
    check(ex.valid && ex.cause == ST_ACCESS_FAULT, "sspush with bare translation faults");
    if (ex.valid) mech[M_BARE_FAULT]++;
    @(negedge clk); satp_mode = MODE_SV39;

    // ---- extensions disabled for U-mode: CFI instructions are no-ops
    @(negedge clk); priv = PRIV_LVL_M;
    csr_write(CSR_SENVCFG, '0);
    @(negedge clk); priv = PRIV_LVL_U; #1;
    check(!ss_en && !lp_en, "U-mode: extensions off");
    ssp0 = ssp;
    run(e_sspush(5'd1), ex);
    check(!ex.valid && ssp == ssp0, "sspush is a no-op when disabled");
    x[10] = 64'h77;
    run(e_ssrdp(5'd10), ex);
    check(x[10] == 0, "ssrdp writes zero when disabled");
    commit1(rec(OP_JALR, 5'd10, 5'd1, '0), ex);
    check(!elp, "no landing pad expected when disabled");
    commit1(rec(OP_ADD, 5'd0, 5'd11, '0), ex);
    check(!ex.valid, "any instruction may follow the jump");
    if (!ex.valid && ssp == ssp0) mech[M_DISABLED_NOP]++;

    // ---- every mechanism happened
    for (int m = 0; m < M_COUNT; m++) begin
      mech_t mm;
      mm = mech_t'(m);
      $display("mechanism %-20s %0d", mm.name(), mech[m]);
      check(mech[m] > 0, {"mechanism happened: ", mm.name()});
    end

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
