// tb_cfi_workload: a recursive quicksort run through the CFI logic.
//
// The call structure is that of a C library quicksort with a comparison
// callback: the recursive sort function is reached by direct calls and is
// not a leaf, so its prologue pushes the return address with sspush and its
// epilogue checks it with sspopchk (the compressed form on every other
// level); the comparison function is called through a function pointer,
// so every comparison is an indirect call whose target begins with an lpad,
// and returns through x1 without needing one. The sort itself is computed in
// the testbench; every CFI instruction it implies is decoded, executed and
// committed by the design, with the same model of the surrounding core as
// the end-to-end testbench. The parameter N (number of keys) sets the size;
// the run is repeated for several seeds.
//
// Checked: the keys end sorted; no CFI exception on the clean run; the
// shadow stack is balanced and its deepest entry is within the region;
// the counts of sspush, sspopchk and lpad equal the numbers of calls and
// comparisons; then a return address overwritten in the middle of the
// recursion is caught on the way back. Each run prints its call, compare and
// CFI instruction counts and its cycle count (set mostly by the core model).
module tb_cfi_workload;
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

  typedef enum int { M_ISSUE_STALL, M_LABEL_SET, M_COUNT } mech_t;
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
    repeat (400000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  localparam int N = 40;
  localparam int SEEDS = 3;
  int n_calls, n_cmp, n_push, n_pop, n_lpad, n_exc, max_depth, depth;
  logic [XLEN-1:0] min_ssp;
  longint cyc;
  logic [31:0] keys [N];
  logic [XLEN-1:0] ra_stack [$];     // the ordinary stack's saved return addresses
  int corrupt_at;                     // call number whose saved return address is overwritten

  always @(posedge clk) cyc <= cyc + 1;

  task automatic expect_ok(input exception_t ex, input string what);
    if (ex.valid) n_exc++;
    if (corrupt_at < 0) check(!ex.valid, what);
  endtask

  // int cmp(const void*, const void*): leaf, reached through a pointer
  task automatic call_cmp(input int i, input int j, output logic gt);
    exception_t ex;
    indirect_call(20'h0c0de, 20'h0c0de, (n_cmp % 2) == 0, ex);   // lui x7; jalr ra,a0; lpad
    expect_ok(ex, "compare call lands on its lpad");
    if (!ex.valid) n_lpad++;
    n_cmp++;
    gt = keys[i] > keys[j];
    commit1(rec(OP_JALR, 5'd1, 5'd0, '0), ex);                   // ret
    expect_ok(ex, "compare returns");
  endtask

  // void sort(lo, hi): non-leaf, calls itself directly twice. The
  // recursion is kept in an explicit frame stack so that every step is
  // driven from the one initial process.
  typedef struct { int lo, hi, p, state; } frame_t;
  frame_t frames [$];

  task automatic prologue(input logic [XLEN-1:0] ra);
    exception_t ex;
    n_calls++;
    depth++;
    if (depth > max_depth) max_depth = depth;
    x[1] = ra;
    ra_stack.push_back(x[1]);                     // sd ra, 8(sp)
    if ((depth % 2) != 0) run(e_sspush(5'd1), ex); else run(C_SSPUSH_X1, ex);
    expect_ok(ex, "sspush");
    if (!ex.valid) n_push++;
    check(mem.exists(ssp) && mem[ssp] == ra, "return address is on the shadow stack");
    if (ssp < min_ssp) min_ssp = ssp;
    if (n_calls == corrupt_at) ra_stack[ra_stack.size() - 1] = 64'h0000_0000_0bad_c0de;   // stack smash
  endtask

  // Lomuto partition around keys[hi]; returns the pivot's final index
  task automatic partition(input int lo, input int hi, output int p);
    logic gt;
    logic [31:0] t;
    p = lo;
    for (int i = lo; i < hi; i++) begin
      call_cmp(hi, i, gt);
      if (gt) begin
        t = keys[i]; keys[i] = keys[p]; keys[p] = t;
        p++;
      end
    end
    t = keys[hi]; keys[hi] = keys[p]; keys[p] = t;
  endtask

  task automatic epilogue();
    exception_t ex;
    x[1] = ra_stack.pop_back();                   // ld ra, 8(sp)
    if ((depth % 2) != 0) run(e_sspopchk(5'd1), ex);
    else begin
      x[5] = x[1];                                // mv t0, ra
      run(C_SSPOPCHK_X5, ex);
    end
    if (ex.valid) begin
      n_exc++;
      check(corrupt_at >= 0 && ex.cause == SW_CHECK_EX && ex.tval == TVAL_SS_FAULT,
            "only the smashed return address is caught");
      csr_write(CSR_SSP, ssp + 8);                // handler: discard the entry and go on
    end else n_pop++;
    commit1(rec(OP_JALR, 5'd1, 5'd0, '0), ex);    // ret
    expect_ok(ex, "return");
    depth--;
  endtask

  task automatic sort(input int lo, input int hi);
    frame_t f;
    f = '{lo: lo, hi: hi, p: 0, state: 0};
    frames.push_back(f);
    prologue(64'h0000_0000_8000_0004);
    while (frames.size() > 0) begin
      f = frames[frames.size() - 1];
      case (f.state)
        0: begin
          if (f.lo < f.hi) begin
            partition(f.lo, f.hi, f.p);
            frames[frames.size() - 1].p = f.p;
            frames[frames.size() - 1].state = 1;
            frames.push_back('{lo: f.lo, hi: f.p - 1, p: 0, state: 0});
            prologue(64'h0000_0000_8000_1010);    // jal ra, sort
          end else frames[frames.size() - 1].state = 2;
        end
        1: begin
          frames[frames.size() - 1].state = 2;
          frames.push_back('{lo: f.p + 1, hi: f.hi, p: 0, state: 0});
          prologue(64'h0000_0000_8000_1020);      // jal ra, sort
        end
        default: begin
          epilogue();
          void'(frames.pop_back());
        end
      endcase
    end
  endtask

  initial begin
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
    pc = 64'h0000_0000_8000_0000; next_tid = '0; cyc = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;

    csr_write(CSR_MENVCFG, (64'h1 << ENVCFG_SSE) | (64'h1 << ENVCFG_LPE));
    csr_write(CSR_SENVCFG, (64'h1 << ENVCFG_SSE) | (64'h1 << ENVCFG_LPE));
    @(negedge clk); priv = PRIV_LVL_U;

    for (int seed = 0; seed <= SEEDS; seed++) begin
      longint c0;
      logic sorted;
      corrupt_at = (seed == SEEDS) ? 7 : -1;   // last run: attack
      n_calls = 0; n_cmp = 0; n_push = 0; n_pop = 0; n_lpad = 0; n_exc = 0;
      max_depth = 0; depth = 0;
      csr_write(CSR_SSP, SS_TOP);
      min_ssp = SS_TOP;
      for (int k = 0; k < N; k++) keys[k] = $urandom % 1000;
      c0 = cyc;
      sort(0, N - 1);
      sorted = 1'b1;
      for (int k = 1; k < N; k++) if (keys[k-1] > keys[k]) sorted = 1'b0;
      check(sorted, "keys sorted");
      check(ssp == SS_TOP, "shadow stack balanced");
      check(min_ssp == SS_TOP - 64'(8 * max_depth), "deepest shadow stack entry = depth x 8");
      check(min_ssp >= SS_BASE, "shadow stack stays in its pages");
      check(n_lpad == n_cmp && n_push == n_calls, "one lpad per compare, one sspush per call");
      if (corrupt_at < 0) begin
        check(n_exc == 0 && n_pop == n_calls, "clean run: no exception");
        $display("run %0d: N=%0d calls=%0d (sspush=%0d sspopchk=%0d) compares=%0d (lpad=%0d) depth=%0d cycles=%0d",
                 seed, N, n_calls, n_push, n_pop, n_cmp, n_lpad, max_depth, cyc - c0);
      end else begin
        check(n_exc == 1 && n_pop == n_calls - 1, "attack run: exactly one shadow stack fault");
        $display("attack run: smashed return address caught, %0d exception(s)", n_exc);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

