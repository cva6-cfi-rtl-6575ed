// tb_ssu: self-checking testbench of the shadow stack unit.
//
// Drives the issue, CSR and LSU-writeback inputs directly and checks:
// filtering (ssamoswap in M-mode; Zicfiss below M with satp or vsatp BARE;
// ordinary operations and translated Zicfiss operations pass), the fault
// reported on the store writeback port with the right transaction ID, a
// fault parked for one cycle when the LSU returns a store at the same time,
// the sspopchk buffer (match, mismatch, unrelated loads ignored, LSU
// exception priority), and the one-in-flight rule. Inputs change on the
// falling edge; outputs are sampled just before the rising edge.
module tb_ssu;
  import cfi_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  priv_lvl_t priv;
  logic [3:0] satp_mode, vsatp_mode;
  logic v;
  logic lsu_valid_i, lsu_ready_o, lsu_valid_o, lsu_ready_i;
  fu_data_t fu;
  logic store_valid_i, load_valid_i;
  logic [TRANS_ID_BITS-1:0] store_tid_i, load_tid_i, ss_store_tid;
  exception_t store_ex_i, load_ex_i, ss_store_ex, ss_load_ex;
  logic [XLEN-1:0] load_result;
  logic ss_store_valid, inflight;

  ssu dut (
    .clk_i(clk), .rst_ni(rst_n),
    .priv_lvl_i(priv), .satp_mode_i(satp_mode), .vsatp_mode_i(vsatp_mode), .v_i(v),
    .lsu_valid_i, .fu_data_i(fu), .lsu_ready_o, .lsu_valid_o, .lsu_ready_i,
    .store_valid_i, .store_trans_id_i(store_tid_i), .store_ex_i,
    .load_valid_i, .load_trans_id_i(load_tid_i), .load_result_i(load_result), .load_ex_i,
    .ss_store_valid_o(ss_store_valid), .ss_store_trans_id_o(ss_store_tid),
    .ss_store_ex_o(ss_store_ex), .ss_load_ex_o(ss_load_ex), .sspchk_inflight_o(inflight)
  );

  int checks = 0, failures = 0;

  task automatic check(input logic cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      $display("FAIL: %s (t=%0t)", what, $time);
    end
  endtask

  task automatic idle();
    lsu_valid_i   = 1'b0;
    store_valid_i = 1'b0;
    load_valid_i  = 1'b0;
    store_ex_i    = NO_EX;
    load_ex_i     = NO_EX;
    fu            = '0;
  endtask

  task automatic issue(input fu_op_t op, input logic [TRANS_ID_BITS-1:0] tid,
                       input logic [XLEN-1:0] opb);
    fu.operation = op;
    fu.fu        = (op inside {OP_SSPCHK, OP_LD}) ? FU_LOAD : FU_STORE;
    fu.trans_id  = tid;
    fu.operand_b = opb;
    lsu_valid_i  = 1'b1;
  endtask

  // expected filtering decision, written from the rule, not from the RTL
  function automatic logic exp_fault(fu_op_t op, priv_lvl_t p, logic vv,
                                     logic [3:0] sm, logic [3:0] vsm);
    logic ss = (op == OP_SSPUSH) || (op == OP_SSPCHK) ||
               (op == OP_SSAMOSWAP_W) || (op == OP_SSAMOSWAP_D);
    logic amo = (op == OP_SSAMOSWAP_W) || (op == OP_SSAMOSWAP_D);
    logic bare = vv ? (vsm == 4'd0) : (sm == 4'd0);
    if (amo && p == PRIV_LVL_M) return 1'b1;
    if (ss && p != PRIV_LVL_M && bare) return 1'b1;
    return 1'b0;
  endfunction

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  fu_op_t ops [6] = '{OP_LD, OP_SD, OP_SSPUSH, OP_SSPCHK, OP_SSAMOSWAP_W, OP_SSAMOSWAP_D};
  priv_lvl_t privs [3] = '{PRIV_LVL_U, PRIV_LVL_S, PRIV_LVL_M};

  initial begin
    idle();
    priv = PRIV_LVL_S; v = 1'b0; satp_mode = MODE_SV39; vsatp_mode = MODE_SV39;
    lsu_ready_i = 1'b1; load_result = '0; load_tid_i = '0; store_tid_i = '0;
    repeat (2) @(posedge clk);
    rst_n = 1'b1;

    // ---- 1. filtering over all op/priv/v/mode combinations (not SSPCHK
    //         so no pop check is left outstanding)
    for (int o = 0; o < 6; o++)
      for (int p = 0; p < 3; p++)
        for (int m = 0; m < 8; m++) begin
          logic ef;
          if (ops[o] == OP_SSPCHK) continue;
          @(negedge clk);
          idle();
          priv = privs[p]; v = m[2];
          satp_mode  = m[0] ? MODE_SV39 : MODE_BARE;
          vsatp_mode = m[1] ? MODE_SV39 : MODE_BARE;
          issue(ops[o], TRANS_ID_BITS'(o + p), 64'h0);
          #1;
          ef = exp_fault(ops[o], privs[p], m[2], satp_mode, vsatp_mode);
          check(lsu_valid_o == !ef, $sformatf("lsu_valid_o op=%s priv=%0d m=%0d", ops[o].name(), p, m));
          check(ss_store_valid == ef, "fault on store port");
          if (ef) begin
            check(ss_store_ex.valid && ss_store_ex.cause == 64'd7, "store access fault cause");
            check(ss_store_tid == TRANS_ID_BITS'(o + p), "fault trans id");
          end
        end

    // ---- 2. fault collides with an LSU store result: parked one cycle
    @(negedge clk);
    idle();
    priv = PRIV_LVL_M; v = 1'b0;
    issue(OP_SSAMOSWAP_D, 3'd6, '0);
    store_valid_i = 1'b1; store_tid_i = 3'd2;
    #1;
    check(ss_store_valid && ss_store_tid == 3'd2 && !ss_store_ex.valid, "LSU store result passes first");
    check(!lsu_valid_o, "faulted op not sent to LSU");
    @(negedge clk);
    idle();
    issue(OP_SD, 3'd1, '0);
    #1;
    check(!lsu_ready_o, "issue held while a fault is parked");
    check(ss_store_valid && ss_store_tid == 3'd6 && ss_store_ex.cause == 64'd7, "parked fault delivered");
    @(negedge clk);
    #1;
    check(lsu_ready_o && lsu_valid_o, "issue resumes");

    // ---- 3. pop check: match
    @(negedge clk);
    idle();
    priv = PRIV_LVL_U; satp_mode = MODE_SV39;
    issue(OP_SSPCHK, 3'd5, 64'h8000_1234);
    #1;
    check(lsu_valid_o, "sspopchk sent to LSU");
    @(negedge clk);
    idle();
    #1;
    check(inflight, "pop check in flight");
    // unrelated load with different value: no exception
    load_valid_i = 1'b1; load_tid_i = 3'd4; load_result = 64'hdead;
    #1;
    check(!ss_load_ex.valid, "unrelated load not checked");
    // a second sspopchk is held
    issue(OP_SSPCHK, 3'd6, 64'h1);
    load_valid_i = 1'b0;
    #1;
    check(!lsu_ready_o && !lsu_valid_o, "second sspopchk held");
    @(negedge clk);
    idle();
    load_valid_i = 1'b1; load_tid_i = 3'd5; load_result = 64'h8000_1234;
    #1;
    check(!ss_load_ex.valid, "matching return address");
    @(negedge clk);
    idle();
    #1;
    check(!inflight, "pop check done");

    // ---- 4. pop check: mismatch
    issue(OP_SSPCHK, 3'd7, 64'h8000_1234);
    @(negedge clk);
    idle();
    repeat (2) @(negedge clk);
    load_valid_i = 1'b1; load_tid_i = 3'd7; load_result = 64'h8000_1238;
    #1;
    check(ss_load_ex.valid && ss_load_ex.cause == 64'd18 && ss_load_ex.tval == 64'd3,
          "software-check exception on mismatch");

    // ---- 5. pop check: LSU exception has priority
    @(negedge clk);
    idle();
    issue(OP_SSPCHK, 3'd1, 64'h42);
    @(negedge clk);
    idle();
    load_valid_i = 1'b1; load_tid_i = 3'd1; load_result = 64'h0;
    load_ex_i = '{cause: 64'd13, tval: 64'h10, valid: 1'b1};
    #1;
    check(ss_load_ex.cause == 64'd13, "load page fault kept");

    // ---- 6. sspopchk of a random value, 50 times, back to back
    for (int i = 0; i < 50; i++) begin
      logic [XLEN-1:0] ra, got;
      logic bad;
      ra  = {$urandom, $urandom};
      bad = ($urandom % 2) == 0;
      got = bad ? (ra ^ (64'h1 << ($urandom % 64))) : ra;
      @(negedge clk);
      idle();
      issue(OP_SSPCHK, 3'(i), ra);
      @(negedge clk);
      idle();
      load_valid_i = 1'b1; load_tid_i = 3'(i); load_result = got;
      #1;
      check(ss_load_ex.valid == bad, "random pop check");
    end

    @(negedge clk);
    idle();
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
