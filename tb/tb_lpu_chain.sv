// tb_lpu_chain: self-checking testbench of the two-port landing pad chain.
//
// A random instruction stream (indirect jumps, returns, x7 writes, lpads
// with right/wrong/zero labels, misaligned lpads, ordinary instructions) is
// offered to the commit ports, zero, one or two per cycle. The testbench
// keeps the ELP bit as the CSR file would and, after a landing pad fault,
// clears it and drops the rest of the group as a trap would. A sequential
// reference model, one instruction at a time, predicts every fault, the ELP
// bit and the label. The same-cycle corner cases the chain exists for
// (jump on port 0 with its lpad on port 1) and faults are counted and must
// occur; directed cases add an x7 write and a jump retiring together.
module tb_lpu_chain;
  import cfi_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic lpe, elp_q, elp_o;
  scoreboard_entry_t ci [2], co [2];
  logic fault [2];
  logic [LPL_BITS-1:0] lpl;

  lpu_chain #(.NrCommitPorts(2)) dut (
    .clk_i(clk), .rst_ni(rst_n), .lpe_i(lpe), .elp_i(elp_q), .elp_o,
    .commit_instr_i(ci), .commit_instr_o(co), .lp_fault_o(fault), .lpl_o(lpl));

  int checks = 0, failures = 0;
  int n_same_cycle_jump_lpad = 0, n_faults = 0;

  task automatic check(input logic cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      $display("FAIL: %s (t=%0t)", what, $time);
    end
  endtask

  // reference state
  logic        m_elp;
  logic [19:0] m_lpl;

  function automatic scoreboard_entry_t rand_instr(logic [19:0] cur);
    scoreboard_entry_t e = '0;
    int k = $urandom % 10;
    e.valid = 1'b1;
    e.pc    = 64'h8000_0000 + 64'(($urandom % 1024) * 4);
    case (k)
      0, 1: begin e.op = OP_JALR; e.rs1 = 5'd10 + 5'($urandom % 3); e.rd = 5'd1; end
      2:    begin e.op = OP_JALR; e.rs1 = (($urandom % 2) != 0) ? 5'd1 : 5'd5; end
      3:    begin e.op = OP_ADD; e.rd = 5'd7; e.result = {32'h0, 20'($urandom % 4), 12'h0}; end
      4, 5: begin e.op = OP_ZICFI_LP; e.result = {32'h0, cur, 12'h0}; end
      6:    begin e.op = OP_ZICFI_LP; e.result = {32'h0, 20'($urandom % 4), 12'h0}; end
      7:    begin e.op = OP_ZICFI_LP; e.result = {32'h0, cur, 12'h0}; e.pc[1] = 1'b1; end
      default: begin e.op = OP_ADD; e.rd = 5'd10; e.result = 64'($urandom); end
    endcase
    return e;
  endfunction

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    lpe = 1'b1; elp_q = 1'b0; m_elp = 1'b0; m_lpl = '0;
    ci[0] = '0; ci[1] = '0;
    repeat (2) @(posedge clk);
    rst_n = 1'b1;

    for (int cyc = 0; cyc < 4000; cyc++) begin
      logic stop;
      int n;
      @(negedge clk);
      lpe = ($urandom % 16) != 0;
      n = $urandom % 3;
      ci[0] = (n >= 1) ? rand_instr(m_lpl) : '0;
      ci[1] = (n >= 2) ? rand_instr(m_lpl) : '0;
      // bias: make the corner cases happen
      if (($urandom % 6) == 0) begin
        ci[0] = rand_instr(m_lpl); ci[0].op = OP_JALR; ci[0].rs1 = 5'd11; ci[0].rd = 5'd1;
        ci[1] = rand_instr(m_lpl); ci[1].op = OP_ZICFI_LP; ci[1].pc[1:0] = 2'b00; ci[1].rd = 5'd0;
        ci[1].result = {32'h0, m_lpl, 12'h0};
      end
      #1;
      check(lpl == m_lpl, $sformatf("label state dut=%h model=%h", lpl, m_lpl));
      // sequential reference
      stop = 1'b0;
      for (int p = 0; p < 2; p++) begin
        logic exp_fault;
        exp_fault = 1'b0;
        if (ci[p].valid && !stop) begin
          if (m_elp && !(ci[p].op == OP_ZICFI_LP && ci[p].pc[1:0] == 2'b00 &&
                         (ci[p].result[31:12] == 0 || ci[p].result[31:12] == m_lpl))) begin
            exp_fault = 1'b1;
            stop = 1'b1;
            n_faults++;
          end else begin
            if (p == 1 && ci[1].op == OP_ZICFI_LP && m_elp && ci[0].op == OP_JALR)
              n_same_cycle_jump_lpad++;
            m_elp = lpe && ci[p].op == OP_JALR && !(ci[p].rs1 inside {5'd1, 5'd5, 5'd7});
            if (ci[p].rd == 5'd7 && ci[p].op != OP_ZICFI_LP) m_lpl = ci[p].result[31:12];
          end
        end
        check(fault[p] == exp_fault, $sformatf("fault port %0d cycle %0d dut=%0d exp=%0d melp=%0d elpq=%0d op=%s", p, cyc, fault[p], exp_fault, m_elp, elp_q, ci[p].op.name()));
        if (exp_fault)
          check(co[p].ex.valid && co[p].ex.cause == 64'd18 && co[p].ex.tval == 64'd2,
                "software-check record");
      end
      if (stop) m_elp = 1'b0;          // trap: ELP saved and cleared
      else      check(elp_o == m_elp, "elp after group");
      @(posedge clk);
      elp_q <= stop ? 1'b0 : elp_o;    // CSR file register
    end

    // jump, then an x7 write where the lpad should be: fault, the write is
    // dropped and the instruction on port 1 too
    @(negedge clk);
    ci[0] = '0; ci[0].valid = 1; ci[0].op = OP_JALR; ci[0].rs1 = 5'd12; ci[0].pc = 64'h100;
    ci[1] = '0;
    #1;
    @(posedge clk); elp_q <= elp_o;
    @(negedge clk);
    ci[0] = '0; ci[0].valid = 1; ci[0].op = OP_ADD; ci[0].rd = 5'd7; ci[0].result = 64'h0005_5000;
    ci[1] = '0; ci[1].valid = 1; ci[1].op = OP_ADD; ci[1].rd = 5'd7; ci[1].result = 64'h0006_6000;
    #1;
    check(fault[0] && !fault[1], "x7 write at a landing site faults, port 1 dropped");
    @(posedge clk); elp_q <= 1'b0;
    @(negedge clk);
    ci[0] = '0; ci[0].valid = 1; ci[0].op = OP_ADD; ci[0].rd = 5'd7; ci[0].result = 64'h000f_f000;
    ci[1] = '0;
    #1;
    check(lpl != 20'h00055 && lpl != 20'h00066, "faulted x7 writes left the label alone");
    @(posedge clk); elp_q <= elp_o;
    @(negedge clk);
    ci[0] = '0; ci[0].valid = 1; ci[0].op = OP_JALR; ci[0].rs1 = 5'd12; ci[0].pc = 64'h100;
    ci[1] = '0; ci[1].valid = 1; ci[1].op = OP_ZICFI_LP; ci[1].result = 64'h000f_f000; ci[1].pc = 64'h200;
    #1;
    check(lpl == 20'h000ff, "label from x7 write, port 0 of previous group");
    check(!fault[0] && !fault[1] && elp_o == 1'b0, "jump and matching lpad in one cycle");
    @(posedge clk); elp_q <= elp_o;
    @(negedge clk);
    ci[0] = '0; ci[0].valid = 1; ci[0].op = OP_ADD; ci[0].rd = 5'd7; ci[0].result = 64'h0001_2000;
    ci[1] = '0; ci[1].valid = 1; ci[1].op = OP_JALR; ci[1].rs1 = 5'd13;
    #1;
    @(posedge clk); elp_q <= elp_o;
    @(negedge clk);
    ci[0] = '0; ci[0].valid = 1; ci[0].op = OP_ZICFI_LP; ci[0].result = 64'h0001_2000;
    ci[1] = '0;
    #1;
    check(!fault[0] && elp_q, "x7 write and jump in one cycle, lpad with the new label next");

    $display("same-cycle jump+lpad: %0d, faults: %0d", n_same_cycle_jump_lpad, n_faults);
    check(n_same_cycle_jump_lpad > 0, "jump+lpad in one cycle happened");
    check(n_faults > 0, "faults happened");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
