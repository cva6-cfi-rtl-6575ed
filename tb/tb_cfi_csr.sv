// tb_cfi_csr: self-checking testbench of the CFI CSR state.
//
// Checks: ssp read/write and its retire-time movement (one or two pushes
// or pops per cycle, mixed, and a CSR write winning over a retire); the
// SSE/LPE/MLPE fields and the read-only-zero rule for henvcfg/senvcfg.SSE;
// ELP following the landing pad units; ELP saved to MPELP / SPELP /
// vsstatus.SPELP on a trap into M / S / VS and cleared; mret/sret restoring
// it (only if landing pads are on in the mode returned to) and clearing the
// saved copy; the same through a resumable NMI (mnstatus.MNPELP / mnret)
// and debug mode (dcsr.pelp / dret); the hit flag for other addresses.
module tb_cfi_csr;
  import cfi_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic [11:0] addr;
  logic nmi, mnret, dbg, dret;
  logic we, hit, trap, trap_v, mret, sret, sret_v, ret_lpe, elp_next, elp;
  logic [XLEN-1:0] wdata, rdata, ssp;
  priv_lvl_t trap_priv;
  logic [1:0] push, pop;
  logic m_sse, h_sse, s_sse, mlpe, m_lpe, h_lpe, s_lpe;

  cfi_csr #(.NrCommitPorts(2)) dut (
    .clk_i(clk), .rst_ni(rst_n), .csr_addr_i(addr), .csr_we_i(we), .csr_wdata_i(wdata),
    .csr_rdata_o(rdata), .csr_hit_o(hit), .trap_i(trap), .trap_priv_i(trap_priv),
    .trap_v_i(trap_v), .mret_i(mret), .sret_i(sret), .sret_v_i(sret_v), .ret_lpe_i(ret_lpe),
    .nmi_i(nmi), .mnret_i(mnret), .debug_entry_i(dbg), .dret_i(dret),
    .elp_next_i(elp_next), .elp_o(elp), .ssp_push_i(push), .ssp_pop_i(pop), .ssp_o(ssp),
    .menvcfg_sse_o(m_sse), .henvcfg_sse_o(h_sse), .senvcfg_sse_o(s_sse),
    .mseccfg_mlpe_o(mlpe), .menvcfg_lpe_o(m_lpe), .henvcfg_lpe_o(h_lpe), .senvcfg_lpe_o(s_lpe));

  int checks = 0, failures = 0;

  task automatic check(input logic cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      $display("FAIL: %s (t=%0t)", what, $time);
    end
  endtask

  task automatic quiet();
    we = 0; trap = 0; nmi = 0; mnret = 0; dbg = 0; dret = 0; mret = 0; sret = 0; sret_v = 0; trap_v = 0; push = 0; pop = 0;
  endtask

  task automatic csr_write(input logic [11:0] a, input logic [XLEN-1:0] d);
    @(negedge clk); quiet(); addr = a; wdata = d; we = 1;
    @(negedge clk); we = 0;
  endtask

  function automatic logic [XLEN-1:0] bit_at(int b);
    return XLEN'(1) << b;
  endfunction

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [XLEN-1:0] model_ssp;
    quiet(); addr = '0; wdata = '0; trap_priv = PRIV_LVL_M; ret_lpe = 1; elp_next = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;

    // ---- ssp
    csr_write(CSR_SSP, 64'h0000_0000_8000_1000);
    addr = CSR_SSP; #1;
    check(hit && rdata == 64'h8000_1000 && ssp == 64'h8000_1000, "ssp write/read");
    model_ssp = 64'h8000_1000;
    for (int i = 0; i < 200; i++) begin
      @(negedge clk);
      push = 2'($urandom); pop = 2'($urandom);
      model_ssp = model_ssp + 64'(8 * ($countones(pop) - $countones(push)));
      @(negedge clk); quiet();
      check(ssp == model_ssp, "ssp after retire update");
    end
    @(negedge clk);
    push = 2'b11; addr = CSR_SSP; wdata = 64'h1234_5670; we = 1;
    @(negedge clk); quiet();
    check(ssp == 64'h1234_5670, "CSR write wins over retire update");

    // ---- enable fields
    csr_write(CSR_HENVCFG, bit_at(ENVCFG_SSE) | bit_at(ENVCFG_LPE));
    csr_write(CSR_SENVCFG, bit_at(ENVCFG_SSE) | bit_at(ENVCFG_LPE));
    check(!h_sse && !s_sse && h_lpe && s_lpe, "h/s SSE read-only zero while menvcfg.SSE=0");
    addr = CSR_SENVCFG; #1;
    check(rdata == bit_at(ENVCFG_LPE), "senvcfg read shows SSE zero");
    csr_write(CSR_MENVCFG, bit_at(ENVCFG_SSE));
    check(m_sse && h_sse && s_sse && !m_lpe, "SSE fields on");
    csr_write(CSR_MSECCFG, bit_at(MSECCFG_MLPE));
    check(mlpe, "mseccfg.MLPE");
    addr = 12'h123; #1;
    check(!hit && rdata == '0, "unrelated CSR not claimed");

    // ---- ELP follows the landing pad units
    @(negedge clk); quiet(); elp_next = 1;
    @(negedge clk);
    check(elp, "ELP follows LPU");

    // trap into M saves and clears
    trap = 1; trap_priv = PRIV_LVL_M;
    @(negedge clk); quiet(); elp_next = 0;
    check(!elp, "trap clears ELP");
    addr = CSR_MSTATUS; #1;
    check(rdata[STATUS_MPELP] && !rdata[STATUS_SPELP], "MPELP saved");
    mret = 1; ret_lpe = 1;
    @(negedge clk); quiet(); elp_next = elp;
    check(elp, "mret restores ELP");
    addr = CSR_MSTATUS; #1;
    check(!rdata[STATUS_MPELP], "mret clears MPELP");

    // trap into S, sret with landing pads off in the target mode
    elp_next = 1; trap = 1; trap_priv = PRIV_LVL_S; trap_v = 0;
    @(negedge clk); quiet(); elp_next = 0;
    addr = CSR_SSTATUS; #1;
    check(rdata[STATUS_SPELP] && !elp, "SPELP saved");
    sret = 1; ret_lpe = 0;
    @(negedge clk); quiet(); elp_next = elp;
    check(!elp, "sret into a mode without landing pads leaves ELP clear");
    addr = CSR_SSTATUS; #1;
    check(!rdata[STATUS_SPELP], "sret clears SPELP");

    // trap into VS, sret from VS
    elp_next = 1; trap = 1; trap_priv = PRIV_LVL_S; trap_v = 1;
    @(negedge clk); quiet(); elp_next = 0;
    addr = CSR_VSSTATUS; #1;
    check(rdata[STATUS_SPELP], "vsstatus.SPELP saved");
    addr = CSR_SSTATUS; #1;
    check(!rdata[STATUS_SPELP], "sstatus.SPELP untouched by VS trap");
    sret = 1; sret_v = 1; ret_lpe = 1;
    @(negedge clk); quiet(); elp_next = elp;
    check(elp, "sret in VS restores ELP");

    // resumable NMI and debug mode
    elp_next = 1; nmi = 1;
    @(negedge clk); quiet(); elp_next = 0;
    addr = CSR_MNSTATUS; #1;
    check(rdata[MNSTATUS_MNPELP] && !elp, "NMI saves ELP in MNPELP");
    mnret = 1; ret_lpe = 1;
    @(negedge clk); quiet(); elp_next = elp;
    addr = CSR_MNSTATUS; #1;
    check(elp && !rdata[MNSTATUS_MNPELP], "mnret restores ELP");
    elp_next = 1; dbg = 1; trap = 1; trap_priv = PRIV_LVL_M;
    @(negedge clk); quiet(); elp_next = 0;
    addr = CSR_DCSR; #1;
    check(rdata[DCSR_PELP] && !elp, "debug entry saves ELP in dcsr.pelp");
    addr = CSR_MSTATUS; #1;
    check(!rdata[STATUS_MPELP], "debug entry wins over a same-cycle trap");
    dret = 1; ret_lpe = 1;
    @(negedge clk); quiet(); elp_next = elp;
    addr = CSR_DCSR; #1;
    check(elp && !rdata[DCSR_PELP], "dret restores ELP");
    csr_write(CSR_DCSR, 64'h1 << DCSR_PELP);
    addr = CSR_DCSR; #1;
    check(rdata == (64'h1 << DCSR_PELP), "dcsr.pelp writable");

    // status writes
    csr_write(CSR_MSTATUS, bit_at(STATUS_MPELP));
    addr = CSR_MSTATUS; #1;
    check(rdata == bit_at(STATUS_MPELP), "mstatus.MPELP written");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
