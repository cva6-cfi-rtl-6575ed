// cva6_cfi: the control-flow-integrity extension logic of a CVA6-class
// core, wired as it sits in the pipeline.
//
// Forward edges (indirect jumps) are protected by landing pads (Zicfilp):
// an indirect jump must land on an lpad instruction whose label matches
// x7[31:12]. Backward edges (returns) are protected by a shadow stack
// (Zicfiss): functions push their return address with sspush and check it
// with sspopchk against a second, write-protected stack.
//
// Blocks and where they sit:
//   front end   cfi_enable             SS / LP enable for the current mode
//   decode      cfi_compressed_decoder c.sspush / c.sspopchk expansion
//               cfi_decoder            CFI instructions -> tagged operations
//   execute     ssu                    filtering and sspopchk comparison,
//                                      between issue and the LSU
//   MMU         ss_page_check          shadow-stack page policy
//   commit      lpu_chain              one landing pad unit per commit port
//   CSR file    cfi_csr                ssp, enable fields, ELP and its
//                                      save/restore
// The rest of the core (fetch, issue, scoreboard, functional units, LSU,
// TLBs, commit logic, caches) is not part of this block; every signal the
// CFI logic exchanges with it is a port here.
//
// Sequencing of the shadow stack pointer: ssp moves when sspush/sspopchk
// retires. So that the address an operation uses (ssp_o, ssp_o-8 for
// sspush) is never stale, ss_issue_stall_o asks the issue stage to hold a
// shadow-stack push or pop while an older one is issued but not yet retired
// or flushed. This interlock is this design's own choice; the paper does not
// say how the pointer is kept consistent.
//
// Timing: decode, enable, page check and commit paths are combinational;
// state changes on the rising clock edge; active-low asynchronous reset.
module cva6_cfi
  import cfi_pkg::*;
#(
  parameter int unsigned NrCommitPorts = NR_COMMIT
) (
  input  logic                     clk_i,
  input  logic                     rst_ni,
  // hart state
  input  priv_lvl_t                priv_lvl_i,
  input  logic                     v_i,
  input  logic [3:0]               satp_mode_i,
  input  logic [3:0]               vsatp_mode_i,
  // CSR access port
  input  logic [11:0]              csr_addr_i,
  input  logic                     csr_we_i,
  input  logic [XLEN-1:0]          csr_wdata_i,
  output logic [XLEN-1:0]          csr_rdata_o,
  output logic                     csr_hit_o,
  // traps and returns
  input  logic                     trap_i,
  input  priv_lvl_t                trap_priv_i,
  input  logic                     trap_v_i,
  input  logic                     mret_i,
  input  logic                     sret_i,
  input  logic                     sret_v_i,
  input  logic                     ret_lpe_i,
  input  logic                     nmi_i,
  input  logic                     mnret_i,
  input  logic                     debug_entry_i,
  input  logic                     dret_i,
  input  logic                     flush_i,
  output logic                     ss_en_o,
  output logic                     lp_en_o,
  output logic                     elp_o,
  output logic [XLEN-1:0]          ssp_o,
  // decode
  input  logic [31:0]              instr_i,      // 16-bit forms in [15:0]
  output cfi_decoded_t             dec_o,
  // issue -> SSU -> LSU
  input  logic                     lsu_valid_i,
  input  fu_data_t                 fu_data_i,
  output logic                     lsu_ready_o,
  output logic                     ss_issue_stall_o,
  output logic                     lsu_valid_o,
  input  logic                     lsu_ready_i,
  input  logic                     store_valid_i,
  input  logic [TRANS_ID_BITS-1:0] store_trans_id_i,
  input  exception_t               store_ex_i,
  input  logic                     load_valid_i,
  input  logic [TRANS_ID_BITS-1:0] load_trans_id_i,
  input  logic [XLEN-1:0]          load_result_i,
  input  exception_t               load_ex_i,
  output logic                     ss_store_valid_o,
  output logic [TRANS_ID_BITS-1:0] ss_store_trans_id_o,
  output exception_t               ss_store_ex_o,
  output exception_t               ss_load_ex_o,
  // MMU
  input  logic                     mmu_valid_i,
  input  logic                     mmu_translation_on_i,
  input  logic                     mmu_is_zicfiss_i,
  input  logic                     pte_r_i,
  input  logic                     pte_w_i,
  input  logic                     pte_x_i,
  input  logic [XLEN-1:0]          mmu_vaddr_i,
  output exception_t               mmu_ss_ex_o,
  // commit
  input  scoreboard_entry_t        commit_instr_i [NrCommitPorts],
  input  logic [NrCommitPorts-1:0] commit_ack_i,
  output scoreboard_entry_t        commit_instr_o [NrCommitPorts],
  output logic                     lp_fault_o     [NrCommitPorts]
);

  // ----------------------------------------------------------- CSR file
  logic m_sse, h_sse, s_sse, mlpe, m_lpe, h_lpe, s_lpe;
  logic elp_q, elp_next;
  logic [NrCommitPorts-1:0] ssp_push, ssp_pop;

  cfi_csr #(.NrCommitPorts(NrCommitPorts)) u_csr (
    .clk_i, .rst_ni,
    .csr_addr_i, .csr_we_i, .csr_wdata_i, .csr_rdata_o, .csr_hit_o,
    .trap_i, .trap_priv_i, .trap_v_i, .mret_i, .sret_i, .sret_v_i, .ret_lpe_i,
    .nmi_i, .mnret_i, .debug_entry_i, .dret_i,
    .elp_next_i     (elp_next),
    .elp_o          (elp_q),
    .ssp_push_i     (ssp_push),
    .ssp_pop_i      (ssp_pop),
    .ssp_o,
    .menvcfg_sse_o  (m_sse),
    .henvcfg_sse_o  (h_sse),
    .senvcfg_sse_o  (s_sse),
    .mseccfg_mlpe_o (mlpe),
    .menvcfg_lpe_o  (m_lpe),
    .henvcfg_lpe_o  (h_lpe),
    .senvcfg_lpe_o  (s_lpe)
  );
  assign elp_o = elp_q;

  // ------------------------------------------------ front end: enables
  cfi_enable u_enable (
    .priv_lvl_i, .v_i,
    .menvcfg_sse_i (m_sse), .henvcfg_sse_i (h_sse), .senvcfg_sse_i (s_sse),
    .mseccfg_mlpe_i(mlpe),  .menvcfg_lpe_i (m_lpe), .henvcfg_lpe_i (h_lpe),
    .senvcfg_lpe_i (s_lpe),
    .ss_en_o, .lp_en_o
  );

  // ------------------------------------------------------------- decode
  logic        is_c_cfi;
  logic [31:0] instr_exp, instr_dec;

  cfi_compressed_decoder u_cdec (
    .instr_i  (instr_i[15:0]),
    .is_cfi_o (is_c_cfi),
    .instr_o  (instr_exp)
  );

  // a 16-bit instruction that is not a CFI one is not decoded here
  assign instr_dec = (instr_i[1:0] == 2'b11) ? instr_i :
                     (is_c_cfi ? instr_exp : 32'h0000_0000);

  cfi_decoder u_dec (
    .instr_i    (instr_dec),
    .priv_lvl_i,
    .ss_en_i    (ss_en_o),
    .lp_en_i    (lp_en_o),
    .dec_o
  );

  // ------------------------------------------------------------ execute
  logic ssu_valid;
  assign ssu_valid = lsu_valid_i && !ss_issue_stall_o;

  ssu u_ssu (
    .clk_i, .rst_ni,
    .priv_lvl_i, .satp_mode_i, .vsatp_mode_i, .v_i,
    .lsu_valid_i (ssu_valid),
    .fu_data_i,
    .lsu_ready_o (lsu_ready_o),
    .lsu_valid_o, .lsu_ready_i,
    .store_valid_i, .store_trans_id_i, .store_ex_i,
    .load_valid_i, .load_trans_id_i, .load_result_i, .load_ex_i,
    .ss_store_valid_o, .ss_store_trans_id_o, .ss_store_ex_o, .ss_load_ex_o,
    .sspchk_inflight_o ()
  );

  // push/pop interlock: count issued, not yet retired shadow stack ops
  logic       issue_ss, is_ss_push_pop;
  logic [2:0] ss_outstanding_q;
  logic [$clog2(NrCommitPorts+1)-1:0] ss_retired;

  assign is_ss_push_pop   = fu_data_i.operation inside {OP_SSPUSH, OP_SSPCHK};
  assign ss_issue_stall_o = is_ss_push_pop && (ss_outstanding_q != '0);
  assign issue_ss         = lsu_valid_i && !ss_issue_stall_o && lsu_ready_o && is_ss_push_pop;

  always_comb begin
    ss_retired = '0;
    for (int i = 0; i < NrCommitPorts; i++) begin
      ssp_push[i] = commit_ack_i[i] && !commit_instr_o[i].ex.valid &&
                    commit_instr_o[i].op == OP_SSPUSH;
      ssp_pop[i]  = commit_ack_i[i] && !commit_instr_o[i].ex.valid &&
                    commit_instr_o[i].op == OP_SSPCHK;
      if (commit_ack_i[i] && commit_instr_o[i].op inside {OP_SSPUSH, OP_SSPCHK})
        ss_retired = ss_retired + 1'b1;
    end
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni)      ss_outstanding_q <= '0;
    else if (flush_i) ss_outstanding_q <= '0;
    else              ss_outstanding_q <= ss_outstanding_q + 3'(issue_ss) - 3'(ss_retired);
  end

  // ---------------------------------------------------------------- MMU
  ss_page_check u_pgchk (
    .valid_i          (mmu_valid_i),
    .translation_on_i (mmu_translation_on_i),
    .is_zicfiss_i     (mmu_is_zicfiss_i),
    .pte_r_i, .pte_w_i, .pte_x_i,
    .vaddr_i          (mmu_vaddr_i),
    .is_ss_page_o     (),
    .fault_o          (),
    .ex_o             (mmu_ss_ex_o)
  );

  // ------------------------------------------------------------- commit
  lpu_chain #(.NrCommitPorts(NrCommitPorts)) u_lpu_chain (
    .clk_i, .rst_ni,
    .lpe_i          (lp_en_o),
    .elp_i          (elp_q),
    .elp_o          (elp_next),
    .commit_instr_i,
    .commit_instr_o,
    .lp_fault_o,
    .lpl_o          ()
  );

endmodule
