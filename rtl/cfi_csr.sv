// cfi_csr: the control and status state added for Zicfiss and Zicfilp.
//
// Holds
//   - ssp, the shadow stack pointer (CSR 0x011). It is read and written as a
//     CSR, and moves by XLEN/8 bytes when an sspush (down) or sspopchk (up)
//     retires; several may retire in one cycle, one per commit port;
//   - the SSE and LPE enable fields of menvcfg, senvcfg and henvcfg and the
//     MLPE field of mseccfg;
//   - ELP, the expected-landing-pad bit. Every cycle it takes the value the
//     landing pad units leave after the retiring instructions. A trap saves
//     it into the PELP field of the status register of the mode that takes
//     the trap (mstatus.MPELP, mstatus/sstatus.SPELP, vsstatus.SPELP) and
//     clears it; mret/sret restore it from there (if landing pads are
//     enabled in the mode returned to) and clear the saved copy. A
//     resumable NMI saves it in mnstatus.MNPELP (restored by mnret), entry
//     into debug mode in dcsr.pelp (restored by dret).
//
// Interface: a CSR access port (address, write enable, write data, read data
// and a hit flag telling the host CSR file the address holds CFI fields;
// for mstatus/sstatus/vsstatus only the PELP bits are read and written
// here, the host merges the rest); trap and return events; retire pulses
// for the ssp update; the enable fields out to the enable logic.
// Timing: reads combinational, all updates on the clock edge. A CSR write
// to ssp wins over a same-cycle retire update; a trap or return wins over
// the landing pad units' ELP value. Priority among same-cycle events:
// debug entry, NMI, trap, then the returns.
//
// From the paper: the CSR file is extended with the shadow stack pointer,
// environment-configuration enable fields for machine, supervisor and
// hypervisor modes, and the landing pad state in the status registers. The
// addresses, bit positions, read-only-zero rules and save/restore rules are
// the ratified specification's; the paper's block diagram marks the
// status registers (m, s, vs, mn) and the debug CSRs as modified.
module cfi_csr
  import cfi_pkg::*;
#(
  parameter int unsigned NrCommitPorts = NR_COMMIT
) (
  input  logic                     clk_i,
  input  logic                     rst_ni,
  // CSR access port
  input  logic [11:0]              csr_addr_i,
  input  logic                     csr_we_i,
  input  logic [XLEN-1:0]          csr_wdata_i,
  output logic [XLEN-1:0]          csr_rdata_o,
  output logic                     csr_hit_o,
  // traps and returns
  input  logic                     trap_i,
  input  priv_lvl_t                trap_priv_i,   // mode taking the trap
  input  logic                     trap_v_i,      // trap taken into VS
  input  logic                     mret_i,
  input  logic                     sret_i,
  input  logic                     sret_v_i,      // sret executed in VS
  input  logic                     ret_lpe_i,     // landing pads on in target mode
  input  logic                     nmi_i,         // resumable NMI taken
  input  logic                     mnret_i,
  input  logic                     debug_entry_i, // debug mode entered
  input  logic                     dret_i,
  // landing pad units
  input  logic                     elp_next_i,
  output logic                     elp_o,
  // shadow stack pointer updates at retire
  input  logic [NrCommitPorts-1:0] ssp_push_i,
  input  logic [NrCommitPorts-1:0] ssp_pop_i,
  output logic [XLEN-1:0]          ssp_o,
  // enable fields
  output logic                     menvcfg_sse_o,
  output logic                     henvcfg_sse_o,
  output logic                     senvcfg_sse_o,
  output logic                     mseccfg_mlpe_o,
  output logic                     menvcfg_lpe_o,
  output logic                     henvcfg_lpe_o,
  output logic                     senvcfg_lpe_o
);

  logic [XLEN-1:0] ssp_q;
  logic            elp_q;
  logic            m_sse_q, h_sse_q, s_sse_q, mlpe_q, m_lpe_q, h_lpe_q, s_lpe_q;
  logic            mpelp_q, spelp_q, vsspelp_q, mnpelp_q, dpelp_q;

  // fields that read as zero while a higher level has the feature off
  assign menvcfg_sse_o  = m_sse_q;
  assign henvcfg_sse_o  = h_sse_q && m_sse_q;
  assign senvcfg_sse_o  = s_sse_q && m_sse_q;
  assign mseccfg_mlpe_o = mlpe_q;
  assign menvcfg_lpe_o  = m_lpe_q;
  assign henvcfg_lpe_o  = h_lpe_q;
  assign senvcfg_lpe_o  = s_lpe_q;
  assign elp_o          = elp_q;
  assign ssp_o          = ssp_q;

  // ------------------------------------------------------------- reads
  always_comb begin
    csr_rdata_o = '0;
    csr_hit_o   = 1'b1;
    unique case (csr_addr_i)
      CSR_SSP:      csr_rdata_o = ssp_q;
      CSR_MENVCFG: begin
        csr_rdata_o[ENVCFG_SSE] = menvcfg_sse_o;
        csr_rdata_o[ENVCFG_LPE] = m_lpe_q;
      end
      CSR_HENVCFG: begin
        csr_rdata_o[ENVCFG_SSE] = henvcfg_sse_o;
        csr_rdata_o[ENVCFG_LPE] = h_lpe_q;
      end
      CSR_SENVCFG: begin
        csr_rdata_o[ENVCFG_SSE] = senvcfg_sse_o;
        csr_rdata_o[ENVCFG_LPE] = s_lpe_q;
      end
      CSR_MSECCFG:  csr_rdata_o[MSECCFG_MLPE] = mlpe_q;
      CSR_MSTATUS: begin
        csr_rdata_o[STATUS_MPELP] = mpelp_q;
        csr_rdata_o[STATUS_SPELP] = spelp_q;
      end
      CSR_SSTATUS:  csr_rdata_o[STATUS_SPELP] = spelp_q;
      CSR_VSSTATUS: csr_rdata_o[STATUS_SPELP] = vsspelp_q;
      CSR_MNSTATUS: csr_rdata_o[MNSTATUS_MNPELP] = mnpelp_q;
      CSR_DCSR:     csr_rdata_o[DCSR_PELP] = dpelp_q;
      default:      csr_hit_o = 1'b0;
    endcase
  end

  // --------------------------------------------------- ssp retire update
  localparam int unsigned StepW = $clog2(NrCommitPorts+1) + 1;
  logic signed [StepW-1:0] ssp_steps;
  logic        [XLEN-1:0]  ssp_delta;
  always_comb begin
    ssp_steps = '0;
    for (int i = 0; i < NrCommitPorts; i++) begin
      if (ssp_pop_i[i])  ssp_steps = ssp_steps + 1'b1;
      if (ssp_push_i[i]) ssp_steps = ssp_steps - 1'b1;
    end
    // sign-extend, times XLEN/8 bytes
    ssp_delta = {{(XLEN-StepW){ssp_steps[StepW-1]}}, ssp_steps} << $clog2(XLEN/8);
  end

  // ------------------------------------------------------------- writes
  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      ssp_q     <= '0;
      elp_q     <= 1'b0;
      m_sse_q   <= 1'b0;
      h_sse_q   <= 1'b0;
      s_sse_q   <= 1'b0;
      mlpe_q    <= 1'b0;
      m_lpe_q   <= 1'b0;
      h_lpe_q   <= 1'b0;
      s_lpe_q   <= 1'b0;
      mpelp_q   <= 1'b0;
      spelp_q   <= 1'b0;
      vsspelp_q <= 1'b0;
      mnpelp_q  <= 1'b0;
      dpelp_q   <= 1'b0;
    end else begin
      ssp_q <= ssp_q + ssp_delta;
      elp_q <= elp_next_i;

      if (csr_we_i) begin
        unique case (csr_addr_i)
          CSR_SSP:     ssp_q <= csr_wdata_i;
          CSR_MENVCFG: begin
            m_sse_q <= csr_wdata_i[ENVCFG_SSE];
            m_lpe_q <= csr_wdata_i[ENVCFG_LPE];
          end
          CSR_HENVCFG: begin
            h_sse_q <= csr_wdata_i[ENVCFG_SSE];
            h_lpe_q <= csr_wdata_i[ENVCFG_LPE];
          end
          CSR_SENVCFG: begin
            s_sse_q <= csr_wdata_i[ENVCFG_SSE];
            s_lpe_q <= csr_wdata_i[ENVCFG_LPE];
          end
          CSR_MSECCFG:  mlpe_q <= csr_wdata_i[MSECCFG_MLPE];
          CSR_MSTATUS: begin
            mpelp_q <= csr_wdata_i[STATUS_MPELP];
            spelp_q <= csr_wdata_i[STATUS_SPELP];
          end
          CSR_SSTATUS:  spelp_q   <= csr_wdata_i[STATUS_SPELP];
          CSR_VSSTATUS: vsspelp_q <= csr_wdata_i[STATUS_SPELP];
          CSR_MNSTATUS: mnpelp_q  <= csr_wdata_i[MNSTATUS_MNPELP];
          CSR_DCSR:     dpelp_q   <= csr_wdata_i[DCSR_PELP];
          default: ;
        endcase
      end

      if (debug_entry_i) begin
        elp_q   <= 1'b0;
        dpelp_q <= elp_next_i;
      end else if (nmi_i) begin
        elp_q    <= 1'b0;
        mnpelp_q <= elp_next_i;
      end else if (trap_i) begin
        elp_q <= 1'b0;
        if (trap_priv_i == PRIV_LVL_M) mpelp_q   <= elp_next_i;
        else if (trap_v_i)             vsspelp_q <= elp_next_i;
        else                           spelp_q   <= elp_next_i;
      end else if (dret_i) begin
        elp_q   <= dpelp_q && ret_lpe_i;
        dpelp_q <= 1'b0;
      end else if (mnret_i) begin
        elp_q    <= mnpelp_q && ret_lpe_i;
        mnpelp_q <= 1'b0;
      end else if (mret_i) begin
        elp_q   <= mpelp_q && ret_lpe_i;
        mpelp_q <= 1'b0;
      end else if (sret_i) begin
        if (sret_v_i) begin
          elp_q     <= vsspelp_q && ret_lpe_i;
          vsspelp_q <= 1'b0;
        end else begin
          elp_q   <= spelp_q && ret_lpe_i;
          spelp_q <= 1'b0;
        end
      end
    end
  end

endmodule
