// lpu_chain: one landing pad unit per commit port, chained in program order.
//
// The commit stage can retire several instructions per cycle. Port k's LPU
// sees the label, expected-landing-pad state and stop flag left by port
// k-1, so an indirect jump and its lpad retiring in the same cycle, or an x7
// update followed by an lpad in the same cycle, are handled as if they had
// retired one after the other.
//
// State between cycles: the current landing pad label (a copy of x7[31:12]
// as last retired) is held here in lpl_q. The expected-landing-pad bit is
// architectural state kept in the CSR file: it enters as elp_i and the last
// port's value leaves as elp_o, to be stored there. The stop flag starts
// clear in every cycle.
//
// Interface: lpe_i (landing pads enabled), elp_i/elp_o (CSR), per-port
// commit records in and out (out with a software-check exception attached
// where the check failed), lp_fault_o per port, lpl_o (label for debug).
// Timing: combinational from commit records to outputs; lpl_q updates on
// the clock edge.
//
// From the paper: one LPU per commit port, two ports, each propagating
// label updates and lpad information to the next. Own choices: holding the
// label here (the paper does not say where it is kept), reset label zero.
module lpu_chain
  import cfi_pkg::*;
#(
  parameter int unsigned NrCommitPorts = NR_COMMIT
) (
  input  logic                clk_i,
  input  logic                rst_ni,
  input  logic                lpe_i,
  input  logic                elp_i,
  output logic                elp_o,
  input  scoreboard_entry_t   commit_instr_i [NrCommitPorts],
  output scoreboard_entry_t   commit_instr_o [NrCommitPorts],
  output logic                lp_fault_o     [NrCommitPorts],
  output logic [LPL_BITS-1:0] lpl_o
);

  logic                elp_c [NrCommitPorts+1];
  logic                sbe_c [NrCommitPorts+1];
  logic [LPL_BITS-1:0] lpl_c [NrCommitPorts+1];
  logic [LPL_BITS-1:0] lpl_q;

  assign elp_c[0] = elp_i;
  assign sbe_c[0] = 1'b0;
  assign lpl_c[0] = lpl_q;

  for (genvar i = 0; i < NrCommitPorts; i++) begin : g_lpu
    lpu u_lpu (
      .lpe_i          (lpe_i),
      .elp_i          (elp_c[i]),
      .sbe_i          (sbe_c[i]),
      .lpl_i          (lpl_c[i]),
      .commit_instr_i (commit_instr_i[i]),
      .elp_o          (elp_c[i+1]),
      .sbe_o          (sbe_c[i+1]),
      .lpl_o          (lpl_c[i+1]),
      .commit_instr_o (commit_instr_o[i]),
      .lp_fault_o     (lp_fault_o[i])
    );
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) lpl_q <= '0;
    else         lpl_q <= lpl_c[NrCommitPorts];
  end

  assign elp_o = elp_c[NrCommitPorts];
  assign lpl_o = lpl_q;

endmodule
