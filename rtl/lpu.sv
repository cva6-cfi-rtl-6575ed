// lpu: Landing Pad Unit for one commit port (Zicfilp).
//
// Watches the instruction offered on one commit port: in order, not
// speculative, fully executed. Three things are tracked:
//   - the landing pad label (lpl): when the instruction writes x7, bits
//     31:12 of the written value become the current label;
//   - the expected-landing-pad state (elp): a retiring indirect jump
//     (jalr whose rs1 is not x1, x5 or x7) with landing pads enabled
//     (lpe_i) sets elp to "expected";
//   - the check: while elp is "expected", the retiring instruction must be
//     an lpad at a 4-byte aligned pc whose label is zero or equal to the
//     current label. It then retires without side effect and clears elp;
//     anything else gets a software-check exception (tval = landing pad
//     fault) attached to its commit record.
// sbe ("stop by exception") chains the ports: once a port in this cycle's
// commit group has an exception, later ports leave the state alone, since
// the commit stage will not retire them.
//
// Interface: lpe_i (landing pads enabled at the current privilege level),
// elp_i/lpl_i/sbe_i from the previous port (or the state registers for port
// 0), commit_instr_i from the scoreboard. elp_o/lpl_o/sbe_o go to the next
// port (elp_o of the last port to the CSR file), commit_instr_o to the commit
// logic. Purely combinational.
//
// Follows the paper: the port names, the x7/rd test, the jalr test on rs1 in
// {x1,x5,x7}, the pc[1:0] alignment test, the label taken from
// result[31:12] compared with the current label, the per-port chaining.
// Own choices: the meaning given to sbe, the zero-label wildcard and the
// exception codes, which follow the ratified Zicfilp specification.
module lpu
  import cfi_pkg::*;
(
  input  logic                lpe_i,
  input  logic                elp_i,
  input  logic                sbe_i,
  input  logic [LPL_BITS-1:0] lpl_i,
  input  scoreboard_entry_t   commit_instr_i,
  output logic                elp_o,
  output logic                sbe_o,
  output logic [LPL_BITS-1:0] lpl_o,
  output scoreboard_entry_t   commit_instr_o,
  output logic                lp_fault_o
);

  logic is_valid;      // retires unless it faults, and no earlier port stopped
  logic is_ind_jump;   // indirect jump that needs a landing pad
  logic is_lpad;       // aligned lpad
  logic lpl_mismatch;
  logic writes_x7;

  always_comb begin
    is_valid     = commit_instr_i.valid && !commit_instr_i.ex.valid && !sbe_i;
    is_ind_jump  = (commit_instr_i.op == OP_JALR) &&
                   !(commit_instr_i.rs1 inside {5'd1, 5'd5, 5'd7});
    is_lpad      = (commit_instr_i.op == OP_ZICFI_LP) && (commit_instr_i.pc[1:0] == 2'b00);
    lpl_mismatch = (commit_instr_i.result[31:12] != '0) &&
                   (commit_instr_i.result[31:12] != lpl_i);
    writes_x7    = (commit_instr_i.rd == 5'd7) && (commit_instr_i.op != OP_ZICFI_LP);

    lp_fault_o = is_valid && elp_i && !(is_lpad && !lpl_mismatch);

    // expected-landing-pad state
    elp_o = elp_i;
    if (is_valid && !lp_fault_o) begin
      if (lpe_i && is_ind_jump) elp_o = 1'b1;
      else                      elp_o = 1'b0;
    end

    // label
    lpl_o = lpl_i;
    if (is_valid && !lp_fault_o && writes_x7) lpl_o = commit_instr_i.result[31:12];

    // stop the rest of the commit group
    sbe_o = sbe_i || lp_fault_o || (commit_instr_i.valid && commit_instr_i.ex.valid);

    commit_instr_o = commit_instr_i;
    if (lp_fault_o)
      commit_instr_o.ex = '{cause: SW_CHECK_EX, tval: TVAL_LP_FAULT, valid: 1'b1};
  end

endmodule
