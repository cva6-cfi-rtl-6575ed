// cfi_enable: per-privilege enable state of the two CFI extensions.
//
// Zicfiss (shadow stack) and Zicfilp (landing pads) are switched on per
// privilege level by fields of the environment configuration registers.
// This block, placed in the front end, reduces those fields to two bits for
// the mode the hart is in now, which are then passed down to decode (which
// turns disabled CFI instructions into no-ops) and execute/commit.
//
//   mode       shadow stack enabled            landing pads enabled
//   M          never                           mseccfg.MLPE
//   HS/S       menvcfg.SSE                     menvcfg.LPE
//   VS         menvcfg.SSE & henvcfg.SSE       henvcfg.LPE
//   U          menvcfg.SSE & senvcfg.SSE       senvcfg.LPE
//   VU         menvcfg.SSE & henvcfg.SSE       senvcfg.LPE
//              & senvcfg.SSE
//
// Purely combinational. The paper says the frontend computes the
// shadow-stack enabled state across privilege levels and forwards it to
// decode and execute; the table itself is taken from the ratified RISC-V
// CFI specification. senvcfg stands for whichever of senvcfg/vsenvcfg is
// active, as in a core that swaps them on virtualisation.
module cfi_enable
  import cfi_pkg::*;
(
  input  priv_lvl_t priv_lvl_i,
  input  logic      v_i,
  input  logic      menvcfg_sse_i,
  input  logic      henvcfg_sse_i,
  input  logic      senvcfg_sse_i,
  input  logic      mseccfg_mlpe_i,
  input  logic      menvcfg_lpe_i,
  input  logic      henvcfg_lpe_i,
  input  logic      senvcfg_lpe_i,
  output logic      ss_en_o,
  output logic      lp_en_o
);

  always_comb begin
    ss_en_o = 1'b0;
    lp_en_o = 1'b0;
    unique case (priv_lvl_i)
      PRIV_LVL_M: begin
        ss_en_o = 1'b0;
        lp_en_o = mseccfg_mlpe_i;
      end
      PRIV_LVL_S: begin
        ss_en_o = v_i ? (menvcfg_sse_i && henvcfg_sse_i) : menvcfg_sse_i;
        lp_en_o = v_i ? henvcfg_lpe_i : menvcfg_lpe_i;
      end
      PRIV_LVL_U: begin
        ss_en_o = menvcfg_sse_i && senvcfg_sse_i && (!v_i || henvcfg_sse_i);
        lp_en_o = senvcfg_lpe_i;
      end
      default: ;
    endcase
  end

endmodule
