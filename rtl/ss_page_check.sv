// ss_page_check: shadow-stack page-type check added to the MMU.
//
// A shadow stack page is marked in its leaf page-table entry by the
// otherwise reserved permission combination R=0, W=1, X=0. With address
// translation active, a Zicfiss memory access (sspush, sspopchk,
// ssamoswap) must hit a shadow stack page and every other data access must
// hit an ordinary page; either violation gives a store access fault.
//
// Interface: the translated access (valid, Zicfiss flag, translation on)
// and the R/W/X bits of the leaf PTE from the TLB or page-table walker;
// fault_o / ex_o (store access fault with the virtual address as tval).
// Combinational, evaluated in the cycle the TLB answers.
//
// From the paper: the two-way policy and the store access fault for any
// violation. Note the ratified Zicfiss specification lets ordinary loads
// read shadow stack pages; this block follows the paper, which forbids
// them too. The PTE encoding is the specification's.
module ss_page_check
  import cfi_pkg::*;
(
  input  logic            valid_i,
  input  logic            translation_on_i,
  input  logic            is_zicfiss_i,
  input  logic            pte_r_i,
  input  logic            pte_w_i,
  input  logic            pte_x_i,
  input  logic [XLEN-1:0] vaddr_i,
  output logic            is_ss_page_o,
  output logic            fault_o,
  output exception_t      ex_o
);

  always_comb begin
    is_ss_page_o = !pte_r_i && pte_w_i && !pte_x_i;
    fault_o      = valid_i && translation_on_i && (is_zicfiss_i != is_ss_page_o);
    ex_o         = fault_o ? '{cause: ST_ACCESS_FAULT, tval: vaddr_i, valid: 1'b1} : NO_EX;
  end

endmodule
