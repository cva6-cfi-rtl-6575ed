// tb_ss_page_check: exhaustive self-checking testbench of the MMU
// shadow-stack page check: every combination of valid, translation on,
// Zicfiss access and PTE R/W/X, with a random virtual address as tval.
module tb_ss_page_check;
  import cfi_pkg::*;

  logic valid, xlat, is_ss, r, w, x, is_ss_page, fault;
  logic [XLEN-1:0] va;
  exception_t ex;

  ss_page_check dut (.valid_i(valid), .translation_on_i(xlat), .is_zicfiss_i(is_ss),
                     .pte_r_i(r), .pte_w_i(w), .pte_x_i(x), .vaddr_i(va),
                     .is_ss_page_o(is_ss_page), .fault_o(fault), .ex_o(ex));

  int checks = 0, failures = 0;

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int rep = 0; rep < 4; rep++)
      for (int i = 0; i < 64; i++) begin
        logic ssp, ef;
        {valid, xlat, is_ss, r, w, x} = 6'(i);
        va = {$urandom, $urandom};
        #1;
        ssp = ({r, w, x} == 3'b010);
        ef  = valid && xlat && ((is_ss && !ssp) || (!is_ss && ssp));
        checks += 3;
        if (is_ss_page !== ssp) begin failures++; $display("FAIL: page type %b", i[5:0]); end
        if (fault !== ef)       begin failures++; $display("FAIL: fault %b", i[5:0]); end
        if (ex.valid !== ef || (ef && (ex.cause != 64'd7 || ex.tval != va))) begin
          failures++; $display("FAIL: exception record %b", i[5:0]);
        end
      end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
