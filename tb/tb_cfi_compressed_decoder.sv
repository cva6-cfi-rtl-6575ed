// tb_cfi_compressed_decoder: self-checking testbench of the compressed
// Zicfiss expansion. Every 16-bit value is applied: exactly the two
// c.mop encodings of c.sspush x1 and c.sspopchk x5 are claimed, and they
// expand to the 32-bit sspush x1 and sspopchk x5 (encodings assembled here
// from their fields).
module tb_cfi_compressed_decoder;
  logic [15:0] ci;
  logic        is_cfi;
  logic [31:0] co;

  cfi_compressed_decoder dut (.instr_i(ci), .is_cfi_o(is_cfi), .instr_o(co));

  int checks = 0, failures = 0;

  // {funct7, rs2, rs1, funct3, rd, opcode}
  localparam logic [31:0] SSPUSH_X1   = {7'b1100111, 5'd1, 5'd0, 3'b100, 5'd0, 7'b1110011};
  localparam logic [31:0] SSPOPCHK_X5 = {12'b110011011100, 5'd5, 3'b100, 5'd0, 7'b1110011};
  // c.mop.n: 011 0 0 n[3:1] 1 000 0 1 with rs1/rd' field = n
  localparam logic [15:0] C_MOP1      = {3'b011, 1'b0, 5'd1, 5'b00000, 2'b01};
  localparam logic [15:0] C_MOP5      = {3'b011, 1'b0, 5'd5, 5'b00000, 2'b01};

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < 65536; i++) begin
      logic exp_cfi;
      ci = 16'(i);
      #1;
      exp_cfi = (ci == C_MOP1) || (ci == C_MOP5);
      checks++;
      if (is_cfi !== exp_cfi) begin
        failures++;
        $display("FAIL: %h claimed=%0d", ci, is_cfi);
      end
      if (exp_cfi) begin
        checks++;
        if (co !== ((ci == C_MOP1) ? SSPUSH_X1 : SSPOPCHK_X5)) begin
          failures++;
          $display("FAIL: %h expanded to %h", ci, co);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
