// cfi_compressed_decoder: expansion of the compressed Zicfiss instructions.
//
// Zicfiss defines two 16-bit forms, both in the compressed may-be-operation
// (c.mop) space:
//   c.sspush   x1  = 16'h6081 (c.mop.1)  ->  sspush   x1 = 32'hCE104073
//   c.sspopchk x5  = 16'h6281 (c.mop.5)  ->  sspopchk x5 = 32'hCDC2C073
// This block recognises them and hands the 32-bit form on, so the 32-bit
// decoder handles the rest, including the no-op behaviour when the shadow
// stack is disabled. Any other halfword is not claimed (is_cfi_o low) and is
// left to the core's own compressed decoder.
//
// Combinational. The paper says only that the compressed decoder was
// extended for the compressed counterparts; the encodings are those of the
// ratified specification.
module cfi_compressed_decoder (
  input  logic [15:0] instr_i,
  output logic        is_cfi_o,
  output logic [31:0] instr_o
);

  localparam logic [15:0] C_SSPUSH_X1   = 16'h6081;
  localparam logic [15:0] C_SSPOPCHK_X5 = 16'h6281;
  localparam logic [31:0] SSPUSH_X1     = 32'hCE104073;
  localparam logic [31:0] SSPOPCHK_X5   = 32'hCDC2C073;

  always_comb begin
    is_cfi_o = 1'b1;
    unique case (instr_i)
      C_SSPUSH_X1:   instr_o = SSPUSH_X1;
      C_SSPOPCHK_X5: instr_o = SSPOPCHK_X5;
      default: begin
        is_cfi_o = 1'b0;
        instr_o  = {16'h0, instr_i};
      end
    endcase
  end

endmodule
