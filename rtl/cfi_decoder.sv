// cfi_decoder: decode-stage extension for the Zicfiss and Zicfilp
// instructions.
//
// Recognises the 32-bit CFI instructions and produces the operation record
// the rest of the pipeline uses. The shadow stack instructions become
// memory operations carrying their own tags, so later stages can tell them
// from ordinary loads and stores:
//   sspush  x1|x5    -> store, OP_SSPUSH   (data rs2 = x1|x5, address ssp-8)
//   sspopchk x1|x5   -> load,  OP_SSPCHK   (address ssp; rs2 = x1|x5 is the
//                                           link register value to compare)
//   ssrdp rd         -> CSR read of ssp into rd
//   ssamoswap.w/d    -> AMO, OP_SSAMOSWAP_W/D
//   lpad label       -> OP_ZICFI_LP, label in imm[31:12]
// When the shadow stack is disabled at the current privilege level,
// sspush/sspopchk are no-ops and ssrdp writes zero to rd (they sit in the
// may-be-operation space); ssamoswap is illegal below machine mode (in
// machine mode it is passed on, and the shadow stack unit faults it). With
// landing pads disabled, lpad is the plain no-op auipc x0. Instructions that
// are not CFI instructions are not claimed (valid_o.valid low).
//
// Combinational. The paper gives the mapping of sspush/sspopchk to
// stores/loads with special tags and the swap tags; the bit encodings and
// the disabled behaviour are the ratified specification's.
module cfi_decoder
  import cfi_pkg::*;
(
  input  logic [31:0] instr_i,
  input  priv_lvl_t   priv_lvl_i,
  input  logic        ss_en_i,
  input  logic        lp_en_i,
  output cfi_decoded_t dec_o
);

  localparam logic [6:0] OPC_SYSTEM = 7'b1110011;
  localparam logic [6:0] OPC_AMO    = 7'b0101111;
  localparam logic [6:0] OPC_AUIPC  = 7'b0010111;

  logic [6:0] opcode;
  logic [4:0] rd, rs1, rs2;
  logic [2:0] funct3;

  always_comb begin
    opcode = instr_i[6:0];
    rd     = instr_i[11:7];
    funct3 = instr_i[14:12];
    rs1    = instr_i[19:15];
    rs2    = instr_i[24:20];

    dec_o         = '0;
    dec_o.fu      = FU_NONE;
    dec_o.op      = OP_NOP;

    // sspush x1|x5: mop.rr.7 with rs1 = x0, rd = x0
    if (opcode == OPC_SYSTEM && funct3 == 3'b100 && instr_i[31:25] == 7'b1100111 &&
        rs1 == 5'd0 && rd == 5'd0 && (rs2 == 5'd1 || rs2 == 5'd5)) begin
      dec_o.valid = 1'b1;
      if (ss_en_i) begin
        dec_o.fu      = FU_STORE;
        dec_o.op      = OP_SSPUSH;
        dec_o.rs2     = rs2;
        dec_o.imm     = -XLEN'(XLEN/8);
        dec_o.use_imm = 1'b1;
      end else begin
        dec_o.fu = FU_ALU;
      end
    end
    // sspopchk x1|x5 and ssrdp rd: mop.r.28
    else if (opcode == OPC_SYSTEM && funct3 == 3'b100 && instr_i[31:20] == 12'hCDC) begin
      if (rd == 5'd0 && (rs1 == 5'd1 || rs1 == 5'd5)) begin
        dec_o.valid = 1'b1;
        if (ss_en_i) begin
          dec_o.fu  = FU_LOAD;
          dec_o.op  = OP_SSPCHK;
          dec_o.rs2 = rs1;
        end else begin
          dec_o.fu = FU_ALU;
        end
      end else if (rs1 == 5'd0 && rd != 5'd0) begin
        dec_o.valid = 1'b1;
        dec_o.rd    = rd;
        if (ss_en_i) begin
          dec_o.fu      = FU_CSR;
          dec_o.op      = OP_CSRR;
          dec_o.imm     = XLEN'(CSR_SSP);
          dec_o.use_imm = 1'b1;
        end else begin
          dec_o.fu      = FU_ALU;       // rd <- x0 + 0
          dec_o.op      = OP_ADD;
          dec_o.use_imm = 1'b1;
        end
      end
    end
    // ssamoswap.w/d
    else if (opcode == OPC_AMO && instr_i[31:27] == 5'b01001 &&
             (funct3 == 3'b010 || funct3 == 3'b011)) begin
      dec_o.valid   = 1'b1;
      dec_o.fu      = FU_STORE;
      dec_o.op      = (funct3 == 3'b010) ? OP_SSAMOSWAP_W : OP_SSAMOSWAP_D;
      dec_o.rs1     = rs1;
      dec_o.rs2     = rs2;
      dec_o.rd      = rd;
      dec_o.illegal = !ss_en_i && (priv_lvl_i != PRIV_LVL_M);
    end
    // lpad: auipc x0, label
    else if (opcode == OPC_AUIPC && rd == 5'd0) begin
      dec_o.valid = 1'b1;
      dec_o.fu    = FU_ALU;
      if (lp_en_i) begin
        dec_o.op      = OP_ZICFI_LP;
        dec_o.imm     = XLEN'({instr_i[31:12], 12'h000});
        dec_o.use_imm = 1'b1;
      end
    end
  end

endmodule
