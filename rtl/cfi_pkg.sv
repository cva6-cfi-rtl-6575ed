// cfi_pkg: types and constants shared by the control-flow-integrity (CFI)
// extension logic of a CVA6-class RV64 core.
//
// The blocks in this library add the RISC-V Zicfiss (shadow stack) and
// Zicfilp (landing pad) extensions to an in-order pipeline. They share a
// reduced view of the host pipeline's own records: the operation tags the
// decoder attaches, the functional-unit input bundle seen by the execute
// stage, the scoreboard entry seen by the commit stage, and the exception
// record. Only the fields the CFI logic reads or writes are kept.
//
// From the paper: a 64-bit core, two commit ports, Zicfiss operations
// carried as load/store/AMO operations with their own tags, the exception
// kinds raised (store access fault and software-check exception).
// Own choices (taken from the ratified RISC-V specification or made here):
// the numeric encodings of the tags, the transaction-ID width, the CSR
// addresses and bit positions, exception cause and tval codes.
package cfi_pkg;

  // ---------------------------------------------------------------- sizes
  localparam int unsigned XLEN          = 64;  // RV64 core
  localparam int unsigned NR_COMMIT     = 2;   // commit ports, one LPU each
  localparam int unsigned TRANS_ID_BITS = 3;   // scoreboard index (8 entries)
  localparam int unsigned LPL_BITS      = 20;  // landing pad label = x7[31:12]
  localparam int unsigned REG_ADDR_BITS = 5;

  // ------------------------------------------------------ privilege levels
  typedef enum logic [1:0] {
    PRIV_LVL_U = 2'b00,
    PRIV_LVL_S = 2'b01,
    PRIV_LVL_M = 2'b11
  } priv_lvl_t;

  // satp / vsatp MODE field values
  localparam logic [3:0] MODE_BARE = 4'd0;
  localparam logic [3:0] MODE_SV39 = 4'd8;

  // ------------------------------------------------------- functional units
  typedef enum logic [2:0] {
    FU_NONE,
    FU_ALU,
    FU_CTRL_FLOW,
    FU_LOAD,
    FU_STORE,
    FU_CSR
  } fu_t;

  // Operation tags. The Zicfiss tags mark loads/stores/AMOs that must be told
  // apart from ordinary memory operations further down the pipeline.
  typedef enum logic [4:0] {
    OP_NOP,
    OP_ADD,          // any ordinary integer operation
    OP_JAL,
    OP_JALR,
    OP_LD,           // ordinary load
    OP_SD,           // ordinary store
    OP_AMO_SWAPD,    // ordinary AMO
    OP_CSRR,         // CSR read (ssrdp is decoded into this)
    OP_SSPUSH,       // shadow stack push: store of rs2 at ssp-8
    OP_SSPCHK,       // shadow stack pop & check: load from ssp, compare
    OP_SSAMOSWAP_W,  // shadow stack swap, word
    OP_SSAMOSWAP_D,  // shadow stack swap, double
    OP_ZICFI_LP      // lpad
  } fu_op_t;

  function automatic logic is_zicfiss_op(fu_op_t op);
    return op inside {OP_SSPUSH, OP_SSPCHK, OP_SSAMOSWAP_W, OP_SSAMOSWAP_D};
  endfunction

  function automatic logic is_ssamo_op(fu_op_t op);
    return op inside {OP_SSAMOSWAP_W, OP_SSAMOSWAP_D};
  endfunction

  // ------------------------------------------------------------ exceptions
  typedef struct packed {
    logic [XLEN-1:0] cause;
    logic [XLEN-1:0] tval;
    logic            valid;
  } exception_t;

  localparam logic [XLEN-1:0] ST_ACCESS_FAULT = XLEN'(7);   // store/AMO access fault
  localparam logic [XLEN-1:0] SW_CHECK_EX     = XLEN'(18);  // software-check exception
  localparam logic [XLEN-1:0] TVAL_LP_FAULT   = XLEN'(2);   // landing pad fault
  localparam logic [XLEN-1:0] TVAL_SS_FAULT   = XLEN'(3);   // shadow stack fault

  localparam exception_t NO_EX = '{cause: '0, tval: '0, valid: 1'b0};

  // ------------------------------------------ execute-stage operand bundle
  typedef struct packed {
    fu_t                      fu;
    fu_op_t                   operation;
    logic [XLEN-1:0]          operand_a;
    logic [XLEN-1:0]          operand_b;
    logic [XLEN-1:0]          imm;
    logic [TRANS_ID_BITS-1:0] trans_id;
  } fu_data_t;

  // ------------------------------------------------- scoreboard entry (commit)
  // For an instruction that writes a register, result is the value written.
  // For lpad, result holds the immediate (label in bits 31:12), as the
  // decoder places immediates in the result field.
  typedef struct packed {
    logic [XLEN-1:0]          pc;
    logic [TRANS_ID_BITS-1:0] trans_id;
    fu_t                      fu;
    fu_op_t                   op;
    logic [REG_ADDR_BITS-1:0] rs1;
    logic [REG_ADDR_BITS-1:0] rs2;
    logic [REG_ADDR_BITS-1:0] rd;
    logic [XLEN-1:0]          result;
    logic                     valid;     // result written back, ready to commit
    exception_t               ex;
  } scoreboard_entry_t;

  // ----------------------------------------------------- CSR addresses/bits
  localparam logic [11:0] CSR_SSP     = 12'h011;
  localparam logic [11:0] CSR_SSTATUS = 12'h100;
  localparam logic [11:0] CSR_SENVCFG = 12'h10A;
  localparam logic [11:0] CSR_VSSTATUS= 12'h200;
  localparam logic [11:0] CSR_MSTATUS = 12'h300;
  localparam logic [11:0] CSR_MENVCFG = 12'h30A;
  localparam logic [11:0] CSR_HENVCFG = 12'h60A;
  localparam logic [11:0] CSR_MSECCFG = 12'h747;
  localparam logic [11:0] CSR_MNSTATUS= 12'h744;
  localparam logic [11:0] CSR_DCSR    = 12'h7B0;

  localparam int unsigned ENVCFG_LPE  = 2;   // xenvcfg.LPE
  localparam int unsigned ENVCFG_SSE  = 3;   // xenvcfg.SSE
  localparam int unsigned MSECCFG_MLPE= 10;  // mseccfg.MLPE
  localparam int unsigned STATUS_SPELP= 23;  // mstatus/sstatus/vsstatus.SPELP
  localparam int unsigned STATUS_MPELP= 41;  // mstatus.MPELP
  localparam int unsigned MNSTATUS_MNPELP = 9;   // mnstatus.MNPELP
  localparam int unsigned DCSR_PELP       = 28;  // dcsr.pelp

  // ----------------------------------------------------- decoder output
  typedef struct packed {
    logic                     valid;     // a CFI instruction was recognised
    logic                     illegal;   // recognised but not allowed here
    fu_t                      fu;
    fu_op_t                   op;
    logic [REG_ADDR_BITS-1:0] rs1;
    logic [REG_ADDR_BITS-1:0] rs2;
    logic [REG_ADDR_BITS-1:0] rd;
    logic [XLEN-1:0]          imm;
    logic                     use_imm;
  } cfi_decoded_t;

endpackage
