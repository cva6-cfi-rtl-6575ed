// ssu: Shadow Stack Unit of the execute stage (Zicfiss).
//
// Sits between the issue stage and the load-store unit (LSU). Two jobs:
//
// 1. Early filtering. A Zicfiss operation (sspush, sspopchk, ssamoswap.w/d)
//    is stopped before the LSU and a store access fault is reported to the
//    scoreboard when
//      - it is an ssamoswap executing in machine mode, or
//      - the hart is below machine mode and address translation is off
//        (satp.MODE, or vsatp.MODE when virtualised, is BARE).
//    Otherwise the operation is passed on (lsu_valid_o).
// 2. Pop check. When an sspopchk is let through, the link register value
//    (operand b) and the load's transaction ID are buffered and an
//    "sspchk in flight" flag is set. Each load result from the LSU is then
//    compared by transaction ID; on a match the loaded shadow-stack entry is
//    compared with the buffered link register, and a mismatch replaces the
//    load's writeback exception with a software-check exception
//    (tval = shadow stack fault).
//
// Interface: CSR state (priv_lvl_i, satp_mode_i, vsatp_mode_i, v_i); the
// issue handshake (lsu_valid_i with fu_data_i, lsu_ready_o); the LSU's store
// and load writeback ports (in), forwarded to the scoreboard (out) with the
// SSU's exceptions merged in.
//
// Timing: filtering and the pop comparison are combinational; a fault goes
// out on the store writeback port in the issue cycle. Only one sspopchk may
// be in flight. The filtering conditions, the buffered values, the
// transaction-ID match and the comparison follow the paper's block diagram.
// Own choices: the ready signal, the one-entry holding register used when
// the LSU returns a store in the same cycle as a filtered fault, holding a
// second sspopchk until the first has returned, and letting an LSU load
// exception take priority over the comparison.
module ssu
  import cfi_pkg::*;
(
  input  logic                     clk_i,
  input  logic                     rst_ni,
  // from CSR
  input  priv_lvl_t                priv_lvl_i,
  input  logic [3:0]               satp_mode_i,
  input  logic [3:0]               vsatp_mode_i,
  input  logic                     v_i,
  // from issue
  input  logic                     lsu_valid_i,
  input  fu_data_t                 fu_data_i,
  output logic                     lsu_ready_o,
  // to LSU
  output logic                     lsu_valid_o,
  input  logic                     lsu_ready_i,
  // from LSU: store writeback
  input  logic                     store_valid_i,
  input  logic [TRANS_ID_BITS-1:0] store_trans_id_i,
  input  exception_t               store_ex_i,
  // from LSU: load writeback
  input  logic                     load_valid_i,
  input  logic [TRANS_ID_BITS-1:0] load_trans_id_i,
  input  logic [XLEN-1:0]          load_result_i,
  input  exception_t               load_ex_i,
  // to scoreboard
  output logic                     ss_store_valid_o,
  output logic [TRANS_ID_BITS-1:0] ss_store_trans_id_o,
  output exception_t               ss_store_ex_o,
  output exception_t               ss_load_ex_o,
  output logic                     sspchk_inflight_o
);

  // ---------------------------------------------------------- filtering
  logic is_zicfiss, is_ssamo, is_sspchk, priv_m, xlat_bare, st_access_fault;

  always_comb begin
    is_zicfiss = is_zicfiss_op(fu_data_i.operation);
    is_ssamo   = is_ssamo_op(fu_data_i.operation);
    is_sspchk  = (fu_data_i.operation == OP_SSPCHK);
    priv_m     = (priv_lvl_i == PRIV_LVL_M);
    xlat_bare  = v_i ? (vsatp_mode_i == MODE_BARE) : (satp_mode_i == MODE_BARE);
    st_access_fault = (is_ssamo && priv_m) || (is_zicfiss && !priv_m && xlat_bare);
  end

  // --------------------------------------------- pending fault / in-flight
  logic                     pend_q;
  logic [TRANS_ID_BITS-1:0] pend_id_q;
  logic                     inflight_q;
  logic [XLEN-1:0]          link_reg_q;
  logic [TRANS_ID_BITS-1:0] chk_id_q;
  logic                     chk_done;

  assign chk_done = inflight_q && load_valid_i && (load_trans_id_i == chk_id_q);

  // a new op is taken when no fault is parked and, for sspopchk, no other
  // pop check is outstanding
  logic accept_ok;
  always_comb begin
    accept_ok   = !pend_q && !(is_sspchk && inflight_q && !chk_done);
    lsu_ready_o = accept_ok && (st_access_fault || lsu_ready_i);
    lsu_valid_o = lsu_valid_i && accept_ok && !st_access_fault;
  end

  logic fault_now;
  assign fault_now = lsu_valid_i && lsu_ready_o && st_access_fault;

  // store writeback port: LSU result first, then a parked fault, then a
  // fault detected this cycle
  always_comb begin
    ss_store_valid_o    = store_valid_i;
    ss_store_trans_id_o = store_trans_id_i;
    ss_store_ex_o       = store_ex_i;
    if (!store_valid_i) begin
      if (pend_q) begin
        ss_store_valid_o    = 1'b1;
        ss_store_trans_id_o = pend_id_q;
        ss_store_ex_o       = '{cause: ST_ACCESS_FAULT, tval: '0, valid: 1'b1};
      end else if (fault_now) begin
        ss_store_valid_o    = 1'b1;
        ss_store_trans_id_o = fu_data_i.trans_id;
        ss_store_ex_o       = '{cause: ST_ACCESS_FAULT, tval: '0, valid: 1'b1};
      end
    end
  end

  // load writeback port: pop-check mismatch becomes a software-check exception
  always_comb begin
    ss_load_ex_o = load_ex_i;
    if (chk_done && !load_ex_i.valid && (load_result_i != link_reg_q))
      ss_load_ex_o = '{cause: SW_CHECK_EX, tval: TVAL_SS_FAULT, valid: 1'b1};
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      pend_q     <= 1'b0;
      pend_id_q  <= '0;
      inflight_q <= 1'b0;
      link_reg_q <= '0;
      chk_id_q   <= '0;
    end else begin
      // parked fault
      if (pend_q && !store_valid_i) pend_q <= 1'b0;
      if (fault_now && (store_valid_i || pend_q)) begin
        pend_q    <= 1'b1;
        pend_id_q <= fu_data_i.trans_id;
      end
      // pop check
      if (chk_done) inflight_q <= 1'b0;
      if (lsu_valid_o && lsu_ready_i && is_sspchk) begin
        inflight_q <= 1'b1;
        link_reg_q <= fu_data_i.operand_b;
        chk_id_q   <= fu_data_i.trans_id;
      end
    end
  end

  assign sspchk_inflight_o = inflight_q;

// a filtered operation never reaches the LSU, and at most one pop check
  // is outstanding
  assert property (@(posedge clk_i) disable iff (!rst_ni)
                   lsu_valid_o |-> !st_access_fault);
  assert property (@(posedge clk_i) disable iff (!rst_ni)
                   (lsu_valid_o && is_sspchk) |-> (!inflight_q || chk_done));

endmodule
