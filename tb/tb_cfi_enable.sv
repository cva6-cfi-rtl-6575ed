// tb_cfi_enable: exhaustive self-checking testbench of the per-mode CFI
// enable logic. All 3 modes x 2 virtualisation states x 128 field settings
// are compared with the enable table written out independently below.
module tb_cfi_enable;
  import cfi_pkg::*;

  priv_lvl_t priv;
  logic v, m_sse, h_sse, s_sse, mlpe, m_lpe, h_lpe, s_lpe, ss_en, lp_en;

  cfi_enable dut (.priv_lvl_i(priv), .v_i(v), .menvcfg_sse_i(m_sse), .henvcfg_sse_i(h_sse),
                  .senvcfg_sse_i(s_sse), .mseccfg_mlpe_i(mlpe), .menvcfg_lpe_i(m_lpe),
                  .henvcfg_lpe_i(h_lpe), .senvcfg_lpe_i(s_lpe), .ss_en_o(ss_en), .lp_en_o(lp_en));

  int checks = 0, failures = 0;

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    priv_lvl_t privs [3] = '{PRIV_LVL_U, PRIV_LVL_S, PRIV_LVL_M};
    for (int p = 0; p < 3; p++)
      for (int vv = 0; vv < 2; vv++)
        for (int f = 0; f < 128; f++) begin
          logic es, el;
          if (privs[p] == PRIV_LVL_M && vv == 1) continue;   // no virtual M-mode
          priv = privs[p]; v = vv[0];
          {m_sse, h_sse, s_sse, mlpe, m_lpe, h_lpe, s_lpe} = f[6:0];
          #1;
          case ({p[1:0], vv[0]})
            {2'd0, 1'b0}: begin es = m_sse & s_sse;         el = s_lpe; end  // U
            {2'd0, 1'b1}: begin es = m_sse & h_sse & s_sse; el = s_lpe; end  // VU
            {2'd1, 1'b0}: begin es = m_sse;                 el = m_lpe; end  // S
            {2'd1, 1'b1}: begin es = m_sse & h_sse;         el = h_lpe; end  // VS
            default:      begin es = 1'b0;                  el = mlpe;  end  // M
          endcase
          checks += 2;
          if (ss_en !== es || lp_en !== el) begin
            failures++;
            $display("FAIL: priv=%0d v=%0d fields=%b ss=%0d/%0d lp=%0d/%0d", p, vv, f[6:0], ss_en, es, lp_en, el);
          end
        end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
