// tb_correlator_unit: drives random block states through the combinational
// correlator unit and compares every output with the update rules
// (1)-(5): multiply-accumulate, shift by one, I(u)* and monitor update, T
// increment, hand-over sums, and the clear inputs.
module tb_correlator_unit;
  import corr_pkg::*;
  localparam int unsigned L = 8, LM = L + M_INT;

  dword_t iu_mul, iu_own, iu_star, m, t;
  dword_t id [LM];
  gword_t g [L];
  logic   upd, clr_g, clr_mt;
  gword_t g_new [L];
  dword_t id_new [LM];
  dword_t iu_star_new, m_new, t_new, ho_iu, ho_id;

  correlator_unit #(.L(L)) dut (.*);

  int checks = 0, failures = 0;
  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL %s", what); end
  endtask

  initial begin
    for (int n = 0; n < 2000; n++) begin
      // small and full-range values, so carries and wrap-around both occur
      iu_mul  = (n % 3 == 0) ? $urandom : $urandom % 50;
      iu_own  = (n % 3 == 0) ? $urandom : $urandom % 50;
      iu_star = (n % 3 == 0) ? $urandom : $urandom % 50;
      m = $urandom; t = $urandom;
      foreach (id[i]) id[i] = (n % 3 == 0) ? $urandom : $urandom % 50;
      foreach (g[i])  g[i]  = {$urandom, $urandom};
      upd = n[0]; clr_g = (n % 7 == 0); clr_mt = (n % 5 == 0);
      #1;
      for (int l = 0; l < int'(L); l++) begin
        longint unsigned e;
        e = (clr_g ? 64'd0 : g[l]) + longint'(iu_mul) * longint'(id[l]);
        chk(g_new[l] == e, $sformatf("G[%0d]", l));
      end
      chk(ho_iu == dword_t'(iu_own + iu_star), "hand-over I(u)");
      chk(ho_id == dword_t'(id[L] + id[L+1]), "hand-over I(d)");
      if (upd) begin
        for (int l = 1; l < int'(LM); l++) chk(id_new[l] == id[l-1], "shift");
        chk(iu_star_new == iu_own, "I(u)*");
        chk(m_new == dword_t'((clr_mt ? 0 : m) + iu_own), "M");
        chk(t_new == dword_t'((clr_mt ? 0 : t) + 1), "T");
      end else begin
        for (int l = 0; l < int'(LM); l++) chk(id_new[l] == id[l], "no shift");
        chk(iu_star_new == iu_star, "I(u)* held");
        chk(m_new == (clr_mt ? 0 : m) && t_new == (clr_mt ? 0 : t), "M, T held");
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #1ms;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks + 1, failures + 1);
    $finish;
  end
endmodule
