// tb_state_ram: random reads, writes (with and without channel update and
// hand-over) and dumps on a small state memory, checked against a plain
// model of the same arrays kept in the testbench. Covers the rule that a
// write to a word dumped in the same clock wins over the clear, and that
// the last block writes no hand-over.
module tb_state_ram;
  import corr_pkg::*;
  localparam int unsigned NCH = 2, S = 3, L = 2, NF = 4, LM = L + M_INT;

  logic clk = 0, rst_n = 0;
  always #25 clk = ~clk;

  logic [1:0] rd_s, wr_s, dump_s, rd_f, wr_f;
  logic [0:0] rd_ub, rd_db, wr_db;
  gword_t rd_g [L];
  dword_t rd_id [LM];
  dword_t rd_iu_mul, rd_iu_own, rd_iu_star, rd_m, rd_t;
  logic   wr_en, wr_upd, dump_en;
  gword_t wr_g [L];
  dword_t wr_id [LM];
  dword_t wr_iu_star, wr_m, wr_t, wr_ho_iu, wr_ho_id;
  gword_t dump_g [NF][L];
  dword_t dump_m [NCH];
  dword_t dump_t [NCH];

  state_ram #(.NCH(NCH), .S(S), .L(L)) dut (.*);

  // model
  gword_t mg [S][NF][L];
  dword_t mid [NCH][S][LM];
  dword_t miu [NCH][S], mius [NCH][S], mm [NCH][S], mt [NCH][S];

  int checks = 0, failures = 0, n_ho = 0, n_coll = 0, n_dump = 0;
  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL %s", what); end
  endtask

  initial begin
    foreach (mg[s, f, l]) mg[s][f][l] = 0;
    foreach (mid[c, s, l]) mid[c][s][l] = 0;
    foreach (miu[c, s]) begin miu[c][s] = 0; mius[c][s] = 0; mm[c][s] = 0; mt[c][s] = 0; end
    wr_en = 0; dump_en = 0; rd_s = 0; wr_s = 0; dump_s = 0; rd_f = 0; wr_f = 0;
    rd_ub = 0; rd_db = 0; wr_db = 0; wr_upd = 0;
    repeat (2) @(posedge clk);
    @(negedge clk) rst_n = 1;
    for (int n = 0; n < 4000; n++) begin
      // read port against the model
      rd_s = 2'($urandom % S); rd_f = 2'($urandom); rd_ub = 1'($urandom); rd_db = 1'($urandom);
      wr_en = ($urandom % 3) != 0; wr_upd = 1'($urandom);
      wr_s = 2'($urandom % S); wr_f = 2'($urandom); wr_db = 1'($urandom);
      foreach (wr_g[l]) wr_g[l] = {$urandom, $urandom};
      foreach (wr_id[l]) wr_id[l] = $urandom;
      wr_iu_star = $urandom; wr_m = $urandom; wr_t = $urandom;
      wr_ho_iu = $urandom; wr_ho_id = $urandom;
      dump_en = ($urandom % 4) == 0;
      dump_s = (($urandom % 2) == 0) ? wr_s : 2'($urandom % S);
      #1;
      for (int l = 0; l < int'(L); l++) chk(rd_g[l] == mg[rd_s][rd_f][l], "read G");
      for (int l = 0; l < int'(LM); l++) chk(rd_id[l] == mid[rd_db][rd_s][l], "read I(d)");
      chk(rd_iu_mul == miu[rd_ub][rd_s] && rd_iu_own == miu[rd_db][rd_s], "read I(u)");
      chk(rd_iu_star == mius[rd_db][rd_s] && rd_m == mm[rd_db][rd_s] && rd_t == mt[rd_db][rd_s], "read I(u)*, M, T");
      if (dump_en) begin
        for (int f = 0; f < int'(NF); f++) for (int l = 0; l < int'(L); l++)
          chk(dump_g[f][l] == mg[dump_s][f][l], "dump G");
        for (int c = 0; c < int'(NCH); c++)
          chk(dump_m[c] == mm[c][dump_s] && dump_t[c] == mt[c][dump_s], "dump M, T");
      end
      @(posedge clk);
      // model update: clear first, the write wins
      if (dump_en) begin
        n_dump++;
        for (int f = 0; f < int'(NF); f++) for (int l = 0; l < int'(L); l++) mg[dump_s][f][l] = 0;
        for (int c = 0; c < int'(NCH); c++) begin mm[c][dump_s] = 0; mt[c][dump_s] = 0; end
        if (wr_en && wr_s == dump_s) n_coll++;
      end
      if (wr_en) begin
        for (int l = 0; l < int'(L); l++) mg[wr_s][wr_f][l] = wr_g[l];
        if (wr_upd) begin
          for (int l = 0; l < int'(LM); l++) mid[wr_db][wr_s][l] = wr_id[l];
          mius[wr_db][wr_s] = wr_iu_star; mm[wr_db][wr_s] = wr_m; mt[wr_db][wr_s] = wr_t;
          if (wr_s < S - 1) begin
            miu[wr_db][wr_s + 1] = wr_ho_iu; mid[wr_db][wr_s + 1][0] = wr_ho_id; n_ho++;
          end
        end
      end
      @(negedge clk);
    end
    chk(n_ho > 0 && n_coll > 0 && n_dump > 0, "hand-over, dump and collision exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #(50ns * 20000);
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks + 1, failures + 1);
    $finish;
  end
endmodule
