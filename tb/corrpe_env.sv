// corrpe_env: self-checking environment around one corrpe instance.
//
// It drives photon pulses (random with probability 1/PROB_DIV per clock,
// or a photon in every clock when CONST_IN = 1), a randomly stalling
// read-out FIFO and raw FIFO, and checks:
//   - the correlation words: the sum of every read-out copy plus what is
//     still in the state memory at the end must equal a reference built
//     straight from the recorded photon trace, using the lag times of Eq. 4,
//     the first-execution rule (block s-1 has run L+m times; this is Eq. 8
//     for s <= 3) and block s running at the cycles
//     c with exactly s trailing zero bits. Block s executed at cycle c
//     correlates windows of 2^s block-0 bins; the newest bin it sees is the
//     one of the block-0 execution at cycle c - (2^s - 1);
//   - that block 0 runs every 2*NF clocks and each block first runs at the
//     Eq. 8 cycle;
//   - the raw photon words against the recorded trace.
// It counts how often each mechanism happened (empty slots of both kinds,
// hand-over, read-out copy, deferred read-out, copy/execute collision,
// FIFO stall, raw overflow, counter wrap) and fails a mechanism that never
// did. DEFAULTS = 1 instantiates corrpe with no parameter override.
module corrpe_env #(
  parameter int unsigned NCH      = 2,
  parameter int unsigned S        = 4,
  parameter int unsigned C_W      = 32,
  parameter int unsigned CYCLES   = 2000,  // execution cycles to run; 0: until
                                           // block S-1 has run once
  parameter int unsigned PROB_DIV = 3,
  parameter bit          CONST_IN = 0,
  parameter bit          DEFAULTS = 0,
  parameter bit          EXPECT_WRAP = 0,
  parameter bit          STALLS   = 1
) (
  output logic done,
  output int   checks,
  output int   failures
);
  import corr_pkg::*;
  localparam int unsigned L  = 8;
  localparam int unsigned NF = (NCH == 2) ? 4 : 1;
  localparam int unsigned NW = NF * L + NCH;

  logic       clk = 0;
  logic       rst_n = 0;
  logic [0:0] apd [NCH];
  logic       dma_valid, dma_ready, raw_valid, raw_ready, raw_overflow;
  gword_t     dma_data;
  logic [31:0] raw_data;

  always #25 clk = ~clk;   // 20 MHz

  localparam int unsigned F_W  = (NF > 1) ? $clog2(NF) : 1;
  localparam int unsigned S_W  = $clog2(C_W);
  localparam int unsigned SI_W = (S > 1) ? $clog2(S) : 1;

  // internal probes of the design, taken from whichever instance exists
  logic [F_W-1:0]  p_slot;
  logic            p_exec_valid, p_dump_en, p_busy, p_pending, p_deferred;
  logic [S_W-1:0]  p_exec_s;
  logic [C_W-1:0]  p_c;
  logic [SI_W-1:0] p_dump_s, p_blk;
  gword_t          p_g [S][NF][L];
  dword_t          p_m [NCH][S];
  dword_t          p_t [NCH][S];

`define CORRPE_PROBES \
    assign p_slot = dut.slot;             assign p_exec_valid = dut.exec_valid; \
    assign p_exec_s = dut.exec_s;         assign p_c = dut.c; \
    assign p_dump_en = dut.dump_en;       assign p_dump_s = dut.dump_s; \
    assign p_blk = dut.blk;               assign p_busy = dut.u_ro.busy; \
    assign p_pending = dut.u_ro.pending;  assign p_deferred = dut.u_ro.deferred; \
    assign p_g = dut.u_ram.g_mem;         assign p_m = dut.u_ram.m_mem; \
    assign p_t = dut.u_ram.t_mem;

  if (DEFAULTS) begin : g_def
    corrpe dut (.clk, .rst_n, .apd_cnt(apd), .dma_valid, .dma_data, .dma_ready,
                .raw_valid, .raw_data, .raw_ready, .raw_overflow);
    `CORRPE_PROBES
  end else begin : g_par
    corrpe #(.NCH(NCH), .S(S), .C_W(C_W)) dut (.clk, .rst_n, .apd_cnt(apd),
                .dma_valid, .dma_data, .dma_ready, .raw_valid, .raw_data,
                .raw_ready, .raw_overflow);
    `CORRPE_PROBES
  end
`undef CORRPE_PROBES

  // ---------------------------------------------------------------- stimulus
  byte unsigned trace [NCH][$];     // photons per clock since reset release
  longint       nclk;
  bit           draining = 0;   // end of test: FIFOs always ready

  // ---------------------------------------------------------------- counters
  int n_empty_s, n_empty_fill, n_exec, n_handover, n_copy, n_defer, n_collide,
      n_dma_stall, n_raw_words, n_raw_ovf, n_wrap;
  longint last_b0;
  longint first_exec [S];
  longint cyc;                       // unbounded execution-cycle count

  // ---------------------------------------------------------------- read-out sum
  longint unsigned sum_g [S][NF][L];
  longint unsigned sum_m [S][NCH];
  longint unsigned sum_t [S][NCH];
  int unsigned     word_idx;
  int unsigned     raw_pos;

  function automatic int unsigned ub_of(int unsigned f); return slot_ub(NCH, f); endfunction
  function automatic int unsigned db_of(int unsigned f); return slot_db(NCH, f); endfunction

  // photons of block-0 bin k: clocks NF*(1+2k) .. NF*(3+2k)-1
  function automatic longint unsigned bin(int ch, longint k);
    longint unsigned v = 0;
    if (k < 0) return 0;
    for (longint n = NF * (1 + 2 * k); n < NF * (3 + 2 * k); n++) begin
      if (CONST_IN) v += 1;
      else if (n < trace[ch].size()) v += trace[ch][n];
    end
    return v;
  endfunction

  // sum of w bins ending at bin t
  function automatic longint unsigned win(int ch, longint t, longint w);
    longint unsigned v = 0;
    if (CONST_IN) begin
      longint lo = t - w + 1;
      if (lo < 0) lo = 0;
      return (t < lo) ? 0 : longint'(2 * NF) * (t - lo + 1);
    end
    for (longint k = t - w + 1; k <= t; k++) v += bin(ch, k);
    return v;
  endfunction

  function automatic longint tau(int s, int l);   // Eq. 4, in block-0 bins
    if (s == 0) return l;
    return tau(s - 1, L - 1) + (longint'(1) << (s - 1)) * (1 + 2 * l);
  endfunction

  function automatic int ctz(longint c);
    int s = 0;
    while (s < 62 && ((c >> s) & 1) == 0) s++;
    return s;
  endfunction

  // First cycle of block s: first cycle with s trailing zeros after block
  // s-1 has run L+m = 10 times; equals Eq. 8 (19*2^s - 16) for s <= 3.
  function automatic longint first_rule(int s);
    longint c;
    if (s == 0) return 3;
    c = first_rule(s - 1) + 9 * (longint'(1) << s) + 1;
    while (ctz(c) != s) c++;
    return c;
  endfunction

  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL %s (t=%0t)", what, $time);
    end
  endtask

  // drive inputs on the falling edge
  always @(negedge clk) begin
    for (int ch = 0; ch < int'(NCH); ch++)
      apd[ch] <= CONST_IN ? 1'b1 : 1'(($urandom % PROB_DIV) == 0);
    dma_ready <= (STALLS && !draining) ? 1'((($urandom % 4) != 0)) : 1'b1;
    raw_ready <= STALLS ? 1'((($urandom % 8) != 0)) : 1'b1;
  end

  // observe on the rising edge
  always @(posedge clk) if (rst_n) begin
    if (!CONST_IN) for (int ch = 0; ch < int'(NCH); ch++) trace[ch].push_back(byte'(apd[ch]));
    // scheduler activity
    if (p_slot == '0) begin
      if (!p_exec_valid) begin
        if (32'(p_exec_s) >= S || p_c == '0) n_empty_s++; else n_empty_fill++;
      end else begin
        automatic int s = int'(p_exec_s);
        n_exec++;
        if (s > 0) n_handover++;
        if (first_exec[s] < 0) begin
          first_exec[s] = cyc;
          chk(cyc == first_rule(s), $sformatf("first execution of block %0d at c=%0d", s, cyc));
          if (s <= 3) chk(cyc == longint'(19) * (longint'(1) << s) - 16, "Eq. 8");
        end
        if (s == 0) begin
          if (last_b0 >= 0) chk(nclk - last_b0 == 2 * NF, "block-0 period");
          last_b0 = nclk;
        end
      end
      if (p_dump_en && p_exec_valid && p_dump_s == p_blk) n_collide++;
    end
    if (p_deferred) n_defer++;
    if (p_dump_en && 32'(p_dump_s) == S - 1) n_copy++;
    if (p_slot == F_W'(NF - 1)) begin
      if (p_c == '1) n_wrap++;
      cyc++;
    end
    // read-out stream
    if (dma_valid && !dma_ready) n_dma_stall++;
    if (dma_valid && dma_ready) begin
      automatic int s = word_idx / NW, k = word_idx % NW;
      if (k < int'(NF * L)) sum_g[s][k / L][k % L] += dma_data;
      else begin
        sum_m[s][k - NF * L] += dma_data[63:32];
        sum_t[s][k - NF * L] += dma_data[31:0];
      end
      word_idx = (word_idx + 1) % (S * NW);
    end
    // raw stream
    if (raw_valid) begin
      if (!raw_ready) n_raw_ovf++;
      else if (!CONST_IN) begin
        automatic bit ok = 1;
        n_raw_words++;
        for (int i = 0; i < int'(32 / NCH); i++)
          for (int ch = 0; ch < int'(NCH); ch++)
            if (raw_data[i * NCH + ch] != trace[ch][raw_pos + i][0]) ok = 0;
        chk(ok, "raw photon word");
      end else n_raw_words++;
      raw_pos += 32 / NCH;
    end
    nclk++;
  end
  task automatic final_check();
    longint unsigned eg [S][NF][L];
    longint unsigned em [S][NCH];
    longint unsigned et [S][NCH];
    longint unsigned r;
    longint th [S];
    longint tau_t [S][L];
    for (int s = 0; s < int'(S); s++) begin
      th[s] = first_rule(s);
      for (int l = 0; l < int'(L); l++) tau_t[s][l] = tau(s, l);
    end
    for (int s = 0; s < int'(S); s++) begin
      for (int f = 0; f < int'(NF); f++) for (int l = 0; l < int'(L); l++) eg[s][f][l] = 0;
      for (int ch = 0; ch < int'(NCH); ch++) begin em[s][ch] = 0; et[s][ch] = 0; end
    end
    // every execution cycle completed so far
    for (longint c = 1; c < cyc; c++) begin
      int s = ctz(c);
      longint te;
      if (s >= int'(S)) continue;
      if (c < th[s]) continue;
      te = (c - ((longint'(1) << s) - 1) - 3) / 2;
      for (int f = 0; f < int'(NF); f++)
        for (int l = 0; l < int'(L); l++)
          // the first l executions of block s see an empty delay line (Eq. 9)
          if (et[s][0] >= longint'(l))
            eg[s][f][l] += win(ub_of(f), te, longint'(1) << s) *
                         win(db_of(f), te - tau_t[s][l], longint'(1) << s);
      for (int ch = 0; ch < int'(NCH); ch++) begin
        em[s][ch] += win(ch, te, longint'(1) << s);
        et[s][ch] += 1;
      end
    end
    for (int s = 0; s < int'(S); s++) begin
      for (int f = 0; f < int'(NF); f++)
        for (int l = 0; l < int'(L); l++) begin
          r = sum_g[s][f][l] + p_g[s][f][l];
          chk(r == eg[s][f][l], $sformatf("G s=%0d f=%0d l=%0d got %0d exp %0d", s, f, l, r, eg[s][f][l]));
        end
      for (int ch = 0; ch < int'(NCH); ch++) begin
        r = sum_m[s][ch] + longint'(p_m[ch][s]);
        chk(r == em[s][ch], $sformatf("M s=%0d ch=%0d got %0d exp %0d", s, ch, r, em[s][ch]));
        r = sum_t[s][ch] + longint'(p_t[ch][s]);
        chk(r == et[s][ch], $sformatf("T s=%0d ch=%0d got %0d exp %0d", s, ch, r, et[s][ch]));
      end
    end
  endtask

  task automatic mech(int n, string what);
    $display("  %-34s %0d", what, n);
    chk(n > 0, {"mechanism never happened: ", what});
  endtask

  initial begin
    done = 0; checks = 0; failures = 0;
    n_empty_s = 0; n_empty_fill = 0; n_exec = 0; n_handover = 0; n_copy = 0;
    n_defer = 0; n_collide = 0; n_dma_stall = 0; n_raw_words = 0; n_raw_ovf = 0;
    n_wrap = 0; last_b0 = -1; cyc = 0; nclk = 0; word_idx = 0; raw_pos = 0;
    for (int s = 0; s < int'(S); s++) begin
      first_exec[s] = -1;
      for (int f = 0; f < int'(NF); f++) for (int l = 0; l < int'(L); l++) sum_g[s][f][l] = 0;
      for (int ch = 0; ch < int'(NCH); ch++) begin sum_m[s][ch] = 0; sum_t[s][ch] = 0; end
    end
    for (int ch = 0; ch < int'(NCH); ch++) apd[ch] = 0;
    dma_ready = 1; raw_ready = 1;
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1;
    if (CYCLES == 0) wait (cyc > first_rule(S - 1));
    else wait (cyc >= CYCLES);
    draining = 1;
    $display("NCH=%0d reached %0d cycles", NCH, cyc);
    // stop at a slot-0 boundary with the read-out idle and nothing pending
    do @(negedge clk); while (!(p_slot == '0 && !p_busy && !p_pending));
    $display("NCH=%0d drained", NCH);
    final_check();
    for (int s = 0; s < int'(S); s++) chk(first_exec[s] >= 0, $sformatf("block %0d executed", s));
    $display("corrpe_env NCH=%0d S=%0d: %0d execution cycles, %0d clocks", NCH, S, cyc, nclk);
    mech(n_exec, "executed slots");
    mech(n_empty_s, "empty slots (s_c >= S or c = 0)");
    mech(n_empty_fill, "empty slots (block not yet filled)");
    mech(n_handover, "blocks fed by hand-over");
    mech(n_copy, "read-out copies completed");
    if (STALLS) begin
      mech(n_defer, "read-outs deferred (unit busy)");
      mech(n_collide, "copy in the executing block");
      mech(n_dma_stall, "read-out FIFO stalls");
      mech(n_raw_ovf, "raw FIFO overflows");
    end
    mech(n_raw_words, "raw words delivered");
    if (EXPECT_WRAP) mech(n_wrap, "execution counter wrap-arounds");
    done = 1;
  end
endmodule
