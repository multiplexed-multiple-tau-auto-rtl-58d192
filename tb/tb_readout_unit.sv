// tb_readout_unit: a small read-out unit (2 channels, 3 blocks, 2 lanes)
// fed by a model state memory whose G, M, T words are distinct counters.
// Checks that copies are taken only in slot 0, one block per copy clock in
// order 0..S-1, that the words then leave in the documented order with the
// copied values, that a stalled FIFO holds the word, and that a trigger
// during a transfer is served afterwards (deferred), not lost.
module tb_readout_unit;
  import corr_pkg::*;
  localparam int unsigned NCH = 2, S = 3, L = 2, NF = 4, NW = NF * L + NCH;

  logic clk = 0, rst_n = 0;
  always #25 clk = ~clk;

  logic       trigger, slot0, dump_en, dma_valid, dma_ready, busy, deferred;
  logic [1:0] dump_s;
  gword_t     dump_g [NF][L];
  dword_t     dump_m [NCH];
  dword_t     dump_t [NCH];
  gword_t     dma_data;

  readout_unit #(.NCH(NCH), .S(S), .L(L)) dut (.*);

  int checks = 0, failures = 0;
  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL %s", what); end
  endtask

  // model memory: every word a value unique to block, function/channel, lane, epoch
  int epoch [S];
  always_comb begin
    for (int f = 0; f < int'(NF); f++) for (int l = 0; l < int'(L); l++)
      dump_g[f][l] = gword_t'({epoch[dump_s], 8'(dump_s), 8'(f), 8'(l)}) | (64'h1 << 40);
    for (int c = 0; c < int'(NCH); c++) begin
      dump_m[c] = 32'h4000_0000 | {8'(epoch[dump_s]), 8'(dump_s), 8'(c), 8'h0};
      dump_t[c] = 32'h2000_0000 | {8'(epoch[dump_s]), 8'(dump_s), 8'(c), 8'h1};
    end
  end

  int slot;
  int exp_s = 0;
  int n_copy = 0, n_words = 0, n_stall = 0, n_defer = 0, n_trig = 0;
  int wi = 0;
  int copied_epoch [S];
  gword_t exp_w;

  always @(negedge clk) begin
    dma_ready <= ($urandom % 3) != 0;
  end

  always @(posedge clk) if (rst_n) begin
    chk(!dump_en || slot0, "copy only in slot 0");
    if (dump_en) begin
      chk(int'(dump_s) == exp_s, "blocks copied in order");
      copied_epoch[dump_s] = epoch[dump_s];
      epoch[dump_s]++;             // the model memory is cleared: new epoch
      exp_s = (exp_s + 1) % S;
      n_copy++;
    end
    if (deferred) n_defer++;
    if (dma_valid && !dma_ready) n_stall++;
    if (dma_valid && dma_ready) begin
      automatic int s = wi / NW, k = wi % NW;
      if (k < int'(NF * L))
        exp_w = gword_t'({copied_epoch[s], 8'(s), 8'(k / L), 8'(k % L)}) | (64'h1 << 40);
      else
        exp_w = {32'h4000_0000 | {8'(copied_epoch[s]), 8'(s), 8'(k - NF * L), 8'h0},
                 32'h2000_0000 | {8'(copied_epoch[s]), 8'(s), 8'(k - NF * L), 8'h1}};
      chk(dma_data == exp_w, $sformatf("word %0d", wi));
      wi = (wi + 1) % (S * NW);
      n_words++;
    end
  end

  initial begin
    foreach (epoch[i]) begin epoch[i] = 0; copied_epoch[i] = 0; end
    trigger = 0; slot0 = 0; slot = 0; dma_ready = 1;
    repeat (2) @(posedge clk);
    @(negedge clk) rst_n = 1;
    for (int n = 0; n < 3000; n++) begin
      slot0 = (slot == 0);
      trigger = (slot == 3) && (($urandom % 20) == 0);
      if (trigger) n_trig++;
      @(negedge clk);
      slot = (slot + 1) % 4;
    end
    trigger = 0;
    repeat (400) @(negedge clk) begin slot0 = (slot == 0); slot = (slot + 1) % 4; end
    chk(!busy && n_words == n_copy * NW && n_copy % S == 0, "every copy was sent");
    chk(n_copy > 0 && n_stall > 0 && n_defer > 0, "copies, stalls and deferrals happened");
    $display("copies %0d words %0d stalls %0d deferred %0d triggers %0d", n_copy / S, n_words, n_stall, n_defer, n_trig);
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
