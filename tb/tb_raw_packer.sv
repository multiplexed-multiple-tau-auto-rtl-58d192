// tb_raw_packer: random photon pulses on two detectors and a FIFO that is
// sometimes not ready. Every word offered must hold the 16 previous
// samples of both channels in the documented bit order, words must come
// every 16 clocks, and a word offered while not ready must set overflow.
module tb_raw_packer;
  logic        clk = 0, rst_n = 0;
  logic [0:0]  cnt_in [2];
  logic        raw_valid, raw_ready, overflow;
  logic [31:0] raw_data;
  always #25 clk = ~clk;

  raw_packer #(.NCH(2), .CNT_W(1)) dut (.clk, .rst_n, .cnt_in, .raw_valid, .raw_data,
                                         .raw_ready, .overflow);

  int checks = 0, failures = 0, n_words = 0, n_drop = 0;
  bit trace [2][$];
  int pos = 0, last_word = -1, nclk = 0;
  bit exp_ovf = 0;

  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL %s", what); end
  endtask

  always @(negedge clk) begin
    cnt_in[0] <= 1'($urandom);
    cnt_in[1] <= 1'($urandom);
    raw_ready <= ($urandom % 6) != 0;
  end

  always @(posedge clk) if (rst_n) begin
    if (raw_valid) begin
      automatic bit ok = 1;
      for (int i = 0; i < 16; i++)
        for (int ch = 0; ch < 2; ch++)
          if (raw_data[i * 2 + ch] != trace[ch][pos + i]) ok = 0;
      chk(ok, "raw word contents");
      if (last_word >= 0) chk(nclk - last_word == 16, "one word every 16 clocks");
      last_word = nclk;
      pos += 16;
      n_words++;
      if (!raw_ready) begin exp_ovf = 1; n_drop++; end
    end
    trace[0].push_back(cnt_in[0]);
    trace[1].push_back(cnt_in[1]);
    nclk++;
  end

  always @(negedge clk) if (rst_n) chk(overflow == exp_ovf, "overflow flag");

  initial begin
    cnt_in[0] = 0; cnt_in[1] = 0; raw_ready = 1;
    repeat (2) @(posedge clk);
    @(negedge clk) rst_n = 1;
    repeat (3000) @(posedge clk);
    chk(n_words > 100 && n_drop > 0, "words delivered and dropped");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #(50ns * 10000);
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks + 1, failures + 1);
    $finish;
  end
endmodule
