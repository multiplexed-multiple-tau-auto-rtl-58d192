// tb_photon_accumulator: random photon counts and random latch pulses; the
// held sum must equal the counts added up since the previous latch,
// including the latch clock itself, and must not change between latches.
module tb_photon_accumulator;
  import corr_pkg::*;
  logic       clk = 0, rst_n = 0;
  logic [2:0] cnt_in;
  logic       latch;
  dword_t     iu0;
  always #25 clk = ~clk;

  photon_accumulator #(.CNT_W(3)) dut (.clk, .rst_n, .cnt_in, .latch, .iu0);

  int checks = 0, failures = 0, n_latch = 0;
  longint unsigned run, held;

  initial begin
    cnt_in = 0; latch = 0; run = 0; held = 0;
    repeat (2) @(posedge clk);
    @(negedge clk) rst_n = 1;
    for (int i = 0; i < 3000; i++) begin
      cnt_in = 3'($urandom);
      latch  = (i % 8 == 7) || (($urandom % 13) == 0);
      @(posedge clk);
      if (latch) begin held = run + cnt_in; run = 0; n_latch++; end
      else run += cnt_in;
      @(negedge clk);
      checks++;
      if (iu0 != dword_t'(held)) begin
        failures++;
        if (failures < 10) $display("FAIL step %0d: iu0=%0d exp %0d", i, iu0, held);
      end
    end
    checks++;
    if (n_latch == 0) failures++;
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
