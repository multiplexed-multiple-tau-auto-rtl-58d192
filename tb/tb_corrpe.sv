// tb_corrpe: end-to-end test of the correlator at reduced size.
//
// Two environments run side by side: CorrPE-2X (two inputs, two auto- and
// two cross-correlation functions, S = 6 blocks) and CorrPE-1 (one input,
// S = 6). Both use an 8-bit execution-cycle counter so that its wrap-around
// is exercised. See corrpe_env for what is checked.
module tb_corrpe;
  logic d2, d1;
  int   c2, f2, c1, f1;
  int   cycles = 0;

  corrpe_env #(.NCH(2), .S(6), .C_W(8), .CYCLES(1500), .EXPECT_WRAP(1)) env2 (.done(d2), .checks(c2), .failures(f2));
  corrpe_env #(.NCH(1), .S(6), .C_W(8), .CYCLES(3000), .EXPECT_WRAP(1)) env1 (.done(d1), .checks(c1), .failures(f1));

  initial begin
    fork
      begin
        #1ns;
        wait (d2 && d1);
        $display("TB_RESULT checks=%0d failures=%0d", c2 + c1, f2 + f1);
      end
      begin
        #(50ns * 200000);
        $display("watchdog expired");
        $display("TB_RESULT checks=%0d failures=%0d", c2 + c1 + 1, f2 + f1 + 1);
      end
    join_any
    $finish;
  end
endmodule
