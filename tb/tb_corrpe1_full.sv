// tb_corrpe1_full: the single-input configuration CorrPE-1 at the size used
// for the auto-correlation measurements (S = 25 blocks of 8 channels,
// 100 ns shortest lag, 32-bit cycle counter), taken from reset until the
// last block has run once and the first read-out of all 25 blocks has been
// sent: about 319 million clocks. A photon arrives in every clock so the
// expected G, M and T of every block follow in closed form (corrpe_env).
module tb_corrpe1_full;
  logic d;
  int   c, f;

  corrpe_env #(.NCH(1), .S(25), .C_W(32), .CYCLES(0), .CONST_IN(1), .STALLS(0))
    env (.done(d), .checks(c), .failures(f));

  initial begin
    fork
      begin
        #1ns;
        wait (d);
        $display("TB_RESULT checks=%0d failures=%0d", c, f);
      end
      begin
        #(50ns * 600000000);
        $display("watchdog expired");
        $display("TB_RESULT checks=%0d failures=%0d", c + 1, f + 1);
      end
    join_any
    $finish;
  end
endmodule
