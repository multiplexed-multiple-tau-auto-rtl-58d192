// tb_corrpe_full: the correlator at its default size (CorrPE-2X, S = 23
// blocks of 8 channels, 32-bit cycle counter) taken through one complete
// operation: from reset until the last block has run and the first
// read-out of all 23 blocks has been sent. A photon arrives in every
// clock, so the expected G, M and T of every block follow in closed form
// (see corrpe_env); the FIFOs never stall.
module tb_corrpe_full;
  logic d;
  int   c, f;

  corrpe_env #(.NCH(2), .S(23), .C_W(32), .CYCLES(0), .CONST_IN(1), .DEFAULTS(1),
               .STALLS(0)) env (.done(d), .checks(c), .failures(f));

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
