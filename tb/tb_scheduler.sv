// tb_scheduler: checks the scheduler against the execution order printed in
// the paper's TABLE I (CorrPE-1, c = 1..36), against the recursive
// definition of s_c (Eq. 6) over many cycles, against the first-execution
// cycles of Eq. 8 and against the four-slot order of TABLE II (CorrPE-2X).
// It also checks the accumulator latch timing and the read-out trigger.
module tb_scheduler;
  localparam int unsigned S1 = 6;
  localparam int unsigned S2 = 5;

  logic clk = 0, rst_n = 0;
  always #25 clk = ~clk;

  int checks = 0, failures = 0;

  // CorrPE-1 instance (one slot per cycle)
  logic [31:0] c1;
  logic [0:0]  slot1;
  logic [4:0]  s1;
  logic        ev1, latch1, last1;
  scheduler #(.NCH(1), .S(S1)) u1 (.clk, .rst_n, .c(c1), .slot(slot1), .exec_s(s1),
                                   .exec_valid(ev1), .latch(latch1), .last_done(last1));
  // CorrPE-2X instance (four slots per cycle)
  logic [31:0] c2;
  logic [1:0]  slot2;
  logic [4:0]  s2;
  logic        ev2, latch2, last2;
  scheduler #(.NCH(2), .S(S2)) u2 (.clk, .rst_n, .c(c2), .slot(slot2), .exec_s(s2),
                                   .exec_valid(ev2), .latch(latch2), .last_done(last2));

  // TABLE I: s_c and executed block for c = 1..36 (-1 = empty execution)
  int tab_s [36] = '{0,1,0,2,0,1,0,3,0,1,0,2, 0,1,0,4,0,1,0,2,0,1,0,3, 0,1,0,2,0,1,0,5,0,1,0,2};
  int tab_e [36] = '{-1,-1,0,-1,0,-1,0,-1,0,-1,0,-1, 0,-1,0,-1,0,-1,0,-1,0,1,0,-1,
                     0,1,0,-1,0,1,0,-1,0,-1,0,-1};

  function automatic int s_rec(longint c);   // Eq. 6
    if (c == 0 || (c % 2) == 1) return 0;
    return s_rec(c / 2) + 1;
  endfunction

  // First cycle of block s: the first cycle with s trailing zeros after
  // block s-1 has run L+m = 10 times (block s-1 runs every 2^s cycles).
  function automatic int first_rule(int s);
    int c;
    if (s == 0) return 3;
    c = first_rule(s - 1) + 9 * (1 << s) + 1;
    while (s_rec(c) != s) c++;
    return c;
  endfunction

  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL %s", what); end
  endtask

  int  first1 [S1];
  int  execs1 [S1];
  int  n_last1, n_latch1, n_last2;
  int  first2 [S2];

  initial begin
    foreach (first1[i]) first1[i] = -1;
    foreach (execs1[i]) execs1[i] = 0;
    foreach (first2[i]) first2[i] = -1;
    n_last1 = 0; n_latch1 = 0; n_last2 = 0;
    repeat (2) @(posedge clk);
    @(negedge clk) rst_n = 1;
    // sample in the middle of each clock
    for (int clkn = 0; clkn < 4 * 1300; clkn++) begin
      // ---- CorrPE-1: one cycle per clock
      if (clkn < 1300) begin
        automatic int c = clkn;
        chk(c1 == 32'(c), "CorrPE-1 cycle counter");
        chk(int'(s1) == s_rec(c), $sformatf("s_c (Eq. 6) at c=%0d: %0d", c, s1));
        if (c >= 1 && c <= 36) begin
          chk(int'(s1) == tab_s[c-1], $sformatf("TABLE I s_c at c=%0d", c));
          // TABLE I prints "-" at c = 34, although block 1 is full from c = 22
          // on and Eq. 6 gives s_34 = 1; the fill rule of the text is followed.
          if (c != 34)
            chk((ev1 ? int'(s1) : -1) == tab_e[c-1], $sformatf("TABLE I executed block at c=%0d", c));
          else
            chk(ev1 && s1 == 1, "block 1 executed at c=34");
        end
        chk(latch1 == (c % 2 == 0), "CorrPE-1 latch before block-0 cycles");
        if (ev1) begin
          if (first1[s1] < 0) begin
            first1[s1] = c;
            chk(c == first_rule(s1), $sformatf("first execution of block %0d at c=%0d", s1, c));
            // Eq. 8 itself only names a cycle of block s for s <= 3
            if (s1 <= 3) chk(c == 19 * (1 << s1) - 16, $sformatf("Eq. 8 block %0d", s1));
          end
          execs1[s1]++;
        end
        chk(last1 == (ev1 && s1 == S1 - 1), "read-out trigger");
        if (last1) n_last1++;
      end
      // ---- CorrPE-2X: four slots per cycle
      begin
        automatic int c = clkn / 4, f = clkn % 4;
        chk(c2 == 32'(c) && slot2 == 2'(f), "CorrPE-2X cycle/slot counters");
        chk(int'(s2) == s_rec(c), "CorrPE-2X s_c");
        chk(latch2 == (f == 3 && c % 2 == 0), "CorrPE-2X latch");
        // TABLE II: c = 30 -> block 1, c = 31 -> block 0, c = 32 -> empty
        if (c == 30) chk(ev2 && s2 == 1, "TABLE II c=30");
        if (c == 31) chk(ev2 && s2 == 0, "TABLE II c=31");
        if (c == 32) chk(!ev2 && s2 == 5, "TABLE II c=32");
        if (ev2 && f == 0 && first2[s2] < 0) begin
          first2[s2] = c;
          chk(c == first_rule(s2), $sformatf("CorrPE-2X first execution of block %0d", s2));
        end
        chk(last2 == (ev2 && f == 3 && s2 == S2 - 1), "CorrPE-2X read-out trigger");
        if (last2) n_last2++;
      end
      @(negedge clk);
    end
    foreach (first1[i]) chk(first1[i] >= 0, $sformatf("block %0d reached", i));
    chk(n_last1 > 0 && n_last2 > 0, "read-out triggered");
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
