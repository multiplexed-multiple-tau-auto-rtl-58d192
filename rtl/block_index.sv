// block_index: index s_c of the correlator block to execute in execution
// cycle c, for m = 2 (Eq. 7 of the scheduler).
//
// X_c = ((c XOR (c-1)) + 1) / 2 isolates the lowest set bit of c; its
// position is found without a priority encoder by AND-ing X_c with the
// masks of Eqs. B8-B12 (bit j of mask i is bit i of j) and taking each
// non-zero result as one bit of s_c (Eq. B13). For c = 0 the result is 0,
// as the paper defines s_0 = 0. Purely combinational.
//
// The 32-bit width and the masks follow the paper; the width is a
// parameter so that a testbench can exercise the counter wrap-around.
module block_index #(
  parameter int unsigned C_W = 32,
  parameter int unsigned S_W = $clog2(C_W)
) (
  input  logic [C_W-1:0] c,
  output logic [S_W-1:0] s_c
);

  logic [C_W-1:0] x_c;

  always_comb begin
    // (c XOR (c-1)) + 1 can carry out of C_W bits when c = 0; the shift
    // brings the carry back, matching ((c ^ (c-1)) + 1) / 2 exactly.
    logic [C_W:0] t;
    t   = {1'b0, c ^ (c - 1'b1)} + 1'b1;
    x_c = t[C_W:1];
    for (int unsigned i = 0; i < S_W; i++) begin
      logic [C_W-1:0] mask;
      for (int unsigned j = 0; j < C_W; j++) mask[j] = ((j >> i) & 1) != 0;
      s_c[i] = |(x_c & mask);
    end
    if (c == '0) s_c = '0;
  end

endmodule
