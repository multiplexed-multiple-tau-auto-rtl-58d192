// scheduler: decides which correlator block, and which correlation
// function, the single correlator unit works on in each clock.
//
// Every clock is one execution slot. A slot counter c_corr runs over the
// NF correlation functions (NF = 4 for two inputs: xx, yy, xy, yx; NF = 1
// for one input); the execution-cycle counter c advances when c_corr wraps.
// All slots of one c work on the same block s_c, given by Eq. 7
// (block_index). Block 0 therefore runs in every other cycle c, block s
// in every 2^(s+1)-th.
//
// A slot is executed only if s_c < S and the block's input data exist:
// block 0 from c = C0_FIRST on (3 in the paper, Appendix C), block s > 0
// once block s-1 has been executed L+m times, so that its delayed-intensity
// shift register is full. This gives the first-execution cycles
// c = 19*2^s - 16 of Eq. 8 for L = 8, m = 2. Otherwise the slot is empty.
// The per-block execution counters used for that test are kept here and
// saturate at L+m; they are separate from the T words in the state memory,
// which the read-out clears.
//
// Outputs are registered-state decodes, valid in the same clock:
//   exec_valid/exec_s/slot  - what the correlator unit does now
//   latch     - last slot before a block-0 cycle: accumulators hand over
//   last_done - the last block S-1 finished its final slot (read-out trigger)
//
// Choices of this design: c is never executed at c = 0 (only reachable
// after the counter wraps; block index 0 there would run block 0 twice in
// a row), and the block-0 start condition is sticky so the wrap does not
// stop block 0.
module scheduler
  import corr_pkg::*;
#(
  parameter int unsigned NCH      = 2,   // inputs: 2 = CorrPE-2X, 1 = CorrPE-1
  parameter int unsigned S        = 23,  // number of correlator blocks
  parameter int unsigned L        = 8,   // correlation channels per block
  parameter int unsigned C_W      = 32,  // width of execution-cycle counter c
  parameter int unsigned C0_FIRST = 3,   // first cycle that executes block 0
  localparam int unsigned NF      = (NCH == 2) ? 4 : 1,
  localparam int unsigned F_W     = (NF > 1) ? $clog2(NF) : 1,
  localparam int unsigned S_W     = $clog2(C_W),
  localparam int unsigned FILL_W  = $clog2(L + M_INT + 1)
) (
  input  logic           clk,
  input  logic           rst_n,
  output logic [C_W-1:0] c,
  output logic [F_W-1:0] slot,        // c_corr
  output logic [S_W-1:0] exec_s,      // s_c
  output logic           exec_valid,  // slot executes (not empty)
  output logic           latch,
  output logic           last_done
);

  logic [FILL_W-1:0] fill [S];
  logic              started;
  logic [S_W-1:0]    s_c;
  logic              last_slot;

  block_index #(.C_W(C_W), .S_W(S_W)) u_idx (.c(c), .s_c(s_c));

  assign exec_s    = s_c;
  assign last_slot = (slot == F_W'(NF - 1));
  assign latch     = last_slot && !c[0];

  always_comb begin
    exec_valid = 1'b0;
    if (c != '0 && 32'(s_c) < S) begin
      if (s_c == '0) exec_valid = started || (c >= C_W'(C0_FIRST));
      else           exec_valid = (fill[s_c - 1'b1] == FILL_W'(L + M_INT));
    end
  end

  assign last_done = exec_valid && last_slot && (32'(s_c) == S - 1);

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      c       <= '0;
      slot    <= '0;
      started <= 1'b0;
      for (int i = 0; i < int'(S); i++) fill[i] <= '0;
    end else begin
      if (last_slot) begin
        slot <= '0;
        c    <= c + 1'b1;
        if (exec_valid) begin
          if (s_c == '0) started <= 1'b1;
          if (fill[s_c] != FILL_W'(L + M_INT)) fill[s_c] <= fill[s_c] + 1'b1;
        end
      end else begin
        slot <= slot + 1'b1;
      end
    end
  end

endmodule
