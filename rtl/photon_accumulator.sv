// photon_accumulator: integrates the photon counts of one detector between
// two executions of correlator block 0 and holds the sum as I0(u).
//
// Every clock (one 50 ns sampling period) the count of photons detected in
// that period, `cnt_in`, is added to a running sum. When the scheduler
// raises `latch` (the last clock before block 0 is executed), the running
// sum including this clock's count moves to `iu0` and the running sum
// restarts at zero. `iu0` stays constant until the next latch, so every
// correlation slot of a block-0 execution sees the same value.
//
// Timing: `iu0` is valid from the clock after `latch` and covers exactly
// the clocks since the previous latch. The paper gives the function
// ("an accumulator that is summing up the photon counts detected by the
// APD between two executions of this block"); the latch-and-hold structure
// and the synchronous active-low reset are choices of this design. The sum
// wraps at 32 bits.
module photon_accumulator
  import corr_pkg::*;
#(
  parameter int unsigned CNT_W = 1    // bits of the per-clock photon count
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic [CNT_W-1:0] cnt_in,    // photons detected in this clock
  input  logic             latch,     // hand the running sum over to iu0
  output dword_t           iu0        // sum over the last integration window
);

  dword_t run_sum;
  dword_t next_sum;

  always_comb next_sum = run_sum + dword_t'(cnt_in);

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      run_sum <= '0;
      iu0     <= '0;
    end else if (latch) begin
      iu0     <= next_sum;
      run_sum <= '0;
    end else begin
      run_sum <= next_sum;
    end
  end

endmodule
