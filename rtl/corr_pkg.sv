// corr_pkg: constants and helper functions shared by the multiplexed
// multiple-tau correlator (CorrPE).
//
// Word widths follow the implementation description: correlation channels
// G are 64-bit words, every other stored quantity (delayed and undelayed
// intensities, monitor M, execution count T) is a 32-bit word. The number
// of interleaved (hand-over) delayed channels is m = 2, the value the
// scheduler of Eq. 6/7 is built for, so it is a fixed constant here.
//
// The correlation-function slots of one execution cycle are numbered by
// c_corr. With two inputs (x = channel 0, y = channel 1) the four slots are
// xx, yy, xy, yx; with one input there is a single slot xx. For a slot the
// package tells which channel supplies the undelayed intensity I(u), which
// supplies the delayed intensities I(d), and whether the state of the
// delayed channel (shift register, I(u)*, M, T, hand-over) is advanced in
// that slot. A channel is advanced in the last slot that reads its delayed
// intensities, so all four slots of one cycle see the same delayed data;
// this ordering is a choice of this design.
package corr_pkg;

  localparam int unsigned D_W = 32;   // intensities, M, T
  localparam int unsigned G_W = 64;   // correlation channels
  localparam int unsigned M_INT = 2;  // interleaved (hand-over) channels m

  typedef logic [D_W-1:0] dword_t;
  typedef logic [G_W-1:0] gword_t;

  // Channel giving the undelayed intensity for correlation slot f.
  // G(a,b) accumulates I(d) of a times I(u) of b, i.e. <I_a(t) I_b(t+tau)>.
  function automatic int unsigned slot_ub(input int unsigned nch, input int unsigned f);
    if (nch == 1) return 0;
    case (f)
      0: return 0;   // xx
      1: return 1;   // yy
      2: return 1;   // xy: x delayed, y undelayed
      default: return 0; // yx: y delayed, x undelayed
    endcase
  endfunction

  // Channel giving the delayed intensities for correlation slot f.
  function automatic int unsigned slot_db(input int unsigned nch, input int unsigned f);
    if (nch == 1) return 0;
    case (f)
      0: return 0;
      1: return 1;
      2: return 0;
      default: return 1;
    endcase
  endfunction

  // True in the slot where the delayed channel's own state is advanced.
  function automatic logic slot_upd(input int unsigned nch, input int unsigned f);
    if (nch == 1) return 1'b1;
    return (f >= 2);
  endfunction

endpackage
