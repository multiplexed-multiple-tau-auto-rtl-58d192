// correlator_unit: one linear correlator block, used in turn for every
// block s and every correlation function (FIG. 3 of the design).
//
// Given the stored state of block s it computes the new state in one
// combinational pass, so one execution fits in one clock:
//   (3) G_l  += I(u) * I(d)_l        for the L correlation channels
// and, when `upd` is set (the slot that advances the delayed channel):
//   (1) I(u)* <- I(u)_own,  hand-over I(u)_{s+1} = I(u)_own + I(u)*
//   (2) I(d)_{l+1} <- I(d)_l, hand-over I(d)_{s+1,0} = I(d)_L + I(d)_{L+1}
//   (4) T += 1
//   (5) M += I(u)_own
// `iu_mul` is the undelayed intensity multiplied in this slot (channel b of
// G(a,b)); `iu_own` is the undelayed intensity of the delayed channel a,
// which drives M, I(u)* and the hand-over. For auto-correlation both are
// the same. Position 0 of the delayed register already holds the newest
// delayed value (written by the hand-over of block s-1, or I0(u) for
// block 0), so channel l carries lag l in units of this block.
// `clr_g`/`clr_mt` make the old G resp. M and T count as zero: the read-out
// clears the same block in this clock. Arithmetic wraps at its width
// (64 bits for G, 32 bits otherwise).
//
// The five update steps, the two interleaved channels and the hand-over
// sums are the paper's. That channel 0 of block 0 has lag 0 follows its
// lag formula (Eq. 4). Doing the step combinationally in one clock,
// writing the hand-over after every run (block s+1 only ever reads the one
// written after the second run) and the clear inputs are this design's.
module correlator_unit
  import corr_pkg::*;
#(
  parameter int unsigned L = 8,
  localparam int unsigned LM = L + M_INT
) (
  input  dword_t iu_mul,
  input  dword_t iu_own,
  input  dword_t iu_star,
  input  dword_t id   [LM],
  input  gword_t g    [L],
  input  dword_t m,
  input  dword_t t,
  input  logic   upd,
  input  logic   clr_g,
  input  logic   clr_mt,
  output gword_t g_new   [L],
  output dword_t id_new  [LM],
  output dword_t iu_star_new,
  output dword_t m_new,
  output dword_t t_new,
  output dword_t ho_iu,      // next value of I(u)_{s+1}
  output dword_t ho_id       // next value of I(d)_{s+1,0}
);

  always_comb begin
    for (int l = 0; l < int'(L); l++)
      g_new[l] = (clr_g ? gword_t'(0) : g[l]) + gword_t'(iu_mul) * gword_t'(id[l]);

    ho_iu = iu_own + iu_star;
    ho_id = '0;
    for (int l = int'(L); l < int'(LM); l++) ho_id = ho_id + id[l];

    if (upd) begin
      id_new[0] = id[0];
      for (int l = 1; l < int'(LM); l++) id_new[l] = id[l-1];
      iu_star_new = iu_own;
      m_new       = (clr_mt ? dword_t'(0) : m) + iu_own;
      t_new       = (clr_mt ? dword_t'(0) : t) + 1'b1;
    end else begin
      id_new      = id;
      iu_star_new = iu_star;
      m_new       = clr_mt ? dword_t'(0) : m;
      t_new       = clr_mt ? dword_t'(0) : t;
    end
  end

endmodule
