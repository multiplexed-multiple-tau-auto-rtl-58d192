// corrpe: multiplexed multiple-tau correlation processing element.
//
// With NCH = 2 (the default, CorrPE-2X) it computes the two
// auto-correlation functions xx, yy and the two cross-correlation functions
// xy, yx of two photon streams; with NCH = 1 (CorrPE-1) the
// auto-correlation of one stream. The whole multiple-tau correlator - S
// blocks of L correlation channels each, lag spacing doubling from block to
// block - is computed by a single correlator unit, time-shared over blocks
// and functions:
//   - photon_accumulator (one per input) integrates the counts between two
//     block-0 executions into I0(u);
//   - scheduler runs one slot per clock: NF function slots per execution
//     cycle c, block s_c of Eq. 7, empty slots where data are missing;
//   - state_ram holds every block's state; in each executed slot the
//     correlator_unit reads it, updates it and writes it back in the same
//     clock, including the hand-over words for block s+1;
//   - readout_unit copies and clears G, M, T after every execution of the
//     last block and streams the copy to the correlation DMA-FIFO;
//   - raw_packer forwards the raw photon trace to the raw-data DMA-FIFO.
//
// Timing: at a 20 MHz clock one slot is 50 ns, block 0 is executed every
// 2*NF clocks, giving a shortest lag of 400 ns for CorrPE-2X (100 ns for
// CorrPE-1); block s integrates 2^s such periods.
//
// Interface: apd_cnt carries the photons detected in the current clock per
// detector (x = index 0, y = index 1), already synchronised to clk. The
// DMA-FIFOs and the host are outside; they connect to the two valid/ready
// word streams. The stream format is described in readout_unit and
// raw_packer. Reset is synchronous, active low, and clears all state.
//
// The block structure (accumulators, scheduler, correlator unit, state
// memory, read-out, raw stream), the 20 MHz slot timing and the default
// sizes (S = 23 blocks of L = 8 channels, two inputs) are the paper's; the
// port handshakes and the 1-bit photon input are this design's.
module corrpe
  import corr_pkg::*;
#(
  parameter int unsigned NCH      = 2,    // 2: CorrPE-2X, 1: CorrPE-1
  parameter int unsigned S        = 23,   // correlator blocks (25 for CorrPE-1)
  parameter int unsigned L        = 8,    // correlation channels per block
  parameter int unsigned C_W      = 32,   // execution-cycle counter width
  parameter int unsigned C0_FIRST = 3,    // first cycle executing block 0
  parameter int unsigned CNT_W    = 1,    // photon count bits per clock
  localparam int unsigned NF   = (NCH == 2) ? 4 : 1,
  localparam int unsigned LM   = L + M_INT,
  localparam int unsigned F_W  = (NF > 1) ? $clog2(NF) : 1,
  localparam int unsigned S_W  = $clog2(C_W),
  localparam int unsigned SI_W = (S > 1) ? $clog2(S) : 1,
  localparam int unsigned CH_W = (NCH > 1) ? $clog2(NCH) : 1
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic [CNT_W-1:0] apd_cnt [NCH],
  // correlation read-out stream (to the DMA-FIFO)
  output logic             dma_valid,
  output gword_t           dma_data,
  input  logic             dma_ready,
  // raw photon stream (to the second DMA-FIFO)
  output logic             raw_valid,
  output logic [31:0]      raw_data,
  input  logic             raw_ready,
  output logic             raw_overflow
);

  // ---------------- scheduler
  logic [C_W-1:0] c;
  logic [F_W-1:0] slot;
  logic [S_W-1:0] exec_s;
  logic           exec_valid, latch, last_done;

  scheduler #(.NCH(NCH), .S(S), .L(L), .C_W(C_W), .C0_FIRST(C0_FIRST)) u_sched (
    .clk, .rst_n, .c, .slot, .exec_s, .exec_valid, .latch, .last_done
  );

  // ---------------- accumulators
  dword_t acc_iu0 [NCH];
  for (genvar ch = 0; ch < int'(NCH); ch++) begin : g_acc
    photon_accumulator #(.CNT_W(CNT_W)) u_acc (
      .clk, .rst_n, .cnt_in(apd_cnt[ch]), .latch, .iu0(acc_iu0[ch])
    );
  end

  // ---------------- slot decode
  logic [CH_W-1:0] ub, db;
  logic            upd, block0;
  logic [SI_W-1:0] blk;

  always_comb begin
    ub     = CH_W'(slot_ub(NCH, 32'(slot)));
    db     = CH_W'(slot_db(NCH, 32'(slot)));
    upd    = slot_upd(NCH, 32'(slot));
    block0 = (exec_s == '0);
    blk    = exec_valid ? SI_W'(exec_s) : '0;
  end

  // ---------------- state memory and correlator unit
  gword_t rd_g [L];
  dword_t rd_id [LM];
  dword_t rd_iu_mul, rd_iu_own, rd_iu_star, rd_m, rd_t;
  gword_t g_new [L];
  dword_t id_cu [LM];
  dword_t id_new [LM];
  dword_t iu_mul, iu_own, iu_star_new, m_new, t_new, ho_iu, ho_id;
  logic            dump_en;
  logic [SI_W-1:0] dump_s;
  gword_t dump_g [NF][L];
  dword_t dump_m [NCH];
  dword_t dump_t [NCH];
  logic            clr;

  state_ram #(.NCH(NCH), .S(S), .L(L)) u_ram (
    .clk, .rst_n,
    .rd_s(blk), .rd_f(slot), .rd_ub(ub), .rd_db(db),
    .rd_g, .rd_id, .rd_iu_mul, .rd_iu_own, .rd_iu_star, .rd_m, .rd_t,
    .wr_en(exec_valid), .wr_upd(upd), .wr_s(blk), .wr_f(slot), .wr_db(db),
    .wr_g(g_new), .wr_id(id_new), .wr_iu_star(iu_star_new), .wr_m(m_new),
    .wr_t(t_new), .wr_ho_iu(ho_iu), .wr_ho_id(ho_id),
    .dump_en, .dump_s, .dump_g, .dump_m, .dump_t
  );

  // Block 0 takes its undelayed intensity, and its newest delayed one,
  // straight from the accumulators.
  always_comb begin
    iu_mul = block0 ? acc_iu0[ub] : rd_iu_mul;
    iu_own = block0 ? acc_iu0[db] : rd_iu_own;
    id_cu  = rd_id;
    if (block0) id_cu[0] = acc_iu0[db];
    clr    = dump_en && (dump_s == blk);
  end

  correlator_unit #(.L(L)) u_cu (
    .iu_mul, .iu_own, .iu_star(rd_iu_star), .id(id_cu), .g(rd_g), .m(rd_m),
    .t(rd_t), .upd, .clr_g(clr), .clr_mt(clr),
    .g_new, .id_new, .iu_star_new, .m_new, .t_new, .ho_iu, .ho_id
  );

  // ---------------- read-out
  logic ro_busy, ro_deferred;

  readout_unit #(.NCH(NCH), .S(S), .L(L)) u_ro (
    .clk, .rst_n, .trigger(last_done), .slot0(slot == '0),
    .dump_en, .dump_s, .dump_g, .dump_m, .dump_t,
    .dma_valid, .dma_data, .dma_ready, .busy(ro_busy), .deferred(ro_deferred)
  );

  // ---------------- raw photon stream
  raw_packer #(.NCH(NCH), .CNT_W(CNT_W)) u_raw (
    .clk, .rst_n, .cnt_in(apd_cnt), .raw_valid, .raw_data, .raw_ready,
    .overflow(raw_overflow)
  );

endmodule
