// state_ram: the FPGA-RAM holding the state of all S correlator blocks.
//
// Per input channel and block s: the L+m delayed intensities I(d)_{s,l},
// the undelayed intensity I(u)_s and its previous value I(u)*_s, the
// monitor M_s and the execution count T_s (32-bit words). Per correlation
// function and block: the L correlation channels G_{s,l} (64-bit words).
// This mirrors the memory map of the implementation (one memory per G
// lane, per I(d) lane, for I(u)/I(u)* and for M/T), but is written as
// arrays with asynchronous read so that the read-modify-write of one
// execution fits in one clock; a block-RAM version would need one more
// pipeline stage and forwarding of the hand-over words.
//
// Ports, all sampled at the rising clock edge:
//   read   (combinational) - state of block rd_s for slot rd_f: G row of the
//                            function, delayed channel rd_db, I(u) of rd_ub
//   write  (wr_en)         - new G row; if wr_upd also the delayed channel's
//                            I(d), I(u)*, M, T and, if wr_s < S-1, the
//                            hand-over words I(u)_{s+1}, I(d)_{s+1,0}
//   dump   (dump_en)       - G, M and T of block dump_s for all functions and
//                            channels are shown on dump_* and set to zero;
//                            a write to the same word in the same clock wins
//                            (the writer has already treated it as zero)
// Synchronous active-low reset clears everything (the paper's monitor
// channel starts at 0; the rest is this design's choice).
module state_ram
  import corr_pkg::*;
#(
  parameter int unsigned NCH = 2,
  parameter int unsigned S   = 23,
  parameter int unsigned L   = 8,
  localparam int unsigned NF  = (NCH == 2) ? 4 : 1,
  localparam int unsigned LM  = L + M_INT,
  localparam int unsigned SI_W = (S > 1) ? $clog2(S) : 1,
  localparam int unsigned FI_W = (NF > 1) ? $clog2(NF) : 1,
  localparam int unsigned CH_W = (NCH > 1) ? $clog2(NCH) : 1
) (
  input  logic            clk,
  input  logic            rst_n,
  // correlator read port
  input  logic [SI_W-1:0] rd_s,
  input  logic [FI_W-1:0] rd_f,
  input  logic [CH_W-1:0] rd_ub,
  input  logic [CH_W-1:0] rd_db,
  output gword_t          rd_g   [L],
  output dword_t          rd_id  [LM],
  output dword_t          rd_iu_mul,
  output dword_t          rd_iu_own,
  output dword_t          rd_iu_star,
  output dword_t          rd_m,
  output dword_t          rd_t,
  // correlator write port
  input  logic            wr_en,
  input  logic            wr_upd,
  input  logic [SI_W-1:0] wr_s,
  input  logic [FI_W-1:0] wr_f,
  input  logic [CH_W-1:0] wr_db,
  input  gword_t          wr_g   [L],
  input  dword_t          wr_id  [LM],
  input  dword_t          wr_iu_star,
  input  dword_t          wr_m,
  input  dword_t          wr_t,
  input  dword_t          wr_ho_iu,
  input  dword_t          wr_ho_id,
  // read-out dump port
  input  logic            dump_en,
  input  logic [SI_W-1:0] dump_s,
  output gword_t          dump_g [NF][L],
  output dword_t          dump_m [NCH],
  output dword_t          dump_t [NCH]
);

  gword_t g_mem   [S][NF][L];
  dword_t id_mem  [NCH][S][LM];
  dword_t iu_mem  [NCH][S];
  dword_t ius_mem [NCH][S];
  dword_t m_mem   [NCH][S];
  dword_t t_mem   [NCH][S];

  always_comb begin
    rd_g       = g_mem[rd_s][rd_f];
    rd_id      = id_mem[rd_db][rd_s];
    rd_iu_mul  = iu_mem[rd_ub][rd_s];
    rd_iu_own  = iu_mem[rd_db][rd_s];
    rd_iu_star = ius_mem[rd_db][rd_s];
    rd_m       = m_mem[rd_db][rd_s];
    rd_t       = t_mem[rd_db][rd_s];
    dump_g     = g_mem[dump_s];
    for (int ch = 0; ch < int'(NCH); ch++) begin
      dump_m[ch] = m_mem[ch][dump_s];
      dump_t[ch] = t_mem[ch][dump_s];
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      for (int s = 0; s < int'(S); s++) begin
        for (int f = 0; f < int'(NF); f++)
          for (int l = 0; l < int'(L); l++) g_mem[s][f][l] <= '0;
        for (int ch = 0; ch < int'(NCH); ch++) begin
          for (int l = 0; l < int'(LM); l++) id_mem[ch][s][l] <= '0;
          iu_mem[ch][s]  <= '0;
          ius_mem[ch][s] <= '0;
          m_mem[ch][s]   <= '0;
          t_mem[ch][s]   <= '0;
        end
      end
    end else begin
      if (dump_en) begin
        for (int f = 0; f < int'(NF); f++)
          for (int l = 0; l < int'(L); l++) g_mem[dump_s][f][l] <= '0;
        for (int ch = 0; ch < int'(NCH); ch++) begin
          m_mem[ch][dump_s] <= '0;
          t_mem[ch][dump_s] <= '0;
        end
      end
      if (wr_en) begin
        g_mem[wr_s][wr_f] <= wr_g;
        if (wr_upd) begin
          id_mem[wr_db][wr_s]  <= wr_id;
          ius_mem[wr_db][wr_s] <= wr_iu_star;
          m_mem[wr_db][wr_s]   <= wr_m;
          t_mem[wr_db][wr_s]   <= wr_t;
          if (32'(wr_s) < S - 1) begin
            iu_mem[wr_db][wr_s + 1'b1]    <= wr_ho_iu;
            id_mem[wr_db][wr_s + 1'b1][0] <= wr_ho_id;
          end
        end
      end
    end
  end

endmodule
