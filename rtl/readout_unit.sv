// readout_unit: copies the correlation state to the read-out RAM and
// streams it to the DMA-FIFO.
//
// After the last block S-1 has been executed (`trigger`), the unit walks
// over the blocks s = 0..S-1. For each block it takes, in one clock, the G
// rows of all NF correlation functions and the M and T words of all NCH
// channels into the read-out RAM, while the state memory clears them
// (dump_en/dump_s). The copy is taken only in slot 0 of an execution cycle,
// before that cycle's slots have touched the block, so each copy holds
// exactly the executions up to some cycle c and none of the next: the
// host can add successive copies without losing or repeating a term.
//
// When all blocks are copied the read-out RAM is sent as 64-bit words,
// one per accepted transfer (dma_valid && dma_ready), block by block:
//   for s = 0..S-1:  G_{s,0..L-1} of function 0, ..., of function NF-1,
//                    then {M_s, T_s} of channel 0, ..., channel NCH-1
// (M in bits 63:32, T in 31:0) - S*(NF*L+NCH) words per read-out.
// A trigger that arrives while a copy or a transfer is still running is
// remembered and served afterwards; since the state memory keeps
// accumulating meanwhile, nothing is lost, the read-out is only later
// (`deferred` pulses when that happens).
//
// The paper gives the function: copy after each execution of the last
// block to an intermediate RAM (9 extra 64-bit memories: 8 G lanes and
// one for M/T), reset G, M and T, send to the DMA-FIFO. The word order, the
// slot-0 timing and the deferral are choices of this design.
module readout_unit
  import corr_pkg::*;
#(
  parameter int unsigned NCH = 2,
  parameter int unsigned S   = 23,
  parameter int unsigned L   = 8,
  localparam int unsigned NF   = (NCH == 2) ? 4 : 1,
  localparam int unsigned NW   = NF * L + NCH,          // words per block
  localparam int unsigned SI_W = (S > 1) ? $clog2(S) : 1,
  localparam int unsigned K_W  = $clog2(NW + 1)
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            trigger,     // last block executed
  input  logic            slot0,       // this clock is slot 0 of a cycle c
  output logic            dump_en,
  output logic [SI_W-1:0] dump_s,
  input  gword_t          dump_g [NF][L],
  input  dword_t          dump_m [NCH],
  input  dword_t          dump_t [NCH],
  output logic            dma_valid,
  output gword_t          dma_data,
  input  logic            dma_ready,
  output logic            busy,
  output logic            deferred
);

  typedef enum logic [1:0] {RO_IDLE, RO_DUMP, RO_STREAM} ro_state_t;

  ro_state_t       state;
  logic            pending;
  logic [SI_W-1:0] si;       // block being copied or sent
  logic [K_W-1:0]  k;        // word within the block while sending

  gword_t ro_g  [S][NF][L];  // read-out RAM, G lanes
  gword_t ro_mt [S][NCH];    // read-out RAM, {M, T}

  assign busy     = (state != RO_IDLE);
  assign deferred = trigger && (busy || pending);
  assign dump_en  = (state == RO_DUMP) && slot0;
  assign dump_s   = si;
  assign dma_valid = (state == RO_STREAM);

  always_comb begin
    if (32'(k) < NF * L) dma_data = ro_g[si][32'(k) / L][32'(k) % L];
    else                 dma_data = ro_mt[si][32'(k) - NF * L];
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state   <= RO_IDLE;
      pending <= 1'b0;
      si      <= '0;
      k       <= '0;
    end else begin
      if (trigger) pending <= 1'b1;
      unique case (state)
        RO_IDLE: if (pending) begin
          state   <= RO_DUMP;
          pending <= trigger;
          si      <= '0;
        end
        RO_DUMP: if (slot0) begin
          ro_g[si] <= dump_g;
          for (int ch = 0; ch < int'(NCH); ch++) ro_mt[si][ch] <= {dump_m[ch], dump_t[ch]};
          if (32'(si) == S - 1) begin
            state <= RO_STREAM;
            si    <= '0;
            k     <= '0;
          end else begin
            si <= si + 1'b1;
          end
        end
        RO_STREAM: if (dma_ready) begin
          if (32'(k) == NW - 1) begin
            k <= '0;
            if (32'(si) == S - 1) state <= RO_IDLE;
            else si <= si + 1'b1;
          end else begin
            k <= k + 1'b1;
          end
        end
        default: state <= RO_IDLE;
      endcase
    end
  end

endmodule
