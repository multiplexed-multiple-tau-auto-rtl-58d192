// raw_packer: packs the raw photon streams, one sample per detector every
// 50 ns clock, into 32-bit words for the raw-data DMA-FIFO, so that the
// host receives the photon trace at full time resolution next to the
// correlation functions.
//
// Each word holds SPW = 32 / (NCH*CNT_W) consecutive clocks; sample i of
// channel ch occupies bits [(i*NCH+ch)*CNT_W +: CNT_W], oldest sample in
// the lowest bits. A full word is offered with raw_valid for one clock,
// the clock after its last sample. If the FIFO is not ready then, the word
// is dropped and `overflow` stays set until reset, so a gap in the trace
// is never silent.
//
// The paper only states that a second DMA-FIFO carries the raw photon
// streams at 50 ns resolution; the packing, the word format and the
// overflow flag are this design's choices.
module raw_packer #(
  parameter int unsigned NCH   = 2,
  parameter int unsigned CNT_W = 1,
  localparam int unsigned SPW  = 32 / (NCH * CNT_W),
  localparam int unsigned I_W  = (SPW > 1) ? $clog2(SPW) : 1
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic [CNT_W-1:0]     cnt_in [NCH],
  output logic                 raw_valid,
  output logic [31:0]          raw_data,
  input  logic                 raw_ready,
  output logic                 overflow
);

  logic [31:0]    shreg;
  logic [I_W-1:0] idx;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      shreg     <= '0;
      idx       <= '0;
      raw_valid <= 1'b0;
      raw_data  <= '0;
      overflow  <= 1'b0;
    end else begin
      logic [31:0] nxt;
      nxt = shreg;
      for (int ch = 0; ch < int'(NCH); ch++)
        nxt[(32'(idx) * NCH + ch) * CNT_W +: CNT_W] = cnt_in[ch];
      if (raw_valid && !raw_ready) overflow <= 1'b1;
      if (32'(idx) == SPW - 1) begin
        raw_valid <= 1'b1;
        raw_data  <= nxt;
        shreg     <= '0;
        idx       <= '0;
      end else begin
        raw_valid <= 1'b0;
        shreg     <= nxt;
        idx       <= idx + 1'b1;
      end
    end
  end

endmodule
