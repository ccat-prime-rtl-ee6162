// beat_lut: the beat-frequency lookup table of the fine channelizer.
//
// For tone slot s and frame t it holds the precomputed conjugate beat
//     e^{-j 2 pi (f_tone(s) - f_bin(s)) t T_frame}
// as 16-bit I/Q in Q1.15, written by the processor. Frames repeat every
// BEAT_FRAMES frames: with a comb memory of N*BEAT_FRAMES samples every tone
// lies on a grid of fsamp/(N*BEAT_FRAMES), so every beat waveform is periodic
// in BEAT_FRAMES frames and the table is exact.
// Storage: one memory per lane (tone slot s = 4*q + r lives in lane r) of
// BEAT_FRAMES*N/4 words addressed by {t mod BEAT_FRAMES, q}.
// Write port: wr_addr = {t, s} (log2(BEAT_FRAMES) + log2(N) bits), wr_data =
// {I, Q}. Read port: rd_frame, rd_q presented with rd_en; rd_beat[r] holds the
// entry of slot 4*rd_q + r one clock later.
// The paper names this table and says what it holds; its length (one comb
// period, 1024 frames of the 2^20-sample comb) and the layout are this
// design's choice.
module beat_lut
  import readout_pkg::*;
#(
  parameter int N           = 1024,
  parameter int BEAT_FRAMES = 1024,
  parameter int FW          = 16
) (
  input  logic clk,
  input  logic wr_en,
  input  logic [$clog2(BEAT_FRAMES)+$clog2(N)-1:0] wr_addr,
  input  beat_t wr_data,
  input  logic rd_en,
  input  logic [FW-1:0] rd_frame,
  input  logic [$clog2(N/LANES)-1:0] rd_q,
  output beat_t rd_beat [LANES]
);
  localparam int NL = N / LANES;
  localparam int QW = $clog2(NL);
  localparam int TW = $clog2(BEAT_FRAMES);
  localparam int SW = $clog2(N);

  logic [TW-1:0] wr_t, rd_t;
  logic [QW-1:0] wr_q;
  logic [1:0]    wr_lane;
  assign wr_t    = wr_addr[SW +: TW];
  assign wr_q    = wr_addr[2 +: QW];
  assign wr_lane = wr_addr[1:0];
  assign rd_t    = rd_frame[TW-1:0];

  for (genvar r = 0; r < LANES; r++) begin : g_lane
    beat_t mem [BEAT_FRAMES * NL];
    always_ff @(posedge clk) begin
      if (wr_en && wr_lane == 2'(r)) mem[{wr_t, wr_q}] <= wr_data;
      if (rd_en) rd_beat[r] <= mem[{rd_t, rd_q}];
    end
  end

  initial assert (LANES == 4 && FW >= TW) else $error("beat_lut: LANES must be 4, FW >= log2(BEAT_FRAMES)");
endmodule
