// comb_lut: frequency-comb waveform memory that drives the D/A converter.
//
// The processor writes an arbitrary complex waveform of DEPTH samples (the sum
// of all probe tones, computed in software) one sample at a time through
// wr_en/wr_addr/wr_data. When play_en is high the block reads LANES = 4
// consecutive samples per clock and streams them to the D/A as one parallel
// word, wrapping from the last address back to address 0. Because the
// waveform is built with every tone completing an integer number of cycles in
// DEPTH samples, the wrap-around is phase continuous. Sample n is stored in
// lane n mod 4 at word n div 4, so each lane is a memory of DEPTH/4 words with
// one write and one read port.
// Timing: dac_valid and dac_data follow play_en by one clock (registered
// read). The word index restarts at 0 whenever play_en is low, so the comb
// phase is known relative to the first clock of play_en.
// From the paper: the table size of f_s/df = 2^20 samples (about 1 million,
// for 500 Hz tone resolution at 512 MS/s), phase continuity on wrap-around and
// four samples per fabric clock. The paper places this table in external
// DDR4 memory; here it is an on-chip array of the same size and read rate
// (the DDR4 controller is vendor logic), which is this design's choice.
module comb_lut
  import readout_pkg::*;
#(
  parameter int DEPTH = 1 << 20          // samples in one waveform period
) (
  input  logic  clk,
  input  logic  rst,
  // processor write port, one sample per write
  input  logic  wr_en,
  input  logic [$clog2(DEPTH)-1:0] wr_addr,
  input  samp_t wr_data,
  // playback
  input  logic  play_en,
  output logic  dac_valid,
  output samp_t dac_data [LANES]
);
  localparam int WORDS = DEPTH / LANES;
  localparam int AW    = $clog2(WORDS);

  logic [AW-1:0] rptr;

  always_ff @(posedge clk) begin
    if (rst) begin
      rptr      <= '0;
      dac_valid <= 1'b0;
    end else begin
      dac_valid <= play_en;
      if (play_en) rptr <= rptr + 1'b1;    // wraps at WORDS (power of two)
      else         rptr <= '0;
    end
  end

  for (genvar l = 0; l < LANES; l++) begin : g_lane
    samp_t mem [WORDS];
    always_ff @(posedge clk) begin
      if (wr_en && wr_addr[1:0] == 2'(l)) mem[wr_addr[$clog2(DEPTH)-1:2]] <= wr_data;
      if (play_en) dac_data[l] <= mem[rptr];
    end
  end

  initial assert (LANES == 4 && DEPTH == (1 << $clog2(DEPTH)))
    else $error("comb_lut assumes LANES == 4 and a power-of-two DEPTH");
endmodule
