// ddc: digital down-conversion of the selected bins, the first half of the
// fine channelizer.
//
// Each selected bin value still rotates at the offset between its tone and
// the bin centre. The block multiplies it by the conjugate beat waveform from
// beat_lut, so the product stops rotating and can be accumulated coherently:
//     out = bin * beat,  beat in Q1.15, result rounded and saturated to 24 bits.
// It is time-division multiplexed: four complex multipliers (one per lane)
// serve all tones, one tone per lane and clock.
// The bin stream (in_*) is delayed by BEAT_LAT clocks inside the block to
// line up with the beat values, which beat_lut returns BEAT_LAT clocks after
// being addressed with the same in_q / in_frame. Output is registered: out_*
// follow in_* by BEAT_LAT + 1 clocks.
// The operation is the paper's; the widths and the rounding are this design's
// choice.
module ddc
  import readout_pkg::*;
#(
  parameter int N        = 1024,
  parameter int BEAT_LAT = 1
) (
  input  logic  clk,
  input  logic  rst,
  input  logic  in_valid,
  input  logic  in_sof,
  input  logic [$clog2(N/LANES)-1:0] in_q,
  input  bin_t  in_bins [LANES],
  input  beat_t beat [LANES],
  output logic  out_valid,
  output logic  out_sof,
  output logic [$clog2(N/LANES)-1:0] out_q,
  output bin_t  out_data [LANES]
);
  localparam int QW = $clog2(N / LANES);

  logic          d_valid [BEAT_LAT+1];
  logic          d_sof   [BEAT_LAT+1];
  logic [QW-1:0] d_q     [BEAT_LAT+1];
  bin_t          d_bins  [BEAT_LAT+1][LANES];

  assign d_valid[0] = in_valid;
  assign d_sof[0]   = in_sof;
  assign d_q[0]     = in_q;
  assign d_bins[0]  = in_bins;

  for (genvar i = 0; i < BEAT_LAT; i++) begin : g_dly
    always_ff @(posedge clk) begin
      if (rst) begin
        d_valid[i+1] <= 1'b0;
        d_sof[i+1]   <= 1'b0;
      end else begin
        d_valid[i+1] <= d_valid[i];
        d_sof[i+1]   <= d_sof[i];
      end
      d_q[i+1]    <= d_q[i];
      d_bins[i+1] <= d_bins[i];
    end
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      out_valid <= 1'b0;
      out_sof   <= 1'b0;
    end else begin
      out_valid <= d_valid[BEAT_LAT];
      out_sof   <= d_valid[BEAT_LAT] && d_sof[BEAT_LAT];
    end
    out_q <= d_q[BEAT_LAT];
  end

  for (genvar r = 0; r < LANES; r++) begin : g_mul
    bin_t b;
    logic signed [BIN_W+BEAT_W:0] p_re, p_im;
    assign b    = d_bins[BEAT_LAT][r];
    assign p_re = b.re * beat[r].re - b.im * beat[r].im;
    assign p_im = b.re * beat[r].im + b.im * beat[r].re;
    always_ff @(posedge clk) begin
      out_data[r].re <= sat_bin(rshift_round(64'(p_re), BEAT_W - 1));
      out_data[r].im <= sat_bin(rshift_round(64'(p_im), BEAT_W - 1));
    end
  end
endmodule
