// pfb: the coarse channelizer, an N-channel polyphase filterbank.
//
// pfb_fir weights and sums TAPS frames of N samples per branch; fft_par4
// transforms each weighted frame into N complex bins of width fsamp/N (with
// N = 1024 and fsamp = 512 MS/s complex, 500 kHz bins). Input: LANES = 4
// samples per clock from the data converter. Output: four bins per clock,
// bins k', k'+N/4, k'+N/2, k'+3N/4 on out_bins[0..3], with k' = out_kp in
// bit-reversed order; one frame of N bins every N/4 clocks. Latency: one
// clock in the FIR plus the FFT latency (see fft_par4).
// The paper names the block "Polyphase Filterbank N=1024" (Fig. 5) and
// describes the coarse stage as an N-point FFT; the split shown here is the
// usual PFB structure, with the FIR details being this design's choice.
module pfb
  import readout_pkg::*;
#(
  parameter int N    = 1024,
  parameter int TAPS = 4
) (
  input  logic  clk,
  input  logic  rst,
  input  logic  in_valid,
  input  samp_t in_data [LANES],
  output logic  out_valid,
  output logic  out_sof,
  output logic  out_frame_ok,
  output logic [$clog2(N/LANES)-1:0] out_kp,
  output bin_t  out_bins [LANES]
);
  logic fir_valid;
  bin_t fir_data [LANES];

  pfb_fir #(.N(N), .TAPS(TAPS)) u_fir (
    .clk, .rst, .in_valid, .in_data,
    .out_valid(fir_valid), .out_data(fir_data)
  );

  fft_par4 #(.N(N)) u_fft (
    .clk, .rst,
    .in_valid(fir_valid), .in_data(fir_data),
    .out_valid, .out_sof, .out_frame_ok, .out_kp, .out_bins
  );
endmodule
