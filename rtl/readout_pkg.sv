// readout_pkg: types, sizes and constant tables shared by the KID readout
// gateware.
//
// The datapath moves LANES = 4 complex samples per fabric clock, the width of
// one read from the comb memory. Samples from the data converters are 16-bit
// I/Q, channelizer bins are BIN_W-bit I/Q, beat-waveform entries are 16-bit
// I/Q in Q1.15 and accumulated detector values are ACC_W-bit I/Q.
// NFFT = 1024 and the four-chain layout come from the paper; every width here
// is this design's own choice, because the paper gives no word widths.
package readout_pkg;

  localparam int LANES    = 4;      // complex samples per fabric clock
  localparam int SAMP_W   = 16;     // data-converter sample width (I and Q)
  localparam int BIN_W    = 24;     // FFT / bin-select / DDC width (I and Q)
  localparam int BEAT_W   = 16;     // beat waveform width, Q1.15
  localparam int ACC_W    = 32;     // accumulator width (I and Q)
  localparam int TW_W     = 18;     // twiddle and window width, Q1.16
  localparam int TW_FRAC  = 16;

  typedef struct packed {
    logic signed [SAMP_W-1:0] re;
    logic signed [SAMP_W-1:0] im;
  } samp_t;

  typedef struct packed {
    logic signed [BIN_W-1:0] re;
    logic signed [BIN_W-1:0] im;
  } bin_t;

  typedef struct packed {
    logic signed [BEAT_W-1:0] re;
    logic signed [BEAT_W-1:0] im;
  } beat_t;

  typedef struct packed {
    logic signed [ACC_W-1:0] re;
    logic signed [ACC_W-1:0] im;
  } acc_t;

  // Reverse the low `bits` bits of v.
  function automatic int unsigned bitrev(int unsigned v, int bits);
    int unsigned r = 0;
    for (int i = 0; i < bits; i++) if (v[i]) r |= (1 << (bits - 1 - i));
    return r;
  endfunction

  // round(cos(2*pi*n/n_tot) * 2^TW_FRAC), evaluated at elaboration only.
  function automatic logic signed [TW_W-1:0] tw_cos(int n, int n_tot);
    real a = 2.0 * 3.14159265358979323846 * real'(n) / real'(n_tot);
    return TW_W'($rtoi($floor($cos(a) * real'(1 << TW_FRAC) + 0.5)));
  endfunction

  // round(-sin(2*pi*n/n_tot) * 2^TW_FRAC): imaginary part of W = e^{-j2pi n/N}.
  function automatic logic signed [TW_W-1:0] tw_msin(int n, int n_tot);
    real a = 2.0 * 3.14159265358979323846 * real'(n) / real'(n_tot);
    return TW_W'($rtoi($floor(-$sin(a) * real'(1 << TW_FRAC) + 0.5)));
  endfunction

  // Round-half-up arithmetic right shift used after every multiply.
  function automatic logic signed [63:0] rshift_round(logic signed [63:0] v, int sh);
    if (sh == 0) return v;
    return (v + (64'sd1 <<< (sh - 1))) >>> sh;
  endfunction

  // Saturate a wide signed value to BIN_W bits.
  function automatic logic signed [BIN_W-1:0] sat_bin(logic signed [63:0] v);
    if (v > 64'sd0 + ((64'sd1 <<< (BIN_W - 1)) - 1)) return {1'b0, {(BIN_W-1){1'b1}}};
    if (v < -(64'sd1 <<< (BIN_W - 1)))               return {1'b1, {(BIN_W-1){1'b0}}};
    return v[BIN_W-1:0];
  endfunction

endpackage
