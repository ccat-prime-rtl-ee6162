// pfb_fir: polyphase FIR front end of the N-branch polyphase filterbank.
//
// The input is the complex sample stream from the data converter, LANES = 4
// samples per clock. Sample n belongs to branch p = n mod N. For every frame f
// of N samples the block outputs
//     y_f[p] = sum_{t=0}^{TAPS-1} h[t*N + p] * x_{f-TAPS+1+t}[p]
// i.e. each branch is a TAPS-tap FIR over the last TAPS frames. The FFT that
// follows (fft_par4) turns y_f into the filterbank channels. The prototype
// filter h is a sinc of width N multiplied by a Hann window over TAPS*N
// points, computed at elaboration, in Q1.16. Each lane keeps TAPS-1 frame
// delay memories of N/4 words; all taps of a branch are read and written at
// the same address, so the block needs one read and one write per memory and
// clock. Output is registered: one clock of latency, no sample delay.
// The paper gives the filterbank its name and N = 1024 (Fig. 5) but not its
// taps or window: TAPS = 4 and the sinc-Hann prototype are this design's own
// choices. Input is 16-bit; output is 24-bit with 8 extra fraction bits,
// saturated (full-scale white noise can exceed the range; tones do not).
module pfb_fir
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
  output bin_t  out_data [LANES]
);
  localparam int NL = N / LANES;
  localparam int QW = $clog2(NL);
  localparam int SH = TW_FRAC - (BIN_W - SAMP_W);   // product -> output scaling

  typedef logic signed [TW_W-1:0] coef_tab_t [TAPS*NL];

  // Prototype coefficient for branch index p = 4q + lane, tap t.
  function automatic coef_tab_t gen_coefs(int lane);
    coef_tab_t c;
    real u, s, w, pi;
    int  i;
    pi = 3.14159265358979323846;
    for (int t = 0; t < TAPS; t++)
      for (int q = 0; q < NL; q++) begin
        i = t * N + LANES * q + lane;
        u = (real'(i) + 0.5) / real'(N) - real'(TAPS) / 2.0;
        s = $sin(pi * u) / (pi * u);
        w = 0.5 - 0.5 * $cos(2.0 * pi * (real'(i) + 0.5) / real'(TAPS * N));
        c[t*NL+q] = TW_W'($rtoi($floor(s * w * 65536.0 + 0.5)));
      end
    return c;
  endfunction

  logic [QW-1:0] q;
  always_ff @(posedge clk) begin
    if (rst)           q <= '0;
    else if (in_valid) q <= q + 1'b1;
  end

  always_ff @(posedge clk) begin
    if (rst) out_valid <= 1'b0;
    else     out_valid <= in_valid;
  end

  for (genvar l = 0; l < LANES; l++) begin : g_lane
    localparam coef_tab_t H = gen_coefs(l);
    samp_t dly [TAPS-1][NL];            // dly[a-1]: sample of frame f-a
    samp_t d   [TAPS];                  // d[a]: sample of frame f-a, branch q
    logic signed [SAMP_W+TW_W+$clog2(TAPS)+1:0] acc_re, acc_im;

    always_comb begin
      d[0] = in_data[l];
      for (int a = 1; a < TAPS; a++) d[a] = dly[a-1][q];
      acc_re = '0;
      acc_im = '0;
      for (int a = 0; a < TAPS; a++) begin
        acc_re += d[a].re * H[(TAPS-1-a)*NL+int'(q)];
        acc_im += d[a].im * H[(TAPS-1-a)*NL+int'(q)];
      end
    end

    always_ff @(posedge clk) begin
      if (in_valid) begin
        dly[0][q] <= in_data[l];
        for (int a = 1; a < TAPS - 1; a++) dly[a][q] <= dly[a-1][q];
        out_data[l].re <= sat_bin(rshift_round(64'(acc_re), SH));
        out_data[l].im <= sat_bin(rshift_round(64'(acc_im), SH));
      end
    end
  end
endmodule
