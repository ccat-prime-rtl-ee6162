// fft_par4: streaming N-point complex FFT taking LANES = 4 samples per clock.
//
// Lane l carries samples x[4k+l]. Each lane runs its own N/4-point R2SDF FFT
// (log2(N/4) r2sdf_stage instances), giving F_l[k'] in bit-reversed k' order.
// The full transform then follows from one decimation-in-time radix-4 step
// across the lanes:
//     X[k' + m*N/4] = 1/4 * sum_l (-j)^(l*m) * W_N^(l*k') * F_l[k'],  m = 0..3
// so every output clock delivers the four bins k', k'+N/4, k'+N/2, k'+3N/4
// (out_bins[m] holds bin k' + m*N/4, out_kp holds k'). A frame of N bins
// takes N/4 clocks. out_sof marks the first clock of each frame and
// out_frame_ok rises once the first complete frame leaves the pipeline.
// Output is scaled by 1/N. Latency: N/4-1 valid samples through the R2SDF
// chain plus one register per stage, and two clocks for the radix-4 step.
// The paper fixes N = 1024 (Fig. 5) and the four-sample width of the data
// path (the comb memory delivers four samples per clock); the lane split
// into R2SDF pipelines is this design's choice.
module fft_par4
  import readout_pkg::*;
#(
  parameter int N = 1024
) (
  input  logic clk,
  input  logic rst,
  input  logic in_valid,
  input  bin_t in_data [LANES],
  output logic out_valid,
  output logic out_sof,
  output logic out_frame_ok,
  output logic [$clog2(N/4)-1:0] out_kp,
  output bin_t out_bins [LANES]
);
  localparam int NL = N / LANES;           // points per lane
  localparam int S  = $clog2(NL);          // R2SDF stages per lane
  localparam int KW = $clog2(NL);

  typedef logic signed [TW_W-1:0] tw_tab_t [N];
  function automatic tw_tab_t gen_cos();
    tw_tab_t t;
    for (int j = 0; j < N; j++) t[j] = tw_cos(j, N);
    return t;
  endfunction
  function automatic tw_tab_t gen_msin();
    tw_tab_t t;
    for (int j = 0; j < N; j++) t[j] = tw_msin(j, N);
    return t;
  endfunction
  localparam tw_tab_t TW_RE = gen_cos();
  localparam tw_tab_t TW_IM = gen_msin();

  // ---- per-lane R2SDF chains
  logic lane_valid [LANES][S+1];
  bin_t lane_data  [LANES][S+1];

  for (genvar l = 0; l < LANES; l++) begin : g_lane
    assign lane_valid[l][0] = in_valid;
    assign lane_data[l][0]  = in_data[l];
    for (genvar s = 0; s < S; s++) begin : g_stage
      r2sdf_stage #(.D(NL >> (s + 1))) u_stage (
        .clk      (clk),
        .rst      (rst),
        .in_valid (lane_valid[l][s]),
        .in_data  (lane_data[l][s]),
        .out_valid(lane_valid[l][s+1]),
        .out_data (lane_data[l][s+1])
      );
    end
  end

  // ---- output position within the frame: the chain delays by NL-1 samples
  logic [KW-1:0] ocnt;
  logic          primed;
  logic [KW-1:0] pos, kp;
  assign pos = ocnt + 1'b1;                // (ocnt - (NL-1)) mod NL
  always_comb begin
    kp = '0;
    for (int i = 0; i < KW; i++) kp[i] = pos[KW-1-i];
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      ocnt   <= '0;
      primed <= 1'b0;
    end else if (lane_valid[0][S]) begin
      ocnt <= ocnt + 1'b1;
      if (ocnt == KW'(NL - 2)) primed <= 1'b1;
    end
  end

  // ---- stage A: cross-lane twiddles G_l = W_N^(l*k') * F_l
  bin_t          g_q [LANES];
  logic          a_valid, a_sof, a_ok;
  logic [KW-1:0] a_kp;

  always_ff @(posedge clk) begin
    if (rst) begin
      a_valid <= 1'b0;
      a_sof   <= 1'b0;
      a_ok    <= 1'b0;
      a_kp    <= '0;
    end else begin
      a_valid <= lane_valid[0][S];
      a_sof   <= lane_valid[0][S] && pos == '0;
      a_ok    <= primed;
      a_kp    <= kp;
    end
  end

  for (genvar l = 0; l < LANES; l++) begin : g_tw
    logic [$clog2(N)-1:0]      idx;
    logic signed [TW_W-1:0]    w_re, w_im;
    logic signed [BIN_W+TW_W:0] p_re, p_im;
    bin_t                      f;
    assign f    = lane_data[l][S];
    assign idx  = $clog2(N)'(l * kp);
    assign w_re = TW_RE[idx];
    assign w_im = TW_IM[idx];
    assign p_re = f.re * w_re - f.im * w_im;
    assign p_im = f.re * w_im + f.im * w_re;
    always_ff @(posedge clk) begin
      if (lane_valid[0][S]) begin
        g_q[l].re <= BIN_W'(rshift_round(64'(p_re), TW_FRAC));
        g_q[l].im <= BIN_W'(rshift_round(64'(p_im), TW_FRAC));
      end
    end
  end

  // ---- stage B: radix-4 butterfly across lanes, scaled by 1/4
  logic signed [BIN_W+1:0] y_re [LANES];
  logic signed [BIN_W+1:0] y_im [LANES];
  logic signed [BIN_W+1:0] x_re [LANES];
  logic signed [BIN_W+1:0] x_im [LANES];
  always_comb begin
    for (int l = 0; l < LANES; l++) begin
      x_re[l] = (BIN_W+2)'(g_q[l].re);     // sign-extended: no overflow in the sums
      x_im[l] = (BIN_W+2)'(g_q[l].im);
    end
    y_re[0] = x_re[0] + x_re[1] + x_re[2] + x_re[3];
    y_im[0] = x_im[0] + x_im[1] + x_im[2] + x_im[3];
    y_re[1] = x_re[0] + x_im[1] - x_re[2] - x_im[3];
    y_im[1] = x_im[0] - x_re[1] - x_im[2] + x_re[3];
    y_re[2] = x_re[0] - x_re[1] + x_re[2] - x_re[3];
    y_im[2] = x_im[0] - x_im[1] + x_im[2] - x_im[3];
    y_re[3] = x_re[0] - x_im[1] - x_re[2] + x_im[3];
    y_im[3] = x_im[0] + x_re[1] - x_im[2] - x_re[3];
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      out_valid    <= 1'b0;
      out_sof      <= 1'b0;
      out_frame_ok <= 1'b0;
      out_kp       <= '0;
    end else begin
      out_valid    <= a_valid;
      out_sof      <= a_sof && a_valid;
      out_frame_ok <= a_ok;
      if (a_valid) out_kp <= a_kp;
    end
  end

  for (genvar m = 0; m < LANES; m++) begin : g_out
    always_ff @(posedge clk) begin
      if (a_valid) begin
        out_bins[m].re <= BIN_W'(y_re[m] >>> 2);
        out_bins[m].im <= BIN_W'(y_im[m] >>> 2);
      end
    end
  end
endmodule
