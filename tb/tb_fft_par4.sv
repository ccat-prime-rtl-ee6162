// tb_fft_par4: checks the four-lane streaming FFT against a direct DFT.
//
// Three frames of random complex samples are streamed four per clock with no
// gaps. Each output frame is compared bin by bin with
// X[k] = 1/N * sum_n x[n] e^{-j2pi nk/N}, computed here in floating point,
// within a small rounding tolerance. The latency from the first input to the
// first complete output frame is checked: N/4-1 samples of R2SDF delay, one
// register per stage, two for the radix-4 step and one for sampling the
// input, i.e. N/4 + log2(N/4) + 2 clocks.
module tb_fft_par4;
  import readout_pkg::*;
  localparam int N   = 1024;
  localparam int NL  = N / LANES;
  localparam int NFR = 3;
  localparam int TOL = 24;

  logic clk = 0, rst = 1;
  always #1 clk = ~clk;

  logic in_valid;
  bin_t in_data [LANES];
  logic out_valid, out_sof, out_frame_ok;
  logic [$clog2(NL)-1:0] out_kp;
  bin_t out_bins [LANES];

  fft_par4 #(.N(N)) dut (.*);

  int checks = 0, failures = 0;
  int xr [NFR][N];
  int xi [NFR][N];
  int cyc = 0, first_in = -1, first_out = -1;
  always @(posedge clk) cyc <= cyc + 1;

  initial begin
    #400000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int f = 0; f < NFR; f++)
      for (int n = 0; n < N; n++) begin
        xr[f][n] = int'($urandom_range(0, 2 ** 21)) - 2 ** 20;
        xi[f][n] = int'($urandom_range(0, 2 ** 21)) - 2 ** 20;
      end
    in_valid = 0;
    foreach (in_data[l]) in_data[l] = '0;
    repeat (4) @(posedge clk);
    rst <= 0;
    @(posedge clk);
    for (int f = 0; f < NFR; f++)
      for (int k = 0; k < NL; k++) begin
        in_valid <= 1;
        for (int l = 0; l < LANES; l++) begin
          in_data[l].re <= BIN_W'(xr[f][4 * k + l]);
          in_data[l].im <= BIN_W'(xi[f][4 * k + l]);
        end
        if (first_in < 0) first_in = cyc;
        @(posedge clk);
      end
    // flush with zeros
    for (int k = 0; k < 2 * NL; k++) begin
      for (int l = 0; l < LANES; l++) in_data[l] <= '0;
      @(posedge clk);
    end
    in_valid <= 0;
    repeat (10) @(posedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // reference DFT of frame f, bin k
  function automatic void ref_bin(int f, int k, output real rr, output real ri);
    rr = 0.0; ri = 0.0;
    for (int n = 0; n < N; n++) begin
      real a = -2.0 * 3.14159265358979323846 * real'((n * k) % N) / real'(N);
      rr += real'(xr[f][n]) * $cos(a) - real'(xi[f][n]) * $sin(a);
      ri += real'(xr[f][n]) * $sin(a) + real'(xi[f][n]) * $cos(a);
    end
    rr /= real'(N); ri /= real'(N);
  endfunction

  function automatic real rabs(real v);
    return (v < 0.0) ? -v : v;
  endfunction

  int ofr = -1;
  always @(posedge clk) begin
    if (!rst && out_valid && out_frame_ok) begin
      if (out_sof) begin
        ofr++;
        if (ofr == 0) begin
          first_out = cyc;
          checks++;
          if (first_out - first_in != NL + $clog2(NL) + 2) begin
            failures++;
            $display("latency %0d, expected %0d", first_out - first_in, NL + $clog2(NL) + 2);
          end
        end
      end
      if (ofr >= 0 && ofr < NFR) begin
        for (int m = 0; m < LANES; m++) begin
          real rr, ri;
          int k, gr, gi;
          bin_t b;
          b  = out_bins[m];
          gr = int'(b.re);
          gi = int'(b.im);
          k  = int'(out_kp) + m * NL;
          ref_bin(ofr, k, rr, ri);
          checks++;
          if (rabs(real'(gr) - rr) > TOL || rabs(real'(gi) - ri) > TOL) begin
            failures++;
            if (failures < 10)
              $display("frame %0d bin %0d: got (%0d,%0d) expected (%f,%f)", ofr, k,
                       gr, gi, rr, ri);
          end
        end
      end
    end
  end
endmodule
