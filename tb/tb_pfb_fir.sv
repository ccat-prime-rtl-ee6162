// tb_pfb_fir: checks the polyphase FIR front end against a direct evaluation.
//
// Six frames of random 16-bit complex samples are streamed four per clock.
// For every frame that has TAPS frames of history the expected output
// y_f[p] = round(sum_t h[t*N+p] * x_{f-TAPS+1+t}[p] / 2^8) is computed here
// from the sinc-Hann prototype (rounded to Q1.16), saturated to 24 bits and
// compared exactly.
// The output must follow the input by one clock.
module tb_pfb_fir;
  import readout_pkg::*;
  localparam int N    = 1024;
  localparam int TAPS = 4;
  localparam int NL   = N / LANES;
  localparam int NFR  = 6;

  logic  clk = 0, rst = 1;
  always #1 clk = ~clk;
  logic  in_valid, out_valid;
  samp_t in_data [LANES];
  bin_t  out_data [LANES];

  pfb_fir #(.N(N), .TAPS(TAPS)) dut (.*);

  int checks = 0, failures = 0;
  int xr [NFR][N];
  int xi [NFR][N];
  longint h [TAPS * N];

  initial begin
    #200000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic longint rnd_shift(longint v, int sh);
    return (v + (64'sd1 <<< (sh - 1))) >>> sh;
  endfunction

  initial begin
    real pi = 3.14159265358979323846;
    for (int i = 0; i < TAPS * N; i++) begin
      automatic real u = (real'(i) + 0.5) / real'(N) - real'(TAPS) / 2.0;
      automatic real s = (u == 0.0) ? 1.0 : $sin(pi * u) / (pi * u);
      automatic real w = 0.5 - 0.5 * $cos(2.0 * pi * (real'(i) + 0.5) / real'(TAPS * N));
      h[i] = longint'($rtoi($floor(s * w * 65536.0 + 0.5)));
    end
    for (int f = 0; f < NFR; f++)
      for (int n = 0; n < N; n++) begin
        xr[f][n] = int'($urandom_range(0, 65535)) - 32768;
        xi[f][n] = int'($urandom_range(0, 65535)) - 32768;
      end
    in_valid = 0;
    foreach (in_data[l]) in_data[l] = '0;
    repeat (3) @(posedge clk);
    rst <= 0;
    for (int f = 0; f < NFR; f++)
      for (int k = 0; k < NL; k++) begin
        in_valid <= 1;
        for (int l = 0; l < LANES; l++) begin
          in_data[l].re <= SAMP_W'(xr[f][4 * k + l]);
          in_data[l].im <= SAMP_W'(xi[f][4 * k + l]);
        end
        @(posedge clk);
        // output for this word appears one clock later
        if (f >= TAPS - 1) begin
          @(negedge clk);
          checks++;
          if (!out_valid) failures++;
          for (int l = 0; l < LANES; l++) begin
            automatic longint er = 0, ei = 0;
            automatic int p = 4 * k + l;
            for (int t = 0; t < TAPS; t++) begin
              er += h[t * N + p] * xr[f - TAPS + 1 + t][p];
              ei += h[t * N + p] * xi[f - TAPS + 1 + t][p];
            end
            er = rnd_shift(er, 8);
            ei = rnd_shift(ei, 8);
            er = (er > 8388607) ? 8388607 : (er < -8388608) ? -8388608 : er;
            ei = (ei > 8388607) ? 8388607 : (ei < -8388608) ? -8388608 : ei;
            checks++;
            if (longint'(out_data[l].re) != er || longint'(out_data[l].im) != ei) begin
              failures++;
              if (failures < 10) $display("f%0d p%0d got %0d,%0d exp %0d,%0d", f, p,
                                          out_data[l].re, out_data[l].im, er, ei);
            end
          end
        end
      end
    in_valid <= 0;
    repeat (4) @(posedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
