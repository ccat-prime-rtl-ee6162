// tb_pfb: end-to-end check of the polyphase filterbank with pure tones.
//
// A complex tone exactly at the centre of bin K0 is applied. Once TAPS frames
// have filled the FIR, bin K0 must equal A * sum(h)/N (the filter's DC gain,
// computed here from the prototype) and every other bin must stay below 1%
// of A. A second run with a tone at bin K1 checks that the peak moves.
module tb_pfb;
  import readout_pkg::*;
  localparam int N    = 1024;
  localparam int TAPS = 4;
  localparam int NL   = N / LANES;
  localparam int A    = 16000;

  logic  clk = 0, rst = 1;
  always #1 clk = ~clk;
  logic  in_valid, out_valid, out_sof, out_frame_ok;
  samp_t in_data [LANES];
  logic [$clog2(NL)-1:0] out_kp;
  bin_t  out_bins [LANES];

  pfb #(.N(N), .TAPS(TAPS)) dut (.*);

  int checks = 0, failures = 0;
  int kt;                   // tone bin
  real gain;
  int frames_seen;

  initial begin
    #400000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    real pi, hs;
    pi = 3.14159265358979323846;
    hs = 0.0;
    for (int i = 0; i < TAPS * N; i++) begin
      automatic real u = (real'(i) + 0.5) / real'(N) - real'(TAPS) / 2.0;
      automatic real s = $sin(pi * u) / (pi * u);
      automatic real w = 0.5 - 0.5 * $cos(2.0 * pi * (real'(i) + 0.5) / real'(TAPS * N));
      hs += s * w;
    end
    gain = hs / real'(N);
    in_valid = 0;
    foreach (in_data[l]) in_data[l] = '0;
    repeat (3) @(posedge clk);
    rst <= 0;
    foreach (kt_list[r]) begin
      kt = kt_list[r];
      frames_seen = 0;
      for (int n = 0; n < N * (TAPS + 3); n += LANES) begin
        in_valid <= 1;
        for (int l = 0; l < LANES; l++) begin
          automatic real a = 2.0 * pi * real'(((n + l) * kt) % N) / real'(N);
          in_data[l].re <= SAMP_W'($rtoi($floor(real'(A) * $cos(a) + 0.5)));
          in_data[l].im <= SAMP_W'($rtoi($floor(real'(A) * $sin(a) + 0.5)));
        end
        @(posedge clk);
      end
    end
    in_valid <= 0;
    repeat (4) @(posedge clk);
    if (checks < 2 * N) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int kt_list [2] = '{37, 700};

  // The output frame currently leaving the FFT was filled TAPS frames ago;
  // only frames whose whole FIR history holds the current tone are checked.
  int fr_cnt = 0;
  always @(posedge clk) begin
    if (!rst && out_valid && out_frame_ok) begin
      if (out_sof) fr_cnt++;
      if (out_sof) frames_seen++;
      if (frames_seen >= TAPS + 1 && frames_seen <= TAPS + 2) begin
        for (int m = 0; m < LANES; m++) begin
          automatic int k = int'(out_kp) + m * NL;
          automatic bin_t b = out_bins[m];
          automatic real re = real'(b.re) / 256.0;   // back to input LSBs
          automatic real im = real'(b.im) / 256.0;
          checks++;
          if (k == kt) begin
            if (re < A * gain - 4.0 || re > A * gain + 4.0 || im < -4.0 || im > 4.0) begin
              failures++;
              $display("tone bin %0d: %f %f expected %f", k, re, im, A * gain);
            end
          end else if (re * re + im * im > (A * 0.01) * (A * 0.01)) begin
            failures++;
            if (failures < 10) $display("leak bin %0d (tone %0d): %f %f", k, kt, re, im);
          end
        end
      end
    end
  end
endmodule
