// tb_vector_accum: checks accumulation, dumping and on-the-fly nacc changes.
//
// Frames of random 24-bit values (four tones per clock, N/4 clocks per frame,
// with idle gaps between frames) are accumulated. nacc starts at 3, is set to
// 5 in the middle of an accumulation (taking effect at the next one), then to
// 1 and back to 2. Every dump is compared with sums computed here; the number
// of dumps and the one-clock latency of the first dump word are checked.
module tb_vector_accum;
  import readout_pkg::*;
  localparam int N  = 1024;
  localparam int NL = N / LANES;

  logic clk = 0, rst = 1;
  always #1 clk = ~clk;
  logic [15:0] nacc;
  logic in_valid, in_sof, out_valid, out_sof;
  logic [7:0] in_q, out_q;
  logic [31:0] out_seq;
  bin_t in_data [LANES];
  acc_t out_data [LANES];

  vector_accum #(.N(N)) dut (.*);

  int checks = 0, failures = 0;
  longint sre [N], sim_ [N];
  longint expre [16*N];
  longint expim [16*N];
  int nfr_in_acc = 0, ncur = 0;
  int dumps_expected = 0, dumps_seen = 0;
  // schedule of nacc values written before frame f
  int sched [int] = '{0: 3, 7: 5, 18: 1, 21: 2};
  localparam int NFR = 26;

  initial begin
    #200000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    nacc = 16'd3; in_valid = 0; in_sof = 0; in_q = '0;
    foreach (in_data[r]) in_data[r] = '0;
    repeat (3) @(posedge clk);
    rst <= 0;
    for (int f = 0; f < NFR; f++) begin
      if (sched.exists(f)) nacc <= 16'(sched[f]);
      if (nfr_in_acc == 0) ncur = sched.exists(f) ? sched[f] : int'(nacc);
      for (int q = 0; q < NL; q++) begin
        in_valid <= 1;
        in_sof   <= (q == 0);
        in_q     <= 8'(q);
        for (int r = 0; r < LANES; r++) begin
          automatic int a = int'($urandom_range(0, 2 ** 20)) - 2 ** 19;
          automatic int b = int'($urandom_range(0, 2 ** 20)) - 2 ** 19;
          automatic int s = 4 * q + r;
          in_data[r].re <= 24'(a);
          in_data[r].im <= 24'(b);
          sre[s]  = (nfr_in_acc == 0 ? 0 : sre[s]) + a;
          sim_[s] = (nfr_in_acc == 0 ? 0 : sim_[s]) + b;
          // the dump leaves while the last frame is still coming in
          expre[dumps_expected*N+s] = sre[s];
          expim[dumps_expected*N+s] = sim_[s];
        end
        @(posedge clk);
      end
      nfr_in_acc++;
      if (nfr_in_acc == ncur) begin
        dumps_expected++;
        nfr_in_acc = 0;
      end
      if (f % 3 != 0) begin
        in_valid <= 0;
        in_sof   <= 0;
        repeat (f % 3) @(posedge clk);
      end
    end
    in_valid <= 0;
    repeat (5) @(posedge clk);
    checks++;
    if (dumps_seen != dumps_expected || dumps_expected != 9) begin
      failures++;
      $display("dumps seen %0d expected %0d (schedule gives 9)", dumps_seen, dumps_expected);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic last_word_d = 0;
  always @(posedge clk) begin
    last_word_d <= in_valid && in_q == '0;
    if (!rst) begin
      if (out_valid) begin
        if (out_sof) dumps_seen++;
        if (out_sof && dumps_seen == 1) begin
          checks++;
          if (!last_word_d) begin
            failures++;
            $display("first dump word not one clock after the last input frame start");
          end
        end
        for (int r = 0; r < LANES; r++) begin
          automatic int s = 4 * int'(out_q) + r;
          automatic acc_t o = out_data[r];
          checks++;
          if (longint'(o.re) != expre[(dumps_seen-1)*N+s] || longint'(o.im) != expim[(dumps_seen-1)*N+s]) begin
            failures++;
            if (failures < 10) $display("dump %0d slot %0d: got %0d exp %0d", dumps_seen, s, o.re, expre[(dumps_seen-1)*N+s]);
          end
        end
      end
    end
  end
endmodule
