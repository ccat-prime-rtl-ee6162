// tb_snapshot: checks tap selection, frame alignment and read-back of the
// diagnostic capture memory.
//
// Four synthetic taps run at once, each with its own frame length, random
// valid gaps and data that encode tap, frame, word and lane. For each tap in
// turn (twice, the A/D tap without frames) the test arms the block, waits for
// done, reads all N values back and checks that they are the N/4 consecutive
// valid words of that tap, starting at a frame start (or, for tap 0, at any
// word after arming), and that done rises only after the last of them.
module tb_snapshot;
  import readout_pkg::*;
  localparam int N  = 256;
  localparam int NL = N / LANES;

  logic clk = 0, rst = 1;
  always #1 clk = ~clk;
  logic arm, done;
  logic [1:0] tap_sel;
  logic tap_valid [4], tap_sof [4];
  acc_t tap_data [4][LANES];
  logic [$clog2(N)-1:0] rd_addr;
  acc_t rd_data;

  snapshot #(.N(N)) dut (.*);

  int checks = 0, failures = 0;
  int word_cnt [4];                       // valid words sent on each tap

  initial begin
    #400000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // tap t: frames of NL words; word w of the stream has re = t<<28 | w, im = lane
  always @(posedge clk) begin
    for (int t = 0; t < 4; t++) begin
      automatic bit go = ($urandom_range(0, 3) != 0);
      tap_valid[t] <= go;
      tap_sof[t]   <= go && (t == 0 || word_cnt[t] % NL == 0);   // tap 0: every word
      for (int r = 0; r < LANES; r++) begin
        tap_data[t][r].re <= (t << 28) | word_cnt[t];
        tap_data[t][r].im <= r;
      end
      if (go) word_cnt[t]++;
    end
  end

  initial begin
    int first;
    arm = 0; tap_sel = '0; rd_addr = '0;
    for (int t = 0; t < 4; t++) begin
      word_cnt[t] = 0; tap_valid[t] = 0; tap_sof[t] = 0;
      for (int r = 0; r < LANES; r++) tap_data[t][r] = '0;
    end
    repeat (3) @(posedge clk);
    rst <= 0;
    repeat (10) @(posedge clk);
    for (int k = 0; k < 8; k++) begin
      automatic int t = k % 4;
      automatic int armed_at;
      tap_sel <= 2'(t);
      arm <= 1;
      @(posedge clk);
      arm <= 0;
      armed_at = word_cnt[t];
      @(posedge clk);
      while (!done) @(posedge clk);
      checks++;
      if (word_cnt[t] - armed_at > 4 * NL + 8) begin
        failures++;
        $display("tap %0d: done late", t);
      end
      for (int i = 0; i < N; i++) begin
        rd_addr <= 8'(i);
        @(posedge clk);
        @(negedge clk);
        if (i == 0) first = rd_data.re & 32'h0FFF_FFFF;
        checks++;
        if (rd_data.re != ((t << 28) | (first + i / 4)) || rd_data.im != i % 4) begin
          failures++;
          if (failures < 10) $display("tap %0d value %0d: got %h/%h", t, i, rd_data.re, rd_data.im);
        end
      end
      checks++;
      if (first < armed_at || (t != 0 && first % NL != 0)) begin
        failures++;
        $display("tap %0d: capture started at word %0d (armed at %0d)", t, first, armed_at);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
