// tb_bin_select: checks bin buffering and repeated selection.
//
// A synthetic FFT stream (four bins per clock, bit-reversed k' order, one
// frame per N/4 clocks) carries bins whose value encodes frame and bin number:
// re = frame*N + bin, im = -bin. A random tone-to-bin table with deliberate
// duplicates is loaded, and every selected output is compared with the value
// of the chosen bin of the right frame. The table is then rewritten between
// frames and checked again. The first selected word is registered on the
// third clock after the edge that writes the last bin of its frame, so the
// monitor, which samples before each edge, sees it four edges later.
module tb_bin_select;
  import readout_pkg::*;
  localparam int N  = 1024;
  localparam int NL = N / LANES;
  localparam int QW = $clog2(NL);
  localparam int NFR = 6;

  logic clk = 0, rst = 1;
  always #1 clk = ~clk;

  logic in_valid, in_sof, in_frame_ok;
  logic [QW-1:0] in_kp;
  bin_t in_bins [LANES];
  logic sel_we;
  logic [$clog2(N)-1:0] sel_addr, sel_bin;
  logic out_valid, out_sof;
  logic [QW-1:0] out_q;
  logic [15:0] out_frame;
  bin_t out_bins [LANES];

  bin_select #(.N(N)) dut (.*);

  int checks = 0, failures = 0;
  int tab [N];
  int cyc = 0, last_in_cyc = 0, sof_seen = 0;
  always @(posedge clk) cyc <= cyc + 1;

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic load_table(int seed);
    for (int s = 0; s < N; s++) begin
      // every fourth slot repeats the previous slot's bin
      tab[s] = (s % 4 == 3) ? tab[s - 1] : int'($urandom_range(0, N - 1));
      sel_we   <= 1;
      sel_addr <= 10'(s);
      sel_bin  <= 10'(tab[s]);
      @(posedge clk);
    end
    sel_we <= 0;
  endtask

  initial begin
    in_valid = 0; in_sof = 0; in_frame_ok = 0; in_kp = '0; sel_we = 0;
    sel_addr = '0; sel_bin = '0;
    foreach (in_bins[m]) in_bins[m] = '0;
    repeat (3) @(posedge clk);
    rst <= 0;
    load_table(1);
    for (int f = 0; f < NFR; f++) begin
      if (f == 3) begin
        // let the previous frame be read out, then change the table
        in_valid <= 0;
        in_sof   <= 0;
        repeat (NL + 8) @(posedge clk);
        load_table(2);
      end
      for (int p = 0; p < NL; p++) begin
        logic [QW-1:0] pp, kp;
        pp = QW'(p);
        for (int i = 0; i < QW; i++) kp[i] = pp[QW-1-i];
        in_valid    <= 1;
        in_frame_ok <= 1;
        in_sof      <= (p == 0);
        in_kp       <= kp;
        for (int m = 0; m < LANES; m++) begin
          in_bins[m].re <= BIN_W'(f * N + int'(kp) + m * NL);
          in_bins[m].im <= BIN_W'(-(int'(kp) + m * NL));
        end
        @(posedge clk);
      end
    end
    in_valid <= 0;
    in_sof   <= 0;
    repeat (NL + 10) @(posedge clk);
    checks++;
    if (sof_seen != NFR) begin
      failures++;
      $display("saw %0d output frames, expected %0d", sof_seen, NFR);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int wc = 0;
  always @(posedge clk) begin
    if (!rst && in_valid) begin
      wc = in_sof ? 1 : wc + 1;
      if (wc == NL) last_in_cyc = cyc;
    end
    if (!rst && out_valid) begin
      if (out_sof) begin
        sof_seen++;
        checks++;
        if (sof_seen == 1 && cyc - last_in_cyc != 4) begin
          failures++;
          $display("latency %0d clocks, expected 4", cyc - last_in_cyc);
        end
      end
      for (int r = 0; r < LANES; r++) begin
        automatic int s = 4 * int'(out_q) + r;
        automatic bin_t b = out_bins[r];
        automatic int f = int'(out_frame);
        checks++;
        if (int'(b.re) != f * N + tab[s] || int'(b.im) != -tab[s]) begin
          failures++;
          if (failures < 10) $display("frame %0d slot %0d: got %0d exp %0d", f, s, int'(b.re), f * N + tab[s]);
        end
      end
    end
  end
endmodule
