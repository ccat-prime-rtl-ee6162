// tb_ddc: checks the time-multiplexed complex multiply of the DDC.
//
// Random 24-bit bins and random Q1.15 beat values (beat delivered one clock
// after its bin, as beat_lut does) are streamed with random gaps. Each output
// is compared with round(bin * beat / 2^15), saturated to 24 bits, computed
// here in 64-bit integers, and must appear BEAT_LAT + 1 = 2 clocks after its
// input.
module tb_ddc;
  import readout_pkg::*;
  localparam int N = 1024;

  logic clk = 0, rst = 1;
  always #1 clk = ~clk;
  logic in_valid, in_sof, out_valid, out_sof;
  logic [7:0] in_q, out_q;
  bin_t in_bins [LANES];
  beat_t beat [LANES];
  bin_t out_data [LANES];

  ddc #(.N(N), .BEAT_LAT(1)) dut (.*);

  int checks = 0, failures = 0;
  typedef struct { longint re, im; int q; } exp_t;
  exp_t expq [$];
  beat_t beat_next [LANES];
  longint br [LANES], bi [LANES];

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic longint rs(longint v);
    longint r = (v + (64'sd1 <<< 14)) >>> 15;
    if (r > 8388607) r = 8388607;
    if (r < -8388608) r = -8388608;
    return r;
  endfunction

  int cyc = 0;
  logic pend = 0;          // a bin was presented last clock: its beat is due now
  initial begin
    in_valid = 0; in_sof = 0; in_q = '0;
    foreach (in_bins[r]) begin in_bins[r] = '0; beat[r] = '0; end
    repeat (3) @(posedge clk);
    rst <= 0;
    for (int i = 0; i < 2000; i++) begin
      automatic logic v = ($urandom_range(0, 3) != 0);
      // beat for the previous clock's bin
      for (int r = 0; r < LANES; r++) beat[r] <= beat_next[r];
      in_valid <= v;
      in_sof   <= (i % 64 == 0);
      in_q     <= 8'(i);
      for (int r = 0; r < LANES; r++) begin
        automatic int a = (i < 1000) ? int'($urandom_range(0, 2 ** 24 - 1)) - 2 ** 23
                                     : int'($urandom_range(0, 2 ** 16)) - 2 ** 15;
        automatic int b = int'($urandom_range(0, 2 ** 24 - 1)) - 2 ** 23;
        automatic beat_t w;
        w.re = 16'($urandom);
        w.im = 16'($urandom);
        in_bins[r].re <= 24'(a);
        in_bins[r].im <= 24'(b);
        beat_next[r] = w;
        if (v) begin
          automatic exp_t e;
          e.re = rs(longint'(a) * longint'(w.re) - longint'(b) * longint'(w.im));
          e.im = rs(longint'(a) * longint'(w.im) + longint'(b) * longint'(w.re));
          e.q  = i % 256;
          expq.push_back(e);
        end
      end
      @(posedge clk);
    end
    in_valid <= 0;
    for (int r = 0; r < LANES; r++) beat[r] <= beat_next[r];
    repeat (5) @(posedge clk);
    checks++;
    if (expq.size() != 0) begin
      failures++;
      $display("%0d outputs missing", expq.size());
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // in_valid seen at edge k must give out_valid at edge k+2
  logic v1 = 0, v2 = 0;
  always @(posedge clk) begin
    v1 <= !rst && in_valid;
    v2 <= v1;
    if (!rst) begin
      checks++;
      if (out_valid != v2) begin
        failures++;
        $display("out_valid timing wrong");
      end
      if (out_valid) begin
        for (int r = 0; r < LANES; r++) begin
          automatic exp_t e = expq.pop_front();
          automatic bin_t o = out_data[r];
          checks++;
          if (longint'(o.re) != e.re || longint'(o.im) != e.im || int'(out_q) != e.q) begin
            failures++;
            if (failures < 10) $display("got %0d,%0d q%0d exp %0d,%0d q%0d", o.re, o.im, out_q, e.re, e.im, e.q);
          end
        end
      end
    end
  end
endmodule
