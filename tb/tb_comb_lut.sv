// tb_comb_lut: checks waveform write and phase-continuous playback.
//
// A small table (DEPTH = 256) is filled with random samples written in a
// random order, then played for three full periods. Every played word must be
// the four consecutive samples that follow the previous word, wrapping at the
// end of the table, and dac_valid must follow play_en by one clock. Playback
// is then stopped and restarted to check that it resumes at sample 0.
module tb_comb_lut;
  import readout_pkg::*;
  localparam int DEPTH = 256;

  logic clk = 0, rst = 1;
  always #1 clk = ~clk;
  logic wr_en, play_en, dac_valid;
  logic [$clog2(DEPTH)-1:0] wr_addr;
  samp_t wr_data;
  samp_t dac_data [LANES];

  comb_lut #(.DEPTH(DEPTH)) dut (.*);

  int checks = 0, failures = 0;
  samp_t ref_tab [DEPTH];
  int perm [DEPTH];
  int expect_n = 0;
  logic play_d = 0;

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // monitor: compare each played word with the next four table samples
  always @(posedge clk) begin
    if (!rst) begin
      checks++;
      if (dac_valid != play_d) begin
        failures++;
        $display("dac_valid %0b, expected %0b", dac_valid, play_d);
      end
      play_d <= play_en;
      if (!play_d) expect_n = 0;
      if (dac_valid) begin
        for (int l = 0; l < LANES; l++) begin
          automatic samp_t got = dac_data[l];
          automatic samp_t exp = ref_tab[(expect_n + l) % DEPTH];
          checks++;
          if (got != exp) begin
            failures++;
            if (failures < 10) $display("sample %0d: got %h exp %h", expect_n + l, got, exp);
          end
        end
        expect_n = (expect_n + LANES) % DEPTH;
      end
    end
  end

  initial begin
    wr_en = 0; play_en = 0; wr_addr = '0; wr_data = '0;
    for (int i = 0; i < DEPTH; i++) perm[i] = i;
    for (int i = DEPTH - 1; i > 0; i--) begin
      automatic int j = $urandom_range(0, i);
      automatic int t = perm[i];
      perm[i] = perm[j];
      perm[j] = t;
    end
    for (int i = 0; i < DEPTH; i++) ref_tab[i] = {16'($urandom), 16'($urandom)};
    repeat (3) @(posedge clk);
    rst <= 0;
    for (int i = 0; i < DEPTH; i++) begin
      wr_en   <= 1;
      wr_addr <= 8'(perm[i]);
      wr_data <= ref_tab[perm[i]];
      @(posedge clk);
    end
    wr_en <= 0;
    play_en <= 1;
    repeat (3 * DEPTH / LANES + 5) @(posedge clk);
    play_en <= 0;
    repeat (4) @(posedge clk);
    play_en <= 1;
    repeat (DEPTH / LANES) @(posedge clk);
    play_en <= 0;
    repeat (4) @(posedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
