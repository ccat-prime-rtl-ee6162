// tb_beat_lut: write/read check of the beat-waveform table at full size.
//
// 3000 random (frame, slot) entries receive random values; each is then read
// back through the lane-parallel read port (frame, q) and compared on all
// four lanes with the last value written to slots 4q..4q+3. Entries never
// written are not compared. Read data must appear one clock after rd_en.
module tb_beat_lut;
  import readout_pkg::*;
  localparam int N  = 1024;
  localparam int BF = 1024;
  localparam int AW = $clog2(BF) + $clog2(N);

  logic clk = 0;
  always #1 clk = ~clk;
  logic wr_en, rd_en;
  logic [AW-1:0] wr_addr;
  beat_t wr_data;
  logic [15:0] rd_frame;
  logic [7:0] rd_q;
  beat_t rd_beat [LANES];

  beat_lut #(.N(N), .BEAT_FRAMES(BF)) dut (.*);

  int checks = 0, failures = 0;
  logic [31:0] model [int];
  int addrs [3000];

  initial begin
    #200000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    wr_en = 0; rd_en = 0; wr_addr = '0; wr_data = '0; rd_frame = '0; rd_q = '0;
    @(posedge clk);
    foreach (addrs[i]) begin
      addrs[i] = int'($urandom_range(0, BF * N - 1));
      wr_en   <= 1;
      wr_addr <= AW'(addrs[i]);
      wr_data <= $urandom;
      @(posedge clk);
      model[addrs[i]] = {wr_data.re, wr_data.im};
    end
    wr_en <= 0;
    foreach (addrs[i]) begin
      automatic int t = addrs[i] / N;
      automatic int q = (addrs[i] % N) / 4;
      rd_en    <= 1;
      rd_frame <= 16'(t);
      rd_q     <= 8'(q);
      @(posedge clk);
      rd_en <= 0;
      @(negedge clk);
      for (int r = 0; r < LANES; r++) begin
        automatic int a = t * N + 4 * q + r;
        if (model.exists(a)) begin
          checks++;
          if ({rd_beat[r].re, rd_beat[r].im} != model[a]) begin
            failures++;
            if (failures < 10) $display("addr %0d lane %0d: got %h exp %h", a, r, {rd_beat[r].re, rd_beat[r].im}, model[a]);
          end
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
