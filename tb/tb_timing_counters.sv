// tb_timing_counters: checks the free-running counter and sync capture.
//
// The time stamp must count one per clock from reset. Sync pulses of random
// width are applied at random times, off the clock edge; each rising edge
// must increment sync_count once, and sync_time must hold the time stamp of
// the clock on which the edge reached the edge detector (two synchroniser
// flops after the first clock that samples it).
module tb_timing_counters;
  logic clk = 0, rst = 1, sync_in = 0;
  always #5 clk = ~clk;
  logic [63:0] timestamp, sync_time;
  logic [31:0] sync_count;

  timing_counters dut (.*);

  int checks = 0, failures = 0;
  longint cyc = 0;
  longint edge_cyc;

  initial begin
    #200000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (!rst) cyc <= cyc + 1;

  initial begin
    repeat (3) @(posedge clk);
    rst <= 0;
    @(posedge clk);
    for (int k = 1; k <= 20; k++) begin
      repeat ($urandom_range(3, 40)) @(posedge clk);
      #2 sync_in = 1;
      edge_cyc = cyc;               // first edge that samples sync_in = 1
      repeat ($urandom_range(3, 10)) @(posedge clk);
      #2 sync_in = 0;
      @(negedge clk);
      checks++;
      if (sync_count != 32'(k)) begin
        failures++;
        $display("sync_count %0d, expected %0d", sync_count, k);
      end
      checks++;
      // captured on the third edge: sync_time = timestamp before that edge
      if (sync_time != 64'(edge_cyc + 2)) begin
        failures++;
        $display("sync_time %0d, expected %0d", sync_time, edge_cyc + 2);
      end
      checks++;
      if (timestamp != 64'(cyc)) begin
        failures++;
        $display("timestamp %0d, cycle %0d", timestamp, cyc);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
