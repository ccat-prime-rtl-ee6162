// tb_cdc_buffer: checks the clock-domain crossing of accumulated vectors.
//
// The write side runs on a 128 MHz-like clock, the read side on an unrelated
// 125 MHz-like clock. Three vectors of random words are dumped; each is read
// back in the read domain through rd_addr/rd_data and compared word by word,
// together with its time-stamp word. A fourth and fifth vector are dumped
// while the reader holds the buffer busy: the first of them must be counted in
// dropped and the second (arriving after release) read correctly.
module tb_cdc_buffer;
  import readout_pkg::*;
  localparam int N  = 1024;
  localparam int NL = N / LANES;

  logic clk = 0, rst = 1, eclk = 0, erst = 1;
  always #4 clk = ~clk;
  always #5 eclk = ~eclk;
  logic in_valid, in_sof, rd_avail, rd_done;
  logic [7:0] in_q;
  acc_t in_data [LANES];
  logic [159:0] in_meta, rd_meta;
  logic [9:0] rd_addr;
  acc_t rd_data;
  logic [31:0] dropped;

  cdc_buffer #(.N(N)) dut (.*);

  int checks = 0, failures = 0;
  logic [63:0] vec [N];
  logic [159:0] meta;

  initial begin
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic dump();
    for (int t = 0; t < N; t++) vec[t] = {$urandom, $urandom};
    meta = {$urandom, $urandom, $urandom, $urandom, $urandom};
    for (int q = 0; q < NL; q++) begin
      in_valid <= 1;
      in_sof   <= (q == 0);
      in_q     <= 8'(q);
      in_meta  <= meta;
      for (int r = 0; r < LANES; r++) in_data[r] <= vec[4 * q + r];
      @(posedge clk);
    end
    in_valid <= 0;
    in_sof   <= 0;
  endtask

  task automatic read_check(int k);
    int bad = 0;
    @(posedge eclk);
    while (!rd_avail) @(posedge eclk);
    checks++;
    if (rd_meta != meta) begin
      failures++;
      $display("vector %0d: meta mismatch", k);
    end
    for (int t = 0; t < N; t++) begin
      rd_addr <= 10'(t);
      @(posedge eclk);
      @(negedge eclk);
      if (rd_data != vec[t]) bad++;
    end
    checks++;
    if (bad != 0) begin
      failures++;
      $display("vector %0d: %0d words wrong", k, bad);
    end
  endtask

  task automatic release_buf();
    rd_done <= 1;
    @(posedge eclk);
    rd_done <= 0;
    repeat (2) @(posedge eclk);
  endtask

  initial begin
    in_valid = 0; in_sof = 0; in_q = '0; in_meta = '0; rd_addr = '0; rd_done = 0;
    foreach (in_data[r]) in_data[r] = '0;
    repeat (3) @(posedge clk);
    rst <= 0;
    erst <= 0;
    for (int k = 0; k < 3; k++) begin
      dump();
      read_check(k);
      release_buf();
    end
    // reader busy on vector 3 while vector 4 completes
    dump();
    @(posedge eclk);
    while (!rd_avail) @(posedge eclk);
    repeat (20) @(posedge clk);
    dump();
    repeat (10) @(posedge eclk);
    checks++;
    if (dropped != 1) begin
      failures++;
      $display("dropped = %0d, expected 1", dropped);
    end
    release_buf();
    dump();
    read_check(5);
    release_buf();
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
