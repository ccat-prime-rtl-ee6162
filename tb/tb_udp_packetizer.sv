// tb_udp_packetizer: decodes the transmitted frames byte by byte.
//
// A model of the clock-crossing buffer offers two vectors of random I/Q words
// with random time-stamp words. Each transmitted frame is captured from
// txd/tx_en and checked: preamble and start delimiter, MAC addresses and
// type, IPv4 length and header checksum (the one's-complement sum of the
// header must be FFFFh), UDP ports and length, the payload header (packet
// counter, sync count, time stamps), every tone's I and Q, the CRC-32 frame
// check sequence (recomputed here bit by bit) and the inter-frame gap. The
// frame must take exactly 8 + 42 + 24 + 8N + 4 byte clocks.
module tb_udp_packetizer;
  import readout_pkg::*;
  localparam int N = 1024;

  logic eclk = 0, erst = 1;
  always #4 eclk = ~eclk;
  logic rd_avail, rd_done, tx_en;
  logic [159:0] rd_meta;
  logic [9:0] rd_addr;
  acc_t rd_data;
  logic [7:0] txd;
  logic [31:0] pkt_count;

  udp_packetizer #(.N(N)) dut (.*);

  int checks = 0, failures = 0;
  logic [31:0] mem_re [N], mem_im [N];
  byte unsigned frame [$];
  int frames_done = 0;

  initial begin
    #2000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge eclk) begin
    rd_data.re <= mem_re[rd_addr];
    rd_data.im <= mem_im[rd_addr];
  end

  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 15) $display("frame %0d: %s", frames_done, what);
    end
  endtask

  function automatic logic [31:0] crc_of(int from, int to);
    logic [31:0] c = 32'hFFFFFFFF;
    for (int i = from; i < to; i++) begin
      c ^= 32'(frame[i]);
      for (int b = 0; b < 8; b++) c = c[0] ? ((c >> 1) ^ 32'hEDB88320) : (c >> 1);
    end
    return ~c;
  endfunction

  function automatic longint be(int at, int nbytes);
    longint v = 0;
    for (int i = 0; i < nbytes; i++) v = (v << 8) | longint'(frame[at + i]);
    return v;
  endfunction

  task automatic check_frame(int pkt);
    int len = frame.size();
    int e = 8;               // Ethernet header start
    int ip = e + 14, udp = ip + 20, pay = udp + 8;
    longint s;
    chk(len == 8 + 42 + 24 + 8 * N + 4, $sformatf("length %0d", len));
    for (int i = 0; i < 7; i++) chk(frame[i] == 8'h55, "preamble");
    chk(frame[7] == 8'hD5, "SFD");
    chk(be(e, 6) == 48'hFFFFFFFFFFFF, "dst mac");
    chk(be(e + 6, 6) == 48'h020000000001, "src mac");
    chk(be(e + 12, 2) == 16'h0800, "ethertype");
    chk(frame[ip] == 8'h45, "ip version");
    chk(be(ip + 2, 2) == 20 + 8 + 24 + 8 * N, "ip length");
    chk(frame[ip + 9] == 8'h11, "ip protocol");
    s = 0;
    for (int i = 0; i < 10; i++) s += be(ip + 2 * i, 2);
    while (s > 65535) s = (s & 65535) + (s >> 16);
    chk(s == 65535, "ip checksum");
    chk(be(udp + 2, 2) == 4096, "udp dst port");
    chk(be(udp + 4, 2) == 8 + 24 + 8 * N, "udp length");
    chk(be(pay, 4) == pkt, "packet counter");
    chk(be(pay + 4, 4) == rd_meta[159:128], "sync count");
    chk(be(pay + 8, 8) == rd_meta[127:64], "timestamp");
    chk(be(pay + 16, 8) == rd_meta[63:0], "sync time");
    for (int t = 0; t < N; t++) begin
      chk(be(pay + 24 + 8 * t, 4) == mem_re[t], $sformatf("tone %0d I", t));
      chk(be(pay + 28 + 8 * t, 4) == mem_im[t], $sformatf("tone %0d Q", t));
    end
    chk(be(len - 4, 4) == {<<8{crc_of(8, len - 4)}}, "FCS");
  endtask

  initial begin
    rd_avail = 0; rd_meta = '0;
    repeat (3) @(posedge eclk);
    erst <= 0;
    for (int pkt = 0; pkt < 2; pkt++) begin
      for (int t = 0; t < N; t++) begin
        mem_re[t] = $urandom;
        mem_im[t] = $urandom;
      end
      rd_meta  <= {$urandom, $urandom, $urandom, $urandom, $urandom};
      rd_avail <= 1;
      @(posedge eclk);
      while (!rd_done) @(posedge eclk);
      rd_avail <= 0;
      // wait for the frame to be captured
      while (frames_done == pkt) @(posedge eclk);
      check_frame(pkt);
      frame.delete();
    end
    chk(pkt_count == 2, "pkt_count");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // capture; a frame ends when tx_en falls, the gap must last 12 clocks
  logic en_d = 0;
  int gap = 0;
  always @(posedge eclk) begin
    en_d <= tx_en;
    if (!erst) begin
      if (tx_en) begin
        if (!en_d && frames_done > 0) chk(gap >= 12, $sformatf("gap %0d", gap));
        frame.push_back(txd);
        gap = 0;
      end else begin
        gap++;
        if (en_d) frames_done++;
      end
    end
  end
endmodule
