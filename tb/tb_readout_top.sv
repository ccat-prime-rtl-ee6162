// tb_readout_top: end-to-end loopback test of the four-channel readout.
//
// Each chain's D/A output is wired straight back to its A/D input, as in an
// RF loopback. Through the AXI4-Lite ports (all four chains programmed alike)
// the test loads a frequency comb of four tones, two of them in the same
// filterbank bin, the tone-to-bin table (with one bin selected twice) and the
// beat phasors exp(-j*2*pi*delta*t) that cancel each tone's offset delta from
// its bin centre. It runs first with nacc = 2, so short that the Ethernet
// side cannot keep up and vectors are dropped, then switches to nacc = 64.
// Sync pulses are applied throughout.
// Every GMII frame of every chain is decoded: preamble, length, CRC and a
// gap-free packet counter. For vectors accumulated wholly at nacc = 64:
//   - consecutive vectors must be bit-identical for the checked tones: the
//     comb repeats every 16 frames and 64 frames cover whole periods, so any
//     error in bin selection, beat alignment or accumulation shows up;
//   - the on-bin tone must equal 64 * A * (filter DC gain) * 2^8 within 1 %
//     (filterbank outputs carry 8 fraction bits more than the samples);
//   - the offset tones must keep at least 30 % of that (without the beat
//     correction they would average to nearly zero);
//   - the duplicated slot must equal the slot it repeats.
// Packet time stamps and sync counts must follow the pulses applied. At the
// end the status registers are read back, and a diagnostic snapshot of the
// accumulator output, read over AXI, must equal the vectors in the packets. The test counts each mechanism
// (packets, drops, nacc switch, sync capture, repeated bin, comb wrap-around,
// stable vectors, snapshot reads) and fails any that never happened.
// Reduced size: N = 64 channels, 16-frame comb (1024 samples).
module tb_readout_top;
  import readout_pkg::*;
  localparam int NCH   = 4;
  localparam int N     = 64;
  localparam int TAPS  = 4;
  localparam int BF    = 16;              // beat frames = comb period in frames
  localparam int DEPTH = N * BF;
  localparam int AW    = 24;
  localparam int NT    = 5;               // checked tone slots
  localparam int NACC  = 64;
  localparam int GOOD  = 6;               // stable vector pairs wanted per chain
  localparam longint WATCHDOG_NS = 2000000;
  localparam int PLEN  = 8 + 42 + 24 + 8 * N + 4;

  // tone slot: bin, offset in 1/16 bin, amplitude (slot 4 repeats slot 0)
  localparam int TBIN [NT] = '{5, 5, 20, 60, 5};
  localparam int TOFF [NT] = '{0, 4, -6, 2, 0};
  localparam int TAMP [NT] = '{4000, 3000, 3000, 2000, 0};

  logic clk = 0, rst = 1, eclk = 0, erst = 1, sync_in = 0;
  always #4 clk = ~clk;
  always #5 eclk = ~eclk;

  logic  adc_valid [NCH], dac_valid [NCH];
  samp_t adc_data [NCH][LANES], dac_data [NCH][LANES];
  logic [AW-1:0] s_awaddr [NCH], s_araddr [NCH];
  logic s_awvalid [NCH], s_awready [NCH], s_wvalid [NCH], s_wready [NCH];
  logic s_bvalid [NCH], s_bready [NCH], s_arvalid [NCH], s_arready [NCH];
  logic s_rvalid [NCH], s_rready [NCH];
  logic [31:0] s_wdata [NCH], s_rdata [NCH];
  logic [1:0] s_bresp [NCH], s_rresp [NCH];
  logic [7:0] txd [NCH];
  logic tx_en [NCH];
  logic [63:0] timestamp;
  logic [31:0] sync_count;

  readout_top #(.N(N), .TAPS(TAPS), .COMB_DEPTH(DEPTH), .BEAT_FRAMES(BF), .AW(AW)) dut (.*);
  // (the full-size copy of this test instantiates readout_top without parameters)

  // RF loopback
  always_comb
    for (int c = 0; c < NCH; c++) begin
      adc_valid[c] = dac_valid[c];
      adc_data[c]  = dac_data[c];
    end

  int checks = 0, failures = 0;
  int n_pkt = 0, n_drop = 0, n_switch = 0, n_sync = 0, n_repeat = 0, n_wrap = 0;
  int n_stable = 0, n_snap = 0;
  int good_pkts [NCH];
  longint switch_ts = -1;
  real gain;

  initial begin
    #(WATCHDOG_NS);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic fail(string msg);
    failures++;
    if (failures < 20) $display("%s", msg);
  endtask

  // ------------------------------------------------------------ AXI master
  // drives the same access on all four chains, which respond in lockstep
  task automatic axi_write(logic [AW-1:0] a, logic [31:0] d);
    for (int c = 0; c < NCH; c++) begin
      s_awaddr[c] <= a; s_wdata[c] <= d; s_awvalid[c] <= 1; s_wvalid[c] <= 1; s_bready[c] <= 1;
    end
    @(posedge clk);
    while (!s_awready[0]) @(posedge clk);
    for (int c = 0; c < NCH; c++) begin s_awvalid[c] <= 0; s_wvalid[c] <= 0; end
    @(posedge clk);
    while (!s_bvalid[0]) @(posedge clk);
  endtask

  task automatic axi_read(logic [AW-1:0] a, output logic [31:0] d [NCH]);
    for (int c = 0; c < NCH; c++) begin
      s_araddr[c] <= a; s_arvalid[c] <= 1; s_rready[c] <= 1;
    end
    @(posedge clk);
    while (!s_arready[0]) @(posedge clk);
    for (int c = 0; c < NCH; c++) s_arvalid[c] <= 0;
    @(posedge clk);
    while (!s_rvalid[0]) @(posedge clk);
    for (int c = 0; c < NCH; c++) d[c] = s_rdata[c];
  endtask

  function automatic logic [31:0] iq(real re, real im);
    return {16'($rtoi($floor(re + 0.5))), 16'($rtoi($floor(im + 0.5)))};
  endfunction

  // ------------------------------------------------------------ stimulus
  initial begin
    real pi, hs, re, im, a;
    logic [31:0] st [NCH], pk [NCH], vc [NCH];
    pi = 3.14159265358979323846;
    hs = 0.0;
    for (int i = 0; i < TAPS * N; i++) begin
      automatic real u = (real'(i) + 0.5) / real'(N) - real'(TAPS) / 2.0;
      automatic real s = $sin(pi * u) / (pi * u);
      automatic real w = 0.5 - 0.5 * $cos(2.0 * pi * (real'(i) + 0.5) / real'(TAPS * N));
      hs += s * w;
    end
    gain = hs / real'(N) * 256.0;          // bins carry 8 extra fraction bits
    for (int c = 0; c < NCH; c++) begin
      s_awaddr[c] = '0; s_awvalid[c] = 0; s_wdata[c] = '0; s_wvalid[c] = 0; s_bready[c] = 0;
      s_araddr[c] = '0; s_arvalid[c] = 0; s_rready[c] = 0;
      good_pkts[c] = 0;
    end
    repeat (4) @(posedge clk);
    rst  <= 0;
    erst <= 0;
    @(posedge clk);
    axi_write(24'h0, 32'd2);                           // nacc = 2
    // comb: sum of tones, each an integer number of cycles per DEPTH samples
    for (int n = 0; n < DEPTH; n++) begin
      re = 0.0; im = 0.0;
      for (int s = 0; s < NT; s++) begin
        automatic longint kk = (TBIN[s] >= N / 2) ? TBIN[s] - N : TBIN[s];
        a = 2.0 * pi * real'(((16 * kk + TOFF[s]) * longint'(n)) % (16 * N)) / real'(16 * N);
        re += real'(TAMP[s]) * $cos(a);
        im += real'(TAMP[s]) * $sin(a);
      end
      axi_write({2'd1, 20'(n), 2'b00}, iq(re, im));
    end
    // tone-to-bin table and beat phasors
    for (int s = 0; s < NT; s++) begin
      axi_write({2'd3, 20'(s), 2'b00}, 32'(TBIN[s]));
      for (int t = 0; t < BF; t++) begin
        a = -2.0 * pi * real'(TOFF[s] * t) / 16.0;
        axi_write({2'd2, 20'(t * N + s), 2'b00}, iq(32767.0 * $cos(a), 32767.0 * $sin(a)));
      end
    end
    axi_write(24'h4, 32'd1);                           // play the comb
    repeat (120 * N / LANES) @(posedge clk);
    axi_read(24'h8, st);
    for (int c = 0; c < NCH; c++) begin
      checks++;
      if (st[c] == 0) fail($sformatf("chain %0d: no vectors dropped at nacc=2", c));
      else n_drop++;
    end
    switch_ts = longint'(timestamp);
    axi_write(24'h0, 32'(NACC));
    n_switch++;
    for (int k = 0; k < 4 * GOOD + 8 && (good_pkts[0] < GOOD || good_pkts[1] < GOOD ||
                                        good_pkts[2] < GOOD || good_pkts[3] < GOOD); k++)
      repeat (NACC * N / LANES) @(posedge clk);
    axi_read(24'h8, st);
    axi_read(24'hC, pk);
    axi_read(24'h10, vc);
    for (int c = 0; c < NCH; c++) begin
      checks++;
      if (pk[c] + st[c] > vc[c] || pk[c] + st[c] + 2 < vc[c])
        fail($sformatf("chain %0d: sent %0d + dropped %0d vs %0d vectors", c, pk[c], st[c], vc[c]));
    end
    // diagnostic snapshot of the accumulator tap: must equal the packets
    axi_write(24'h18, 32'b111);                      // tap 3, arm
    for (int k = 0; k < 4 * GOOD + 8; k++) begin
      axi_read(24'h1C, st);
      if (st[0][0] && st[1][0] && st[2][0] && st[3][0]) break;
      repeat (NACC * N / LANES) @(posedge clk);
    end
    for (int s = 0; s < NT; s++) begin
      axi_read(24'h8000 | 24'(s << 3), st);
      axi_read(24'h8004 | 24'(s << 3), pk);
      for (int c = 0; c < NCH; c++) begin
        checks++;
        if (longint'(signed'(st[c])) != prev_re[c][s] || longint'(signed'(pk[c])) != prev_im[c][s])
          fail($sformatf("chain %0d slot %0d: snapshot %0d,%0d packet %0d,%0d", c, s,
                         signed'(st[c]), signed'(pk[c]), prev_re[c][s], prev_im[c][s]));
        else n_snap++;
      end
    end
    // mechanisms
    checks += 8;
    if (n_snap == 0)   fail("no diagnostic snapshot matched");
    if (n_pkt == 0)    fail("no packet sent");
    if (n_drop == 0)   fail("no vector dropped");
    if (n_switch == 0) fail("nacc never switched");
    if (n_sync == 0)   fail("no sync pulse captured");
    if (n_repeat == 0) fail("repeated bin never checked");
    if (n_wrap == 0)   fail("comb never wrapped");
    if (n_stable == 0) fail("no stable vector pair");
    $display("packets %0d drops %0d switches %0d syncs %0d repeats %0d wraps %0d stable %0d snapshots %0d",
             n_pkt, n_drop, n_switch, n_sync, n_repeat, n_wrap, n_stable, n_snap);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // sync pulses every 2000 clocks
  int sync_applied = 0;
  longint pulse_ts [$];                   // time stamp at each applied pulse
  initial begin
    @(negedge rst);
    forever begin
      repeat (2000) @(posedge clk);
      pulse_ts.push_back(longint'(timestamp));
      sync_in <= 1;
      repeat (4) @(posedge clk);
      sync_in <= 0;
      sync_applied++;
    end
  end

  // comb wrap-around: playback longer than one period
  int play_words = 0;
  always @(posedge clk)
    if (!rst && dac_valid[0]) begin
      play_words++;
      if (play_words % (DEPTH / LANES) == 0) n_wrap++;
    end

  // ------------------------------------------------------------ packet checker
  function automatic logic [31:0] crc_byte(logic [31:0] c, logic [7:0] d);
    c = c ^ {24'h0, d};
    for (int i = 0; i < 8; i++) c = c[0] ? ((c >> 1) ^ 32'hEDB88320) : (c >> 1);
    return c;
  endfunction

  function automatic logic [63:0] be(ref logic [7:0] b [$], input int at, input int len);
    logic [63:0] v = '0;
    for (int i = 0; i < len; i++) v = {v[55:0], b[at + i]};
    return v;
  endfunction

  longint prev_re [NCH][NT], prev_im [NCH][NT];
  bit     have_prev [NCH], have_ref [NCH];
  longint last_pkt [NCH], last_sync [NCH];

  task automatic check_packet(int c, ref logic [7:0] b [$]);
    logic [31:0] crc = '1;
    longint re [NT], im [NT];
    longint ts, pc, sc, st, exp0;
    int npulse;
    n_pkt++;
    checks++;
    if (b.size() != PLEN) begin
      fail($sformatf("chain %0d: frame of %0d bytes, expected %0d", c, b.size(), PLEN));
      return;
    end
    for (int i = 8; i < PLEN - 4; i++) crc = crc_byte(crc, b[i]);
    checks++;
    if (be(b, 0, 8) != 64'h55555555555555D5 || be(b, PLEN - 4, 4) != 64'({<<8{~crc}}))
      fail($sformatf("chain %0d: bad preamble or FCS", c));
    pc = longint'(be(b, 50, 4));
    sc = longint'(be(b, 54, 4));
    ts = longint'(be(b, 58, 8));
    st = longint'(be(b, 66, 8));
    // pulses applied at least 4 clocks before the vector's time stamp must be
    // counted, and sync_time must be their capture time (3 synchroniser clocks)
    npulse = 0;
    foreach (pulse_ts[i]) if (pulse_ts[i] + 4 <= ts) npulse++;
    checks += 2;
    if (sc != npulse) fail($sformatf("chain %0d: sync count %0d, expected %0d", c, sc, npulse));
    else if (sc > 0 && (st < pulse_ts[sc - 1] + 1 || st > pulse_ts[sc - 1] + 4))
      fail($sformatf("chain %0d: sync time %0d, pulse applied at %0d", c, st, pulse_ts[sc - 1]));
    checks++;
    if (have_prev[c] && pc != last_pkt[c] + 1) fail($sformatf("chain %0d: packet %0d after %0d", c, pc, last_pkt[c]));
    if (c == 0 && have_prev[c] && sc != last_sync[c]) n_sync++;
    last_pkt[c]  = pc;
    last_sync[c] = sc;
    for (int s = 0; s < NT; s++) begin
      re[s] = longint'(signed'(32'(be(b, 74 + 8 * s, 4))));
      im[s] = longint'(signed'(32'(be(b, 78 + 8 * s, 4))));
    end
    if (switch_ts >= 0 && ts > switch_ts + 3 * NACC * N / LANES) begin
      exp0 = longint'(real'(NACC) * real'(TAMP[0]) * gain * 32767.0 / 32768.0);
      checks += 3;
      if (re[0] < exp0 - exp0 / 100 || re[0] > exp0 + exp0 / 100 ||
          im[0] < -exp0 / 100 || im[0] > exp0 / 100)
        fail($sformatf("chain %0d: on-bin tone %0d, %0di, expected %0d", c, re[0], im[0], exp0));
      for (int s = 1; s < 4; s++) begin
        automatic real mag = $sqrt(real'(re[s]) ** 2 + real'(im[s]) ** 2);
        automatic real ref_mag = real'(NACC) * real'(TAMP[s]) * gain;
        checks++;
        if (mag < 0.3 * ref_mag || mag > 1.05 * ref_mag)
          fail($sformatf("chain %0d slot %0d: magnitude %f, on-bin would be %f", c, s, mag, ref_mag));
      end
      if (re[4] != re[0] || im[4] != im[0]) fail($sformatf("chain %0d: repeated bin differs", c));
      else n_repeat++;
      if (have_ref[c]) begin
        automatic bit same = 1;
        for (int s = 0; s < NT; s++) if (re[s] != prev_re[c][s] || im[s] != prev_im[c][s]) same = 0;
        checks++;
        if (!same) fail($sformatf("chain %0d: vector changed between packets %0d and %0d", c, pc - 1, pc));
        else n_stable++;
        good_pkts[c]++;
      end
      for (int s = 0; s < NT; s++) begin prev_re[c][s] = re[s]; prev_im[c][s] = im[s]; end
      have_ref[c] = 1;
    end
    have_prev[c] = 1;
  endtask

  for (genvar c = 0; c < NCH; c++) begin : g_rx
    logic [7:0] bytes [$];
    logic was_en = 0;
    always @(posedge eclk) begin
      if (!erst) begin
        if (tx_en[c]) bytes.push_back(txd[c]);
        else if (was_en) begin
          check_packet(c, bytes);
          bytes.delete();
        end
        was_en <= tx_en[c];
      end
    end
  end
endmodule
