// dsp_chain: one complete readout channel, for one RF network of detectors.
//
// Transmit: comb_lut plays the programmed frequency comb to the D/A port,
// four samples per clock.
// Receive: the four-per-clock A/D samples pass through
//   pfb            N-channel polyphase filterbank (coarse channels, 500 kHz)
//   bin_select     picks, for every tone slot, the coarse bin holding its tone
//   beat_lut       supplies, per frame and tone slot, the residual (beat)
//                  frequency phasor, read with the frame number mod BEAT_FRAMES
//   ddc            multiplies each selected bin by that phasor, bringing the
//                  tone to 0 Hz
//   vector_accum   sums nacc frames per tone (fine channelization, low pass)
//   cdc_buffer     moves each accumulated vector to the Ethernet clock with a
//                  time stamp {sync_count, timestamp, sync_time}
//   udp_packetizer sends each vector as one UDP packet on the GMII port.
// axil_regs decodes the processor's AXI4-Lite accesses into the table writes
// and the nacc/play registers. snapshot captures one frame (N values) at one
// of four diagnostic taps, for reading back over AXI: 0 the A/D samples,
// 1 the filterbank bins, 2 the DDC output, 3 the accumulated vectors.
// Clocks: clk is the fabric clock of the converters' four-sample words; eclk
// is the 125 MHz GMII transmit clock. All blocks except the packetizer and the
// read side of cdc_buffer run on clk. The time-stamp inputs come from the
// shared timing_counters in the clk domain.
// The chain of blocks follows the paper's DSP chain figure; the parallel
// width, the word widths and the register map are this design's choices.
module dsp_chain
  import readout_pkg::*;
#(
  parameter int N           = 1024,
  parameter int TAPS        = 4,
  parameter int COMB_DEPTH  = 1 << 20,
  parameter int BEAT_FRAMES = 1024,
  parameter int AW          = 24
) (
  input  logic  clk,
  input  logic  rst,
  input  logic  eclk,
  input  logic  erst,
  // data converters
  input  logic  adc_valid,
  input  samp_t adc_data [LANES],
  output logic  dac_valid,
  output samp_t dac_data [LANES],
  // time stamps (clk domain)
  input  logic [63:0] timestamp,
  input  logic [31:0] sync_count,
  input  logic [63:0] sync_time,
  // AXI4-Lite slave
  input  logic [AW-1:0] s_awaddr,
  input  logic        s_awvalid,
  output logic        s_awready,
  input  logic [31:0] s_wdata,
  input  logic        s_wvalid,
  output logic        s_wready,
  output logic [1:0]  s_bresp,
  output logic        s_bvalid,
  input  logic        s_bready,
  input  logic [AW-1:0] s_araddr,
  input  logic        s_arvalid,
  output logic        s_arready,
  output logic [31:0] s_rdata,
  output logic [1:0]  s_rresp,
  output logic        s_rvalid,
  input  logic        s_rready,
  // GMII transmit (eclk domain)
  output logic [7:0]  txd,
  output logic        tx_en
);
  localparam int QW = $clog2(N / LANES);
  localparam int BW = $clog2(N);

  // ---- registers and table writes
  logic [15:0] nacc;
  logic        play_en;
  logic [31:0] dropped, pkt_count, vec_count;
  logic        comb_we, beat_we, sel_we;
  logic [19:0] comb_addr, beat_addr;
  samp_t       comb_data;
  beat_t       beat_data;
  logic [9:0]  sel_addr, sel_bin;
  logic        snap_arm, snap_done;
  logic [1:0]  snap_tap;
  logic [9:0]  snap_addr;
  acc_t        snap_data;

  axil_regs #(.AW(AW)) u_regs (
    .clk, .rst,
    .s_awaddr, .s_awvalid, .s_awready, .s_wdata, .s_wvalid, .s_wready,
    .s_bresp, .s_bvalid, .s_bready, .s_araddr, .s_arvalid, .s_arready,
    .s_rdata, .s_rresp, .s_rvalid, .s_rready,
    .nacc, .play_en, .dropped, .pkt_count, .vec_count,
    .comb_we, .comb_addr, .comb_data, .beat_we, .beat_addr, .beat_data,
    .sel_we, .sel_addr, .sel_bin,
    .snap_arm, .snap_tap, .snap_done, .snap_addr, .snap_data
  );

  // ---- transmit
  comb_lut #(.DEPTH(COMB_DEPTH)) u_comb (
    .clk, .rst,
    .wr_en(comb_we), .wr_addr(comb_addr[$clog2(COMB_DEPTH)-1:0]), .wr_data(comb_data),
    .play_en, .dac_valid, .dac_data
  );

  // ---- receive
  logic          pfb_valid, pfb_sof, pfb_ok;
  logic [QW-1:0] pfb_kp;
  bin_t          pfb_bins [LANES];

  pfb #(.N(N), .TAPS(TAPS)) u_pfb (
    .clk, .rst, .in_valid(adc_valid), .in_data(adc_data),
    .out_valid(pfb_valid), .out_sof(pfb_sof), .out_frame_ok(pfb_ok),
    .out_kp(pfb_kp), .out_bins(pfb_bins)
  );

  logic          sel_valid, sel_sof;
  logic [QW-1:0] sel_q;
  logic [15:0]   sel_frame;
  bin_t          sel_bins [LANES];

  bin_select #(.N(N)) u_sel (
    .clk, .rst,
    .in_valid(pfb_valid), .in_sof(pfb_sof), .in_frame_ok(pfb_ok), .in_kp(pfb_kp),
    .in_bins(pfb_bins),
    .sel_we, .sel_addr(sel_addr[BW-1:0]), .sel_bin(sel_bin[BW-1:0]),
    .out_valid(sel_valid), .out_sof(sel_sof), .out_q(sel_q), .out_frame(sel_frame),
    .out_bins(sel_bins)
  );

  beat_t beat [LANES];

  beat_lut #(.N(N), .BEAT_FRAMES(BEAT_FRAMES)) u_beat (
    .clk,
    .wr_en(beat_we), .wr_addr(beat_addr[$clog2(BEAT_FRAMES)+BW-1:0]), .wr_data(beat_data),
    .rd_en(sel_valid), .rd_frame(sel_frame), .rd_q(sel_q), .rd_beat(beat)
  );

  logic          ddc_valid, ddc_sof;
  logic [QW-1:0] ddc_q;
  bin_t          ddc_data [LANES];

  ddc #(.N(N), .BEAT_LAT(1)) u_ddc (
    .clk, .rst,
    .in_valid(sel_valid), .in_sof(sel_sof), .in_q(sel_q), .in_bins(sel_bins),
    .beat,
    .out_valid(ddc_valid), .out_sof(ddc_sof), .out_q(ddc_q), .out_data(ddc_data)
  );

  logic          acc_valid, acc_sof;
  logic [QW-1:0] acc_q;
  acc_t          acc_data [LANES];

  vector_accum #(.N(N)) u_acc (
    .clk, .rst, .nacc,
    .in_valid(ddc_valid), .in_sof(ddc_sof), .in_q(ddc_q), .in_data(ddc_data),
    .out_valid(acc_valid), .out_sof(acc_sof), .out_q(acc_q), .out_seq(vec_count),
    .out_data(acc_data)
  );

  // ---- clock crossing and network
  logic          rd_avail, rd_done;
  logic [159:0]  rd_meta;
  logic [BW-1:0] rd_addr;
  acc_t          rd_data;

  cdc_buffer #(.N(N), .MW(160)) u_cdc (
    .clk, .rst,
    .in_valid(acc_valid), .in_sof(acc_sof), .in_q(acc_q), .in_data(acc_data),
    .in_meta({sync_count, timestamp, sync_time}),
    .eclk, .erst, .rd_avail, .rd_meta, .rd_addr, .rd_data, .rd_done,
    .dropped
  );

  // ---- diagnostic taps, at the four points marked in the chain's diagram
  logic tap_valid [4], tap_sof [4];
  acc_t tap_data  [4][LANES];

  always_comb begin
    tap_valid[0] = adc_valid;              tap_sof[0] = adc_valid;
    tap_valid[1] = pfb_valid && pfb_ok;    tap_sof[1] = pfb_sof;
    tap_valid[2] = ddc_valid;              tap_sof[2] = ddc_sof;
    tap_valid[3] = acc_valid;              tap_sof[3] = acc_sof;
    for (int r = 0; r < LANES; r++) begin
      tap_data[0][r] = '{re: ACC_W'(adc_data[r].re), im: ACC_W'(adc_data[r].im)};
      tap_data[1][r] = '{re: ACC_W'(pfb_bins[r].re), im: ACC_W'(pfb_bins[r].im)};
      tap_data[2][r] = '{re: ACC_W'(ddc_data[r].re), im: ACC_W'(ddc_data[r].im)};
      tap_data[3][r] = acc_data[r];
    end
  end

  snapshot #(.N(N), .NTAP(4)) u_snap (
    .clk, .rst, .arm(snap_arm), .tap_sel(snap_tap), .done(snap_done),
    .tap_valid, .tap_sof, .tap_data,
    .rd_addr(snap_addr[BW-1:0]), .rd_data(snap_data)
  );

  udp_packetizer #(.N(N)) u_udp (
    .eclk, .erst, .rd_avail, .rd_meta, .rd_addr, .rd_data, .rd_done,
    .txd, .tx_en, .pkt_count
  );
endmodule
