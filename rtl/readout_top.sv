// readout_top: four independent KID readout channels on one RFSoC fabric.
//
// Each dsp_chain serves one RF network: it plays a frequency comb to its D/A
// converter, channelizes the matching A/D stream, demodulates and accumulates
// every tone, and streams the results as UDP packets on its own GMII port of
// a four-port 1 GbE interface. One timing_counters block, fed by the
// external sync input, gives all four chains the same time stamps, so the
// packets of all channels can be aligned.
// Ports: clk is the fabric clock (four converter samples per clock per chain),
// eclk the 125 MHz Ethernet transmit clock with its own reset. The data
// converters, the processor's AXI4-Lite master and the Ethernet PHYs are
// outside this module and connect through the per-chain port arrays: index c
// of every array belongs to chain c. All AXI4-Lite address maps are the same
// (see axil_regs); an interconnect outside gives each chain its own window.
// The four-chain layout, the sync input and the per-chain network streams
// follow the paper; the port arrangement is this design's choice.
module readout_top
  import readout_pkg::*;
#(
  parameter int NCHAIN      = 4,
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
  input  logic  sync_in,
  // data converters
  input  logic  adc_valid [NCHAIN],
  input  samp_t adc_data  [NCHAIN][LANES],
  output logic  dac_valid [NCHAIN],
  output samp_t dac_data  [NCHAIN][LANES],
  // AXI4-Lite slaves, one per chain
  input  logic [AW-1:0] s_awaddr [NCHAIN],
  input  logic        s_awvalid [NCHAIN],
  output logic        s_awready [NCHAIN],
  input  logic [31:0] s_wdata   [NCHAIN],
  input  logic        s_wvalid  [NCHAIN],
  output logic        s_wready  [NCHAIN],
  output logic [1:0]  s_bresp   [NCHAIN],
  output logic        s_bvalid  [NCHAIN],
  input  logic        s_bready  [NCHAIN],
  input  logic [AW-1:0] s_araddr [NCHAIN],
  input  logic        s_arvalid [NCHAIN],
  output logic        s_arready [NCHAIN],
  output logic [31:0] s_rdata   [NCHAIN],
  output logic [1:0]  s_rresp   [NCHAIN],
  output logic        s_rvalid  [NCHAIN],
  input  logic        s_rready  [NCHAIN],
  // GMII transmit, one per chain
  output logic [7:0]  txd   [NCHAIN],
  output logic        tx_en [NCHAIN],
  // time stamps, for monitoring
  output logic [63:0] timestamp,
  output logic [31:0] sync_count
);
  logic [63:0] sync_time;

  timing_counters u_time (
    .clk, .rst, .sync_in, .timestamp, .sync_count, .sync_time
  );

  for (genvar c = 0; c < NCHAIN; c++) begin : g_chain
    dsp_chain #(
      .N(N), .TAPS(TAPS), .COMB_DEPTH(COMB_DEPTH), .BEAT_FRAMES(BEAT_FRAMES), .AW(AW)
    ) u_chain (
      .clk, .rst, .eclk, .erst,
      .adc_valid(adc_valid[c]), .adc_data(adc_data[c]),
      .dac_valid(dac_valid[c]), .dac_data(dac_data[c]),
      .timestamp, .sync_count, .sync_time,
      .s_awaddr(s_awaddr[c]), .s_awvalid(s_awvalid[c]), .s_awready(s_awready[c]),
      .s_wdata(s_wdata[c]), .s_wvalid(s_wvalid[c]), .s_wready(s_wready[c]),
      .s_bresp(s_bresp[c]), .s_bvalid(s_bvalid[c]), .s_bready(s_bready[c]),
      .s_araddr(s_araddr[c]), .s_arvalid(s_arvalid[c]), .s_arready(s_arready[c]),
      .s_rdata(s_rdata[c]), .s_rresp(s_rresp[c]), .s_rvalid(s_rvalid[c]),
      .s_rready(s_rready[c]),
      .txd(txd[c]), .tx_en(tx_en[c])
    );
  end
endmodule
