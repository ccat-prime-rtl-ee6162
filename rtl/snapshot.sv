// snapshot: capture memory for the diagnostic taps between the DSP stages.
//
// The chain exposes NTAP = 4 diagnostic points: the A/D samples entering the
// filterbank, the filterbank bins, the down-converted (DDC) values and the
// accumulated vectors. Software selects one with tap_sel and pulses arm; the
// block then waits for the start of a frame on that tap (tap_sof; for the A/D
// tap, which has no frames, the chain drives tap_sof with the valid so the
// capture starts on its next word) and stores the next N/4
// valid words, four lanes each, i.e. N values. done rises when the buffer is
// full and stays high until the next arm. Values are stored sign-extended to
// 32-bit I and Q (acc_t). The buffer is read back by value index rd_addr
// (value 4q + r is lane r of word q); rd_data follows rd_addr by one clock.
// Filterbank bins are stored in the FFT output order: word q holds bins
// k' + m*N/4 with k' the bit-reversed q.
// The tap positions follow the chain's block diagram; what is captured, the
// capture length and the arm/done protocol are this design's choice.
module snapshot
  import readout_pkg::*;
#(
  parameter int N    = 1024,
  parameter int NTAP = 4
) (
  input  logic clk,
  input  logic rst,
  // control
  input  logic arm,
  input  logic [$clog2(NTAP)-1:0] tap_sel,
  output logic done,
  // taps
  input  logic tap_valid [NTAP],
  input  logic tap_sof   [NTAP],
  input  acc_t tap_data  [NTAP][LANES],
  // read-back
  input  logic [$clog2(N)-1:0] rd_addr,
  output acc_t rd_data
);
  localparam int NL = N / LANES;
  localparam int QW = $clog2(NL);

  typedef enum logic [1:0] {S_IDLE, S_ARMED, S_CAPT} state_t;
  state_t                  state;
  logic [$clog2(NTAP)-1:0] sel;
  logic [QW-1:0]           wcnt;
  logic                    we, v, s;

  assign v  = tap_valid[sel];
  assign s  = tap_sof[sel];
  assign we = v && ((state == S_CAPT) || (state == S_ARMED && s));

  always_ff @(posedge clk) begin
    if (rst) begin
      state <= S_IDLE;
      sel   <= '0;
      wcnt  <= '0;
      done  <= 1'b0;
    end else if (arm) begin
      state <= S_ARMED;
      sel   <= tap_sel;
      wcnt  <= '0;
      done  <= 1'b0;
    end else if (we) begin
      state <= S_CAPT;
      wcnt  <= wcnt + 1'b1;
      if (wcnt == QW'(NL - 1)) begin
        state <= S_IDLE;
        done  <= 1'b1;
      end
    end
  end

  acc_t rd_lane [LANES];
  logic [1:0] rd_r;

  for (genvar r = 0; r < LANES; r++) begin : g_lane
    acc_t mem [NL];
    always_ff @(posedge clk) begin
      if (we) mem[wcnt] <= tap_data[sel][r];
      rd_lane[r] <= mem[rd_addr[$clog2(N)-1:2]];
    end
  end

  always_ff @(posedge clk) rd_r <= rd_addr[1:0];
  assign rd_data = rd_lane[rd_r];

  initial assert (LANES == 4) else $error("snapshot assumes LANES == 4");
endmodule
