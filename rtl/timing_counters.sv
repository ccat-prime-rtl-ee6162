// timing_counters: time-stamping for the detector data packets.
//
// A free-running 64-bit counter of fabric clocks gives every accumulated
// vector a time stamp. The sync input (an external pulse, e.g. GPS
// pulse-per-second, half-wave-plate or pointing trigger, digitised by a small
// board on the PMOD connector) is asynchronous: it passes a two-flop
// synchroniser, its rising edges are counted, and the counter value at the
// last edge is kept, so each packet can be placed against the sync pulses.
// All outputs change on clk; a sync edge shows up three clocks after it
// occurs (two synchroniser flops and the edge register).
// The paper lists these timing signals (free-running counter, digitised
// sync); the widths and the edge-time capture are this design's choice.
module timing_counters (
  input  logic        clk,
  input  logic        rst,
  input  logic        sync_in,
  output logic [63:0] timestamp,
  output logic [31:0] sync_count,
  output logic [63:0] sync_time
);
  logic [2:0] sync_sr;

  always_ff @(posedge clk) begin
    if (rst) begin
      sync_sr    <= '0;
      timestamp  <= '0;
      sync_count <= '0;
      sync_time  <= '0;
    end else begin
      sync_sr   <= {sync_sr[1:0], sync_in};
      timestamp <= timestamp + 1'b1;
      if (sync_sr[1] && !sync_sr[2]) begin
        sync_count <= sync_count + 1'b1;
        sync_time  <= timestamp;
      end
    end
  end
endmodule
