// cdc_buffer: dual-port, dual-clock memory that carries each accumulated
// vector from the DSP clock (clk) to the Ethernet clock (eclk).
//
// Write side (clk): the vector accumulator dumps N tones, four per clock
// (tone 4*in_q + r on lane r), into one of two pages. Time-stamp words
// (in_meta) are captured with the first word. After the last word the page
// is handed over by flipping a toggle flag that the read side receives
// through a two-flop synchroniser; the multi-bit page contents and time stamp
// are only read after that hand-over, so no other signal crosses unsafely.
// Read side (eclk): rd_avail says a complete vector is waiting; the reader
// (the UDP packetizer) fetches tone rd_addr (0..N-1), whose I/Q word is on
// rd_data one eclk later, and pulses rd_done when finished. A vector that
// completes while the reader is still busy is not sent and is counted in
// dropped (eclk domain). The writer alternates pages without looking at the
// reader, so a read must end before the next-but-one vector starts: one
// packet takes about 66 us at 1 Gb/s, a dump period is nacc * N/4 fabric
// clocks, so nacc >= 64 (at 128 MHz) keeps every packet intact.
// The paper specifies a dual-port memory crossing the clock domain; the
// ping-pong pages and the toggle hand-over are this design's choice.
module cdc_buffer
  import readout_pkg::*;
#(
  parameter int N  = 1024,
  parameter int MW = 160                 // width of the time-stamp word
) (
  // write side
  input  logic  clk,
  input  logic  rst,
  input  logic  in_valid,
  input  logic  in_sof,
  input  logic [$clog2(N/LANES)-1:0] in_q,
  input  acc_t  in_data [LANES],
  input  logic [MW-1:0] in_meta,
  // read side
  input  logic  eclk,
  input  logic  erst,
  output logic  rd_avail,
  output logic [MW-1:0] rd_meta,
  input  logic [$clog2(N)-1:0] rd_addr,
  output acc_t  rd_data,
  input  logic  rd_done,
  output logic [31:0] dropped
);
  localparam int NL = N / LANES;
  localparam int QW = $clog2(NL);

  // ---------------- write domain
  logic          wpage, wr_toggle;
  logic [MW-1:0] meta_mem [2];

  always_ff @(posedge clk) begin
    if (rst) begin
      wpage     <= 1'b0;
      wr_toggle <= 1'b0;
    end else if (in_valid && in_q == QW'(NL - 1)) begin
      wpage     <= ~wpage;
      wr_toggle <= ~wr_toggle;
    end
  end

  always_ff @(posedge clk) begin
    if (in_valid && in_sof) meta_mem[wpage] <= in_meta;
  end

  // ---------------- read domain
  logic [2:0] tog_sr;
  logic       new_vec;
  logic       busy, rpage, next_page;

  always_ff @(posedge eclk) begin
    if (erst) tog_sr <= '0;
    else      tog_sr <= {tog_sr[1:0], wr_toggle};
  end
  assign new_vec = tog_sr[2] ^ tog_sr[1];

  always_ff @(posedge eclk) begin
    if (erst) begin
      busy      <= 1'b0;
      rpage     <= 1'b0;
      next_page <= 1'b0;
      dropped   <= '0;
    end else begin
      if (new_vec) next_page <= ~next_page;
      if (!busy) begin
        if (new_vec) begin
          busy  <= 1'b1;
          rpage <= next_page;
        end
      end else begin
        if (rd_done) busy <= 1'b0;
        if (new_vec) dropped <= dropped + 1'b1;
      end
    end
  end

  assign rd_avail = busy;
  assign rd_meta  = meta_mem[rpage];

  // ---------------- memories: one per lane, written on clk, read on eclk
  acc_t lane_q [LANES];
  logic [1:0] lane_sel;

  for (genvar r = 0; r < LANES; r++) begin : g_mem
    acc_t mem [2 * NL];
    always_ff @(posedge clk) begin
      if (in_valid) mem[{wpage, in_q}] <= in_data[r];
    end
    always_ff @(posedge eclk) begin
      lane_q[r] <= mem[{rpage, rd_addr[$clog2(N)-1:2]}];
    end
  end

  always_ff @(posedge eclk) lane_sel <= rd_addr[1:0];
  assign rd_data = lane_q[lane_sel];
endmodule
