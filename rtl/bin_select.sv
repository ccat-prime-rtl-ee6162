// bin_select: picks, for every tone, the FFT bin that holds it.
//
// Resonators are closer together than one 500 kHz bin about half the time, so
// one bin may feed several tones. The block therefore buffers a whole frame
// of N bins and then reads out a programmed list of NTONE = N bin numbers,
// one per tone slot, in which a bin may appear any number of times.
//
// Write side: the FFT delivers four bins per clock (k', k'+N/4, k'+N/2,
// k'+3N/4, see fft_par4). Bin k'+m*N/4 is written to bank m at address k'.
// The buffer is double-buffered (ping-pong pages): one page fills while the
// previous frame is read.
// Read side: tone slot s = 4*q + r is produced on lane r at read cycle q,
// q = 0..N/4-1, so a frame of tones also leaves at four per clock. To serve
// four arbitrary bins per clock every read lane has its own copy of the four
// banks (16 memories of 2*N/4 words). The tone-to-bin table is written by the
// processor through sel_we/sel_addr (tone slot)/sel_bin (bin number, 0..N-1);
// bins N/2..N-1 are the negative baseband frequencies.
// Timing: reading a frame starts the clock after its last bin is written and
// takes N/4 clocks; out_* follow the table read by two clocks. out_frame
// counts the frames read, for the beat-waveform lookup.
// The function (buffer the bins, select a bin repeatedly) is the paper's; the
// banked, replicated buffer and the slot ordering are this design's choice.
module bin_select
  import readout_pkg::*;
#(
  parameter int N  = 1024,
  parameter int FW = 16                  // width of the frame counter
) (
  input  logic clk,
  input  logic rst,
  // from the FFT
  input  logic in_valid,
  input  logic in_sof,
  input  logic in_frame_ok,
  input  logic [$clog2(N/LANES)-1:0] in_kp,
  input  bin_t in_bins [LANES],
  // table write port
  input  logic                 sel_we,
  input  logic [$clog2(N)-1:0] sel_addr,
  input  logic [$clog2(N)-1:0] sel_bin,
  // selected bins, tone slot 4*out_q + r on lane r
  output logic                 out_valid,
  output logic                 out_sof,
  output logic [$clog2(N/LANES)-1:0] out_q,
  output logic [FW-1:0]        out_frame,
  output bin_t                 out_bins [LANES]
);
  localparam int NL = N / LANES;
  localparam int QW = $clog2(NL);
  localparam int BW = $clog2(N);

  // ---------------- write side
  logic          wpage;
  logic [QW-1:0] wcnt;
  logic          frame_done;

  always_ff @(posedge clk) begin
    if (rst) begin
      wpage      <= 1'b0;
      wcnt       <= '0;
      frame_done <= 1'b0;
    end else begin
      frame_done <= 1'b0;
      if (in_valid && in_frame_ok) begin
        wcnt <= in_sof ? QW'(1) : wcnt + 1'b1;
        if ((in_sof ? '0 : wcnt) == QW'(NL - 1)) begin
          frame_done <= 1'b1;
          wpage      <= ~wpage;
        end
      end
    end
  end

  // ---------------- read sequencing
  logic          reading, rpage;
  logic [QW-1:0] rcnt;
  logic [FW-1:0] fcnt;

  always_ff @(posedge clk) begin
    if (rst) begin
      reading <= 1'b0;
      rpage   <= 1'b0;
      rcnt    <= '0;
      fcnt    <= '0;
    end else begin
      if (reading) begin
        rcnt <= rcnt + 1'b1;
        if (rcnt == QW'(NL - 1)) begin
          reading <= 1'b0;
          fcnt    <= fcnt + 1'b1;
        end
      end
      // a new frame may complete on the last read clock of the previous one
      if (frame_done) begin
        reading <= 1'b1;
        rpage   <= ~wpage;         // wpage already flipped: the page just filled
        rcnt    <= '0;
      end
    end
  end

  // pipeline: stage 1 reads the table, stage 2 reads the bin buffer
  logic          s1_valid, s1_sof, s1_page;
  logic [QW-1:0] s1_q;
  logic [FW-1:0] s1_frame;

  always_ff @(posedge clk) begin
    if (rst) begin
      s1_valid  <= 1'b0;
      s1_sof    <= 1'b0;
      out_valid <= 1'b0;
      out_sof   <= 1'b0;
    end else begin
      s1_valid  <= reading;
      s1_sof    <= reading && rcnt == '0;
      out_valid <= s1_valid;
      out_sof   <= s1_valid && s1_sof;
    end
  end

  always_ff @(posedge clk) begin
    s1_page  <= rpage;
    s1_q     <= rcnt;
    s1_frame <= fcnt;
    out_q     <= s1_q;
    out_frame <= s1_frame;
  end

  for (genvar r = 0; r < LANES; r++) begin : g_rd
    logic [BW-1:0] sel_tab [NL];
    logic [BW-1:0] s1_bin;
    bin_t          bank [LANES][2 * NL];

    always_ff @(posedge clk) begin
      if (sel_we && sel_addr[1:0] == 2'(r)) sel_tab[sel_addr[BW-1:2]] <= sel_bin;
      s1_bin <= sel_tab[rcnt];
    end

    for (genvar m = 0; m < LANES; m++) begin : g_bank
      always_ff @(posedge clk) begin
        if (in_valid && in_frame_ok) bank[m][{wpage, in_kp}] <= in_bins[m];
      end
    end

    always_ff @(posedge clk) begin
      out_bins[r] <= bank[s1_bin[BW-1:QW]][{s1_page, s1_bin[QW-1:0]}];
    end
  end

  // the table address splits into lane (2 bits) and slot word: LANES must be 4
  initial assert (LANES == 4) else $error("bin_select assumes LANES == 4");
endmodule
