// vector_accum: the vector accumulator, second half of the fine channelizer.
//
// For every tone slot it sums the down-converted values of nacc consecutive
// frames, then emits the whole vector of sums once and starts again. This
// both averages and down-samples: with 500 kHz frames and nacc = 1024 each
// tone is reported at about 488 Hz.
// Data arrive four tones per clock (slot 4*in_q + r on lane r), one frame per
// N/4 clocks, frame start marked by in_sof. Each lane keeps a memory of N/4
// accumulators (ACC_W-bit I/Q). In the first frame of an accumulation the
// input overwrites the accumulator; in the last frame acc + input goes to
// the output instead of back to memory. Sums saturate at the ACC_W range.
// nacc (0 is taken as 1) may be changed at any time; the new value is taken
// at the start of the next accumulation, so the stream is never torn.
// Output: out_valid for the N/4 clocks of the dump, out_sof on its first
// clock, out_seq counting dumps; out_* follow the input by one clock.
// The paper gives the function and the on-the-fly programmable number of
// accumulations; the memory layout and saturation are this design's choice.
module vector_accum
  import readout_pkg::*;
#(
  parameter int N  = 1024,
  parameter int NW = 16                   // width of the nacc register
) (
  input  logic  clk,
  input  logic  rst,
  input  logic [NW-1:0] nacc,
  input  logic  in_valid,
  input  logic  in_sof,
  input  logic [$clog2(N/LANES)-1:0] in_q,
  input  bin_t  in_data [LANES],
  output logic  out_valid,
  output logic  out_sof,
  output logic [$clog2(N/LANES)-1:0] out_q,
  output logic [31:0] out_seq,
  output acc_t  out_data [LANES]
);
  localparam int NL = N / LANES;
  localparam int QW = $clog2(NL);

  logic [NW-1:0] fidx, ncur;
  logic          first_q, last_q, first_c, last_c;
  logic [NW-1:0] n_eff_new;

  assign n_eff_new = (nacc == '0) ? NW'(1) : nacc;

  // flags of the current frame: taken at its first word
  always_comb begin
    if (in_sof) begin
      first_c = (fidx == '0);
      last_c  = (fidx == '0) ? (n_eff_new == NW'(1)) : (fidx == ncur - 1'b1);
    end else begin
      first_c = first_q;
      last_c  = last_q;
    end
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      fidx    <= '0;
      ncur    <= NW'(1);
      first_q <= 1'b0;
      last_q  <= 1'b0;
      out_seq <= '0;
    end else if (in_valid) begin
      first_q <= first_c;
      last_q  <= last_c;
      if (in_sof && fidx == '0) ncur <= n_eff_new;
      if (in_q == QW'(NL - 1)) begin
        fidx <= last_c ? '0 : fidx + 1'b1;
        if (last_c) out_seq <= out_seq + 1'b1;
      end
    end
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      out_valid <= 1'b0;
      out_sof   <= 1'b0;
    end else begin
      out_valid <= in_valid && last_c;
      out_sof   <= in_valid && last_c && in_q == '0;
    end
    out_q <= in_q;
  end

  function automatic logic signed [ACC_W-1:0] sat_add(logic signed [ACC_W-1:0] a,
                                                      logic signed [BIN_W-1:0] b);
    logic signed [ACC_W:0] s;
    s = a + b;
    if (s > (ACC_W+1)'((64'sd1 <<< (ACC_W - 1)) - 1)) return {1'b0, {(ACC_W-1){1'b1}}};
    if (s < -(ACC_W+1)'(64'sd1 <<< (ACC_W - 1)))      return {1'b1, {(ACC_W-1){1'b0}}};
    return s[ACC_W-1:0];
  endfunction

  for (genvar r = 0; r < LANES; r++) begin : g_lane
    acc_t mem [NL];
    acc_t old, sum;
    always_comb begin
      old    = first_c ? '0 : mem[in_q];
      sum.re = sat_add(old.re, in_data[r].re);
      sum.im = sat_add(old.im, in_data[r].im);
    end
    always_ff @(posedge clk) begin
      if (in_valid) begin
        mem[in_q] <= sum;
        if (last_c) out_data[r] <= sum;
      end
    end
  end
endmodule
