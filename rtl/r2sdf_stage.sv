// r2sdf_stage: one radix-2 single-path delay-feedback (R2SDF) butterfly stage
// of a streaming decimation-in-frequency FFT.
//
// The stage takes one complex sample per valid cycle. A D-deep feedback
// memory holds the first half of every 2*D-sample block; during the second
// half the stage emits (a+b)/2 and stores (a-b)/2 * W_{2D}^j, which it emits
// during the first half of the next block. Seen in samples (not cycles) the
// stage delays the stream by exactly D, so a chain of stages D = N/2 .. 1
// produces an N-point DFT, scaled by 1/N, in bit-reversed order, N-1 samples
// after its input. The output is registered; the stage holds its state
// whenever in_valid is low, so gaps in the stream are allowed.
// The R2SDF structure is this design's choice: the paper asks only for an
// N-point FFT. The 1/2 scaling per stage keeps the word width constant.
module r2sdf_stage
  import readout_pkg::*;
#(
  parameter int D = 128              // feedback depth = half the block size
) (
  input  logic clk,
  input  logic rst,
  input  logic in_valid,
  input  bin_t in_data,
  output logic out_valid,
  output bin_t out_data
);
  localparam int CW = $clog2(2 * D);
  localparam int AW = (D > 1) ? $clog2(D) : 1;

  typedef logic signed [TW_W-1:0] tw_tab_t [D];
  function automatic tw_tab_t gen_cos();
    tw_tab_t t;
    for (int j = 0; j < D; j++) t[j] = tw_cos(j, 2 * D);
    return t;
  endfunction
  function automatic tw_tab_t gen_msin();
    tw_tab_t t;
    for (int j = 0; j < D; j++) t[j] = tw_msin(j, 2 * D);
    return t;
  endfunction
  localparam tw_tab_t TW_RE = gen_cos();
  localparam tw_tab_t TW_IM = gen_msin();

  logic [CW-1:0] cnt;
  logic [AW-1:0] ptr;
  logic          second_half;
  bin_t          fifo [D];
  bin_t          fifo_out, fifo_in, y;

  assign ptr         = AW'(cnt % CW'(D));
  assign second_half = cnt >= CW'(D);
  assign fifo_out    = fifo[ptr];

  logic signed [BIN_W:0]   sum_re, sum_im, dif_re, dif_im;
  logic signed [BIN_W-1:0] hd_re, hd_im;
  logic signed [TW_W-1:0]  w_re, w_im;
  logic signed [BIN_W+TW_W:0] p_re, p_im;

  always_comb begin
    sum_re = fifo_out.re + in_data.re;
    sum_im = fifo_out.im + in_data.im;
    dif_re = fifo_out.re - in_data.re;
    dif_im = fifo_out.im - in_data.im;
    hd_re  = BIN_W'(dif_re >>> 1);
    hd_im  = BIN_W'(dif_im >>> 1);
    w_re   = TW_RE[ptr];
    w_im   = TW_IM[ptr];
    p_re   = hd_re * w_re - hd_im * w_im;
    p_im   = hd_re * w_im + hd_im * w_re;
    if (second_half) begin
      y.re       = BIN_W'(sum_re >>> 1);
      y.im       = BIN_W'(sum_im >>> 1);
      fifo_in.re = BIN_W'(rshift_round(64'(p_re), TW_FRAC));
      fifo_in.im = BIN_W'(rshift_round(64'(p_im), TW_FRAC));
    end else begin
      y       = fifo_out;
      fifo_in = in_data;
    end
  end

  always_ff @(posedge clk) begin
    if (in_valid) fifo[ptr] <= fifo_in;
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      cnt       <= '0;
      out_valid <= 1'b0;
      out_data  <= '0;
    end else begin
      out_valid <= in_valid;
      if (in_valid) begin
        cnt      <= cnt + 1'b1;
        out_data <= y;
      end
    end
  end
endmodule
