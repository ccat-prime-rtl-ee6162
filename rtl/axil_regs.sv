// axil_regs: AXI4-Lite slave through which the processor programs one DSP
// chain and reads its status.
//
// Address map (byte addresses, 32-bit words, AW = 24):
//   region addr[23:22] = 0  control and status registers, word addr[4:2]
//       0  NACC      (rw)  frames accumulated per output vector (0 acts as 1)
//       1  CONTROL   (rw)  bit 0: play the frequency comb
//       2  DROPPED   (ro)  vectors dropped because the network side was busy
//       3  PKT_COUNT (ro)  UDP packets sent
//       4  VEC_COUNT (ro)  accumulated vectors produced
//       5  ID        (ro)  constant 4B49_4430 ("KID0")
//       6  SNAP_CTRL (rw)  bits 2:1 diagnostic tap; writing bit 0 = 1 arms a
//                          capture (bit 0 reads as 0)
//       7  SNAP_STAT (ro)  bit 0: capture complete
//     with addr[15] = 1: snapshot buffer, value addr[12:3], addr[2] = 0 for
//       I, 1 for Q (32-bit signed each)
//   region 1  comb waveform, sample addr[21:2]: data {I[31:16], Q[15:0]}
//   region 2  beat waveform, entry  addr[21:2] = {frame, tone slot}:
//             data {I[31:16], Q[15:0]}
//   region 3  tone-to-bin table, tone slot addr[11:2]: bin number in [9:0]
// The three tables are write-only (reads return 0): the processor keeps its
// own copy of what it wrote. A write to a table region pulses the matching
// *_we output for one clock with the decoded address and data.
// Handshake: a write is accepted when AWVALID and WVALID are both high and no
// write response is pending; BVALID is raised the next clock and held until
// BREADY. A read is accepted when ARVALID is high and no read data is
// pending; RVALID with the data follows one clock later and is held until
// RREADY (two clocks for the snapshot buffer, whose memory read takes one
// clock). Write strobes are ignored (full-word writes only). Responses are
// always OKAY.
// The paper says only that the processor software reads and writes registers
// of the gateware over AXI; the register map, the table regions and the
// write-only tables are this design's choice.
module axil_regs
  import readout_pkg::*;
#(
  parameter int AW = 24
) (
  input  logic        clk,
  input  logic        rst,
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
  // registers
  output logic [15:0] nacc,
  output logic        play_en,
  input  logic [31:0] dropped,
  input  logic [31:0] pkt_count,
  input  logic [31:0] vec_count,
  // table write ports
  output logic        comb_we,
  output logic [19:0] comb_addr,
  output samp_t       comb_data,
  output logic        beat_we,
  output logic [19:0] beat_addr,
  output beat_t       beat_data,
  output logic        sel_we,
  output logic [9:0]  sel_addr,
  output logic [9:0]  sel_bin,
  // diagnostic snapshot
  output logic        snap_arm,
  output logic [1:0]  snap_tap,
  input  logic        snap_done,
  output logic [9:0]  snap_addr,
  input  acc_t        snap_data
);
  logic wr_go, rd_go;
  assign s_awready = wr_go;
  assign s_wready  = wr_go;
  assign wr_go     = s_awvalid && s_wvalid && !s_bvalid;
  assign s_arready = rd_go;
  logic rd_snap, rd_half, snap_rd;
  assign rd_go     = s_arvalid && !s_rvalid && !rd_snap;
  assign snap_rd   = s_araddr[AW-1:AW-2] == 2'd0 && s_araddr[15];
  assign snap_addr = s_araddr[12:3];
  assign s_bresp   = 2'b00;
  assign s_rresp   = 2'b00;

  logic [1:0] wreg;
  assign wreg = s_awaddr[AW-1:AW-2];

  always_ff @(posedge clk) begin
    if (rst) begin
      s_bvalid <= 1'b0;
      nacc     <= 16'd1024;
      play_en  <= 1'b0;
      snap_arm <= 1'b0;
      snap_tap <= 2'd0;
      comb_we  <= 1'b0;
      beat_we  <= 1'b0;
      sel_we   <= 1'b0;
    end else begin
      comb_we  <= 1'b0;
      beat_we  <= 1'b0;
      sel_we   <= 1'b0;
      snap_arm <= 1'b0;
      if (s_bvalid && s_bready) s_bvalid <= 1'b0;
      if (wr_go) begin
        s_bvalid <= 1'b1;
        unique case (wreg)
          2'd0: begin
            if (s_awaddr[4:2] == 3'd0) nacc    <= s_wdata[15:0];
            if (s_awaddr[4:2] == 3'd1) play_en <= s_wdata[0];
            if (s_awaddr[4:2] == 3'd6) begin
              snap_tap <= s_wdata[2:1];
              snap_arm <= s_wdata[0];
            end
          end
          2'd1: comb_we <= 1'b1;
          2'd2: beat_we <= 1'b1;
          default: sel_we <= 1'b1;
        endcase
      end
    end
  end

  always_ff @(posedge clk) begin
    if (wr_go) begin
      comb_addr <= s_awaddr[21:2];
      beat_addr <= s_awaddr[21:2];
      sel_addr  <= s_awaddr[11:2];
      comb_data <= s_wdata;
      beat_data <= s_wdata;
      sel_bin   <= s_wdata[9:0];
    end
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      s_rvalid <= 1'b0;
      s_rdata  <= '0;
      rd_snap  <= 1'b0;
      rd_half  <= 1'b0;
    end else begin
      if (s_rvalid && s_rready) s_rvalid <= 1'b0;
      if (rd_snap) begin
        // snapshot memory data is valid one clock after snap_addr
        rd_snap  <= 1'b0;
        s_rvalid <= 1'b1;
        s_rdata  <= rd_half ? snap_data.im : snap_data.re;
      end
      if (rd_go && snap_rd) begin
        rd_snap <= 1'b1;
        rd_half <= s_araddr[2];
      end else if (rd_go) begin
        s_rvalid <= 1'b1;
        s_rdata  <= '0;
        if (s_araddr[AW-1:AW-2] == 2'd0) begin
          unique case (s_araddr[4:2])
            3'd0:    s_rdata <= 32'(nacc);
            3'd1:    s_rdata <= 32'(play_en);
            3'd2:    s_rdata <= dropped;
            3'd3:    s_rdata <= pkt_count;
            3'd4:    s_rdata <= vec_count;
            3'd5:    s_rdata <= 32'h4B49_4430;
            3'd6:    s_rdata <= {29'd0, snap_tap, 1'b0};
            default: s_rdata <= {31'd0, snap_done};
          endcase
        end
      end
    end
  end

  // AXI rule: a response, once valid, stays valid and unchanged until taken
  assert property (@(posedge clk) disable iff (rst) s_bvalid && !s_bready |=> s_bvalid);
  assert property (@(posedge clk) disable iff (rst)
                   s_rvalid && !s_rready |=> s_rvalid && $stable(s_rdata));
endmodule
