// udp_packetizer: streams each accumulated I/Q vector as one Ethernet/IPv4/UDP
// frame on a byte-wide, 125 MHz GMII-style transmit interface (1 Gb/s).
//
// When the clock-crossing buffer has a vector (rd_avail) the block sends
//   preamble (7 x 55h, D5h)
//   Ethernet header: destination MAC, source MAC, type 0800h
//   IPv4 header (20 bytes, no options, DF set, TTL 64, protocol UDP,
//                header checksum computed at elaboration: every field is fixed)
//   UDP header: ports, length, checksum 0 (allowed for UDP over IPv4)
//   payload:  packet counter (32 bit), sync pulse count (32), time stamp of
//             the vector (64), time stamp of the last sync pulse (64),
//             then for every tone 0..N-1 its accumulated I and Q (32 bit each)
//   FCS: CRC-32 of everything from the destination MAC on, sent LSB first,
// all multi-byte fields big-endian. It pulses rd_done as the last FCS byte
// goes out and then holds tx_en low for the 12-byte inter-frame gap.
// With N = 1024 the payload is 8216 bytes, so the frames are jumbo frames
// (8262 bytes without preamble); the network must accept them.
// Tone words are fetched one tone ahead: rd_addr is held for the eight byte
// times of the previous tone, and rd_data (one-clock latency) is latched on
// the last of them.
// The paper uses an existing open-source UDP transmitter and gives no packet
// format; the layout above, the jumbo frame and the addresses (parameters)
// are this design's own. There is no UDP flow control, as the paper notes.
module udp_packetizer
  import readout_pkg::*;
#(
  parameter int          N        = 1024,
  parameter logic [47:0] SRC_MAC  = 48'h02_00_00_00_00_01,
  parameter logic [47:0] DST_MAC  = 48'hFF_FF_FF_FF_FF_FF,
  parameter logic [31:0] SRC_IP   = 32'hC0_A8_03_28,   // 192.168.3.40
  parameter logic [31:0] DST_IP   = 32'hC0_A8_03_01,   // 192.168.3.1
  parameter logic [15:0] SRC_PORT = 16'd4096,
  parameter logic [15:0] DST_PORT = 16'd4096
) (
  input  logic        eclk,
  input  logic        erst,
  // from the clock-crossing buffer
  input  logic        rd_avail,
  input  logic [159:0] rd_meta,      // {sync_count, timestamp, sync_time}
  output logic [$clog2(N)-1:0] rd_addr,
  input  acc_t        rd_data,
  output logic        rd_done,
  // GMII transmit
  output logic [7:0]  txd,
  output logic        tx_en,
  output logic [31:0] pkt_count
);
  localparam int PHDR     = 24;                 // payload header bytes
  localparam int UDP_PAY  = PHDR + 8 * N;
  localparam int UDP_LEN  = UDP_PAY + 8;
  localparam int IP_LEN   = UDP_LEN + 20;
  localparam int HDR      = 42;                 // Ethernet + IPv4 + UDP
  localparam int DW       = $clog2(8 * N + 1);

  function automatic logic [15:0] ip_checksum();
    logic [31:0] s;
    s = 32'h4500 + 32'(IP_LEN) + 32'h0000 + 32'h4000 + 32'h4011 +
        32'(SRC_IP[31:16]) + 32'(SRC_IP[15:0]) + 32'(DST_IP[31:16]) + 32'(DST_IP[15:0]);
    s = 32'(s[15:0]) + 32'(s[31:16]);
    s = 32'(s[15:0]) + 32'(s[31:16]);
    return ~s[15:0];
  endfunction

  localparam logic [HDR*8-1:0] HEADER = {
    DST_MAC, SRC_MAC, 16'h0800,
    8'h45, 8'h00, 16'(IP_LEN), 16'h0000, 16'h4000, 8'h40, 8'h11, ip_checksum(),
    SRC_IP, DST_IP,
    SRC_PORT, DST_PORT, 16'(UDP_LEN), 16'h0000
  };

  function automatic logic [31:0] crc32_byte(logic [31:0] c, logic [7:0] d);
    c = c ^ {24'h0, d};
    for (int i = 0; i < 8; i++) c = c[0] ? ((c >> 1) ^ 32'hEDB88320) : (c >> 1);
    return c;
  endfunction

  typedef enum logic [2:0] {S_IDLE, S_PRE, S_HDR, S_PHDR, S_DATA, S_FCS, S_IFG} state_t;
  state_t        state;
  logic [DW-1:0] cnt;
  logic [31:0]   crc;
  acc_t          word;
  logic [PHDR*8-1:0] phdr;
  logic [7:0]    byte_c;
  logic [2:0]    bsel;
  logic [$clog2(N)-1:0] tone;

  assign bsel = cnt[2:0];
  assign tone = cnt[$clog2(N)+2:3];     // cnt < 8N in S_DATA

  // next byte (combinational) for the states that carry CRC-covered data
  always_comb begin
    byte_c = 8'h00;
    unique case (state)
      S_HDR:  byte_c = HEADER[(HDR - 1 - int'(cnt)) * 8 +: 8];
      S_PHDR: byte_c = phdr[(PHDR - 1 - int'(cnt)) * 8 +: 8];
      S_DATA: byte_c = (bsel < 3'd4) ? word.re[(3 - int'(bsel)) * 8 +: 8]
                                     : word.im[(7 - int'(bsel)) * 8 +: 8];
      default: byte_c = 8'h00;
    endcase
  end

  // tone prefetch address: tone 0 during the payload header, then tone+1
  always_comb begin
    if (state == S_DATA) rd_addr = tone + 1'b1;
    else                 rd_addr = '0;
  end

  always_ff @(posedge eclk) begin
    if (erst) begin
      state     <= S_IDLE;
      cnt       <= '0;
      txd       <= 8'h00;
      tx_en     <= 1'b0;
      rd_done   <= 1'b0;
      crc       <= '1;
      pkt_count <= '0;
    end else begin
      rd_done <= 1'b0;
      unique case (state)
        S_IDLE: begin
          tx_en <= 1'b0;
          txd   <= 8'h00;
          if (rd_avail) begin
            state <= S_PRE;
            cnt   <= '0;
            phdr  <= {pkt_count, rd_meta[159:128], rd_meta[127:64], rd_meta[63:0]};
          end
        end
        S_PRE: begin
          tx_en <= 1'b1;
          txd   <= (cnt == DW'(7)) ? 8'hD5 : 8'h55;
          crc   <= '1;
          cnt   <= cnt + 1'b1;
          if (cnt == DW'(7)) begin
            state <= S_HDR;
            cnt   <= '0;
          end
        end
        S_HDR: begin
          txd <= byte_c;
          crc <= crc32_byte(crc, byte_c);
          cnt <= cnt + 1'b1;
          if (cnt == DW'(HDR - 1)) begin
            state <= S_PHDR;
            cnt   <= '0;
          end
        end
        S_PHDR: begin
          txd <= byte_c;
          crc <= crc32_byte(crc, byte_c);
          cnt <= cnt + 1'b1;
          if (cnt == DW'(PHDR - 1)) begin
            state <= S_DATA;
            cnt   <= '0;
            word  <= rd_data;                 // tone 0
          end
        end
        S_DATA: begin
          txd <= byte_c;
          crc <= crc32_byte(crc, byte_c);
          cnt <= cnt + 1'b1;
          if (bsel == 3'd7) word <= rd_data;  // next tone
          if (cnt == DW'(8 * N - 1)) begin
            state <= S_FCS;
            cnt   <= '0;
          end
        end
        S_FCS: begin
          txd <= ~crc[int'(cnt[1:0]) * 8 +: 8];
          cnt <= cnt + 1'b1;
          if (cnt == DW'(3)) begin
            state     <= S_IFG;
            cnt       <= '0;
            rd_done   <= 1'b1;               // buffer released during the gap
            pkt_count <= pkt_count + 1'b1;
          end
        end
        S_IFG: begin
          tx_en <= 1'b0;
          txd   <= 8'h00;
          cnt   <= cnt + 1'b1;
          if (cnt == DW'(11)) state <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end
endmodule
