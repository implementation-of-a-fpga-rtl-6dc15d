// Data generation: wraps each 1024-byte payload into an Ethernet II /
// IPv4 / UDP frame, one byte per 125 MHz clock (125 MB/s).
//
// Byte layout of the frame (byte numbers from the first preamble byte):
//    0-6   0x55 preamble          7      0xD5 start delimiter
//    8-13  destination MAC        14-19  source MAC
//   20-21  type bytes 0x08, 0x88
//   22     0x45 version / IHL     23     0x00 TOS
//   24-25  IP total length 20+8+PAYLOAD (0x041C)
//   26-27  identification, +1 per frame sent
//   28-29  0x0000 flags/offset    30     0x80 TTL    31  0x11 UDP
//   32-33  IP header checksum     34-41  source, destination IP
//   42-45  source, destination UDP port
//   46-47  UDP length 8+PAYLOAD (0x0408)             48-49 UDP checksum
//   50..   PAYLOAD data bytes     then 4 FCS bytes (CRC-32 of bytes 8..)
// followed by IFG idle clocks.
//
// How: a byte counter walks the frame; header bytes come from a case on
// the counter, payload bytes are read from the ping-pong buffer one clock
// ahead, and the CRC unit folds in bytes 8 to the last payload byte. Both
// checksums are fixed when a frame starts: the IP one from the header
// words, the UDP one from the pseudo-header, the UDP header and the
// payload sum delivered with the buffer.
//
// Interface: starts when ready is high and it is idle; rd_en/rd_data as
// the ping-pong buffer (data one clock after rd_en); tx_en/tx_data a
// byte stream, registered, for the RGMII transmitter. ev_frame pulses at
// the last FCS byte. A frame occupies 50 + PAYLOAD + 4 + IFG clocks.
//
// The byte values follow the paper's frame table, including its type
// bytes 0x08, 0x88 (the table's text calls the type 0x8808); addresses,
// ports and the gap are parameters whose defaults are this design's.
module packet_gen
  import tm_pkg::*;
#(
  parameter int          PAYLOAD  = PAYLOAD_DEF,
  parameter logic [47:0] DST_MAC  = 48'hFF_FF_FF_FF_FF_FF,
  parameter logic [47:0] SRC_MAC  = 48'h00_0A_35_01_02_03,
  parameter logic [31:0] SRC_IP   = {8'd192, 8'd168, 8'd1, 8'd2},
  parameter logic [31:0] DST_IP   = {8'd192, 8'd168, 8'd1, 8'd10},
  parameter logic [15:0] SRC_PORT = 16'd1234,
  parameter logic [15:0] DST_PORT = 16'd1234,
  parameter int          IFG      = 12
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        ready,
  input  logic [15:0] data_sum,
  output logic        rd_en,
  input  logic [7:0]  rd_data,
  output logic        tx_en,
  output logic [7:0]  tx_data,
  output logic        ev_frame
);
  localparam int          FRAME_END = HDR_BYTES + PAYLOAD + FCS_BYTES;  // 1078
  localparam int          LAST      = FRAME_END + IFG - 1;
  localparam int          IW        = $clog2(LAST + 1);
  localparam logic [15:0] IP_LEN    = 16'(20 + 8 + PAYLOAD);
  localparam logic [15:0] UDP_LEN   = 16'(8 + PAYLOAD);

  logic          busy;
  logic [IW-1:0] idx;
  logic [15:0]   ip_id, ip_csum, udp_csum;
  logic [31:0]   crc;
  logic [7:0]    b;
  logic          in_frame;

  // ------------------------------------------------------------ checksums
  function automatic logic [15:0] ip_checksum(input logic [15:0] id);
    logic [15:0] s;
    s = 16'h4500;
    s = oc_add(s, IP_LEN);
    s = oc_add(s, id);
    s = oc_add(s, 16'h0000);
    s = oc_add(s, 16'h8011);
    s = oc_add(s, SRC_IP[31:16]);
    s = oc_add(s, SRC_IP[15:0]);
    s = oc_add(s, DST_IP[31:16]);
    s = oc_add(s, DST_IP[15:0]);
    return ~s;
  endfunction

  function automatic logic [15:0] udp_checksum(input logic [15:0] dsum);
    logic [15:0] s;
    s = SRC_IP[31:16];
    s = oc_add(s, SRC_IP[15:0]);
    s = oc_add(s, DST_IP[31:16]);
    s = oc_add(s, DST_IP[15:0]);
    s = oc_add(s, 16'h0011);
    s = oc_add(s, UDP_LEN);          // pseudo-header length
    s = oc_add(s, SRC_PORT);
    s = oc_add(s, DST_PORT);
    s = oc_add(s, UDP_LEN);          // UDP header length
    s = oc_add(s, dsum);
    s = ~s;
    return (s == 16'h0000) ? 16'hFFFF : s;
  endfunction

  // --------------------------------------------------------- byte select
  always_comb begin
    in_frame = busy && (idx < IW'(FRAME_END));
    b = 8'h00;
    if (idx < IW'(7))                          b = 8'h55;
    else if (idx == IW'(7))                    b = 8'hD5;
    else if (idx < IW'(14))                    b = DST_MAC[8*(13 - int'(idx)) +: 8];
    else if (idx < IW'(20))                    b = SRC_MAC[8*(19 - int'(idx)) +: 8];
    else if (idx < IW'(HDR_BYTES)) begin
      unique case (int'(idx))
        20: b = 8'h08;
        21: b = 8'h88;
        22: b = 8'h45;
        23: b = 8'h00;
        24: b = IP_LEN[15:8];
        25: b = IP_LEN[7:0];
        26: b = ip_id[15:8];
        27: b = ip_id[7:0];
        28: b = 8'h00;
        29: b = 8'h00;
        30: b = 8'h80;
        31: b = 8'h11;
        32: b = ip_csum[15:8];
        33: b = ip_csum[7:0];
        34: b = SRC_IP[31:24];
        35: b = SRC_IP[23:16];
        36: b = SRC_IP[15:8];
        37: b = SRC_IP[7:0];
        38: b = DST_IP[31:24];
        39: b = DST_IP[23:16];
        40: b = DST_IP[15:8];
        41: b = DST_IP[7:0];
        42: b = SRC_PORT[15:8];
        43: b = SRC_PORT[7:0];
        44: b = DST_PORT[15:8];
        45: b = DST_PORT[7:0];
        46: b = UDP_LEN[15:8];
        47: b = UDP_LEN[7:0];
        48: b = udp_csum[15:8];
        default: b = udp_csum[7:0];
      endcase
    end
    else if (idx < IW'(HDR_BYTES + PAYLOAD))   b = rd_data;
    else if (idx < IW'(FRAME_END))             b = ~crc[8*(int'(idx) - HDR_BYTES - PAYLOAD) +: 8];

    rd_en = busy && (idx >= IW'(HDR_BYTES - 1)) && (idx < IW'(HDR_BYTES - 1 + PAYLOAD));
  end

  crc32_d8 u_crc (
    .clk(clk), .rst_n(rst_n),
    .init(!busy),
    .en(busy && idx >= IW'(8) && idx < IW'(HDR_BYTES + PAYLOAD)),
    .d(b),
    .crc(crc)
  );

  // ------------------------------------------------------------ sequencer
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 1'b0; idx <= '0; ip_id <= '0; ip_csum <= '0; udp_csum <= '0;
      tx_en <= 1'b0; tx_data <= '0; ev_frame <= 1'b0;
    end else begin
      tx_en    <= in_frame;
      tx_data  <= in_frame ? b : 8'h00;
      ev_frame <= busy && (idx == IW'(FRAME_END - 1));
      if (!busy) begin
        if (ready) begin
          busy     <= 1'b1;
          idx      <= '0;
          ip_csum  <= ip_checksum(ip_id);
          udp_csum <= udp_checksum(data_sum);
        end
      end else begin
        if (idx == IW'(FRAME_END - 1)) ip_id <= ip_id + 1'b1;
        if (idx == IW'(LAST)) busy <= 1'b0;
        else                  idx  <= idx + 1'b1;
      end
    end
  end

endmodule
