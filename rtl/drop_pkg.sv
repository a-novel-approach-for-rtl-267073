// drop_pkg: types and constants shared by the DROP sending firmware.
//
// The sending side moves data in three widths:
//   * generator beats, 64 bit wide (8 bytes), one per clock from each data
//     generator; at 160 MHz this is the 10.24 Gbit/s per generator that the
//     design targets;
//   * payload beats, 512 bit wide (64 bytes), the width of a 100G Ethernet
//     datapath, carrying one DROP packet's payload;
//   * frame beats, 512 bit wide, carrying complete Ethernet frames
//     (Ethernet + IPv4 + UDP + DROP headers, then the payload, no FCS).
// Byte 0 of a beat sits in data[7:0] and is the first byte on the wire;
// keep[i] marks byte i valid. Only the last beat of a packet may be partial,
// and its valid bytes are always the lowest ones.
//
// The DROP header is this design's own choice (the protocol's field layout is
// not part of the description it follows): a single 48 bit packet identifier,
// sent most significant byte first. Together with the 42 bytes of Ethernet,
// IPv4 and UDP header this makes a 48 byte header.
package drop_pkg;

  localparam int GEN_BYTES = 8;              // generator beat width in bytes
  localparam int NET_BYTES = 64;             // payload / frame beat width in bytes
  localparam int LEN_W     = 16;             // packet length field, bytes
  localparam int ID_W      = 48;             // DROP packet identifier width
  localparam int ETH_HDR_BYTES  = 14;
  localparam int IP_HDR_BYTES   = 20;
  localparam int UDP_HDR_BYTES  = 8;
  localparam int DROP_HDR_BYTES = ID_W / 8;  // 6
  localparam int HDR_BYTES = ETH_HDR_BYTES + IP_HDR_BYTES + UDP_HDR_BYTES + DROP_HDR_BYTES;  // 48

  localparam logic [15:0] ETHERTYPE_IPV4 = 16'h0800;
  localparam logic [7:0]  IP_PROTO_UDP   = 8'd17;
  localparam logic [7:0]  IP_TTL         = 8'd64;

  // Pattern types of the data generator.
  typedef enum logic [1:0] {
    PAT_COUNT16 = 2'd0,   // 16 bit counting pattern, little-endian words
    PAT_COUNT32 = 2'd1    // 32 bit counting pattern, little-endian words
  } pattern_e;

  // Run-time configuration of one data generator.
  typedef struct packed {
    logic [31:0] block_size;     // bytes per block
    logic [15:0] packet_size;    // maximum payload bytes per packet
    pattern_e    pattern;
    logic [7:0]  word_pause;     // idle cycles after each (non-final) data word
    logic [15:0] packet_pause;   // idle cycles after the last word of a packet
    logic        repeat_blocks;  // start the next block automatically
    logic [7:0]  stream_sel;     // DROP stream this generator feeds
  } gen_cfg_t;

  // Addresses used in the headers of every frame.
  typedef struct packed {
    logic [47:0] dst_mac;
    logic [47:0] src_mac;
    logic [31:0] src_ip;
    logic [31:0] dst_ip;
    logic [15:0] src_port;
    logic [15:0] dst_port_base;  // stream s is sent to UDP port dst_port_base + s
  } net_cfg_t;

  typedef struct packed {
    logic [8*GEN_BYTES-1:0] data;
    logic [GEN_BYTES-1:0]   keep;
    logic                   last;
    logic [LEN_W-1:0]       len;   // payload bytes of the packet, same on every beat
  } gen_beat_t;

  typedef struct packed {
    logic [8*NET_BYTES-1:0] data;
    logic [NET_BYTES-1:0]   keep;
    logic                   last;
    logic [LEN_W-1:0]       len;   // payload bytes of the packet, same on every beat
  } pay_beat_t;

  typedef struct packed {
    logic [8*NET_BYTES-1:0] data;
    logic [NET_BYTES-1:0]   keep;
    logic                   last;
  } frame_beat_t;

  // A payload beat of a DROP stream together with the identifier of its packet.
  typedef struct packed {
    pay_beat_t         beat;
    logic [ID_W-1:0]   pkt_id;
  } drop_beat_t;

  // One's complement sum of the ten 16 bit words of an IPv4 header whose
  // checksum field is zero, folded and inverted (RFC 791 header checksum).
  function automatic logic [15:0] ipv4_checksum(input logic [IP_HDR_BYTES*8-1:0] hdr);
    logic [19:0] sum;
    sum = '0;
    for (int i = 0; i < IP_HDR_BYTES / 2; i++) begin
      sum = sum + 20'(hdr[IP_HDR_BYTES*8-16-16*i +: 16]);
    end
    sum = 20'(sum[15:0]) + 20'(sum[19:16]);
    sum = 20'(sum[15:0]) + 20'(sum[19:16]);
    return ~sum[15:0];
  endfunction

endpackage
