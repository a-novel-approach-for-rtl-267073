// udp_ip_tx: transmit side of the UDP/IP stack for one DROP stream.
//
// Every payload packet of the stream leaves as one Ethernet frame:
//   bytes  0..13  Ethernet header   dst MAC, src MAC, type 0x0800 (IPv4)
//   bytes 14..33  IPv4 header       version 4, IHL 5, no options, DF set,
//                                   identification 0, TTL 64, protocol 17,
//                                   header checksum computed here
//   bytes 34..41  UDP header        src port, dst port = dst_port_base +
//                                   stream_id, length, checksum 0 (not used)
//   bytes 42..47  DROP header       48 bit packet identifier, MSB first
//   bytes 48..    payload
// The frame check sequence, preamble and padding of short frames are left to
// the Ethernet MAC. Giving each stream its own UDP destination port is what
// lets the receiving NIC sort the streams into separate receive queues.
//
// Because the header is always 48 bytes, the payload is shifted by a fixed
// 48 bytes in the 64 byte beat: the first output beat holds the header and
// payload bytes 0..15, every following beat holds the 48 bytes left over from
// the previous input beat plus the first 16 of the next. If the last input
// beat holds more than 16 bytes one extra tail beat follows.
//
// Interface: payload beats with identifier in, frame beats out, AXI4-Stream
// valid/ready. The header fields are computed from the first payload beat
// (whose len and pkt_id hold for the whole packet); the header goes out in
// the same clock as that beat, so there is no latency, and the output takes
// ceil((48+len)/64) beats for a packet that needs ceil(len/64) input beats.
// valid, data and ready pass combinationally. The use of UDP over IPv4 follows
// the description; the field values listed above are this design's choices.
module udp_ip_tx
  import drop_pkg::*;
(
  input  logic        clk,
  input  logic        rst,
  input  net_cfg_t    cfg,
  input  logic [7:0]  stream_id,
  input  drop_beat_t  in,
  input  logic        in_valid,
  output logic        in_ready,
  output frame_beat_t out,
  output logic        out_valid,
  input  logic        out_ready
);

  localparam int RES_BYTES = HDR_BYTES;              // 48 bytes carried to the next beat
  localparam int HEAD_IN   = NET_BYTES - RES_BYTES;  // 16 payload bytes in the first beat

  typedef enum logic [1:0] {S_HDR, S_BODY, S_TAIL} state_e;
  state_e state;

  logic [8*RES_BYTES-1:0] res_data;
  logic [RES_BYTES-1:0]   res_keep;

  logic [8*HDR_BYTES-1:0]    hdr;      // header, byte 0 in the top bits
  logic [8*IP_HDR_BYTES-1:0] ip_hdr;
  logic [15:0]               ip_len;
  logic [15:0]               udp_len;
  logic [8*HDR_BYTES-1:0]    hdr_le;   // header, byte 0 in the low bits

  always_comb begin
    ip_len  = 16'(IP_HDR_BYTES + UDP_HDR_BYTES + DROP_HDR_BYTES) + in.beat.len;
    udp_len = 16'(UDP_HDR_BYTES + DROP_HDR_BYTES) + in.beat.len;
    ip_hdr  = {8'h45, 8'h00, ip_len, 16'h0000, 16'h4000, IP_TTL, IP_PROTO_UDP,
               16'h0000, cfg.src_ip, cfg.dst_ip};
    ip_hdr[8*IP_HDR_BYTES-81 -: 16] = ipv4_checksum(ip_hdr);
    hdr = {cfg.dst_mac, cfg.src_mac, ETHERTYPE_IPV4,
           ip_hdr,
           cfg.src_port, cfg.dst_port_base + 16'(stream_id), udp_len, 16'h0000,
           in.pkt_id};
    for (int i = 0; i < HDR_BYTES; i++) hdr_le[8*i +: 8] = hdr[8*HDR_BYTES-1-8*i -: 8];
  end

  logic in_fits;   // the last input beat fits completely into this output beat
  assign in_fits = !in.beat.keep[HEAD_IN];

  always_comb begin
    out = '0;
    unique case (state)
      S_TAIL: begin
        out.data[8*RES_BYTES-1:0] = res_data;
        out.keep[RES_BYTES-1:0]   = res_keep;
        out.last                  = 1'b1;
      end
      default: begin
        out.data[8*RES_BYTES-1:0]       = (state == S_HDR) ? hdr_le : res_data;
        out.keep[RES_BYTES-1:0]         = (state == S_HDR) ? '1 : res_keep;
        out.data[8*NET_BYTES-1:8*RES_BYTES] = in.beat.data[8*HEAD_IN-1:0];
        out.keep[NET_BYTES-1:RES_BYTES]     = in.beat.keep[HEAD_IN-1:0];
        out.last                        = in.beat.last && in_fits;
      end
    endcase
  end

  assign out_valid = (state == S_TAIL) ? 1'b1 : in_valid;
  assign in_ready  = (state != S_TAIL) && out_ready;

  always_ff @(posedge clk) begin
    if (rst) begin
      state    <= S_HDR;
      res_data <= '0;
      res_keep <= '0;
    end else if (out_valid && out_ready) begin
      if (state == S_TAIL) begin
        state <= S_HDR;
      end else begin
        res_data <= in.beat.data[8*NET_BYTES-1:8*HEAD_IN];
        res_keep <= in.beat.keep[NET_BYTES-1:HEAD_IN];
        if (in.beat.last) state <= in_fits ? S_HDR : S_TAIL;
        else              state <= S_BODY;
      end
    end
  end

endmodule
