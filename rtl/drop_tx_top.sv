// drop_tx_top: FPGA firmware that sends detector-style data straight from the
// FPGA to a server over Ethernet, as UDP packets carrying the DROP protocol.
//
// The idea is to give up guaranteed delivery: no acknowledgements, no
// retransmission and therefore no large send buffer in the FPGA. Each packet
// carries a per-stream identifier that counts up by one, so the receiving
// software can still count every lost, repeated or reordered packet.
//
// Datapath, for NUM_GEN data generators and NUM_STREAMS DROP streams:
//
//   data_generator[g] -> beat_upsizer[g] --+
//        (64 bit)          (to 512 bit)    |  routed by gen_cfg[g].stream_sel
//                                          v
//   drop_stream[s] (packs its generators, stamps the identifier)
//        -> udp_ip_tx[s] (Ethernet/IPv4/UDP/DROP headers, UDP port base+s)
//        -> frame_fifo[s] (store and forward: offers only complete frames)
//        -> pkt_arbiter (whole frames of all streams, round robin)
//        -> tx_* frame stream towards the 100G Ethernet MAC
//
// The Ethernet MAC/PHY is not part of this RTL; tx_* follows the AXI4-Stream
// conventions of a 512 bit 100G MAC transmit port (no FCS, byte 0 in
// data[7:0]). The whole design runs in one clock domain; at 160 MHz a
// generator makes 10.24 Gbit/s and the tx port carries 81.92 Gbit/s.
// A generator whose stream_sel is not below NUM_STREAMS feeds no stream and
// is held. The generators, DROP streams, UDP/IP stack and the shared Ethernet
// connection follow the description this design implements; widths, the
// header layout, the arbitration and the single clock are its own choices.
module drop_tx_top
  import drop_pkg::*;
#(
  parameter int NUM_GEN     = 8,
  parameter int NUM_STREAMS = 8,
  parameter int FIFO_DEPTH  = 64     // frame beats buffered per stream
) (
  input  logic                    clk,
  input  logic                    rst,
  // generator control
  input  gen_cfg_t                gen_cfg   [NUM_GEN],
  input  logic [NUM_GEN-1:0]      gen_start,
  input  logic [NUM_GEN-1:0]      gen_stop,
  output logic [NUM_GEN-1:0]      gen_busy,
  output logic [NUM_GEN-1:0]      gen_block_done,
  // stream control and status
  input  net_cfg_t                net_cfg,
  input  logic [NUM_STREAMS-1:0]  id_load,
  input  logic [ID_W-1:0]         id_value  [NUM_STREAMS],
  output logic [ID_W-1:0]         packets_sent [NUM_STREAMS],
  // frames towards the Ethernet MAC
  output frame_beat_t             tx_data,
  output logic                    tx_valid,
  input  logic                    tx_ready
);

  gen_beat_t            g_beat  [NUM_GEN];
  logic [NUM_GEN-1:0]   g_valid, g_ready;
  pay_beat_t            u_beat  [NUM_GEN];
  logic [NUM_GEN-1:0]   u_valid, u_ready;

  logic [NUM_GEN-1:0]   s_in_valid [NUM_STREAMS];
  logic [NUM_GEN-1:0]   s_in_ready [NUM_STREAMS];
  drop_beat_t           s_beat  [NUM_STREAMS];
  logic [NUM_STREAMS-1:0] s_valid, s_ready;

  frame_beat_t          e_beat  [NUM_STREAMS];
  logic [NUM_STREAMS-1:0] e_valid, e_ready;
  frame_beat_t          f_beat  [NUM_STREAMS];
  logic [NUM_STREAMS-1:0] f_valid, f_ready, f_last;
  logic [$clog2(NUM_STREAMS > 1 ? NUM_STREAMS : 2)-1:0] tx_sel;
  logic                 tx_last;

  for (genvar g = 0; g < NUM_GEN; g++) begin : gen
    data_generator u_gen (
      .clk, .rst,
      .start(gen_start[g]), .stop(gen_stop[g]), .cfg(gen_cfg[g]),
      .out(g_beat[g]), .out_valid(g_valid[g]), .out_ready(g_ready[g]),
      .busy(gen_busy[g]), .block_done(gen_block_done[g])
    );
    beat_upsizer u_up (
      .clk, .rst,
      .in(g_beat[g]), .in_valid(g_valid[g]), .in_ready(g_ready[g]),
      .out(u_beat[g]), .out_valid(u_valid[g]), .out_ready(u_ready[g])
    );
  end

  // Route every generator to the stream its configuration names.
  always_comb begin
    for (int s = 0; s < NUM_STREAMS; s++) begin
      for (int g = 0; g < NUM_GEN; g++) begin
        s_in_valid[s][g] = u_valid[g] && (32'(gen_cfg[g].stream_sel) == s);
      end
    end
    for (int g = 0; g < NUM_GEN; g++) begin
      u_ready[g] = 1'b0;
      for (int s = 0; s < NUM_STREAMS; s++) begin
        if (32'(gen_cfg[g].stream_sel) == s) u_ready[g] = s_in_ready[s][g];
      end
    end
  end

  for (genvar s = 0; s < NUM_STREAMS; s++) begin : stream
    drop_stream #(.N_IN(NUM_GEN)) u_drop (
      .clk, .rst,
      .id_load(id_load[s]), .id_value(id_value[s]),
      .in_data(u_beat), .in_valid(s_in_valid[s]), .in_ready(s_in_ready[s]),
      .out(s_beat[s]), .out_valid(s_valid[s]), .out_ready(s_ready[s]),
      .packets_sent(packets_sent[s])
    );
    udp_ip_tx u_udp (
      .clk, .rst,
      .cfg(net_cfg), .stream_id(8'(s)),
      .in(s_beat[s]), .in_valid(s_valid[s]), .in_ready(s_ready[s]),
      .out(e_beat[s]), .out_valid(e_valid[s]), .out_ready(e_ready[s])
    );
    frame_fifo #(.DEPTH(FIFO_DEPTH)) u_fifo (
      .clk, .rst,
      .in(e_beat[s]), .in_valid(e_valid[s]), .in_ready(e_ready[s]),
      .out(f_beat[s]), .out_valid(f_valid[s]), .out_ready(f_ready[s])
    );
    assign f_last[s] = f_beat[s].last;
  end

  pkt_arbiter #(.N(NUM_STREAMS), .T(frame_beat_t)) u_net_mux (
    .clk, .rst,
    .in_data(f_beat), .in_valid(f_valid), .in_last(f_last), .in_ready(f_ready),
    .out_data(tx_data), .out_valid(tx_valid), .out_last(tx_last), .out_sel(tx_sel),
    .out_ready(tx_ready)
  );

endmodule
