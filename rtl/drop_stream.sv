// drop_stream: forms one DROP stream out of the packets of several sources.
//
// DROP (Data ReadOut Protocol) runs on top of UDP and adds a packet
// identifier to every packet. The identifier belongs to the stream, not to
// the network interface: it counts up by exactly one from packet to packet of
// the stream, so a receiver that sees two consecutive packets whose
// identifiers differ by more than one knows packets were lost, and a
// difference of zero or less shows packets seen again or out of order. There
// is no retransmission, so nothing is buffered here for resending.
//
// Up to N_IN data generators can feed the same stream (to exceed the rate of
// one generator, or to mix packet sizes). A packet-granular round-robin
// arbiter (pkt_arbiter) chooses whole packets from the sources in turn; each
// packet leaves with the current identifier, which is then incremented when
// its last beat has been transferred. id_load sets the identifier of the
// next packet, for instance to start a stream at a chosen value.
//
// Interface: payload beats in (one port per source, with a per-source enable
// that leaves sources of other streams out), payload beats with identifier
// out, AXI4-Stream valid/ready. Timing: no added latency, one beat per clock.
// The identifier width (48 bit, enough for the 3.7e11 packets one stream
// carries in a week at 10 Gbit/s with 2000 byte packets) and its reset value
// 0 are this design's choices.
module drop_stream
  import drop_pkg::*;
#(
  parameter int N_IN = 8
) (
  input  logic            clk,
  input  logic            rst,
  input  logic            id_load,
  input  logic [ID_W-1:0] id_value,
  input  pay_beat_t       in_data  [N_IN],
  input  logic [N_IN-1:0] in_valid,
  output logic [N_IN-1:0] in_ready,
  output drop_beat_t      out,
  output logic            out_valid,
  input  logic            out_ready,
  output logic [ID_W-1:0] packets_sent
);

  logic [N_IN-1:0] in_last;
  pay_beat_t       arb_data;
  logic            arb_last;
  logic [ID_W-1:0] next_id;
  logic [$clog2(N_IN > 1 ? N_IN : 2)-1:0] arb_sel;

  always_comb begin
    for (int i = 0; i < N_IN; i++) in_last[i] = in_data[i].last;
  end

  pkt_arbiter #(.N(N_IN), .T(pay_beat_t)) u_arb (
    .clk, .rst,
    .in_data, .in_valid, .in_last, .in_ready,
    .out_data(arb_data), .out_valid, .out_last(arb_last), .out_sel(arb_sel),
    .out_ready
  );

  assign out.beat   = arb_data;
  assign out.pkt_id = next_id;

  always_ff @(posedge clk) begin
    if (rst) begin
      next_id      <= '0;
      packets_sent <= '0;
    end else begin
      if (out_valid && out_ready && arb_last) begin
        next_id      <= next_id + 1'b1;
        packets_sent <= packets_sent + 1'b1;
      end
      if (id_load) next_id <= id_value;
    end
  end

  // The identifier must not change while a packet is being sent.
  assert property (@(posedge clk) disable iff (rst || id_load)
                   (out_valid && out_ready && !arb_last) |=> (out.pkt_id == $past(out.pkt_id)))
    else $error("drop_stream: identifier changed inside a packet");

endmodule
