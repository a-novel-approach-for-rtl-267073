// beat_upsizer: packs the 64 bit beats of one data generator into 512 bit
// payload beats.
//
// Eight consecutive generator beats of a packet fill one payload beat, byte 0
// of the first one landing in byte 0 of the wide beat. The last beat of a
// packet flushes whatever has been collected, so a payload beat never spans
// two packets and only the last payload beat of a packet can be partial.
// Every generator beat but the last of a packet must be full (8 bytes).
//
// Interface: AXI4-Stream style valid/ready on both sides, len passed along.
// Timing: the wide beat is registered; it appears one clock after the
// generator beat that completes it. in_ready stays high as long as the output
// register is empty or being emptied, so a generator at full rate is never
// stalled by this block. The width conversion is this design's choice; it is
// what lets the streams of several generators share one 100G datapath.
module beat_upsizer
  import drop_pkg::*;
(
  input  logic      clk,
  input  logic      rst,
  input  gen_beat_t in,
  input  logic      in_valid,
  output logic      in_ready,
  output pay_beat_t out,
  output logic      out_valid,
  input  logic      out_ready
);

  localparam int RATIO = NET_BYTES / GEN_BYTES;   // 8

  logic [$clog2(RATIO)-1:0] slot;
  pay_beat_t                acc;      // beats collected so far
  pay_beat_t                merged;   // acc with the incoming beat placed in its slot

  assign in_ready = !out_valid || out_ready;

  always_comb begin
    merged = acc;
    merged.data[8*GEN_BYTES*slot +: 8*GEN_BYTES] = in.data;
    merged.keep[GEN_BYTES*slot +: GEN_BYTES]     = in.keep;
    merged.last = in.last;
    merged.len  = in.len;
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      slot      <= '0;
      acc       <= '0;
      out       <= '0;
      out_valid <= 1'b0;
    end else begin
      if (out_valid && out_ready) out_valid <= 1'b0;
      if (in_valid && in_ready) begin
        if (in.last || slot == $bits(slot)'(RATIO - 1)) begin
          out       <= merged;
          out_valid <= 1'b1;
          acc       <= '0;
          slot      <= '0;
        end else begin
          acc  <= merged;
          slot <= slot + 1'b1;
        end
      end
    end
  end

  // A beat that does not end its packet must be full.
  assert property (@(posedge clk) disable iff (rst)
                   (in_valid && !in.last) |-> (&in.keep))
    else $error("beat_upsizer: partial beat before end of packet");

endmodule
