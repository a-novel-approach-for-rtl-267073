// pkt_arbiter: round-robin multiplexer that interleaves whole packets.
//
// N AXI4-Stream style inputs carry packets whose last beat is flagged by
// in_last. The arbiter grants one input at a time and keeps the grant until
// that input's last beat has been transferred, so the beats of different
// packets never mix. At a packet boundary the next grant goes to the first
// requesting input after the one just served (round robin), which shares
// the output fairly among all inputs that have data.
//
// Timing: the grant decision is combinational, so a new packet can follow
// the previous one in the very next clock and the output carries one beat
// per clock when data is waiting. valid and data pass straight through, as
// does ready (in_ready depends combinationally on out_ready).
//
// It is used twice: to pack several data generators into one DROP stream,
// and to put the frames of all DROP streams onto the single Ethernet link.
// The round-robin policy is this design's choice.
module pkt_arbiter #(
  parameter int  N = 8,
  parameter type T = logic [7:0]
) (
  input  logic         clk,
  input  logic         rst,
  input  T             in_data [N],
  input  logic [N-1:0] in_valid,
  input  logic [N-1:0] in_last,
  output logic [N-1:0] in_ready,
  output T             out_data,
  output logic         out_valid,
  output logic         out_last,
  output logic [$clog2(N > 1 ? N : 2)-1:0] out_sel,   // input being served
  input  logic         out_ready
);

  localparam int SW = $clog2(N > 1 ? N : 2);

  logic          locked;     // a packet is in progress on input cur
  logic [SW-1:0] cur;
  logic [SW-1:0] prio;       // first input looked at on the next free choice
  logic [SW-1:0] sel;
  logic          any;

  always_comb begin
    logic [SW-1:0] idx;
    idx = '0;
    sel = cur;
    any = 1'b0;
    if (locked) begin
      any = in_valid[cur];
    end else begin
      for (int i = N - 1; i >= 0; i--) begin
        idx = SW'((32'(prio) + 32'(i)) % N);
        if (in_valid[idx]) begin
          sel = idx;
          any = 1'b1;
        end
      end
    end
  end

  assign out_valid = any;
  assign out_data  = in_data[sel];
  assign out_last  = in_last[sel];
  assign out_sel   = sel;

  always_comb begin
    in_ready = '0;
    in_ready[sel] = any && out_ready;
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      locked <= 1'b0;
      cur    <= '0;
      prio   <= '0;
    end else if (out_valid && out_ready) begin
      if (out_last) begin
        locked <= 1'b0;
        prio   <= SW'((32'(sel) + 1) % N);
      end else begin
        locked <= 1'b1;
        cur    <= sel;
      end
    end
  end

  // A granted input that has started a packet keeps the grant until its end.
  assert property (@(posedge clk) disable iff (rst)
                   (out_valid && out_ready && !out_last) |=> (out_sel == $past(out_sel)))
    else $error("pkt_arbiter: grant changed inside a packet");

endmodule
