// frame_fifo: store-and-forward buffer for the frames of one DROP stream.
//
// A stream's frames are built at the rate of its generators (one 64 byte
// beat every 8 clocks for one generator), while the shared 100G link takes
// one beat per clock. The link multiplexer grants whole frames, so it must
// not be given a frame before all of it is present, or the link would idle
// while the frame trickles in. This FIFO therefore offers a frame only once
// its last beat has been written; from then on the frame leaves at one beat
// per clock.
//
// It is a synchronous FIFO of DEPTH frame beats held in a memory array with a
// registered read (block RAM style), in front of a one-beat output register.
// `complete` counts last beats in the memory: the oldest frame in memory is
// complete exactly when that count is non-zero. DEPTH must hold the largest
// frame (33 beats for 2000 byte payloads plus the 48 byte header); the
// default of 64 holds two of them, so one frame can be written while the
// other is read. in_ready is low only when the memory is full.
//
// Latency: a frame starts to leave two clocks after its last beat was
// written. This buffering is this design's own; the description it follows
// gives only the block RAM use of its UDP/IP stack.
module frame_fifo
  import drop_pkg::*;
#(
  parameter int DEPTH = 64
) (
  input  logic        clk,
  input  logic        rst,
  input  frame_beat_t in,
  input  logic        in_valid,
  output logic        in_ready,
  output frame_beat_t out,
  output logic        out_valid,
  input  logic        out_ready
);

  localparam int AW = $clog2(DEPTH);

  frame_beat_t   mem [DEPTH];
  logic [AW-1:0] wr_ptr, rd_ptr;
  logic [AW:0]   count;      // beats in memory
  logic [AW:0]   complete;   // last beats in memory
  logic          push, pop;

  assign in_ready = (count != (AW+1)'(DEPTH));
  assign push     = in_valid && in_ready;
  assign pop      = (count != '0) && (complete != '0) && (!out_valid || out_ready);

  always_ff @(posedge clk) begin
    if (push) mem[wr_ptr] <= in;
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      wr_ptr    <= '0;
      rd_ptr    <= '0;
      count     <= '0;
      complete  <= '0;
      out_valid <= 1'b0;
      out       <= '0;
    end else begin
      if (push) wr_ptr <= (wr_ptr == AW'(DEPTH - 1)) ? '0 : wr_ptr + 1'b1;
      if (pop) begin
        rd_ptr    <= (rd_ptr == AW'(DEPTH - 1)) ? '0 : rd_ptr + 1'b1;
        out       <= mem[rd_ptr];
        out_valid <= 1'b1;
      end else if (out_ready) begin
        out_valid <= 1'b0;
      end
      count    <= count + (AW+1)'(push) - (AW+1)'(pop);
      complete <= complete + (AW+1)'(push && in.last) - (AW+1)'(pop && mem[rd_ptr].last);
    end
  end

endmodule
