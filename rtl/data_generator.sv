// data_generator: configurable test data source feeding one DROP stream.
//
// On a start pulse the generator latches its configuration and produces a
// block of block_size bytes, cut into packets of packet_size bytes; the last
// packet of a block carries whatever is left and may be shorter. With
// repeat_blocks set it starts the next block right away, so that it runs
// until stop is raised (it then ends after the packet in flight).
//
// The pattern is a function of the byte offset k inside the block, which
// restarts at 0 with every block:
//   PAT_COUNT16: the 16 bit word k/2 mod 2^16, low byte first, so a block
//                that is a multiple of 128 KiB holds every word equally often;
//   PAT_COUNT32: the 32 bit word k/4, low byte first (an extra pattern type of
//                this design).
// Because the pattern depends only on k, packet boundaries may fall at any
// byte and the stream of payload bytes is still one unbroken counting pattern.
//
// Rate: one 64 bit beat per clock, 10.24 Gbit/s at 160 MHz. word_pause idle
// cycles follow every beat except the last of a packet, packet_pause idle
// cycles follow the last beat of a packet. The output follows the AXI4-Stream
// rules: a beat is transferred when out_valid and out_ready are both high,
// and an offered beat stays unchanged until it is taken. out.len gives the
// payload length of the current packet on every beat, so that headers can be
// built before the payload has passed.
//
// The block/packet/pattern/pause parameters follow the description of the
// generator; the byte order, the pattern restart per block, the exact meaning
// of the pauses and the stop input are this design's choices.
module data_generator
  import drop_pkg::*;
(
  input  logic      clk,
  input  logic      rst,            // synchronous, active high
  input  logic      start,          // pulse: latch cfg and begin a block
  input  logic      stop,           // end a repeating run after the current packet
  input  gen_cfg_t  cfg,
  output gen_beat_t out,
  output logic      out_valid,
  input  logic      out_ready,
  output logic      busy,
  output logic      block_done      // pulse: last beat of a block transferred
);

  gen_cfg_t         c;
  logic             active;
  logic             stopping;
  logic [31:0]      off;        // byte offset of the current beat within the block
  logic [LEN_W-1:0] pkt_len;    // length of the current packet
  logic [LEN_W-1:0] pkt_rem;    // bytes of the current packet not yet sent
  logic [15:0]      pause;      // idle cycles left before the next beat

  logic [3:0]       nbytes;
  logic [31:0]      off_next;
  logic [31:0]      block_rem;
  logic             is_last;

  function automatic logic [LEN_W-1:0] first_len(input logic [31:0] remaining,
                                                 input logic [15:0] psize);
    return (remaining < 32'(psize)) ? LEN_W'(remaining) : psize;
  endfunction

  always_comb begin
    nbytes    = (pkt_rem >= LEN_W'(GEN_BYTES)) ? 4'(GEN_BYTES) : pkt_rem[3:0];
    is_last   = (pkt_rem <= LEN_W'(GEN_BYTES));
    off_next  = off + 32'(nbytes);
    block_rem = c.block_size - off_next;
  end

  // Pattern byte at block offset k.
  function automatic logic [7:0] pattern_byte(input pattern_e pat, input logic [31:0] k);
    logic [31:0] w32;
    w32 = {2'b00, k[31:2]};
    unique case (pat)
      PAT_COUNT32: return w32[8*k[1:0] +: 8];
      default:     return k[0] ? k[16:9] : k[8:1];
    endcase
  endfunction

  // Pattern bytes of the current beat.
  always_comb begin
    for (int i = 0; i < GEN_BYTES; i++) begin
      out.data[8*i +: 8] = pattern_byte(c.pattern, off + 32'(i));
      out.keep[i]        = (4'(i) < nbytes);
    end
    out.last = is_last;
    out.len  = pkt_len;
  end

  assign out_valid = active && (pause == '0);
  assign busy      = active;

  always_ff @(posedge clk) begin
    block_done <= 1'b0;
    if (rst) begin
      active   <= 1'b0;
      stopping <= 1'b0;
      pause    <= '0;
      off      <= '0;
      pkt_len  <= '0;
      pkt_rem  <= '0;
      c        <= '0;
    end else if (!active) begin
      if (start) begin
        c        <= cfg;
        off      <= '0;
        pkt_len  <= first_len(cfg.block_size, cfg.packet_size);
        pkt_rem  <= first_len(cfg.block_size, cfg.packet_size);
        pause    <= '0;
        stopping <= 1'b0;
        active   <= (cfg.block_size != '0) && (cfg.packet_size != '0);
      end
    end else begin
      if (stop) stopping <= 1'b1;
      if (pause != '0) begin
        pause <= pause - 16'd1;
      end else if (out_ready) begin
        if (!is_last) begin
          off     <= off_next;
          pkt_rem <= pkt_rem - LEN_W'(nbytes);
          pause   <= 16'(c.word_pause);
        end else begin
          pause <= c.packet_pause;
          if (stop || stopping) begin
            active <= 1'b0;
            pause  <= '0;
          end
          if (block_rem == '0) begin
            block_done <= 1'b1;
            off        <= '0;
            pkt_len    <= first_len(c.block_size, c.packet_size);
            pkt_rem    <= first_len(c.block_size, c.packet_size);
            if (!c.repeat_blocks) begin
              active <= 1'b0;
              pause  <= '0;
            end
          end else begin
            off     <= off_next;
            pkt_len <= first_len(block_rem, c.packet_size);
            pkt_rem <= first_len(block_rem, c.packet_size);
          end
        end
      end
    end
  end

endmodule
