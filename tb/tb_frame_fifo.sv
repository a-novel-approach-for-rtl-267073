// tb_frame_fifo: self-checking test of the store-and-forward frame buffer.
//
// Frames of 1 to 40 beats are written with random gaps and read with random
// back-pressure. The checker compares every beat read with the beat written
// (order, data, keep, last), checks that no beat of a frame is offered before
// the frame's last beat has been written, and that once a frame has started
// with the reader always ready, its beats leave in consecutive clocks.
module tb_frame_fifo;
  import drop_pkg::*;

  logic        clk = 0;
  logic        rst;
  frame_beat_t in, out;
  logic        in_valid, in_ready, out_valid, out_ready;

  int checks = 0, failures = 0;
  bit always_ready = 0;

  frame_fifo dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin failures++; if (failures < 20) $display("FAIL %s at %0t", what, $time); end
  endtask

  frame_beat_t exp_q[$];
  int frames_written = 0;   // frames whose last beat has been written
  int frames_read    = 0;   // frames whose first beat has been read
  bit reading = 0;
  int frames_out = 0;

  task automatic send_frame(input int nbeats, input int tag);
    int b = 0;
    while (b < nbeats) begin
      @(negedge clk);
      in_valid = ($urandom_range(0, 3) != 0);
      in = '0;
      in.data[31:0]  = {16'(tag), 16'(b)};
      in.data[511:480] = $urandom;
      in.keep = (b == nbeats - 1) ? 64'((65'd1 << $urandom_range(1, 64)) - 1) : '1;
      in.last = (b == nbeats - 1);
      @(posedge clk);
      if (in_valid && in_ready) begin
        exp_q.push_back(in);
        if (in.last) frames_written++;
        b++;
      end
    end
    @(negedge clk);
    in_valid = 0;
  endtask

  always @(negedge clk) out_ready <= always_ready ? 1'b1 : ($urandom_range(0, 2) != 0);

  always @(posedge clk) begin
    if (!rst) begin
      if (out_valid && !reading) check(frames_read < frames_written, "frame offered only when complete");
      if (always_ready && reading) check(out_valid, "no bubble inside a frame");
      if (out_valid && out_ready) begin
        check(out == exp_q[0], "beat read equals beat written");
        void'(exp_q.pop_front());
        if (!reading) frames_read++;
        reading = !out.last;
        if (out.last) frames_out++;
      end
    end
  end

  initial begin
    rst = 1; in = '0; in_valid = 0;
    repeat (3) @(posedge clk);
    rst = 0;
    for (int f = 0; f < 150; f++) send_frame($urandom_range(1, 40), f);
    repeat (200) @(posedge clk);
    check(frames_out == 150 && exp_q.size() == 0, "all frames read");
    always_ready = 1;
    for (int f = 0; f < 50; f++) send_frame($urandom_range(1, 33), 1000 + f);
    repeat (200) @(posedge clk);
    check(frames_out == 200 && exp_q.size() == 0, "all frames read at full rate");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
