// tb_beat_upsizer: self-checking test of the 64 to 512 bit packer.
//
// Packets of random length (1 to 300 bytes) with random byte values are sent
// as 64 bit beats with random gaps, while the output sees random
// back-pressure. The testbench keeps the bytes of every packet in a queue and
// checks each wide beat: the next up-to-64 bytes of the packet, the keep
// mask, last on the final beat only, and the length field. A run at full rate
// checks that a 2000 byte packet (250 narrow beats) leaves as 32 wide beats
// without stalling the input.
module tb_beat_upsizer;
  import drop_pkg::*;

  logic      clk = 0;
  logic      rst;
  gen_beat_t in;
  logic      in_valid, in_ready;
  pay_beat_t out;
  logic      out_valid, out_ready;

  int checks = 0, failures = 0;
  bit random_mode = 1;
  int stall_cycles = 0;

  beat_upsizer dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s at %0t", what, $time); end
  endtask

  // expected packets
  byte unsigned exp_bytes[$];
  int           exp_lens[$];
  int           pkts_out = 0;
  int           cur_left = 0;

  task automatic send_packet(input int len);
    byte unsigned b[];
    int pos;
    b = new[len];
    foreach (b[i]) b[i] = 8'($urandom);
    foreach (b[i]) exp_bytes.push_back(b[i]);
    exp_lens.push_back(len);
    pos = 0;
    while (pos < len) begin
      @(negedge clk);
      in_valid = random_mode ? ($urandom_range(0, 2) != 0) : 1'b1;
      in = '0;
      for (int i = 0; i < 8; i++) if (pos + i < len) begin
        in.data[8*i +: 8] = b[pos + i];
        in.keep[i] = 1'b1;
      end
      in.last = (pos + 8 >= len);
      in.len  = 16'(len);
      #1;
      if (in_valid && !in_ready) stall_cycles++;
      @(posedge clk);
      if (in_valid && in_ready) pos += 8;
    end
    @(negedge clk);
    in_valid = 0;
  endtask

  // output side
  always @(negedge clk) begin
    out_ready <= random_mode ? ($urandom_range(0, 3) != 0) : 1'b1;
  end

  always @(posedge clk) begin
    int nb;
    if (!rst && out_valid && out_ready) begin
      if (cur_left == 0) cur_left = exp_lens[0];
      nb = (cur_left > 64) ? 64 : cur_left;
      check(out.len == 16'(exp_lens[0]), "len");
      for (int i = 0; i < 64; i++) begin
        check(out.keep[i] == (i < nb), "keep");
        if (i < nb) check(out.data[8*i +: 8] == exp_bytes[i], "data");
      end
      for (int i = 0; i < nb; i++) void'(exp_bytes.pop_front());
      cur_left -= nb;
      check(out.last == (cur_left == 0), "last");
      if (cur_left == 0) begin void'(exp_lens.pop_front()); pkts_out++; end
    end
  end

  initial begin
    int t0;
    rst = 1; in = '0; in_valid = 0; out_ready = 0;
    repeat (3) @(posedge clk);
    rst = 0;
    for (int p = 0; p < 200; p++) send_packet($urandom_range(1, 300));
    send_packet(64); send_packet(65); send_packet(8); send_packet(1);
    repeat (20) @(posedge clk);
    check(pkts_out == 204, "all packets out");
    // full rate
    random_mode = 0;
    stall_cycles = 0;
    repeat (3) @(posedge clk);
    t0 = pkts_out;
    send_packet(2000);
    send_packet(2000);
    repeat (10) @(posedge clk);
    check(pkts_out == t0 + 2, "full-rate packets out");
    check(stall_cycles == 0, "no input stall at full rate");
    check(exp_bytes.size() == 0, "no bytes left over");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
