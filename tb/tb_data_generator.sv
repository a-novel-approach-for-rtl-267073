// tb_data_generator: self-checking test of the data generator.
//
// A reference model in the testbench keeps its own byte offset within the
// block and works out each expected byte of the counting patterns, the keep
// mask, the packet lengths and the packet ends. Runs cover: a block with a
// short final packet and no pauses (one beat per clock is checked by
// counting cycles), word and packet pauses (exact cycle counts), random
// back-pressure, the 32 bit pattern, and repeating blocks ended by stop.
module tb_data_generator;
  import drop_pkg::*;

  logic      clk = 0;
  logic      rst;
  logic      start, stop;
  gen_cfg_t  cfg;
  gen_beat_t out;
  logic      out_valid, out_ready, busy, block_done;

  int checks = 0, failures = 0;

  data_generator dut (.*);

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
    if (!cond) begin
      failures++;
      $display("FAIL %s at %0t", what, $time);
    end
  endtask

  function automatic logic [7:0] ref_byte(input pattern_e pat, input longint k);
    longint w;
    if (pat == PAT_COUNT32) begin
      w = k / 4;
      return 8'((w >> (8 * (k % 4))) & 255);
    end
    w = (k / 2) % 65536;
    return (k % 2 == 1) ? 8'(w >> 8) : 8'(w & 255);
  endfunction

  // Receive nblocks blocks, checking every beat; returns cycles from first
  // beat to last beat inclusive.
  task automatic run_block(input gen_cfg_t c, input int nblocks, input bit random_ready,
                           output int cycles);
    longint k;
    int pkt_left, nb, blocks, first_cycle, cyc;
    bit started;
    blocks = 0; k = 0; started = 0; cyc = 0; first_cycle = 0;
    pkt_left = (c.block_size < c.packet_size) ? int'(c.block_size) : int'(c.packet_size);
    while (blocks < nblocks) begin
      @(negedge clk);
      out_ready = random_ready ? ($urandom_range(0, 3) != 0) : 1'b1;
      #1;
      cyc++;
      if (out_valid && out_ready) begin
        if (!started) begin started = 1; first_cycle = cyc; end
        nb = (pkt_left > 8) ? 8 : pkt_left;
        for (int i = 0; i < 8; i++) begin
          if (i < nb) check(out.data[8*i +: 8] == ref_byte(c.pattern, k + longint'(i)), "data byte");
          check(out.keep[i] == (i < nb), "keep");
        end
        check(out.last == (pkt_left <= 8), "last");
        k += longint'(nb);
        pkt_left -= nb;
        if (pkt_left == 0) begin
          if (k == longint'(c.block_size)) begin
            blocks++;
            k = 0;
          end
          pkt_left = (longint'(c.block_size) - k < longint'(c.packet_size)) ?
                     int'(longint'(c.block_size) - k) : int'(c.packet_size);
        end
      end
      @(posedge clk);
    end
    @(negedge clk);
    out_ready = 1'b0;
    cycles = cyc - first_cycle + 1;
  endtask

  // The generator also reports the packet length on every beat.
  int exp_len;
  always @(negedge clk) begin
    if (!rst && out_valid) begin
      checks++;
      if (out.len == 0 || out.len > cfg.packet_size) begin
        failures++;
        $display("FAIL len %0d", out.len);
      end
    end
  end

  task automatic do_start(input gen_cfg_t c);
    cfg = c;
    @(negedge clk); start = 1;
    @(negedge clk); start = 0;
    @(posedge clk);
  endtask

  initial begin
    gen_cfg_t c;
    int cycles;
    rst = 1; start = 0; stop = 0; out_ready = 0; cfg = '0;
    repeat (3) @(posedge clk);
    rst = 0;

    // 1: 300 byte block, 64 byte packets, full rate: 4x8 + 6 = 38 beats in 38 clocks.
    c = '0; c.block_size = 300; c.packet_size = 64; c.pattern = PAT_COUNT16;
    do_start(c);
    run_block(c, 1, 0, cycles);
    check(cycles == 38, "full-rate beat count");
    repeat (3) @(posedge clk);
    check(!busy, "idle after single block");

    // 2: pauses: 2 packets of 40 bytes (5 beats), word_pause 2, packet_pause 7.
    //    cycles = 2*(5 + 4*2) + 7 (pause between) = 33
    c = '0; c.block_size = 80; c.packet_size = 40; c.word_pause = 2; c.packet_pause = 7;
    do_start(c);
    run_block(c, 1, 0, cycles);
    check(cycles == 33, "pause cycle count");
    $display("pause run cycles=%0d", cycles);
    repeat (10) @(posedge clk);

    // 3: odd sizes with random back-pressure (257 byte packets, 2000 byte block).
    c = '0; c.block_size = 2000; c.packet_size = 257;
    do_start(c);
    run_block(c, 1, 1, cycles);
    repeat (3) @(posedge clk);

    // 4: 32 bit pattern.
    c = '0; c.block_size = 1000; c.packet_size = 350; c.pattern = PAT_COUNT32;
    do_start(c);
    run_block(c, 1, 1, cycles);
    repeat (3) @(posedge clk);

    // 5: repeating blocks, then stop.
    c = '0; c.block_size = 192; c.packet_size = 100; c.repeat_blocks = 1;
    do_start(c);
    run_block(c, 3, 1, cycles);
    check(busy, "still running in repeat mode");
    stop = 1;
    @(negedge clk);
    out_ready = 1;
    repeat (40) @(posedge clk);
    stop = 0;
    check(!busy, "stopped after stop");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
