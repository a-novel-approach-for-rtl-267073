// tb_drop_tx_top: end-to-end test of the DROP sending firmware at its
// default size (8 data generators, 8 DROP streams, 512 bit frame output).
//
// The testbench plays the receiving server. It collects every frame from the
// tx port, checks the Ethernet, IPv4 (including the header checksum) and UDP
// headers, sorts the frame by UDP destination port into its stream, and then
// does what the receiving program does: it checks that the DROP packet
// identifier of each stream grows by exactly one from packet to packet
// (reporting lost/extra packets otherwise) and histograms the 16 bit payload
// words. Streams fed by a single generator are also compared byte for byte
// with the counting pattern. At the end each stream's histogram must equal
// the one expected from the generator settings.
//
// Phase 1 is the main configuration: one generator per stream, 2000 byte
// payloads, no pauses, a MAC that is always ready. Once the first frame is
// out, the tx port must carry the 5120 beats of the 160 frames in at most
// 5136 clocks, that is at the full 512 bit rate, with the generators held
// back slightly by the shared link (8 x 2048 frame bytes need 256 beats per
// 250 generator clocks).
// Phase 2 exercises the other mechanisms: two generators packed into one
// stream, 350 and 257 byte packets with short final packets of a block, word
// and packet pauses, a repeating generator ended by stop, an identifier jump
// set by id_load (which the receiver must report exactly once), and a MAC
// that applies random back-pressure. Every mechanism is counted and a
// failure is counted for any that never happened.
module tb_drop_tx_top;
  import drop_pkg::*;

  localparam int NG = 8;
  localparam int NS = 8;
  localparam logic [15:0] PORT_BASE = 16'd7000;

  logic            clk = 0;
  logic            rst;
  gen_cfg_t        gen_cfg [NG];
  logic [NG-1:0]   gen_start, gen_stop, gen_busy, gen_block_done;
  net_cfg_t        net_cfg;
  logic [NS-1:0]   id_load;
  logic [ID_W-1:0] id_value [NS];
  logic [ID_W-1:0] packets_sent [NS];
  frame_beat_t     tx_data;
  logic            tx_valid, tx_ready;

  drop_tx_top dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin failures++; if (failures < 30) $display("FAIL %s at %0t", what, $time); end
  endtask

  // ---------------------------------------------------------------- receiver
  bit          random_ready = 0;
  byte unsigned fr[$];
  bit          id_seen [NS];
  longint      last_id [NS];
  longint      rx_off  [NS];      // byte offset in block, single-generator streams
  longint      rx_block[NS];      // block size of the single generator of a stream
  bit          single  [NS];
  int          hist    [NS][int];
  int          frames_rx [NS];
  longint      bytes_rx  [NS];
  int          id_jumps = 0;      // identifier distance other than 1
  int          tail_frames = 0;   // frames whose last beat held only carried-over bytes
  int          mac_stalls = 0;    // clocks the MAC refused an offered beat
  int          busy_beats = 0, run_cycles = 0;
  bit          count_busy = 0;

  always @(negedge clk) tx_ready <= random_ready ? ($urandom_range(0, 3) != 0) : 1'b1;

  function automatic int get16(int i);
    return int'({fr[i], fr[i+1]});
  endfunction

  task automatic receive_frame();
    int s, len, sum, w;
    longint id;
    check(fr.size() >= 49, "frame size");
    check(get16(12) == 'h0800, "ethertype");
    check(fr[14] == 8'h45 && fr[23] == 8'd17, "IPv4/UDP");
    sum = 0;
    for (int i = 14; i < 34; i += 2) sum += get16(i);
    while (sum > 'hFFFF) sum = (sum & 'hFFFF) + (sum >> 16);
    check(sum == 'hFFFF, "IPv4 checksum");
    check(get16(16) == fr.size() - 14, "IPv4 length");
    check(get16(38) == fr.size() - 34, "UDP length");
    s = get16(36) - int'(PORT_BASE);
    check(s >= 0 && s < NS, "destination port");
    if (s < 0 || s >= NS) return;
    id = 0;
    for (int i = 42; i < 48; i++) id = (id << 8) | longint'(fr[i]);
    if (id_seen[s] && id != last_id[s] + 1) id_jumps++;
    id_seen[s] = 1; last_id[s] = id;
    len = fr.size() - 48;
    for (int i = 0; i < len; i++) begin
      if (single[s]) begin
        check(fr[48+i] == ((rx_off[s] % 2 == 1) ? 8'((rx_off[s] / 2) >> 8) : 8'(rx_off[s] / 2)),
              "payload pattern");
        rx_off[s]++;
        if (rx_off[s] == rx_block[s]) rx_off[s] = 0;
      end
    end
    // 16 bit word histogram, as the worker threads do; packets are
    // even-sized in all streams that are histogrammed
    if (len % 2 == 0)
      for (int i = 0; i < len; i += 2) begin
        w = int'({fr[49+i], fr[48+i]});
        if (hist[s].exists(w)) hist[s][w]++; else hist[s][w] = 1;
      end
    frames_rx[s]++;
    bytes_rx[s] += longint'(len);
  endtask

  always @(posedge clk) begin
    int nb;
    if (!rst) begin
      if (count_busy && (tx_valid || busy_beats > 0)) begin
        run_cycles++; if (tx_valid && tx_ready) busy_beats++;
      end
      if (tx_valid && !tx_ready) mac_stalls++;
      if (tx_valid && tx_ready) begin
        nb = 0;
        for (int i = 0; i < 64; i++) if (tx_data.keep[i]) nb++;
        for (int i = 0; i < nb; i++) fr.push_back(tx_data.data[8*i +: 8]);
        if (tx_data.last) begin
          if (nb <= 48 && fr.size() > 64) tail_frames++;
          receive_frame();
          fr.delete();
        end
      end
    end
  end

  // Clocks each generator is busy. Unthrottled, a generator sends its
  // block in block_size/8 clocks; anything above that (without pauses) is
  // time it was held back by the shared link.
  int gen_busy_cycles [NG];
  always @(posedge clk) if (!rst) for (int g = 0; g < NG; g++)
    if (gen_busy[g]) gen_busy_cycles[g]++;

  // ------------------------------------------------------------ test phases
  function automatic void expect_blocks(ref int exp[NS][int], input int s, input int block, input int n);
    for (int w = 0; w < block / 2; w++) begin
      int k = w % 65536;
      if (exp[s].exists(k)) exp[s][k] += n; else exp[s][k] = n;
    end
  endfunction

  int exp_hist[NS][int];

  task automatic reset_all();
    @(negedge clk);
    rst = 1;
    gen_start = '0; gen_stop = '0; id_load = '0;
    repeat (3) @(negedge clk);
    rst = 0;
    for (int s = 0; s < NS; s++) begin
      id_seen[s] = 0; rx_off[s] = 0; hist[s].delete(); exp_hist[s].delete();
      frames_rx[s] = 0; bytes_rx[s] = 0;
    end
    for (int g = 0; g < NG; g++) gen_busy_cycles[g] = 0;
  endtask

  task automatic compare_hist(input int s);
    bit ok = (hist[s].size() == exp_hist[s].size());
    foreach (exp_hist[s][k]) if (!hist[s].exists(k) || hist[s][k] != exp_hist[s][k]) ok = 0;
    check(ok, $sformatf("histogram of stream %0d", s));
  endtask

  int ph1_jumps;
  int gen_stalls = 0;

  initial begin
    rst = 1;
    gen_start = '0; gen_stop = '0; id_load = '0;
    for (int s = 0; s < NS; s++) id_value[s] = '0;
    net_cfg.dst_mac = 48'h0c42_a100_0001; net_cfg.src_mac = 48'h0200_0000_00aa;
    net_cfg.src_ip  = 32'h0a00_0002;      net_cfg.dst_ip  = 32'h0a00_0001;
    net_cfg.src_port = 16'd4000;          net_cfg.dst_port_base = PORT_BASE;

    // ---------------- phase 1: 8 streams x 10.24 Gbit/s, 2000 byte payloads
    for (int g = 0; g < NG; g++) begin
      gen_cfg[g] = '0;
      gen_cfg[g].block_size = 40000; gen_cfg[g].packet_size = 2000;
      gen_cfg[g].pattern = PAT_COUNT16; gen_cfg[g].stream_sel = 8'(g);
    end
    reset_all();
    for (int s = 0; s < NS; s++) begin
      single[s] = 1; rx_block[s] = 40000; expect_blocks(exp_hist, s, 40000, 1);
    end
    @(negedge clk); gen_start = '1; count_busy = 1;
    @(negedge clk); gen_start = '0;
    wait (frames_rx.sum() == NS * 20);
    count_busy = 0;
    // 160 frames of 2048 bytes = 5120 beats of 64 bytes
    check(busy_beats == 5120, "phase 1 beat count");
    check(run_cycles <= 5120 + 16, "phase 1 at full tx rate");
    for (int g = 0; g < NG; g++)
      if (gen_busy_cycles[g] - 40000 / 8 > gen_stalls) gen_stalls = gen_busy_cycles[g] - 40000 / 8;
    $display("phase 1: %0d beats in %0d cycles, generators held back up to %0d cycles", busy_beats, run_cycles, gen_stalls);
    check(gen_stalls > 0 && gen_stalls < 400, "phase 1 generators held back slightly by the link");
    for (int s = 0; s < NS; s++) begin
      check(frames_rx[s] == 20 && bytes_rx[s] == 40000, "phase 1 stream complete");
      check(packets_sent[s] == 20, "packets_sent");
      compare_hist(s);
    end
    check(id_jumps == 0, "phase 1 no identifier jumps");
    ph1_jumps = id_jumps;

    // ---------------- phase 2: packing, pauses, short packets, stop, id jump, back-pressure
    reset_all();
    random_ready = 1;
    for (int g = 0; g < NG; g++) begin
      gen_cfg[g] = '0; gen_cfg[g].pattern = PAT_COUNT16; gen_cfg[g].stream_sel = 8'(g);
      gen_cfg[g].block_size = 3000; gen_cfg[g].packet_size = 350;     // 8x350 + 200
    end
    gen_cfg[0].stream_sel = 8'd0; gen_cfg[1].stream_sel = 8'd0;      // two generators, one stream
    gen_cfg[2].packet_size = 257; gen_cfg[2].block_size = 2570;      // odd packets, 10 of them
    gen_cfg[3].word_pause = 3; gen_cfg[3].packet_pause = 50;
    gen_cfg[4].repeat_blocks = 1; gen_cfg[4].block_size = 1400;      // repeats until stopped
    gen_cfg[5].stream_sel = 8'd200;                                  // parked: feeds nothing
    gen_cfg[6].block_size = 3000; gen_cfg[6].packet_size = 2000;     // 2000 + 1000
    for (int s = 0; s < NS; s++) single[s] = (s != 0 && s != 1 && s != 5);
    rx_block[2] = 2570; rx_block[3] = 3000; rx_block[4] = 1400; rx_block[6] = 3000; rx_block[7] = 3000;
    expect_blocks(exp_hist, 0, 3000, 2);
    expect_blocks(exp_hist, 3, 3000, 1);
    expect_blocks(exp_hist, 6, 3000, 1);
    expect_blocks(exp_hist, 7, 3000, 1);
    // identifier jump on stream 7 after its first packet
    id_value[7] = 48'h0000_0000_1000;
    @(negedge clk); gen_start = 8'b1101_1111;
    @(negedge clk); gen_start = '0;
    wait (frames_rx[7] == 1);
    @(negedge clk); id_load[7] = 1;
    @(negedge clk); id_load[7] = 0;
    // let generator 4 run three blocks, then stop it at a block boundary
    wait (frames_rx[4] == 3 * 4 - 1);
    @(negedge clk); gen_stop[4] = 1;
    @(negedge clk); gen_stop[4] = 0;
    wait (gen_busy == '0);
    repeat (200) @(negedge clk);
    expect_blocks(exp_hist, 4, 1400, 3);
    check(frames_rx[0] == 18 && bytes_rx[0] == 6000, "packed stream complete");
    check(frames_rx[1] == 0 && frames_rx[5] == 0, "unused streams silent");
    check(frames_rx[2] == 10 && bytes_rx[2] == 2570, "257 byte packets");
    check(frames_rx[3] == 9 && bytes_rx[3] == 3000, "paused generator complete");
    check(frames_rx[4] == 12 && bytes_rx[4] == 4200, "repeat and stop");
    check(frames_rx[6] == 2 && bytes_rx[6] == 3000, "2000 byte packets");
    check(frames_rx[7] == 9 && bytes_rx[7] == 3000, "stream with jump complete");
    check(last_id[7] == 64'h1000 + 7, "identifier continues after jump");
    check(id_jumps == 1, "exactly one identifier jump reported");
    foreach (exp_hist[s]) compare_hist(s);

    // ---------------- mechanism coverage
    $display("mechanisms: gen_stalls=%0d mac_stalls=%0d tail_frames=%0d id_jumps=%0d",
             gen_stalls, mac_stalls, tail_frames, id_jumps);
    check(gen_stalls > 0, "generators held back by the shared link");
    check(mac_stalls > 0, "MAC back-pressure seen");
    check(tail_frames > 0, "frame with tail beat seen");
    check(id_jumps > 0, "identifier jump seen");
    check(frames_rx[0] > 0, "two generators packed into one stream");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
