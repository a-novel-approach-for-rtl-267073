// tb_workloads: packet rates of the traffic patterns used in the server
// measurements, run on the sending firmware at its default size.
//
// The generators run in repeating mode; after a warm-up the testbench counts
// the frames of each stream leaving the tx port in a fixed window and
// compares them with the rate worked out from the settings (one clock =
// 1/160 MHz, 8 bytes per generator clock, one 64 byte beat per link clock):
//   1. 64 byte payloads at full rate: 1 stream (one packet per 8 clocks,
//      20 Mp/s), 4 streams (the link is exactly full), 8 streams (link bound:
//      2 beats per frame, one frame per 2 clocks in total);
//   2. 5 streams of 350 byte payloads with packet_pause 3: one packet per 47
//      clocks per stream (3.40 Mp/s);
//   3. 8 streams of 2048 byte payloads: link bound, 33 beats per frame;
//   4. 2 streams of 2000 byte payloads reduced to 7.5 and 8.0 Gbit/s by
//      packet_pause 91 and 70 (341 and 320 clocks per packet).
// In every run the DROP identifiers of each stream must grow by one per frame.
module tb_workloads;
  import drop_pkg::*;

  localparam int NG = 8;
  localparam int NS = 8;

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
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s at %0t", what, $time); end
  endtask

  // frame monitor
  bit     first_beat = 1;
  int     cur_s;
  bit     counting = 0;
  int     win_frames [NS];
  bit     id_seen [NS];
  longint last_id [NS];
  int     id_errors = 0;

  always @(posedge clk) begin
    longint id;
    if (rst) begin
      first_beat = 1;
    end else if (tx_valid && tx_ready) begin
      if (first_beat) begin
        cur_s = int'({tx_data.data[36*8 +: 8], tx_data.data[37*8 +: 8]}) - 9000;
        id = 0;
        for (int i = 42; i < 48; i++) id = (id << 8) | longint'(tx_data.data[8*i +: 8]);
        if (id_seen[cur_s] && id != last_id[cur_s] + 1) id_errors++;
        id_seen[cur_s] = 1; last_id[cur_s] = id;
      end
      if (tx_data.last && counting) win_frames[cur_s]++;
      first_beat = tx_data.last;
    end
  end

  task automatic run(input int nstreams, input int psize, input int ppause, input int warm, input int win,
                     input int ppause_g1 = -1);
    @(negedge clk);
    rst = 1;
    for (int g = 0; g < NG; g++) begin
      gen_cfg[g] = '0;
      gen_cfg[g].block_size = 32'(psize) * 64;
      gen_cfg[g].packet_size = 16'(psize);
      gen_cfg[g].packet_pause = 16'(ppause);
      gen_cfg[g].repeat_blocks = 1;
      gen_cfg[g].stream_sel = (g < nstreams) ? 8'(g) : 8'hFF;
    end
    if (ppause_g1 >= 0) gen_cfg[1].packet_pause = 16'(ppause_g1);
    for (int s = 0; s < NS; s++) begin win_frames[s] = 0; id_seen[s] = 0; end
    repeat (3) @(negedge clk);
    rst = 0;
    gen_start = '1;
    @(negedge clk);
    gen_start = '0;
    repeat (warm) @(negedge clk);
    counting = 1;
    repeat (win) @(negedge clk);
    counting = 0;
  endtask

  task automatic stop_all();
    gen_stop = '1;
    repeat (3000) @(negedge clk);
    gen_stop = '0;
  endtask

  function automatic bit near(int got, int exp, int tol);
    return (got >= exp - tol) && (got <= exp + tol);
  endfunction

  initial begin
    int tot;
    rst = 1; gen_start = '0; gen_stop = '0; id_load = '0; tx_ready = 1;
    for (int s = 0; s < NS; s++) id_value[s] = '0;
    net_cfg.dst_mac = 48'h0c42_a100_0001; net_cfg.src_mac = 48'h0200_0000_00aa;
    net_cfg.src_ip  = 32'h0a00_0002;      net_cfg.dst_ip  = 32'h0a00_0001;
    net_cfg.src_port = 16'd4000;          net_cfg.dst_port_base = 16'd9000;

    // 1a: one stream of 64 byte packets: one per 8 clocks
    run(1, 64, 0, 200, 800);
    $display("64 B, 1 stream: %0d frames in 800 clocks", win_frames[0]);
    check(near(win_frames[0], 100, 1), "64 B single stream at 20 Mp/s");
    stop_all();
    // 1b: four streams: each at full generator rate, link exactly full
    run(4, 64, 0, 200, 800);
    for (int s = 0; s < 4; s++) check(near(win_frames[s], 100, 2), "64 B, 4 streams, each at 20 Mp/s");
    $display("64 B, 4 streams: %0d %0d %0d %0d", win_frames[0], win_frames[1], win_frames[2], win_frames[3]);
    stop_all();
    // 1c: eight streams: link bound, 400 frames in 800 clocks, shared fairly
    run(8, 64, 0, 400, 800);
    tot = 0;
    for (int s = 0; s < 8; s++) begin tot += win_frames[s]; check(near(win_frames[s], 50, 3), "64 B, 8 streams, fair share"); end
    $display("64 B, 8 streams: %0d frames in 800 clocks", tot);
    check(near(tot, 400, 2), "64 B, 8 streams, link bound (80 Mp/s)");
    stop_all();
    // 2: five streams of 350 B, packet_pause 3 -> 47 clocks per packet
    run(5, 350, 3, 500, 4700);
    for (int s = 0; s < 5; s++) check(near(win_frames[s], 100, 1), "350 B, 5 streams at 3.4 Mp/s");
    $display("350 B, 5 streams: %0d %0d %0d %0d %0d", win_frames[0], win_frames[1], win_frames[2], win_frames[3], win_frames[4]);
    stop_all();
    // 3: eight streams of 2048 B: 33 beats per frame on the link
    run(8, 2048, 0, 3000, 6600);
    tot = 0;
    for (int s = 0; s < 8; s++) tot += win_frames[s];
    $display("2048 B, 8 streams: %0d frames in 6600 clocks", tot);
    check(near(tot, 200, 2), "2048 B, 8 streams, link bound");
    stop_all();
    // 4: two streams of 2000 B at 7.5 and 8.0 Gbit/s
    run(2, 2000, 91, 1000, 34100, 70);
    $display("2000 B, 7.5/8.0 Gbit/s: %0d %0d frames in 34100 clocks", win_frames[0], win_frames[1]);
    check(near(win_frames[0], 100, 1), "stream 0 at 7.5 Gbit/s");
    check(near(win_frames[1], 107, 1), "stream 1 at 8.0 Gbit/s");
    stop_all();
    check(id_errors == 0, "identifiers without jumps");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
