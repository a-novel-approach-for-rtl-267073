// tb_udp_ip_tx: self-checking test of the UDP/IP/DROP frame builder.
//
// Packets of the lengths that matter for the 48 byte header shift (1, 15,
// 16, 17, 63, 64, 65, 350, 2000 and random ones) are sent with random gaps and
// random back-pressure. For each the testbench builds the expected frame byte
// by byte on its own: Ethernet header, IPv4 header with the checksum summed
// here, UDP header with the stream's port, the 6 byte identifier, then the
// payload. Every output beat is compared byte for byte, with keep and last,
// and the number of output beats is checked against ceil((48+len)/64).
// The received IPv4 header is also checked to sum to 0xFFFF.
module tb_udp_ip_tx;
  import drop_pkg::*;

  logic        clk = 0;
  logic        rst;
  net_cfg_t    cfg;
  logic [7:0]  stream_id;
  drop_beat_t  in;
  logic        in_valid, in_ready;
  frame_beat_t out;
  logic        out_valid, out_ready;

  int checks = 0, failures = 0;

  udp_ip_tx dut (.*);

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
    if (!cond) begin failures++; $display("FAIL %s at %0t", what, $time); end
  endtask

  byte unsigned exp_frames[$][$];

  function automatic void push16(ref byte unsigned q[$], input int v);
    q.push_back(8'(v >> 8)); q.push_back(8'(v));
  endfunction

  task automatic send(input int len, input longint id);
    byte unsigned pay[];
    byte unsigned f[$];
    int sum, pos;
    pay = new[len];
    foreach (pay[i]) pay[i] = 8'($urandom);
    // expected frame
    for (int i = 5; i >= 0; i--) f.push_back(8'(cfg.dst_mac >> (8*i)));
    for (int i = 5; i >= 0; i--) f.push_back(8'(cfg.src_mac >> (8*i)));
    push16(f, 'h0800);
    f.push_back(8'h45); f.push_back(8'h00); push16(f, 34 + len);
    push16(f, 0); push16(f, 'h4000); f.push_back(8'd64); f.push_back(8'd17);
    push16(f, 0);
    push16(f, int'(cfg.src_ip >> 16)); push16(f, int'(cfg.src_ip & 32'hFFFF));
    push16(f, int'(cfg.dst_ip >> 16)); push16(f, int'(cfg.dst_ip & 32'hFFFF));
    sum = 0;
    for (int i = 14; i < 34; i += 2) sum += int'({f[i], f[i+1]});
    while (sum > 'hFFFF) sum = (sum & 'hFFFF) + (sum >> 16);
    sum = ~sum & 'hFFFF;
    f[24] = 8'(sum >> 8); f[25] = 8'(sum);
    push16(f, int'(cfg.src_port)); push16(f, int'(cfg.dst_port_base) + int'(stream_id));
    push16(f, 14 + len); push16(f, 0);
    for (int i = 5; i >= 0; i--) f.push_back(8'(id >> (8*i)));
    foreach (pay[i]) f.push_back(pay[i]);
    exp_frames.push_back(f);
    // drive payload beats
    pos = 0;
    while (pos < len) begin
      @(negedge clk);
      in_valid = ($urandom_range(0, 3) != 0);
      in = '0;
      in.pkt_id = ID_W'(id);
      in.beat.len = 16'(len);
      for (int i = 0; i < 64; i++) if (pos + i < len) begin
        in.beat.data[8*i +: 8] = pay[pos + i];
        in.beat.keep[i] = 1'b1;
      end
      in.beat.last = (pos + 64 >= len);
      @(posedge clk);
      if (in_valid && in_ready) pos += 64;
    end
    @(negedge clk);
    in_valid = 0;
  endtask

  always @(negedge clk) out_ready <= ($urandom_range(0, 4) != 0);

  int fpos = 0, fbeats = 0, frames_done = 0;
  always @(posedge clk) begin
    int total, nb, s;
    if (!rst && out_valid && out_ready) begin
      total = exp_frames[0].size();
      nb = (total - fpos > 64) ? 64 : total - fpos;
      for (int i = 0; i < 64; i++) begin
        check(out.keep[i] == (i < nb), "keep");
        if (i < nb) check(out.data[8*i +: 8] == exp_frames[0][fpos + i], "frame byte");
      end
      if (fpos == 0) begin
        s = 0;
        for (int i = 14; i < 34; i += 2) s += int'({out.data[8*i +: 8], out.data[8*(i+1) +: 8]});
        while (s > 'hFFFF) s = (s & 'hFFFF) + (s >> 16);
        check(s == 'hFFFF, "IPv4 header checksum verifies");
      end
      fpos += nb; fbeats++;
      check(out.last == (fpos == total), "last");
      if (fpos == total) begin
        check(fbeats == (total + 63) / 64, "beats per frame");
        void'(exp_frames.pop_front());
        fpos = 0; fbeats = 0; frames_done++;
      end
    end
  end

  initial begin
    static int lens[] = '{1, 15, 16, 17, 63, 64, 65, 350, 2000, 2048 - 48};
    rst = 1; in = '0; in_valid = 0;
    cfg.dst_mac = 48'h0c42_a1b2_c3d4; cfg.src_mac = 48'h0200_0000_0001;
    cfg.src_ip = 32'hC0A8_0A02; cfg.dst_ip = 32'hC0A8_0A01;
    cfg.src_port = 16'd5000; cfg.dst_port_base = 16'd6000;
    stream_id = 8'd5;
    repeat (3) @(posedge clk);
    rst = 0;
    foreach (lens[i]) send(lens[i], 64'h1000 + longint'(i));
    for (int i = 0; i < 60; i++) send($urandom_range(1, 600), 64'($urandom) << 16);
    repeat (200) @(posedge clk);
    check(frames_done == lens.size() + 60, "all frames sent");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
