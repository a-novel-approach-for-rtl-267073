// tb_pkt_arbiter: self-checking test of the packet-granular round-robin
// multiplexer.
//
// Four sources send packets of random length; each beat carries
// {source, packet number, beat number, last}. The checker asserts that the
// output never mixes packets (beats of one packet arrive contiguous and in
// order), that every packet of every source arrives once and in order, and,
// in a phase with all sources always ready to send and no back-pressure,
// that the grant rotates 0,1,2,3,0,... and that the output carries one beat
// in every clock, packet boundaries included.
module tb_pkt_arbiter;

  localparam int N = 4;
  typedef logic [31:0] word_t;   // {src[7:0], pkt[11:0], beat[11:0]}

  logic         clk = 0;
  logic         rst;
  word_t        in_data [N];
  logic [N-1:0] in_valid, in_last, in_ready;
  word_t        out_data;
  logic         out_valid, out_last, out_ready;
  logic [1:0]   out_sel;

  int checks = 0, failures = 0;
  bit random_mode = 1;
  int npkts = 50;

  pkt_arbiter #(.N(N), .T(word_t)) dut (.*);

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

  // Sources: packet lengths chosen at random, held until the beat is taken.
  int pkt_no [N];
  int beat_no[N];
  int plen   [N];
  bit src_run[N];

  always @(negedge clk) begin
    for (int s = 0; s < N; s++) begin
      if (rst || !src_run[s]) begin
        in_valid[s] <= 1'b0;
      end else if (!in_valid[s] || in_ready[s]) begin
        // the previous beat (if any) was taken at the last posedge
        in_valid[s] <= random_mode ? ($urandom_range(0, 3) != 0) : 1'b1;
      end
    end
  end

  always_comb begin
    for (int s = 0; s < N; s++) begin
      in_data[s] = {8'(s), 12'(pkt_no[s]), 12'(beat_no[s])};
      in_last[s] = (beat_no[s] == plen[s] - 1);
    end
  end

  always @(posedge clk) begin
    for (int s = 0; s < N; s++) begin
      if (!rst && in_valid[s] && in_ready[s]) begin
        if (in_last[s]) begin
          pkt_no[s]  <= pkt_no[s] + 1;
          beat_no[s] <= 0;
          plen[s]    <= random_mode ? $urandom_range(1, 6) : 3;
          if (pkt_no[s] + 1 == npkts) src_run[s] <= 0;
        end else begin
          beat_no[s] <= beat_no[s] + 1;
        end
      end
    end
  end

  always @(negedge clk) out_ready <= random_mode ? ($urandom_range(0, 4) != 0) : 1'b1;

  // Checker.
  int exp_pkt [N];
  int exp_beat[N];
  bit in_pkt;
  int cur_src;
  int last_src = N - 1;
  int rr_errors = 0;
  int busy_cycles = 0, idle_cycles = 0;
  bit count_rate = 0;

  always @(posedge clk) begin
    int s, p, b;
    if (!rst) begin
      if (count_rate) begin
        if (out_valid && out_ready) busy_cycles++; else idle_cycles++;
      end
      if (out_valid && out_ready) begin
        s = int'(out_data[31:24]); p = int'(out_data[23:12]); b = int'(out_data[11:0]);
        check(s == int'(out_sel), "sel matches data");
        if (in_pkt) check(s == cur_src, "no interleaving");
        else if (!random_mode) check(s == (last_src + 1) % N, "round robin order");
        check(p == exp_pkt[s] && b == exp_beat[s], "packet and beat order");
        if (out_last) begin
          in_pkt = 0; exp_pkt[s]++; exp_beat[s] = 0; last_src = s;
        end else begin
          in_pkt = 1; cur_src = s; exp_beat[s]++;
        end
      end
    end
  end

  initial begin
    rst = 1; in_valid = '0; out_ready = 0;
    for (int s = 0; s < N; s++) begin
      pkt_no[s] = 0; beat_no[s] = 0; plen[s] = 2; src_run[s] = 1; exp_pkt[s] = 0; exp_beat[s] = 0;
    end
    in_pkt = 0;
    repeat (3) @(posedge clk);
    rst = 0;
    wait (src_run[0] == 0 && src_run[1] == 0 && src_run[2] == 0 && src_run[3] == 0);
    repeat (10) @(posedge clk);
    for (int s = 0; s < N; s++) check(exp_pkt[s] == npkts, "all packets of source arrived");
    // phase 2: all sources saturated, fixed 3 beat packets
    @(negedge clk);
    rst = 1;
    random_mode = 0;
    for (int s = 0; s < N; s++) begin
      pkt_no[s] = 0; beat_no[s] = 0; plen[s] = 3; src_run[s] = 1; exp_pkt[s] = 0; exp_beat[s] = 0;
    end
    in_pkt = 0; last_src = N - 1;
    @(negedge clk);
    rst = 0;
    repeat (3) @(posedge clk);
    count_rate = 1;
    repeat (40) @(posedge clk);
    count_rate = 0;
    check(idle_cycles == 0 && busy_cycles == 40, "one beat per clock across packet boundaries");
    $display("saturated: busy=%0d idle=%0d", busy_cycles, idle_cycles);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
