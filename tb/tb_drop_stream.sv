// tb_drop_stream: self-checking test of DROP stream formation.
//
// Three sources send payload packets of 1 to 3 wide beats; the first data
// word of each beat carries {source, packet number, beat number}. The checker
// follows the receiver's rule: the identifier must be the same on all beats
// of a packet and grow by exactly one from one packet to the next. It also
// checks that all packets of all sources arrive whole and in order, that the
// packets_sent counter matches, and that id_load makes the next packet carry
// the loaded value (the jump a receiver would report).
module tb_drop_stream;
  import drop_pkg::*;

  localparam int N = 3;

  logic            clk = 0;
  logic            rst;
  logic            id_load;
  logic [ID_W-1:0] id_value;
  pay_beat_t       in_data [N];
  logic [N-1:0]    in_valid, in_ready;
  drop_beat_t      out;
  logic            out_valid, out_ready;
  logic [ID_W-1:0] packets_sent;

  int checks = 0, failures = 0;
  int npkts = 40;

  drop_stream #(.N_IN(N)) dut (.*);

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

  int pkt_no [N], beat_no[N], plen[N];
  bit src_run[N];

  always @(negedge clk) begin
    for (int s = 0; s < N; s++) begin
      if (rst || !src_run[s]) in_valid[s] <= 1'b0;
      else if (!in_valid[s] || in_ready[s]) in_valid[s] <= ($urandom_range(0, 2) != 0);
    end
    out_ready <= ($urandom_range(0, 3) != 0);
  end

  always_comb begin
    for (int s = 0; s < N; s++) begin
      in_data[s] = '0;
      in_data[s].data[31:0] = {8'(s), 12'(pkt_no[s]), 12'(beat_no[s])};
      in_data[s].keep = '1;
      in_data[s].last = (beat_no[s] == plen[s] - 1);
      in_data[s].len  = 16'(64 * plen[s]);
    end
  end

  always @(posedge clk) begin
    for (int s = 0; s < N; s++) begin
      if (!rst && in_valid[s] && in_ready[s]) begin
        if (in_data[s].last) begin
          pkt_no[s] <= pkt_no[s] + 1; beat_no[s] <= 0; plen[s] <= $urandom_range(1, 3);
          if (pkt_no[s] + 1 == npkts) src_run[s] <= 0;
        end else beat_no[s] <= beat_no[s] + 1;
      end
    end
  end

  longint exp_id = 0;
  int     exp_pkt[N], exp_beat[N];
  int     total = 0;
  bit     loaded = 0;

  always @(posedge clk) begin
    int s, p, b;
    if (!rst && out_valid && out_ready) begin
      s = int'(out.beat.data[31:24]); p = int'(out.beat.data[23:12]); b = int'(out.beat.data[11:0]);
      check(out.pkt_id == ID_W'(exp_id), "packet identifier");
      check(p == exp_pkt[s] && b == exp_beat[s], "source packet order");
      if (out.beat.last) begin
        exp_id++; exp_pkt[s]++; exp_beat[s] = 0; total++;
      end else exp_beat[s]++;
    end
  end

  initial begin
    rst = 1; in_valid = '0; out_ready = 0; id_load = 0; id_value = '0;
    for (int s = 0; s < N; s++) begin
      pkt_no[s] = 0; beat_no[s] = 0; plen[s] = 1 + s; src_run[s] = 1; exp_pkt[s] = 0; exp_beat[s] = 0;
    end
    repeat (3) @(posedge clk);
    rst = 0;
    // load a new identifier when 30 packets have passed and no packet is open
    wait (total == 30);
    @(negedge clk);
    id_load = 1; id_value = 48'h0000_1234_0000;
    force out_ready = 1'b0;
    @(negedge clk);
    id_load = 0;
    // the packet in flight keeps its old identifier; find where it ends
    release out_ready;
    wait (total >= 31);
    @(posedge clk);
    wait (src_run[0] == 0 && src_run[1] == 0 && src_run[2] == 0);
    repeat (20) @(posedge clk);
    for (int s = 0; s < N; s++) check(exp_pkt[s] == npkts, "all packets arrived");
    check(packets_sent == ID_W'(N * npkts), "packets_sent counter");
    check(out.pkt_id >= 48'h0000_1234_0000, "identifier continued from loaded value");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // the identifier expected after the load
  always @(posedge clk) if (id_load) begin
    // a packet in progress at the load would finish with the loaded id+...; the
    // load is placed at a packet boundary with the output stalled, so the next
    // packet starts with the loaded value
    exp_id = 64'h0000_1234_0000;
    loaded = 1;
  end
endmodule
