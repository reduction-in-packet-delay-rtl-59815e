// tb_router_node: end-to-end test of the common-buffer routing node at its
// default size (4 ports, 8-bit packets, 128-packet common array).
//
// Every packet carries its source port in bits [7:6] and a per-source
// sequence number in bits [5:0]. A scoreboard keeps one expected queue per
// (source, destination) pair, since the node keeps packets of one pair in
// order; each delivered packet must be the head of its pair's queue. The
// test runs, in order:
//   1. isolated unicast packets on all 16 pairs: latency must be exactly 10
//      cycles (2 storage + 4 scheduling + 4 travel);
//   2. four inputs sending to one output at once (output contention);
//   3. multicast masks, including the 16'h1113 / 16'h11DF / 16'hFFFF
//      address values of the node's waveform;
//   4. two inputs streaming to one output until the common array is full,
//      so inputs stall and one queue grows past 32 packets (the size of a
//      private per-port buffer);
//   5. 50000 unicast packets with random destinations and random
//      (geometric, the discrete form of exponential) inter-arrival times.
// It counts how often each mechanism happened and fails for one that never
// did, and checks that every packet is delivered once.
module tb_router_node;
  import noc_pkg::*;

  localparam int N  = N_PORTS;
  localparam int DW = DATA_W;
  localparam int CW = $clog2(BUF_DEPTH + 1);

  logic          clk = 1'b0;
  logic          rst_n = 1'b0;
  logic          in_valid  [N];
  logic [DW-1:0] in_data   [N];
  logic [N*N-1:0] address;
  logic          in_ready  [N];
  logic          out_valid [N];
  logic [DW-1:0] out_data  [N];
  logic [CW-1:0] free_slots;

  router_node dut (.*);

  always #2 clk = ~clk;   // 4 ns clock period

  typedef struct packed { logic [DW-1:0] d; logic [N-1:0] m; int unsigned gap; } pkt_t;
  typedef struct packed { logic [DW-1:0] d; int unsigned t; } exp_t;

  pkt_t        sendq [N][$];
  exp_t        expq  [N][N][$];
  int unsigned seq   [N];
  int unsigned wait_until [N];

  int unsigned cyc = 0;
  int checks = 0, failures = 0;
  int unsigned lat_min = 32'hFFFF_FFFF, lat_max = 0;
  longint unsigned lat_sum = 0, lat_cnt = 0;
  int unsigned delivered = 0;
  logic        check_exact = 1'b0;   // when set, every latency must be MIN_LATENCY

  // mechanism counters
  int unsigned n_min_lat = 0, n_contention = 0, n_iter2 = 0, n_multicast = 0;
  int unsigned n_stall = 0, n_full = 0, max_voq = 0;

  task automatic check(input logic ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL @%0d: %s", cyc, what);
    end
  endtask

  task automatic push(input int s, input logic [N-1:0] m, input int unsigned gap = 0);
    pkt_t p;
    p.d   = DW'((s << 6) | (seq[s] % 64));
    p.m   = m;
    p.gap = gap;
    seq[s]++;
    sendq[s].push_back(p);
  endtask

  function automatic logic idle();
    for (int s = 0; s < N; s++) begin
      if (sendq[s].size() != 0 || in_valid[s]) return 1'b0;
      for (int o = 0; o < N; o++) if (expq[s][o].size() != 0) return 1'b0;
    end
    return 1'b1;
  endfunction

  task automatic drain(input int unsigned limit);
    int unsigned t0;
    t0 = cyc;
    while (!idle() && cyc - t0 < limit) @(posedge clk);
    check(idle(), "all packets delivered");
    repeat (12) @(posedge clk);
  endtask

  // Driver, monitor and scoreboard, all sampled at the rising edge.
  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (rst_n) begin
      // mechanism observation (internal signals, read only)
      for (int o = 0; o < N; o++) begin
        int r;
        r = 0;
        for (int i = 0; i < N; i++) r += int'(dut.u_sched.req_new[i*N+o]);
        if (r > 1) n_contention++;
      end
      if (dut.u_sched.iter2_add != '0) n_iter2++;
      // the array refuses the copies offered because too few slots are free
      if (!dut.u_buf.take_all && dut.u_buf.n_offer != '0) n_full++;
      for (int i = 0; i < N; i++)
        for (int o = 0; o < N; o++)
          if (int'(dut.u_buf.voq_count[i][o]) > max_voq) max_voq = int'(dut.u_buf.voq_count[i][o]);

      // outputs
      for (int o = 0; o < N; o++)
        if (out_valid[o]) begin
          int s;
          int unsigned lat;
          s = int'(out_data[o][7:6]);
          if (expq[s][o].size() == 0) begin
            check(1'b0, $sformatf("unexpected packet %h on output %0d", out_data[o], o));
          end else begin
            exp_t e;
            e = expq[s][o].pop_front();
            check(e.d == out_data[o], $sformatf("output %0d got %h, expected %h", o, out_data[o], e.d));
            lat = cyc - e.t;
            if (lat == MIN_LATENCY) n_min_lat++;
            if (check_exact) check(lat == MIN_LATENCY, $sformatf("latency %0d on output %0d", lat, o));
            if (lat < lat_min) lat_min = lat;
            if (lat > lat_max) lat_max = lat;
            lat_sum += longint'(lat);
            lat_cnt++;
            delivered++;
          end
        end

      // inputs
      for (int s = 0; s < N; s++) begin
        if (in_valid[s] && !in_ready[s]) n_stall++;
        if (in_valid[s] && in_ready[s]) begin
          if ($countones(address[N*s +: N]) > 1) n_multicast++;
          for (int o = 0; o < N; o++)
            if (address[N*s+o]) begin
              exp_t e;
              e.d = in_data[s];
              e.t = cyc;
              expq[s][o].push_back(e);
            end
          in_valid[s] <= 1'b0;
        end
        if ((!in_valid[s] || in_ready[s]) && sendq[s].size() != 0 && cyc >= wait_until[s]) begin
          pkt_t p;
          p = sendq[s].pop_front();
          if (p.gap != 0 && wait_until[s] <= cyc) begin
            // inter-arrival gap: hold the packet back p.gap cycles
            wait_until[s] <= cyc + p.gap;
            sendq[s].push_front('{d: p.d, m: p.m, gap: 0});
          end else begin
            in_valid[s]          <= 1'b1;
            in_data[s]           <= p.d;
            address[N*s +: N]    <= p.m;
          end
        end
      end
    end
  end

  // watchdog
  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int s = 0; s < N; s++) begin
      in_valid[s] = 1'b0;
      in_data[s]  = '0;
      seq[s]      = 0;
      wait_until[s] = 0;
    end
    address = '0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    repeat (2) @(posedge clk);

    // 1. isolated packets: exact minimum latency
    check_exact = 1'b1;
    for (int s = 0; s < N; s++)
      for (int o = 0; o < N; o++) begin
        push(s, N'(1) << o);
        drain(100);
      end
    check_exact = 1'b0;
    check(lat_min == MIN_LATENCY && lat_max == MIN_LATENCY, "isolated latency is 10 cycles");

    // 2. output contention: all inputs to output 2, several rounds
    for (int r = 0; r < 8; r++) for (int s = 0; s < N; s++) push(s, 4'b0100);
    drain(1000);

    // 3. multicast, with the waveform's address values among others
    push(0, 4'h3); push(1, 4'h1); push(2, 4'h1); push(3, 4'h1);   // 16'h1113
    drain(200);
    push(0, 4'hF); push(1, 4'hD); push(2, 4'h1); push(3, 4'h1);   // 16'h11DF
    drain(200);
    for (int r = 0; r < 4; r++) for (int s = 0; s < N; s++) push(s, 4'hF);  // 16'hFFFF
    drain(1000);

    // 4. two inputs streaming into output 0 until the array is full
    for (int r = 0; r < 200; r++) begin push(0, 4'b0001); push(1, 4'b0001); end
    push(2, 4'b0010);   // must not be lost behind the full array
    drain(5000);
    check(n_full > 0, "common array full, writes refused");
    check(max_voq > 32, $sformatf("one queue held %0d > 32 packets", max_voq));

    // 5. random traffic: 50000 unicast packets, random gaps
    lat_sum = 0; lat_cnt = 0;
    for (int k = 0; k < 50000 / N; k++)
      for (int s = 0; s < N; s++) begin
        int unsigned g;
        g = 0;
        while ($urandom_range(99) >= 40) g++;   // P(arrival per cycle) = 0.4
        push(s, N'(1) << $urandom_range(N - 1), g);
      end
    drain(300000);
    $display("random phase: %0d packets, average latency %0d.%02d cycles",
             lat_cnt, lat_sum / lat_cnt, (lat_sum * 100 / lat_cnt) % 100);
    check(lat_cnt == 50000, "50000 packets delivered in the random phase");

    $display("mechanisms: min-latency=%0d contention=%0d iter2=%0d multicast=%0d stall=%0d full=%0d max_voq=%0d",
             n_min_lat, n_contention, n_iter2, n_multicast, n_stall, n_full, max_voq);
    check(n_min_lat > 0,    "10-cycle packet seen");
    check(n_contention > 0, "output contention seen");
    check(n_iter2 > 0,      "second iSLIP iteration added a match");
    check(n_multicast > 0,  "multicast packet seen");
    check(n_stall > 0,      "input stall seen");
    $display("delivered %0d packets", delivered);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
