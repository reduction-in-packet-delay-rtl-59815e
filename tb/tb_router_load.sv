// tb_router_load: the node under the traffic intensity of the queuing
// analysis, rho = lambda / mu = 0.995.
//
// Each input receives packets with geometric (discrete exponential)
// inter-arrival gaps whose mean makes the offered load 0.995 packets per
// cycle per input, and each packet goes to a uniformly random output, so
// every output is offered 0.995 of the packet per cycle it can carry. The
// test sends 50000 packets, as in the 50000-packet event simulation, and
// reports the average latency, how often inputs stalled on a full array and
// the longest queue seen. The scoreboard is the one of tb_router_node:
// packets carry their source in bits [7:6] and a sequence number in bits
// [5:0], and every delivered packet must be the next one of its
// (source, destination) pair. Checks: all packets delivered in order, no
// packet faster than the 10-cycle minimum, and the node keeps up with the
// offered load (it finishes within 1.2 times the ideal sending time).
module tb_router_load;
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
    repeat (200000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int unsigned t0;
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

    for (int k = 0; k < 50000 / N; k++)
      for (int s = 0; s < N; s++) begin
        int unsigned g;
        g = 0;
        while ($urandom_range(999) >= 995) g++;   // P(arrival per cycle) = 0.995
        push(s, N'(1) << $urandom_range(N - 1), g);
      end
    t0 = cyc;
    drain(150000);
    check(lat_cnt == 50000, "50000 packets delivered");
    check(lat_min >= MIN_LATENCY, $sformatf("minimum latency %0d", lat_min));
    check(real'(cyc - t0) < 1.2 * 12500.0 / 0.995, $sformatf("load carried: %0d cycles", cyc - t0));
    $display("rho=0.995: %0d packets in %0d cycles, latency average %0d.%02d min %0d max %0d cycles",
             lat_cnt, cyc - t0, lat_sum / lat_cnt, (lat_sum * 100 / lat_cnt) % 100, lat_min, lat_max);
    $display("input stall cycles %0d, cycles with writes refused %0d, longest queue %0d",
             n_stall, n_full, max_voq);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
