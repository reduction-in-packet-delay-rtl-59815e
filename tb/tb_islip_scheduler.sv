// tb_islip_scheduler: self-checking test of the pipelined iSLIP scheduler.
//
// The test keeps the queue lengths itself and feeds them to the scheduler;
// each dequeue the scheduler issues takes one packet off the model queue.
// Checks, with values worked out by hand from the iSLIP rules:
//   - a lone request is matched exactly 4 cycles after it appears;
//   - from reset, requests i0->{o0,o1} and i1->{o1} give i0-o0 in
//     iteration 1 (both outputs grant i0, i0 accepts o0) and i1-o1 in
//     iteration 2;
//   - with every queue deep, the matchings become full (4 pairs) every
//     cycle after a few cycles (iSLIP's pointers desynchronise);
//   - four inputs contending for one deep output are served in turn, so
//     their shares differ by at most two packets (two matchings in flight
//     can see the same grant pointer before it moves).
// Throughout: no queue is dequeued more often than it holds packets, and
// every decision is a matching.
module tb_islip_scheduler;
  localparam int N = 4, CW = 8;

  logic          clk = 1'b0, rst_n = 1'b0;
  logic [CW-1:0] voq_count [N][N];
  logic          deq_valid [N];
  logic [1:0]    deq_out   [N];
  logic [N-1:0]  iter2_add;

  islip_scheduler #(.N(N), .CW(CW)) dut (.*);

  always #5 clk = ~clk;

  int cnt [N][N];
  int served [N][N];
  int checks = 0, failures = 0;
  int unsigned cyc = 0;
  int n_full_match = 0;
  int first_match_cyc = -1;

  task automatic check(input logic ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL @%0d: %s", cyc, what); end
  endtask

  always_comb
    for (int i = 0; i < N; i++)
      for (int o = 0; o < N; o++) voq_count[i][o] = CW'(cnt[i][o]);

  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (rst_n) begin
      int m;
      logic [N-1:0] used;
      m = 0; used = '0;
      for (int i = 0; i < N; i++)
        if (deq_valid[i]) begin
          check(cnt[i][deq_out[i]] > 0, $sformatf("dequeue of empty queue (%0d,%0d)", i, deq_out[i]));
          check(!used[deq_out[i]], "output matched twice");
          used[deq_out[i]] = 1'b1;
          cnt[i][deq_out[i]]--;
          served[i][deq_out[i]]++;
          m++;
          if (first_match_cyc < 0) first_match_cyc = cyc;
        end
      if (m == N) n_full_match++;
    end
  end

  task automatic clear();
    for (int i = 0; i < N; i++)
      for (int o = 0; o < N; o++) begin cnt[i][o] = 0; served[i][o] = 0; end
  endtask

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int t0;
    clear();
    repeat (2) @(posedge clk);
    // From reset (all pointers 0): i0 -> {o0, o1}, i1 -> {o1}.
    cnt[0][0] = 1; cnt[0][1] = 1; cnt[1][1] = 1;
    @(negedge clk);
    rst_n = 1'b1;
    t0 = cyc;
    // The counts are visible from the first cycle after reset; the first
    // decision is on deq_* 4 cycles later.
    repeat (4) @(posedge clk);
    #1;
    check(deq_valid[0] && deq_out[0] == 2'd0, "iteration 1 matches i0-o0");
    check(deq_valid[1] && deq_out[1] == 2'd1, "iteration 2 matches i1-o1");
    check(!deq_valid[2] && !deq_out[3], "inputs 2 and 3 unmatched");
    check(iter2_add == 4'b0010, "iter2_add marks input 1 only");
    repeat (10) @(posedge clk);
    check(cnt[0][1] == 0, "i0-o1 served later");

    // Lone request: matched exactly 4 cycles after it appears.
    @(negedge clk);
    first_match_cyc = -1;
    cnt[2][3] = 1;
    t0 = cyc;
    repeat (8) @(posedge clk);
    check(first_match_cyc - t0 == 4, $sformatf("lone request latency %0d", first_match_cyc - t0));

    // All queues deep: full matchings every cycle once the pointers spread.
    @(negedge clk);
    for (int i = 0; i < N; i++) for (int o = 0; o < N; o++) cnt[i][o] = 50;
    repeat (20) @(posedge clk);
    n_full_match = 0;
    repeat (100) @(posedge clk);
    check(n_full_match == 100, $sformatf("%0d of 100 cycles had full matchings", n_full_match));
    repeat (200) @(posedge clk);   // let every queue drain

    // Contention for one output: round-robin shares.
    @(negedge clk);
    clear();
    for (int i = 0; i < N; i++) cnt[i][0] = 60;
    repeat (120) @(posedge clk);
    // Two matchings in flight may use the same not yet updated grant
    // pointer, so shares may part by two.
    for (int i = 0; i < N; i++)
      for (int k = 0; k < N; k++)
        check(served[i][0] - served[k][0] <= 2 && served[k][0] - served[i][0] <= 2,
              $sformatf("shares %0d / %0d", served[i][0], served[k][0]));
    repeat (200) @(posedge clk);
    check(served[0][0] + served[1][0] + served[2][0] + served[3][0] == 4 * 60, "all 240 served");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
