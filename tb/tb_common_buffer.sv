// tb_common_buffer: self-checking test of the shared packet array.
//
// A reference model keeps one queue per (input, output) pair and the number
// of free slots. Each cycle every input offers a copy at random; the test
// checks that the array takes all copies exactly when enough slots are free
// (and none otherwise), that voq_count and free_count follow the model, and
// that every dequeued packet is the head of its queue, one cycle later.
// The first phase only writes, input 0 every cycle, until the array is
// full: queue (0,1) must then hold far more than a quarter of the array.
// The second phase mixes random writes and dequeues.
module tb_common_buffer;
  localparam int N = 4, DW = 8, DEPTH = 128;
  localparam int PW = 2, CW = $clog2(DEPTH + 1);

  logic          clk = 1'b0, rst_n = 1'b0;
  logic          wr_valid  [N];
  logic [DW-1:0] wr_data   [N];
  logic [PW-1:0] wr_out    [N];
  logic          wr_accept [N];
  logic [CW-1:0] voq_count [N][N];
  logic [CW-1:0] free_count;
  logic          deq_valid [N];
  logic [PW-1:0] deq_out   [N];
  logic          rd_valid  [N];
  logic [DW-1:0] rd_data   [N];
  logic [PW-1:0] rd_out    [N];

  common_buffer #(.N(N), .DW(DW), .DEPTH(DEPTH)) dut (.*);

  always #5 clk = ~clk;

  logic [DW-1:0] model [N][N][$];
  int            model_free = DEPTH;
  logic          pend_v [N];
  logic [DW-1:0] pend_d [N];
  logic [PW-1:0] pend_o [N];
  int checks = 0, failures = 0;
  int unsigned cyc = 0;
  int  phase = 0;
  int  max_len = 0, n_refused = 0;

  task automatic check(input logic ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL @%0d: %s", cyc, what); end
  endtask

  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (rst_n && phase != 0) begin
      int offered, taken;
      // state seen before this edge
      check(int'(free_count) == model_free, $sformatf("free_count %0d, model %0d", free_count, model_free));
      for (int i = 0; i < N; i++)
        for (int o = 0; o < N; o++) begin
          check(int'(voq_count[i][o]) == model[i][o].size(), $sformatf("voq_count[%0d][%0d]", i, o));
          if (model[i][o].size() > max_len) max_len = model[i][o].size();
        end
      for (int i = 0; i < N; i++) begin
        check(rd_valid[i] == pend_v[i], "rd_valid");
        if (pend_v[i]) check(rd_data[i] == pend_d[i] && rd_out[i] == pend_o[i],
                             $sformatf("rd_data[%0d] %h, expected %h", i, rd_data[i], pend_d[i]));
      end
      offered = 0;
      for (int i = 0; i < N; i++) offered += int'(wr_valid[i]);
      taken = 0;
      for (int i = 0; i < N; i++) begin
        check(wr_accept[i] == (wr_valid[i] && model_free >= offered), "all-or-nothing write rule");
        if (wr_accept[i]) begin
          model[i][wr_out[i]].push_back(wr_data[i]);
          taken++;
        end
      end
      if (offered > 0 && taken == 0) n_refused++;
      model_free -= taken;
      // dequeues of this edge
      for (int i = 0; i < N; i++) begin
        pend_v[i] = deq_valid[i];
        pend_o[i] = deq_out[i];
        if (deq_valid[i]) begin
          pend_d[i] = model[i][deq_out[i]].pop_front();
          model_free++;
        end
      end
      // next cycle's stimulus
      for (int i = 0; i < N; i++) begin
        if (phase == 1)   // input 0 streams into queue (0,1), the others trickle
          wr_valid[i] <= (i == 0) || $urandom_range(3) == 0;
        else
          wr_valid[i] <= $urandom_range(3) != 0;
        wr_data[i]  <= DW'($urandom);
        wr_out[i]   <= (phase == 1 && i == 0) ? PW'(1) : PW'($urandom);
        deq_valid[i] <= 1'b0;
        if (phase == 2) begin
          int o;
          o = $urandom_range(N - 1);
          if (model[i][o].size() != 0 && $urandom_range(1) == 0) begin
            deq_valid[i] <= 1'b1;
            deq_out[i]   <= PW'(o);
          end
        end
      end
    end
  end

  initial begin
    repeat (30000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < N; i++) begin
      wr_valid[i] = 1'b0; wr_data[i] = '0; wr_out[i] = '0;
      deq_valid[i] = 1'b0; deq_out[i] = '0; pend_v[i] = 1'b0; pend_d[i] = '0; pend_o[i] = '0;
    end
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    @(posedge clk);
    phase = 1;
    repeat (200) @(posedge clk);
    check(model_free < N && n_refused > 0, "array filled and refused writes");
    check(max_len > DEPTH / N, $sformatf("one queue grew to %0d packets", max_len));
    phase = 2;
    repeat (10000) @(posedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
