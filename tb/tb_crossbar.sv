// tb_crossbar: self-checking test of the crossbar and its output links.
//
// Each cycle a random partial permutation of inputs to outputs is applied
// with random data. A reference pipeline of STAGES entries, computed from
// the permutation, gives what each output must show STAGES cycles later;
// outputs with no packet must be idle.
module tb_crossbar;
  localparam int N = 4, DW = 8, STAGES = 3;

  logic          clk = 1'b0, rst_n = 1'b0;
  logic          in_valid  [N];
  logic [DW-1:0] in_data   [N];
  logic [1:0]    in_out    [N];
  logic          out_valid [N];
  logic [DW-1:0] out_data  [N];

  crossbar #(.N(N), .DW(DW), .STAGES(STAGES)) dut (.*);

  always #5 clk = ~clk;

  typedef struct packed { logic v; logic [DW-1:0] d; } slot_t;
  slot_t ref_q [$];           // one entry per output per cycle, flattened
  int checks = 0, failures = 0;
  int unsigned cyc = 0;

  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (rst_n) begin
      slot_t row [N];
      int perm [N];
      // expected output of this edge's inputs
      for (int o = 0; o < N; o++) row[o] = '0;
      for (int i = 0; i < N; i++)
        if (in_valid[i]) row[in_out[i]] = '{v: 1'b1, d: in_data[i]};
      for (int o = 0; o < N; o++) ref_q.push_back(row[o]);
      // compare outputs with what was applied STAGES cycles ago
      if (ref_q.size() > N * (STAGES + 1) - N) begin
        for (int o = 0; o < N; o++) begin
          slot_t e;
          e = ref_q.pop_front();
          checks++;
          if (out_valid[o] != e.v || (e.v && out_data[o] != e.d)) begin
            failures++;
            $display("FAIL @%0d: output %0d got %b/%h, expected %b/%h", cyc, o,
                     out_valid[o], out_data[o], e.v, e.d);
          end
        end
      end
      // new random partial permutation
      for (int k = 0; k < N; k++) perm[k] = k;
      for (int k = N - 1; k > 0; k--) begin
        int j, t;
        j = $urandom_range(k);
        t = perm[k]; perm[k] = perm[j]; perm[j] = t;
      end
      for (int i = 0; i < N; i++) begin
        in_valid[i] <= $urandom_range(3) != 0;
        in_data[i]  <= DW'($urandom);
        in_out[i]   <= 2'(perm[i]);
      end
    end
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < N; i++) begin in_valid[i] = 1'b0; in_data[i] = '0; in_out[i] = '0; end
    repeat (2) @(posedge clk);
    @(negedge clk) rst_n = 1'b1;
    repeat (2000) @(posedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
