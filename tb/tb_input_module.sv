// tb_input_module: self-checking test of one input module.
//
// Packets with random data and random destination masks (empty masks
// included) are offered with random gaps, and the array side accepts copies
// at random. A reference queue built from the accepted packets lists every
// copy the module must offer: one per set mask bit, lowest output first.
// Each accepted copy is compared with it. A final burst of unicast packets
// with the array always accepting must go through at one packet per cycle.
module tb_input_module;
  localparam int N  = 4;
  localparam int DW = 8;

  logic          clk = 1'b0, rst_n = 1'b0;
  logic          in_valid = 1'b0;
  logic [DW-1:0] in_data = '0;
  logic [N-1:0]  in_dest = '0;
  logic          in_ready;
  logic          wr_valid;
  logic [DW-1:0] wr_data;
  logic [1:0]    wr_out;
  logic          wr_accept;
  logic          acc_en = 1'b0;   // random acceptance by the array
  logic          acc_all = 1'b0;  // array always accepts

  input_module #(.N(N), .DW(DW)) dut (.*);

  always #5 clk = ~clk;

  typedef struct packed { logic [DW-1:0] d; logic [1:0] o; } copy_t;
  copy_t expq[$];
  int checks = 0, failures = 0;
  int unsigned cyc = 0, n_acc = 0;
  logic        driving = 1'b0, burst = 1'b0;

  assign wr_accept = wr_valid && (acc_all || acc_en);

  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (rst_n) begin
      if (wr_accept) begin
        checks++;
        if (expq.size() == 0 || expq[0] != {wr_data, wr_out}) begin
          failures++;
          $display("FAIL @%0d: copy %h->%0d not expected", cyc, wr_data, wr_out);
        end else void'(expq.pop_front());
      end
      if (in_valid && in_ready) begin
        n_acc++;
        for (int o = 0; o < N; o++) if (in_dest[o]) expq.push_back({in_data, 2'(o)});
      end
      acc_en <= $urandom_range(2) != 0;
      if (driving && (!in_valid || in_ready)) begin
        in_valid <= burst || $urandom_range(3) != 0;
        in_data  <= DW'($urandom);
        in_dest  <= burst ? N'(1) << $urandom_range(N - 1) : N'($urandom);
      end
    end
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int unsigned t0, a0;
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    driving = 1'b1;
    repeat (3000) @(posedge clk);
    // unicast burst: one packet per cycle
    burst = 1'b1; acc_all = 1'b1;
    repeat (5) @(posedge clk);
    a0 = n_acc; t0 = cyc;
    repeat (100) @(posedge clk);
    checks++;
    if (n_acc - a0 != cyc - t0) begin
      failures++;
      $display("FAIL: %0d packets in %0d cycles", n_acc - a0, cyc - t0);
    end
    driving = 1'b0;
    @(posedge clk); in_valid <= 1'b0;
    repeat (20) @(posedge clk);
    checks++;
    if (expq.size() != 0) begin failures++; $display("FAIL: %0d copies never offered", expq.size()); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
