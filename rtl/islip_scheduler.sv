// islip_scheduler: centralised iSLIP scheduler of the N x N routing node.
//
// Every cycle a new matching of inputs to outputs is started, and each one
// takes four pipeline stages, the four clock cycles the node spends to reach
// a scheduling decision:
//   G1  request + grant, iteration 1: input i requests output o when queue
//       (i,o) holds a packet that no matching in flight may already claim;
//       each output grants the requesting input next at or after its
//       round-robin grant pointer.
//   A1  accept, iteration 1: each input accepts the granting output next at
//       or after its accept pointer. Only these first-iteration accepts move
//       the pointers: the output's grant pointer to one past the accepted
//       input, the input's accept pointer to one past the accepted output.
//   G2  grant, iteration 2: outputs left unmatched grant among requesting
//       inputs left unmatched.
//   A2  accept, iteration 2: unmatched inputs accept; the matching is
//       registered and drives deq_valid/deq_out in the next cycle.
// Because four matchings are in flight at once, a request is only raised
// while the queue length exceeds the number of matchings in flight that may
// still take that queue: the one in A1 if it requested it, the one in G2 if
// it matched it or could still match it in iteration 2, the one in A2 if it
// matched or granted it, and the output register, whose packet has not left
// the count yet. No queue is thus ever dequeued more often than it holds
// packets.
//
// Interface: voq_count[i][o] is the length of queue (i,o). deq_valid[i] /
// deq_out[i] say that input i sends the head of queue (i, deq_out[i]) this
// cycle; iter2_add[i] marks matches that only iteration 2 found.
//
// The paper chooses iSLIP with round-robin arbiters and gives 4 cycles to
// reach a decision; the split into two iterations of grant and accept, the
// pipelining and the request-claim rule are this design's own.
module islip_scheduler
  import noc_pkg::*;
#(
  parameter int unsigned N  = N_PORTS,
  parameter int unsigned CW = $clog2(BUF_DEPTH + 1),
  localparam int unsigned PW = $clog2(N)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic [CW-1:0] voq_count [N][N],
  output logic          deq_valid [N],
  output logic [PW-1:0] deq_out   [N],
  output logic [N-1:0]  iter2_add
);

  localparam int unsigned NN = N * N;

  // Round-robin pick: one-hot of the first set bit of v at or after ptr.
  function automatic logic [N-1:0] rr_pick(input logic [N-1:0] v, input logic [PW-1:0] ptr);
    logic [N-1:0] r;
    r = '0;
    for (int k = N - 1; k >= 0; k--) begin
      int idx;
      idx = (int'(ptr) + k) % N;
      if (v[idx]) r = N'(1) << idx;
    end
    return r;
  endfunction

  // Matrices are flat: bit i*N+o is the pair (input i, output o).
  logic [NN-1:0] req_new, gnt1_d, m1_d, gnt2_d, fin_d;
  logic [NN-1:0] req1, gnt1;          // stage A1
  logic [NN-1:0] req2, m2;            // stage G2
  logic [NN-1:0] m3, gnt2;            // stage A2
  logic [NN-1:0] match_q;             // decision
  logic [N-1:0]  add2_d;
  logic [PW-1:0] gptr [N];            // grant pointer of each output
  logic [PW-1:0] aptr [N];            // accept pointer of each input

  // Pairs a matching in flight may still take. In A1 nothing is decided
  // yet; in G2 a pair can only be added where its input and output are both
  // still free; in A2 only a granted pair can be added.
  logic [NN-1:0] claim2, claim3;
  always_comb
    for (int i = 0; i < N; i++)
      for (int o = 0; o < N; o++) begin
        logic col_free;
        col_free = 1'b1;
        for (int k = 0; k < N; k++) col_free = col_free && !m2[k*N+o];
        claim2[i*N+o] = m2[i*N+o] || (req2[i*N+o] && m2[i*N +: N] == '0 && col_free);
        claim3[i*N+o] = m3[i*N+o] || gnt2[i*N+o];
      end

  // G1: requests with in-flight claims removed, then grants.
  always_comb begin
    for (int i = 0; i < N; i++)
      for (int o = 0; o < N; o++) begin
        int claims;
        claims = int'(req1[i*N+o]) + int'(claim2[i*N+o]) + int'(claim3[i*N+o])
               + int'(match_q[i*N+o]);
        req_new[i*N+o] = int'(voq_count[i][o]) > claims;
      end
    gnt1_d = '0;
    for (int o = 0; o < N; o++) begin
      logic [N-1:0] cand, g;
      for (int i = 0; i < N; i++) cand[i] = req_new[i*N+o];
      g = rr_pick(cand, gptr[o]);
      for (int i = 0; i < N; i++) gnt1_d[i*N+o] = g[i];
    end
  end

  // A1: accepts of iteration 1.
  always_comb begin
    m1_d = '0;
    for (int i = 0; i < N; i++) begin
      logic [N-1:0] a;
      a = rr_pick(gnt1[i*N +: N], aptr[i]);
      m1_d[i*N +: N] = a;
    end
  end

  // G2: grants of iteration 2 among unmatched inputs and outputs.
  always_comb begin
    gnt2_d = '0;
    for (int o = 0; o < N; o++) begin
      logic [N-1:0] cand, g;
      logic         o_matched;
      o_matched = 1'b0;
      for (int i = 0; i < N; i++) begin
        o_matched = o_matched | m2[i*N+o];
        cand[i]   = req2[i*N+o] && (m2[i*N +: N] == '0);
      end
      g = o_matched ? '0 : rr_pick(cand, gptr[o]);
      for (int i = 0; i < N; i++) gnt2_d[i*N+o] = g[i];
    end
  end

  // A2: accepts of iteration 2 complete the matching.
  always_comb begin
    fin_d  = m3;
    add2_d = '0;
    for (int i = 0; i < N; i++) begin
      logic [N-1:0] a;
      a = rr_pick(gnt2[i*N +: N], aptr[i]);
      if (m3[i*N +: N] == '0) begin
        fin_d[i*N +: N] = a;
        add2_d[i] = a != '0;
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      req1 <= '0; gnt1 <= '0;
      req2 <= '0; m2 <= '0;
      m3 <= '0; gnt2 <= '0;
      match_q   <= '0;
      iter2_add <= '0;
      for (int k = 0; k < N; k++) begin
        gptr[k] <= '0;
        aptr[k] <= '0;
      end
    end else begin
      req1 <= req_new;  gnt1 <= gnt1_d;
      req2 <= req1;     m2   <= m1_d;
      m3   <= m2;       gnt2 <= gnt2_d;
      match_q   <= fin_d;
      iter2_add <= add2_d;
      // Pointer update on iteration-1 accepts only.
      for (int i = 0; i < N; i++)
        for (int o = 0; o < N; o++)
          if (m1_d[i*N+o]) begin
            gptr[o] <= PW'((i + 1) % N);
            aptr[i] <= PW'((o + 1) % N);
          end
    end
  end

  always_comb
    for (int i = 0; i < N; i++) begin
      deq_valid[i] = match_q[i*N +: N] != '0;
      deq_out[i]   = '0;
      for (int o = 0; o < N; o++)
        if (match_q[i*N+o]) deq_out[i] = PW'(o);
    end

  // The decision is a matching: at most one output per input and one input
  // per output.
  for (genvar k = 0; k < N; k++) begin : g_chk
    logic [N-1:0] col;
    always_comb for (int i = 0; i < N; i++) col[i] = match_q[i*N+k];
    a_row_onehot: assert property (@(posedge clk) disable iff (!rst_n)
      $onehot0(match_q[k*N +: N]));
    a_col_onehot: assert property (@(posedge clk) disable iff (!rst_n)
      $onehot0(col));
  end

endmodule
