// common_buffer: the packet array shared by all input ports of the node.
//
// One array of DEPTH packet slots (128 by default) holds the packets of all
// four input ports. The slots are organised as N*N virtual output queues
// (VOQs), queue (i,o) holding the packets that came in on input i and leave
// on output o. Each queue is a linked list through the slots, so a queue can
// grow to any length the free space allows: a hot output may take far more
// than a quarter of the array, which is the point of sharing one array.
//
// Write side (second storage phase): each input offers at most one packet
// copy per cycle together with its output. Free slots are taken from a
// free-slot bitmap, lowest index first, in input order. The array takes
// either every offered copy of a cycle or none of them (when fewer slots are
// free than copies are offered), so no input can starve the others when the
// array is nearly full. A stored copy is linked to the tail of its queue at
// the same clock edge and is visible in voq_count in the next cycle.
//
// Read side: the scheduler dequeues at most one packet per input per cycle
// (deq_valid[i], from queue (i, deq_out[i])). The head packet is read into
// a register (rd_*), valid in the next cycle, and its slot is freed.
//
// The paper gives the shared array, its 128-packet size and the virtual
// output queues of dynamic length; the linked lists, the bitmap allocator
// and the all-or-nothing write rule are this design's own.
module common_buffer
  import noc_pkg::*;
#(
  parameter int unsigned N     = N_PORTS,
  parameter int unsigned DW    = DATA_W,
  parameter int unsigned DEPTH = BUF_DEPTH,
  localparam int unsigned PW   = $clog2(N),
  localparam int unsigned AW   = $clog2(DEPTH),
  localparam int unsigned CW   = $clog2(DEPTH + 1)
) (
  input  logic          clk,
  input  logic          rst_n,
  // write side, one port per input module
  input  logic          wr_valid  [N],
  input  logic [DW-1:0] wr_data   [N],
  input  logic [PW-1:0] wr_out    [N],
  output logic          wr_accept [N],
  // queue lengths, [input][output]
  output logic [CW-1:0] voq_count [N][N],
  output logic [CW-1:0] free_count,
  // read side, one port per input
  input  logic          deq_valid [N],
  input  logic [PW-1:0] deq_out   [N],
  output logic          rd_valid  [N],
  output logic [DW-1:0] rd_data   [N],
  output logic [PW-1:0] rd_out    [N]
);

  localparam int unsigned NQ = N * N;

  logic [DW-1:0]    mem   [DEPTH];   // packet payloads
  logic [AW-1:0]    nxt   [DEPTH];   // linked-list successor of each slot
  logic [DEPTH-1:0] free_vec;        // 1 = slot free
  logic [AW-1:0]    head  [NQ];
  logic [AW-1:0]    tail  [NQ];
  logic [CW-1:0]    count [NQ];

  logic [AW-1:0]    slot  [N];       // slot given to each input this cycle
  logic [CW-1:0]    n_offer, n_taken;
  logic             take_all;

  // Slot allocation: lowest free slots, handed out in input order.
  always_comb begin
    logic [DEPTH-1:0] avail;
    avail   = free_vec;
    n_offer = '0;
    for (int i = 0; i < N; i++) begin
      slot[i] = '0;
      if (wr_valid[i]) begin
        n_offer = n_offer + CW'(1);
        for (int s = DEPTH - 1; s >= 0; s--)
          if (avail[s]) slot[i] = s[AW-1:0];
        avail[slot[i]] = 1'b0;
      end
    end
  end

  assign take_all = free_count >= n_offer;

  always_comb begin
    n_taken = '0;
    for (int i = 0; i < N; i++) begin
      wr_accept[i] = wr_valid[i] && take_all;
      if (deq_valid[i]) n_taken = n_taken + CW'(1);
    end
  end

  // Per-queue enqueue and dequeue strobes: input i only reaches row i.
  logic [NQ-1:0] enq, deq;
  always_comb
    for (int i = 0; i < N; i++)
      for (int o = 0; o < N; o++) begin
        voq_count[i][o] = count[i*N+o];
        enq[i*N+o]      = wr_accept[i] && int'(wr_out[i]) == o;
        deq[i*N+o]      = deq_valid[i] && int'(deq_out[i]) == o;
      end

  // Payload and link storage: no reset, every slot is written before it is read.
  always_ff @(posedge clk) begin
    for (int i = 0; i < N; i++) begin
      if (wr_accept[i]) begin
        mem[slot[i]] <= wr_data[i];
        if (count[i*N+int'(wr_out[i])] != '0)
          nxt[tail[i*N+int'(wr_out[i])]] <= slot[i];
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      free_vec   <= '1;
      free_count <= CW'(DEPTH);
      for (int q = 0; q < NQ; q++) begin
        head[q]  <= '0;
        tail[q]  <= '0;
        count[q] <= '0;
      end
      for (int i = 0; i < N; i++) begin
        rd_valid[i] <= 1'b0;
        rd_data[i]  <= '0;
        rd_out[i]   <= '0;
      end
    end else begin
      free_count <= free_count - (take_all ? n_offer : CW'(0)) + n_taken;
      for (int i = 0; i < N; i++) begin
        rd_valid[i] <= deq_valid[i];
        rd_out[i]   <= deq_out[i];
        if (deq_valid[i]) begin
          rd_data[i]                         <= mem[head[i*N+int'(deq_out[i])]];
          free_vec[head[i*N+int'(deq_out[i])]] <= 1'b1;
        end
        if (wr_accept[i]) free_vec[slot[i]] <= 1'b0;
      end
      for (int q = 0; q < NQ; q++) begin
        count[q] <= count[q] + CW'(enq[q]) - CW'(deq[q]);
        if (enq[q]) tail[q] <= slot[q/N];
        if (enq[q] && (count[q] == '0 || (deq[q] && count[q] == CW'(1))))
          head[q] <= slot[q/N];
        else if (deq[q])
          head[q] <= nxt[head[q]];
      end
    end
  end

  // The scheduler may only dequeue from a queue that holds a packet.
  for (genvar i = 0; i < N; i++) begin : g_chk
    a_deq_nonempty: assert property (@(posedge clk) disable iff (!rst_n)
      deq_valid[i] |-> count[i*N+int'(deq_out[i])] != '0);
  end
  a_free_consistent: assert property (@(posedge clk) disable iff (!rst_n)
    free_count <= CW'(DEPTH));

endmodule
