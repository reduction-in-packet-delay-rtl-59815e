// router_node: 4x4 routing node of a mesh network on chip with one packet
// buffer common to all input ports.
//
// Instead of giving each input port its own packet array, the four input
// modules (InM0..InM3) share one array of 128 packets, kept as sixteen
// virtual output queues whose lengths follow the traffic. A centralised
// iSLIP scheduler matches inputs to outputs and the crossbar delivers the
// matched packets. Through an idle node a packet takes 10 clock cycles from
// the edge at which its input accepts it to the edge at which it is seen on
// its output:
//   2 cycles  storage: input holding register, then array write + link
//   4 cycles  scheduling: two iSLIP iterations of grant and accept
//   4 cycles  travel: buffer read, crossbar, two link stages
// The node starts a new matching every cycle, so each output can carry a
// packet every cycle when its queues are deep enough.
//
// Interface: in_valid/in_data/in_ready per input port, valid/ready
// handshake. address holds the destination mask of every input:
// address[N*i +: N] for input i, bit o set to send a copy to output o (the
// 16-bit address bus of the node's waveform; one mask per input and input 0
// in the low bits are this design's reading of it). out_valid/out_data per
// output; outputs have no backpressure. free_slots is the number of empty
// packet slots in the common array. The scheduler's iter2_add status is
// wired to a local net only, for tests that probe it; it drives nothing.
// Port names, widths, the 4x4 size, the 128-packet array and the 2+4+4
// cycle budget follow the paper; everything else is this design's own.
module router_node
  import noc_pkg::*;
#(
  parameter int unsigned N     = N_PORTS,
  parameter int unsigned DW    = DATA_W,
  parameter int unsigned DEPTH = BUF_DEPTH,
  localparam int unsigned PW   = $clog2(N),
  localparam int unsigned CW   = $clog2(DEPTH + 1)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          in_valid  [N],
  input  logic [DW-1:0] in_data   [N],
  input  logic [N*N-1:0] address,
  output logic          in_ready  [N],
  output logic          out_valid [N],
  output logic [DW-1:0] out_data  [N],
  output logic [CW-1:0] free_slots
);

  logic          wr_valid  [N];
  logic [DW-1:0] wr_data   [N];
  logic [PW-1:0] wr_out    [N];
  logic          wr_accept [N];
  logic [CW-1:0] voq_count [N][N];
  logic          deq_valid [N];
  logic [PW-1:0] deq_out   [N];
  logic          rd_valid  [N];
  logic [DW-1:0] rd_data   [N];
  logic [PW-1:0] rd_out    [N];
  logic [N-1:0]  iter2_add;

  for (genvar i = 0; i < N; i++) begin : g_inm
    input_module #(.N(N), .DW(DW)) u_inm (
      .clk, .rst_n,
      .in_valid  (in_valid[i]),
      .in_data   (in_data[i]),
      .in_dest   (address[N*i +: N]),
      .in_ready  (in_ready[i]),
      .wr_valid  (wr_valid[i]),
      .wr_data   (wr_data[i]),
      .wr_out    (wr_out[i]),
      .wr_accept (wr_accept[i])
    );
  end

  common_buffer #(.N(N), .DW(DW), .DEPTH(DEPTH)) u_buf (
    .clk, .rst_n,
    .wr_valid, .wr_data, .wr_out, .wr_accept,
    .voq_count,
    .free_count (free_slots),
    .deq_valid, .deq_out,
    .rd_valid, .rd_data, .rd_out
  );

  islip_scheduler #(.N(N), .CW(CW)) u_sched (
    .clk, .rst_n,
    .voq_count,
    .deq_valid, .deq_out,
    .iter2_add
  );

  crossbar #(.N(N), .DW(DW), .STAGES(TRAVEL_CYCLES - 1)) u_xbar (
    .clk, .rst_n,
    .in_valid  (rd_valid),
    .in_data   (rd_data),
    .in_out    (rd_out),
    .out_valid,
    .out_data
  );

endmodule
