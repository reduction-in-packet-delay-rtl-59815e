// input_module: one input port (InM) of the common-buffer routing node.
//
// A packet arriving from the adjacent node (or the network interface) is
// captured in a holding register: this is the first of the two storage
// phases. While the register is full the module offers one copy of the
// packet per cycle to the common packet array (the second phase), one copy
// for each output set in the packet's destination mask, lowest output first.
// It accepts the next packet in the cycle in which the last copy is taken,
// so a unicast stream runs at one packet per cycle when the array has room.
//
// Interface: in_valid/in_ready is a valid/ready handshake (transfer when both
// are high at a rising clock edge). in_dest is a destination mask, bit o for
// output o; a packet with an empty mask is accepted and dropped. On the
// array side wr_valid/wr_data/wr_out present one copy addressed to output
// wr_out; wr_accept high means the array stores it at this edge.
// Timing: in_ready depends combinationally on wr_accept; wr_* are registered.
//
// The paper names the input modules and the two storage phases; the holding
// register, the handshake and the multicast mask are this design's own.
module input_module
  import noc_pkg::*;
#(
  parameter int unsigned N  = N_PORTS,
  parameter int unsigned DW = DATA_W
) (
  input  logic                 clk,
  input  logic                 rst_n,
  // from the link
  input  logic                 in_valid,
  input  logic [DW-1:0]        in_data,
  input  logic [N-1:0]         in_dest,
  output logic                 in_ready,
  // to the common packet array
  output logic                 wr_valid,
  output logic [DW-1:0]        wr_data,
  output logic [$clog2(N)-1:0] wr_out,
  input  logic                 wr_accept
);

  logic          hold_valid;
  logic [DW-1:0] hold_data;
  logic [N-1:0]  hold_mask;
  logic [N-1:0]  low_bit;     // one-hot lowest set bit of hold_mask
  logic          last_copy;

  always_comb begin
    low_bit = hold_mask & (~hold_mask + N'(1));
    wr_out  = '0;
    for (int o = N - 1; o >= 0; o--)
      if (hold_mask[o]) wr_out = o[$clog2(N)-1:0];
  end

  assign last_copy = (hold_mask & ~low_bit) == '0;
  assign wr_valid  = hold_valid;
  assign wr_data   = hold_data;
  assign in_ready  = !hold_valid || (wr_accept && last_copy);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      hold_valid <= 1'b0;
      hold_data  <= '0;
      hold_mask  <= '0;
    end else if (in_valid && in_ready) begin
      hold_valid <= in_dest != '0;
      hold_data  <= in_data;
      hold_mask  <= in_dest;
    end else if (hold_valid && wr_accept) begin
      hold_mask <= hold_mask & ~low_bit;
      if (last_copy) hold_valid <= 1'b0;
    end
  end

  // A copy is only stored while one is offered.
  a_accept_needs_valid: assert property (@(posedge clk) disable iff (!rst_n)
    wr_accept |-> wr_valid);
  a_mask_nonempty: assert property (@(posedge clk) disable iff (!rst_n)
    hold_valid |-> hold_mask != '0);

endmodule
