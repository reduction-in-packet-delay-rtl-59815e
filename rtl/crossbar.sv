// crossbar: N x N crossbar switch of the routing node with its output links.
//
// Each input carries at most one packet per cycle, tagged with the output it
// goes to (in_out). For every output the crossbar selects the input whose
// packet is addressed to it and registers it; STAGES-1 further registers
// model the link to the adjacent node. The scheduler guarantees that no two
// inputs address the same output in one cycle (checked by an assertion).
// With the buffer read register in front of it, the default of 3 stages
// gives the 4 clock cycles the paper allows a packet to travel from the
// packet array to its destination.
//
// Interface: in_valid/in_data/in_out per input; out_valid/out_data per
// output, STAGES cycles later. There is no backpressure: an output link
// always takes what it is sent (the paper describes no output flow control).
// Which cycles of the 4-cycle travel are crossbar and which are link is this
// design's own split.
module crossbar
  import noc_pkg::*;
#(
  parameter int unsigned N      = N_PORTS,
  parameter int unsigned DW     = DATA_W,
  parameter int unsigned STAGES = TRAVEL_CYCLES - 1,
  localparam int unsigned PW    = $clog2(N)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          in_valid  [N],
  input  logic [DW-1:0] in_data   [N],
  input  logic [PW-1:0] in_out    [N],
  output logic          out_valid [N],
  output logic [DW-1:0] out_data  [N]
);

  logic          sel_valid [N];
  logic [DW-1:0] sel_data  [N];
  logic          pipe_valid [STAGES][N];
  logic [DW-1:0] pipe_data  [STAGES][N];

  always_comb
    for (int o = 0; o < N; o++) begin
      sel_valid[o] = 1'b0;
      sel_data[o]  = '0;
      for (int i = 0; i < N; i++)
        if (in_valid[i] && int'(in_out[i]) == o) begin
          sel_valid[o] = 1'b1;
          sel_data[o]  = in_data[i];
        end
    end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int s = 0; s < STAGES; s++)
        for (int o = 0; o < N; o++) begin
          pipe_valid[s][o] <= 1'b0;
          pipe_data[s][o]  <= '0;
        end
    end else begin
      for (int o = 0; o < N; o++) begin
        pipe_valid[0][o] <= sel_valid[o];
        pipe_data[0][o]  <= sel_data[o];
      end
      for (int s = 1; s < STAGES; s++)
        for (int o = 0; o < N; o++) begin
          pipe_valid[s][o] <= pipe_valid[s-1][o];
          pipe_data[s][o]  <= pipe_data[s-1][o];
        end
    end
  end

  always_comb
    for (int o = 0; o < N; o++) begin
      out_valid[o] = pipe_valid[STAGES-1][o];
      out_data[o]  = pipe_data[STAGES-1][o];
    end

  // No two inputs may address the same output in one cycle.
  for (genvar o = 0; o < N; o++) begin : g_chk
    logic [N-1:0] hits;
    always_comb for (int i = 0; i < N; i++) hits[i] = in_valid[i] && int'(in_out[i]) == o;
    a_no_conflict: assert property (@(posedge clk) disable iff (!rst_n) $onehot0(hits));
  end

endmodule
