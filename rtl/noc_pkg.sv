// noc_pkg: constants and types shared by the common-buffer routing node.
//
// The router is a 4x4 node of a 2-D mesh network on chip. Four input ports
// share one packet array of 128 entries, organised as virtual output queues
// (one queue per input/output pair). Packets are 8 bits wide, as on the
// ports of the node's simulation waveform. The latency budget of a packet
// through an idle node is 2 clock cycles to store it, 4 to reach a
// scheduling decision and 4 to travel to the output: 10 cycles in all.
// Port count, packet width, buffer depth and the three latency terms follow
// the paper; the multicast destination mask and the valid/ready handshake
// are this design's own choices.
package noc_pkg;

  // Router geometry.
  parameter int unsigned N_PORTS   = 4;    // 4x4 routing node
  parameter int unsigned DATA_W    = 8;    // packet (flit) width in bits
  parameter int unsigned BUF_DEPTH = 128;  // common packet array, in packets

  // Latency budget of an idle node, in clock cycles.
  parameter int unsigned STORE_CYCLES  = 2;  // two storage phases
  parameter int unsigned SCHED_CYCLES  = 4;  // two iSLIP iterations, grant + accept each
  parameter int unsigned TRAVEL_CYCLES = 4;  // buffer read, crossbar, two link stages
  parameter int unsigned MIN_LATENCY   = STORE_CYCLES + SCHED_CYCLES + TRAVEL_CYCLES;

  // Destination mask of a packet: bit o set means "deliver a copy to output o".
  typedef logic [N_PORTS-1:0] port_mask_t;

endpackage
