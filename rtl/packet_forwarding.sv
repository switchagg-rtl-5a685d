// packet_forwarding: the output side of the switch.
//
// Three kinds of packets leave the switch: normal packets with the port chosen
// by the routing table, aggregation packets with the port of the tree's parent,
// and Ack packets from the configuration module with the port the Configure
// packet came from. A packet-level round-robin merge (stream_mux) picks one
// source at a time and the packet's beats are written into the output queue
// (a FIFO of OQ_DEPTH beats) of its port. Each port drains its queue
// independently. A source waits while its target queue is full.
//
// Interface: three beat streams with their ports in, one beat stream per port
// out, all valid/ready. One beat per cycle enters the queues. The paper gives
// the per-type forwarding rule and the output queues; the merge order and
// queue depth are this design's choices.
module packet_forwarding
  import switchagg_pkg::*;
#(
  parameter int unsigned OQ_DEPTH = 64
) (
  input  logic                            clk,
  input  logic                            rst_n,
  input  logic [2:0]                      in_valid,   // 0 normal, 1 aggregation, 2 ack
  output logic [2:0]                      in_ready,
  input  beat_t [2:0]                     in_beat,
  input  logic [2:0][PORT_W-1:0]          in_port,
  output logic [N_PORTS-1:0]              out_valid,
  input  logic [N_PORTS-1:0]              out_ready,
  output beat_t [N_PORTS-1:0]             out_beat,
  output logic [N_PORTS-1:0][47:0]        out_full_count
);
  logic        m_valid, m_ready;
  beat_t       m_beat;
  logic [1:0]  m_src;
  logic [PORT_W-1:0] m_port;
  logic [N_PORTS-1:0] q_ready;

  stream_mux #(.N(3)) u_mux (
    .clk, .rst_n, .in_valid, .in_ready, .in_beat,
    .out_valid(m_valid), .out_ready(m_ready), .out_beat(m_beat), .out_src(m_src));

  assign m_port  = in_port[m_src];
  assign m_ready = q_ready[m_port];

  for (genvar p = 0; p < int'(N_PORTS); p++) begin : g_oq
    logic [$clog2(OQ_DEPTH):0] lvl;
    logic [47:0]               wrc;
    sync_fifo #(.T(beat_t), .DEPTH(OQ_DEPTH)) u_q (
      .clk, .rst_n,
      .in_valid(m_valid && m_port == PORT_W'(p)), .in_ready(q_ready[p]), .in_data(m_beat),
      .out_valid(out_valid[p]), .out_ready(out_ready[p]), .out_data(out_beat[p]),
      .level(lvl), .wr_count(wrc), .full_count(out_full_count[p]));
  end
endmodule
