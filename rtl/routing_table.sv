// routing_table: one match-action stage of the normal processing pipeline.
//
// Normal packets (and Launch/Ack packets, which the switch routes statically)
// are looked up by destination MAC address in an exact-match table of ENTRIES
// entries. A hit attaches the entry's output port to the packet; a miss drops
// the packet and counts it. The controller fills the table through the write
// port (entry index, valid, MAC, port).
//
// Timing: the lookup is made on the start-of-packet beat; beats leave through
// one output register, one per cycle. The paper draws a chain of match-action
// stages and says routing works as in a traditional switch; this design builds
// a single exact-match stage, and the table size and miss policy are its own.
module routing_table
  import switchagg_pkg::*;
#(
  parameter int unsigned ENTRIES = 16
) (
  input  logic                       clk,
  input  logic                       rst_n,
  // table programming
  input  logic                       wr_en,
  input  logic [$clog2(ENTRIES)-1:0] wr_idx,
  input  logic                       wr_valid,
  input  logic [47:0]                wr_mac,
  input  logic [PORT_W-1:0]          wr_port,
  // packets in
  input  logic                       in_valid,
  output logic                       in_ready,
  input  beat_t                      in_beat,
  // packets out with their port
  output logic                       out_valid,
  input  logic                       out_ready,
  output beat_t                      out_beat,
  output logic [PORT_W-1:0]          out_port,
  output logic [31:0]                miss_count
);
  logic [ENTRIES-1:0]      ent_valid;
  logic [47:0]             ent_mac  [ENTRIES];
  logic [PORT_W-1:0]       ent_port [ENTRIES];

  logic              hit;
  logic [PORT_W-1:0] hit_port;
  logic              drop_q;      // dropping the current packet
  logic [PORT_W-1:0] port_q;

  always_comb begin
    hit      = 1'b0;
    hit_port = '0;
    for (int i = 0; i < int'(ENTRIES); i++) begin
      if (ent_valid[i] && ent_mac[i] == in_beat.data[47:0]) begin
        hit      = 1'b1;
        hit_port = ent_port[i];
      end
    end
  end

  assign in_ready = !out_valid || out_ready;

  wire drop_now = in_beat.sop ? !hit : drop_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ent_valid  <= '0;
      out_valid  <= 1'b0;
      out_beat   <= '0;
      out_port   <= '0;
      drop_q     <= 1'b0;
      port_q     <= '0;
      miss_count <= '0;
    end else begin
      if (wr_en) begin
        ent_valid[wr_idx] <= wr_valid;
      end
      if (in_ready) begin
        out_valid <= in_valid && !drop_now;
        if (in_valid) begin
          out_beat <= in_beat;
          out_port <= in_beat.sop ? hit_port : port_q;
          if (in_beat.sop) begin
            drop_q <= !hit;
            port_q <= hit_port;
            if (!hit) miss_count <= miss_count + 1'b1;
          end
        end
      end
    end
  end

  always_ff @(posedge clk) begin
    if (wr_en) begin
      ent_mac[wr_idx]  <= wr_mac;
      ent_port[wr_idx] <= wr_port;
    end
  end
endmodule
