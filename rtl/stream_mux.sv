// stream_mux: the "N to 1" merge in front of the configuration module and of
// the normal processing pipeline.
//
// N packet streams enter; one leaves. A round-robin arbiter picks an input at
// a packet boundary and keeps it until that packet's end-of-packet beat has
// passed, so packets are never interleaved. The index of the chosen input
// travels with each beat (src) so later stages know the ingress port.
// Combinational path from the chosen input to the output (no register); one
// beat per cycle. The paper only names the merge; the round-robin policy is
// this design's choice.
module stream_mux
  import switchagg_pkg::*;
#(
  parameter int unsigned N = N_PORTS
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic [N-1:0]         in_valid,
  output logic [N-1:0]         in_ready,
  input  beat_t [N-1:0]        in_beat,
  output logic                 out_valid,
  input  logic                 out_ready,
  output beat_t                out_beat,
  output logic [$clog2(N)-1:0] out_src
);
  localparam int unsigned SW = $clog2(N);

  logic          locked;
  logic [SW-1:0] owner, rr_next, pick;
  logic          found;

  // Round-robin search starting after the last owner.
  always_comb begin
    pick  = owner;
    found = 1'b0;
    for (int k = 1; k <= int'(N); k++) begin
      logic [SW-1:0] c;
      c = SW'((int'(rr_next) + k - 1) % int'(N));
      if (!found && in_valid[c]) begin
        pick  = c;
        found = 1'b1;
      end
    end
  end

  wire [SW-1:0] cur = locked ? owner : pick;

  always_comb begin
    in_ready       = '0;
    out_valid      = (locked || found) && in_valid[cur];
    out_beat       = in_beat[cur];
    out_src        = cur;
    in_ready[cur]  = out_ready && (locked || found);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      locked  <= 1'b0;
      owner   <= '0;
      rr_next <= '0;
    end else if (out_valid && out_ready) begin
      owner   <= cur;
      locked  <= !out_beat.eop;
      if (out_beat.eop) rr_next <= SW'((int'(cur) + 1) % int'(N));
    end
  end
endmodule
