// header_extraction: first stage behind each input port.
//
// Looks at the packet-type byte (byte 14 of beat 0) of every packet and steers
// the whole packet to one of three consumers: aggregation packets to the
// payload analyzer, Configure packets to the configuration module, and all
// other packets (normal traffic, Launch and Ack, which the switch routes like
// normal traffic) to the normal forwarding pipeline. The decision made on the
// start-of-packet beat is kept until the end-of-packet beat.
//
// Interface: one valid/ready beat stream in, three valid/ready beat streams
// out. One output register, so a beat appears one cycle after it is accepted
// and the stage sustains one beat per cycle. The three-way split follows the
// paper; the type byte position and the single register stage are this
// design's choice.
module header_extraction
  import switchagg_pkg::*;
(
  input  logic  clk,
  input  logic  rst_n,
  input  logic  in_valid,
  output logic  in_ready,
  input  beat_t in_beat,
  output logic  agg_valid,
  input  logic  agg_ready,
  output logic  cfg_valid,
  input  logic  cfg_ready,
  output logic  norm_valid,
  input  logic  norm_ready,
  output beat_t out_beat
);
  typedef enum logic [1:0] {D_NORM, D_AGG, D_CFG} dest_e;

  dest_e cur_dest, held_dest, beat_dest;
  logic  out_valid;
  logic  sel_ready;

  always_comb begin
    if (in_beat.sop) begin
      unique case (pkt_type_e'(in_beat.data[14*8 +: 8]))
        PT_AGG:       beat_dest = D_AGG;
        PT_CONFIGURE: beat_dest = D_CFG;
        default:      beat_dest = D_NORM;
      endcase
    end else begin
      beat_dest = held_dest;
    end
  end

  always_comb begin
    unique case (cur_dest)
      D_AGG:   sel_ready = agg_ready;
      D_CFG:   sel_ready = cfg_ready;
      default: sel_ready = norm_ready;
    endcase
  end

  assign in_ready   = !out_valid || sel_ready;
  assign agg_valid  = out_valid && cur_dest == D_AGG;
  assign cfg_valid  = out_valid && cur_dest == D_CFG;
  assign norm_valid = out_valid && cur_dest == D_NORM;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      cur_dest  <= D_NORM;
      held_dest <= D_NORM;
      out_beat  <= '0;
    end else if (in_ready) begin
      out_valid <= in_valid;
      if (in_valid) begin
        out_beat  <= in_beat;
        cur_dest  <= beat_dest;
        held_dest <= beat_dest;
      end
    end
  end
endmodule
