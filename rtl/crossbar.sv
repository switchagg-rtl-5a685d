// crossbar: connects the payload analyzers of all ports to the front-end
// processing engines, one engine per key-length group.
//
// Every input offers one pair together with the number of its group. Each
// output (group) has a round-robin arbiter over the inputs that want it and an
// output register; an input is told ready when its request is granted. Up to
// one pair per output per cycle crosses, so pairs of different groups from
// different ports pass in parallel. Pairs of one input keep their order.
// Latency one cycle (input to output register). The paper specifies the
// crossbar's job; the arbiter and register are this design's choice.
module crossbar
  import switchagg_pkg::*;
#(
  parameter int unsigned NI = N_PORTS,
  parameter int unsigned NO = N_GROUPS
) (
  input  logic                               clk,
  input  logic                               rst_n,
  input  logic [NI-1:0]                      in_valid,
  output logic [NI-1:0]                      in_ready,
  input  kv_t  [NI-1:0]                      in_kv,
  input  logic [NI-1:0][$clog2(NO)-1:0]      in_dest,
  output logic [NO-1:0]                      out_valid,
  input  logic [NO-1:0]                      out_ready,
  output kv_t  [NO-1:0]                      out_kv,
  output logic                               busy
);
  localparam int unsigned IW = (NI > 1) ? $clog2(NI) : 1;

  logic [NO-1:0][IW-1:0] rr;
  logic [NO-1:0]         gnt_v;
  logic [NO-1:0][IW-1:0] gnt_i;

  always_comb begin
    int i;
    i        = 0;
    in_ready = '0;
    gnt_v    = '0;
    gnt_i    = '0;
    for (int o = 0; o < int'(NO); o++) begin
      if (!out_valid[o] || out_ready[o]) begin
        for (int k = 0; k < int'(NI); k++) begin
          i = (int'(rr[o]) + k) % int'(NI);
          if (!gnt_v[o] && in_valid[i] && in_dest[i] == ($clog2(NO))'(o)) begin
            gnt_v[o] = 1'b1;
            gnt_i[o] = IW'(i);
            in_ready[i] = 1'b1;
          end
        end
      end
    end
  end

  assign busy = |out_valid;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= '0;
      out_kv    <= '0;
      rr        <= '0;
    end else begin
      for (int o = 0; o < int'(NO); o++) begin
        if (!out_valid[o] || out_ready[o]) begin
          out_valid[o] <= gnt_v[o];
          if (gnt_v[o]) begin
            out_kv[o] <= in_kv[gnt_i[o]];
            rr[o]     <= IW'((int'(gnt_i[o]) + 1) % int'(NI));
          end
        end
      end
    end
  end
endmodule
