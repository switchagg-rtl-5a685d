// pe_scheduler: decides which front-end engine may hand its evicted pair to
// the single back-end engine.
//
// N engines offer pairs (valid/ready); a round-robin arbiter grants one per
// cycle into an output register, starting the search after the last winner,
// so every engine is served within N grants. busy is high while a pair is
// held in the output register. Latency one cycle. The paper places a
// scheduler between the engines; round-robin is this design's choice.
module pe_scheduler
  import switchagg_pkg::*;
#(
  parameter int unsigned N = N_GROUPS
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic [N-1:0]  in_valid,
  output logic [N-1:0]  in_ready,
  input  kv_t  [N-1:0]  in_kv,
  output logic          out_valid,
  input  logic          out_ready,
  output kv_t           out_kv,
  output logic          busy
);
  localparam int unsigned IW = $clog2(N);
  logic [IW-1:0] rr;
  logic          g_v;
  logic [IW-1:0] g_i;

  always_comb begin
    int i;
    i = 0;
    g_v = 1'b0;
    g_i = '0;
    in_ready = '0;
    if (!out_valid || out_ready) begin
      for (int k = 0; k < int'(N); k++) begin
        i = (int'(rr) + k) % int'(N);
        if (!g_v && in_valid[i]) begin
          g_v = 1'b1;
          g_i = IW'(i);
        end
      end
      if (g_v) in_ready[g_i] = 1'b1;
    end
  end

  assign busy = out_valid;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_kv    <= '0;
      rr        <= '0;
    end else if (!out_valid || out_ready) begin
      out_valid <= g_v;
      if (g_v) begin
        out_kv <= in_kv[g_i];
        rr     <= IW'((int'(g_i) + 1) % int'(N));
      end
    end
  end
endmodule
