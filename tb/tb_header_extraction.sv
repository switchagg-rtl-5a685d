// tb_header_extraction: sends packets of every type with random gaps and
// random back-pressure on the three outputs; checks that every packet comes
// out, whole and in order, on the output its type byte selects.
module tb_header_extraction;
  import switchagg_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic in_valid, in_ready, agg_valid, agg_ready, cfg_valid, cfg_ready, norm_valid, norm_ready;
  beat_t in_beat, out_beat;
  int checks = 0, failures = 0;
  beat_t exp_q [3][$];
  beat_t src[$];

  header_extraction dut (.*);

  initial begin
    in_valid = 0; in_beat = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int p = 0; p < 200; p++) begin
      int len, dst;
      logic [7:0] pt;
      pt  = 8'($urandom % 7);
      len = 1 + $urandom % 5;
      dst = (pt == PT_AGG) ? 0 : (pt == PT_CONFIGURE) ? 1 : 2;
      for (int j = 0; j < len; j++) begin
        beat_t b;
        b.data = {$urandom, $urandom, $urandom, $urandom};
        if (j == 0) b.data[14*8 +: 8] = pt;
        b.sop = (j == 0); b.eop = (j == len - 1);
        src.push_back(b);
        exp_q[dst].push_back(b);
      end
    end
    while (src.size() > 0) begin
      @(negedge clk);
      in_valid = ($urandom % 4) != 0;
      in_beat  = src[0];
      @(posedge clk);
      if (in_valid && in_ready) void'(src.pop_front());
    end
    @(negedge clk); in_valid = 0;
    repeat (50) @(posedge clk);
    for (int d = 0; d < 3; d++) begin
      checks++;
      if (exp_q[d].size() != 0) begin failures++; $display("output %0d missing %0d beats", d, exp_q[d].size()); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(negedge clk) begin
    agg_ready  = $urandom % 3 != 0;
    cfg_ready  = $urandom % 3 != 0;
    norm_ready = $urandom % 3 != 0;
  end

  always @(posedge clk) if (rst_n) begin
    logic [2:0] v;
    v = {norm_valid, cfg_valid, agg_valid};
    if ($countones(v) > 1) begin checks++; failures++; end
    for (int d = 0; d < 3; d++) begin
      if (v[d] && (d == 0 ? agg_ready : d == 1 ? cfg_ready : norm_ready)) begin
        checks++;
        if (exp_q[d].size() == 0 || out_beat !== exp_q[d][0]) begin
          failures++;
          if (failures < 5) $display("wrong beat on output %0d", d);
        end
        if (exp_q[d].size() > 0) void'(exp_q[d].pop_front());
      end
    end
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
