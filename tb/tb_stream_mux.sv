// tb_stream_mux: four sources send multi-beat packets with random gaps; the
// sink applies random back-pressure. Checks that packets are never
// interleaved, that each source's packets arrive whole and in order with the
// right source index, and that every source gets served.
module tb_stream_mux;
  import switchagg_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic [3:0] in_valid, in_ready;
  beat_t [3:0] in_beat;
  logic out_valid, out_ready;
  beat_t out_beat;
  logic [1:0] out_src;
  int checks = 0, failures = 0;
  beat_t src_q [4][$];
  beat_t exp_q [4][$];
  int cur_src = -1;

  stream_mux #(.N(4)) dut (.*);

  initial begin
    for (int s = 0; s < 4; s++)
      for (int p = 0; p < 60; p++) begin
        int len;
        len = 1 + $urandom % 4;
        for (int j = 0; j < len; j++) begin
          beat_t b;
          b.data = {$urandom, $urandom, 32'(s), 32'(p * 16 + j)};
          b.sop = (j == 0); b.eop = (j == len - 1);
          src_q[s].push_back(b); exp_q[s].push_back(b);
        end
      end
    in_valid = '0; in_beat = '0; out_ready = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    while (src_q[0].size() + src_q[1].size() + src_q[2].size() + src_q[3].size() > 0) begin
      @(negedge clk);
      out_ready = $urandom % 4 != 0;
      for (int s = 0; s < 4; s++) begin
        in_valid[s] = src_q[s].size() > 0 && ($urandom % 3 != 0);
        if (src_q[s].size() > 0) in_beat[s] = src_q[s][0];
      end
      @(posedge clk);
      for (int s = 0; s < 4; s++) if (in_valid[s] && in_ready[s]) void'(src_q[s].pop_front());
    end
    @(negedge clk); in_valid = '0; out_ready = 1;
    repeat (20) @(posedge clk);
    for (int s = 0; s < 4; s++) begin
      checks++;
      if (exp_q[s].size() != 0) begin failures++; $display("source %0d: %0d beats missing", s, exp_q[s].size()); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (rst_n && out_valid && out_ready) begin
    int s;
    s = int'(out_src);
    checks++;
    if (cur_src != -1 && cur_src != s) begin failures++; $display("interleaved packets"); end
    if (exp_q[s].size() == 0 || out_beat !== exp_q[s][0]) begin
      failures++;
      if (failures < 5) $display("wrong beat from source %0d", s);
    end else void'(exp_q[s].pop_front());
    cur_src = out_beat.eop ? -1 : s;
  end

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
