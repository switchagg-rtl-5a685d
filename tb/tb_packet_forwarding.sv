// tb_packet_forwarding: three sources (normal, aggregation, ack) send packets
// to random ports; the four output queues drain with random back-pressure.
// Checks that every packet leaves whole, on its port, in the order its source
// sent it, and that packets on one port are never interleaved.
module tb_packet_forwarding;
  import switchagg_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic [2:0] in_valid, in_ready;
  beat_t [2:0] in_beat;
  logic [2:0][1:0] in_port;
  logic [3:0] out_valid, out_ready;
  beat_t [3:0] out_beat;
  logic [3:0][47:0] out_full_count;
  int checks = 0, failures = 0;
  beat_t src_q [3][$];
  int    prt_q [3][$];
  beat_t exp_q [4][3][$];
  int cur_src [4];

  packet_forwarding #(.OQ_DEPTH(8)) dut (.*);

  initial begin
    for (int s = 0; s < 3; s++)
      for (int p = 0; p < 80; p++) begin
        int len, port;
        len = (s == 2) ? 1 : 1 + $urandom % 5; port = $urandom % 4;
        for (int j = 0; j < len; j++) begin
          beat_t b;
          b.data = {$urandom, $urandom, 32'(s), 32'(p * 16 + j)};
          b.sop = (j == 0); b.eop = (j == len - 1);
          src_q[s].push_back(b); prt_q[s].push_back(port); exp_q[port][s].push_back(b);
        end
      end
    cur_src = '{-1, -1, -1, -1};
    in_valid = '0; in_beat = '0; in_port = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    while (src_q[0].size() + src_q[1].size() + src_q[2].size() > 0) begin
      @(negedge clk);
      for (int s = 0; s < 3; s++) begin
        in_valid[s] = src_q[s].size() > 0 && ($urandom % 3 != 0);
        if (src_q[s].size() > 0) begin in_beat[s] = src_q[s][0]; in_port[s] = 2'(prt_q[s][0]); end
      end
      @(posedge clk);
      for (int s = 0; s < 3; s++) if (in_valid[s] && in_ready[s]) begin
        void'(src_q[s].pop_front()); void'(prt_q[s].pop_front());
      end
    end
    @(negedge clk); in_valid = '0;
    repeat (200) @(posedge clk);
    for (int p = 0; p < 4; p++) for (int s = 0; s < 3; s++) begin
      checks++;
      if (exp_q[p][s].size() != 0) begin failures++; $display("port %0d source %0d: %0d beats missing", p, s, exp_q[p][s].size()); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(negedge clk) out_ready = 4'($urandom) | 4'($urandom);

  always @(posedge clk) if (rst_n) begin
    for (int p = 0; p < 4; p++) if (out_valid[p] && out_ready[p]) begin
      int s;
      s = int'(out_beat[p].data[63:32]);
      checks++;
      if (s > 2 || (cur_src[p] != -1 && cur_src[p] != s)) begin failures++; $display("interleaved on port %0d", p); end
      else if (exp_q[p][s].size() == 0 || out_beat[p] !== exp_q[p][s][0]) begin
        failures++; if (failures < 5) $display("wrong beat on port %0d", p);
      end else void'(exp_q[p][s].pop_front());
      cur_src[p] = out_beat[p].eop ? -1 : s;
    end
  end

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
