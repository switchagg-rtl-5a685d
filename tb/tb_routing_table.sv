// tb_routing_table: installs routes, sends packets to known and unknown
// destination MACs and checks that known ones leave whole with the installed
// port, unknown ones are dropped and counted, and a removed route stops
// matching.
module tb_routing_table;
  import switchagg_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic wr_en, wr_valid;
  logic [3:0] wr_idx;
  logic [47:0] wr_mac;
  logic [1:0] wr_port;
  logic in_valid, in_ready, out_valid, out_ready;
  beat_t in_beat, out_beat;
  logic [1:0] out_port;
  logic [31:0] miss_count;
  int checks = 0, failures = 0;
  logic [47:0] macs [16];
  logic [1:0]  ports [16];
  typedef struct { beat_t b; logic [1:0] port; } exp_t;
  exp_t exp_q[$];
  int misses = 0;

  routing_table #(.ENTRIES(16)) dut (.*);

  task automatic send_pkt(input logic [47:0] dst, input int len, input int hit_i);
    for (int j = 0; j < len; j++) begin
      beat_t b;
      b.data = {$urandom, $urandom, $urandom, $urandom};
      if (j == 0) b.data[47:0] = dst;
      b.sop = (j == 0); b.eop = (j == len - 1);
      if (hit_i >= 0) exp_q.push_back('{b, ports[hit_i]});
      @(negedge clk);
      in_valid = 1; in_beat = b;
      @(posedge clk);
      while (!in_ready) @(posedge clk);
      @(negedge clk); in_valid = 0;
    end
  endtask

  initial begin
    wr_en = 0; wr_valid = 0; wr_idx = 0; wr_mac = 0; wr_port = 0;
    in_valid = 0; in_beat = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < 16; i++) begin
      macs[i] = {16'h0200, 32'(i * 977 + 5)}; ports[i] = 2'($urandom);
      @(negedge clk); wr_en = 1; wr_idx = 4'(i); wr_valid = 1; wr_mac = macs[i]; wr_port = ports[i];
    end
    @(negedge clk); wr_en = 0;
    for (int p = 0; p < 150; p++) begin
      int k;
      k = $urandom % 20;
      if (k < 16) send_pkt(macs[k], 1 + $urandom % 3, k);
      else begin send_pkt(48'hFFFF_0000_0000 + 48'(p), 1 + $urandom % 3, -1); misses++; end
    end
    // remove route 3
    @(negedge clk); wr_en = 1; wr_idx = 3; wr_valid = 0;
    @(negedge clk); wr_en = 0;
    send_pkt(macs[3], 2, -1); misses++;
    repeat (20) @(posedge clk);
    checks++; if (exp_q.size() != 0) begin failures++; $display("%0d beats missing", exp_q.size()); end
    checks++; if (miss_count != 32'(misses)) begin failures++; $display("miss_count %0d exp %0d", miss_count, misses); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(negedge clk) out_ready = $urandom % 4 != 0;

  always @(posedge clk) if (rst_n && out_valid && out_ready) begin
    checks++;
    if (exp_q.size() == 0 || out_beat !== exp_q[0].b || out_port !== exp_q[0].port) begin
      failures++;
      if (failures < 5) $display("unexpected beat or port");
    end
    if (exp_q.size() > 0) void'(exp_q.pop_front());
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
