// tb_crossbar: four inputs send numbered pairs to random groups with random
// gaps; the eight outputs apply random back-pressure. Checks that every pair
// reaches the output of its group, that the pairs of one input keep their
// order at each output, that no pair is lost or duplicated, and that pairs
// for different outputs cross in the same cycle.
module tb_crossbar;
  import switchagg_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic [3:0] in_valid, in_ready;
  kv_t [3:0] in_kv;
  logic [3:0][2:0] in_dest;
  logic [7:0] out_valid, out_ready;
  kv_t [7:0] out_kv;
  logic busy;
  int checks = 0, failures = 0;
  kv_t src_q [4][$];
  int  dst_q [4][$];
  kv_t exp_q [8][4][$];
  int max_par = 0, total = 0;

  crossbar #(.NI(4), .NO(8)) dut (.*);

  initial begin
    for (int i = 0; i < 4; i++)
      for (int n = 0; n < 400; n++) begin
        kv_t k; int d;
        k = '0; k.value = 32'(i * 100000 + n); k.tree = 2'(i); k.klen = 7'(1 + $urandom % 64);
        d = $urandom % 8;
        src_q[i].push_back(k); dst_q[i].push_back(d); exp_q[d][i].push_back(k);
      end
    in_valid = '0; in_kv = '0; in_dest = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    while (src_q[0].size() + src_q[1].size() + src_q[2].size() + src_q[3].size() > 0) begin
      @(negedge clk);
      for (int i = 0; i < 4; i++) begin
        in_valid[i] = src_q[i].size() > 0 && ($urandom % 5 != 0);
        if (src_q[i].size() > 0) begin in_kv[i] = src_q[i][0]; in_dest[i] = 3'(dst_q[i][0]); end
      end
      @(posedge clk);
      for (int i = 0; i < 4; i++)
        if (in_valid[i] && in_ready[i]) begin void'(src_q[i].pop_front()); void'(dst_q[i].pop_front()); end
    end
    @(negedge clk); in_valid = '0;
    repeat (100) @(posedge clk);
    for (int o = 0; o < 8; o++) for (int i = 0; i < 4; i++) begin
      checks++;
      if (exp_q[o][i].size() != 0) begin failures++; $display("output %0d input %0d: %0d missing", o, i, exp_q[o][i].size()); end
    end
    checks++; if (total != 1600) begin failures++; $display("total %0d", total); end
    checks++; if (max_par < 3) begin failures++; $display("no parallel crossing"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(negedge clk) out_ready = 8'($urandom) | 8'($urandom);

  always @(posedge clk) if (rst_n) begin
    int par;
    par = 0;
    for (int o = 0; o < 8; o++) if (out_valid[o] && out_ready[o]) begin
      int i;
      i = int'(out_kv[o].tree);
      par++; total++;
      checks++;
      if (exp_q[o][i].size() == 0 || out_kv[o] !== exp_q[o][i][0]) begin
        failures++;
        if (failures < 5) $display("bad pair at output %0d value %0d", o, out_kv[o].value);
      end else void'(exp_q[o][i].pop_front());
    end
    if (par > max_par) max_par = par;
  end

  initial begin
    repeat (30000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
