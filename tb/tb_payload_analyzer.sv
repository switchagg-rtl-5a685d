// tb_payload_analyzer: builds aggregation packets of random pairs (key
// lengths 1..64, pairs straddling beats), with random gaps and back-pressure,
// and checks every pair that comes out (key, length, value, operation, tree,
// group = ceil(len/8)-1) against the list it was built from, the EoT reports,
// and the error count for a malformed pair. A second phase with keys of
// 16..64 bytes and no back-pressure checks that a beat is taken every cycle.
module tb_payload_analyzer;
  import switchagg_pkg::*;
  import tb_util_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic in_valid, in_ready, out_valid, out_ready, eot_valid;
  beat_t in_beat;
  kv_t out_kv;
  logic [2:0] out_group;
  logic [1:0] eot_tree;
  logic [31:0] err_count;
  int checks = 0, failures = 0;
  beat_t src[$];
  kv_t exp_kv[$];
  int exp_eot[$];
  bit random_ready = 1;

  payload_analyzer dut (.*);

  task automatic chk(bit c, string m);
    checks++;
    if (!c) begin failures++; if (failures < 10) $display("FAIL %s", m); end
  endtask

  task automatic build(input int npkts, input int kmin);
    for (int p = 0; p < npkts; p++) begin
      bq_t q; pair_t ps[$];
      int n, tree, op; bit e;
      n = $urandom % 40; tree = $urandom % 4; op = $urandom % 3; e = ($urandom % 3) == 0;
      for (int i = 0; i < n; i++) begin
        pair_t pr; kv_t k;
        pr.klen = kmin + $urandom % (65 - kmin);
        pr.key  = make_key($urandom, pr.klen);
        pr.val  = $urandom;
        ps.push_back(pr);
        k.key = pr.key; k.klen = 7'(pr.klen); k.value = pr.val; k.op = agg_op_e'(op); k.tree = 2'(tree);
        exp_kv.push_back(k);
      end
      if (e) exp_eot.push_back(tree);
      agg_packet(q, tree, e, op, ps);
      // some packets carry padding after the last pair
      if (p % 5 == 0) for (int i = 0; i < 20; i++) q.push_back(8'hEE);
      to_beats(q, src);
    end
  endtask

  initial begin
    bq_t q; pair_t ps[$]; pair_t pr;
    int cyc, beats;
    in_valid = 0; in_beat = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    build(150, 1);
    // a malformed packet: value length 3 in the second pair
    pr.klen = 8; pr.key = make_key(1, 8); pr.val = 32'h11;
    ps.push_back(pr); ps.push_back(pr);
    agg_packet(q, 1, 0, 0, ps);
    q[20 + 14 + 1] = 8'd3;
    begin kv_t k; k.key = pr.key; k.klen = 8; k.value = 32'h11; k.op = OP_SUM; k.tree = 1; exp_kv.push_back(k); end
    to_beats(q, src);
    build(20, 1);
    while (src.size() > 0) begin
      @(negedge clk);
      in_valid = ($urandom % 5) != 0;
      in_beat = src[0];
      @(posedge clk);
      if (in_valid && in_ready) void'(src.pop_front());
    end
    @(negedge clk); in_valid = 0;
    repeat (200) @(posedge clk);
    chk(exp_kv.size() == 0, "all pairs out");
    chk(exp_eot.size() == 0, "all EoT out");
    chk(err_count == 1, "one malformed packet");
    // line-rate phase
    random_ready = 0;
    build(40, 16);
    beats = src.size(); cyc = 0;
    while (src.size() > 0) begin
      @(negedge clk);
      in_valid = 1; in_beat = src[0];
      @(posedge clk);
      cyc++;
      if (in_ready) void'(src.pop_front());
    end
    @(negedge clk); in_valid = 0;
    repeat (100) @(posedge clk);
    $display("line rate: %0d beats in %0d cycles", beats, cyc);
    chk(cyc <= beats + beats / 20, "about one beat per cycle for keys >= 16 bytes");
    chk(exp_kv.size() == 0 && exp_eot.size() == 0, "all pairs out (line rate)");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(negedge clk) out_ready = random_ready ? ($urandom % 4 != 0) : 1'b1;

  always @(posedge clk) if (rst_n) begin
    if (out_valid && out_ready) begin
      checks++;
      if (exp_kv.size() == 0 || out_kv !== exp_kv[0] ||
          out_group !== 3'((int'(exp_kv[0].klen) - 1) / 8)) begin
        failures++;
        if (failures < 10) $display("pair mismatch: klen %0d val %h", out_kv.klen, out_kv.value);
      end
      if (exp_kv.size() > 0) void'(exp_kv.pop_front());
    end
    if (eot_valid) begin
      checks++;
      if (exp_eot.size() == 0 || int'(eot_tree) != exp_eot[0]) begin failures++; $display("bad EoT"); end
      if (exp_eot.size() > 0) void'(exp_eot.pop_front());
    end
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
