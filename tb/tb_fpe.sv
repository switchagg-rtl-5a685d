// tb_fpe: a front-end engine with a deliberately tiny table (16 buckets of 4
// slots) so that hits, inserts, evictions and back-to-back same-bucket pairs
// all happen. Two trees share the table (half each). Every pair that leaves
// the engine (evicted, or flushed at the end) is collected; for every
// (tree, key) the sum of what left must equal the sum of what was sent, no key
// may leave a flush twice, and the hit/insert/evict counters must add up. A
// MAX phase checks the operation is applied, and a final phase with an
// always-ready eviction path checks one pair is accepted per cycle.
module tb_fpe;
  import switchagg_pkg::*;
  import tb_util_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  tree_cfg_t [3:0] cfg;
  logic in_valid, in_ready, ev_valid, ev_ready, flush_start, flush_done, idle;
  kv_t in_kv, ev_kv;
  logic [1:0] flush_tree;
  logic [31:0] hit_count, insert_count, evict_count, bypass_count;
  int checks = 0, failures = 0;
  typedef logic [KEY_MAX*8+KLEN_W+TREE_W-1:0] id_t;
  longint sent_sum [id_t];
  longint got_sum  [id_t];
  int     flushed_in_pass [id_t];
  int n_sent = 0, n_out = 0, n_flushed = 0;
  bit in_flush = 0;
  bit ev_random = 1;
  logic [31:0] max_seen;

  fpe #(.GROUP(1), .MAX_BUCKETS(16)) dut (.*);

  task automatic chk(bit c, string m);
    checks++;
    if (!c) begin failures++; $display("FAIL %s", m); end
  endtask

  task automatic send(input kv_t k);
    @(negedge clk); in_valid = 1; in_kv = k;
    @(posedge clk); while (!in_ready) @(posedge clk);
    if (k.op == OP_SUM) sent_sum[{k.key, k.klen, k.tree}] += longint'(k.value);
    n_sent++;
    @(negedge clk); in_valid = 0;
  endtask

  task automatic do_flush(input int t);
    @(negedge clk); flush_start = 1; flush_tree = 2'(t); in_flush = 1;
    @(negedge clk); flush_start = 0;
    @(posedge clk); while (!flush_done) @(posedge clk);
    @(negedge clk); in_flush = 0;
    flushed_in_pass.delete();
  endtask

  function automatic kv_t mk(input int id, input int tree, input agg_op_e op, input logic [31:0] v);
    kv_t k;
    k.klen = 7'(9 + id % 8);
    k.key = make_key(id, int'(k.klen));
    k.value = v; k.op = op; k.tree = 2'(tree);
    return k;
  endfunction

  initial begin
    int cyc;
    cfg = '0;
    cfg[0] = '{valid: 1, children: 1, parent: 0, slot: 0, shift: 1};
    cfg[1] = '{valid: 1, children: 1, parent: 0, slot: 1, shift: 1};
    in_valid = 0; in_kv = '0; flush_start = 0; flush_tree = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    // random traffic over 120 keys in two trees
    for (int n = 0; n < 1500; n++) begin
      kv_t k;
      k = mk($urandom % 120, $urandom % 2, OP_SUM, $urandom % 1000);
      if (n % 50 == 0) begin send(k); k.value = 7; end  // back-to-back same key
      send(k);
    end
    // stream without gaps for the bypass path
    for (int n = 0; n < 40; n++) begin
      @(negedge clk); in_valid = 1; in_kv = mk(n % 3, 0, OP_SUM, 32'(n));
      sent_sum[{in_kv.key, in_kv.klen, in_kv.tree}] += longint'(n);
      @(posedge clk); while (!in_ready) @(posedge clk);
      n_sent++;
    end
    @(negedge clk); in_valid = 0;
    do_flush(0);
    do_flush(1);
    foreach (sent_sum[id]) begin
      checks++;
      if (!got_sum.exists(id) || got_sum[id] != sent_sum[id]) begin
        failures++;
        if (failures < 5) $display("sum mismatch klen=%0d key0=%h tree=%0d sent=%0d got=%0d", id[KLEN_W+TREE_W-1:TREE_W], id[KLEN_W+TREE_W +: 16], id[1:0], sent_sum[id], got_sum.exists(id) ? got_sum[id] : -1);
      end
    end
    chk(got_sum.num() == sent_sum.num(), "no unknown keys");
    chk(hit_count + insert_count + evict_count == 32'(n_sent), "counters add up");
    chk(evict_count > 0 && hit_count > 0 && insert_count > 0, "all three cases seen");
    chk(bypass_count > 0, "bypass used");
    chk(32'(n_out) == evict_count + 32'(n_flushed), "outputs = evictions + flushed");
    // MAX on one key: result must be the maximum value
    max_seen = 0;
    for (int n = 0; n < 10; n++) send(mk(500, 0, OP_MAX, 32'(n * 37 % 101)));
    got_sum.delete();
    do_flush(0);
    chk(got_sum.num() == 1, "one key flushed");
    // line rate with an always-ready eviction path
    ev_random = 0;
    cyc = 0;
    for (int n = 0; n < 200; n++) begin
      @(negedge clk); in_valid = 1; in_kv = mk(1000 + n, 1, OP_SUM, 1);
      @(posedge clk); cyc++;
      while (!in_ready) begin @(posedge clk); cyc++; end
    end
    @(negedge clk); in_valid = 0;
    chk(cyc == 200, "one pair per cycle");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(negedge clk) ev_ready = ev_random ? ($urandom % 3 != 0) : 1'b1;

  always @(posedge clk) if (rst_n && ev_valid && ev_ready) begin
    id_t id;
    id = {ev_kv.key, ev_kv.klen, ev_kv.tree};
    n_out++;
    if (ev_kv.op == OP_MAX) begin
      checks++;
      if (ev_kv.value != 32'd94) begin failures++; $display("MAX gave %0d", ev_kv.value); end
    end
    got_sum[id] += longint'(ev_kv.value);
    if (in_flush) begin
      n_flushed++;
      checks++;
      if (flushed_in_pass.exists(id)) begin failures++; $display("key flushed twice"); end
      flushed_in_pass[id] = 1;
    end
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
