// tb_agg_packer: feeds result pairs of two trees (all key lengths) with random
// gaps, then signals the end of each tree's flush. The packets that come out
// are parsed here byte by byte: each must be a well-formed aggregation
// packet no longer than 1500 bytes, sent to its tree's parent port, the pairs
// must be exactly those fed, in order, and exactly one packet per flushed
// tree - the last one - must carry EoT.
module tb_agg_packer;
  import switchagg_pkg::*;
  import tb_util_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  tree_cfg_t [3:0] cfg;
  logic in_valid, in_ready, flush_done, out_valid, out_ready;
  kv_t in_kv;
  logic [1:0] flush_done_tree, out_port;
  beat_t out_beat;
  logic [31:0] pkt_count;
  int checks = 0, failures = 0;
  pair_t exp_q [2][$];
  bq_t cur;
  int eot_pkts [2];
  bit after_eot [2];
  int n_pkts = 0;

  agg_packer dut (.*);

  task automatic chk(bit c, string m);
    checks++;
    if (!c) begin failures++; if (failures < 10) $display("FAIL %s", m); end
  endtask

  task automatic feed(input int tree, input int n);
    for (int i = 0; i < n; i++) begin
      pair_t p; kv_t k;
      p.klen = 1 + $urandom % 64; p.key = make_key($urandom, p.klen); p.val = $urandom;
      k.key = p.key; k.klen = 7'(p.klen); k.value = p.val; k.op = OP_SUM; k.tree = 2'(tree);
      exp_q[tree].push_back(p);
      @(negedge clk); in_valid = ($urandom % 4 != 0); in_kv = k;
      while (!in_valid) begin @(negedge clk); in_valid = 1; end
      @(posedge clk); while (!in_ready) @(posedge clk);
      @(negedge clk); in_valid = 0;
    end
  endtask

  task automatic fdone(input int tree);
    @(negedge clk); flush_done = 1; flush_done_tree = 2'(tree);
    @(negedge clk); flush_done = 0;
  endtask

  initial begin
    cfg = '0;
    cfg[0] = '{valid: 1, children: 1, parent: 2, slot: 0, shift: 1};
    cfg[1] = '{valid: 1, children: 1, parent: 1, slot: 1, shift: 1};
    in_valid = 0; in_kv = '0; flush_done = 0; flush_done_tree = 0;
    eot_pkts = '{0, 0}; after_eot = '{0, 0};
    repeat (3) @(posedge clk);
    rst_n = 1;
    feed(0, 100);
    feed(1, 5);
    feed(0, 7);
    fdone(0);
    feed(1, 60);
    fdone(1);
    fdone(0);            // a flush with no pairs still sends an EoT packet
    repeat (400) @(posedge clk);
    chk(exp_q[0].size() == 0 && exp_q[1].size() == 0, "all pairs delivered");
    chk(eot_pkts[0] == 2 && eot_pkts[1] == 1, "EoT packets");
    chk(pkt_count == 32'(n_pkts), "packet counter");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(negedge clk) out_ready = $urandom % 4 != 0;

  always @(posedge clk) if (rst_n && out_valid && out_ready) begin
    for (int i = 0; i < 16; i++) cur.push_back(out_beat.data[8*i +: 8]);
    if (out_beat.eop) begin
      int tree, op; bit eot; pair_t ps[$];
      n_pkts++;
      ps.delete();
      checks++;
      if (!parse_agg(cur, tree, eot, op, ps)) begin failures++; $display("malformed packet"); end
      else begin
        chk(cur.size() <= 1504, "packet size");
        chk(int'(out_port) == int'(cfg[tree].parent), "parent port");
        chk(!after_eot[tree] || eot, "nothing after EoT");
        foreach (ps[i]) begin
          checks++;
          if (exp_q[tree].size() == 0 || ps[i].klen != exp_q[tree][0].klen ||
              ps[i].key != exp_q[tree][0].key || ps[i].val != exp_q[tree][0].val) begin
            failures++; if (failures < 4) $display("pair mismatch tree %0d i=%0d klen %0d/%0d val %h/%h", tree, i, ps[i].klen, exp_q[tree][0].klen, ps[i].val, exp_q[tree][0].val);
          end
          if (exp_q[tree].size() > 0) void'(exp_q[tree].pop_front());
        end
        if (eot) begin
          eot_pkts[tree]++;
          chk(exp_q[tree].size() == 0 || tree == 0, "EoT after all pairs");
        end
      end
      cur.delete();
    end
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
