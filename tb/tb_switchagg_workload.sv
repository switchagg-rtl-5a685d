// tb_switchagg_workload: the paper's two kinds of workload, scaled down.
// Three mappers send pairs with keys of 16..64 bytes drawn from a key variety
// of 3000 keys, once uniformly (tree 0) and once Zipf-distributed with
// skew 0.99 (tree 1), 4800 pairs each. The switch runs with reduced tables
// (64 buckets per front-end engine, 256 KB of DRAM, both halved between the
// two trees) so that, as in the paper, the variety is larger than the
// on-chip tables and the back-end engine matters. For each tree the test
// waits for its EoT packet and checks that the per-key sums that left equal
// the sums sent. It reports the engine-queue write and full counts (the
// paper's FIFO-full ratio) and the reduction ratio (1 - pairs out / pairs
// in), and checks that the skewed workload is reduced more than the uniform
// one and that both are reduced at all.
module tb_switchagg_workload;
  import switchagg_pkg::*;
  import tb_util_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  localparam int VARIETY = 3000;
  localparam int PAIRS   = 4800;

  logic  [3:0] rx_valid, rx_ready, tx_valid, tx_ready;
  beat_t [3:0] rx_beat, tx_beat;
  logic rt_wr_en, rt_wr_valid;
  logic [3:0] rt_wr_idx;
  logic [47:0] rt_wr_mac;
  logic [1:0] rt_wr_port;
  logic dram_cmd_valid, dram_cmd_ready, dram_cmd_we, dram_rsp_valid;
  logic [39:0] dram_cmd_addr;
  bucket_t dram_cmd_wdata, dram_rsp_data;
  logic [7:0][47:0] fpe_q_wr_count, fpe_q_full_count;
  logic [7:0][31:0] fpe_hit_count, fpe_insert_count, fpe_evict_count, fpe_bypass_count;
  logic [31:0] bpe_hit_count, bpe_insert_count, bpe_evict_count, bpe_flushed_count;
  logic [31:0] agg_pkt_count, route_miss_count;
  logic [3:0][31:0] pa_err_count;

  switchagg_top #(.FPE_MAX_BUCKETS(64), .DRAM_BYTES(64'd262144)) dut (.*);
  dram_model #(.LAT(25)) u_dram (.clk, .rst_n, .cmd_valid(dram_cmd_valid), .cmd_ready(dram_cmd_ready),
    .cmd_we(dram_cmd_we), .cmd_addr(dram_cmd_addr), .cmd_wdata(dram_cmd_wdata),
    .rsp_valid(dram_rsp_valid), .rsp_data(dram_rsp_data));

  int checks = 0, failures = 0;
  typedef logic [KEY_MAX*8+KLEN_W-1:0] id_t;
  longint sent_sum [2][id_t];
  longint got_sum  [2][id_t];
  int     pairs_out [2];
  int     eot_seen [2];
  beat_t  tx_q [4][$];
  bq_t    rx_cur [4];
  int     bad_pkts = 0;
  real    cdf [VARIETY];

  task automatic chk(bit c, string m);
    checks++;
    if (!c) begin failures++; $display("FAIL %s", m); end
  endtask

  task automatic queue_pkt(input int port, input bq_t q);
    beat_t bs[$];
    to_beats(q, bs);
    foreach (bs[i]) tx_q[port].push_back(bs[i]);
  endtask

  function automatic int klen_of(input int id);
    return 16 + (id * 37) % 49;
  endfunction

  // key rank drawn uniformly or from the Zipf(0.99) distribution
  function automatic int draw(input bit zipf);
    real u;
    int lo, hi;
    if (!zipf) return int'($urandom % VARIETY);
    u = real'($urandom) / 4294967296.0;
    lo = 0; hi = VARIETY - 1;
    while (lo < hi) begin
      int mid;
      mid = (lo + hi) / 2;
      if (cdf[mid] > u) hi = mid; else lo = mid + 1;
    end
    return lo;
  endfunction

  always @(negedge clk) begin
    for (int p = 0; p < 4; p++) begin
      rx_valid[p] = tx_q[p].size() > 0 && rst_n;
      rx_beat[p]  = (tx_q[p].size() > 0) ? tx_q[p][0] : '0;
    end
  end
  always @(posedge clk) if (rst_n)
    for (int p = 0; p < 4; p++) if (rx_valid[p] && rx_ready[p]) void'(tx_q[p].pop_front());

  always @(posedge clk) if (rst_n) begin
    for (int p = 0; p < 4; p++) if (tx_valid[p] && tx_ready[p]) begin
      for (int i = 0; i < 16; i++) rx_cur[p].push_back(tx_beat[p].data[8*i +: 8]);
      if (tx_beat[p].eop) begin
        bq_t q;
        q = rx_cur[p];
        rx_cur[p].delete();
        if (q[14] == PT_AGG) begin
          int tree, op; bit eot; pair_t ps[$];
          ps.delete();
          if (p != 3 || !parse_agg(q, tree, eot, op, ps) || tree > 1) bad_pkts++;
          else begin
            if (eot) eot_seen[tree]++;
            pairs_out[tree] += ps.size();
            foreach (ps[i]) got_sum[tree][{ps[i].key, 7'(ps[i].klen)}] += longint'(ps[i].val);
          end
        end else if (q[14] != PT_ACK1) bad_pkts++;
      end
    end
  end

  task automatic run_tree(input int tree);
    int left [3];
    longint w0 = 0, f0 = 0, w1 = 0, f1 = 0;
    int t0;
    for (int g = 0; g < 8; g++) begin w0 += fpe_q_wr_count[g]; f0 += fpe_q_full_count[g]; end
    t0 = int'($time / 10);
    for (int m = 0; m < 3; m++) left[m] = PAIRS / 3;
    for (int m = 0; m < 3; m++) begin
      while (left[m] > 0) begin
        pair_t ps[$];
        bq_t q;
        int n;
        ps.delete();
        n = (left[m] < 30) ? left[m] : 30;
        for (int i = 0; i < n; i++) begin
          pair_t pr; int id;
          id = draw(tree == 1);
          pr.klen = klen_of(id); pr.key = make_key(id, pr.klen); pr.val = 1 + $urandom % 100;
          ps.push_back(pr);
          sent_sum[tree][{pr.key, 7'(pr.klen)}] += longint'(pr.val);
        end
        left[m] -= n;
        q.delete();
        agg_packet(q, tree, left[m] == 0, 0, ps);
        queue_pkt(m, q);
      end
    end
    while (eot_seen[tree] == 0) @(posedge clk);
    repeat (100) @(posedge clk);
    for (int g = 0; g < 8; g++) begin w1 += fpe_q_wr_count[g]; f1 += fpe_q_full_count[g]; end
    begin
      int bad;
      bad = 0;
      foreach (sent_sum[tree][id]) if (!got_sum[tree].exists(id) || got_sum[tree][id] != sent_sum[tree][id]) bad++;
      chk(bad == 0, "per-key sums conserved");
      chk(got_sum[tree].num() == sent_sum[tree].num(), "no unknown keys");
      chk(eot_seen[tree] == 1, "one EoT packet");
    end
    $display("%s: %0d pairs in, %0d distinct, %0d pairs out, reduction %0.1f%%, queue writes %0d, queue-full cycles %0d, %0d cycles",
             tree ? "zipf 0.99" : "uniform", PAIRS, sent_sum[tree].num(), pairs_out[tree],
             100.0 * (1.0 - real'(pairs_out[tree]) / real'(PAIRS)), w1 - w0, f1 - f0, int'($time / 10) - t0);
  endtask

  initial begin
    bq_t q;
    real s;
    s = 0.0;
    for (int r = 0; r < VARIETY; r++) begin s += 1.0 / ((r + 1.0) ** 0.99); cdf[r] = s; end
    for (int r = 0; r < VARIETY; r++) cdf[r] = cdf[r] / s;
    rt_wr_en = 0; rt_wr_valid = 0; rt_wr_idx = 0; rt_wr_mac = 0; rt_wr_port = 0;
    rx_valid = '0; rx_beat = '0; tx_ready = '1;
    repeat (5) @(posedge clk);
    rst_n = 1;
    // two trees, three children each, parent port 3
    push_l2(q, 48'h0000_0000_00FF, PT_CONFIGURE);
    q.push_back(2); q.push_back(0); q.push_back(0); q.push_back(0);
    q.push_back(0); q.push_back(3); q.push_back(3); q.push_back(0);
    q.push_back(1); q.push_back(3); q.push_back(3); q.push_back(0);
    queue_pkt(3, q);
    run_tree(0);
    run_tree(1);
    chk(bad_pkts == 0, "no malformed or misrouted packets");
    chk(pairs_out[0] < PAIRS && pairs_out[1] < PAIRS, "both workloads reduced");
    chk(pairs_out[1] < pairs_out[0], "skewed workload reduced more than uniform");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2000000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
