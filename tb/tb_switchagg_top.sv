// tb_switchagg_top: end-to-end run of the switch with small tables so that
// every mechanism is exercised: tiny on-chip tables (8 buckets per engine),
// 64 KB of DRAM, 4-deep engine queues. The controller (port 3) installs a
// tree with three children and parent port 3, and two routes. Three mappers
// (ports 0-2) send aggregation packets with pairs of all key lengths and set
// EoT on their last packet; normal packets are sent as well. The testbench
// collects what leaves port 3 and checks: the Ack comes back, the aggregation
// packets are well formed, the values leaving per key sum to the values sent,
// exactly one packet carries EoT and it is the last; normal packets reach
// their routed port and an unknown destination is dropped. It counts, and
// requires at least once, each mechanism: hits, inserts, evictions and the
// bypass in the front-end engines; hits, inserts and evictions in the
// back-end engine; a full engine queue (stall); a route miss; the flush.
module tb_switchagg_top;
  import switchagg_pkg::*;
  import tb_util_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

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

  switchagg_top #(.FPE_MAX_BUCKETS(8), .DRAM_BYTES(64'd65536), .FPE_Q_DEPTH(4)) dut (.*);
  dram_model #(.LAT(25)) u_dram (.clk, .rst_n, .cmd_valid(dram_cmd_valid), .cmd_ready(dram_cmd_ready),
    .cmd_we(dram_cmd_we), .cmd_addr(dram_cmd_addr), .cmd_wdata(dram_cmd_wdata),
    .rsp_valid(dram_rsp_valid), .rsp_data(dram_rsp_data));

  int checks = 0, failures = 0;
  typedef logic [KEY_MAX*8+KLEN_W-1:0] id_t;
  longint sent_sum [id_t];
  longint got_sum  [id_t];
  beat_t  tx_q [4][$];   // beats to send per port
  bq_t    rx_cur [4];
  int     acks = 0, eot_pkts = 0, agg_pkts = 0, pkts_after_eot = 0, normal_ok = 0, bad_pkts = 0;
  int     n_pairs_sent = 0;

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
    return 1 + (id * 37) % 64;
  endfunction

  // feed the ports
  always @(negedge clk) begin
    for (int p = 0; p < 4; p++) begin
      rx_valid[p] = tx_q[p].size() > 0 && rst_n;
      rx_beat[p]  = (tx_q[p].size() > 0) ? tx_q[p][0] : '0;
    end
    tx_ready = 4'($urandom) | 4'b1000;
  end
  always @(posedge clk) if (rst_n)
    for (int p = 0; p < 4; p++) if (rx_valid[p] && rx_ready[p]) void'(tx_q[p].pop_front());

  // collect outputs
  always @(posedge clk) if (rst_n) begin
    for (int p = 0; p < 4; p++) if (tx_valid[p] && tx_ready[p]) begin
      for (int i = 0; i < 16; i++) rx_cur[p].push_back(tx_beat[p].data[8*i +: 8]);
      if (tx_beat[p].eop) begin
        bq_t q;
        q = rx_cur[p];
        rx_cur[p].delete();
        if (q[14] == PT_ACK1 && p == 3) acks++;
        else if (q[14] == PT_AGG) begin
          int tree, op; bit eot; pair_t ps[$];
          ps.delete();
          agg_pkts++;
          if (p != 3 || !parse_agg(q, tree, eot, op, ps) || tree != 0) bad_pkts++;
          else begin
            if (eot_pkts > 0) pkts_after_eot++;
            if (eot) eot_pkts++;
            foreach (ps[i]) got_sum[{ps[i].key, 7'(ps[i].klen)}] += longint'(ps[i].val);
          end
        end else if (q[14] == PT_NORMAL && p == 2 && q[16] == 8'hC3) normal_ok++;
        else bad_pkts++;
      end
    end
  end

  initial begin
    bq_t q;
    rt_wr_en = 0; rt_wr_valid = 0; rt_wr_idx = 0; rt_wr_mac = 0; rt_wr_port = 0;
    rx_valid = '0; rx_beat = '0; tx_ready = '1;
    repeat (5) @(posedge clk);
    rst_n = 1;
    // routes installed by the controller
    @(negedge clk); rt_wr_en = 1; rt_wr_idx = 0; rt_wr_valid = 1; rt_wr_mac = 48'h0000_0000_0002; rt_wr_port = 2;
    @(negedge clk); rt_wr_idx = 1; rt_wr_mac = 48'h0000_0000_0003; rt_wr_port = 3;
    @(negedge clk); rt_wr_en = 0;
    // Configure: one tree (id 0), 3 children, parent port 3
    q.delete();
    push_l2(q, 48'h0000_0000_00FF, PT_CONFIGURE);
    q.push_back(1); q.push_back(0); q.push_back(0); q.push_back(0);
    q.push_back(0); q.push_back(3); q.push_back(3); q.push_back(0);
    queue_pkt(3, q);
    repeat (100) @(posedge clk);
    chk(acks == 1, "Ack received on port 3");
    // normal packets: one routed, one unknown
    q.delete(); push_l2(q, 48'h0000_0000_0002, PT_NORMAL); q.push_back(8'hC3);
    for (int i = 0; i < 40; i++) q.push_back(8'(i));
    queue_pkt(1, q);
    q.delete(); push_l2(q, 48'h0000_0000_0777, PT_LAUNCH); q.push_back(8'hC3);
    queue_pkt(0, q);
    // mappers
    for (int m = 0; m < 3; m++) begin
      for (int k = 0; k < 12; k++) begin
        pair_t ps[$];
        int n;
        ps.delete();
        n = 10 + $urandom % 30;
        for (int i = 0; i < n; i++) begin
          pair_t pr; int id;
          id = ($urandom % 4 == 0) ? $urandom % 8 : $urandom % 400;
          pr.klen = klen_of(id); pr.key = make_key(id, pr.klen); pr.val = $urandom % 1000;
          ps.push_back(pr);
          sent_sum[{pr.key, 7'(pr.klen)}] += longint'(pr.val);
          n_pairs_sent++;
        end
        q.delete();
        agg_packet(q, 0, k == 11, 0, ps);
        queue_pkt(m, q);
      end
    end
    // wait for the tree's final packet
    while (eot_pkts == 0) @(posedge clk);
    repeat (200) @(posedge clk);
    foreach (sent_sum[id]) begin
      checks++;
      if (!got_sum.exists(id) || got_sum[id] != sent_sum[id]) begin
        failures++;
        if (failures < 5) $display("sum mismatch for a key");
      end
    end
    chk(got_sum.num() == sent_sum.num(), "no unknown keys");
    chk(eot_pkts == 1 && pkts_after_eot == 0, "one EoT packet, last");
    chk(bad_pkts == 0, "no malformed or misrouted packets");
    chk(normal_ok == 1, "normal packet routed to port 2");
    chk(pa_err_count == '0, "no parse errors");
    begin
      longint fh = 0, fi = 0, fe = 0, fb = 0, ff = 0, fw = 0;
      for (int g = 0; g < 8; g++) begin
        fh += fpe_hit_count[g]; fi += fpe_insert_count[g]; fe += fpe_evict_count[g];
        fb += fpe_bypass_count[g]; ff += fpe_q_full_count[g]; fw += fpe_q_wr_count[g];
      end
      $display("pairs sent %0d, engine queue writes %0d, queue-full cycles %0d", n_pairs_sent, fw, ff);
      $display("FPE hit %0d insert %0d evict %0d bypass %0d", fh, fi, fe, fb);
      $display("BPE hit %0d insert %0d evict %0d flushed %0d; aggregation packets %0d; route misses %0d",
               bpe_hit_count, bpe_insert_count, bpe_evict_count, bpe_flushed_count, agg_pkts, route_miss_count);
      chk(fw == longint'(n_pairs_sent), "every pair reached an engine queue");
      chk(fh > 0, "mechanism: FPE hit");
      chk(fi > 0, "mechanism: FPE insert");
      chk(fe > 0, "mechanism: FPE eviction to BPE");
      chk(fb > 0, "mechanism: FPE same-bucket bypass");
      chk(ff > 0, "mechanism: engine queue full (stall)");
      chk(bpe_hit_count > 0, "mechanism: BPE hit");
      chk(bpe_insert_count > 0, "mechanism: BPE insert");
      chk(bpe_evict_count > 0, "mechanism: BPE eviction to next hop");
      chk(bpe_flushed_count > 0, "mechanism: BPE flush");
      chk(route_miss_count == 1, "mechanism: route miss drop");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (300000) @(posedge clk);
    failures++;
    $display("watchdog: EoT packets %0d", eot_pkts);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
