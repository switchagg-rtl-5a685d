// tb_switchagg_full: the whole switch at its default sizes (32 MB of
// front-end tables in 8 engines, 8 GB of back-end DRAM, no parameter
// overrides). After reset the engines clear their 65536-bucket tables, one
// bucket per cycle. The controller port installs a tree and two routes and
// gets its Ack; a normal packet is routed and one with an unknown
// destination is dropped; three mappers then send 36 aggregation packets
// (about 800 pairs over 400 keys of all lengths). At this size nothing
// collides, so every pair must be either the first insert of its key or an
// on-chip aggregation: inserts must equal the number of distinct keys and
// hits the rest, with no evictions and no output yet. The end-of-task flush
// is left out here: sweeping 8 GB of DRAM takes tens of millions of cycles.
module tb_switchagg_full;
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

  switchagg_top dut (.*);
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
        agg_packet(q, 0, 1'b0, 0, ps);
        queue_pkt(m, q);
      end
    end
    // wait until every beat has entered and the engines are idle again
    while (tx_q[0].size() + tx_q[1].size() + tx_q[2].size() > 0) @(posedge clk);
    repeat (500) @(posedge clk);
    chk(bad_pkts == 0, "no malformed or misrouted packets");
    chk(normal_ok == 1, "normal packet routed to port 2");
    chk(pa_err_count == '0, "no parse errors");
    chk(route_miss_count == 1, "unknown destination dropped");
    chk(agg_pkts == 0, "nothing leaves before the tree is finished");
    begin
      longint fh = 0, fi = 0, fe = 0, fw = 0;
      for (int g = 0; g < 8; g++) begin
        fh += fpe_hit_count[g]; fi += fpe_insert_count[g]; fe += fpe_evict_count[g];
        fw += fpe_q_wr_count[g];
      end
      $display("cycles %0d: pairs %0d, distinct keys %0d, FPE hit %0d insert %0d evict %0d",
               $time / 10, n_pairs_sent, sent_sum.num(), fh, fi, fe);
      chk(fw == longint'(n_pairs_sent), "every pair reached an engine queue");
      chk(fe == 0, "no collisions in the full-size tables");
      chk(fi == longint'(sent_sum.num()), "one insert per distinct key");
      chk(fh + fi == longint'(n_pairs_sent), "every other pair aggregated on chip");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial forever begin
    repeat (20000) @(posedge clk);
    $display("progress: cycle %0d", $time / 10);
  end

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog: EoT packets %0d", eot_pkts);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
