// tb_bpe: back-end engine with its memory controller and the DRAM model
// (25-cycle reads), over a small 16 KB DRAM so that collisions occur. Two
// trees split the DRAM. Random pairs of all key lengths are sent; then each
// tree is flushed (the front-end engines' part of the handshake is played by
// the testbench). For every (tree, key) the values that left the engine must
// sum to the values sent; flush_done must come after the tree's last pair;
// hit/insert/evict counters must add up; and one pair must take no more than
// the 33 cycles the paper reports for back-end aggregation.
module tb_bpe;
  import switchagg_pkg::*;
  import tb_util_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  tree_cfg_t [3:0] cfg;
  logic in_valid, in_ready, sched_busy, out_valid, out_ready;
  kv_t in_kv, out_kv;
  logic flush_req_valid, flush_req_ready, front_quiet, fpe_flush_start, flush_done;
  logic [1:0] flush_req_tree, fpe_flush_tree, flush_done_tree;
  logic [7:0] fpe_flush_done;
  logic mc_cmd_valid, mc_cmd_ready, mc_cmd_we, mc_rsp_valid, mc_rsp_ready;
  logic [39:0] mc_cmd_addr;
  bucket_t mc_cmd_wdata, mc_rsp_data;
  logic [31:0] hit_count, insert_count, evict_count, flushed_count;
  logic dram_cmd_valid, dram_cmd_ready, dram_cmd_we, dram_rsp_valid;
  logic [39:0] dram_cmd_addr;
  bucket_t dram_cmd_wdata, dram_rsp_data;
  int checks = 0, failures = 0;
  typedef logic [KEY_MAX*8+KLEN_W+TREE_W-1:0] id_t;
  longint sent_sum [id_t];
  longint got_sum  [id_t];
  int n_sent = 0, n_out = 0;
  bit done_seen = 0;

  bpe #(.DRAM_BYTES(64'd16384)) dut (.*);
  mem_ctrl u_mc (.clk, .rst_n, .cmd_valid(mc_cmd_valid), .cmd_ready(mc_cmd_ready), .cmd_we(mc_cmd_we),
    .cmd_addr(mc_cmd_addr), .cmd_wdata(mc_cmd_wdata), .rsp_valid(mc_rsp_valid), .rsp_ready(mc_rsp_ready),
    .rsp_data(mc_rsp_data), .dram_cmd_valid, .dram_cmd_ready, .dram_cmd_we, .dram_cmd_addr,
    .dram_cmd_wdata, .dram_rsp_valid, .dram_rsp_data);
  dram_model #(.LAT(25)) u_dram (.clk, .rst_n, .cmd_valid(dram_cmd_valid), .cmd_ready(dram_cmd_ready),
    .cmd_we(dram_cmd_we), .cmd_addr(dram_cmd_addr), .cmd_wdata(dram_cmd_wdata),
    .rsp_valid(dram_rsp_valid), .rsp_data(dram_rsp_data));

  task automatic chk(bit c, string m);
    checks++;
    if (!c) begin failures++; $display("FAIL %s", m); end
  endtask

  task automatic flush(input int t);
    @(negedge clk); flush_req_valid = 1; flush_req_tree = 2'(t);
    @(posedge clk); while (!flush_req_ready) @(posedge clk);
    @(negedge clk); flush_req_valid = 0;
    @(posedge clk); while (!fpe_flush_start) @(posedge clk);
    chk(fpe_flush_tree == 2'(t), "front-end flush tree");
    repeat (5) @(posedge clk);
    @(negedge clk); fpe_flush_done = 8'hFF;
    @(negedge clk); fpe_flush_done = 8'h00;
    done_seen = 0;
    @(posedge clk); while (!flush_done) @(posedge clk);
    chk(flush_done_tree == 2'(t), "flush_done tree");
    done_seen = 1;
  endtask

  initial begin
    int cyc;
    cfg = '0;
    cfg[0] = '{valid: 1, children: 1, parent: 0, slot: 0, shift: 1};
    cfg[1] = '{valid: 1, children: 1, parent: 0, slot: 1, shift: 1};
    in_valid = 0; in_kv = '0; sched_busy = 0; flush_req_valid = 0; flush_req_tree = 0;
    front_quiet = 1; fpe_flush_done = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    // one pair, timed
    @(negedge clk); in_valid = 1;
    in_kv.klen = 20; in_kv.key = make_key(77, 20); in_kv.value = 5; in_kv.op = OP_SUM; in_kv.tree = 0;
    sent_sum[{in_kv.key, in_kv.klen, in_kv.tree}] += 5; n_sent++;
    @(posedge clk); cyc = 0;
    @(negedge clk); in_valid = 0;
    while (!in_ready) begin @(posedge clk); cyc++; #1; end
    $display("back-end aggregation: %0d cycles per pair", cyc);
    chk(cyc <= 33, "within 33 cycles");
    for (int n = 0; n < 800; n++) begin
      kv_t k;
      k.klen = 7'(1 + $urandom % 64);
      k.key  = make_key($urandom % 60, int'(k.klen));
      k.value = $urandom % 1000; k.op = OP_SUM; k.tree = 2'($urandom % 2);
      @(negedge clk); in_valid = 1; in_kv = k;
      @(posedge clk); while (!in_ready) @(posedge clk);
      sent_sum[{k.key, k.klen, k.tree}] += longint'(k.value); n_sent++;
    end
    @(negedge clk); in_valid = 0;
    repeat (50) @(posedge clk);
    flush(0);
    flush(1);
    foreach (sent_sum[id]) begin
      checks++;
      if (!got_sum.exists(id) || got_sum[id] != sent_sum[id]) begin failures++; if (failures < 5) $display("sum mismatch"); end
    end
    chk(got_sum.num() == sent_sum.num(), "no unknown keys");
    chk(hit_count + insert_count + evict_count == 32'(n_sent), "counters add up");
    chk(evict_count > 0 && hit_count > 0, "hits and evictions seen");
    chk(32'(n_out) == evict_count + flushed_count, "outputs = evictions + flushed");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(negedge clk) out_ready = $urandom % 3 != 0;

  always @(posedge clk) if (rst_n && out_valid && out_ready) begin
    got_sum[{out_kv.key, out_kv.klen, out_kv.tree}] += longint'(out_kv.value);
    n_out++;
    if (done_seen) begin checks++; failures++; $display("pair after flush_done"); end
  end

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
