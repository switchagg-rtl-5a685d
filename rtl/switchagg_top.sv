// switchagg_top: the SwitchAgg switch data plane.
//
// Packets enter on N_PORTS 128-bit beat streams. Each port has an input
// queue and a header-extraction stage that sends the packet one of three
// ways:
//   * Configure packets -> 4-to-1 merge -> config_unit, which keeps the tree
//     table (children, parent port, memory share), answers with an Ack and
//     counts end-of-task flags to decide when a tree is finished;
//   * normal packets (and Launch/Ack) -> 4-to-1 merge -> routing_table
//     (exact match on destination MAC) -> packet_forwarding;
//   * aggregation packets -> the port's payload_analyzer, which cuts the
//     payload into variable-length key-value pairs -> crossbar -> a queue in
//     front of the front-end engine (fpe) of the pair's key-length group.
// Each fpe aggregates into its on-chip hash table and evicts on collision;
// the pe_scheduler passes evictions one at a time to the back-end engine
// (bpe), whose much larger hash table lives in DRAM behind mem_ctrl. Pairs
// the bpe evicts, and everything the tree holds when it is flushed, go to the
// agg_packer, which builds aggregation packets for the tree's parent port and
// sets EoT on the last one.
//
// The DRAM itself is outside this module: its command/response ports are
// brought out (fixed read latency, in-order responses). So is the routing
// table's write port, through which the controller installs routes. Counters
// for the queues in front of the engines (words written, cycles found full)
// and for the engines' hits, inserts and evictions are outputs.
//
// Sizes follow the paper's prototype: 4 ports, 128-bit datapath, 8 groups of
// 8-byte key lengths up to 64 bytes, 8 front-end engines sharing 32 MB of
// on-chip table (4 MB each), one back-end engine over 8 GB of DRAM.
//
// Reset is asynchronous and active low in every block. Lint reports rst_n
// as used both asynchronously and synchronously: the synchronous use is
// only the 'disable iff' of the handshake assertions in sync_fifo and
// mem_ctrl, which are not logic. The unused-signal warnings are counter and
// level outputs of shared FIFOs that this top does not bring out.
module switchagg_top
  import switchagg_pkg::*;
#(
  parameter longint unsigned FPE_MEM_BYTES  = 64'd4194304,
  parameter int unsigned     FPE_MAX_BUCKETS = 0,
  parameter longint unsigned DRAM_BYTES     = 64'd8589934592,
  parameter int unsigned     IN_DEPTH       = 16,
  parameter int unsigned     FPE_Q_DEPTH    = 16,
  parameter int unsigned     ROUTES         = 16
) (
  input  logic                              clk,
  input  logic                              rst_n,
  // ports
  input  logic  [N_PORTS-1:0]               rx_valid,
  output logic  [N_PORTS-1:0]               rx_ready,
  input  beat_t [N_PORTS-1:0]               rx_beat,
  output logic  [N_PORTS-1:0]               tx_valid,
  input  logic  [N_PORTS-1:0]               tx_ready,
  output beat_t [N_PORTS-1:0]               tx_beat,
  // routing table programming
  input  logic                              rt_wr_en,
  input  logic [$clog2(ROUTES)-1:0]         rt_wr_idx,
  input  logic                              rt_wr_valid,
  input  logic [47:0]                       rt_wr_mac,
  input  logic [PORT_W-1:0]                 rt_wr_port,
  // DRAM
  output logic                              dram_cmd_valid,
  input  logic                              dram_cmd_ready,
  output logic                              dram_cmd_we,
  output logic [39:0]                       dram_cmd_addr,
  output bucket_t                           dram_cmd_wdata,
  input  logic                              dram_rsp_valid,
  input  bucket_t                           dram_rsp_data,
  // statistics
  output logic [N_GROUPS-1:0][47:0]         fpe_q_wr_count,
  output logic [N_GROUPS-1:0][47:0]         fpe_q_full_count,
  output logic [N_GROUPS-1:0][31:0]         fpe_hit_count,
  output logic [N_GROUPS-1:0][31:0]         fpe_insert_count,
  output logic [N_GROUPS-1:0][31:0]         fpe_evict_count,
  output logic [N_GROUPS-1:0][31:0]         fpe_bypass_count,
  output logic [31:0]                       bpe_hit_count,
  output logic [31:0]                       bpe_insert_count,
  output logic [31:0]                       bpe_evict_count,
  output logic [31:0]                       bpe_flushed_count,
  output logic [31:0]                       agg_pkt_count,
  output logic [31:0]                       route_miss_count,
  output logic [N_PORTS-1:0][31:0]          pa_err_count
);
  // ---------------- input queues and header extraction ----------------
  logic  [N_PORTS-1:0] iq_valid, iq_ready;
  beat_t [N_PORTS-1:0] iq_beat;
  logic  [N_PORTS-1:0] he_agg_v, he_agg_r, he_cfg_v, he_cfg_r, he_norm_v, he_norm_r;
  beat_t [N_PORTS-1:0] he_beat;

  for (genvar p = 0; p < int'(N_PORTS); p++) begin : g_port
    logic [$clog2(IN_DEPTH):0] lvl;
    logic [47:0]               wrc, fc;
    sync_fifo #(.T(beat_t), .DEPTH(IN_DEPTH)) u_iq (
      .clk, .rst_n,
      .in_valid(rx_valid[p]), .in_ready(rx_ready[p]), .in_data(rx_beat[p]),
      .out_valid(iq_valid[p]), .out_ready(iq_ready[p]), .out_data(iq_beat[p]),
      .level(lvl), .wr_count(wrc), .full_count(fc));
    header_extraction u_he (
      .clk, .rst_n,
      .in_valid(iq_valid[p]), .in_ready(iq_ready[p]), .in_beat(iq_beat[p]),
      .agg_valid(he_agg_v[p]), .agg_ready(he_agg_r[p]),
      .cfg_valid(he_cfg_v[p]), .cfg_ready(he_cfg_r[p]),
      .norm_valid(he_norm_v[p]), .norm_ready(he_norm_r[p]),
      .out_beat(he_beat[p]));
  end

  // ---------------- configuration ----------------
  logic                cm_valid, cm_ready;
  beat_t               cm_beat;
  logic [PORT_W-1:0]   cm_src;
  tree_cfg_t [N_TREES-1:0] cfg;
  logic [N_PORTS-1:0]  eot_valid;
  logic [N_PORTS-1:0][TREE_W-1:0] eot_tree;
  logic                flush_req_valid, flush_req_ready;
  logic [TREE_W-1:0]   flush_req_tree;
  logic                ack_valid, ack_ready;
  beat_t               ack_beat;
  logic [PORT_W-1:0]   ack_port;

  stream_mux #(.N(N_PORTS)) u_cfg_mux (
    .clk, .rst_n, .in_valid(he_cfg_v), .in_ready(he_cfg_r), .in_beat(he_beat),
    .out_valid(cm_valid), .out_ready(cm_ready), .out_beat(cm_beat), .out_src(cm_src));

  config_unit u_cfg (
    .clk, .rst_n,
    .in_valid(cm_valid), .in_ready(cm_ready), .in_beat(cm_beat), .in_port(cm_src),
    .cfg,
    .eot_valid, .eot_tree,
    .flush_valid(flush_req_valid), .flush_ready(flush_req_ready), .flush_tree(flush_req_tree),
    .ack_valid, .ack_ready, .ack_beat, .ack_port);

  // ---------------- normal forwarding pipeline ----------------
  logic              nm_valid, nm_ready;
  beat_t             nm_beat;
  logic [PORT_W-1:0] nm_src;
  logic              rt_valid, rt_ready;
  beat_t             rt_beat;
  logic [PORT_W-1:0] rt_port;

  stream_mux #(.N(N_PORTS)) u_norm_mux (
    .clk, .rst_n, .in_valid(he_norm_v), .in_ready(he_norm_r), .in_beat(he_beat),
    .out_valid(nm_valid), .out_ready(nm_ready), .out_beat(nm_beat), .out_src(nm_src));

  routing_table #(.ENTRIES(ROUTES)) u_rt (
    .clk, .rst_n,
    .wr_en(rt_wr_en), .wr_idx(rt_wr_idx), .wr_valid(rt_wr_valid), .wr_mac(rt_wr_mac),
    .wr_port(rt_wr_port),
    .in_valid(nm_valid), .in_ready(nm_ready), .in_beat(nm_beat),
    .out_valid(rt_valid), .out_ready(rt_ready), .out_beat(rt_beat), .out_port(rt_port),
    .miss_count(route_miss_count));

  // ---------------- payload analyzers and crossbar ----------------
  logic [N_PORTS-1:0]              pa_valid, pa_ready;
  kv_t  [N_PORTS-1:0]              pa_kv;
  logic [N_PORTS-1:0][GRP_W-1:0]   pa_group;

  for (genvar p = 0; p < int'(N_PORTS); p++) begin : g_pa
    payload_analyzer u_pa (
      .clk, .rst_n,
      .in_valid(he_agg_v[p]), .in_ready(he_agg_r[p]), .in_beat(he_beat[p]),
      .out_valid(pa_valid[p]), .out_ready(pa_ready[p]), .out_kv(pa_kv[p]),
      .out_group(pa_group[p]),
      .eot_valid(eot_valid[p]), .eot_tree(eot_tree[p]), .err_count(pa_err_count[p]));
  end

  logic [N_GROUPS-1:0] xb_valid, xb_ready;
  kv_t  [N_GROUPS-1:0] xb_kv;
  logic                xb_busy;

  crossbar #(.NI(N_PORTS), .NO(N_GROUPS)) u_xbar (
    .clk, .rst_n,
    .in_valid(pa_valid), .in_ready(pa_ready), .in_kv(pa_kv), .in_dest(pa_group),
    .out_valid(xb_valid), .out_ready(xb_ready), .out_kv(xb_kv), .busy(xb_busy));

  // ---------------- front-end engines ----------------
  logic [N_GROUPS-1:0] fq_valid, fq_ready, fq_empty;
  kv_t  [N_GROUPS-1:0] fq_kv;
  logic [N_GROUPS-1:0] ev_valid, ev_ready;
  kv_t  [N_GROUPS-1:0] ev_kv;
  logic [N_GROUPS-1:0] fpe_idle, fpe_flush_done;
  logic                fpe_flush_start;
  logic [TREE_W-1:0]   fpe_flush_tree;

  for (genvar g = 0; g < int'(N_GROUPS); g++) begin : g_fpe
    logic [$clog2(FPE_Q_DEPTH):0] lvl;
    sync_fifo #(.T(kv_t), .DEPTH(FPE_Q_DEPTH)) u_fq (
      .clk, .rst_n,
      .in_valid(xb_valid[g]), .in_ready(xb_ready[g]), .in_data(xb_kv[g]),
      .out_valid(fq_valid[g]), .out_ready(fq_ready[g]), .out_data(fq_kv[g]),
      .level(lvl), .wr_count(fpe_q_wr_count[g]), .full_count(fpe_q_full_count[g]));
    assign fq_empty[g] = (lvl == '0);

    fpe #(.GROUP(g), .MEM_BYTES(FPE_MEM_BYTES), .MAX_BUCKETS(FPE_MAX_BUCKETS)) u_fpe (
      .clk, .rst_n, .cfg,
      .in_valid(fq_valid[g]), .in_ready(fq_ready[g]), .in_kv(fq_kv[g]),
      .ev_valid(ev_valid[g]), .ev_ready(ev_ready[g]), .ev_kv(ev_kv[g]),
      .flush_start(fpe_flush_start), .flush_tree(fpe_flush_tree),
      .flush_done(fpe_flush_done[g]), .idle(fpe_idle[g]),
      .hit_count(fpe_hit_count[g]), .insert_count(fpe_insert_count[g]),
      .evict_count(fpe_evict_count[g]), .bypass_count(fpe_bypass_count[g]));
  end

  // ---------------- scheduler, back-end engine, memory controller ----------------
  logic  sc_valid, sc_ready, sc_busy;
  kv_t   sc_kv;

  pe_scheduler #(.N(N_GROUPS)) u_sched (
    .clk, .rst_n, .in_valid(ev_valid), .in_ready(ev_ready), .in_kv(ev_kv),
    .out_valid(sc_valid), .out_ready(sc_ready), .out_kv(sc_kv), .busy(sc_busy));

  wire front_quiet = !xb_busy && (&fq_empty) && (&fpe_idle) && !(|pa_valid);

  logic    bo_valid, bo_ready;
  kv_t     bo_kv;
  logic    bflush_done;
  logic [TREE_W-1:0] bflush_tree;
  logic    mc_cmd_valid, mc_cmd_ready, mc_cmd_we, mc_rsp_valid, mc_rsp_ready;
  logic [39:0] mc_cmd_addr;
  bucket_t mc_cmd_wdata, mc_rsp_data;

  bpe #(.DRAM_BYTES(DRAM_BYTES)) u_bpe (
    .clk, .rst_n, .cfg,
    .in_valid(sc_valid), .in_ready(sc_ready), .in_kv(sc_kv), .sched_busy(sc_busy),
    .out_valid(bo_valid), .out_ready(bo_ready), .out_kv(bo_kv),
    .flush_req_valid, .flush_req_ready, .flush_req_tree,
    .front_quiet, .fpe_flush_start, .fpe_flush_tree, .fpe_flush_done,
    .flush_done(bflush_done), .flush_done_tree(bflush_tree),
    .mc_cmd_valid, .mc_cmd_ready, .mc_cmd_we, .mc_cmd_addr, .mc_cmd_wdata,
    .mc_rsp_valid, .mc_rsp_ready, .mc_rsp_data,
    .hit_count(bpe_hit_count), .insert_count(bpe_insert_count),
    .evict_count(bpe_evict_count), .flushed_count(bpe_flushed_count));

  mem_ctrl u_mc (
    .clk, .rst_n,
    .cmd_valid(mc_cmd_valid), .cmd_ready(mc_cmd_ready), .cmd_we(mc_cmd_we),
    .cmd_addr(mc_cmd_addr), .cmd_wdata(mc_cmd_wdata),
    .rsp_valid(mc_rsp_valid), .rsp_ready(mc_rsp_ready), .rsp_data(mc_rsp_data),
    .dram_cmd_valid, .dram_cmd_ready, .dram_cmd_we, .dram_cmd_addr, .dram_cmd_wdata,
    .dram_rsp_valid, .dram_rsp_data);

  // ---------------- packing and forwarding ----------------
  logic              pk_valid, pk_ready;
  beat_t             pk_beat;
  logic [PORT_W-1:0] pk_port;

  agg_packer u_pack (
    .clk, .rst_n, .cfg,
    .in_valid(bo_valid), .in_ready(bo_ready), .in_kv(bo_kv),
    .flush_done(bflush_done), .flush_done_tree(bflush_tree),
    .out_valid(pk_valid), .out_ready(pk_ready), .out_beat(pk_beat), .out_port(pk_port),
    .pkt_count(agg_pkt_count));

  logic [N_PORTS-1:0][47:0] oq_full;
  logic [2:0] fw_ready;
  packet_forwarding u_fwd (
    .clk, .rst_n,
    .in_valid({ack_valid, pk_valid, rt_valid}),
    .in_ready(fw_ready),
    .in_beat({ack_beat, pk_beat, rt_beat}),
    .in_port({ack_port, pk_port, rt_port}),
    .out_valid(tx_valid), .out_ready(tx_ready), .out_beat(tx_beat),
    .out_full_count(oq_full));
  assign rt_ready  = fw_ready[0];
  assign pk_ready  = fw_ready[1];
  assign ack_ready = fw_ready[2];
endmodule
