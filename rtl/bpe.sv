// bpe: back-end processing engine, shared by all front-end engines.
//
// It holds the second, much larger level of the aggregation hierarchy: a hash
// table in DRAM, reached through mem_ctrl. The DRAM is divided first among the
// trees (the same rough even division as the on-chip tables), then evenly
// among the 8 key-length groups; inside a group's part the buckets are laid
// out at a power-of-two stride that fits WAYS slots of that group's key
// length. The DRAM byte address of a bucket is
//     tree base + group base + bucket index * stride.
//
// Aggregation: a pair evicted by a front-end engine arrives from the
// scheduler. The engine reads the bucket, compares the key with all slots,
// aggregates on a hit, stores into the first free slot on a miss, and on a
// miss in a full bucket replaces the last slot and sends the old pair to the
// output (towards the tree's parent). Then it writes the bucket back. One pair
// is handled at a time, about DRAM latency + 5 cycles each; the front-end
// engines absorb the line-rate traffic and only their evictions reach here.
//
// Flush of a tree (flush_req from the configuration module): wait until the
// aggregation front end is quiet (front_quiet), start the flush of every
// front-end engine, keep aggregating their flushed pairs until all report
// done and the scheduler is empty, then sweep the tree's DRAM region: reads are
// issued back to back, every valid slot of a returned bucket is sent to the
// output and the bucket is written back empty. When the last pair has left,
// flush_done pulses so the packer can close the tree's final packet.
//
// The two-level hierarchy, the region addressing and the flush follow the
// paper; the one-at-a-time aggregation, the last-slot victim, the group
// stride rule and the flush handshake are this design's choices.
module bpe
  import switchagg_pkg::*;
#(
  parameter longint unsigned DRAM_BYTES = 64'd8589934592   // 8 GB
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  tree_cfg_t [N_TREES-1:0] cfg,
  // evicted pairs from the scheduler
  input  logic                    in_valid,
  output logic                    in_ready,
  input  kv_t                     in_kv,
  input  logic                    sched_busy,
  // result pairs to the packer
  output logic                    out_valid,
  input  logic                    out_ready,
  output kv_t                     out_kv,
  // flush control
  input  logic                    flush_req_valid,
  output logic                    flush_req_ready,
  input  logic [TREE_W-1:0]       flush_req_tree,
  input  logic                    front_quiet,
  output logic                    fpe_flush_start,
  output logic [TREE_W-1:0]       fpe_flush_tree,
  input  logic [N_GROUPS-1:0]     fpe_flush_done,
  output logic                    flush_done,
  output logic [TREE_W-1:0]       flush_done_tree,
  // memory controller
  output logic                    mc_cmd_valid,
  input  logic                    mc_cmd_ready,
  output logic                    mc_cmd_we,
  output logic [39:0]             mc_cmd_addr,
  output bucket_t                 mc_cmd_wdata,
  input  logic                    mc_rsp_valid,
  output logic                    mc_rsp_ready,
  input  bucket_t                 mc_rsp_data,
  // statistics
  output logic [31:0]             hit_count,
  output logic [31:0]             insert_count,
  output logic [31:0]             evict_count,
  output logic [31:0]             flushed_count
);
  localparam int unsigned LOG_DRAM = $clog2(DRAM_BYTES);

  // log2 of the bucket stride of a group: WAYS slots of (key + 6 bytes)
  function automatic int unsigned log_stride(input int unsigned g);
    int unsigned need, s;
    need = WAYS * (KEY_BASE * (g + 1) + 6);
    s = 0;
    for (int k = 15; k >= 0; k--) if ((32'd1 << k) >= need) s = k;
    return s;
  endfunction

  function automatic int unsigned log_grp(input tree_cfg_t c);
    return LOG_DRAM - (c.valid ? int'(c.shift) : 0) - $clog2(N_GROUPS);
  endfunction

  function automatic logic [39:0] bucket_addr(input tree_cfg_t c, input int unsigned g,
                                              input logic [39:0] idx);
    logic [39:0] tb;
    tb = c.valid ? (40'(c.slot) << (LOG_DRAM - int'(c.shift))) : 40'd0;
    return tb + (40'(g) << log_grp(c)) + (idx << log_stride(g));
  endfunction

  function automatic logic [39:0] last_idx(input tree_cfg_t c, input int unsigned g);
    return (40'd1 << (log_grp(c) - log_stride(g))) - 1;
  endfunction

  typedef enum logic [2:0] {A_IDLE, A_RD, A_WAIT, A_WR, A_OUT} astate_e;
  typedef enum logic [2:0] {F_NONE, F_FRONT, F_FWAIT, F_BWAIT, F_SWEEP, F_END} fstate_e;

  astate_e a_st;
  fstate_e f_st;
  kv_t     a_kv;
  logic [39:0] a_addr;
  bucket_t a_new;
  slot_t   a_victim;
  logic    a_evict;

  logic [TREE_W-1:0]   f_tree;
  logic [N_GROUPS-1:0] f_done_bits;
  logic [GRP_W-1:0]    ig, rg;
  logic [39:0]         iidx, ridx;
  logic                idone;
  bucket_t             sb;
  logic                sb_v, sb_any_orig;

  // ---------------- aggregation compare ----------------
  bucket_t cur;
  logic    hit, has_free;
  int      hit_w, free_w;
  logic [VAL_W-1:0] agg_a, agg_y;
  bucket_t new_b;
  always_comb begin
    cur = mc_rsp_data;
    hit = 1'b0; hit_w = 0; has_free = 1'b0; free_w = 0;
    for (int w = WAYS - 1; w >= 0; w--) begin
      if (cur[w].valid && cur[w].klen == a_kv.klen && cur[w].key == a_kv.key) begin
        hit = 1'b1; hit_w = w;
      end
      if (!cur[w].valid) begin has_free = 1'b1; free_w = w; end
    end
    agg_a = cur[hit_w].value;
  end

  always_comb begin
    new_b = cur;
    if (hit) new_b[hit_w].value = agg_y;
    else if (has_free) new_b[free_w] = '{valid: 1'b1, key: a_kv.key, klen: a_kv.klen, value: a_kv.value, op: a_kv.op};
    else new_b[WAYS-1] = '{valid: 1'b1, key: a_kv.key, klen: a_kv.klen, value: a_kv.value, op: a_kv.op};
  end

  agg_unit u_agg (.op(a_kv.op), .a(agg_a), .b(a_kv.value), .y(agg_y));

  // ---------------- sweep helpers ----------------
  logic sb_any;
  int   sb_w;
  always_comb begin
    sb_any = 1'b0; sb_w = 0;
    for (int w = WAYS - 1; w >= 0; w--) if (sb[w].valid) begin sb_any = 1'b1; sb_w = w; end
  end
  wire r_last = (rg == GRP_W'(N_GROUPS - 1)) && (ridx == last_idx(cfg[f_tree], int'(rg)));
  wire sweep_wr = (f_st == F_SWEEP) && sb_v && !sb_any && sb_any_orig;
  wire sweep_rd = (f_st == F_SWEEP) && !idone && !sweep_wr;

  wire agg_active = (f_st != F_SWEEP) && (f_st != F_END);
  assign in_ready = agg_active && a_st == A_IDLE;
  assign flush_req_ready = (f_st == F_NONE);
  assign fpe_flush_tree  = f_tree;

  // ---------------- memory command mux ----------------
  always_comb begin
    mc_cmd_valid = 1'b0; mc_cmd_we = 1'b0; mc_cmd_addr = a_addr; mc_cmd_wdata = a_new;
    mc_rsp_ready = 1'b0;
    if (agg_active) begin
      mc_cmd_valid = (a_st == A_RD) || (a_st == A_WR);
      mc_cmd_we    = (a_st == A_WR);
      mc_rsp_ready = (a_st == A_WAIT);
    end else if (f_st == F_SWEEP) begin
      if (sweep_wr) begin
        mc_cmd_valid = 1'b1; mc_cmd_we = 1'b1; mc_cmd_wdata = '0;
        mc_cmd_addr  = bucket_addr(cfg[f_tree], int'(rg), ridx);
      end else if (sweep_rd) begin
        mc_cmd_valid = 1'b1;
        mc_cmd_addr  = bucket_addr(cfg[f_tree], int'(ig), iidx);
      end
      mc_rsp_ready = !sb_v;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      a_st <= A_IDLE; f_st <= F_NONE;
      a_kv <= '0; a_addr <= '0; a_new <= '0; a_victim <= '0; a_evict <= 1'b0;
      f_tree <= '0; f_done_bits <= '0;
      ig <= '0; rg <= '0; iidx <= '0; ridx <= '0; idone <= 1'b0;
      sb <= '0; sb_v <= 1'b0; sb_any_orig <= 1'b0;
      out_valid <= 1'b0; out_kv <= '0;
      fpe_flush_start <= 1'b0; flush_done <= 1'b0; flush_done_tree <= '0;
      hit_count <= '0; insert_count <= '0; evict_count <= '0; flushed_count <= '0;
    end else begin
      fpe_flush_start <= 1'b0;
      flush_done      <= 1'b0;
      if (out_valid && out_ready) out_valid <= 1'b0;

      // ---------------- aggregation path ----------------
      unique case (a_st)
        A_IDLE: if (in_valid && in_ready) begin
          a_kv   <= in_kv;
          a_addr <= bucket_addr(cfg[in_kv.tree], int'(key_group(in_kv.klen)),
                     40'(key_hash(in_kv.key, in_kv.klen)) &
                     last_idx(cfg[in_kv.tree], int'(key_group(in_kv.klen))));
          a_st   <= A_RD;
        end
        A_RD:   if (mc_cmd_ready) a_st <= A_WAIT;
        A_WAIT: if (mc_rsp_valid) begin
          a_new    <= new_b;
          a_victim <= cur[WAYS-1];
          a_evict  <= !hit && !has_free;
          if (hit) hit_count <= hit_count + 1'b1;
          else if (has_free) insert_count <= insert_count + 1'b1;
          else evict_count <= evict_count + 1'b1;
          a_st <= A_WR;
        end
        A_WR:   if (mc_cmd_ready) a_st <= a_evict ? A_OUT : A_IDLE;
        A_OUT:  if (!out_valid || out_ready) begin
          out_valid <= 1'b1;
          out_kv    <= '{key: a_victim.key, klen: a_victim.klen, value: a_victim.value,
                         op: a_victim.op, tree: a_kv.tree};
          a_st      <= A_IDLE;
        end
        default: a_st <= A_IDLE;
      endcase

      // ---------------- flush sequence ----------------
      unique case (f_st)
        F_NONE: if (flush_req_valid) begin
          f_tree <= flush_req_tree;
          f_st   <= F_FRONT;
        end
        F_FRONT: if (front_quiet) begin
          fpe_flush_start <= 1'b1;
          f_done_bits     <= '0;
          f_st            <= F_FWAIT;
        end
        F_FWAIT: begin
          f_done_bits <= f_done_bits | fpe_flush_done;
          if (&(f_done_bits | fpe_flush_done)) f_st <= F_BWAIT;
        end
        F_BWAIT: if (!sched_busy && !in_valid && a_st == A_IDLE) begin
          ig <= '0; iidx <= '0; rg <= '0; ridx <= '0; idone <= 1'b0; sb_v <= 1'b0;
          f_st <= F_SWEEP;
        end
        F_SWEEP: begin
          // issue reads
          if (sweep_rd && mc_cmd_ready) begin
            if (iidx == last_idx(cfg[f_tree], int'(ig))) begin
              iidx <= '0;
              if (ig == GRP_W'(N_GROUPS - 1)) idone <= 1'b1;
              else ig <= ig + 1'b1;
            end else begin
              iidx <= iidx + 1'b1;
            end
          end
          // take a returned bucket
          if (mc_rsp_valid && mc_rsp_ready) begin
            sb <= mc_rsp_data; sb_v <= 1'b1;
            sb_any_orig <= 1'b0;
            for (int w = 0; w < int'(WAYS); w++)
              if (mc_rsp_data[w].valid) sb_any_orig <= 1'b1;
          end
          // drain it
          if (sb_v) begin
            if (sb_any) begin
              if (!out_valid || out_ready) begin
                out_valid <= 1'b1;
                out_kv    <= '{key: sb[sb_w].key, klen: sb[sb_w].klen, value: sb[sb_w].value,
                               op: sb[sb_w].op, tree: f_tree};
                sb[sb_w].valid <= 1'b0;
                flushed_count <= flushed_count + 1'b1;
              end
            end else if (!sb_any_orig || mc_cmd_ready) begin
              sb_v <= 1'b0;
              if (r_last) f_st <= F_END;
              else if (ridx == last_idx(cfg[f_tree], int'(rg))) begin
                ridx <= '0; rg <= rg + 1'b1;
              end else ridx <= ridx + 1'b1;
            end
          end
        end
        F_END: if (!out_valid) begin
          flush_done      <= 1'b1;
          flush_done_tree <= f_tree;
          f_st            <= F_NONE;
        end
        default: f_st <= F_NONE;
      endcase
    end
  end
endmodule
