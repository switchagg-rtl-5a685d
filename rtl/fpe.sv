// fpe: front-end processing engine for one key-length group.
//
// Each engine owns an on-chip hash table whose slots are just wide enough for
// the keys of its group (KB = 8*(GROUP+1) bytes, shorter keys zero-padded).
// The table is BUCKETS buckets of WAYS slots; BUCKETS is the largest power of
// two that fits MEM_BYTES of storage. For every arriving pair the engine
//   1. hashes the key and picks the bucket inside the tree's memory region
//      (the region is the tree's share of the table set by the
//      configuration module),
//   2. reads the bucket,
//   3. compares the key with all slots in parallel and then
//        - on a hit aggregates the value into the slot (agg_unit),
//        - on a miss stores the pair in the first free slot,
//        - on a miss in a full bucket stores the pair in the last slot and
//          evicts the pair that was there towards the back-end engine.
// One pair is accepted per cycle; back-to-back pairs that hit the same bucket
// see the previous write through a bypass register. The pipeline stalls only
// while an evicted pair waits for the scheduler (ev_ready low).
//
// Flush: on flush_start the engine stops taking pairs, drains its pipeline,
// then sweeps the tree's region bucket by bucket, sends every stored pair to
// the back-end engine and clears the bucket; flush_done pulses at the end.
// After reset the engine clears its whole table (one bucket per cycle) before
// it accepts the first pair.
//
// Timing: a pair accepted in cycle t is hashed in t, read in t+1 and written
// (or evicted) in t+2. The hash/read/compare structure, the parallel compare,
// the eviction on collision and the flush follow the paper; the last-slot
// victim (as drawn in the paper's eviction example), the bypass and the clear
// after reset are this design's choices. The paper's measured stage delays
// (10 cycles hash, 18 aggregate) come from its own implementation and are not
// reproduced.
module fpe
  import switchagg_pkg::*;
#(
  parameter int unsigned  GROUP     = 0,
  parameter longint unsigned MEM_BYTES = 64'd4194304,  // 32 MB over 8 engines
  parameter int unsigned  MAX_BUCKETS = 0                 // 0: no cap (test use)
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  tree_cfg_t [N_TREES-1:0] cfg,
  input  logic                    in_valid,
  output logic                    in_ready,
  input  kv_t                     in_kv,
  output logic                    ev_valid,
  input  logic                    ev_ready,
  output kv_t                     ev_kv,
  input  logic                    flush_start,
  input  logic [TREE_W-1:0]       flush_tree,
  output logic                    flush_done,
  output logic                    idle,
  output logic [31:0]             hit_count,
  output logic [31:0]             insert_count,
  output logic [31:0]             evict_count,
  output logic [31:0]             bypass_count
);
  localparam int unsigned KB = KEY_BASE * (GROUP + 1);
  typedef struct packed {
    logic              valid;
    logic [KB*8-1:0]   key;
    logic [KLEN_W-1:0] klen;
    logic [VAL_W-1:0]  value;
    agg_op_e           op;
  } fslot_t;
  typedef fslot_t [WAYS-1:0] fbucket_t;

  localparam int unsigned     SLOT_BYTES = ($bits(fslot_t) + 7) / 8;
  localparam longint unsigned BKT_BYTES  = 64'(SLOT_BYTES) * 64'(WAYS);
  localparam int unsigned AW_FIT = $clog2(MEM_BYTES / BKT_BYTES + 1) - 1;
  localparam int unsigned AW = (MAX_BUCKETS != 0 && $clog2(MAX_BUCKETS) < AW_FIT)
                               ? $clog2(MAX_BUCKETS) : AW_FIT;
  localparam int unsigned BUCKETS = 1 << AW;

  fbucket_t mem [BUCKETS];

  typedef enum logic [2:0] {M_CLEAR, M_RUN, M_DRAIN, M_F_RD, M_F_WAIT, M_F_EMIT} mode_e;
  mode_e mode;

  // pipeline
  logic          s1_v, s2_v;
  kv_t           s1_kv, s2_kv;
  logic [AW-1:0] s1_idx, s2_idx;
  fbucket_t      rd_q;
  logic          lw_v;
  logic [AW-1:0] lw_idx;
  fbucket_t      lw_data;

  // flush state
  logic [AW-1:0] f_idx, f_last;
  logic [TREE_W-1:0] f_tree;
  fbucket_t      f_bkt;
  logic          f_pend;

  wire adv = !(ev_valid && !ev_ready);
  assign in_ready = (mode == M_RUN) && adv && !f_pend;
  assign idle     = (mode == M_RUN) && !s1_v && !s2_v && !ev_valid && !f_pend;

  // region of a tree: slot * size .. slot * size + size - 1, size = BUCKETS >> shift
  function automatic logic [AW-1:0] region_base(input tree_cfg_t c);
    if (!c.valid) return '0;
    return AW'(({{AW{1'b0}}, c.slot}) << (AW - int'(c.shift)));
  endfunction
  function automatic logic [AW-1:0] region_mask(input tree_cfg_t c);
    if (!c.valid) return '1;
    return AW'(({{AW{1'b0}}, 1'b1} << (AW - int'(c.shift))) - {{AW{1'b0}}, 1'b1});
  endfunction

  // stage 1 index
  logic [HASH_W-1:0] h_in;
  logic [AW-1:0]     idx_in;
  always_comb begin
    h_in   = key_hash(in_kv.key, in_kv.klen);
    idx_in = region_base(cfg[in_kv.tree]) | (AW'(h_in) & region_mask(cfg[in_kv.tree]));
  end

  // stage 3 compare
  fbucket_t cur_b, new_b;
  logic     hit, has_free, byp;
  int       hit_w, free_w;
  logic [VAL_W-1:0] agg_a, agg_y;
  fslot_t   victim;
  logic [KB*8-1:0] s2_key;
  assign s2_key = s2_kv.key[KB*8-1:0];

  always_comb begin
    byp   = lw_v && lw_idx == s2_idx;
    cur_b = byp ? lw_data : rd_q;
    hit = 1'b0; hit_w = 0; has_free = 1'b0; free_w = 0;
    for (int w = WAYS - 1; w >= 0; w--) begin
      if (cur_b[w].valid && cur_b[w].klen == s2_kv.klen && cur_b[w].key == s2_key) begin
        hit = 1'b1; hit_w = w;
      end
      if (!cur_b[w].valid) begin
        has_free = 1'b1; free_w = w;
      end
    end
    agg_a  = cur_b[hit_w].value;
    victim = cur_b[WAYS-1];
    new_b  = cur_b;
    if (hit) begin
      new_b[hit_w].value = agg_y;
    end else if (has_free) begin
      new_b[free_w] = '{valid: 1'b1, key: s2_key, klen: s2_kv.klen, value: s2_kv.value, op: s2_kv.op};
    end else begin
      new_b[WAYS-1] = '{valid: 1'b1, key: s2_key, klen: s2_kv.klen, value: s2_kv.value, op: s2_kv.op};
    end
  end

  agg_unit u_agg (.op(s2_kv.op), .a(agg_a), .b(s2_kv.value), .y(agg_y));

  // first valid slot of the bucket being flushed
  logic f_any;
  int   f_w;
  always_comb begin
    f_any = 1'b0; f_w = 0;
    for (int w = WAYS - 1; w >= 0; w--) begin
      if (f_bkt[w].valid) begin f_any = 1'b1; f_w = w; end
    end
  end

  // memory ports
  logic          rd_en, wr_en;
  logic [AW-1:0] rd_idx, wr_idx;
  fbucket_t      wr_data;
  always_comb begin
    rd_en = 1'b0; rd_idx = s1_idx;
    wr_en = 1'b0; wr_idx = s2_idx; wr_data = new_b;
    unique case (mode)
      M_CLEAR: begin wr_en = 1'b1; wr_idx = f_idx; wr_data = '0; end
      M_RUN, M_DRAIN: begin
        rd_en = adv && s1_v;
        wr_en = adv && s2_v;
      end
      M_F_RD: begin rd_en = 1'b1; rd_idx = f_idx; end
      M_F_EMIT: begin
        if (!f_any) begin wr_en = 1'b1; wr_idx = f_idx; wr_data = '0; end
      end
      default: ;
    endcase
  end

  always_ff @(posedge clk) begin
    if (wr_en) mem[wr_idx] <= wr_data;
    if (rd_en) rd_q <= mem[rd_idx];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      mode <= M_CLEAR;
      s1_v <= 1'b0; s2_v <= 1'b0;
      s1_kv <= '0; s2_kv <= '0; s1_idx <= '0; s2_idx <= '0;
      lw_v <= 1'b0; lw_idx <= '0; lw_data <= '0;
      ev_valid <= 1'b0; ev_kv <= '0;
      f_idx <= '0; f_last <= '0; f_tree <= '0; f_bkt <= '0; f_pend <= 1'b0;
      flush_done <= 1'b0;
      hit_count <= '0; insert_count <= '0; evict_count <= '0; bypass_count <= '0;
    end else begin
      flush_done <= 1'b0;
      if (ev_valid && ev_ready) ev_valid <= 1'b0;
      if (flush_start) begin
        f_pend <= 1'b1;
        f_tree <= flush_tree;
      end

      unique case (mode)
        M_CLEAR: begin
          f_idx <= f_idx + 1'b1;
          if (f_idx == AW'(BUCKETS - 1)) mode <= M_RUN;
        end
        M_RUN, M_DRAIN: begin
          if (adv) begin
            // stage 3
            if (s2_v) begin
              lw_v <= 1'b1; lw_idx <= s2_idx; lw_data <= new_b;
              if (byp) bypass_count <= bypass_count + 1'b1;
              if (hit) hit_count <= hit_count + 1'b1;
              else if (has_free) insert_count <= insert_count + 1'b1;
              else begin
                evict_count <= evict_count + 1'b1;
                ev_valid <= 1'b1;
                ev_kv    <= '{key: (KEY_MAX*8)'(victim.key), klen: victim.klen,
                              value: victim.value, op: victim.op, tree: s2_kv.tree};
              end
            end
            // stage 2
            s2_v <= s1_v; s2_kv <= s1_kv; s2_idx <= s1_idx;
            // stage 1
            s1_v <= in_valid && in_ready;
            if (in_valid && in_ready) begin
              s1_kv <= in_kv; s1_idx <= idx_in;
            end
          end
          if ((f_pend || flush_start) && mode == M_RUN) mode <= M_DRAIN;
          if (mode == M_DRAIN && !s1_v && !s2_v && !ev_valid) begin
            f_idx  <= region_base(cfg[f_tree]);
            f_last <= region_base(cfg[f_tree]) | region_mask(cfg[f_tree]);
            lw_v   <= 1'b0;
            mode   <= M_F_RD;
          end
        end
        M_F_RD:   mode <= M_F_WAIT;
        M_F_WAIT: begin f_bkt <= rd_q; mode <= M_F_EMIT; end
        M_F_EMIT: begin
          if (f_any) begin
            if (!ev_valid || ev_ready) begin
              ev_valid <= 1'b1;
              ev_kv    <= '{key: (KEY_MAX*8)'(f_bkt[f_w].key), klen: f_bkt[f_w].klen,
                            value: f_bkt[f_w].value, op: f_bkt[f_w].op, tree: f_tree};
              f_bkt[f_w].valid <= 1'b0;
            end
          end else if (f_idx == f_last) begin
            if (!ev_valid) begin
              mode       <= M_RUN;
              f_pend     <= 1'b0;
              flush_done <= 1'b1;
            end
          end else begin
            f_idx <= f_idx + 1'b1;
            mode  <= M_F_RD;
          end
        end
        default: mode <= M_RUN;
      endcase
    end
  end
endmodule
