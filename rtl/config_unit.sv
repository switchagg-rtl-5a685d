// config_unit: the switch's configuration module.
//
// Keeps, for every aggregation tree, the number of children that feed it, the
// port towards its parent and its share of the engines' memory. It learns them
// from Configure packets sent by the controller and answers each with an Ack
// (type 1) packet back out of the port the Configure packet came in on.
//
// Configure payload (from beat 1): byte 0 = number of trees, bytes 1-3
// reserved, then one 4-byte entry per tree <TreeID, NumChildren, ParentPort,
// reserved>, four entries per beat. A new Configure packet replaces the whole
// table. Memory is divided evenly and roughly: with n trees every tree owns
// 1/2^ceil(log2 n) of each engine's table, and the entry's position in the
// list selects which part (cfg[t].slot, cfg[t].shift).
//
// It also decides when a tree is finished: every payload analyzer reports the
// end-of-task flag (EoT) of a packet with the packet's tree; once as many EoT
// as the tree has children have arrived, a flush request for the tree is
// raised (flush_valid/flush_ready handshake) and the count restarts.
//
// The paper gives the two tasks (memory division, child number and forwarding
// port per tree); the byte layout, the parent-port byte added to each entry
// and the power-of-two division are this design's choices.
module config_unit
  import switchagg_pkg::*;
(
  input  logic                        clk,
  input  logic                        rst_n,
  // Configure packets
  input  logic                        in_valid,
  output logic                        in_ready,
  input  beat_t                       in_beat,
  input  logic [PORT_W-1:0]           in_port,
  // configuration table
  output tree_cfg_t [N_TREES-1:0]     cfg,
  // end-of-task reports from the payload analyzers
  input  logic [N_PORTS-1:0]          eot_valid,
  input  logic [N_PORTS-1:0][TREE_W-1:0] eot_tree,
  // flush requests
  output logic                        flush_valid,
  input  logic                        flush_ready,
  output logic [TREE_W-1:0]           flush_tree,
  // Ack packets
  output logic                        ack_valid,
  input  logic                        ack_ready,
  output beat_t                       ack_beat,
  output logic [PORT_W-1:0]           ack_port
);
  logic [7:0]  beat_idx;
  logic [7:0]  n_trees;
  logic [47:0] src_mac;
  logic [7:0]  eot_cnt [N_TREES];
  logic [N_TREES-1:0] flush_pend;

  assign in_ready = !ack_valid;

  function automatic logic [TREE_W:0] ceil_log2(input logic [7:0] n);
    logic [TREE_W:0] r;
    r = '0;
    for (int k = 0; k <= int'(TREE_W); k++) begin
      if ((32'(n) > (32'd1 << k))) r = (TREE_W + 1)'(k + 1);
    end
    return r;
  endfunction

  // Pick the lowest pending flush.
  always_comb begin
    flush_valid = |flush_pend;
    flush_tree  = '0;
    for (int t = N_TREES - 1; t >= 0; t--) begin
      if (flush_pend[t]) flush_tree = TREE_W'(t);
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      beat_idx   <= '0;
      n_trees    <= '0;
      src_mac    <= '0;
      cfg        <= '0;
      flush_pend <= '0;
      ack_valid  <= 1'b0;
      ack_beat   <= '0;
      ack_port   <= '0;
      for (int t = 0; t < int'(N_TREES); t++) eot_cnt[t] <= '0;
    end else begin
      // ---------------- Configure packet parsing ----------------
      if (in_valid && in_ready) begin
        beat_idx <= in_beat.eop ? 8'd0 : beat_idx + 1'b1;
        if (in_beat.sop) begin
          src_mac <= in_beat.data[95:48];
          for (int t = 0; t < int'(N_TREES); t++) cfg[t].valid <= 1'b0;
        end else begin
          logic [7:0] nt;
          nt = (beat_idx == 8'd1) ? in_beat.data[7:0] : n_trees;
          if (beat_idx == 8'd1) n_trees <= nt;
          for (int j = 0; j < 4; j++) begin
            logic [31:0] e;
            logic [7:0]  tid;
            int          eidx;
            eidx = (int'(beat_idx) - 1) * 4 + j - 1;
            e    = in_beat.data[32*j +: 32];
            tid  = e[7:0];
            if (eidx >= 0 && eidx < int'(nt) && tid < 8'(N_TREES)) begin
              cfg[tid[TREE_W-1:0]].valid    <= 1'b1;
              cfg[tid[TREE_W-1:0]].children <= e[15:8];
              cfg[tid[TREE_W-1:0]].parent   <= e[16 +: PORT_W];
              cfg[tid[TREE_W-1:0]].slot     <= TREE_W'(eidx);
              cfg[tid[TREE_W-1:0]].shift    <= ceil_log2(nt);
              eot_cnt[tid[TREE_W-1:0]]      <= '0;
            end
          end
        end
        if (in_beat.eop) begin
          ack_valid <= 1'b1;
          ack_port  <= in_port;
          ack_beat.sop  <= 1'b1;
          ack_beat.eop  <= 1'b1;
          ack_beat.data <= '0;
          ack_beat.data[47:0]     <= in_beat.sop ? in_beat.data[95:48] : src_mac;
          ack_beat.data[14*8 +: 8] <= PT_ACK1;
        end
      end
      if (ack_valid && ack_ready) ack_valid <= 1'b0;

      // ---------------- EoT counting ----------------
      for (int t = 0; t < int'(N_TREES); t++) begin
        logic [7:0] inc;
        logic [7:0] nxt;
        inc = '0;
        for (int p = 0; p < int'(N_PORTS); p++) begin
          if (eot_valid[p] && eot_tree[p] == TREE_W'(t)) inc = inc + 1'b1;
        end
        nxt = eot_cnt[t] + inc;
        if (inc != 0) begin
          if (cfg[t].valid && nxt >= cfg[t].children) begin
            eot_cnt[t]    <= '0;
            flush_pend[t] <= 1'b1;
          end else begin
            eot_cnt[t] <= nxt;
          end
        end
      end
      if (flush_valid && flush_ready) flush_pend[flush_tree] <= 1'b0;
    end
  end
endmodule
