// agg_packer: builds the aggregation packets that carry a tree's results to
// the next hop (the tree's parent).
//
// Result pairs of one tree are collected until the next pair would not fit in
// a packet (PKT_BYTES including the 16-byte L2 beat and the 4-byte
// aggregation header), MAX_PAIRS pairs are held, a pair of another tree
// arrives, or the back-end engine reports the end of the tree's flush. Then
// the packet is sent: an L2 beat of type aggregation, then the header
// <TreeID, EoT, Operation, NumPairs> and the pairs <KeyLength, 4, Key, Value>
// packed byte by byte into 16-byte beats (the same format the payload
// analyzer reads). The packet that closes a flush has EoT set, so the parent
// can count its children's ends; it is sent even when it holds no pair.
// The output port is the tree's parent port from the configuration module.
//
// Interface: pair stream in (valid/ready), flush_done pulse in, beat stream out
// (valid/ready) with its port. While a packet is being sent no new pair is
// taken. The packet format is the paper's; the packet size rule is this
// design's choice.
module agg_packer
  import switchagg_pkg::*;
#(
  parameter int unsigned PKT_BYTES = 1500,
  parameter int unsigned MAX_PAIRS = 64
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  tree_cfg_t [N_TREES-1:0] cfg,
  input  logic                    in_valid,
  output logic                    in_ready,
  input  kv_t                     in_kv,
  input  logic                    flush_done,
  input  logic [TREE_W-1:0]       flush_done_tree,
  output logic                    out_valid,
  input  logic                    out_ready,
  output beat_t                   out_beat,
  output logic [PORT_W-1:0]       out_port,
  output logic [31:0]             pkt_count
);
  localparam int unsigned BUF_B = 128;
  localparam int unsigned CW    = $clog2(BUF_B) + 1;
  localparam int unsigned PW    = $clog2(MAX_PAIRS) + 1;
  localparam int unsigned BUDGET = PKT_BYTES - BEAT_B - 4;

  typedef enum logic [1:0] {P_COLLECT, P_L2, P_BODY} pstate_e;
  pstate_e st;

  kv_t               pairs [MAX_PAIRS];
  logic [PW-1:0]     n_pairs, n_sent;
  logic [15:0]       bytes;
  logic [TREE_W-1:0] tree_q;
  agg_op_e           op_q;
  logic              eot_q;
  logic              eot_pend;
  logic [TREE_W-1:0] eot_tree;
  logic [BUF_B*8-1:0] buffer;
  logic [CW-1:0]     cnt;
  logic              hdr_done;

  wire [15:0] in_len = 16'(in_kv.klen) + 16'd6;
  wire same_tree = (n_pairs == '0) || (in_kv.tree == tree_q);
  wire fits      = same_tree && (n_pairs < PW'(MAX_PAIRS)) && (bytes + in_len <= 16'(BUDGET));
  wire close_eot = eot_pend && (n_pairs == '0 || eot_tree == tree_q);
  wire close_now = (st == P_COLLECT) && (eot_pend || (in_valid && !fits));

  assign in_ready = (st == P_COLLECT) && !eot_pend && fits;

  // bytes of one pair, low byte first
  function automatic logic [(KEY_MAX+6)*8-1:0] pair_bytes(input kv_t kv);
    logic [(KEY_MAX+6)*8-1:0] b;
    b = '0;
    b[7:0]  = 8'(kv.klen);
    b[15:8] = 8'd4;
    b[16 +: KEY_MAX*8] = kv.key;
    b = b | (((KEY_MAX+6)*8)'(kv.value) << ((int'(kv.klen) + 2) * 8));
    return b;
  endfunction

  wire all_pushed = hdr_done && (n_sent == n_pairs);
  wire can_push   = cnt <= CW'(BUF_B - (KEY_MAX + 6));

  always_comb begin
    out_valid = 1'b0;
    out_beat  = '0;
    out_port  = cfg[tree_q].parent;
    if (st == P_L2) begin
      out_valid = 1'b1;
      out_beat.sop = 1'b1;
      out_beat.data[14*8 +: 8] = PT_AGG;
    end else if (st == P_BODY) begin
      out_valid     = (cnt >= CW'(BEAT_B)) || (all_pushed && cnt != '0);
      out_beat.data = buffer[DATA_W-1:0];
      out_beat.eop  = all_pushed && cnt <= CW'(BEAT_B);
    end
  end

  always_ff @(posedge clk) begin
    if (in_valid && in_ready) pairs[n_pairs[PW-2:0]] <= in_kv;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= P_COLLECT;
      n_pairs <= '0; n_sent <= '0; bytes <= '0;
      tree_q <= '0; op_q <= OP_SUM; eot_q <= 1'b0;
      eot_pend <= 1'b0; eot_tree <= '0;
      buffer <= '0; cnt <= '0; hdr_done <= 1'b0;
      pkt_count <= '0;
    end else begin
      if (flush_done) begin
        eot_pend <= 1'b1;
        eot_tree <= flush_done_tree;
      end
      unique case (st)
        P_COLLECT: begin
          if (in_valid && in_ready) begin
            n_pairs <= n_pairs + 1'b1;
            bytes   <= bytes + in_len;
            tree_q  <= in_kv.tree;
            op_q    <= in_kv.op;
          end else if (close_now) begin
            eot_q <= close_eot;
            if (close_eot) begin
              eot_pend <= flush_done;
              tree_q   <= eot_tree;
            end
            n_sent   <= '0;
            hdr_done <= 1'b0;
            cnt      <= '0;
            buffer   <= '0;
            st       <= P_L2;
          end
        end
        P_L2: if (out_ready) st <= P_BODY;
        P_BODY: begin
          logic [BUF_B*8-1:0] b_n;
          logic [CW-1:0]      c_n;
          b_n = buffer;
          c_n = cnt;
          if (out_valid && out_ready) begin
            b_n = b_n >> DATA_W;
            c_n = (c_n > CW'(BEAT_B)) ? c_n - CW'(BEAT_B) : '0;
            if (out_beat.eop) begin
              st        <= P_COLLECT;
              n_pairs   <= '0;
              bytes     <= '0;
              pkt_count <= pkt_count + 1'b1;
            end
          end
          if (!hdr_done) begin
            b_n = b_n | ((BUF_B*8)'({8'(n_pairs), 6'd0, op_q, 7'd0, eot_q, 8'(tree_q)}) << (int'(c_n) * 8));
            c_n = c_n + CW'(4);
            hdr_done <= 1'b1;
          end else if (!all_pushed && can_push) begin
            kv_t kv;
            kv  = pairs[n_sent[PW-2:0]];
            b_n = b_n | ((BUF_B*8)'(pair_bytes(kv)) << (int'(c_n) * 8));
            c_n = c_n + CW'(int'(kv.klen) + 6);
            n_sent <= n_sent + 1'b1;
          end
          buffer <= b_n;
          cnt    <= c_n;
        end
        default: st <= P_COLLECT;
      endcase
    end
  end
endmodule
