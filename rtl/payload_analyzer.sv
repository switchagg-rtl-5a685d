// payload_analyzer: turns the payload of an aggregation packet into a stream
// of key-value pairs, one pair per cycle, each tagged with its key-length
// group so the crossbar can send it to the right front-end engine.
//
// How it works: the 16-byte beats of the packet are appended to a 128-byte
// byte-aligned buffer. Bytes leave the buffer from the bottom: first the
// 4-byte header <TreeID, EoT, Operation, NumPairs>, then one pair at a time
// <KeyLength, ValueLength, Key, Value> once the whole pair is in the buffer.
// The key is zero-padded to 64 bytes. Pairs of any key length from 1 to 64
// bytes can follow each other in any order; a pair may straddle beats. After
// NumPairs pairs the rest of the packet is discarded. A pair with key length
// 0 or above 64, or a value length other than 4, ends parsing of the packet
// and is counted in err_count. When the last pair of a packet whose EoT flag
// is set has been handed on (or at once if it has no pairs), eot_valid pulses
// for one cycle with the tree.
//
// Interface: beat stream in (valid/ready, starting with the L2 beat), pair
// stream out (valid/ready, output register). A beat is accepted whenever the
// buffer has 16 free bytes, so for pairs of 16 bytes or more the analyzer
// keeps up with a beat per cycle. Variable-length pairs in the payload and the
// grouping by key length follow the paper; the buffer is this design's own
// way of doing it.
module payload_analyzer
  import switchagg_pkg::*;
(
  input  logic             clk,
  input  logic             rst_n,
  input  logic             in_valid,
  output logic             in_ready,
  input  beat_t            in_beat,
  output logic             out_valid,
  input  logic             out_ready,
  output kv_t              out_kv,
  output logic [GRP_W-1:0] out_group,
  output logic             eot_valid,
  output logic [TREE_W-1:0] eot_tree,
  output logic [31:0]      err_count
);
  localparam int unsigned BUF_B = 128;
  localparam int unsigned CW    = $clog2(BUF_B) + 1;

  typedef enum logic [1:0] {ST_L2, ST_HDR, ST_PAIRS, ST_DRAIN} state_e;

  state_e            state;
  logic [BUF_B*8-1:0] buffer;
  logic [CW-1:0]     cnt;
  logic              eop_seen;
  logic [7:0]        pairs_left;
  logic [TREE_W-1:0] tree_q;
  logic              eot_q;
  agg_op_e           op_q;

  // current pair in the buffer
  wire [7:0] klen_b = buffer[7:0];
  wire [7:0] vlen_b = buffer[15:8];
  wire       bad    = (klen_b == 8'd0) || (klen_b > 8'(KEY_MAX)) || (vlen_b != 8'd4);
  wire [CW-1:0] plen = CW'(klen_b) + CW'(6);

  logic [KEY_MAX*8-1:0] key_c;
  logic [VAL_W-1:0]     val_c;
  always_comb begin
    logic [BUF_B*8-1:0] sh;
    key_c = buffer[16 +: KEY_MAX*8];
    for (int i = 0; i < int'(KEY_MAX); i++) begin
      if (i >= int'(klen_b)) key_c[8*i +: 8] = 8'd0;
    end
    sh    = buffer >> ((int'(klen_b) + 2) * 8);
    val_c = sh[VAL_W-1:0];
  end

  wire out_free = !out_valid || out_ready;
  wire can_emit = (state == ST_PAIRS) && !bad && (cnt >= plen) && out_free;
  wire hdr_take = (state == ST_HDR) && (cnt >= CW'(4));

  assign in_ready = (state == ST_L2) || (state == ST_DRAIN) ||
                    (!eop_seen && (cnt <= CW'(BUF_B - BEAT_B)));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state      <= ST_L2;
      buffer     <= '0;
      cnt        <= '0;
      eop_seen   <= 1'b0;
      pairs_left <= '0;
      tree_q     <= '0;
      eot_q      <= 1'b0;
      op_q       <= OP_SUM;
      out_valid  <= 1'b0;
      out_kv     <= '0;
      out_group  <= '0;
      eot_valid  <= 1'b0;
      eot_tree   <= '0;
      err_count  <= '0;
    end else begin
      logic [BUF_B*8-1:0] b_n;
      logic [CW-1:0]      c_n;
      logic [CW-1:0]      consume;
      state_e             s_n;
      logic               accept;
      logic               eop_n;

      b_n       = buffer;
      c_n       = cnt;
      consume   = '0;
      s_n       = state;
      eop_n     = eop_seen;
      accept    = in_valid && in_ready;
      eot_valid <= 1'b0;
      if (out_valid && out_ready) out_valid <= 1'b0;

      unique case (state)
        ST_L2: begin
          if (accept && in_beat.sop && !in_beat.eop) begin
            s_n   = ST_HDR;
            eop_n = 1'b0;
            c_n   = '0;
            b_n   = '0;
          end
        end
        ST_HDR: begin
          if (hdr_take) begin
            consume = CW'(4);
            tree_q  <= buffer[TREE_W-1:0];
            eot_q   <= buffer[8];
            op_q    <= agg_op_e'(buffer[17:16]);
            pairs_left <= buffer[31:24];
            if (buffer[31:24] == 8'd0) begin
              s_n = ST_DRAIN;
              if (buffer[8]) begin
                eot_valid <= 1'b1;
                eot_tree  <= buffer[TREE_W-1:0];
              end
            end else begin
              s_n = ST_PAIRS;
            end
          end
        end
        ST_PAIRS: begin
          if (cnt >= CW'(2) && bad) begin
            s_n = ST_DRAIN;
            err_count <= err_count + 1'b1;
          end else if (can_emit) begin
            consume          = plen;
            out_valid        <= 1'b1;
            out_kv.key       <= key_c;
            out_kv.klen      <= klen_b[KLEN_W-1:0];
            out_kv.value     <= val_c;
            out_kv.op        <= op_q;
            out_kv.tree      <= tree_q;
            out_group        <= key_group(klen_b[KLEN_W-1:0]);
            pairs_left       <= pairs_left - 1'b1;
            if (pairs_left == 8'd1) begin
              s_n = ST_DRAIN;
              if (eot_q) begin
                eot_valid <= 1'b1;
                eot_tree  <= tree_q;
              end
            end
          end
        end
        default: ;  // ST_DRAIN handled below
      endcase

      // append the accepted beat while parsing
      b_n = b_n >> (int'(consume) * 8);
      c_n = c_n - consume;
      if (accept && (state == ST_HDR || state == ST_PAIRS)) begin
        b_n = b_n | ({{(BUF_B*8-DATA_W){1'b0}}, in_beat.data} << (int'(c_n) * 8));
        c_n = c_n + CW'(BEAT_B);
        if (in_beat.eop) eop_n = 1'b1;
      end

      // leaving the packet: drop the rest until its last beat
      if (s_n == ST_DRAIN) begin
        c_n = '0;
        b_n = '0;
        if (eop_n || (state == ST_DRAIN && accept && in_beat.eop)) begin
          s_n   = ST_L2;
          eop_n = 1'b0;
        end
      end

      buffer   <= b_n;
      cnt      <= c_n;
      state    <= s_n;
      eop_seen <= eop_n;
    end
  end
endmodule
