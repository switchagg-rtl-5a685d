// tb_util_pkg: packet building and parsing helpers shared by the testbenches.
// Byte i of a beat is data[8i+7:8i]; beat 0 is the L2 header with the packet
// type in byte 14.
package tb_util_pkg;
  import switchagg_pkg::*;

  typedef byte unsigned bq_t[$];

  typedef struct {
    int          klen;
    logic [511:0] key;
    logic [31:0] val;
  } pair_t;

  function automatic void push_l2(ref bq_t q, input logic [47:0] dst, input logic [7:0] ptype);
    for (int i = 0; i < 6; i++) q.push_back(dst[8*i +: 8]);
    for (int i = 0; i < 6; i++) q.push_back(8'h50 + 8'(i));
    q.push_back(8'h88); q.push_back(8'hB5);
    q.push_back(ptype); q.push_back(8'h00);
  endfunction

  function automatic void push_pair(ref bq_t q, input pair_t p);
    q.push_back(8'(p.klen)); q.push_back(8'd4);
    for (int i = 0; i < p.klen; i++) q.push_back(p.key[8*i +: 8]);
    for (int i = 0; i < 4; i++) q.push_back(p.val[8*i +: 8]);
  endfunction

  // Deterministic key bytes for key number id of length klen, zero padded.
  function automatic logic [511:0] make_key(input int id, input int klen);
    logic [511:0] k;
    k = '0;
    for (int i = 0; i < klen; i++) k[8*i +: 8] = 8'((id * 7 + i * 13 + (id >> 8) * 3 + 1) & 255);
    k[7:0]  = 8'(id & 255);
    if (klen > 1) k[15:8] = 8'((id >> 8) & 255);
    return k;
  endfunction

  function automatic void agg_packet(ref bq_t q, input int tree, input bit eot, input int op,
                                     input pair_t ps[$]);
    push_l2(q, 48'h0000_0000_00AA, PT_AGG);
    q.push_back(8'(tree)); q.push_back(8'(eot)); q.push_back(8'(op)); q.push_back(8'(ps.size()));
    foreach (ps[i]) push_pair(q, ps[i]);
  endfunction

  function automatic void to_beats(input bq_t q, ref beat_t b[$]);
    int n;
    n = (q.size() + 15) / 16;
    for (int j = 0; j < n; j++) begin
      beat_t x;
      x = '0;
      for (int i = 0; i < 16; i++) if (16 * j + i < q.size()) x.data[8*i +: 8] = q[16*j + i];
      x.sop = (j == 0);
      x.eop = (j == n - 1);
      b.push_back(x);
    end
  endfunction

  // Parse an aggregation packet's bytes. Returns 0 if malformed.
  function automatic bit parse_agg(input bq_t q, output int tree, output bit eot, output int op,
                                   ref pair_t ps[$]);
    int pos, n;
    tree = 0; eot = 0; op = 0;
    if (q.size() < 20 || q[14] != PT_AGG) return 0;
    tree = q[16]; eot = q[17][0]; op = q[18]; n = q[19];
    pos = 20;
    for (int k = 0; k < n; k++) begin
      pair_t p;
      if (pos + 2 > q.size()) return 0;
      p.klen = q[pos]; p.key = '0; p.val = '0;
      if (q[pos+1] != 4 || pos + 6 + p.klen > q.size()) return 0;
      for (int i = 0; i < p.klen; i++) p.key[8*i +: 8] = q[pos + 2 + i];
      for (int i = 0; i < 4; i++) p.val[8*i +: 8] = q[pos + 2 + p.klen + i];
      pos += 6 + p.klen;
      ps.push_back(p);
    end
    return 1;
  endfunction
endpackage
