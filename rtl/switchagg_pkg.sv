// switchagg_pkg: types, sizes and helper functions shared by the SwitchAgg
// switch data plane.
//
// The switch moves packets as 128-bit beats (16 bytes, byte i of the beat in
// bits [8i+7:8i]). Beat 0 of every packet carries the L2 header: destination
// MAC (bytes 0-5), source MAC (6-11), ethertype (12-13), packet type (14) and a
// reserved byte (15). The payload starts in beat 1.
//
// An aggregation payload is a 4-byte header <TreeID, EoT, Operation,
// NumPairs> followed by NumPairs packed pairs <KeyLength, ValueLength, Key,
// Value>, one byte each for the lengths, KeyLength key bytes and a 4-byte
// little-endian value. Field order follows the paper's packet table; the byte
// widths and the L2 layout are this design's choice.
//
// Keys of 1..64 bytes fall into 8 groups of 8 bytes each: group g holds keys of
// length 8g+1 .. 8g+8 and is served by FPE g. Values are 32-bit integers.
package switchagg_pkg;

  localparam int unsigned N_PORTS  = 4;    // switch ports / payload analyzers
  localparam int unsigned DATA_W   = 128;  // datapath width
  localparam int unsigned BEAT_B   = DATA_W / 8;
  localparam int unsigned N_GROUPS = 8;    // key-length groups = FPEs
  localparam int unsigned KEY_BASE = 8;    // group width in bytes
  localparam int unsigned KEY_MAX  = 64;   // longest key in bytes
  localparam int unsigned VAL_W    = 32;   // value width
  localparam int unsigned WAYS     = 4;    // slots per hash bucket
  localparam int unsigned N_TREES  = 4;    // aggregation trees held at once
  localparam int unsigned TREE_W   = $clog2(N_TREES);
  localparam int unsigned PORT_W   = $clog2(N_PORTS);
  localparam int unsigned GRP_W    = $clog2(N_GROUPS);
  localparam int unsigned KLEN_W   = 7;    // 1..64
  localparam int unsigned HASH_W   = 32;

  typedef enum logic [7:0] {
    PT_NORMAL    = 8'd0,
    PT_LAUNCH    = 8'd1,
    PT_CONFIGURE = 8'd2,
    PT_AGG       = 8'd3,
    PT_ACK0      = 8'd4,
    PT_ACK1      = 8'd5
  } pkt_type_e;

  typedef enum logic [1:0] {
    OP_SUM = 2'd0,
    OP_MAX = 2'd1,
    OP_MIN = 2'd2
  } agg_op_e;

  // One beat of a packet stream.
  typedef struct packed {
    logic [DATA_W-1:0] data;
    logic              sop;
    logic              eop;
  } beat_t;

  // One key-value pair inside the switch. Key byte i is key[8i+7:8i], bytes at
  // and above klen are zero.
  typedef struct packed {
    logic [KEY_MAX*8-1:0] key;
    logic [KLEN_W-1:0]    klen;
    logic [VAL_W-1:0]     value;
    agg_op_e              op;
    logic [TREE_W-1:0]    tree;
  } kv_t;

  // One hash slot as stored in a bucket.
  typedef struct packed {
    logic                 valid;
    logic [KEY_MAX*8-1:0] key;
    logic [KLEN_W-1:0]    klen;
    logic [VAL_W-1:0]     value;
    agg_op_e              op;
  } slot_t;

  typedef slot_t [WAYS-1:0] bucket_t;

  // Per-tree configuration as kept by the configuration module.
  typedef struct packed {
    logic              valid;
    logic [7:0]        children;
    logic [PORT_W-1:0] parent;
    logic [TREE_W-1:0] slot;     // position of the tree in the memory division
    logic [TREE_W:0]   shift;    // region size = memory >> shift
  } tree_cfg_t;

  // Group served for a key of klen bytes (1..64).
  function automatic logic [GRP_W-1:0] key_group(input logic [KLEN_W-1:0] klen);
    logic [KLEN_W-1:0] t;
    t = klen - 1'b1;
    return t[GRP_W+2:3];
  endfunction

  function automatic logic [31:0] rotl32(input logic [31:0] x, input int unsigned s);
    return (x << s) | (x >> ((32 - s) % 32));
  endfunction

  // Key hash shared by all processing engines: fold the 16 key words with
  // rotations, mix in the length, finish with xorshift-multiply rounds.
  function automatic logic [HASH_W-1:0] key_hash(input logic [KEY_MAX*8-1:0] key,
                                                 input logic [KLEN_W-1:0] klen);
    logic [31:0] h;
    h = 32'h9E37_79B9 ^ {25'd0, klen};
    for (int i = 0; i < KEY_MAX / 4; i++) begin
      h = rotl32(h, 5) ^ key[32*i +: 32];
    end
    h = h ^ (h >> 16);
    h = h * 32'h85EB_CA6B;
    h = h ^ (h >> 13);
    h = h * 32'hC2B2_AE35;
    h = h ^ (h >> 16);
    return h;
  endfunction

endpackage
