// hmt_pkg: types and constants shared by the HMT Bonsai Merkle Tree controller.
//
// The tree is 8-ary with 64-byte nodes: every node holds eight 8-byte slots, one
// per child, and each slot is the SHA-1 digest of that child truncated to 64 bits
// (the first 8 digest bytes). Slot k of a node occupies bits [64k+63:64k]. A node
// is hashed as a 64-byte big-endian message, byte 0 being bits [511:504].
// Node size and arity follow the paper's 8-ary, 64-byte tree; the slot layout,
// truncation and byte order are this design's choices.
//
// Messages between the stages:
//   up_msg_t  - from a level to the level above (Fig. 6 fields <hit,op,idx,off,upd,
//               ev_hash,ev_idx,ev_off>); a write-back message reuses idx/off/upd
//               for ev_idx/ev_off/ev_hash, told apart by kind.
//   pv_msg_t  - a node (or counter block, or root) sent to the verification unit.
//   pv_rsp_t  - the verification verdict broadcast for one read request.
package hmt_pkg;

  localparam int unsigned NODE_BITS = 512;            // 64-byte node
  localparam int unsigned ARITY     = 8;              // 8-ary tree
  localparam int unsigned SLOT_BITS = NODE_BITS / ARITY;  // 64-bit child hash
  localparam int unsigned OFF_W     = 3;              // log2(ARITY)
  localparam int unsigned IDX_W     = 24;             // node index width, up to 8 levels
  localparam int unsigned TAG_W     = 8;              // request tag width
  localparam int unsigned ID_W      = 8;              // user request id width

  typedef logic [NODE_BITS-1:0] node_t;
  typedef logic [SLOT_BITS-1:0] hash_t;
  typedef logic [IDX_W-1:0]     idx_t;
  typedef logic [OFF_W-1:0]     off_t;
  typedef logic [TAG_W-1:0]     tag_t;
  typedef logic [ID_W-1:0]      id_t;

  typedef enum logic {OP_READ = 1'b0, OP_WRITE = 1'b1} op_e;
  typedef enum logic {MSG_MT = 1'b0, MSG_WB = 1'b1}    kind_e;

  // Request travelling up the tree. idx is the node index at the receiving level,
  // off the slot in that node that belongs to the sender's node.
  typedef struct packed {
    kind_e kind;   // MSG_MT: counter read/update chain, MSG_WB: write-back chain
    op_e   op;
    logic  hit;    // chain already terminated below: pass through only
    tag_t  tag;    // read: internal tag; write: user id
    idx_t  idx;
    off_t  off;
    hash_t upd;    // new child hash for updates and write-backs
  } up_msg_t;

  // Node handed to the parallel verification unit.
  typedef struct packed {
    tag_t  tag;
    logic  hit;    // node is trusted (cache, SB or root): chain ends here
    off_t  off;    // slot in this node holding the child's hash
    node_t data;
  } pv_msg_t;

  typedef struct packed {
    tag_t tag;
    logic ok;
  } pv_rsp_t;

  // Memory request of one port. Reads return one response, in order; writes are
  // posted and take effect when accepted.
  typedef struct packed {
    logic  we;
    idx_t  idx;
    node_t wdata;
  } mem_req_t;

  // Per-stage event strobes, one cycle each, for observation and statistics.
  typedef struct packed {
    logic rd_cache_hit;   // read chain ended on a cached node
    logic rd_sb_hit;      // read chain ended on a speculative-buffer node
    logic rd_miss;        // read fetched an unverified node from memory
    logic upd_cache_hit;  // update / write-back absorbed by the cache
    logic upd_sb_hit;     // update / write-back absorbed by the SB
    logic upd_mem;        // update / write-back applied in memory and passed up
    logic commit;         // verified SB node moved into the cache
    logic dirty_evict;    // commit evicted a dirty node to the write-back engine
    logic wb_send;        // write-back hash forwarded to the next level
    logic sb_full_stall;  // read held back because the SB was full
  } stage_evt_t;

  function automatic hash_t get_slot(node_t n, off_t o);
    return n[o*SLOT_BITS +: SLOT_BITS];
  endfunction

  function automatic node_t set_slot(node_t n, off_t o, hash_t h);
    node_t r;
    r = n;
    r[o*SLOT_BITS +: SLOT_BITS] = h;
    return r;
  endfunction

endpackage
