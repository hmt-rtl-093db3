// hmt_system: counter cache plus HMT integrity-tree subsystem (top level).
//
// This is the authentication part of the paper's integrated system (Fig. 7):
// encryption counters (one 64-byte block per 4 KB page) are served from a
// direct-mapped counter cache (ctr_cache); counter blocks that miss are fetched
// and verified through the hybrid Bonsai Merkle tree (hmt_top), and counter
// writes update the tree, either at once (write-through, wb_mode = 0) or when a
// dirty block is evicted (write-back, wb_mode = 1). The AES engine, the HMAC
// unit, the host processor and the DRAM controller of Fig. 7 are not part of
// this design; the memory ports below go to the DRAM side and a client issues
// counter requests.
//
// Interface:
//   req_* / rsp_*         counter block requests and responses (one at a time)
//   root_ld, root_ld_val  load the on-chip root (after the tree is built in DRAM)
//   root                  current on-chip root
//   ctr_mem_*             counter-block memory port (level 0 of the tree)
//   node_mem_*            one memory port per tree level 1..N_LEVELS for node
//                         reads and for direct in-memory updates
//   wb_mem_*              one write port per level for dirty-node write-backs
//   evt, cc_evt_*         statistics strobes of the tree stages and of the cache
//   cc_wr_pending         tree updates sent by the cache and not yet answered
//   bmt_inflight          counter reads in flight inside the tree
// Parameters default to the paper's integrated system: 128 MB protected memory
// (32768 counter blocks, 5 tree levels), 32 KB counter cache, BMT caches of
// 32 KB, 4 KB, 4 KB, 128 B and 128 B for levels 1..5, all direct-mapped.
// The write-back ports carry the shared mem_req_t type, so their write-enable
// bit is constant 1 (one such output bit per level).
module hmt_system
  import hmt_pkg::*;
#(
  parameter int unsigned N_LEVELS = 5,
  parameter int unsigned CC_LINES = 512,
  parameter int unsigned CACHE_LINES [8] = '{512, 64, 64, 2, 2, 2, 2, 2},
  parameter int unsigned CACHE_WAYS  [8] = '{1, 1, 1, 1, 1, 1, 1, 1},
  parameter int unsigned SB_DEPTH = 4,
  parameter int unsigned ID_DEPTH = 8,
  parameter int unsigned Q_DEPTH  = 4
) (
  input  logic       clk,
  input  logic       rst_n,
  input  logic       wb_mode,
  input  logic       req_valid,
  output logic       req_ready,
  input  op_e        req_op,
  input  idx_t       req_ctr,
  input  node_t      req_wdata,
  output logic       rsp_valid,
  output logic       rsp_ok,
  output node_t      rsp_data,
  input  logic       root_ld,
  input  hash_t      root_ld_val,
  output hash_t      root,
  output logic       ctr_mem_req_valid,
  input  logic       ctr_mem_req_ready,
  output mem_req_t   ctr_mem_req,
  input  logic       ctr_mem_rsp_valid,
  input  node_t      ctr_mem_rsp_data,
  output logic       node_mem_req_valid [N_LEVELS],
  input  logic       node_mem_req_ready [N_LEVELS],
  output mem_req_t   node_mem_req       [N_LEVELS],
  input  logic       node_mem_rsp_valid [N_LEVELS],
  input  node_t      node_mem_rsp_data  [N_LEVELS],
  output logic       wb_mem_req_valid   [N_LEVELS],
  input  logic       wb_mem_req_ready   [N_LEVELS],
  output mem_req_t   wb_mem_req         [N_LEVELS],
  output stage_evt_t evt [N_LEVELS],
  output logic       root_upd,
  output logic       cc_evt_hit,
  output logic       cc_evt_miss,
  output logic       cc_evt_dirty_evict,
  output logic       cc_evt_bmt_write,
  output logic [7:0] cc_wr_pending,
  output logic [$clog2(ID_DEPTH+1)-1:0] bmt_inflight
);

  logic  b_req_valid, b_req_ready;
  op_e   b_req_op;
  idx_t  b_req_ctr;
  node_t b_req_wdata;
  id_t   b_req_id;
  logic  b_rsp_valid, b_rsp_ok, b_wr_rsp_valid;
  id_t   b_rsp_id, b_wr_rsp_id;
  node_t b_rsp_data;

  ctr_cache #(.LINES(CC_LINES)) u_cc (
    .clk, .rst_n, .wb_mode,
    .req_valid, .req_ready, .req_op, .req_ctr, .req_wdata,
    .rsp_valid, .rsp_ok, .rsp_data,
    .bmt_req_valid(b_req_valid), .bmt_req_ready(b_req_ready), .bmt_req_op(b_req_op),
    .bmt_req_ctr(b_req_ctr), .bmt_req_wdata(b_req_wdata), .bmt_req_id(b_req_id),
    .bmt_rsp_valid(b_rsp_valid), .bmt_rsp_id(b_rsp_id), .bmt_rsp_ok(b_rsp_ok),
    .bmt_rsp_data(b_rsp_data), .bmt_wr_rsp_valid(b_wr_rsp_valid),
    .bmt_wr_rsp_id(b_wr_rsp_id),
    .bmt_wr_pending(cc_wr_pending),
    .evt_hit(cc_evt_hit), .evt_miss(cc_evt_miss),
    .evt_dirty_evict(cc_evt_dirty_evict), .evt_bmt_write(cc_evt_bmt_write)
  );

  hmt_top #(
    .N_LEVELS(N_LEVELS), .CACHE_LINES(CACHE_LINES), .CACHE_WAYS(CACHE_WAYS), .SB_DEPTH(SB_DEPTH),
    .ID_DEPTH(ID_DEPTH), .Q_DEPTH(Q_DEPTH)
  ) u_bmt (
    .clk, .rst_n,
    .req_valid(b_req_valid), .req_ready(b_req_ready), .req_op(b_req_op),
    .req_ctr(b_req_ctr), .req_wdata(b_req_wdata), .req_id(b_req_id),
    .rsp_valid(b_rsp_valid), .rsp_id(b_rsp_id), .rsp_ok(b_rsp_ok), .rsp_data(b_rsp_data),
    .wr_rsp_valid(b_wr_rsp_valid), .wr_rsp_id(b_wr_rsp_id),
    .root_ld, .root_ld_val, .root,
    .ctr_mem_req_valid, .ctr_mem_req_ready, .ctr_mem_req, .ctr_mem_rsp_valid, .ctr_mem_rsp_data,
    .node_mem_req_valid, .node_mem_req_ready, .node_mem_req, .node_mem_rsp_valid, .node_mem_rsp_data,
    .wb_mem_req_valid, .wb_mem_req_ready, .wb_mem_req,
    .evt, .root_upd, .inflight(bmt_inflight)
  );

endmodule
