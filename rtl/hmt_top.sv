// hmt_top: the HMT Bonsai Merkle Tree subsystem - dataflow controller plus the
// per-level ("parallel") BMT caches.
//
// It authenticates and updates 64-byte encryption-counter blocks held in
// untrusted memory against an 8-ary hash tree whose root never leaves the chip.
// Structure (Fig. 6): a counter stage, N_LEVELS identical MT stages (each with
// its own direct-mapped write-back cache, speculative buffer and write-back
// engine), a root stage, and one parallel verification unit fed by all of them.
// Reads (verifications) travel up until the first cached or buffered node; many
// may be in flight at once, one per stage. Updates are relaxed: they stop at the
// first cached or buffered node and change missing nodes directly in memory.
// Dirty evictions are written back and their hash propagated the same way.
//
// Interface:
//   req_*        counter requests: op (read/write), counter number, block to
//                write, user id
//   rsp_*        read response pulse: id, ok (tree check passed), counter block
//   wr_rsp_*     write response pulse: id, once the update has been absorbed
//   root_ld*     loads the on-chip root (at start-up); root shows it
//   ctr_mem_*    counter-block memory port, index = counter number
//   node_mem_*   one port per level, index = node number within the level
//   wb_mem_*     one write-only port per level for the write-back engines
//   evt, root_upd, inflight : event strobes and the number of reads in flight
// Memory ports: request valid/ready; reads answer with one rsp_valid pulse, in
// order; a write takes effect when accepted.
// Defaults are the paper's integrated system: 5 levels (32768 counters, 128 MB of
// data at 4 KB per counter) and direct-mapped caches of 32 KB, 4 KB, 4 KB, 128 B
// and 128 B, i.e. 512, 64, 64, 2 and 2 lines. SB, queue and ID-table depths are
// this design's choices. CACHE_WAYS makes a level's cache set-associative
// (the paper's stand-alone tree test uses 4-way caches); default direct-mapped.
// The write-back ports carry the shared mem_req_t type, so their write-enable
// bit is constant 1 (one such output bit per level).
module hmt_top
  import hmt_pkg::*;
#(
  parameter int unsigned N_LEVELS = 5,
  parameter int unsigned CACHE_LINES [8] = '{512, 64, 64, 2, 2, 2, 2, 2},  // level 1 first; first N_LEVELS used
  parameter int unsigned CACHE_WAYS  [8] = '{1, 1, 1, 1, 1, 1, 1, 1},       // associativity per level
  parameter int unsigned SB_DEPTH = 4,
  parameter int unsigned ID_DEPTH = 8,
  parameter int unsigned Q_DEPTH  = 4
) (
  input  logic       clk,
  input  logic       rst_n,
  input  logic       req_valid,
  output logic       req_ready,
  input  op_e        req_op,
  input  idx_t       req_ctr,
  input  node_t      req_wdata,
  input  id_t        req_id,
  output logic       rsp_valid,
  output id_t        rsp_id,
  output logic       rsp_ok,
  output node_t      rsp_data,
  output logic       wr_rsp_valid,
  output id_t        wr_rsp_id,
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
  output logic [$clog2(ID_DEPTH+1)-1:0] inflight
);

  // chain[l] carries messages from level l to level l+1 (0 = counter stage,
  // N_LEVELS = into the root stage)
  logic    ch_valid [N_LEVELS+1];
  logic    ch_ready [N_LEVELS+1];
  up_msg_t ch_msg   [N_LEVELS+1];

  logic    pv_valid [N_LEVELS+2];
  logic    pv_ready [N_LEVELS+2];
  pv_msg_t pv_msg   [N_LEVELS+2];

  logic    vr_valid;
  pv_rsp_t vr;

  ctr_stage #(.ID_DEPTH(ID_DEPTH)) u_ctr (
    .clk, .rst_n,
    .req_valid, .req_ready, .req_op, .req_ctr, .req_wdata, .req_id,
    .rsp_valid, .rsp_id, .rsp_ok, .rsp_data,
    .mem_req_valid (ctr_mem_req_valid), .mem_req_ready (ctr_mem_req_ready),
    .mem_req (ctr_mem_req), .mem_rsp_valid (ctr_mem_rsp_valid),
    .mem_rsp_data (ctr_mem_rsp_data),
    .up_valid (ch_valid[0]), .up_ready (ch_ready[0]), .up_msg (ch_msg[0]),
    .pv_valid (pv_valid[0]), .pv_ready (pv_ready[0]), .pv_msg (pv_msg[0]),
    .vr_valid, .vr,
    .inflight
  );

  for (genvar l = 0; l < N_LEVELS; l++) begin : g_lvl
    mt_stage #(
      .LINES    (CACHE_LINES[l]),
      .WAYS     (CACHE_WAYS[l]),
      .SB_DEPTH (SB_DEPTH),
      .IN_DEPTH (Q_DEPTH)
    ) u_stage (
      .clk, .rst_n,
      .in_valid (ch_valid[l]),   .in_ready (ch_ready[l]),   .in_msg (ch_msg[l]),
      .up_valid (ch_valid[l+1]), .up_ready (ch_ready[l+1]), .up_msg (ch_msg[l+1]),
      .pv_valid (pv_valid[l+1]), .pv_ready (pv_ready[l+1]), .pv_msg (pv_msg[l+1]),
      .vr_valid, .vr,
      .mem_req_valid (node_mem_req_valid[l]), .mem_req_ready (node_mem_req_ready[l]),
      .mem_req (node_mem_req[l]), .mem_rsp_valid (node_mem_rsp_valid[l]),
      .mem_rsp_data (node_mem_rsp_data[l]),
      .wbm_req_valid (wb_mem_req_valid[l]), .wbm_req_ready (wb_mem_req_ready[l]),
      .wbm_req (wb_mem_req[l]),
      .evt (evt[l])
    );
  end

  root_stage #(.IN_DEPTH(Q_DEPTH)) u_root (
    .clk, .rst_n,
    .in_valid (ch_valid[N_LEVELS]), .in_ready (ch_ready[N_LEVELS]), .in_msg (ch_msg[N_LEVELS]),
    .pv_valid (pv_valid[N_LEVELS+1]), .pv_ready (pv_ready[N_LEVELS+1]),
    .pv_msg (pv_msg[N_LEVELS+1]),
    .root_ld, .root_ld_val, .root,
    .wr_rsp_valid, .wr_rsp_id, .root_upd
  );

  pv_unit #(.N_LEVELS(N_LEVELS), .Q_DEPTH(Q_DEPTH)) u_pv (
    .clk, .rst_n,
    .in_valid (pv_valid), .in_ready (pv_ready), .in_msg (pv_msg),
    .vr_valid, .vr
  );

endmodule
