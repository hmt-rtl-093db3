// mt_stage: one BMT level of the HMT dataflow controller (Alg. 2 "MT STAGE").
//
// Every tree level has its own stage, with its own cache (bmt_cache), speculative
// buffer (spec_buffer), write-back engine (wb_engine) and hash unit (node_hash),
// as in Fig. 6. Requests arrive from the level below through an input FIFO and
// are handled one at a time, in order:
//   * read (op=0): the node is looked up in the SB, then the cache. A hit ends
//     the chain: the node goes to the verification unit marked trusted and a
//     hit=1 token is passed up. On a miss the node is read from memory, kept in
//     the SB and sent to the verification unit unverified; the read goes on up.
//   * update (op=1) and write-back from the level below: the child's new hash is
//     written into its slot. An SB or cache hit absorbs it (the node turns dirty)
//     and the chain ends. On a miss the node is changed directly in memory,
//     without verification and without caching it, and its new hash goes up.
//     This is the HMT relaxed update.
//   * a message already marked hit is passed up unchanged.
// Before taking a new request the stage does, in this order: forward a finished
// write-back hash from its WBE to the next level; move a node whose verdict has
// arrived from the SB into the cache, handing a dirty victim to the WBE.
// A request is held back while the WBE owns its node, or (reads) while the SB
// is full.
//
// Interface: in_* from the lower level (or counter stage), up_* to the upper
// level (or root stage), pv_* to the verification unit, vr_* verdicts from it,
// mem_* this level's node memory port (node index within the level), wbm_* the
// WBE's write port, evt one-cycle event strobes.
// Timing: a cache or SB hit takes 3 cycles from the FIFO head to the outgoing
// message; a read miss adds the memory latency; an update miss adds the memory
// read, the write and one 163-cycle hash.
// LINES and WAYS size the level's cache (WAYS = 1: direct-mapped).
// Following the paper: all of the above. This design's choices: FIFO depth, SB
// depth, a single in-order input queue that carries both request kinds (the
// Fig. 6 queue shows the fields of both), and the hazard check against the WBE.
// Alg. 2 forwards "op = 1, hit = 1, ..., upd = h" after an update miss; that
// hit = 1 would stop the chain, contradicting "updates all the upper level nodes
// in the memory until it hits a cached node", so hit = 0 is sent instead.
// The write-back memory port uses the shared mem_req_t type, so its write
// enable bit is constant 1.
module mt_stage
  import hmt_pkg::*;
#(
  parameter int unsigned LINES    = 64,
  parameter int unsigned WAYS     = 1,
  parameter int unsigned SB_DEPTH = 4,
  parameter int unsigned IN_DEPTH = 4
) (
  input  logic       clk,
  input  logic       rst_n,
  // from the level below
  input  logic       in_valid,
  output logic       in_ready,
  input  up_msg_t    in_msg,
  // to the level above
  output logic       up_valid,
  input  logic       up_ready,
  output up_msg_t    up_msg,
  // to the parallel verification unit
  output logic       pv_valid,
  input  logic       pv_ready,
  output pv_msg_t    pv_msg,
  // verdicts
  input  logic       vr_valid,
  input  pv_rsp_t    vr,
  // node memory of this level
  output logic       mem_req_valid,
  input  logic       mem_req_ready,
  output mem_req_t   mem_req,
  input  logic       mem_rsp_valid,
  input  node_t      mem_rsp_data,
  // write-back engine memory port
  output logic       wbm_req_valid,
  input  logic       wbm_req_ready,
  output mem_req_t   wbm_req,
  // events
  output stage_evt_t evt
);

  localparam int unsigned SBW = $clog2(SB_DEPTH);

  typedef enum logic [3:0] {
    S_IDLE, S_COMMIT, S_LOOK, S_DECIDE, S_MEMRD, S_MEMRD_WAIT, S_MEMWR, S_HASH, S_SEND
  } state_e;
  state_e state_q;

  // ---------------- input queue ----------------
  logic    q_valid, q_ready;
  up_msg_t q_msg;
  hmt_fifo #(.T(up_msg_t), .DEPTH(IN_DEPTH)) u_inq (
    .clk, .rst_n,
    .in_valid, .in_ready, .in_data (in_msg),
    .out_valid (q_valid), .out_ready (q_ready), .out_data (q_msg),
    .count ()
  );

  up_msg_t cur_q;
  node_t   node_q;

  // ---------------- cache ----------------
  logic  c_rd_en, c_rd_hit, c_vic_dirty, c_wr_en, c_wr_dirty;
  idx_t  c_rd_idx, c_vic_idx, c_wr_idx;
  node_t c_rd_data, c_vic_data, c_wr_data;
  bmt_cache #(.LINES(LINES), .WAYS(WAYS)) u_cache (
    .clk, .rst_n,
    .rd_en (c_rd_en), .rd_idx (c_rd_idx), .rd_hit (c_rd_hit), .rd_data (c_rd_data),
    .vic_dirty (c_vic_dirty), .vic_idx (c_vic_idx), .vic_data (c_vic_data),
    .wr_en (c_wr_en), .wr_idx (c_wr_idx), .wr_data (c_wr_data), .wr_dirty (c_wr_dirty)
  );

  // ---------------- speculative buffer ----------------
  logic           sb_hit, sb_full, sb_al_en, sb_up_en;
  logic [SBW-1:0] sb_slot;
  node_t          sb_data, sb_up_data;
  logic           sb_cm_valid, sb_cm_ok, sb_cm_dirty, sb_cm_pop;
  idx_t           sb_cm_idx;
  node_t          sb_cm_data;
  spec_buffer #(.DEPTH(SB_DEPTH)) u_sb (
    .clk, .rst_n,
    .lk_idx (cur_q.idx), .lk_hit (sb_hit), .lk_slot (sb_slot), .lk_data (sb_data),
    .al_en (sb_al_en), .al_tag (cur_q.tag), .al_idx (cur_q.idx), .al_data (mem_rsp_data),
    .full (sb_full),
    .up_en (sb_up_en), .up_slot (sb_slot), .up_data (sb_up_data),
    .vr_valid, .vr,
    .cm_valid (sb_cm_valid), .cm_ok (sb_cm_ok), .cm_idx (sb_cm_idx),
    .cm_data (sb_cm_data), .cm_dirty (sb_cm_dirty), .cm_pop (sb_cm_pop)
  );

  // ---------------- write-back engine ----------------
  logic  wbe_ev_valid, wbe_ev_ready, wbe_valid, wbe_ready, wbe_busy;
  idx_t  wbe_idx, wbe_busy_idx;
  hash_t wbe_hash;
  wb_engine u_wbe (
    .clk, .rst_n,
    .ev_valid (wbe_ev_valid), .ev_ready (wbe_ev_ready),
    .ev_idx (c_vic_idx), .ev_data (c_vic_data),
    .mem_req_valid (wbm_req_valid), .mem_req_ready (wbm_req_ready), .mem_req (wbm_req),
    .wb_valid (wbe_valid), .wb_ready (wbe_ready), .wb_idx (wbe_idx), .wb_hash (wbe_hash),
    .busy (wbe_busy), .busy_idx (wbe_busy_idx)
  );

  // ---------------- hash unit for updates that miss ----------------
  logic  h_start, h_busy, h_done;
  hash_t h_digest;
  node_hash u_hash (
    .clk, .rst_n, .start (h_start), .node (node_q),
    .busy (h_busy), .done (h_done), .digest (h_digest)
  );

  // ---------------- outgoing registers ----------------
  logic    up_v_q, pv_v_q;
  up_msg_t up_q;
  pv_msg_t pv_q;
  assign up_valid = up_v_q;
  assign up_msg   = up_q;
  assign pv_valid = pv_v_q;
  assign pv_msg   = pv_q;

  function automatic up_msg_t parent_msg(kind_e k, op_e op, logic hit, tag_t tag,
                                         idx_t idx, hash_t upd);
    up_msg_t m;
    m.kind = k;
    m.op   = op;
    m.hit  = hit;
    m.tag  = tag;
    m.idx  = hit ? '0 : idx >> OFF_W;
    m.off  = hit ? '0 : off_t'(idx);
    m.upd  = upd;
    return m;
  endfunction

  // ---------------- control ----------------
  wire q_is_read  = (q_msg.kind == MSG_MT) && (q_msg.op == OP_READ) && !q_msg.hit;
  wire q_blocked  = (wbe_busy && q_msg.idx == wbe_busy_idx && !q_msg.hit) ||
                    (q_is_read && sb_full);
  wire cur_update = (cur_q.kind == MSG_WB) || (cur_q.op == OP_WRITE);
  wire out_free   = !up_v_q && !pv_v_q;
  node_t upd_node;
  assign upd_node = set_slot(sb_hit ? sb_data : c_rd_data, cur_q.off, cur_q.upd);

  always_comb begin
    q_ready       = 1'b0;
    c_rd_en       = 1'b0;
    c_rd_idx      = cur_q.idx;
    c_wr_en       = 1'b0;
    c_wr_idx      = cur_q.idx;
    c_wr_data     = upd_node;
    c_wr_dirty    = 1'b1;
    sb_al_en      = 1'b0;
    sb_up_en      = 1'b0;
    sb_up_data    = upd_node;
    sb_cm_pop     = 1'b0;
    wbe_ev_valid  = 1'b0;
    wbe_ready     = 1'b0;
    h_start       = 1'b0;
    mem_req_valid = 1'b0;
    mem_req       = '{we: 1'b0, idx: cur_q.idx, wdata: node_q};
    unique case (state_q)
      S_IDLE: begin
        if (wbe_valid) begin
          wbe_ready = out_free;
        end else if (sb_cm_valid && !wbe_busy) begin
          c_rd_en  = 1'b1;
          c_rd_idx = sb_cm_idx;
        end else if (q_valid && !q_blocked && out_free) begin
          q_ready = 1'b1;
        end
      end
      S_COMMIT: begin
        sb_cm_pop = 1'b1;
        if (sb_cm_ok) begin
          c_wr_en      = 1'b1;
          c_wr_idx     = sb_cm_idx;
          c_wr_data    = sb_cm_data;
          c_wr_dirty   = sb_cm_dirty;
          wbe_ev_valid = c_vic_dirty;
        end
      end
      S_LOOK: c_rd_en = !(cur_q.kind == MSG_MT && cur_q.hit);
      S_DECIDE: begin
        if (cur_update) begin
          if (sb_hit)        sb_up_en = 1'b1;
          else if (c_rd_hit) c_wr_en  = 1'b1;
        end
      end
      S_MEMRD: begin
        mem_req_valid = 1'b1;
        mem_req       = '{we: 1'b0, idx: cur_q.idx, wdata: node_q};
      end
      S_MEMRD_WAIT: sb_al_en = mem_rsp_valid && !cur_update;
      S_MEMWR: begin
        mem_req_valid = 1'b1;
        mem_req       = '{we: 1'b1, idx: cur_q.idx, wdata: node_q};
        h_start       = mem_req_ready;
      end
      default: ;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state_q <= S_IDLE;
      cur_q   <= '0;
      node_q  <= '0;
      up_v_q  <= 1'b0;
      pv_v_q  <= 1'b0;
      up_q    <= '0;
      pv_q    <= '0;
      evt     <= '0;
    end else begin
      evt <= '0;
      if (up_v_q && up_ready) up_v_q <= 1'b0;
      if (pv_v_q && pv_ready) pv_v_q <= 1'b0;
      unique case (state_q)
        S_IDLE: begin
          if (wbe_valid) begin
            if (out_free) begin
              up_v_q <= 1'b1;
              up_q   <= parent_msg(MSG_WB, OP_WRITE, 1'b0, '0, wbe_idx, wbe_hash);
              evt.wb_send <= 1'b1;
            end
          end else if (sb_cm_valid && !wbe_busy) begin
            state_q <= S_COMMIT;
          end else if (q_valid && !q_blocked && out_free) begin
            cur_q   <= q_msg;
            state_q <= S_LOOK;
          end else if (q_valid && q_is_read && sb_full) begin
            evt.sb_full_stall <= 1'b1;
          end
        end
        S_COMMIT: begin
          state_q <= S_IDLE;
          if (sb_cm_ok) begin
            evt.commit      <= 1'b1;
            evt.dirty_evict <= c_vic_dirty;
          end
        end
        S_LOOK: begin
          if (cur_q.kind == MSG_MT && cur_q.hit) begin
            up_v_q  <= 1'b1;
            up_q    <= cur_q;
            state_q <= S_SEND;
          end else begin
            state_q <= S_DECIDE;
          end
        end
        S_DECIDE: begin
          if (!cur_update) begin
            if (sb_hit || c_rd_hit) begin
              pv_v_q  <= 1'b1;
              pv_q    <= '{tag: cur_q.tag, hit: 1'b1, off: cur_q.off,
                           data: sb_hit ? sb_data : c_rd_data};
              up_v_q  <= 1'b1;
              up_q    <= parent_msg(MSG_MT, OP_READ, 1'b1, cur_q.tag, cur_q.idx, '0);
              state_q <= S_SEND;
              evt.rd_sb_hit    <= sb_hit;
              evt.rd_cache_hit <= !sb_hit;
            end else begin
              state_q <= S_MEMRD;
            end
          end else if (sb_hit || c_rd_hit) begin
            evt.upd_sb_hit    <= sb_hit;
            evt.upd_cache_hit <= !sb_hit;
            if (cur_q.kind == MSG_MT) begin
              up_v_q  <= 1'b1;
              up_q    <= parent_msg(MSG_MT, OP_WRITE, 1'b1, cur_q.tag, cur_q.idx, '0);
              state_q <= S_SEND;
            end else begin
              state_q <= S_IDLE;      // write-back absorbed: nothing goes up
            end
          end else begin
            state_q <= S_MEMRD;
          end
        end
        S_MEMRD: if (mem_req_ready) state_q <= S_MEMRD_WAIT;
        S_MEMRD_WAIT: if (mem_rsp_valid) begin
          if (!cur_update) begin
            pv_v_q  <= 1'b1;
            pv_q    <= '{tag: cur_q.tag, hit: 1'b0, off: cur_q.off, data: mem_rsp_data};
            up_v_q  <= 1'b1;
            up_q    <= parent_msg(MSG_MT, OP_READ, 1'b0, cur_q.tag, cur_q.idx, '0);
            state_q <= S_SEND;
            evt.rd_miss <= 1'b1;
          end else begin
            node_q  <= set_slot(mem_rsp_data, cur_q.off, cur_q.upd);
            state_q <= S_MEMWR;
          end
        end
        S_MEMWR: if (mem_req_ready) state_q <= S_HASH;
        S_HASH: if (h_done) begin
          up_v_q  <= 1'b1;
          up_q    <= parent_msg(cur_q.kind, OP_WRITE, 1'b0, cur_q.tag, cur_q.idx, h_digest);
          state_q <= S_SEND;
          evt.upd_mem <= 1'b1;
        end
        S_SEND: if ((!up_v_q || up_ready) && (!pv_v_q || pv_ready)) state_q <= S_IDLE;
        default: state_q <= S_IDLE;
      endcase
    end
  end

  // A hash unit is started only when idle.
  assert property (@(posedge clk) disable iff (!rst_n) h_start |-> !h_busy);
  // A victim is only handed over when the write-back engine can take it.
  assert property (@(posedge clk) disable iff (!rst_n) wbe_ev_valid |-> wbe_ev_ready);

endmodule
