// ctr_stage: counter stage of the HMT controller (Alg. 2 "COUNTER STAGE").
//
// Takes counter requests from the user logic one at a time. Counter blocks are
// 64 bytes; counter c sits in slot c mod 8 of level-1 node c / 8.
//   * read: the counter block is read from memory, entered in the FIFO ID table
//     (user id, internal tag, counter block), sent to the verification unit as
//     level 0, and a read request for its parent goes up the tree. When the
//     verdict for the oldest entry arrives the entry leaves the table and the
//     response (id, ok, counter block) goes to the user.
//   * write: the counter block is written to memory and hashed, and an update
//     carrying the hash goes up. Writes take no ID-table entry; their response
//     comes from the root stage once the update has been absorbed.
// Interface: req_* user requests (req_ready low while busy, or for reads while
// the ID table is full); rsp_valid is a one-cycle pulse that is not back-pressured;
// mem_* the counter memory port (index = counter number); up_*, pv_*, vr_* as in
// mt_stage.
// Timing: a read costs the memory latency plus 2 cycles; a write costs the
// memory write plus a 163-cycle hash.
// Following the paper: the ID table, read-only entries, hashing of writes.
// Alg. 2 forwards "op = 0, ..., upd = h" for a counter write; op = 1 is sent here,
// since a write must be treated as an update by the MT stages. Tags, table depth
// and the response pulse are this design's choices.
// Some output bits are constant by construction: the shared message types carry
// a message kind, hit flags and a PV slot number, which for the counter stage
// are always "ordinary request", "not trusted" and 0.
module ctr_stage
  import hmt_pkg::*;
#(
  parameter int unsigned ID_DEPTH = 8
) (
  input  logic     clk,
  input  logic     rst_n,
  // user requests
  input  logic     req_valid,
  output logic     req_ready,
  input  op_e      req_op,
  input  idx_t     req_ctr,
  input  node_t    req_wdata,
  input  id_t      req_id,
  // read responses
  output logic     rsp_valid,
  output id_t      rsp_id,
  output logic     rsp_ok,
  output node_t    rsp_data,
  // counter memory
  output logic     mem_req_valid,
  input  logic     mem_req_ready,
  output mem_req_t mem_req,
  input  logic     mem_rsp_valid,
  input  node_t    mem_rsp_data,
  // to level 1
  output logic     up_valid,
  input  logic     up_ready,
  output up_msg_t  up_msg,
  // to the verification unit (level 0)
  output logic     pv_valid,
  input  logic     pv_ready,
  output pv_msg_t  pv_msg,
  // verdicts
  input  logic     vr_valid,
  input  pv_rsp_t  vr,
  // ID-table occupancy (requests in flight)
  output logic [$clog2(ID_DEPTH+1)-1:0] inflight
);

  typedef struct packed {
    id_t   id;
    tag_t  tag;
    node_t data;
  } id_entry_t;

  typedef enum logic [2:0] {C_IDLE, C_RD, C_RD_WAIT, C_WR, C_HASH, C_SEND} cstate_e;
  cstate_e state_q;

  idx_t  ctr_q;
  node_t data_q;
  id_t   id_q;
  tag_t  tag_q;

  // ---------------- ID table ----------------
  logic      it_push, it_ready, it_valid;
  id_entry_t it_head;
  hmt_fifo #(.T(id_entry_t), .DEPTH(ID_DEPTH)) u_idtab (
    .clk, .rst_n,
    .in_valid (it_push), .in_ready (it_ready),
    .in_data ('{id: id_q, tag: tag_q, data: mem_rsp_data}),
    .out_valid (it_valid), .out_ready (vr_valid), .out_data (it_head),
    .count (inflight)
  );

  // ---------------- hash for writes ----------------
  logic  h_start, h_busy, h_done;
  hash_t h_digest;
  node_hash u_hash (
    .clk, .rst_n, .start (h_start), .node (data_q),
    .busy (h_busy), .done (h_done), .digest (h_digest)
  );

  logic    up_v_q, pv_v_q;
  up_msg_t up_q;
  pv_msg_t pv_q;
  assign up_valid = up_v_q;
  assign up_msg   = up_q;
  assign pv_valid = pv_v_q;
  assign pv_msg   = pv_q;

  assign req_ready = (state_q == C_IDLE) && (req_op == OP_WRITE || it_ready);
  assign it_push   = (state_q == C_RD_WAIT) && mem_rsp_valid;

  always_comb begin
    mem_req_valid = (state_q == C_RD) || (state_q == C_WR);
    mem_req       = '{we: (state_q == C_WR), idx: ctr_q, wdata: data_q};
    h_start       = (state_q == C_WR) && mem_req_ready;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state_q   <= C_IDLE;
      ctr_q     <= '0;
      data_q    <= '0;
      id_q      <= '0;
      tag_q     <= '0;
      up_v_q    <= 1'b0;
      pv_v_q    <= 1'b0;
      up_q      <= '0;
      pv_q      <= '0;
      rsp_valid <= 1'b0;
      rsp_id    <= '0;
      rsp_ok    <= 1'b0;
      rsp_data  <= '0;
    end else begin
      if (up_v_q && up_ready) up_v_q <= 1'b0;
      if (pv_v_q && pv_ready) pv_v_q <= 1'b0;
      rsp_valid <= 1'b0;
      if (vr_valid) begin
        rsp_valid <= 1'b1;
        rsp_id    <= it_head.id;
        rsp_ok    <= vr.ok && (vr.tag == it_head.tag);
        rsp_data  <= it_head.data;
      end
      unique case (state_q)
        C_IDLE: if (req_valid && req_ready) begin
          ctr_q   <= req_ctr;
          data_q  <= req_wdata;
          id_q    <= req_id;
          state_q <= (req_op == OP_READ) ? C_RD : C_WR;
        end
        C_RD: if (mem_req_ready) state_q <= C_RD_WAIT;
        C_RD_WAIT: if (mem_rsp_valid) begin
          pv_v_q  <= 1'b1;
          pv_q    <= '{tag: tag_q, hit: 1'b0, off: '0, data: mem_rsp_data};
          up_v_q  <= 1'b1;
          up_q    <= '{kind: MSG_MT, op: OP_READ, hit: 1'b0, tag: tag_q,
                       idx: ctr_q >> OFF_W, off: off_t'(ctr_q), upd: '0};
          tag_q   <= tag_q + 1'b1;
          state_q <= C_SEND;
        end
        C_WR: if (mem_req_ready) state_q <= C_HASH;
        C_HASH: if (h_done) begin
          up_v_q  <= 1'b1;
          up_q    <= '{kind: MSG_MT, op: OP_WRITE, hit: 1'b0, tag: tag_t'(id_q),
                       idx: ctr_q >> OFF_W, off: off_t'(ctr_q), upd: h_digest};
          state_q <= C_SEND;
        end
        C_SEND: if ((!up_v_q || up_ready) && (!pv_v_q || pv_ready)) state_q <= C_IDLE;
        default: state_q <= C_IDLE;
      endcase
    end
  end

  // Verdicts arrive in request order, so each one belongs to the oldest entry.
  assert property (@(posedge clk) disable iff (!rst_n)
                   vr_valid |-> (it_valid && vr.tag == it_head.tag));
  assert property (@(posedge clk) disable iff (!rst_n) h_start |-> !h_busy);

endmodule
