// root_stage: root stage of the HMT controller (Alg. 2 "ROOT STAGE").
//
// Holds the tree root in an on-chip register: the truncated hash of the single
// level-N node. Messages from level N are handled in order:
//   * read that reached the top unterminated: the root is sent to the
//     verification unit as the trusted top of the chain (level N+1);
//   * read already terminated below (hit): dropped;
//   * counter update: if it arrives unterminated, its hash becomes the new root;
//     either way the update is complete and its write response is issued;
//   * write-back hash from level N: becomes the new root, no response.
// The paper also gives the root stage a speculative buffer that holds the root
// while it is used for verification. Here the root value is copied into the
// verification message instead, which keeps the snapshot the same way.
// Interface: in_* from level N (input FIFO inside), pv_* to the verification
// unit, root_ld/root_ld_val to initialise the register (secure boot), root,
// wr_rsp_valid/wr_rsp_id a one-cycle write-response pulse.
// Timing: one message per cycle while the verification unit accepts.
// Most of pv_msg is constant by construction: the root travels in the shared
// node-sized data field (upper 448 bits zero), is always marked trusted and
// always uses slot 0.
module root_stage
  import hmt_pkg::*;
#(
  parameter int unsigned IN_DEPTH = 4
) (
  input  logic    clk,
  input  logic    rst_n,
  input  logic    in_valid,
  output logic    in_ready,
  input  up_msg_t in_msg,
  output logic    pv_valid,
  input  logic    pv_ready,
  output pv_msg_t pv_msg,
  input  logic    root_ld,
  input  hash_t   root_ld_val,
  output hash_t   root,
  output logic    wr_rsp_valid,
  output id_t     wr_rsp_id,
  output logic    root_upd        // event strobe: root register changed
);

  logic    q_valid, q_ready;
  up_msg_t q_msg;
  hmt_fifo #(.T(up_msg_t), .DEPTH(IN_DEPTH)) u_inq (
    .clk, .rst_n,
    .in_valid, .in_ready, .in_data (in_msg),
    .out_valid (q_valid), .out_ready (q_ready), .out_data (q_msg),
    .count ()
  );

  logic    pv_v_q;
  pv_msg_t pv_q;
  assign pv_valid = pv_v_q;
  assign pv_msg   = pv_q;
  assign q_ready  = q_valid && !pv_v_q && !root_ld;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      root         <= '0;
      pv_v_q       <= 1'b0;
      pv_q         <= '0;
      wr_rsp_valid <= 1'b0;
      wr_rsp_id    <= '0;
      root_upd     <= 1'b0;
    end else begin
      wr_rsp_valid <= 1'b0;
      root_upd     <= 1'b0;
      if (pv_v_q && pv_ready) pv_v_q <= 1'b0;
      if (root_ld) begin
        root <= root_ld_val;
      end else if (q_ready) begin
        if (q_msg.kind == MSG_WB) begin
          root     <= q_msg.upd;
          root_upd <= 1'b1;
        end else if (q_msg.op == OP_WRITE) begin
          if (!q_msg.hit) begin
            root     <= q_msg.upd;
            root_upd <= 1'b1;
          end
          wr_rsp_valid <= 1'b1;
          wr_rsp_id    <= id_t'(q_msg.tag);
        end else if (!q_msg.hit) begin
          pv_v_q <= 1'b1;
          pv_q   <= '{tag: q_msg.tag, hit: 1'b1, off: '0,
                      data: node_t'(root)};
        end
      end
    end
  end

endmodule
