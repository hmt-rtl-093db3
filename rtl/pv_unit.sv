// pv_unit: parallel verification unit shared by all stages (Alg. 1 VERIFICATION).
//
// Level 0 is the counter stage, levels 1..N the MT stages, level N+1 the root
// stage. For one read request each level up to the first trusted one sends one
// message: its node (or counter block, or root) and the slot in it that belongs
// to the child below. Since every stage handles requests in order, the heads of
// the per-level queues always belong to the oldest unfinished request, so the
// unit collects them bottom-up until it meets a message marked trusted (a cache
// or SB hit, or the root). Each untrusted node starts hashing in its own level's
// hash unit as soon as it is collected, so the hashes overlap, and then it checks, for every level l below the trusted one,
//     hash(node_l) == slot off_{l+1} of node_{l+1},
// which is the paper's "for l = L+1 to N-1 parallel: if M_l and H(D_l) != D_{l-1}(O_{l-1})
// return Error". The verdict (tag, ok) is broadcast to the counter stage's ID
// table and to every SB. The hash latency of a chain is therefore one hash
// (163 cycles), whatever its length.
// Interface: in_valid/in_ready/in_msg, one per level 0..N+1; vr_valid/vr the
// verdict pulse (not back-pressured).
// Timing: collecting takes one cycle per level; the verdict follows about 165 cycles
// after the last untrusted node was collected. One request is verified at a time; queue depth is this
// design's choice.
module pv_unit
  import hmt_pkg::*;
#(
  parameter int unsigned N_LEVELS = 5,
  parameter int unsigned Q_DEPTH  = 4
) (
  input  logic    clk,
  input  logic    rst_n,
  input  logic    in_valid [N_LEVELS+2],
  output logic    in_ready [N_LEVELS+2],
  input  pv_msg_t in_msg   [N_LEVELS+2],
  output logic    vr_valid,
  output pv_rsp_t vr
);

  localparam int unsigned NL = N_LEVELS + 2;
  localparam int unsigned LW = $clog2(NL);

  typedef enum logic [1:0] {P_COLLECT, P_HASH, P_CHECK} pstate_e;
  pstate_e state_q;

  logic    q_valid [NL];
  logic    q_ready [NL];
  pv_msg_t q_msg   [NL];

  for (genvar l = 0; l < NL; l++) begin : g_q
    hmt_fifo #(.T(pv_msg_t), .DEPTH(Q_DEPTH)) u_q (
      .clk, .rst_n,
      .in_valid (in_valid[l]), .in_ready (in_ready[l]), .in_data (in_msg[l]),
      .out_valid (q_valid[l]), .out_ready (q_ready[l]), .out_data (q_msg[l]),
      .count ()
    );
  end

  pv_msg_t       got_q [NL];
  logic [LW-1:0] lvl_q, top_q;
  logic [NL-1:0] hdone_q;
  logic          tag_err_q;

  logic  h_start [NL-1];
  logic  h_busy  [NL-1];
  logic  h_done  [NL-1];
  hash_t h_dig   [NL-1];

  for (genvar l = 0; l < NL - 1; l++) begin : g_h
    // an untrusted node starts hashing as soon as it is taken from its queue
    assign h_start[l] = (state_q == P_COLLECT) && (lvl_q == LW'(l)) &&
                        q_valid[l] && !q_msg[l].hit;
    node_hash u_hash (
      .clk, .rst_n, .start (h_start[l]),
      .node (q_msg[l].data),
      .busy (h_busy[l]), .done (h_done[l]), .digest (h_dig[l])
    );
  end

  always_comb begin
    for (int l = 0; l < NL; l++) q_ready[l] = (state_q == P_COLLECT) && (LW'(l) == lvl_q);
  end

  logic ok;
  always_comb begin
    ok = !tag_err_q;
    for (int l = 0; l < NL - 1; l++) begin
      if (LW'(l) < top_q && h_dig[l] != get_slot(got_q[l+1].data, got_q[l+1].off))
        ok = 1'b0;
    end
  end

  logic all_done;
  always_comb begin
    all_done = 1'b1;
    for (int l = 0; l < NL - 1; l++)
      if (LW'(l) < top_q && !hdone_q[l]) all_done = 1'b0;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state_q   <= P_COLLECT;
      lvl_q     <= '0;
      top_q     <= '0;
      hdone_q   <= '0;
      tag_err_q <= 1'b0;
      vr_valid  <= 1'b0;
      vr        <= '0;
      for (int l = 0; l < NL; l++) got_q[l] <= '0;
    end else begin
      vr_valid <= 1'b0;
      for (int l = 0; l < NL - 1; l++) if (h_done[l]) hdone_q[l] <= 1'b1;
      unique case (state_q)
        P_COLLECT: if (q_valid[lvl_q]) begin
          got_q[lvl_q] <= q_msg[lvl_q];
          if (lvl_q != '0 && q_msg[lvl_q].tag != got_q[0].tag) tag_err_q <= 1'b1;
          if (q_msg[lvl_q].hit || lvl_q == LW'(NL - 1)) begin
            top_q   <= lvl_q;
            state_q <= P_HASH;
          end else begin
            lvl_q <= lvl_q + 1'b1;
          end
        end
        P_HASH: if (all_done) state_q <= P_CHECK;
        P_CHECK: begin
          vr_valid  <= 1'b1;
          vr        <= '{tag: got_q[0].tag, ok: ok};
          state_q   <= P_COLLECT;
          lvl_q     <= '0;
          hdone_q   <= '0;
          tag_err_q <= 1'b0;
        end
        default: state_q <= P_COLLECT;
      endcase
    end
  end

  // The chain of one request always starts at the counter level with an
  // untrusted counter block.
  assert property (@(posedge clk) disable iff (!rst_n)
                   (state_q == P_COLLECT && lvl_q == '0 && q_valid[0]) |-> !q_msg[0].hit);

endmodule
