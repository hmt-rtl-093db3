// wb_engine: write-back engine (WBE) of one MT stage.
//
// When a verified node moved into the level's cache evicts a dirty node, the WBE
// takes the victim, writes it to memory and hashes it in parallel, then offers
// the hash to its stage, which forwards it to the parent level as a write-back
// (relaxed update) request: Alg. 2 "node write-back request ... for current level".
// While the WBE holds a victim the stage does not touch that node (busy/busy_idx),
// so a later access cannot read a stale copy from memory. One victim at a time;
// the paper does not size the WBE.
//
// Interface:
//   ev_valid/ev_ready, ev_idx, ev_data : victim from the cache
//   mem_req_valid/mem_req_ready/mem_req: write port to the tree memory
//   wb_valid/wb_ready, wb_idx, wb_hash : child index and its new hash, for the stage
//   busy, busy_idx                     : a victim is held
// Latency: memory write and hash overlap; wb_valid rises one cycle after both end.
// The memory port uses the shared mem_req_t type; its write-enable bit is
// constant 1 because the engine only writes.
module wb_engine
  import hmt_pkg::*;
(
  input  logic     clk,
  input  logic     rst_n,
  input  logic     ev_valid,
  output logic     ev_ready,
  input  idx_t     ev_idx,
  input  node_t    ev_data,
  output logic     mem_req_valid,
  input  logic     mem_req_ready,
  output mem_req_t mem_req,
  output logic     wb_valid,
  input  logic     wb_ready,
  output idx_t     wb_idx,
  output hash_t    wb_hash,
  output logic     busy,
  output idx_t     busy_idx
);

  typedef enum logic [1:0] {W_IDLE, W_WORK, W_OUT} wstate_e;
  wstate_e state_q;

  idx_t  idx_q;
  node_t data_q;
  logic  wr_done_q, hash_done_q;
  logic  h_done;
  hash_t h_digest;
  logic  h_busy;

  assign ev_ready = (state_q == W_IDLE);
  wire accept = ev_valid && ev_ready;

  node_hash u_hash (
    .clk, .rst_n,
    .start  (accept),
    .node   (ev_data),
    .busy   (h_busy),
    .done   (h_done),
    .digest (h_digest)
  );

  assign mem_req_valid = (state_q == W_WORK) && !wr_done_q;
  assign mem_req       = '{we: 1'b1, idx: idx_q, wdata: data_q};
  assign wb_valid      = (state_q == W_OUT);
  assign wb_idx        = idx_q;
  assign busy          = (state_q != W_IDLE);
  assign busy_idx      = idx_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state_q     <= W_IDLE;
      idx_q       <= '0;
      data_q      <= '0;
      wr_done_q   <= 1'b0;
      hash_done_q <= 1'b0;
      wb_hash     <= '0;
    end else begin
      unique case (state_q)
        W_IDLE: if (accept) begin
          state_q     <= W_WORK;
          idx_q       <= ev_idx;
          data_q      <= ev_data;
          wr_done_q   <= 1'b0;
          hash_done_q <= 1'b0;
        end
        W_WORK: begin
          if (mem_req_valid && mem_req_ready) wr_done_q <= 1'b1;
          if (h_done) begin
            hash_done_q <= 1'b1;
            wb_hash     <= h_digest;
          end
          if ((wr_done_q || (mem_req_valid && mem_req_ready)) && (hash_done_q || h_done))
            state_q <= W_OUT;
        end
        W_OUT: if (wb_ready) state_q <= W_IDLE;
        default: state_q <= W_IDLE;
      endcase
    end
  end

endmodule
