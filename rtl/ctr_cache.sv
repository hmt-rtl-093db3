// ctr_cache: encryption-counter cache in front of the HMT subsystem (Fig. 7).
//
// Holds verified 64-byte counter blocks, direct-mapped. The BMT is used only on
// a read miss (to fetch and verify the block) and, depending on the mode, for
// writes:
//   wb_mode = 0 (write-through): every counter write is also sent to the BMT as
//               an update;
//   wb_mode = 1 (write-back):    a write only changes the cached block and marks
//               it dirty; the BMT update is sent when a dirty block is evicted,
//               just before the read that replaces it.
// These are the two HMT configurations of the paper's integrated system ("HMT-WT"
// and "HMT-WB"). As in the paper the cache handles one request at a time. The
// paper notes that every counter write is preceded by a read of the same counter,
// so it has no write-miss logic; here a write that misses anyway is sent to the
// BMT as an update without allocating a line (this design's choice). A block
// whose verification fails is returned with ok = 0 and not cached.
//
// Interface:
//   req_*      counter requests (one at a time: req_ready is low while busy)
//   rsp_*      response pulse for every request: read data and its verdict, or
//              the completion of a write (ok = 1)
//   bmt_req_*  requests to hmt_top (ids: even for reads, odd for updates)
//   bmt_rsp_*  hmt_top's read responses; bmt_wr_rsp_valid its write responses
//              (only counted in bmt_wr_pending: the cache does not wait)
//   wb_mode    configuration pin, see above
// Timing: a hit answers 2 cycles after the request is accepted; a read miss
// waits for the BMT verification.
// LINES defaults to the paper's 32 KB counter cache (512 lines of 64 bytes).
module ctr_cache
  import hmt_pkg::*;
#(
  parameter int unsigned LINES = 512
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  wb_mode,
  // user side
  input  logic  req_valid,
  output logic  req_ready,
  input  op_e   req_op,
  input  idx_t  req_ctr,
  input  node_t req_wdata,
  output logic  rsp_valid,
  output logic  rsp_ok,
  output node_t rsp_data,
  // BMT side
  output logic  bmt_req_valid,
  input  logic  bmt_req_ready,
  output op_e   bmt_req_op,
  output idx_t  bmt_req_ctr,
  output node_t bmt_req_wdata,
  output id_t   bmt_req_id,
  input  logic  bmt_rsp_valid,
  input  id_t   bmt_rsp_id,
  input  logic  bmt_rsp_ok,
  input  node_t bmt_rsp_data,
  input  logic  bmt_wr_rsp_valid,
  input  id_t   bmt_wr_rsp_id,
  output logic [7:0] bmt_wr_pending,
  // statistics strobes
  output logic  evt_hit,
  output logic  evt_miss,
  output logic  evt_dirty_evict,
  output logic  evt_bmt_write
);

  localparam int unsigned SW = (LINES > 1) ? $clog2(LINES) : 1;

  typedef enum logic [2:0] {K_IDLE, K_LOOK, K_EVICT, K_FETCH, K_WAIT, K_WTHRU} kstate_e;
  kstate_e state_q;

  node_t            data_q [LINES];
  idx_t             tag_q  [LINES];
  logic [LINES-1:0] valid_q, dirty_q;

  op_e   op_q;
  idx_t  ctr_q;
  node_t wdata_q;
  node_t look_data_q;
  idx_t  look_tag_q;
  logic  look_valid_q, look_dirty_q;
  id_t   id_q;

  wire [SW-1:0] set_q = SW'(ctr_q % LINES);
  wire          hit   = look_valid_q && look_tag_q == ctr_q;

  assign req_ready = (state_q == K_IDLE);

  always_comb begin
    bmt_req_valid = 1'b0;
    bmt_req_op    = OP_READ;
    bmt_req_ctr   = ctr_q;
    bmt_req_wdata = wdata_q;
    bmt_req_id    = id_q;
    unique case (state_q)
      K_EVICT: begin
        bmt_req_valid = 1'b1;
        bmt_req_op    = OP_WRITE;
        bmt_req_ctr   = look_tag_q;
        bmt_req_wdata = look_data_q;
        bmt_req_id    = id_q | id_t'(1);
      end
      K_FETCH: bmt_req_valid = 1'b1;
      K_WTHRU: begin
        bmt_req_valid = 1'b1;
        bmt_req_op    = OP_WRITE;
        bmt_req_id    = id_q | id_t'(1);
      end
      default: ;
    endcase
  end

  // data array: synchronous read
  logic  d_we;
  node_t d_wdata;
  always_ff @(posedge clk) begin
    if (state_q == K_IDLE && req_valid) look_data_q <= data_q[SW'(req_ctr % LINES)];
    if (d_we) data_q[set_q] <= d_wdata;
  end

  always_comb begin
    d_we    = 1'b0;
    d_wdata = wdata_q;
    if (state_q == K_LOOK && op_q == OP_WRITE && hit) d_we = 1'b1;
    if (state_q == K_WAIT && bmt_rsp_valid && bmt_rsp_id == id_q && bmt_rsp_ok) begin
      d_we    = 1'b1;
      d_wdata = bmt_rsp_data;
    end
  end

  always_ff @(posedge clk) begin
    if (d_we) tag_q[set_q] <= ctr_q;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state_q      <= K_IDLE;
      valid_q      <= '0;
      dirty_q      <= '0;
      op_q         <= OP_READ;
      ctr_q        <= '0;
      wdata_q      <= '0;
      look_tag_q   <= '0;
      look_valid_q <= 1'b0;
      look_dirty_q <= 1'b0;
      id_q         <= '0;
      rsp_valid    <= 1'b0;
      rsp_ok       <= 1'b0;
      rsp_data     <= '0;
      evt_hit      <= 1'b0;
      evt_miss     <= 1'b0;
      evt_dirty_evict <= 1'b0;
      evt_bmt_write   <= 1'b0;
    end else begin
      rsp_valid       <= 1'b0;
      evt_hit         <= 1'b0;
      evt_miss        <= 1'b0;
      evt_dirty_evict <= 1'b0;
      evt_bmt_write   <= 1'b0;
      unique case (state_q)
        K_IDLE: if (req_valid) begin
          op_q         <= req_op;
          ctr_q        <= req_ctr;
          wdata_q      <= req_wdata;
          look_tag_q   <= tag_q[SW'(req_ctr % LINES)];
          look_valid_q <= valid_q[SW'(req_ctr % LINES)];
          look_dirty_q <= dirty_q[SW'(req_ctr % LINES)];
          state_q      <= K_LOOK;
        end
        K_LOOK: begin
          evt_hit  <= hit;
          evt_miss <= !hit;
          if (op_q == OP_READ) begin
            if (hit) begin
              rsp_valid <= 1'b1;
              rsp_ok    <= 1'b1;
              rsp_data  <= look_data_q;
              state_q   <= K_IDLE;
            end else if (look_valid_q && look_dirty_q) begin
              state_q <= K_EVICT;
            end else begin
              state_q <= K_FETCH;
            end
          end else if (hit) begin
            dirty_q[set_q] <= wb_mode;
            if (wb_mode) begin
              rsp_valid <= 1'b1;
              rsp_ok    <= 1'b1;
              rsp_data  <= wdata_q;
              state_q   <= K_IDLE;
            end else begin
              state_q <= K_WTHRU;
            end
          end else begin
            state_q <= K_WTHRU;           // write miss: update the tree only
          end
        end
        K_EVICT: if (bmt_req_ready) begin
          dirty_q[set_q]  <= 1'b0;
          evt_dirty_evict <= 1'b1;
          evt_bmt_write   <= 1'b1;
          id_q            <= id_q + id_t'(2);
          state_q         <= K_FETCH;
        end
        K_FETCH: if (bmt_req_ready) state_q <= K_WAIT;
        K_WAIT: if (bmt_rsp_valid && bmt_rsp_id == id_q) begin
          if (bmt_rsp_ok) begin
            valid_q[set_q] <= 1'b1;
            dirty_q[set_q] <= 1'b0;
          end
          rsp_valid <= 1'b1;
          rsp_ok    <= bmt_rsp_ok;
          rsp_data  <= bmt_rsp_data;
          id_q      <= id_q + id_t'(2);
          state_q   <= K_IDLE;
        end
        K_WTHRU: if (bmt_req_ready) begin
          evt_bmt_write <= 1'b1;
          rsp_valid     <= 1'b1;
          rsp_ok        <= 1'b1;
          rsp_data      <= wdata_q;
          id_q          <= id_q + id_t'(2);
          state_q       <= K_IDLE;
        end
        default: state_q <= K_IDLE;
      endcase
    end
  end

  // tree updates issued but not yet acknowledged
  wire wr_issue = (state_q == K_EVICT || state_q == K_WTHRU) && bmt_req_ready;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) bmt_wr_pending <= '0;
    else bmt_wr_pending <= bmt_wr_pending + 8'(wr_issue) - 8'(bmt_wr_rsp_valid);
  end

  // Responses from the BMT arrive only for the read the cache is waiting for.
  assert property (@(posedge clk) disable iff (!rst_n)
                   bmt_rsp_valid |-> (state_q == K_WAIT && bmt_rsp_id == id_q));

  // Write responses belong to updates, which use odd ids.
  assert property (@(posedge clk) disable iff (!rst_n) bmt_wr_rsp_valid |-> bmt_wr_rsp_id[0]);

endmodule
