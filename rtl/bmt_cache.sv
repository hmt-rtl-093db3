// bmt_cache: one level's BMT node cache - set-associative (direct-mapped by
// default), write-back, 64-byte lines.
//
// The paper gives every tree level its own cache so that a missing node can only
// evict a node of the same level (Fig. 3). Its integrated system uses
// direct-mapped caches of 32 KB, 4 KB, 4 KB, 128 B and 128 B for levels 1..5, and
// its stand-alone tree test uses 4-way set-associative caches; WAYS selects the
// associativity (1 = direct-mapped). LINES is the total number of 64-byte lines,
// LINES / WAYS sets; node i maps to set i % (LINES / WAYS). The cache only
// stores: the owning stage decides what to read, update or install.
//
// Interface (single port, one operation per cycle):
//   rd_en/rd_idx   - look up node rd_idx. One cycle later rd_hit/rd_data give the
//                    result and vic_dirty/vic_idx/vic_data describe the line that
//                    a fill of rd_idx would replace (valid, dirty and another node).
//   wr_en/wr_idx   - write node wr_idx with wr_data and wr_dirty. A write must
//                    come in the cycle right after the lookup of the same node
//                    (all ways of the set are read at the lookup and the way
//                    is chosen from those registered values):
//                    it goes to the way that lookup chose (the hit way, else the
//                    victim way), so the reported victim is exactly the line
//                    that is replaced.
// Victim choice (this design's; the paper names no policy): an invalid way if
// there is one, else a per-set round-robin pointer that advances on each fill.
// Valid and dirty bits and the pointers reset to zero; the data array is not
// reset. Each line stores the full node index as its tag (simple, a few bits
// more than needed): this design's choice.
module bmt_cache
  import hmt_pkg::*;
#(
  parameter int unsigned LINES = 64,
  parameter int unsigned WAYS  = 1
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  rd_en,
  input  idx_t  rd_idx,
  output logic  rd_hit,
  output node_t rd_data,
  output logic  vic_dirty,
  output idx_t  vic_idx,
  output node_t vic_data,
  input  logic  wr_en,
  input  idx_t  wr_idx,
  input  node_t wr_data,
  input  logic  wr_dirty
);

  localparam int unsigned SETS = LINES / WAYS;
  localparam int unsigned SW   = (SETS > 1) ? $clog2(SETS) : 1;
  localparam int unsigned WW   = (WAYS > 1) ? $clog2(WAYS) : 1;

  node_t           data_q  [WAYS][SETS];
  idx_t            tag_q   [WAYS][SETS];
  logic [SETS-1:0] valid_q [WAYS];
  logic [SETS-1:0] dirty_q [WAYS];
  logic [WW-1:0]   rr_q    [SETS];

  logic [SW-1:0] rd_set;
  assign rd_set = SW'(rd_idx % SETS);

  // look-up stage: every way of the set is read synchronously (tags and data
  // stay in RAM-style arrays); the way is chosen in the next cycle
  idx_t          look_idx_q;
  logic [SW-1:0] look_set_q;
  logic [WW-1:0] look_rr_q;
  logic          look_valid_q [WAYS];
  logic          look_dirty_q [WAYS];
  idx_t          look_tag_q   [WAYS];
  node_t         look_data_q  [WAYS];
  logic          hit_c;
  logic [WW-1:0] way_c;

  always_ff @(posedge clk) begin
    for (int w = 0; w < WAYS; w++) begin
      if (rd_en) begin
        look_data_q[w] <= data_q[w][rd_set];
        look_tag_q[w]  <= tag_q[w][rd_set];
      end
      if (wr_en && way_c == WW'(w)) begin
        data_q[w][look_set_q] <= wr_data;
        tag_q[w][look_set_q]  <= wr_idx;
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int w = 0; w < WAYS; w++) begin
        valid_q[w]      <= '0;
        dirty_q[w]      <= '0;
        look_valid_q[w] <= 1'b0;
        look_dirty_q[w] <= 1'b0;
      end
      for (int i = 0; i < SETS; i++) rr_q[i] <= '0;
      look_idx_q <= '0;
      look_set_q <= '0;
      look_rr_q  <= '0;
    end else begin
      if (rd_en) begin
        for (int w = 0; w < WAYS; w++) begin
          look_valid_q[w] <= valid_q[w][rd_set];
          look_dirty_q[w] <= dirty_q[w][rd_set];
        end
        look_idx_q <= rd_idx;
        look_set_q <= rd_set;
        look_rr_q  <= rr_q[rd_set];
      end
      if (wr_en) begin
        valid_q[way_c][look_set_q] <= 1'b1;
        dirty_q[way_c][look_set_q] <= wr_dirty;
        if (!hit_c && WAYS > 1) rr_q[look_set_q] <= WW'((int'(way_c) + 1) % WAYS);
      end
    end
  end

  // way choice from the registered set: the hit way, else the lowest invalid
  // way, else the round-robin pointer
  always_comb begin
    hit_c = 1'b0;
    way_c = look_rr_q;
    for (int w = WAYS - 1; w >= 0; w--) begin
      if (!look_valid_q[w]) way_c = WW'(w);
    end
    for (int w = 0; w < WAYS; w++) begin
      if (look_valid_q[w] && look_tag_q[w] == look_idx_q) begin
        hit_c = 1'b1;
        way_c = WW'(w);
      end
    end
  end

  assign rd_hit    = hit_c;
  assign rd_data   = look_data_q[way_c];
  assign vic_dirty = look_valid_q[way_c] && look_dirty_q[way_c] && !hit_c;
  assign vic_idx   = look_tag_q[way_c];
  assign vic_data  = look_data_q[way_c];

  // A write installs the node looked up in the cycle before.
  assert property (@(posedge clk) disable iff (!rst_n) wr_en |-> $past(rd_en) && wr_idx == look_idx_q);
  initial assert (WAYS >= 1 && LINES % WAYS == 0) else $error("LINES must be a multiple of WAYS");

endmodule
