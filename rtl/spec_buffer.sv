// spec_buffer: speculative buffer (SB) of one MT stage.
//
// A node fetched from memory by a read is not yet trusted. The paper keeps it in
// the stage's SB while the parallel verification unit checks it; later requests
// may already use it (an SB hit ends their chain), and updates and write-backs
// that find it modify it in place and mark it dirty instead of adding an entry.
// Once its request's verdict arrives the entry is moved into the BMT cache
// (commit); a node whose verification failed is dropped.
//
// Interface:
//   lk_idx -> lk_hit/lk_slot/lk_data : combinational lookup (failed entries excluded)
//   al_en  with al_tag/al_idx/al_data : allocate a clean, unverified entry
//                                       (caller checks full first)
//   up_en  with up_slot/up_data       : overwrite an entry's node, set dirty
//   vr_valid/vr                       : verdict for a tag; marks its entries done
//   cm_valid/cm_ok/cm_idx/cm_data/cm_dirty, cm_pop : oldest-slot done entry to
//                                       commit (cm_ok) or drop (!cm_ok); cm_pop frees it
// DEPTH (entries) is not given by the paper; 4 is this design's choice.
module spec_buffer
  import hmt_pkg::*;
#(
  parameter int unsigned DEPTH = 4
) (
  input  logic  clk,
  input  logic  rst_n,
  input  idx_t  lk_idx,
  output logic  lk_hit,
  output logic [$clog2(DEPTH)-1:0] lk_slot,
  output node_t lk_data,
  input  logic  al_en,
  input  tag_t  al_tag,
  input  idx_t  al_idx,
  input  node_t al_data,
  output logic  full,
  input  logic  up_en,
  input  logic [$clog2(DEPTH)-1:0] up_slot,
  input  node_t up_data,
  input  logic  vr_valid,
  input  pv_rsp_t vr,
  output logic  cm_valid,
  output logic  cm_ok,
  output idx_t  cm_idx,
  output node_t cm_data,
  output logic  cm_dirty,
  input  logic  cm_pop
);

  localparam int unsigned SW = $clog2(DEPTH);

  typedef struct packed {
    logic  valid;
    logic  done;    // verdict received
    logic  ok;      // verdict
    logic  dirty;
    tag_t  tag;
    idx_t  idx;
    node_t data;
  } sb_entry_t;

  sb_entry_t ent_q [DEPTH];
  logic [SW-1:0] free_slot, cm_slot;
  logic          have_free;

  always_comb begin
    lk_hit  = 1'b0;
    lk_slot = '0;
    lk_data = '0;
    for (int i = 0; i < DEPTH; i++) begin
      if (ent_q[i].valid && !(ent_q[i].done && !ent_q[i].ok) &&
          ent_q[i].idx == lk_idx && !lk_hit) begin
        lk_hit  = 1'b1;
        lk_slot = SW'(i);
        lk_data = ent_q[i].data;
      end
    end
  end

  always_comb begin
    have_free = 1'b0;
    free_slot = '0;
    cm_valid  = 1'b0;
    cm_slot   = '0;
    for (int i = DEPTH - 1; i >= 0; i--) begin
      if (!ent_q[i].valid) begin
        have_free = 1'b1;
        free_slot = SW'(i);
      end
      if (ent_q[i].valid && ent_q[i].done) begin
        cm_valid = 1'b1;
        cm_slot  = SW'(i);
      end
    end
  end

  assign full     = !have_free;
  assign cm_ok    = ent_q[cm_slot].ok;
  assign cm_idx   = ent_q[cm_slot].idx;
  assign cm_data  = ent_q[cm_slot].data;
  assign cm_dirty = ent_q[cm_slot].dirty;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < DEPTH; i++) ent_q[i] <= '0;
    end else begin
      for (int i = 0; i < DEPTH; i++) begin
        if (vr_valid && ent_q[i].valid && !ent_q[i].done && ent_q[i].tag == vr.tag) begin
          ent_q[i].done <= 1'b1;
          ent_q[i].ok   <= vr.ok;
        end
      end
      if (up_en) begin
        ent_q[up_slot].data  <= up_data;
        ent_q[up_slot].dirty <= 1'b1;
      end
      if (cm_pop && cm_valid) ent_q[cm_slot].valid <= 1'b0;
      if (al_en && have_free) begin
        ent_q[free_slot].valid <= 1'b1;
        ent_q[free_slot].done  <= 1'b0;
        ent_q[free_slot].ok    <= 1'b0;
        ent_q[free_slot].dirty <= 1'b0;
        ent_q[free_slot].tag   <= al_tag;
        ent_q[free_slot].idx   <= al_idx;
        ent_q[free_slot].data  <= al_data;
      end
    end
  end

  // An allocation must not duplicate a node already buffered.
  assert property (@(posedge clk) disable iff (!rst_n)
                   al_en |-> (have_free && !(lk_hit && lk_idx == al_idx)));

endmodule
