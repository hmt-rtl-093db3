// tb_spec_buffer: allocation until full, look-up, in-place update (dirty),
// verdicts for a tag (entries become committable, failed ones stop hitting)
// and commit/drop order.
module tb_spec_buffer;
  import hmt_pkg::*;
  import hmt_tb_pkg::*;

  localparam int unsigned DEPTH = 4;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  idx_t  lk_idx = '0, al_idx = '0, cm_idx;
  logic  lk_hit, al_en = 0, full, up_en = 0, vr_valid = 0;
  logic  cm_valid, cm_ok, cm_dirty, cm_pop = 0;
  logic [1:0] lk_slot, up_slot = '0;
  node_t lk_data, al_data = '0, up_data = '0, cm_data;
  tag_t  al_tag = '0;
  pv_rsp_t vr = '0;
  node_t nodes [DEPTH];
  int checks = 0, failures = 0;

  spec_buffer #(.DEPTH(DEPTH)) dut (.*);

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    check(!full && !cm_valid, "empty after reset");
    // allocate nodes 10..13 with tags 0,0,1,2
    for (int i = 0; i < DEPTH; i++) begin
      nodes[i] = rand_node();
      lk_idx = idx_t'(10 + i);
      #1 check(!lk_hit, "miss before allocation");
      al_en = 1; al_idx = idx_t'(10 + i); al_data = nodes[i]; al_tag = tag_t'(i == 0 ? 0 : i - 1);
      @(negedge clk);
      al_en = 0;
    end
    check(full, "full after DEPTH allocations");
    for (int i = 0; i < DEPTH; i++) begin
      lk_idx = idx_t'(10 + i);
      #1;
      check(lk_hit && lk_data == nodes[i], $sformatf("look-up of node %0d", 10 + i));
    end
    lk_idx = 99;
    #1 check(!lk_hit, "miss for absent node");
    // update node 12 in place
    @(negedge clk);
    lk_idx = 12;
    #1;
    up_en = 1; up_slot = lk_slot; nodes[2] = set_slot(nodes[2], 3, 64'hDEAD_BEEF_0123_4567);
    up_data = nodes[2];
    @(negedge clk);
    up_en = 0;
    #1 check(lk_hit && lk_data == nodes[2], $sformatf("updated node visible slot=%0d hit=%0d", up_slot, lk_hit));
    check(!cm_valid, "nothing to commit before a verdict");
    // tag 1 (node 12) verified ok
    @(negedge clk);
    vr_valid = 1; vr = '{tag: 1, ok: 1};
    @(negedge clk);
    vr_valid = 0;
    check(cm_valid && cm_ok && cm_idx == 12 && cm_dirty && cm_data == nodes[2],
          "verified dirty node offered for commit");
    // tag 0 (nodes 10, 11) failed
    @(negedge clk);
    vr_valid = 1; vr = '{tag: 0, ok: 0};
    @(negedge clk);
    vr_valid = 0;
    lk_idx = 10;
    #1 check(!lk_hit, "failed node no longer hits");
    // drain: three done entries, node 13 (tag 2) stays
    @(negedge clk);
    begin
      int n_ok = 0, n_bad = 0;
      for (int k = 0; k < 3; k++) begin
        check(cm_valid, "done entry available");
        if (cm_ok) n_ok++; else n_bad++;
        if (!cm_ok) check(!cm_dirty, "dropped entry was clean");
        cm_pop = 1;
        @(negedge clk);
        cm_pop = 0;
      end
      check(n_ok == 1 && n_bad == 2, "one commit, two drops");
    end
    check(!cm_valid && !full, "only the unverified entry left");
    lk_idx = 13;
    #1 check(lk_hit && lk_data == nodes[3], "unverified entry still usable");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
