// tb_ctr_cache: unit test of the counter cache against a behavioural tree.
//
// The tree side is modelled: it keeps the true counter blocks, answers reads
// after a random delay (ok = 0 for counters marked forged) and applies updates,
// acknowledging them a few cycles later. LINES = 4, so set conflicts are common.
// The test runs random reads and writes in write-through mode and then in
// write-back mode and checks: read data against a shadow copy, that hits do not
// reach the tree, that in write-through mode every write reaches the tree at
// once, that in write-back mode a write hit does not, that a dirty block reaches
// the tree exactly when it is evicted, and that forged blocks are rejected and
// not cached.
module tb_ctr_cache;
  import hmt_pkg::*;
  import hmt_tb_pkg::*;

  localparam int unsigned LINES = 4;
  localparam int unsigned RANGE = 24;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic  wb_mode = 0;
  logic  req_valid = 0, req_ready;
  op_e   req_op = OP_READ;
  idx_t  req_ctr = '0;
  node_t req_wdata = '0;
  logic  rsp_valid, rsp_ok;
  node_t rsp_data;
  logic  bmt_req_valid, bmt_req_ready;
  op_e   bmt_req_op;
  idx_t  bmt_req_ctr;
  node_t bmt_req_wdata;
  id_t   bmt_req_id;
  logic  bmt_rsp_valid = 0, bmt_rsp_ok = 0, bmt_wr_rsp_valid = 0;
  id_t   bmt_rsp_id = '0, bmt_wr_rsp_id = '0;
  node_t bmt_rsp_data = '0;
  logic [7:0] bmt_wr_pending;
  logic  evt_hit, evt_miss, evt_dirty_evict, evt_bmt_write;

  ctr_cache #(.LINES(LINES)) dut (.*);

  // ---------------- behavioural tree ----------------
  node_t tree [RANGE];
  bit    forged [RANGE];
  int    n_tree_rd = 0, n_tree_wr = 0;
  bit    rd_pend = 0;
  int    rd_cnt;
  idx_t  rd_ctr;
  id_t   rd_id;
  int    ack_q [$];

  assign bmt_req_ready = !rd_pend;

  always @(posedge clk) if (rst_n) begin
    bmt_rsp_valid    <= 0;
    bmt_wr_rsp_valid <= 0;
    if (bmt_req_valid && bmt_req_ready) begin
      if (bmt_req_op == OP_WRITE) begin
        tree[bmt_req_ctr] = bmt_req_wdata;
        n_tree_wr++;
        ack_q.push_back(int'(bmt_req_id));
      end else begin
        n_tree_rd++;
        rd_pend <= 1; rd_cnt <= 3 + $urandom % 10; rd_ctr <= bmt_req_ctr; rd_id <= bmt_req_id;
      end
    end
    if (rd_pend) begin
      if (rd_cnt == 0) begin
        rd_pend <= 0;
        bmt_rsp_valid <= 1; bmt_rsp_id <= rd_id;
        bmt_rsp_ok <= !forged[rd_ctr];
        bmt_rsp_data <= forged[rd_ctr] ? rand_node() : tree[rd_ctr];
      end else rd_cnt <= rd_cnt - 1;
    end
    if (ack_q.size() > 0 && $urandom % 4 == 0) begin
      bmt_wr_rsp_valid <= 1;
      bmt_wr_rsp_id    <= id_t'(ack_q.pop_front());
    end
  end

  // ---------------- checking ----------------
  int checks = 0, failures = 0;
  node_t shadow [RANGE];
  // reference cache state
  int  ref_tag [LINES];
  bit  ref_valid [LINES], ref_dirty [LINES];

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s (t=%0t)", what, $time); end
  endtask

  int m_hit, m_miss, m_evict, m_fail;

  task automatic access(input op_e op, input int c, input node_t wd);
    int s, rd0, wr0;
    bit hit, exp_evict, exp_tree_rd, exp_tree_wr;
    s   = c % LINES;
    hit = ref_valid[s] && ref_tag[s] == c;
    exp_evict   = (op == OP_READ) && !hit && ref_valid[s] && ref_dirty[s];
    exp_tree_rd = (op == OP_READ) && !hit;
    exp_tree_wr = exp_evict || (op == OP_WRITE && (!hit || !wb_mode));
    rd0 = n_tree_rd; wr0 = n_tree_wr;
    @(negedge clk);
    req_valid = 1; req_op = op; req_ctr = idx_t'(c); req_wdata = wd;
    @(posedge clk);
    while (!req_ready) @(posedge clk);
    @(negedge clk);
    req_valid = 0;
    while (!rsp_valid) @(negedge clk);
    if (exp_evict) check(tree[ref_tag[s]] == shadow[ref_tag[s]], "evicted dirty block reached the tree");
    if (op == OP_READ) begin
      check(rsp_ok == !forged[c] || hit, $sformatf("verdict of counter %0d", c));
      if (rsp_ok) check(rsp_data == shadow[c], $sformatf("data of counter %0d", c));
      if (!rsp_ok) m_fail++;
      if (!hit && rsp_ok) begin ref_valid[s] = 1; ref_tag[s] = c; ref_dirty[s] = 0; end
    end else begin
      check(rsp_ok, "write completes");
      shadow[c] = wd;
      if (hit) ref_dirty[s] = wb_mode;
    end
    if (exp_evict) ref_dirty[s] = 0;
    check(n_tree_rd - rd0 == int'(exp_tree_rd), $sformatf("tree reads for counter %0d", c));
    check(n_tree_wr - wr0 == int'(exp_tree_wr), $sformatf("tree writes for counter %0d", c));
    m_hit   += int'(hit);
    m_miss  += int'(!hit);
    m_evict += int'(exp_evict);
  endtask

  initial begin
    for (int c = 0; c < RANGE; c++) begin tree[c] = rand_node(); shadow[c] = tree[c]; forged[c] = 0; end
    for (int s = 0; s < LINES; s++) begin ref_valid[s] = 0; ref_dirty[s] = 0; ref_tag[s] = 0; end
    forged[5] = 1;
    repeat (3) @(negedge clk);
    rst_n = 1;
    access(OP_READ, 5, '0);                // forged block: rejected, not cached
    access(OP_READ, 5, '0);
    for (int pass = 0; pass < 2; pass++) begin
      wb_mode = pass[0];
      for (int i = 0; i < 300; i++) begin
        int c;
        c = $urandom % RANGE;
        if (c == 5 && $urandom % 4 != 0) c = 6;
        if ($urandom % 100 < 55) access(OP_READ, c, '0);
        else begin
          access(OP_WRITE, c, rand_node());
          if (c == 5) forged[5] = 0;       // a written block is genuine from now on
        end
      end
    end
    repeat (100) @(negedge clk);
    check(bmt_wr_pending == 0, "all tree updates acknowledged");
    $display("hits %0d, misses %0d, dirty evictions %0d, rejected %0d", m_hit, m_miss, m_evict, m_fail);
    check(m_hit > 0 && m_miss > 0 && m_evict > 0 && m_fail > 0, "all cases exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
