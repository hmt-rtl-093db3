// tb_hmt_system: end-to-end test of the top level (counter cache + HMT tree)
// with every parameter at its default, i.e. the paper's integrated system:
// 5 tree levels over 32768 counter blocks, a 512-line counter cache and BMT
// caches of 512, 64, 64, 2 and 2 lines.
//
// The untrusted memory (counter blocks and tree nodes) is modelled here with a
// random read latency and starts as a tree of zero counters; a shadow copy of
// the counters gives the expected data. Requests are issued one at a time, as
// the counter cache serves them. The test:
//   1. write-through mode: random reads and writes; every write also updates
//      the tree; a counter block tampered with in memory is rejected on a miss
//      and is not cached;
//   2. write-back mode: random reads and writes with set conflicts in the
//      counter cache, so that dirty blocks are evicted into the tree; a block
//      held dirty in the cache is still returned correctly although memory has
//      an old copy;
//   3. back in write-through mode, reads every counter written and checks it.
// Mechanisms of the cache and of the tree stages are counted; one that never
// happened counts as a failure.
module tb_hmt_system;
  import hmt_pkg::*;
  import hmt_tb_pkg::*;

  localparam int unsigned N    = 5;
  localparam int unsigned NCTR = 1 << (3 * N);

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic       wb_mode = 0;
  logic       req_valid = 0, req_ready;
  op_e        req_op = OP_READ;
  idx_t       req_ctr = '0;
  node_t      req_wdata = '0;
  logic       rsp_valid, rsp_ok, root_ld = 0, root_upd;
  node_t      rsp_data;
  hash_t      root_ld_val = '0, root;
  logic       ctr_mem_req_valid, ctr_mem_req_ready, ctr_mem_rsp_valid;
  mem_req_t   ctr_mem_req;
  node_t      ctr_mem_rsp_data;
  logic       node_mem_req_valid [N], node_mem_req_ready [N], node_mem_rsp_valid [N];
  mem_req_t   node_mem_req [N];
  node_t      node_mem_rsp_data [N];
  logic       wb_mem_req_valid [N], wb_mem_req_ready [N];
  mem_req_t   wb_mem_req [N];
  stage_evt_t evt [N];
  logic       cc_evt_hit, cc_evt_miss, cc_evt_dirty_evict, cc_evt_bmt_write;
  logic [7:0] cc_wr_pending;
  logic [3:0] bmt_inflight;

  hmt_system dut (.*);

  // ---------------- untrusted memory model ----------------
  node_t store [longint];
  node_t init_lvl [N+1];

  function automatic longint key(int l, idx_t i);
    return (longint'(l) << 32) | longint'(i);
  endfunction
  function automatic node_t mem_rd(int l, idx_t i);
    return store.exists(key(l, i)) ? store[key(l, i)] : init_lvl[l];
  endfunction

  // port p: 0 = counters, 1..N = level p
  logic  pend [N+1];
  int    cnt  [N+1];
  node_t rdat [N+1];
  logic  rsp_v [N+1];
  logic  req_v [N+1];
  mem_req_t req_m [N+1];

  always_comb begin
    req_v[0] = ctr_mem_req_valid;
    req_m[0] = ctr_mem_req;
    ctr_mem_req_ready = !pend[0];
    ctr_mem_rsp_valid = rsp_v[0];
    ctr_mem_rsp_data  = rdat[0];
    for (int l = 0; l < N; l++) begin
      req_v[l+1] = node_mem_req_valid[l];
      req_m[l+1] = node_mem_req[l];
      node_mem_req_ready[l] = !pend[l+1];
      node_mem_rsp_valid[l] = rsp_v[l+1];
      node_mem_rsp_data[l]  = rdat[l+1];
      wb_mem_req_ready[l]   = 1'b1;
    end
  end

  int wb_writes = 0;
  always @(posedge clk) begin
    if (!rst_n) begin
      for (int p = 0; p <= N; p++) begin pend[p] <= 0; rsp_v[p] <= 0; cnt[p] <= 0; end
    end else begin
      for (int l = 0; l < N; l++)
        if (wb_mem_req_valid[l]) begin
          store[key(l+1, wb_mem_req[l].idx)] = wb_mem_req[l].wdata;
          wb_writes++;
        end
      for (int p = 0; p <= N; p++) begin
        rsp_v[p] <= 0;
        if (pend[p]) begin
          if (cnt[p] == 0) begin pend[p] <= 0; rsp_v[p] <= 1; end
          else cnt[p] <= cnt[p] - 1;
        end else if (req_v[p]) begin
          if (req_m[p].we) store[key(p, req_m[p].idx)] = req_m[p].wdata;
          else begin
            rdat[p] <= mem_rd(p, req_m[p].idx);
            pend[p] <= 1;
            cnt[p]  <= 4 + ($urandom % 12);
          end
        end
      end
    end
  end

  // ---------------- checking ----------------
  int checks = 0, failures = 0;
  node_t shadow [idx_t];

  function automatic node_t shadow_rd(idx_t c);
    return shadow.exists(c) ? shadow[c] : '0;
  endfunction

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s (t=%0t)", what, $time); end
  endtask

  int n_rejected = 0;

  // one request, waiting for its response
  task automatic access(input op_e op, input idx_t c, input node_t wd, input bit ok_expected = 1);
    @(negedge clk);
    req_valid = 1; req_op = op; req_ctr = c; req_wdata = wd;
    @(posedge clk);
    while (!req_ready) @(posedge clk);
    @(negedge clk);
    req_valid = 0;
    while (!rsp_valid) @(negedge clk);
    if (op == OP_READ) begin
      check(rsp_ok == ok_expected, $sformatf("verdict of read of counter %0d: %0d", c, rsp_ok));
      if (rsp_ok && ok_expected) check(rsp_data == shadow_rd(c), $sformatf("data of counter %0d", c));
      if (!rsp_ok) n_rejected++;
    end else begin
      check(rsp_ok, "write completed");
      shadow[c] = wd;
    end
  endtask

  task automatic settle();
    do @(negedge clk); while (cc_wr_pending != 0);
    repeat (800) @(negedge clk);   // let commits and write-backs in the tree finish
  endtask

  // counters 512 apart share a counter-cache line; 4096 apart a level-1 BMT line
  function automatic idx_t pick();
    int r;
    r = $urandom % 8;
    if (r == 0) return idx_t'($urandom % NCTR);
    return idx_t'(($urandom % 4) * 4096 + ($urandom % 4) * 512 + ($urandom % 16));
  endfunction

  task automatic random_mix(input int n);
    for (int i = 0; i < n; i++) begin
      idx_t c;
      c = pick();
      if ($urandom % 100 < 50) access(OP_READ, c, '0);
      else                     access(OP_WRITE, c, rand_node());
    end
  endtask

  // ---------------- mechanism counters ----------------
  int m_cc_hit, m_cc_miss, m_cc_evict, m_cc_bmt_wr;
  int m_rd_cache_hit, m_rd_miss, m_upd_cache_hit, m_upd_sb_hit, m_upd_mem;
  int m_commit, m_dirty_evict, m_wb_send, m_root_upd;
  always @(posedge clk) if (rst_n) begin
    m_cc_hit    += int'(cc_evt_hit);
    m_cc_miss   += int'(cc_evt_miss);
    m_cc_evict  += int'(cc_evt_dirty_evict);
    m_cc_bmt_wr += int'(cc_evt_bmt_write);
    for (int l = 0; l < N; l++) begin
      m_rd_cache_hit  += int'(evt[l].rd_cache_hit);
      m_rd_miss       += int'(evt[l].rd_miss);
      m_upd_cache_hit += int'(evt[l].upd_cache_hit);
      m_upd_sb_hit    += int'(evt[l].upd_sb_hit);
      m_upd_mem       += int'(evt[l].upd_mem);
      m_commit        += int'(evt[l].commit);
      m_dirty_evict   += int'(evt[l].dirty_evict);
      m_wb_send       += int'(evt[l].wb_send);
    end
    m_root_upd += int'(root_upd);
  end

  task automatic need(input int n, input string what);
    $display("  %-30s %0d", what, n);
    check(n > 0, {"mechanism never happened: ", what});
  endtask

  initial begin
    for (int l = 0; l <= N; l++) init_lvl[l] = init_node(l);
    repeat (4) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    root_ld = 1; root_ld_val = ref_hash(init_lvl[N]);
    @(negedge clk);
    root_ld = 0;

    // 1. write-through
    wb_mode = 0;
    access(OP_WRITE, 100, rand_node());
    access(OP_READ, 100, '0);                    // cache hit
    begin
      int n_prev;
      n_prev = m_cc_bmt_wr;
      access(OP_WRITE, 100, rand_node());        // write hit goes to the tree too
      @(negedge clk);
      check(m_cc_bmt_wr == n_prev + 1, "write-through hit updates the tree");
    end
    settle();
    begin
      node_t saved;
      saved = mem_rd(0, 777);
      store[key(0, 777)] = rand_node();          // forged counter block in memory
      access(OP_READ, 777, '0, 0);
      access(OP_READ, 777, '0, 0);               // rejected again: not cached
      store[key(0, 777)] = saved;
      access(OP_READ, 777, '0, 1);
    end
    random_mix(150);
    settle();

    // 2. write-back
    wb_mode = 1;
    begin
      int n_prev;
      n_prev = m_cc_bmt_wr;
      access(OP_READ, 200, '0);
      access(OP_WRITE, 200, rand_node());
      @(negedge clk);
      check(m_cc_bmt_wr == n_prev, "write-back hit stays in the cache");
      check(mem_rd(0, 200) != shadow_rd(200), "memory holds an old copy of a dirty block");
      access(OP_READ, 200, '0);                 // served from the cache
      access(OP_READ, 200 + 512, '0);           // evicts the dirty block into the tree
      @(negedge clk);
      check(m_cc_evict > 0, "dirty counter block evicted");
      settle();
      check(mem_rd(0, 200) == shadow_rd(200), "evicted block written to memory");
      access(OP_READ, 200, '0);                 // verified through the tree again
    end
    random_mix(250);
    settle();

    // 3. write-through read-back of every written counter (flushes nothing:
    //    dirty blocks are still read from the cache)
    wb_mode = 0;
    foreach (shadow[c]) access(OP_READ, c, '0);
    settle();

    $display("rejected reads %0d, memory write-backs %0d", n_rejected, wb_writes);
    need(m_cc_hit,        "counter cache hit");
    need(m_cc_miss,       "counter cache miss");
    need(m_cc_evict,      "dirty counter block evicted");
    need(m_cc_bmt_wr,     "tree update from counter cache");
    need(m_rd_cache_hit,  "tree read ends on cache hit");
    need(m_rd_miss,       "tree read misses to memory");
    need(m_upd_cache_hit + m_upd_sb_hit, "tree update absorbed on chip");
    need(m_upd_mem,       "tree update applied in memory");
    need(m_commit,        "SB node committed");
    need(m_dirty_evict,   "tree dirty eviction");
    need(m_wb_send,       "write-back hash sent up");
    need(m_root_upd,      "root register updated");
    need(n_rejected,      "verification failure");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3000000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
