// tb_hmt_top: end-to-end test of the HMT subsystem at a reduced size
// (3 levels, 512 counters, caches of 4, 2 and 2 lines, 2-entry SBs), small
// enough that every mechanism happens many times.
//
// The untrusted memory is modelled here: one store for counter blocks and tree
// nodes, with a random read latency, initialised as a tree of zero counters.
// A shadow copy of the counters gives the expected read data. The test:
//   1. loads the root and reads counters through an all-miss chain, checking
//      that verification costs less than two hash latencies beyond the memory
//      accesses (the verification unit overlaps the hashes);
//   2. tampers with a level-2 node and with a counter block in memory and checks
//      that the reads through them are rejected, then restores them;
//   3. runs a random pipelined mix of reads and writes over a small counter
//      range, checking every response;
//   4. reads every counter it wrote and checks data and verdict.
// Each mechanism (cache/SB hits for reads and updates, read misses, updates in
// memory, commits, dirty evictions, write-back propagation, root updates, SB-full
// stalls, failed verifications, several reads in flight) is counted; one that
// never happened counts as a failure.
module tb_hmt_top;
  import hmt_pkg::*;
  import hmt_tb_pkg::*;

  localparam int unsigned N    = 3;
  localparam int unsigned NCTR = 1 << (3 * N);

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic       req_valid = 0, req_ready;
  op_e        req_op = OP_READ;
  idx_t       req_ctr = '0;
  node_t      req_wdata = '0;
  id_t        req_id = '0;
  logic       rsp_valid, rsp_ok, wr_rsp_valid, root_ld = 0, root_upd;
  id_t        rsp_id, wr_rsp_id;
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
  logic [3:0] inflight;

  hmt_top #(
    .N_LEVELS (N), .CACHE_LINES ('{4, 2, 2, 2, 2, 2, 2, 2}), .SB_DEPTH (2), .ID_DEPTH (8), .Q_DEPTH (4)
  ) dut (.*);

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

  // ---------------- bookkeeping ----------------
  int checks = 0, failures = 0;
  node_t shadow [idx_t];
  node_t exp_data [id_t];
  logic  exp_ok [id_t];
  logic  outstanding [id_t];
  int    n_rsp = 0, n_wr_rsp = 0, n_fail_seen = 0;
  id_t   next_id = 0;
  longint issue_time [id_t];
  longint cycle = 0;
  longint last_latency = 0;
  always @(posedge clk) cycle <= cycle + 1;

  function automatic node_t shadow_rd(idx_t c);
    return shadow.exists(c) ? shadow[c] : '0;
  endfunction

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s (t=%0t)", what, $time); end
  endtask

  always @(posedge clk) if (rst_n) begin
    if (rsp_valid) begin
      n_rsp++;
      if (!outstanding.exists(rsp_id) || !outstanding[rsp_id]) check(0, "unexpected read response");
      else begin
        outstanding[rsp_id] = 0;
        check(rsp_ok == exp_ok[rsp_id], $sformatf("verdict of read id %0d: %0d", rsp_id, rsp_ok));
        if (exp_ok[rsp_id]) check(rsp_data == exp_data[rsp_id], $sformatf("data of read id %0d", rsp_id));
        if (!rsp_ok) n_fail_seen++;
        last_latency = cycle - issue_time[rsp_id];
      end
    end
    if (wr_rsp_valid) begin
      n_wr_rsp++;
      if (!outstanding.exists(wr_rsp_id) || !outstanding[wr_rsp_id]) check(0, "unexpected write response");
      else outstanding[wr_rsp_id] = 0;
    end
  end

  task automatic issue(input op_e op, input idx_t c, input node_t wd, input bit ok_expected = 1);
    @(negedge clk);
    while (outstanding.exists(next_id) && outstanding[next_id]) @(negedge clk);
    req_valid = 1; req_op = op; req_ctr = c; req_wdata = wd; req_id = next_id;
    @(posedge clk);
    while (!req_ready) @(posedge clk);
    outstanding[next_id] = 1;
    issue_time[next_id]  = cycle;
    if (op == OP_READ) begin
      exp_data[next_id] = shadow_rd(c);
      exp_ok[next_id]   = ok_expected;
    end else shadow[c] = wd;
    next_id = next_id + 1;
    @(negedge clk);
    req_valid = 0;
  endtask

  task automatic drain();
    bit busy;
    do begin
      @(negedge clk);
      busy = 0;
      foreach (outstanding[i]) if (outstanding[i]) busy = 1;
    end while (busy);
    repeat (600) @(negedge clk);   // let commits and write-backs settle
  endtask

  // ---------------- mechanism counters ----------------
  int m_rd_cache_hit, m_rd_sb_hit, m_rd_miss, m_upd_cache_hit, m_upd_sb_hit, m_upd_mem;
  int m_commit, m_dirty_evict, m_wb_send, m_root_upd, m_sb_stall, m_pipelined;
  always @(posedge clk) if (rst_n) begin
    for (int l = 0; l < N; l++) begin
      m_rd_cache_hit  += int'(evt[l].rd_cache_hit);
      m_rd_sb_hit     += int'(evt[l].rd_sb_hit);
      m_rd_miss       += int'(evt[l].rd_miss);
      m_upd_cache_hit += int'(evt[l].upd_cache_hit);
      m_upd_sb_hit    += int'(evt[l].upd_sb_hit);
      m_upd_mem       += int'(evt[l].upd_mem);
      m_commit        += int'(evt[l].commit);
      m_dirty_evict   += int'(evt[l].dirty_evict);
      m_wb_send       += int'(evt[l].wb_send);
      m_sb_stall      += int'(evt[l].sb_full_stall);
    end
    m_root_upd  += int'(root_upd);
    m_pipelined += int'(inflight > 1);
  end

  task automatic need(input int n, input string what);
    $display("  %-28s %0d", what, n);
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

    // 0. a write before anything is cached updates every level in memory and
    //    then the root register
    issue(OP_WRITE, 300, rand_node());
    drain();
    check(m_root_upd == 1, "write through an empty cache updates the root");

    // 1. all-miss read and its latency
    issue(OP_READ, 5, '0);
    drain();
    $display("all-miss read latency: %0d cycles", last_latency);
    check(last_latency < 4 * 20 + 2 * 163, "all-miss read verified within one hash latency plus memory time");

    // 2. tampering: a level-2 node (not cached yet) and a counter block
    begin
      node_t saved;
      saved = mem_rd(2, 3);
      store[key(2, 3)] = rand_node();
      issue(OP_READ, 3 * 64 + 9, '0, 0);       // chain passes level-2 node 3
      drain();
      store[key(2, 3)] = saved;
      issue(OP_READ, 3 * 64 + 9, '0, 1);
      drain();
      saved = mem_rd(0, 7);
      store[key(0, 7)] = rand_node();           // replayed / forged counter block
      issue(OP_READ, 7, '0, 0);
      drain();
      store[key(0, 7)] = saved;
      issue(OP_READ, 7, '0, 1);
      drain();
    end

    // 3. random pipelined mix over a small counter range
    for (int i = 0; i < 400; i++) begin
      idx_t c;
      int r;
      r = $urandom % 100;
      c = idx_t'(($urandom % 4 == 0) ? ($urandom % NCTR) : ($urandom % 48) * 5);
      if (r < 55) issue(OP_READ, c, '0);
      else        issue(OP_WRITE, c, rand_node());
      if ($urandom % 8 == 0) repeat ($urandom % 300) @(negedge clk);
    end
    drain();

    // 4. read back every written counter
    foreach (shadow[c]) issue(OP_READ, c, '0);
    drain();

    $display("reads answered %0d, writes answered %0d, rejected %0d, memory write-backs %0d",
             n_rsp, n_wr_rsp, n_fail_seen, wb_writes);
    need(m_rd_cache_hit,  "read ends on cache hit");
    need(m_rd_sb_hit,     "read ends on SB hit");
    need(m_rd_miss,       "read misses to memory");
    need(m_upd_cache_hit, "update absorbed by cache");
    need(m_upd_sb_hit,    "update absorbed by SB");
    need(m_upd_mem,       "update applied in memory");
    need(m_commit,        "SB node committed");
    need(m_dirty_evict,   "dirty eviction");
    need(m_wb_send,       "write-back hash sent up");
    need(m_root_upd,      "root register updated");
    need(m_sb_stall,      "read stalled on full SB");
    need(n_fail_seen,     "verification failure");
    need(m_pipelined,     "cycles with >1 read in flight");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2000000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
