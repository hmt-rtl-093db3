// tb_hmt_subsystem: the stand-alone tree-subsystem workload of the evaluation:
// repetitive sequential traversal (RST) of the counter space with several
// strides, on a 3-level tree (512 counter blocks, 2 MB of data) with 4-way
// set-associative BMT caches.
//
// Cache sizes: the evaluation used 1 KB + 448 B + 64 B, all 4-way. 1 KB is 16
// lines (4 sets). 448 B (7 lines) cannot be split into 4-way sets, so level 2
// gets 8 lines (2 sets of 4); the single 64-byte line of level 3 is
// direct-mapped by necessity.
// For each stride of 2^6 .. 2^12 bytes of counter space (one counter block is 64
// bytes, so 2^6 visits every counter) the test makes two traversals of
// reads and then one of writes, pipelined as far as the tree accepts them, and
// prints the cycles per request. Every read is checked against a shadow copy and
// must be verified; every write must be answered. Cache hits, misses, on-chip
// and in-memory updates, dirty evictions and write-back hashes must all happen.
module tb_hmt_subsystem;
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
    .N_LEVELS (N), .CACHE_LINES ('{16, 8, 1, 1, 1, 1, 1, 1}),
    .CACHE_WAYS ('{4, 4, 1, 1, 1, 1, 1, 1})
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

  int m_rd_hit, m_rd_miss, m_upd_onchip, m_upd_mem, m_dirty_evict, m_wb_send;
  always @(posedge clk) if (rst_n) begin
    for (int l = 0; l < N; l++) begin
      m_rd_hit      += int'(evt[l].rd_cache_hit) + int'(evt[l].rd_sb_hit);
      m_rd_miss     += int'(evt[l].rd_miss);
      m_upd_onchip  += int'(evt[l].upd_cache_hit) + int'(evt[l].upd_sb_hit);
      m_upd_mem     += int'(evt[l].upd_mem);
      m_dirty_evict += int'(evt[l].dirty_evict);
      m_wb_send     += int'(evt[l].wb_send);
    end
  end

  task automatic need(input int n, input string what);
    $display("  %-28s %0d", what, n);
    check(n > 0, {"mechanism never happened: ", what});
  endtask

  initial begin
    longint t0;
    int     nreq;
    for (int l = 0; l <= N; l++) init_lvl[l] = init_node(l);
    repeat (4) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    root_ld = 1; root_ld_val = ref_hash(init_lvl[N]);
    @(negedge clk);
    root_ld = 0;

    for (int k = 6; k <= 12; k += 2) begin
      int step;
      step = 1 << (k - 6);
      for (int pass = 0; pass < 3; pass++) begin
        op_e op;
        op = (pass < 2) ? OP_READ : OP_WRITE;
        t0 = cycle; nreq = 0;
        for (int c = 0; c < NCTR; c += step) begin
          issue(op, idx_t'(c), op == OP_WRITE ? rand_node() : '0);
          nreq++;
        end
        drain();
        $display("stride 2^%0d %s pass: %0d requests, %0d cycles per request",
                 k, op == OP_READ ? "read " : "write", nreq, (cycle - t0 - 600) / nreq);
      end
    end
    check(n_rsp + n_wr_rsp > 0, "requests answered");
    need(m_rd_hit,      "read ends on chip");
    need(m_rd_miss,     "read misses to memory");
    need(m_upd_onchip,  "update absorbed on chip");
    need(m_upd_mem,     "update applied in memory");
    need(m_dirty_evict, "dirty eviction");
    need(m_wb_send,     "write-back hash sent up");
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
