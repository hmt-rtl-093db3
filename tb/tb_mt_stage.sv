// tb_mt_stage: one MT stage (2 cache lines, 2 SB entries) driven message by
// message, with a small node memory and random back-pressure on its outputs.
// Covers: read miss (node to SB and to verification), read hit in the SB,
// update absorbed by the SB, commit after a verdict, read hit in the cache,
// update and write-back that miss (node changed in memory, new hash sent up),
// write-back absorbed by the cache (nothing sent up), dirty eviction through
// the write-back engine, pass-through of terminated chains and a failed verdict.
module tb_mt_stage;
  import hmt_pkg::*;
  import hmt_tb_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic       in_valid = 0, in_ready, up_valid, up_ready, pv_valid, pv_ready;
  up_msg_t    in_msg = '0, up_msg;
  pv_msg_t    pv_msg;
  logic       vr_valid = 0;
  pv_rsp_t    vr = '0;
  logic       mem_req_valid, mem_req_ready, mem_rsp_valid = 0;
  mem_req_t   mem_req;
  node_t      mem_rsp_data = '0;
  logic       wbm_req_valid, wbm_req_ready;
  mem_req_t   wbm_req;
  stage_evt_t evt;
  int checks = 0, failures = 0;

  mt_stage #(.LINES(2), .SB_DEPTH(2), .IN_DEPTH(4)) dut (.*);

  // node memory: one read at a time, 5-cycle latency
  node_t store [idx_t];
  logic  pend = 0;
  int    cnt;
  assign mem_req_ready = !pend;
  assign wbm_req_ready = 1'b1;
  always @(posedge clk) if (rst_n) begin
    mem_rsp_valid <= 0;
    if (wbm_req_valid) store[wbm_req.idx] = wbm_req.wdata;
    if (pend) begin
      if (cnt == 0) begin pend <= 0; mem_rsp_valid <= 1; end else cnt <= cnt - 1;
    end else if (mem_req_valid) begin
      if (mem_req.we) store[mem_req.idx] = mem_req.wdata;
      else begin mem_rsp_data <= store[mem_req.idx]; pend <= 1; cnt <= 4; end
    end
  end

  // outputs with random back-pressure
  up_msg_t up_q [$];
  pv_msg_t pv_q [$];
  always @(negedge clk) begin up_ready = ($urandom % 4) != 0; pv_ready = ($urandom % 4) != 0; end
  always @(posedge clk) if (rst_n) begin
    if (up_valid && up_ready) up_q.push_back(up_msg);
    if (pv_valid && pv_ready) pv_q.push_back(pv_msg);
  end

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s (t=%0t)", what, $time); end
  endtask

  task automatic send(input kind_e k, input op_e op, input logic hit, input tag_t tag,
                      input idx_t idx, input off_t off, input hash_t upd);
    @(negedge clk);
    in_valid = 1;
    in_msg = '{kind: k, op: op, hit: hit, tag: tag, idx: idx, off: off, upd: upd};
    @(posedge clk);
    while (!in_ready) @(posedge clk);
    @(negedge clk);
    in_valid = 0;
  endtask

  task automatic verdict(input tag_t tag, input logic ok);
    @(negedge clk);
    vr_valid = 1; vr = '{tag: tag, ok: ok};
    @(negedge clk);
    vr_valid = 0;
  endtask

  task automatic expect_up(input up_msg_t exp, input string what);
    int t = 0;
    while (up_q.size() == 0 && t < 2000) begin @(negedge clk); t++; end
    if (up_q.size() == 0) check(0, {what, ": no message"});
    else begin
      up_msg_t m = up_q.pop_front();
      check(m == exp, $sformatf("%s: got %p", what, m));
    end
  endtask

  task automatic expect_pv(input pv_msg_t exp, input string what);
    int t = 0;
    while (pv_q.size() == 0 && t < 2000) begin @(negedge clk); t++; end
    if (pv_q.size() == 0) check(0, {what, ": no message"});
    else begin
      pv_msg_t m = pv_q.pop_front();
      check(m == exp, {what, ": verification message"});
    end
  endtask

  task automatic quiet(input int n, input string what);
    repeat (n) @(negedge clk);
    check(up_q.size() == 0 && pv_q.size() == 0, {what, ": nothing sent"});
  endtask

  int n_miss = 0, n_evict = 0;
  always @(posedge clk) if (rst_n) begin n_miss += int'(evt.rd_miss); n_evict += int'(evt.dirty_evict); end

  node_t m5, m9, m12, m7;
  hash_t h1, h2, h3, h4;

  initial begin
    for (int i = 0; i < 16; i++) store[idx_t'(i)] = rand_node();
    h1 = 64'h1111; h2 = 64'h2222; h3 = 64'h3333; h4 = 64'h4444;
    m5 = store[5]; m9 = store[9]; m12 = store[12]; m7 = store[7];
    repeat (3) @(negedge clk);
    rst_n = 1;

    // 1. read miss
    send(MSG_MT, OP_READ, 0, 1, 5, 2, '0);
    expect_pv('{tag: 1, hit: 0, off: 2, data: m5}, "read miss");
    expect_up('{kind: MSG_MT, op: OP_READ, hit: 0, tag: 1, idx: 0, off: 5, upd: '0}, "read miss");
    // 2. second read of node 5 hits the SB
    send(MSG_MT, OP_READ, 0, 2, 5, 3, '0);
    expect_pv('{tag: 2, hit: 1, off: 3, data: m5}, "SB read hit");
    expect_up('{kind: MSG_MT, op: OP_READ, hit: 1, tag: 2, idx: 0, off: 0, upd: '0}, "SB read hit");
    // 3. update absorbed by the SB
    send(MSG_MT, OP_WRITE, 0, 7, 5, 1, h1);
    m5 = set_slot(m5, 1, h1);
    expect_up('{kind: MSG_MT, op: OP_WRITE, hit: 1, tag: 7, idx: 0, off: 0, upd: '0}, "SB update hit");
    check(store[5] != m5, "SB update leaves memory alone");
    // 4. verdict: node 5 moves into the cache
    verdict(1, 1);
    verdict(2, 1);
    // 5. read hit in the cache sees the updated node
    send(MSG_MT, OP_READ, 0, 3, 5, 0, '0);
    expect_pv('{tag: 3, hit: 1, off: 0, data: m5}, "cache read hit");
    expect_up('{kind: MSG_MT, op: OP_READ, hit: 1, tag: 3, idx: 0, off: 0, upd: '0}, "cache read hit");
    // 6. update miss: node 9 changed in memory, hash goes up
    send(MSG_MT, OP_WRITE, 0, 8, 9, 4, h2);
    m9 = set_slot(m9, 4, h2);
    expect_up('{kind: MSG_MT, op: OP_WRITE, hit: 0, tag: 8, idx: 1, off: 1, upd: ref_hash(m9)}, "update miss");
    check(store[9] == m9, "update miss written to memory");
    // 7. write-back from below that misses
    send(MSG_WB, OP_WRITE, 0, 0, 12, 6, h3);
    m12 = set_slot(m12, 6, h3);
    expect_up('{kind: MSG_WB, op: OP_WRITE, hit: 0, tag: 0, idx: 1, off: 4, upd: ref_hash(m12)}, "write-back miss");
    check(store[12] == m12, "write-back miss written to memory");
    // 8. write-back absorbed by the cached node 5
    send(MSG_WB, OP_WRITE, 0, 0, 5, 7, h4);
    m5 = set_slot(m5, 7, h4);
    quiet(30, "write-back cache hit");
    // 9. read of node 7 (same set as 5), verified: node 5 is evicted dirty
    send(MSG_MT, OP_READ, 0, 4, 7, 0, '0);
    expect_pv('{tag: 4, hit: 0, off: 0, data: m7}, "read miss in busy set");
    expect_up('{kind: MSG_MT, op: OP_READ, hit: 0, tag: 4, idx: 0, off: 7, upd: '0}, "read miss in busy set");
    verdict(4, 1);
    expect_up('{kind: MSG_WB, op: OP_WRITE, hit: 0, tag: 0, idx: 0, off: 5, upd: ref_hash(m5)}, "dirty eviction");
    check(store[5] == m5, "evicted node written back");
    check(n_evict == 1, "one dirty eviction");
    // 10. terminated chain passes through
    send(MSG_MT, OP_WRITE, 1, 9, 0, 0, '0);
    expect_up('{kind: MSG_MT, op: OP_WRITE, hit: 1, tag: 9, idx: 0, off: 0, upd: '0}, "pass-through");
    // 11. failed verification: the node is dropped and read again next time
    send(MSG_MT, OP_READ, 0, 10, 3, 0, '0);
    expect_pv('{tag: 10, hit: 0, off: 0, data: store[3]}, "read before failure");
    expect_up('{kind: MSG_MT, op: OP_READ, hit: 0, tag: 10, idx: 0, off: 3, upd: '0}, "read before failure");
    verdict(10, 0);
    repeat (5) @(negedge clk);
    send(MSG_MT, OP_READ, 0, 11, 3, 0, '0);
    expect_pv('{tag: 11, hit: 0, off: 0, data: store[3]}, "read after failure misses again");
    expect_up('{kind: MSG_MT, op: OP_READ, hit: 0, tag: 11, idx: 0, off: 3, upd: '0}, "read after failure");
    check(n_miss == 4, $sformatf("four read misses (%0d)", n_miss));
    quiet(20, "end");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
