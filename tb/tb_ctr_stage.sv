// tb_ctr_stage: the counter stage with a small counter memory. Checks that a
// read fetches the block, sends it to verification as level 0 and sends the
// parent request up; that verdicts return the oldest ID-table entry with its id,
// data and verdict; that the ID table fills and blocks further reads; and that a
// write stores the block, hashes it and sends the update up with the user id.
module tb_ctr_stage;
  import hmt_pkg::*;
  import hmt_tb_pkg::*;

  localparam int unsigned ID_DEPTH = 4;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic     req_valid = 0, req_ready, rsp_valid, rsp_ok;
  op_e      req_op = OP_READ;
  idx_t     req_ctr = '0;
  node_t    req_wdata = '0, rsp_data;
  id_t      req_id = '0, rsp_id;
  logic     mem_req_valid, mem_req_ready, mem_rsp_valid = 0;
  mem_req_t mem_req;
  node_t    mem_rsp_data = '0;
  logic     up_valid, up_ready = 1, pv_valid, pv_ready = 1, vr_valid = 0;
  up_msg_t  up_msg;
  pv_msg_t  pv_msg;
  pv_rsp_t  vr = '0;
  logic [2:0] inflight;
  int checks = 0, failures = 0;

  ctr_stage #(.ID_DEPTH(ID_DEPTH)) dut (.*);

  node_t store [idx_t];
  logic pend = 0;
  assign mem_req_ready = !pend;
  always @(posedge clk) if (rst_n) begin
    mem_rsp_valid <= 0;
    if (pend) begin pend <= 0; mem_rsp_valid <= 1; end
    else if (mem_req_valid) begin
      if (mem_req.we) store[mem_req.idx] = mem_req.wdata;
      else begin mem_rsp_data <= store[mem_req.idx]; pend <= 1; end
    end
  end

  up_msg_t up_q [$];
  pv_msg_t pv_q [$];
  id_t     rsp_id_q [$];
  logic    rsp_ok_q [$];
  node_t   rsp_d_q [$];
  always @(posedge clk) if (rst_n) begin
    if (up_valid && up_ready) up_q.push_back(up_msg);
    if (pv_valid && pv_ready) pv_q.push_back(pv_msg);
    if (rsp_valid) begin rsp_id_q.push_back(rsp_id); rsp_ok_q.push_back(rsp_ok); rsp_d_q.push_back(rsp_data); end
  end

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s (t=%0t)", what, $time); end
  endtask

  task automatic request(input op_e op, input idx_t c, input node_t wd, input id_t id);
    @(negedge clk);
    req_valid = 1; req_op = op; req_ctr = c; req_wdata = wd; req_id = id;
    @(posedge clk);
    while (!req_ready) @(posedge clk);
    @(negedge clk);
    req_valid = 0;
  endtask

  task automatic verdict(input tag_t tag, input logic ok);
    @(negedge clk);
    vr_valid = 1; vr = '{tag: tag, ok: ok};
    @(negedge clk);
    vr_valid = 0;
  endtask

  initial begin
    for (int i = 0; i < 64; i++) store[idx_t'(i)] = rand_node();
    repeat (3) @(negedge clk);
    rst_n = 1;
    // four reads fill the ID table
    for (int i = 0; i < ID_DEPTH; i++) request(OP_READ, idx_t'(10 + 3 * i), '0, id_t'(100 + i));
    repeat (4) @(negedge clk);
    check(inflight == ID_DEPTH, "ID table holds four reads");
    check(up_q.size() == ID_DEPTH && pv_q.size() == ID_DEPTH, "four parent requests and four level-0 messages");
    for (int i = 0; i < ID_DEPTH && up_q.size() > 0 && pv_q.size() > 0; i++) begin
      up_msg_t u;
      pv_msg_t p;
      idx_t    c;
      u = up_q.pop_front();
      p = pv_q.pop_front();
      c = idx_t'(10 + 3 * i);
      check(u == '{kind: MSG_MT, op: OP_READ, hit: 0, tag: tag_t'(i), idx: c >> 3, off: off_t'(c), upd: '0},
            $sformatf("parent request %0d", i));
      check(p.tag == tag_t'(i) && !p.hit && p.data == store[c], $sformatf("level-0 message %0d", i));
    end
    // a fifth read must wait for a free entry
    @(negedge clk);
    req_valid = 1; req_op = OP_READ; req_ctr = 40; req_id = 104;
    repeat (3) @(negedge clk);
    check(!req_ready, "read blocked while the ID table is full");
    verdict(0, 1);
    @(posedge clk);
    while (!req_ready) @(posedge clk);
    @(negedge clk);
    req_valid = 0;
    verdict(1, 0);
    verdict(2, 1);
    verdict(3, 1);
    verdict(4, 1);
    repeat (3) @(negedge clk);
    check(rsp_id_q.size() == 5, "five read responses");
    for (int i = 0; i < 5 && rsp_id_q.size() > 0; i++) begin
      id_t   id;
      logic  ok;
      node_t d;
      idx_t  c;
      id = rsp_id_q.pop_front();
      ok = rsp_ok_q.pop_front();
      d  = rsp_d_q.pop_front();
      c  = (i < 4) ? idx_t'(10 + 3 * i) : idx_t'(40);
      check(id == id_t'(100 + i) && ok == (i != 1) && d == store[c], $sformatf("response %0d", i));
    end
    check(inflight == 0, "ID table empty");
    up_q.delete(); pv_q.delete();
    // a write: stored, hashed, update sent up, no ID-table entry, no level-0 message
    begin
      node_t w;
      int    t;
      w = rand_node();
      t = 0;
      request(OP_WRITE, 27, w, 55);
      while (up_q.size() == 0 && t < 500) begin @(negedge clk); t++; end
      check(store[27] == w, "counter block written");
      check(up_q.size() == 1 && up_q[0] == '{kind: MSG_MT, op: OP_WRITE, hit: 0, tag: 55, idx: 3,
                                             off: 3, upd: ref_hash(w)}, "update sent up");
      check(pv_q.size() == 0 && inflight == 0, "write not entered for verification");
    end
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
