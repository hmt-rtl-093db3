// tb_root_stage: root load, reads that reach the root (root sent to
// verification) or were terminated below (dropped), counter updates that arrive
// live (root replaced, response) or terminated (response only), and write-backs
// (root replaced, no response).
module tb_root_stage;
  import hmt_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic    in_valid = 0, in_ready, pv_valid, pv_ready = 1, root_ld = 0;
  logic    wr_rsp_valid, root_upd;
  up_msg_t in_msg = '0;
  pv_msg_t pv_msg;
  hash_t   root_ld_val = '0, root;
  id_t     wr_rsp_id;
  int checks = 0, failures = 0;

  root_stage #(.IN_DEPTH(4)) dut (.*);

  pv_msg_t pv_q [$];
  id_t     rsp_q [$];
  always @(posedge clk) if (rst_n) begin
    if (pv_valid && pv_ready) pv_q.push_back(pv_msg);
    if (wr_rsp_valid) rsp_q.push_back(wr_rsp_id);
  end

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s (t=%0t)", what, $time); end
  endtask

  task automatic send(input kind_e k, input op_e op, input logic hit, input tag_t tag, input hash_t upd);
    @(negedge clk);
    in_valid = 1;
    in_msg = '{kind: k, op: op, hit: hit, tag: tag, idx: '0, off: '0, upd: upd};
    @(posedge clk);
    while (!in_ready) @(posedge clk);
    @(negedge clk);
    in_valid = 0;
    repeat (3) @(negedge clk);
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    root_ld = 1; root_ld_val = 64'hA5A5_0000_1234_5678;
    @(negedge clk);
    root_ld = 0;
    check(root == 64'hA5A5_0000_1234_5678, "root loaded");
    send(MSG_MT, OP_READ, 0, 3, '0);
    check(pv_q.size() == 1 && pv_q[0].tag == 3 && pv_q[0].hit &&
          hmt_pkg::get_slot(pv_q[0].data, pv_q[0].off) == 64'hA5A5_0000_1234_5678,
          "live read gets the root as trusted top");
    pv_q.delete();
    send(MSG_MT, OP_READ, 1, 4, '0);
    check(pv_q.size() == 0, "terminated read dropped");
    send(MSG_MT, OP_WRITE, 0, 21, 64'h1);
    check(root == 64'h1 && rsp_q.size() == 1 && rsp_q[0] == 21, "live update replaces root and answers");
    send(MSG_MT, OP_WRITE, 1, 22, 64'h2);
    check(root == 64'h1 && rsp_q.size() == 2 && rsp_q[1] == 22, "terminated update answers only");
    send(MSG_WB, OP_WRITE, 0, 0, 64'h3);
    check(root == 64'h3 && rsp_q.size() == 2, "write-back replaces root silently");
    // back-pressure from the verification unit holds the queue
    pv_ready = 0;
    send(MSG_MT, OP_READ, 0, 5, '0);
    send(MSG_MT, OP_WRITE, 0, 23, 64'h4);
    check(root == 64'h3 && rsp_q.size() == 2, "queue waits behind a blocked read");
    pv_ready = 1;
    repeat (4) @(negedge clk);
    check(root == 64'h4 && rsp_q.size() == 3 && pv_q.size() == 1 && pv_q[0].tag == 5, "queue resumes in order");
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
