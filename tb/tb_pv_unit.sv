// tb_pv_unit: the verification unit for a 2-level tree (levels 0..3). Builds
// consistent chains from random counter blocks and checks the verdict for
// chains that end at the root, at a level-1 hit and at a level-2 hit, for
// chains with a forged counter, node or root, and that a full chain is
// verified within one hash latency of its last message (the hashes overlap).
module tb_pv_unit;
  import hmt_pkg::*;
  import hmt_tb_pkg::*;

  localparam int unsigned N = 2;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic    in_valid [N+2];
  logic    in_ready [N+2];
  pv_msg_t in_msg   [N+2];
  logic    vr_valid;
  pv_rsp_t vr;
  int checks = 0, failures = 0;

  pv_unit #(.N_LEVELS(N), .Q_DEPTH(4)) dut (.*);

  pv_rsp_t vr_q [$];
  longint  vr_t [$];
  longint  cycle = 0;
  always @(posedge clk) if (rst_n) begin
    cycle <= cycle + 1;
    if (vr_valid) begin vr_q.push_back(vr); vr_t.push_back(cycle); end
  end

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s (t=%0t)", what, $time); end
  endtask

  task automatic put(input int l, input pv_msg_t m);
    @(negedge clk);
    in_valid[l] = 1; in_msg[l] = m;
    @(posedge clk);
    while (!in_ready[l]) @(posedge clk);
    @(negedge clk);
    in_valid[l] = 0;
  endtask

  // top: level of the trusted message; bad: level to corrupt (-1: none)
  task automatic chain(input tag_t tag, input int top, input int bad, input logic exp_ok);
    node_t n [N+2];
    off_t  o [N+2];
    longint t0;
    n[0] = rand_node();
    o[0] = '0;
    for (int l = 1; l <= N + 1; l++) begin
      o[l] = off_t'($urandom);
      n[l] = (l == N + 1) ? '0 : rand_node();
      n[l] = set_slot(n[l], o[l], ref_hash(n[l-1]));
    end
    // a trusted node only matters through the slot of its child
    if (bad >= 0 && bad == top) n[bad] = n[bad] ^ (node_t'(1) << (int'(o[bad]) * SLOT_BITS + $urandom % SLOT_BITS));
    else if (bad >= 0)          n[bad] = n[bad] ^ (node_t'(1) << ($urandom % NODE_BITS));
    for (int l = 0; l <= top; l++)
      put(l, '{tag: tag, hit: (l == top), off: o[l], data: n[l]});
    t0 = cycle;
    while (vr_q.size() == 0 && cycle < t0 + 1000) @(negedge clk);
    if (vr_q.size() == 0) check(0, "no verdict");
    else begin
      pv_rsp_t r = vr_q.pop_front();
      longint  t = vr_t.pop_front();
      check(r.tag == tag && r.ok == exp_ok,
            $sformatf("chain tag %0d top %0d bad %0d: ok=%0d", tag, top, bad, r.ok));
      check(t - t0 <= 170, $sformatf("verdict %0d cycles after the last message", t - t0));
    end
  endtask

  initial begin
    for (int l = 0; l < N + 2; l++) begin in_valid[l] = 0; in_msg[l] = '0; end
    repeat (3) @(negedge clk);
    rst_n = 1;
    chain(1, 3, -1, 1);   // all levels untrusted, root on top
    chain(2, 1, -1, 1);   // level-1 node was a hit
    chain(3, 2, -1, 1);   // level-2 node was a hit
    chain(4, 3, 0, 0);    // forged counter block
    chain(5, 3, 1, 0);    // forged level-1 node
    chain(6, 3, 2, 0);    // forged level-2 node
    chain(7, 3, 3, 0);    // wrong root
    chain(8, 1, 1, 0);    // trusted node disagrees with the counter
    chain(9, 2, 0, 0);
    for (int i = 0; i < 10; i++) chain(tag_t'(10 + i), 1 + ($urandom % 3), -1, 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
