// tb_node_hash: checks the truncated 64-byte node hash against the reference
// SHA-1 on a zero node and on random nodes, and its 163-cycle latency
// (two compressions of 80 cycles plus hand-over).
module tb_node_hash;
  import hmt_pkg::*;
  import hmt_tb_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic  start = 0, busy, done;
  node_t node = '0;
  hash_t digest;
  int checks = 0, failures = 0;

  node_hash dut (.clk, .rst_n, .start, .node, .busy, .done, .digest);

  task automatic run(input node_t n);
    int cyc;
    hash_t exp;
    exp = ref_hash(n);
    @(negedge clk);
    node = n; start = 1;
    @(negedge clk);
    start = 0;
    node = '0;    // the hasher must have captured its input
    cyc = 1;
    while (!done) begin @(negedge clk); cyc++; end
    checks++;
    if (digest !== exp) begin
      failures++;
      $display("FAIL digest %h expected %h", digest, exp);
    end
    checks++;
    if (cyc != 163) begin
      failures++;
      $display("FAIL latency %0d cycles, expected 163", cyc);
    end
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    run('0);
    for (int i = 0; i < 10; i++) run(rand_node());
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
