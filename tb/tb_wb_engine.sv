// tb_wb_engine: hands dirty victims to the write-back engine with a memory that
// is sometimes slow to accept, and checks the memory write (index, data, write
// flag), the hash offered to the stage, busy/busy_idx while it works, and that
// the hash and the write overlap (one hash latency plus a few cycles).
module tb_wb_engine;
  import hmt_pkg::*;
  import hmt_tb_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic     ev_valid = 0, ev_ready, mem_req_valid, mem_req_ready = 0;
  logic     wb_valid, wb_ready = 0, busy;
  idx_t     ev_idx = '0, wb_idx, busy_idx;
  node_t    ev_data = '0;
  mem_req_t mem_req;
  hash_t    wb_hash;
  int checks = 0, failures = 0;
  int writes = 0;
  mem_req_t last_wr;

  wb_engine dut (.*);

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s", what); end
  endtask

  always @(posedge clk) if (rst_n) if (mem_req_valid && mem_req_ready) begin writes++; last_wr = mem_req; end

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int i = 0; i < 6; i++) begin
      node_t n;
      idx_t  x;
      int    cyc, delay;
      n = rand_node();
      x = idx_t'($urandom % 1000);
      delay = (i % 2) ? 200 : 3;        // memory accepts late or early
      @(negedge clk);
      check(ev_ready && !busy, "idle before the victim");
      ev_valid = 1; ev_idx = x; ev_data = n;
      @(negedge clk);
      ev_valid = 0; ev_data = '0;
      check(busy && busy_idx == x, "busy with the victim's index");
      cyc = 1;
      while (!wb_valid) begin
        mem_req_ready = (cyc >= delay);
        @(negedge clk);
        cyc++;
      end
      mem_req_ready = 0;
      check(writes == i + 1, "exactly one memory write per victim");
      check(last_wr.we && last_wr.idx == x && last_wr.wdata == n, "memory write contents");
      check(wb_idx == x && wb_hash == ref_hash(n), "hash offered to the stage");
      check(cyc <= ((delay > 163) ? delay : 163) + 3, $sformatf("write and hash overlap (%0d cycles)", cyc));
      repeat (2) @(negedge clk);
      check(wb_valid, "offer held until taken");
      wb_ready = 1;
      @(negedge clk);
      wb_ready = 0;
      check(!wb_valid && !busy, "released after hand-over");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
