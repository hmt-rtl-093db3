// tb_hmt_fifo: unit test of the valid/ready FIFO used by the stages.
//
// A 3-deep FIFO of 16-bit words is driven with random pushes and pops, with
// both sides stalling at random, and compared with a queue: data order, the
// count output, ready low only when full and valid low only when empty.
module tb_hmt_fifo;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  typedef logic [15:0] word_t;
  logic  in_valid = 0, in_ready, out_valid, out_ready = 0;
  word_t in_data = '0, out_data;
  logic [1:0] count;

  hmt_fifo #(.T(word_t), .DEPTH(3)) dut (.*);

  int checks = 0, failures = 0;
  word_t model [$];
  int n_full = 0, n_empty_pop = 0;

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s (t=%0t)", what, $time); end
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int i = 0; i < 3000; i++) begin
      @(negedge clk);
      in_valid  = ($urandom % 3) != 0;
      in_data   = word_t'($urandom);
      out_ready = ($urandom % 2) != 0;
      #1;
      check(int'(count) == model.size(), "count");
      check(in_ready == (model.size() < 3), "in_ready");
      check(out_valid == (model.size() > 0), "out_valid");
      if (out_valid) check(out_data == model[0], "data order");
      if (!in_ready) n_full++;
      @(posedge clk);
      if (out_valid && out_ready) void'(model.pop_front());
      if (in_valid && in_ready) model.push_back(in_data);
    end
    check(n_full > 0, "FIFO became full");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
