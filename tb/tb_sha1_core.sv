// tb_sha1_core: checks the SHA-1 compression core against the FIPS 180 example
// "abc" and against the reference model on random blocks and chaining values,
// and checks that a compression takes 81 cycles from start to done.
module tb_sha1_core;
  import hmt_tb_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic         start = 0, busy, done;
  logic [159:0] h_in = '0, h_out;
  logic [511:0] block = '0;
  int checks = 0, failures = 0;

  sha1_core dut (.clk, .rst_n, .start, .h_in, .block, .busy, .done, .h_out);

  task automatic run(input logic [159:0] h, input logic [511:0] b, input logic [159:0] exp);
    int cyc;
    @(negedge clk);
    h_in = h; block = b; start = 1;
    @(negedge clk);
    start = 0;
    cyc = 1;
    while (!done) begin @(negedge clk); cyc++; end
    checks++;
    if (h_out !== exp) begin
      failures++;
      $display("FAIL digest %h expected %h", h_out, exp);
    end
    checks++;
    if (cyc != 81) begin
      failures++;
      $display("FAIL latency %0d cycles, expected 81", cyc);
    end
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    // "abc" padded into one block
    run(IV, {24'h616263, 8'h80, 416'b0, 64'd24},
        160'ha9993e36_4706816a_ba3e2571_7850c26c_9cd0d89d);
    for (int i = 0; i < 20; i++) begin
      logic [511:0] b;
      logic [159:0] h;
      for (int j = 0; j < 16; j++) b[32*j +: 32] = $urandom;
      for (int j = 0; j < 5; j++)  h[32*j +: 32] = $urandom;
      run(h, b, ref_compress(h, b));
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
