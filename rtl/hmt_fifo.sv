// hmt_fifo: small synchronous FIFO with valid/ready on both sides.
//
// Used for the queues between the HMT stages (Fig. 6 draws one in front of every
// stage input and of the verification unit) and for the counter stage's ID table.
// DEPTH entries of type T; push when in_valid && in_ready, pop when out_valid &&
// out_ready. out_data shows the head combinationally. Depth is this design's
// choice. Registers reset to empty.
module hmt_fifo #(
  parameter type         T     = logic [7:0],
  parameter int unsigned DEPTH = 4
) (
  input  logic clk,
  input  logic rst_n,
  input  logic in_valid,
  output logic in_ready,
  input  T     in_data,
  output logic out_valid,
  input  logic out_ready,
  output T     out_data,
  output logic [$clog2(DEPTH+1)-1:0] count
);

  localparam int unsigned PW = (DEPTH > 1) ? $clog2(DEPTH) : 1;

  T                mem_q [DEPTH];
  logic [PW-1:0]   rd_q, wr_q;
  logic [$clog2(DEPTH+1)-1:0] cnt_q;

  wire push = in_valid && in_ready;
  wire pop  = out_valid && out_ready;

  assign in_ready  = (cnt_q != DEPTH[$clog2(DEPTH+1)-1:0]);
  assign out_valid = (cnt_q != '0);
  assign out_data  = mem_q[rd_q];
  assign count     = cnt_q;

  function automatic logic [PW-1:0] inc(logic [PW-1:0] p);
    return (p == PW'(DEPTH - 1)) ? '0 : p + 1'b1;
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rd_q  <= '0;
      wr_q  <= '0;
      cnt_q <= '0;
    end else begin
      if (push) wr_q <= inc(wr_q);
      if (pop)  rd_q <= inc(rd_q);
      if (push && !pop)      cnt_q <= cnt_q + 1'b1;
      else if (pop && !push) cnt_q <= cnt_q - 1'b1;
    end
  end

  always_ff @(posedge clk) begin
    if (push) mem_q[wr_q] <= in_data;
  end

endmodule
