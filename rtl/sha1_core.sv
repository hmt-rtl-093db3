// sha1_core: one SHA-1 compression (FIPS 180-4) of a 512-bit block, iterative.
//
// The paper uses SHA-1 for every BMT hash; the core itself is the standard
// algorithm, built here in its smallest iterative form: one of the 80 rounds per
// clock, the message schedule kept as a 16-word sliding window.
//
// Interface: pulse start (accepted while busy is low) with h_in (chaining value,
// H0 in bits [159:128]) and block (word 0 in bits [511:480]). done pulses for one
// cycle 81 cycles after start with h_out = h_in + compressed state; h_out holds until
// the next start.
module sha1_core (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         start,
  input  logic [159:0] h_in,
  input  logic [511:0] block,
  output logic         busy,
  output logic         done,
  output logic [159:0] h_out
);

  logic [31:0]  a_q, b_q, c_q, d_q, e_q;
  logic [31:0]  w_q [16];
  logic [159:0] hin_q;
  logic [6:0]   round_q;

  function automatic logic [31:0] rotl(logic [31:0] x, int unsigned n);
    return (x << n) | (x >> (32 - n));
  endfunction

  logic [31:0] f, k, temp, w_next;

  always_comb begin
    if (round_q < 7'd20) begin
      f = (b_q & c_q) | (~b_q & d_q);
      k = 32'h5A827999;
    end else if (round_q < 7'd40) begin
      f = b_q ^ c_q ^ d_q;
      k = 32'h6ED9EBA1;
    end else if (round_q < 7'd60) begin
      f = (b_q & c_q) | (b_q & d_q) | (c_q & d_q);
      k = 32'h8F1BBCDC;
    end else begin
      f = b_q ^ c_q ^ d_q;
      k = 32'hCA62C1D6;
    end
    temp   = rotl(a_q, 5) + f + e_q + k + w_q[0];
    w_next = rotl(w_q[13] ^ w_q[8] ^ w_q[2] ^ w_q[0], 1);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy    <= 1'b0;
      done    <= 1'b0;
      round_q <= '0;
      a_q <= '0; b_q <= '0; c_q <= '0; d_q <= '0; e_q <= '0;
      hin_q   <= '0;
      h_out   <= '0;
      for (int i = 0; i < 16; i++) w_q[i] <= '0;
    end else begin
      done <= 1'b0;
      if (!busy) begin
        if (start) begin
          busy    <= 1'b1;
          round_q <= '0;
          hin_q   <= h_in;
          {a_q, b_q, c_q, d_q, e_q} <= h_in;
          for (int i = 0; i < 16; i++) w_q[i] <= block[511 - 32*i -: 32];
        end
      end else begin
        e_q <= d_q;
        d_q <= c_q;
        c_q <= rotl(b_q, 30);
        b_q <= a_q;
        a_q <= temp;
        for (int i = 0; i < 15; i++) w_q[i] <= w_q[i+1];
        w_q[15] <= w_next;
        if (round_q == 7'd79) begin
          busy  <= 1'b0;
          done  <= 1'b1;
          h_out <= {hin_q[159:128] + temp,  hin_q[127:96] + a_q,
                    hin_q[95:64]   + rotl(b_q, 30), hin_q[63:32] + c_q,
                    hin_q[31:0]    + d_q};
        end else begin
          round_q <= round_q + 7'd1;
        end
      end
    end
  end

endmodule
