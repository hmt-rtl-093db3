// hmt_tb_pkg: reference functions for the HMT testbenches.
//
// A plain, loop-based SHA-1 (full 80-word message schedule, written separately
// from the RTL's sliding-window core), the 64-byte node hash built on it, and the
// contents of a freshly initialised tree in which every counter block is zero:
// every node of a level is then identical, eight copies of its child's hash.
package hmt_tb_pkg;
  import hmt_pkg::*;

  localparam logic [159:0] IV = 160'h67452301_EFCDAB89_98BADCFE_10325476_C3D2E1F0;

  function automatic logic [31:0] rol(logic [31:0] x, int n);
    return (x << n) | (x >> (32 - n));
  endfunction

  function automatic logic [159:0] ref_compress(logic [159:0] h, logic [511:0] blk);
    logic [31:0] w [80];
    logic [31:0] a, b, c, d, e, f, k, t;
    for (int i = 0; i < 16; i++) w[i] = blk[511 - 32*i -: 32];
    for (int i = 16; i < 80; i++) w[i] = rol(w[i-3] ^ w[i-8] ^ w[i-14] ^ w[i-16], 1);
    {a, b, c, d, e} = h;
    for (int i = 0; i < 80; i++) begin
      if (i < 20)      begin f = (b & c) | ((~b) & d);          k = 32'h5A827999; end
      else if (i < 40) begin f = b ^ c ^ d;                     k = 32'h6ED9EBA1; end
      else if (i < 60) begin f = (b & c) | (b & d) | (c & d);   k = 32'h8F1BBCDC; end
      else             begin f = b ^ c ^ d;                     k = 32'hCA62C1D6; end
      t = rol(a, 5) + f + e + k + w[i];
      e = d; d = c; c = rol(b, 30); b = a; a = t;
    end
    return {h[159:128] + a, h[127:96] + b, h[95:64] + c, h[63:32] + d, h[31:0] + e};
  endfunction

  // SHA-1 of a 64-byte message, truncated to its first 8 bytes
  function automatic hash_t ref_hash(node_t n);
    logic [159:0] d;
    d = ref_compress(IV, n);
    d = ref_compress(d, {1'b1, 447'b0, 64'd512});
    return d[159:96];
  endfunction

  // Node of level l (0 = counter block) in a tree whose counters are all zero.
  function automatic node_t init_node(int l);
    node_t n;
    n = '0;
    for (int i = 0; i < l; i++) n = {ARITY{ref_hash(n)}};
    return n;
  endfunction

  function automatic node_t rand_node();
    node_t n;
    for (int i = 0; i < NODE_BITS / 32; i++) n[32*i +: 32] = $urandom;
    return n;
  endfunction

endpackage
