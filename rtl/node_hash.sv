// node_hash: SHA-1 of one 64-byte node (or counter block), truncated to 64 bits.
//
// A 64-byte message takes two SHA-1 compressions: the node itself, then the
// constant padding block (0x80, zeros, bit length 512). The digest's first eight
// bytes (H0,H1) become the 8-byte slot the node occupies in its parent. Hashing
// and truncation follow the paper ("each resultant hash value is then truncated
// to form a part of the respective parent nodes"); which bytes are kept is this
// design's choice.
//
// Interface: pulse start while busy is low, with node valid in that cycle. done
// pulses once, 163 cycles after start, with digest valid (held until the next start).
module node_hash
  import hmt_pkg::*;
(
  input  logic  clk,
  input  logic  rst_n,
  input  logic  start,
  input  node_t node,
  output logic  busy,
  output logic  done,
  output hash_t digest
);

  localparam logic [159:0] SHA1_IV =
    160'h67452301_EFCDAB89_98BADCFE_10325476_C3D2E1F0;
  localparam logic [511:0] PAD_BLOCK = {1'b1, 447'b0, 64'd512};

  typedef enum logic [1:0] {H_IDLE, H_BLK1, H_BLK2} hstate_e;
  hstate_e state_q;

  logic         core_start, core_busy, core_done;
  logic [159:0] core_hin, core_hout;
  logic [511:0] core_blk;

  always_comb begin
    core_start = 1'b0;
    core_hin   = SHA1_IV;
    core_blk   = node;
    if (state_q == H_IDLE && start) begin
      core_start = 1'b1;
    end else if (state_q == H_BLK1 && core_done) begin
      core_start = 1'b1;
      core_hin   = core_hout;
      core_blk   = PAD_BLOCK;
    end
  end

  sha1_core u_core (
    .clk, .rst_n,
    .start (core_start),
    .h_in  (core_hin),
    .block (core_blk),
    .busy  (core_busy),
    .done  (core_done),
    .h_out (core_hout)
  );

  assign busy = (state_q != H_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state_q <= H_IDLE;
      done    <= 1'b0;
      digest  <= '0;
    end else begin
      done <= 1'b0;
      unique case (state_q)
        H_IDLE: if (start) state_q <= H_BLK1;
        H_BLK1: if (core_done) state_q <= H_BLK2;
        H_BLK2: if (core_done) begin
          state_q <= H_IDLE;
          done    <= 1'b1;
          digest  <= core_hout[159:96];
        end
        default: state_q <= H_IDLE;
      endcase
    end
  end

endmodule
