// poly1305: polynomial universal hash over the prime 2^130 - 5.
//
// The message is split into 16-byte blocks; each block, read as a
// little-endian integer with a 1 appended above its last byte, is added to
// the accumulator, which is then multiplied by the clamped key half r and
// reduced modulo p (Horner's rule: a fixed multiplicand, n multiplications
// for n blocks). After the last block the accumulator is fully reduced and
// combined with the key half s: added modulo 2^128 (standard Poly1305,
// xor_mode = 0) or XORed (the Wegman-Carter form t = h_k1(m) XOR k2 used for
// authentication, xor_mode = 1).
//
// Interface: init loads r, s and xor_mode and clears the accumulator. A
// block is taken in every cycle that blk_valid is high, including the cycle
// of init. blk_bytes (1..16) gives the length of a short final block. The
// tag appears on tag/tag_valid one cycle after the block flagged blk_last.
// One block per clock: the 131x124-bit product and its folding
// (2^130 = 5 mod p) are one combinational step. The algorithm follows the
// paper (Bernstein's Poly1305, Horner evaluation); the one-block-per-clock
// datapath is this design's choice.
module poly1305
  import kde_pkg::*;
(
  input  logic         clk,
  input  logic         rst_n,
  input  logic         init,
  input  logic [127:0] key_r,
  input  logic [127:0] key_s,
  input  logic         xor_mode,
  input  logic         blk_valid,
  input  logic [127:0] blk_data,    // little-endian: message byte i in bits [8i+7:8i]
  input  logic [4:0]   blk_bytes,   // 1..16
  input  logic         blk_last,
  output logic         tag_valid,
  output logic [127:0] tag
);
  logic [127:0] r_q, s_q;
  logic         xm_q;
  logic [130:0] h_q;          // partially reduced accumulator, < 2^131

  logic [127:0] r_cur, s_cur;
  logic         xm_cur;
  logic [130:0] h_cur;
  logic [131:0] n_blk;        // block with its high 1 bit
  logic [131:0] a;
  logic [259:0] prod;
  logic [134:0] t1;
  logic [130:0] h_next;
  logic [130:0] h_fin;
  logic [129:0] h_mod;

  assign r_cur  = init ? (key_r & R_CLAMP) : r_q;
  assign s_cur  = init ? key_s : s_q;
  assign xm_cur = init ? xor_mode : xm_q;
  assign h_cur  = init ? '0 : h_q;

  always_comb begin
    n_blk = '0;
    for (int b = 0; b < 16; b++)
      if (5'(b) < blk_bytes) n_blk[8*b +: 8] = blk_data[8*b +: 8];
    n_blk[8*blk_bytes] = 1'b1;
    a    = {1'b0, h_cur} + n_blk;
    prod = 260'(a) * 260'(r_cur);
    // fold twice: x = lo + 5*hi with hi = x >> 130
    t1     = 135'(prod[129:0]) + 135'(prod[259:130]) * 135'd5;
    h_next = 131'(t1[129:0]) + 131'(t1[134:130]) * 131'd5;
    // full reduction of a value below 2^131 (at most three subtractions of p)
    h_fin = h_next;
    for (int k = 0; k < 3; k++)
      if (h_fin >= {1'b0, P1305}) h_fin = h_fin - {1'b0, P1305};
    h_mod = h_fin[129:0];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      r_q       <= '0;
      s_q       <= '0;
      xm_q      <= 1'b0;
      h_q       <= '0;
      tag_valid <= 1'b0;
      tag       <= '0;
    end else begin
      tag_valid <= 1'b0;
      if (init) begin
        r_q  <= key_r & R_CLAMP;
        s_q  <= key_s;
        xm_q <= xor_mode;
        h_q  <= '0;
      end
      if (blk_valid) begin
        h_q <= h_next;
        if (blk_last) begin
          tag_valid <= 1'b1;
          tag       <= xm_cur ? (h_mod[127:0] ^ s_cur) : (h_mod[127:0] + s_cur);
        end
      end
    end
  end

endmodule
