// auth_mac: side-channel-hardened Wegman-Carter tag for the classical channel.
//
// Computes t = h_{k1_new}(m) XOR k2, where h is the Poly1305 polynomial hash
// and k1_new = T_r * k2 is derived afresh for every message by
// toeplitz_keygen from TRNG bits r and the one-time key k2 (a key part
// from the previous QKD session). Because the hash key changes with every
// tag, power traces of many tags under one key, which a correlation power
// attack needs, are never collected.
//
// Sequence: start (with r_bits and k2) -> one cycle later the derived key
// is ready and ready rises; the message is then fed as 16-byte blocks on
// blk_valid/blk_data/blk_bytes/blk_last (one per clock, only while ready);
// the tag appears one cycle after the last block. The construction follows
// the paper; the handshake is this design's choice.
module auth_mac #(
  parameter int unsigned N = 128,
  parameter int unsigned L = 128
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic           start,
  input  logic [N+L-2:0] r_bits,
  input  logic [127:0]   k2,
  output logic           ready,
  input  logic           blk_valid,
  input  logic [127:0]   blk_data,
  input  logic [4:0]     blk_bytes,
  input  logic           blk_last,
  output logic           tag_valid,
  output logic [127:0]   tag
);
  logic         kg_valid;
  logic [L-1:0] k1_new;
  logic [127:0] k2_q;
  logic         first;     // next block is the first of the message

  toeplitz_keygen #(.N(N), .L(L)) u_keygen (
    .clk, .rst_n,
    .in_valid (start),
    .r_bits,
    .k2       (k2[N-1:0]),
    .out_valid(kg_valid),
    .k1_new
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ready <= 1'b0;
      first <= 1'b0;
      k2_q  <= '0;
    end else begin
      if (start) begin
        k2_q  <= k2;
        ready <= 1'b0;
      end else if (kg_valid) begin
        ready <= 1'b1;
        first <= 1'b1;
      end else if (ready && blk_valid) begin
        first <= 1'b0;
        if (blk_last) ready <= 1'b0;
      end
    end
  end

  poly1305 u_poly (
    .clk, .rst_n,
    .init     (ready && blk_valid && first),
    .key_r    (128'(k1_new)),
    .key_s    (k2_q),
    .xor_mode (1'b1),
    .blk_valid(ready && blk_valid),
    .blk_data,
    .blk_bytes,
    .blk_last,
    .tag_valid,
    .tag
  );

endmodule
