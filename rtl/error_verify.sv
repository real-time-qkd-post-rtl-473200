// error_verify: XOR-fold plus Poly1305 integrity check of a corrected key.
//
// After error correction the key share of one mapper (total_bits bits,
// streamed one bit per clock on bit_valid/bit_in) is split into 16 chunks
// of L = ceil(total_bits/16) bits (the last chunk may be shorter). Each
// chunk is folded by repeated halving and XOR of the two halves until at
// most 128 bits remain (Algorithm "error verification"). Folding k times
// down to S bits is the same as XORing bit j of the chunk into position
// j mod S, which is what the accumulator does as the bits stream past, so
// no chunk is ever stored. A chunk whose length is not S*2^k behaves as if
// zero-padded at its end. The folded value (bit i = message bit i,
// zero-extended to 16 bytes) is hashed by Poly1305 keyed with the 256-bit
// pre-shared key (r = key[127:0], s = key[255:128]) to give the chunk tag.
//
// The tag of chunk c is put out on tag_valid/tag_idx/tag (to be sent to
// the peer) and compared with peer_tag[c], loaded beforehand through
// peer_we/peer_idx/peer_tag_in; chunk_ok[c] records the result. done rises
// one cycle after the last tag. start (with total_bits and key) clears all
// state. The chunking, folding and tag construction follow the paper;
// bit-serial streaming, the padding rule for uneven sizes and the standard
// (additive) Poly1305 finish are this design's choices.
module error_verify
  import kde_pkg::*;
#(
  parameter int unsigned T = VER_CHUNKS,    // chunks
  parameter int unsigned K = VER_K   // folded width
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 start,
  input  logic [31:0]          total_bits,
  input  logic [255:0]         key,
  input  logic                 peer_we,
  input  logic [$clog2(T)-1:0] peer_idx,
  input  logic [127:0]         peer_tag_in,
  input  logic                 bit_valid,
  input  logic                 bit_in,
  output logic                 tag_valid,
  output logic [$clog2(T)-1:0] tag_idx,
  output logic [127:0]         tag,
  output logic [T-1:0]         chunk_ok,
  output logic                 done
);
  localparam int unsigned CW = $clog2(T);

  logic [127:0]  peer [T];
  logic [31:0]   chunk_len, fold_s;
  logic [31:0]   pos_in_chunk;   // bits seen in the current chunk
  logic [31:0]   fold_pos;       // position in the accumulator
  logic [31:0]   seen;           // bits seen in total
  logic [K-1:0]  acc, acc_next;
  logic [CW-1:0] chunk;
  logic          busy;
  logic          chunk_end;
  logic [CW-1:0] p_idx, t_idx;
  logic          last_tag_q;

  always_comb begin
    acc_next = acc;
    if (bit_valid && busy) acc_next[fold_pos[$clog2(K)-1:0]] = acc[fold_pos[$clog2(K)-1:0]] ^ bit_in;
    chunk_end = bit_valid && busy &&
                ((pos_in_chunk + 1 == chunk_len) || (seen + 1 == total_bits));
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      chunk_len    <= '0;
      fold_s       <= '0;
      pos_in_chunk <= '0;
      fold_pos     <= '0;
      seen         <= '0;
      acc          <= '0;
      chunk        <= '0;
      busy         <= 1'b0;
    end else if (start) begin
      chunk_len    <= (total_bits + T - 1) / T;
      fold_s       <= fold_size((total_bits + T - 1) / T);
      pos_in_chunk <= '0;
      fold_pos     <= '0;
      seen         <= '0;
      acc          <= '0;
      chunk        <= '0;
      busy         <= (total_bits != 0);
    end else if (bit_valid && busy) begin
      seen <= seen + 1;
      if (chunk_end) begin
        acc          <= '0;
        pos_in_chunk <= '0;
        fold_pos     <= '0;
        chunk        <= chunk + 1'b1;
        if (seen + 1 == total_bits) busy <= 1'b0;
      end else begin
        acc          <= acc_next;
        pos_in_chunk <= pos_in_chunk + 1;
        fold_pos     <= (fold_pos + 1 == fold_s) ? '0 : fold_pos + 1;
      end
    end
  end

  always_ff @(posedge clk) begin
    if (peer_we) peer[peer_idx] <= peer_tag_in;
  end

  // One single-block Poly1305 message per chunk.
  logic         ptag_valid;
  logic [127:0] ptag;

  poly1305 u_poly (
    .clk, .rst_n,
    .init     (chunk_end),
    .key_r    (key[127:0]),
    .key_s    (key[255:128]),
    .xor_mode (1'b0),
    .blk_valid(chunk_end),
    .blk_data (128'(acc_next)),
    .blk_bytes(5'd16),
    .blk_last (1'b1),
    .tag_valid(ptag_valid),
    .tag      (ptag)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      p_idx      <= '0;
      last_tag_q <= 1'b0;
      chunk_ok   <= '0;
      done       <= 1'b0;
    end else begin
      p_idx      <= chunk;
      last_tag_q <= chunk_end && (seen + 1 == total_bits);
      if (start) begin
        chunk_ok <= '0;
        done     <= 1'b0;
      end else begin
        if (ptag_valid) chunk_ok[p_idx] <= (ptag == peer[p_idx]);
        if (ptag_valid && last_tag_q) done <= 1'b1;
      end
    end
  end

  assign t_idx     = p_idx;
  assign tag_valid = ptag_valid;
  assign tag_idx   = t_idx;
  assign tag       = ptag;

endmodule
