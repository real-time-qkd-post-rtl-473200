// kde_pkg: types and constants shared by the key distillation engine.
//
// Holds the protocol selector used by the sifter, the role of an engine
// (transmitter Alice or receiver Bob), the Poly1305 prime 2^130-5 and the
// error-verification constants (16 chunks, 128-bit fold). The numbers 16,
// 128 and 2^130-5 follow the paper; the encodings of the enums are this
// design's own choice.
package kde_pkg;

  typedef enum logic [1:0] {
    PROTO_BB84  = 2'd0,
    PROTO_BBM92 = 2'd1,
    PROTO_COW   = 2'd2
  } proto_e;

  typedef enum logic {
    ROLE_ALICE = 1'b0,
    ROLE_BOB   = 1'b1
  } role_e;

  // Error verification: number of chunks and folded width (Algorithm 2).
  localparam int unsigned VER_CHUNKS = 16;
  localparam int unsigned VER_K      = 128;

  // Poly1305 prime p = 2^130 - 5.
  localparam logic [129:0] P1305 = {2'b11, 128'hFFFFFFFF_FFFFFFFF_FFFFFFFF_FFFFFFFB};

  // Poly1305 clamp of the r half of the key.
  localparam logic [127:0] R_CLAMP = 128'h0ffffffc_0ffffffc_0ffffffc_0fffffff;

  // Fold size of Algorithm 2: halve (rounding up) while larger than 128.
  function automatic int unsigned fold_size(input int unsigned chunk_bits);
    int unsigned s;
    s = chunk_bits;
    for (int i = 0; i < 32; i++) begin
      if (s > VER_K) s = (s + 1) / 2;
    end
    return s;
  endfunction

endpackage
