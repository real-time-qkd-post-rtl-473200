// tb_ref_pkg: reference models used by the testbenches.
//
// Written independently of the RTL and deliberately in a different style:
// Poly1305 uses a bit-serial modular multiplication instead of a wide
// product with folding; the XOR fold literally halves the chunk the way the
// verification algorithm is stated; the Toeplitz products are written
// from the matrix definitions; LDPC syndromes are computed from an explicit
// edge list.
package tb_ref_pkg;

  localparam logic [131:0] P = {4'b0011, 128'hFFFFFFFF_FFFFFFFF_FFFFFFFF_FFFFFFFB};

  function automatic logic [131:0] addmod(input logic [131:0] a, input logic [131:0] b);
    logic [131:0] t;
    t = a + b;
    if (t >= P) t = t - P;
    return t;
  endfunction

  // a*b mod p, a,b < p, by double-and-add from the top bit of b
  function automatic logic [131:0] mulmod(input logic [131:0] a, input logic [131:0] b);
    logic [131:0] res;
    res = '0;
    for (int i = 131; i >= 0; i--) begin
      res = addmod(res, res);
      if (b[i]) res = addmod(res, a);
    end
    return res;
  endfunction

  // Poly1305 of a message of len bytes held in msg[0..len-1].
  function automatic logic [127:0] poly1305_ref(input logic [7:0] msg [], input int len,
                                                input logic [127:0] r_in, input logic [127:0] s,
                                                input bit xor_mode);
    logic [131:0] h, n, r;
    int nb, blen;
    r  = {4'b0, r_in & 128'h0ffffffc_0ffffffc_0ffffffc_0fffffff};
    h  = '0;
    nb = (len + 15) / 16;
    for (int b = 0; b < nb; b++) begin
      blen = (len - 16*b >= 16) ? 16 : len - 16*b;
      n = '0;
      for (int i = 0; i < blen; i++) n[8*i +: 8] = msg[16*b + i];
      n[8*blen] = 1'b1;
      if (n >= P) n = n - P;
      h = mulmod(addmod(h, n), r);
    end
    return xor_mode ? (h[127:0] ^ s) : (h[127:0] + s);
  endfunction

  // Algorithm: halve and XOR while longer than 128 bits. A chunk whose
  // length is not fold*2^k is first zero-padded at its end to that length.
  // Returns the folded bits, zero-extended to 128.
  function automatic logic [127:0] fold_ref(input bit chunk [], input int len);
    bit buf_q [];
    int size, s, k, half;
    s = len; k = 0;
    while (s > 128) begin s = (s + 1) / 2; k++; end
    size = s << k;
    buf_q = new[size];
    for (int i = 0; i < size; i++) buf_q[i] = (i < len) ? chunk[i] : 1'b0;
    while (size > 128) begin
      half = size / 2;
      for (int i = 0; i < half; i++) buf_q[i] = buf_q[i] ^ buf_q[i + half];
      size = half;
    end
    fold_ref = '0;
    for (int i = 0; i < size; i++) fold_ref[i] = buf_q[i];
  endfunction

  // Tag of one folded chunk (one 16-byte block, standard Poly1305).
  function automatic logic [127:0] chunk_tag_ref(input logic [127:0] folded, input logic [255:0] key);
    logic [7:0] m [];
    m = new[16];
    for (int i = 0; i < 16; i++) m[i] = folded[8*i +: 8];
    return poly1305_ref(m, 16, key[127:0], key[255:128], 1'b0);
  endfunction

endpackage
