// toeplitz_keygen: fresh polynomial-hash key k1_new = T_r * k2 over GF(2).
//
// Countermeasure against correlation power analysis of the MAC: instead of
// reusing a fixed hash key, every authentication derives its key from the
// one-time key k2 and N+L-1 random bits r_1..r_{N+L-1}. T_r is the L x N
// Toeplitz matrix whose top row is r_L .. r_{N+L-1} and whose bottom row is
// r_1 .. r_N, i.e. entry (a, b) (1-based) is r_{L-a+b}. Bit a-1 of k1_new
// is component a of the product; bit b-1 of k2 is component b; bit i-1 of
// r_bits is r_i. The product is one AND-XOR layer, registered: out_valid
// follows in_valid by one cycle. The matrix layout follows the paper's
// equation; N = L = 128 (the size of a Poly1305 key half) is this design's
// choice.
module toeplitz_keygen #(
  parameter int unsigned N = 128,
  parameter int unsigned L = 128
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             in_valid,
  input  logic [N+L-2:0]   r_bits,
  input  logic [N-1:0]     k2,
  output logic             out_valid,
  output logic [L-1:0]     k1_new
);
  logic [L-1:0] prod;

  always_comb begin
    // row a uses r_{L-a+1} .. r_{L-a+N}, i.e. r_bits[L-a +: N]
    for (int a = 1; a <= L; a++)
      prod[a-1] = ^(r_bits[L-a +: N] & k2);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      k1_new    <= '0;
    end else begin
      out_valid <= in_valid;
      if (in_valid) k1_new <= prod;
    end
  end

endmodule
