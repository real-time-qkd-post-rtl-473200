// tb_toeplitz_keygen: checks k1_new = T_r * k2 against the matrix written
// out row by row from its definition (top row r_L..r_{N+L-1}, bottom row
// r_1..r_N), for unit vectors and random inputs, and the one-clock latency.
module tb_toeplitz_keygen;
  localparam int N = 128, L = 128;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic           in_valid, out_valid;
  logic [N+L-2:0] r_bits;
  logic [N-1:0]   k2;
  logic [L-1:0]   k1_new;
  int checks = 0, failures = 0;

  toeplitz_keygen #(.N(N), .L(L)) dut (.*);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // r(i) is r_i, 1-based
  function automatic logic [L-1:0] ref_prod(input logic [N+L-2:0] r, input logic [N-1:0] k);
    bit row [N];
    logic [L-1:0] o;
    for (int a = 1; a <= L; a++) begin
      // row a of the matrix: first entry r_{L-a+1}, then increasing
      for (int b = 1; b <= N; b++) row[b-1] = r[(L - a + b) - 1];
      o[a-1] = 1'b0;
      for (int b = 1; b <= N; b++) o[a-1] ^= row[b-1] & k[b-1];
    end
    return o;
  endfunction

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [L-1:0] exp_v;
    in_valid = 0; r_bits = '0; k2 = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    // k2 = e_1 selects the first column: r_L (top) down to r_1 (bottom)
    for (int t = 0; t < 60; t++) begin
      for (int w = 0; w < (N+L-1+31)/32; w++) r_bits[w*32 +: 32] = $urandom;
      if (t == 0) k2 = '0 | 1;
      else if (t == 1) k2 = '0 | (1 << (N-1));
      else k2 = {$urandom, $urandom, $urandom, $urandom};
      exp_v = ref_prod(r_bits, k2);
      @(negedge clk); in_valid = 1;
      @(negedge clk); in_valid = 0;
      check(out_valid && k1_new == exp_v, $sformatf("product %0d", t));
      if (t == 0) check(k1_new[0] == r_bits[L-1] && k1_new[L-1] == r_bits[0], "first column is r_L..r_1");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
