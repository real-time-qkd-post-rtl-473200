// tb_privacy_amp: Toeplitz hashing with a small segment (16 rows per pass)
// so that several passes, a partial last segment and a segment count of
// one are all exercised. The testbench plays the seed memory and the key
// source (replaying W with random gaps on every pass_req) and checks each
// final-key bit against the r x n matrix product T[i][j] = s[j-i+r-1]
// written out directly, the number of passes, and the cycle budget of
// n + 2S + a few clocks per pass.
module tb_privacy_amp;
  localparam int S = 16;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic        start, busy, done, seed_rd, seed_bit, pass_req, in_valid, in_bit, in_end;
  logic        out_valid, out_bit;
  logic [31:0] r_len, seed_addr, out_idx;
  int checks = 0, failures = 0;

  privacy_amp #(.PA_SEG(S)) dut (.*);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  bit seed [];
  bit w [];
  bit y [];
  int n, r, passes, outs;
  bit gaps;

  assign seed_bit = (seed_addr < 32'(seed.size())) ? seed[seed_addr] : 1'b0;

  // key source
  initial begin
    in_valid = 0; in_bit = 0; in_end = 0;
    forever begin
      @(posedge clk);
      if (pass_req) begin
        passes++;
        for (int j = 0; j < n; j++) begin
          @(negedge clk);
          in_valid = 0;
          while (gaps && $urandom % 4 == 0) begin @(negedge clk); end
          in_valid = 1; in_bit = w[j];
        end
        @(negedge clk); in_valid = 0; in_end = 1;
        @(negedge clk); in_end = 0;
      end
    end
  end

  always @(posedge clk) if (rst_n && out_valid) begin
    checks++;
    outs++;
    if (out_idx >= 32'(r) || out_bit != y[out_idx]) begin
      failures++;
      $display("FAIL: key bit %0d", out_idx);
    end
  end

  initial begin
    repeat (300000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int cases_n [4] = '{200, 77, 300, 40};
    int cases_r [4] = '{50, 16, 3, 39};
    int t0, cyc;
    start = 0; r_len = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    foreach (cases_n[c]) begin
      n = cases_n[c]; r = cases_r[c]; gaps = (c != 0);
      w = new[n]; seed = new[n + r - 1]; y = new[r];
      foreach (w[j]) w[j] = 1'($urandom);
      foreach (seed[k]) seed[k] = 1'($urandom);
      for (int i = 0; i < r; i++) begin
        y[i] = 0;
        for (int j = 0; j < n; j++) y[i] ^= seed[j - i + r - 1] & w[j];
      end
      passes = 0; outs = 0;
      @(negedge clk); start = 1; r_len = r;
      @(negedge clk); start = 0;
      t0 = $time;
      cyc = 0;
      while (!done && cyc < 100000) begin @(negedge clk); cyc++; end
      check(done, "done");
      check(outs == r, $sformatf("case %0d: %0d key bits, expected %0d", c, outs, r));
      check(passes == (r + S - 1) / S, $sformatf("case %0d: %0d passes", c, passes));
      if (!gaps) check(cyc <= passes * (n + 2*S + 6), $sformatf("case %0d: %0d cycles", c, cyc));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
