// tb_aligner: Bob's sequence is Alice's delayed by a known number of slots
// with a few percent of bits flipped; the aligner must report that delay
// and an agreement count equal to the one counted here. Several delays,
// including 0 and the largest, are tried.
module tb_aligner;
  localparam int D = 16;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic start, in_valid, a_bit, b_bit, done;
  logic [15:0] window, best_count;
  logic [$clog2(D)-1:0] best_offset;
  int checks = 0, failures = 0;

  aligner #(.MAX_OFFSET(D), .CW(16)) dut (.*);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int delays [4] = '{5, 0, D-1, 9};
    bit a [];
    int W, agree, t;
    start = 0; in_valid = 0; a_bit = 0; b_bit = 0; window = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    foreach (delays[k]) begin
      W = 600;
      a = new[W];
      foreach (a[i]) a[i] = 1'($urandom);
      agree = 0;
      @(negedge clk); start = 1; window = 16'(W);
      @(negedge clk); start = 0;
      for (int i = 0; i < W; i++) begin
        bit bb;
        bb = (i >= delays[k]) ? a[i - delays[k]] : 1'($urandom);
        if ($urandom % 100 < 3) bb = ~bb;
        if (i >= delays[k] && bb == a[i - delays[k]]) agree++;
        in_valid = ($urandom % 5) != 0;
        while (!in_valid) begin @(negedge clk); in_valid = ($urandom % 5) != 0; end
        a_bit = a[i]; b_bit = bb;
        @(negedge clk);
      end
      in_valid = 0;
      t = 0;
      while (!done && t < 1000) begin @(negedge clk); t++; end
      check(done, "done");
      check(int'(best_offset) == delays[k], $sformatf("offset %0d expected %0d", best_offset, delays[k]));
      check(int'(best_count) == agree, $sformatf("count %0d expected %0d", best_count, agree));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
