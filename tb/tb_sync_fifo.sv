// tb_sync_fifo: random pushes and pops against a queue model, including
// filling to full (pushes then ignored) and draining to empty (pops then
// ignored), with simultaneous push and pop.
module tb_sync_fifo;
  localparam int W = 16, D = 8;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic         push, pop, full, empty;
  logic [W-1:0] din, dout;
  logic [$clog2(D+1)-1:0] count;
  int checks = 0, failures = 0;
  int n_full = 0, n_empty_pop = 0;

  sync_fifo #(.WIDTH(W), .DEPTH(D)) dut (.*);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [W-1:0] q [$];
    int bias;
    push = 0; pop = 0; din = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int c = 0; c < 3000; c++) begin
      bias = (c / 300) % 2 ? 80 : 20;      // alternate filling and draining phases
      @(negedge clk);
      check(count == q.size(), "count");
      check(full == (q.size() == D), "full");
      check(empty == (q.size() == 0), "empty");
      if (q.size() > 0) check(dout == q[0], "head word");
      push = ($urandom % 100) < bias;
      pop  = ($urandom % 100) < (100 - bias);
      din  = W'($urandom);
      if (push && full) n_full++;
      if (pop && empty) n_empty_pop++;
      if (pop && !empty) void'(q.pop_front());
      if (push && !full) q.push_back(din);
    end
    check(n_full > 0 && n_empty_pop > 0, "full and empty both reached");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
