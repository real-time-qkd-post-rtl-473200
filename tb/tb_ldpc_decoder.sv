// tb_ldpc_decoder: syndrome decoding on random sparse codes (column weight
// 3, rate 1/4 as in a 7680 x 8192 code shrunk). Alice's frame x and its
// syndrome are made here; Bob's y is x with errors. Checks: an error-free
// frame is accepted after the first check pass with 0 iterations; frames
// with a few percent errors are corrected exactly (output equals x) and
// report success; a frame with 40% errors is reported as a failure after
// exactly max_iter iterations; a shrunk code (fewer rows and columns than
// the maximum) works; and the cycle count equals load + init + check
// passes (one clock per edge) + iterations (two clocks per edge) + output.
module tb_ldpc_decoder;
  import tb_ldpc_pkg::*;
  localparam int NM = 256, MM = 240, EM = 1024, MI = 50;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic h_we, h_row_end, start, ld_valid, ld_pop, busy, done, success, out_valid, out_bit;
  logic [$clog2(EM)-1:0] h_addr;
  logic [$clog2(NM)-1:0] h_col;
  logic [$clog2(NM+1)-1:0] n_cols;
  logic [$clog2(MM+1)-1:0] n_rows;
  logic [$clog2(EM+1)-1:0] n_edges;
  logic [6:0] llr_mag;
  logic [$clog2(MI+1)-1:0] max_iter, iterations;
  logic [63:0] ld_word;
  int checks = 0, failures = 0;
  int n_ok = 0, n_fail = 0;

  ldpc_decoder #(.N_MAX(NM), .M_MAX(MM), .E_MAX(EM), .MAX_ITER(MI)) dut (.*);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    repeat (2000000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic load_h(hmat h);
    foreach (h.cols[e]) begin
      @(negedge clk); h_we = 1; h_addr = e; h_col = h.cols[e]; h_row_end = h.ends[e];
    end
    @(negedge clk); h_we = 0;
  endtask

  task automatic run(hmat h, int nerr, int mi, output bit ok, output int its, output bit exact,
                     output int cyc, output int exp_cyc);
    bit x [], y [], s [];
    int oi, nwy, nws;
    x = new[h.n]; y = new[h.n];
    foreach (x[i]) x[i] = 1'($urandom);
    h.syndrome(x, s);
    foreach (y[i]) y[i] = x[i];
    for (int k = 0; k < nerr; k++) begin
      int p;
      do p = $urandom % h.n; while (y[p] != x[p]);
      y[p] = ~x[p];
    end
    n_cols = h.n; n_rows = h.m; n_edges = h.cols.size(); llr_mag = 7'd24; max_iter = mi;
    start = 1;
    @(negedge clk); start = 0;
    cyc = 1;
    nwy = (h.n + 63) / 64; nws = (h.m + 63) / 64;
    for (int w = 0; w < nwy + nws; w++) begin
      ld_valid = 1;
      for (int b = 0; b < 64; b++)
        ld_word[b] = (w < nwy) ? ((64*w + b < h.n) ? y[64*w + b] : 1'b0)
                               : ((64*(w-nwy) + b < h.m) ? s[64*(w-nwy) + b] : 1'b0);
      #1 check(ld_pop, "load word taken");
      @(negedge clk); cyc++;
    end
    ld_valid = 0;
    oi = 0; exact = 1;
    while (!done && cyc < 1000000) begin
      @(negedge clk); cyc++;
      if (out_valid) begin
        if (oi >= h.n || out_bit != x[oi]) exact = 0;
        oi++;
      end
    end
    if (oi != h.n) exact = 0;
    ok = success; its = iterations;
    exp_cyc = 1 + nwy + nws + ((h.n > h.cols.size()) ? h.n : h.cols.size())
            + (its + 1) * h.cols.size() + its * 2 * h.cols.size() + h.n;
  endtask

  initial begin
    hmat h;
    bit ok, exact;
    int its, cyc, ec;
    h_we = 0; h_addr = 0; h_col = 0; h_row_end = 0; start = 0; ld_valid = 0; ld_word = '0;
    n_cols = 0; n_rows = 0; n_edges = 0; llr_mag = 0; max_iter = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;

    h = new(256, 192);
    load_h(h);
    run(h, 0, 50, ok, its, exact, cyc, ec);
    check(ok && its == 0 && exact, "error-free frame accepted without iterating");
    check(cyc == ec, $sformatf("cycles %0d expected %0d", cyc, ec));
    for (int f = 0; f < 12; f++) begin
      run(h, 2 + f % 6, 50, ok, its, exact, cyc, ec);
      check(ok && exact && its > 0, $sformatf("frame %0d: %0d errors corrected (ok %0d its %0d)", f, 2 + f % 6, ok, its));
      check(cyc == ec, $sformatf("cycles %0d expected %0d", cyc, ec));
    end
    run(h, 100, 10, ok, its, exact, cyc, ec);
    check(!ok && its == 10, $sformatf("40%% errors: failure after max_iter (ok %0d its %0d)", ok, its));
    check(cyc == ec, $sformatf("cycles %0d expected %0d", cyc, ec));

    // shrunk code
    h = new(200, 150);
    load_h(h);
    for (int f = 0; f < 6; f++) begin
      run(h, 3, 50, ok, its, exact, cyc, ec);
      check(ok && exact, $sformatf("shrunk code frame %0d", f));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
