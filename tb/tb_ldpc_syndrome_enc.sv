// tb_ldpc_syndrome_enc: loads a random sparse H (column weight 3), feeds
// random frames, and checks every syndrome bit against H x computed here,
// that the frame is replayed unchanged, and the cycle count (load words,
// one clock per edge, one per replayed bit).
module tb_ldpc_syndrome_enc;
  import tb_ldpc_pkg::*;
  localparam int NM = 256, MM = 240, EM = 1024;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic h_we, h_row_end, start, ld_valid, ld_pop, busy, done, syn_valid, syn_bit, key_valid, key_bit;
  logic [$clog2(EM)-1:0] h_addr;
  logic [$clog2(NM)-1:0] h_col;
  logic [$clog2(NM+1)-1:0] n_cols;
  logic [$clog2(MM+1)-1:0] n_rows;
  logic [$clog2(EM+1)-1:0] n_edges;
  logic [63:0] ld_word;
  int checks = 0, failures = 0;

  ldpc_syndrome_enc #(.N_MAX(NM), .M_MAX(MM), .E_MAX(EM)) dut (.*);

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
    int dims_n [3] = '{256, 200, 131};
    int dims_m [3] = '{192, 150, 100};
    hmat h;
    bit x [], s [];
    int si, ki, cyc, nw;
    h_we = 0; h_addr = 0; h_col = 0; h_row_end = 0; start = 0; ld_valid = 0; ld_word = 0;
    n_cols = 0; n_rows = 0; n_edges = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    foreach (dims_n[d]) begin
      h = new(dims_n[d], dims_m[d]);
      foreach (h.cols[e]) begin
        @(negedge clk); h_we = 1; h_addr = e; h_col = h.cols[e]; h_row_end = h.ends[e];
      end
      @(negedge clk); h_we = 0;
      for (int f = 0; f < 3; f++) begin
        x = new[h.n];
        foreach (x[i]) x[i] = 1'($urandom);
        h.syndrome(x, s);
        n_cols = h.n; n_rows = h.m; n_edges = h.cols.size();
        start = 1;
        @(negedge clk); start = 0;
        nw = (h.n + 63) / 64;
        si = 0; ki = 0; cyc = 1;
        for (int w = 0; w < nw; w++) begin
          ld_valid = 1;
          for (int b = 0; b < 64; b++) ld_word[b] = (64*w + b < h.n) ? x[64*w + b] : 1'b0;
          #1 check(ld_pop, "word taken");
          @(negedge clk); cyc++;
        end
        ld_valid = 0;
        while (!done && cyc < 5000) begin
          @(negedge clk); cyc++;
          if (syn_valid) begin
            check(si < h.m && syn_bit == s[si], $sformatf("syndrome bit %0d", si));
            si++;
          end
          if (key_valid) begin
            check(ki < h.n && key_bit == x[ki], $sformatf("key bit %0d", ki));
            ki++;
          end
        end
        check(si == h.m && ki == h.n, $sformatf("all syndrome and key bits %0d/%0d %0d/%0d", si, h.m, ki, h.n));
        check(cyc == 1 + nw + h.cols.size() + h.n, $sformatf("cycles %0d exp %0d", cyc, 1 + nw + h.cols.size() + h.n));
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
