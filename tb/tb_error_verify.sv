// tb_error_verify: streams random keys of several lengths (an exact
// 16*128*2^k size, uneven sizes, a size below 16*128) with idle gaps,
// and checks every chunk tag against the reference fold plus Poly1305,
// that chunk_ok follows the comparison with the peer tags (some peer tags
// are corrupted on purpose, to be discarded), and that done rises.
module tb_error_verify;
  import tb_ref_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic         start, peer_we, bit_valid, bit_in, tag_valid, done;
  logic [31:0]  total_bits;
  logic [255:0] key;
  logic [3:0]   peer_idx, tag_idx;
  logic [127:0] peer_tag_in, tag;
  logic [15:0]  chunk_ok;
  int checks = 0, failures = 0;

  error_verify dut (.*);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  logic [127:0] exp_tags [16];
  int           n_tags;
  always @(posedge clk) if (rst_n && tag_valid) begin
    checks++;
    if (tag != exp_tags[tag_idx]) begin
      failures++;
      $display("FAIL: tag of chunk %0d", tag_idx);
    end
    n_tags++;
  end

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int sizes [5] = '{16*128*4, 5000, 2049, 300, 16*128*4 + 16*7};
    bit key_bits [];
    bit chunk [];
    logic [15:0] bad, exp_ok;
    int N, L, nch;
    start = 0; peer_we = 0; bit_valid = 0; bit_in = 0; total_bits = 0; key = '0;
    peer_idx = 0; peer_tag_in = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    foreach (sizes[s]) begin
      N = sizes[s];
      L = (N + 15) / 16;
      nch = (N + L - 1) / L;
      key_bits = new[N];
      foreach (key_bits[i]) key_bits[i] = 1'($urandom);
      for (int w = 0; w < 8; w++) key[32*w +: 32] = $urandom;
      for (int c = 0; c < 16; c++) begin
        chunk = new[L];
        for (int i = 0; i < L; i++) chunk[i] = (c*L + i < N) ? key_bits[c*L + i] : 1'b0;
        exp_tags[c] = chunk_tag_ref(fold_ref(chunk, L), key);
      end
      bad = 16'($urandom) & 16'($urandom);
      exp_ok = '0;
      for (int c = 0; c < nch; c++) exp_ok[c] = !bad[c];
      // load peer tags
      for (int c = 0; c < 16; c++) begin
        @(negedge clk); peer_we = 1; peer_idx = 4'(c);
        peer_tag_in = bad[c] ? exp_tags[c] ^ (128'd1 << ($urandom % 128)) : exp_tags[c];
      end
      @(negedge clk); peer_we = 0; start = 1; total_bits = N;
      @(negedge clk); start = 0;
      n_tags = 0;
      for (int i = 0; i < N; i++) begin
        while ($urandom % 8 == 0) begin bit_valid = 0; @(negedge clk); end
        bit_valid = 1; bit_in = key_bits[i];
        @(negedge clk);
      end
      bit_valid = 0;
      repeat (3) @(negedge clk);
      check(done, $sformatf("size %0d done", N));
      check(n_tags == nch, $sformatf("size %0d: %0d tags, expected %0d", N, n_tags, nch));
      check(chunk_ok == exp_ok, $sformatf("size %0d chunk_ok %h expected %h", N, chunk_ok, exp_ok));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
