// tb_kde_top_full: the key distillation engine at its full size, with
// every parameter at its default (four mappers, 8192 x 7680 LDPC frames,
// 50 iterations, 1 Mbit combiner buffers, 2 Mbit seed memory, 1024-row
// privacy-amplification segments, 64-slot aligner). One complete round:
// alignment, BB84 sifting into the acquisition FIFO, one noisy 8192-bit
// frame per mapper decoded by all four mappers in parallel, 16-chunk
// verification of each share against the transmitter's tags (one tag
// corrupted so that one chunk is discarded), privacy amplification of the
// surviving 31232 bits to a 1100-bit final key (two passes) checked bit by
// bit against the Toeplitz product, AES keyed from the final key, and an
// authentication tag. The decode time is checked against the decoder's
// cycle formula.
module tb_kde_top_full;
  import kde_pkg::*;
  import aes_pkg::*;
  import tb_ref_pkg::*;
  import tb_ldpc_pkg::*;
  localparam int NM = 4, NN = 8192, MM = 7680, EM = 32768, MI = 50, MO = 64;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  role_e role;
  proto_e proto;
  logic al_start, al_valid, al_a_bit, al_b_bit, al_done;
  logic [15:0] al_window, al_count;
  logic [$clog2(MO)-1:0] al_offset;
  logic sift_clear, det_valid, det_bob_basis, det_alice_basis, det_key_bit, acq_pop, acq_empty, acq_overflow;
  logic [31:0] sift_kept, sift_chan_bits;
  logic [63:0] acq_word;
  logic h_we, h_row_end;
  logic [$clog2(EM)-1:0] h_addr;
  logic [$clog2(NN)-1:0] h_col;
  logic [$clog2(NN+1)-1:0] n_cols;
  logic [$clog2(MM+1)-1:0] n_rows;
  logic [$clog2(EM+1)-1:0] n_edges;
  logic [6:0] llr_mag;
  logic [$clog2(MI+1)-1:0] max_iter;
  logic [NM-1:0] push, fifo_full, share_start, frame_start, frame_busy, frame_done, frame_ok;
  logic [NM-1:0][$clog2(MI+1)-1:0] frame_iters;
  logic [NM-1:0] syn_valid, syn_bit, peer_we, flags_we, tag_valid, ver_done;
  logic [63:0] push_word;
  logic [31:0] share_bits;
  logic [255:0] ver_key;
  logic [3:0] peer_idx;
  logic [127:0] peer_tag;
  logic [15:0] flags_in;
  logic [NM-1:0][3:0] tag_idx;
  logic [NM-1:0][127:0] tag;
  logic [NM-1:0][15:0] chunk_ok;
  logic [$clog2(NM+1)-1:0] num_active;
  logic seed_we;
  logic [$clog2(2097152/64)-1:0] seed_waddr;
  logic [63:0] seed_wdata;
  logic pa_start, pa_busy, pa_done, key_valid, key_bit;
  logic [31:0] r_len, pa_kept_bits, pa_dropped_bits, key_idx;
  logic aes_key_ready, aes_in_valid, aes_decrypt, aes_out_valid;
  logic [127:0] aes_in_block, aes_out_block;
  logic auth_start, auth_ready, auth_blk_valid, auth_blk_last, auth_tag_valid;
  logic [254:0] auth_r;
  logic [127:0] auth_k2, auth_blk_data, auth_tag;
  logic [4:0] auth_blk_bytes;

  kde_top dut (.*);

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    repeat (20000000) @(posedge clk);
    $display("FAIL: watchdog");
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [127:0] aes_enc_ref(input logic [127:0] k, input logic [127:0] p);
    logic [127:0] rk [11];
    logic [31:0] w [44];
    logic [7:0] rc;
    logic [127:0] s;
    rc = 8'h01;
    for (int i = 0; i < 4; i++) w[i] = k[127 - 32*i -: 32];
    for (int i = 4; i < 44; i++) begin
      logic [31:0] t;
      t = w[i-1];
      if (i % 4 == 0) begin
        t = sub_word({t[23:0], t[31:24]}) ^ {rc, 24'h0};
        rc = xtime(rc);
      end
      w[i] = w[i-4] ^ t;
    end
    for (int r = 0; r < 11; r++) rk[r] = {w[4*r], w[4*r+1], w[4*r+2], w[4*r+3]};
    s = p ^ rk[0];
    for (int r = 1; r < 10; r++) s = mix_columns(shift_rows(sub_bytes(s))) ^ rk[r];
    return shift_rows(sub_bytes(s)) ^ rk[10];
  endfunction

  function automatic logic [127:0] tz(input logic [254:0] r, input logic [127:0] k);
    logic [127:0] o;
    for (int a = 1; a <= 128; a++) begin
      o[a-1] = 0;
      for (int b = 1; b <= 128; b++) o[a-1] ^= r[127 - a + b] & k[b-1];
    end
    return o;
  endfunction

  logic [127:0] bob_tag [NM][16];
  int ntags [NM], done_cnt [NM], passes;
  bit kv_q;
  bit ok_last [NM];
  bit key_out [$];
  always @(negedge clk) if (rst_n) begin
    for (int m = 0; m < NM; m++) begin
      if (tag_valid[m]) begin bob_tag[m][tag_idx[m]] = tag[m]; ntags[m]++; end
      if (frame_done[m]) begin done_cnt[m]++; ok_last[m] = frame_ok[m]; end
    end
    if (key_valid && !kv_q) passes++;   // each pass emits its rows back to back
    kv_q = key_valid;
    if (key_valid) key_out.push_back(key_bit);
  end

  initial begin
    hmat h;
    bit x [NM][];
    bit chunk [], s [], y [], kept [$], seed [];
    logic [127:0] alice_tag [NM][16];
    logic [127:0] aes_k, pt;
    int n, L, t, errs, nd, R;
    bit acq_exp [$];

    role = ROLE_BOB; proto = PROTO_BB84;
    al_start = 0; al_window = 0; al_valid = 0; al_a_bit = 0; al_b_bit = 0;
    sift_clear = 0; det_valid = 0; det_bob_basis = 0; det_alice_basis = 0; det_key_bit = 0; acq_pop = 0;
    h_we = 0; h_addr = 0; h_col = 0; h_row_end = 0; n_cols = 0; n_rows = 0; n_edges = 0; llr_mag = 24; max_iter = 50;
    push = 0; push_word = 0; share_start = 0; share_bits = 0; ver_key = 0; frame_start = 0;
    peer_we = 0; peer_idx = 0; peer_tag = 0; flags_we = 0; flags_in = 0; num_active = 4;
    seed_we = 0; seed_waddr = 0; seed_wdata = 0; pa_start = 0; r_len = 0;
    aes_in_valid = 0; aes_decrypt = 0; aes_in_block = 0;
    auth_start = 0; auth_r = 0; auth_k2 = 0; auth_blk_valid = 0; auth_blk_data = 0; auth_blk_bytes = 16; auth_blk_last = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);

    // alignment, delay 40 of at most 63
    begin
      bit a [];
      a = new[2000];
      foreach (a[i]) a[i] = 1'($urandom);
      al_start = 1; al_window = 2000;
      @(negedge clk); al_start = 0;
      for (int i = 0; i < 2000; i++) begin
        al_valid = 1; al_a_bit = a[i];
        al_b_bit = (i >= 40) ? a[i-40] : 1'($urandom);
        if ($urandom % 100 < 3) al_b_bit = ~al_b_bit;
        @(negedge clk);
      end
      al_valid = 0;
      t = 0;
      while (!al_done && t < 1000) begin @(negedge clk); t++; end
      check(al_done && al_offset == 40, $sformatf("alignment offset %0d", al_offset));
    end

    // BB84 sifting, 4 words through the acquisition FIFO
    sift_clear = 1; @(negedge clk); sift_clear = 0;
    nd = 0;
    while (acq_exp.size() < 256) begin
      det_valid = 1; det_bob_basis = 1'($urandom); det_alice_basis = 1'($urandom); det_key_bit = 1'($urandom);
      if (det_bob_basis == det_alice_basis) acq_exp.push_back(det_key_bit);
      nd++;
      @(negedge clk);
    end
    det_valid = 0;
    repeat (3) @(negedge clk);
    errs = 0;
    for (int w = 0; w < 4; w++) begin
      for (int b = 0; b < 64; b++) if (acq_word[b] != acq_exp[64*w + b]) errs++;
      acq_pop = 1; @(negedge clk); acq_pop = 0;
    end
    check(errs == 0 && acq_empty && sift_chan_bits == 32'(2*nd), "sifted words");

    // the 7680 x 8192 code, column weight 3
    h = new(NN, MM);
    foreach (h.cols[e]) begin
      h_we = 1; h_addr = e; h_col = h.cols[e]; h_row_end = h.ends[e];
      @(negedge clk);
    end
    h_we = 0;
    n = h.n;
    n_cols = n; n_rows = h.m; n_edges = h.cols.size();
    for (int w = 0; w < 8; w++) ver_key[32*w +: 32] = $urandom;
    L = n / 16;
    for (int m = 0; m < NM; m++) begin
      x[m] = new[n];
      foreach (x[m][i]) x[m][i] = 1'($urandom);
      for (int c = 0; c < 16; c++) begin
        chunk = new[L];
        for (int i = 0; i < L; i++) chunk[i] = x[m][c*L + i];
        alice_tag[m][c] = chunk_tag_ref(fold_ref(chunk, L), ver_key);
        peer_we = 4'(1 << m); peer_idx = c;
        peer_tag = (m == 1 && c == 9) ? ~alice_tag[m][c] : alice_tag[m][c];
        @(negedge clk);
      end
      peer_we = 0;
    end
    share_bits = n; share_start = 4'hf;
    @(negedge clk); share_start = 0;
    for (int m = 0; m < NM; m++) begin
      h.syndrome(x[m], s);
      y = new[n];
      foreach (y[i]) y[i] = x[m][i];
      for (int k = 0; k < 40; k++) y[$urandom % n] ^= 1'b1;
      push = 4'(1 << m);
      for (int w = 0; w < n/64; w++) begin
        for (int b = 0; b < 64; b++) push_word[b] = y[64*w + b];
        @(negedge clk);
      end
      for (int w = 0; w < MM/64; w++) begin
        for (int b = 0; b < 64; b++) push_word[b] = s[64*w + b];
        @(negedge clk);
      end
      push = 0;
    end
    frame_start = 4'hf;
    @(negedge clk); frame_start = 0;
    t = 1;
    while (!(done_cnt[0] && done_cnt[1] && done_cnt[2] && done_cnt[3]) && t < 5000000) begin @(negedge clk); t++; end
    for (int m = 0; m < NM; m++) begin
      int its, ec, expect_cyc;
      its = int'(frame_iters[m]);
      ec = h.cols.size();
      expect_cyc = (n > ec ? n : ec) + (its + 1)*ec + its*2*ec + n;
      check(done_cnt[m] == 1 && ok_last[m], $sformatf("mapper %0d decoded (%0d iterations)", m, its));
      $display("mapper %0d: %0d iterations, frame done after %0d clocks (formula %0d + load)", m, its, t, expect_cyc);
      // 1 start clock, 248 load clocks, then the decoder's schedule
      check(t - (1 + n/64 + MM/64) - expect_cyc inside {[0:1]}, $sformatf("decode cycles %0d", t));
    end
    repeat (5) @(negedge clk);
    for (int m = 0; m < NM; m++) begin
      check(ver_done[m] && ntags[m] == 16, $sformatf("mapper %0d verified", m));
      for (int c = 0; c < 16; c++) begin
        check(bob_tag[m][c] == alice_tag[m][c], $sformatf("mapper %0d tag %0d", m, c));
        check(chunk_ok[m][c] == !(m == 1 && c == 9), $sformatf("mapper %0d chunk_ok %0d", m, c));
      end
    end

    // privacy amplification to 1100 bits (two 1024-row passes)
    for (int m = 0; m < NM; m++)
      for (int i = 0; i < n; i++) if (chunk_ok[m][i / L]) kept.push_back(x[m][i]);
    R = 1100;
    r_len = R;
    seed = new[kept.size() + R];
    for (int w = 0; w < (kept.size() + R + 63) / 64; w++) begin
      seed_we = 1; seed_waddr = w;
      for (int b = 0; b < 64; b++) begin
        if (64*w + b < seed.size()) seed[64*w + b] = 1'($urandom);
        seed_wdata[b] = (64*w + b < seed.size()) ? seed[64*w + b] : 1'b0;
      end
      @(negedge clk);
    end
    seed_we = 0;
    pa_start = 1; @(negedge clk); pa_start = 0;
    t = 0;
    while (!pa_done && t < 1000000) begin @(negedge clk); t++; end
    check(pa_done && passes == 2, $sformatf("privacy amplification done in %0d passes", passes));
    check(int'(pa_kept_bits) == kept.size() && int'(pa_dropped_bits) == L, "kept/dropped counts");
    check(key_out.size() == R, $sformatf("final key length %0d", key_out.size()));
    errs = 0;
    for (int i = 0; i < R && i < key_out.size(); i++) begin
      bit e;
      e = 0;
      foreach (kept[j]) if (seed[j - i + R - 1]) e ^= kept[j];
      if (e != key_out[i]) errs++;
    end
    check(errs == 0, $sformatf("final key = Toeplitz product (%0d wrong)", errs));

    // AES holds the last complete 128 final-key bits, 896..1023
    for (int i = 0; i < 128; i++) aes_k[127 - i] = key_out[1024 - 128 + i];
    t = 0;
    while (!aes_key_ready && t < 100) begin @(negedge clk); t++; end
    pt = {$urandom, $urandom, $urandom, $urandom};
    aes_in_valid = 1; aes_decrypt = 0; aes_in_block = pt;
    @(negedge clk); aes_in_valid = 0;
    t = 1;
    while (!aes_out_valid && t < 50) begin @(negedge clk); t++; end
    check(aes_out_valid && aes_out_block == aes_enc_ref(aes_k, pt) && t == 11, $sformatf("AES block, latency %0d", t));

    // authentication tag
    begin
      logic [7:0] msg [];
      msg = new[16];
      foreach (msg[i]) msg[i] = 8'($urandom);
      for (int w = 0; w < 8; w++) auth_r[32*w +: 32] = $urandom;
      auth_k2 = {$urandom, $urandom, $urandom, $urandom};
      auth_start = 1; @(negedge clk); auth_start = 0;
      @(negedge clk);
      auth_blk_valid = 1; auth_blk_last = 1; auth_blk_bytes = 16;
      for (int i = 0; i < 16; i++) auth_blk_data[8*i +: 8] = msg[i];
      @(negedge clk);
      auth_blk_valid = 0; auth_blk_last = 0;
      check(auth_tag_valid && auth_tag == poly1305_ref(msg, 16, tz(auth_r, auth_k2), auth_k2, 1'b1), "authentication tag");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
