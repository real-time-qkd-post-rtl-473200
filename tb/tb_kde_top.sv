// tb_kde_top: end-to-end run of the key distillation engine at reduced
// sizes (256-bit LDPC frames, 64-row privacy-amplification segments),
// four mappers of which three are active.
//
// Sequence: the aligner finds a known delay; BB84 and BBM92 detections
// are sifted into the acquisition FIFO and read back word for word; COW
// detections overfill it so that the overflow flag rises. As receiver,
// mappers 0..2 each decode two noisy frames in parallel; one frame of
// mapper 2 carries 40 % errors and must fail. Each mapper's 16 tags are
// checked against the transmitter's, one of mapper 0's peer tags is
// corrupted, and every chunk_ok bit must equal the tag comparison.
// Privacy amplification then hashes the surviving chunks (three passes of
// 64 rows) and every final-key bit is checked against the Toeplitz product
// over the kept chunks. The first 128 final-key bits key the AES, which
// encrypts and decrypts blocks checked against a reference. The
// authentication unit tags a two-block message, and finally mapper 3 as
// transmitter emits a frame's syndrome and takes Bob's verdict.
// Every mechanism is counted; one that never happened is a failure.
module tb_kde_top;
  import kde_pkg::*;
  import aes_pkg::*;
  import tb_ref_pkg::*;
  import tb_ldpc_pkg::*;
  localparam int NM = 4, NN = 256, MM = 240, EM = 1024, MI = 50, S = 64, MO = 16;
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
  logic [$clog2(8192/64)-1:0] seed_waddr;
  logic [63:0] seed_wdata;
  logic pa_start, pa_busy, pa_done, key_valid, key_bit;
  logic [31:0] r_len, pa_kept_bits, pa_dropped_bits, key_idx;
  logic aes_key_ready, aes_in_valid, aes_decrypt, aes_out_valid;
  logic [127:0] aes_in_block, aes_out_block;
  logic auth_start, auth_ready, auth_blk_valid, auth_blk_last, auth_tag_valid;
  logic [254:0] auth_r;
  logic [127:0] auth_k2, auth_blk_data, auth_tag;
  logic [4:0] auth_blk_bytes;

  kde_top #(
    .N_MAPPERS(NM), .N_MAX(NN), .M_MAX(MM), .E_MAX(EM), .MAX_ITER(MI),
    .FIFO_DEPTH(16), .COMB_BITS(1024), .SEED_BITS(8192), .PA_SEG(S),
    .ACQ_DEPTH(8), .MAX_OFFSET(MO)
  ) dut (.*);

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // mechanism counters
  typedef enum int {
    M_ALIGN, M_SIFT_BB84, M_SIFT_BBM92, M_SIFT_COW, M_ACQ_WORD, M_ACQ_OVERFLOW,
    M_DEC_OK, M_DEC_FAIL, M_PARALLEL, M_TAG_MATCH, M_DISCARD, M_PA_PASS, M_PARTIAL_ACTIVE,
    M_AES_KEY, M_AES_ENC, M_AES_DEC, M_AUTH_TAG, M_SYNDROME, M_FLAGS, M_COUNT
  } mech_e;
  int mech [M_COUNT];

  initial begin
    repeat (3000000) @(posedge clk);
    $display("FAIL: watchdog");
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ------------------------------------------------------------ references
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

  // --------------------------------------------------------------- monitors
  bit acq_exp [$];
  bit kv_q;
  logic [127:0] bob_tag [NM][16];
  int ntags [NM];
  bit sent_syn [$];
  int done_cnt [NM];
  bit ok_last [NM];
  always @(negedge clk) if (rst_n) begin
    for (int m = 0; m < NM; m++) begin
      if (tag_valid[m]) begin bob_tag[m][tag_idx[m]] = tag[m]; ntags[m]++; end
      if (frame_done[m]) begin done_cnt[m]++; ok_last[m] = frame_ok[m]; end
      if (syn_valid[m]) sent_syn.push_back(syn_bit[m]);
    end
    if (key_valid && !kv_q) mech[M_PA_PASS]++;   // each pass emits its rows back to back
    kv_q = key_valid;
    if ($countones(frame_busy) > 1) mech[M_PARALLEL] = 1;
  end

  bit key_out [$];
  always @(negedge clk) if (rst_n && key_valid) begin
    checks++;
    if (int'(key_idx) != key_out.size()) begin failures++; $display("FAIL: key index %0d", key_idx); end
    key_out.push_back(key_bit);
  end

  // ------------------------------------------------------------------- test
  initial begin
    hmat h;
    bit x [NM][2][];
    bit share [NM][];
    bit chunk [];
    bit s [];
    bit y [];
    bit kept [$];
    bit seed [];
    logic [127:0] alice_tag [NM][16];
    logic [127:0] aes_k, pt [4], ct [4];
    int n, L, t, nd, word_errs;

    role = ROLE_BOB; proto = PROTO_BB84;
    al_start = 0; al_window = 0; al_valid = 0; al_a_bit = 0; al_b_bit = 0;
    sift_clear = 0; det_valid = 0; det_bob_basis = 0; det_alice_basis = 0; det_key_bit = 0; acq_pop = 0;
    h_we = 0; h_addr = 0; h_col = 0; h_row_end = 0; n_cols = 0; n_rows = 0; n_edges = 0; llr_mag = 24; max_iter = 50;
    push = 0; push_word = 0; share_start = 0; share_bits = 0; ver_key = 0; frame_start = 0;
    peer_we = 0; peer_idx = 0; peer_tag = 0; flags_we = 0; flags_in = 0; num_active = 3;
    seed_we = 0; seed_waddr = 0; seed_wdata = 0; pa_start = 0; r_len = 0;
    aes_in_valid = 0; aes_decrypt = 0; aes_in_block = 0;
    auth_start = 0; auth_r = 0; auth_k2 = 0; auth_blk_valid = 0; auth_blk_data = 0; auth_blk_bytes = 16; auth_blk_last = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);

    // ---- alignment: Bob's record is Alice's delayed by 7 slots, 3 % noise
    begin
      bit a [];
      a = new[500];
      foreach (a[i]) a[i] = 1'($urandom);
      al_start = 1; al_window = 500;
      @(negedge clk); al_start = 0;
      for (int i = 0; i < 500; i++) begin
        al_valid = 1; al_a_bit = a[i];
        al_b_bit = (i >= 7) ? a[i-7] : 1'($urandom);
        if ($urandom % 100 < 3) al_b_bit = ~al_b_bit;
        @(negedge clk);
      end
      al_valid = 0;
      t = 0;
      while (!al_done && t < 1000) begin @(negedge clk); t++; end
      check(al_done && al_offset == 7, $sformatf("alignment offset %0d", al_offset));
      if (al_done && al_offset == 7) mech[M_ALIGN]++;
    end

    // ---- sifting into the acquisition FIFO: BB84 then BBM92, read back
    for (int p = 0; p < 2; p++) begin
      proto = p == 0 ? PROTO_BB84 : PROTO_BBM92;
      sift_clear = 1; @(negedge clk); sift_clear = 0;
      acq_exp.delete();
      nd = 0;
      while (acq_exp.size() < 128) begin
        det_valid = 1; det_bob_basis = 1'($urandom); det_alice_basis = 1'($urandom); det_key_bit = 1'($urandom);
        if (det_bob_basis == det_alice_basis) acq_exp.push_back(det_key_bit);
        nd++;
        @(negedge clk);
      end
      det_valid = 0;
      repeat (3) @(negedge clk);
      check(sift_kept == 128 && sift_chan_bits == 32'(2*nd), "sift counts");
      word_errs = 0;
      for (int w = 0; w < 2; w++) begin
        check(!acq_empty, "acquisition word present");
        for (int b = 0; b < 64; b++) if (acq_word[b] != acq_exp[64*w + b]) word_errs++;
        if (!acq_empty) mech[M_ACQ_WORD]++;
        acq_pop = 1; @(negedge clk); acq_pop = 0;
      end
      check(word_errs == 0 && acq_empty, "sifted words in order");
      if (word_errs == 0) mech[p == 0 ? M_SIFT_BB84 : M_SIFT_BBM92]++;
    end
    // COW: data-line detections only; overfill the 8-word FIFO
    proto = PROTO_COW;
    sift_clear = 1; @(negedge clk); sift_clear = 0;
    acq_exp.delete();
    while (acq_exp.size() < 64*10) begin
      det_valid = 1; det_bob_basis = ($urandom % 10) == 0; det_alice_basis = 0; det_key_bit = 1'($urandom);
      if (!det_bob_basis) acq_exp.push_back(det_key_bit);
      @(negedge clk);
    end
    det_valid = 0;
    repeat (3) @(negedge clk);
    check(acq_overflow, "acquisition overflow flagged");
    if (acq_overflow) mech[M_ACQ_OVERFLOW]++;
    word_errs = 0;
    for (int w = 0; w < 8; w++) begin
      for (int b = 0; b < 64; b++) if (acq_word[b] != acq_exp[64*w + b]) word_errs++;
      acq_pop = 1; @(negedge clk); acq_pop = 0;
    end
    check(word_errs == 0 && acq_empty, "COW words kept up to the overflow");
    if (word_errs == 0) mech[M_SIFT_COW]++;
    sift_clear = 1; @(negedge clk); sift_clear = 0;
    check(!acq_overflow, "overflow cleared");

    // ---- code and verification key
    h = new(NN, 192);
    foreach (h.cols[e]) begin
      h_we = 1; h_addr = e; h_col = h.cols[e]; h_row_end = h.ends[e];
      @(negedge clk);
    end
    h_we = 0;
    n = h.n;
    n_cols = n; n_rows = h.m; n_edges = h.cols.size(); max_iter = 50;
    for (int w = 0; w < 8; w++) ver_key[32*w +: 32] = $urandom;

    // ---- receiver: mappers 0..2, two frames each
    L = 2*n / 16;
    for (int m = 0; m < 3; m++) begin
      share[m] = new[2*n];
      for (int f = 0; f < 2; f++) begin
        x[m][f] = new[n];
        foreach (x[m][f][i]) begin x[m][f][i] = 1'($urandom); share[m][f*n + i] = x[m][f][i]; end
      end
      for (int c = 0; c < 16; c++) begin
        chunk = new[L];
        for (int i = 0; i < L; i++) chunk[i] = share[m][c*L + i];
        alice_tag[m][c] = chunk_tag_ref(fold_ref(chunk, L), ver_key);
        peer_we = 4'(1 << m); peer_idx = c;
        peer_tag = (m == 0 && c == 3) ? alice_tag[m][c] ^ 128'h1 : alice_tag[m][c];
        @(negedge clk);
      end
      peer_we = 0;
    end
    share_bits = 2*n; share_start = 4'b0111;
    @(negedge clk); share_start = 0;
    for (int f = 0; f < 2; f++) begin
      for (int m = 0; m < 3; m++) begin
        h.syndrome(x[m][f], s);
        y = new[n];
        foreach (y[i]) y[i] = x[m][f][i];
        if (m == 2 && f == 1) begin
          foreach (y[i]) if ($urandom % 100 < 40) y[i] ^= 1'b1;
        end else
          for (int k = 0; k < 3; k++) y[$urandom % n] ^= 1'b1;
        push = 4'(1 << m);
        for (int w = 0; w < n/64; w++) begin
          for (int b = 0; b < 64; b++) push_word[b] = y[64*w + b];
          @(negedge clk);
        end
        for (int w = 0; w < (h.m+63)/64; w++) begin
          for (int b = 0; b < 64; b++) push_word[b] = (64*w + b < h.m) ? s[64*w + b] : 1'b0;
          @(negedge clk);
        end
        push = 0;
      end
      foreach (done_cnt[m]) done_cnt[m] = 0;
      frame_start = 4'b0111;
      @(negedge clk); frame_start = 0;
      t = 0;
      while (!(done_cnt[0] && done_cnt[1] && done_cnt[2]) && t < 400000) begin @(negedge clk); t++; end
      for (int m = 0; m < 3; m++) begin
        bit exp_ok;
        exp_ok = !(m == 2 && f == 1);
        check(done_cnt[m] == 1 && ok_last[m] == exp_ok, $sformatf("mapper %0d frame %0d decode ok=%0d", m, f, ok_last[m]));
        if (done_cnt[m] == 1 && ok_last[m]) mech[M_DEC_OK]++;
        if (done_cnt[m] == 1 && !ok_last[m] && !exp_ok) mech[M_DEC_FAIL]++;
      end
    end
    repeat (5) @(negedge clk);
    for (int m = 0; m < 3; m++) begin
      check(ver_done[m] && ntags[m] == 16, $sformatf("mapper %0d verification done", m));
      for (int c = 0; c < 16; c++) begin
        bit match, in_bad_frame;
        match = bob_tag[m][c] == alice_tag[m][c];
        in_bad_frame = (m == 2) && (c >= 8);
        if (!in_bad_frame) check(match, $sformatf("mapper %0d chunk %0d tag", m, c));
        check(chunk_ok[m][c] == (match && !(m == 0 && c == 3)), $sformatf("mapper %0d chunk_ok %0d", m, c));
        if (match) mech[M_TAG_MATCH]++;
        if (!chunk_ok[m][c]) mech[M_DISCARD]++;
      end
    end
    check(!ver_done[3], "idle mapper not verified");

    // ---- privacy amplification over mappers 0..2, 3 passes of 64 rows
    for (int m = 0; m < 3; m++)
      for (int i = 0; i < 2*n; i++) if (chunk_ok[m][i / L]) kept.push_back(share[m][i]);
    r_len = 150;
    seed = new[8192];
    for (int w = 0; w < 128; w++) begin
      seed_we = 1; seed_waddr = w;
      for (int b = 0; b < 64; b++) begin seed[64*w + b] = 1'($urandom); seed_wdata[b] = seed[64*w + b]; end
      @(negedge clk);
    end
    seed_we = 0;
    mech[M_PA_PASS] = 0;
    pa_start = 1; @(negedge clk); pa_start = 0;
    t = 0;
    while (!pa_done && t < 100000) begin @(negedge clk); t++; end
    check(pa_done, "privacy amplification done");
    check(int'(pa_kept_bits) == kept.size() && int'(pa_dropped_bits) == 6*n - kept.size(), "kept/dropped counts");
    if (num_active < NM) mech[M_PARTIAL_ACTIVE]++;
    check(key_out.size() == 150, $sformatf("final key length %0d", key_out.size()));
    word_errs = 0;
    for (int i = 0; i < 150; i++) begin
      bit e;
      e = 0;
      foreach (kept[j]) if (seed[j - i + 150 - 1]) e ^= kept[j];
      if (i < key_out.size() && e != key_out[i]) word_errs++;
    end
    check(word_errs == 0, $sformatf("final key = Toeplitz product (%0d wrong)", word_errs));
    check(mech[M_PA_PASS] == 3, $sformatf("three passes (%0d)", mech[M_PA_PASS]));
    if (mech[M_PA_PASS] < 2) mech[M_PA_PASS] = 0;

    // ---- AES keyed by the first 128 final-key bits
    for (int i = 0; i < 128; i++) aes_k[127 - i] = key_out[i];
    t = 0;
    while (!aes_key_ready && t < 100) begin @(negedge clk); t++; end
    check(aes_key_ready, "AES key expanded");
    if (aes_key_ready) mech[M_AES_KEY]++;
    for (int i = 0; i < 4; i++) begin
      pt[i] = {$urandom, $urandom, $urandom, $urandom};
      aes_in_valid = 1; aes_decrypt = 0; aes_in_block = pt[i];
      @(negedge clk);
    end
    aes_in_valid = 0;
    begin
      int got;
      got = 0; t = 0;
      while (got < 4 && t < 50) begin
        if (aes_out_valid) begin
          ct[got] = aes_out_block;
          check(aes_out_block == aes_enc_ref(aes_k, pt[got]), "AES ciphertext");
          if (aes_out_block == aes_enc_ref(aes_k, pt[got])) mech[M_AES_ENC]++;
          got++;
        end
        @(negedge clk); t++;
      end
      for (int i = 0; i < 4; i++) begin
        aes_in_valid = 1; aes_decrypt = 1; aes_in_block = ct[i];
        @(negedge clk);
      end
      aes_in_valid = 0;
      got = 0; t = 0;
      while (got < 4 && t < 50) begin
        if (aes_out_valid) begin
          check(aes_out_block == pt[got], "AES decrypts back");
          if (aes_out_block == pt[got]) mech[M_AES_DEC]++;
          got++;
        end
        @(negedge clk); t++;
      end
    end

    // ---- authentication of a two-block message
    begin
      logic [7:0] msg [];
      msg = new[32];
      foreach (msg[i]) msg[i] = 8'($urandom);
      for (int w = 0; w < 8; w++) auth_r[32*w +: 32] = $urandom;
      auth_k2 = {$urandom, $urandom, $urandom, $urandom};
      auth_start = 1; @(negedge clk); auth_start = 0;
      t = 0;
      while (!auth_ready && t < 10) begin @(negedge clk); t++; end
      for (int b = 0; b < 2; b++) begin
        auth_blk_valid = 1; auth_blk_last = (b == 1); auth_blk_bytes = 16;
        for (int i = 0; i < 16; i++) auth_blk_data[8*i +: 8] = msg[16*b + i];
        @(negedge clk);
      end
      auth_blk_valid = 0; auth_blk_last = 0;
      check(auth_tag_valid && auth_tag == poly1305_ref(msg, 32, tz(auth_r, auth_k2), auth_k2, 1'b1), "authentication tag");
      if (auth_tag_valid) mech[M_AUTH_TAG]++;
    end

    // ---- transmitter: mapper 3 sends one frame's syndrome, takes Bob's verdict
    role = ROLE_ALICE;
    share_bits = n; share_start = 4'b1000;
    @(negedge clk); share_start = 0;
    x[3][0] = new[n];
    foreach (x[3][0][i]) x[3][0][i] = 1'($urandom);
    h.syndrome(x[3][0], s);
    sent_syn.delete();
    push = 4'b1000;
    for (int w = 0; w < n/64; w++) begin
      for (int b = 0; b < 64; b++) push_word[b] = x[3][0][64*w + b];
      @(negedge clk);
    end
    push = 0;
    done_cnt[3] = 0;
    frame_start = 4'b1000; @(negedge clk); frame_start = 0;
    t = 0;
    while (!done_cnt[3] && t < 10000) begin @(negedge clk); t++; end
    repeat (3) @(negedge clk);
    word_errs = 0;
    if (sent_syn.size() != h.m) word_errs++;
    else foreach (s[i]) if (s[i] != sent_syn[i]) word_errs++;
    check(word_errs == 0, $sformatf("transmitter syndrome (%0d bits)", sent_syn.size()));
    if (word_errs == 0) mech[M_SYNDROME]++;
    flags_we = 4'b1000; flags_in = 16'h7ffe; @(negedge clk); flags_we = 0;
    check(ver_done[3] && chunk_ok[3] == 16'h7ffe, "transmitter verdict from the receiver");
    if (ver_done[3] && chunk_ok[3] == 16'h7ffe) mech[M_FLAGS]++;

    // ---- every mechanism happened
    for (int k = 0; k < M_COUNT; k++) begin
      mech_e e;
      e = mech_e'(k);
      $display("mechanism %-16s %0d", e.name(), mech[k]);
      check(mech[k] > 0, $sformatf("mechanism %s never happened", e.name()));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
