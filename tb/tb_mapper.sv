// tb_mapper: one mapper as receiver and as transmitter.
// Receiver: three noisy frames of a random column-weight-3 code pass
// through the split buffer; each must be corrected, land in the combiner
// buffer bit-exact, and the share's 16 tags must equal the reference tags
// of Alice's frames; one peer tag is corrupted so exactly that chunk is
// flagged bad. Transmitter: the same share as Alice, checking the
// syndrome bits, the combiner contents, the tags and that chunk_ok is
// the verdict loaded from Bob.
module tb_mapper;
  import kde_pkg::*;
  import tb_ref_pkg::*;
  import tb_ldpc_pkg::*;
  localparam int NM = 256, MM = 240, EM = 1024, MI = 50;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  role_e role;
  logic h_we, h_row_end, push, fifo_full, share_start, frame_start, frame_busy, frame_done, frame_ok;
  logic syn_valid, syn_bit, peer_we, flags_we, tag_valid, ver_done, comb_rbit;
  logic [$clog2(EM)-1:0] h_addr;
  logic [$clog2(NM)-1:0] h_col;
  logic [$clog2(NM+1)-1:0] n_cols;
  logic [$clog2(MM+1)-1:0] n_rows;
  logic [$clog2(EM+1)-1:0] n_edges;
  logic [6:0] llr_mag;
  logic [$clog2(MI+1)-1:0] max_iter, frame_iters;
  logic [63:0] push_word;
  logic [31:0] share_bits, share_len, comb_count, comb_raddr;
  logic [255:0] ver_key;
  logic [3:0] peer_idx, tag_idx;
  logic [127:0] peer_tag, tag;
  logic [15:0] flags_in, chunk_ok;
  int checks = 0, failures = 0;

  mapper #(.N_MAX(NM), .M_MAX(MM), .E_MAX(EM), .MAX_ITER(MI), .FIFO_DEPTH(16), .COMB_BITS(4096)) dut (.*);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  logic [127:0] ref_tags [16];
  int ntag;
  always @(posedge clk) if (rst_n && tag_valid) begin
    checks++; ntag++;
    if (tag != ref_tags[tag_idx]) begin failures++; $display("FAIL: tag %0d", tag_idx); end
  end

  bit s_exp [$];
  always @(posedge clk) if (rst_n && syn_valid) begin
    checks++;
    if (s_exp.size() == 0 || s_exp.pop_front() != syn_bit) begin failures++; $display("FAIL: syndrome bit"); end
  end

  initial begin
    repeat (500000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    hmat h;
    localparam int F = 3;
    bit x [F][], y [], s [];
    bit share [];
    bit chunk [];
    int n, L, t;
    h_we = 0; h_addr = 0; h_col = 0; h_row_end = 0; push = 0; push_word = 0; share_start = 0;
    frame_start = 0; peer_we = 0; flags_we = 0; peer_idx = 0; peer_tag = 0; flags_in = 0;
    comb_raddr = 0; share_bits = 0; ver_key = 0; role = ROLE_BOB;
    repeat (3) @(negedge clk);
    rst_n = 1;
    h = new(256, 192);
    foreach (h.cols[e]) begin
      @(negedge clk); h_we = 1; h_addr = e; h_col = h.cols[e]; h_row_end = h.ends[e];
    end
    @(negedge clk); h_we = 0;
    n = h.n;
    n_cols = n; n_rows = h.m; n_edges = h.cols.size(); llr_mag = 24; max_iter = 50;
    for (int w = 0; w < 8; w++) ver_key[32*w +: 32] = $urandom;
    share = new[F*n];
    for (int f = 0; f < F; f++) begin
      x[f] = new[n];
      foreach (x[f][i]) begin x[f][i] = 1'($urandom); share[f*n + i] = x[f][i]; end
    end
    L = (F*n + 15) / 16;
    for (int c = 0; c < 16; c++) begin
      chunk = new[L];
      for (int i = 0; i < L; i++) chunk[i] = share[c*L + i];
      ref_tags[c] = chunk_tag_ref(fold_ref(chunk, L), ver_key);
    end

    for (int pass = 0; pass < 2; pass++) begin
      role = pass == 0 ? ROLE_BOB : ROLE_ALICE;
      for (int c = 0; c < 16; c++) begin
        @(negedge clk); peer_we = 1; peer_idx = c; peer_tag = (c == 5) ? ~ref_tags[c] : ref_tags[c];
      end
      @(negedge clk); peer_we = 0; share_start = 1; share_bits = F*n;
      @(negedge clk); share_start = 0;
      ntag = 0;
      for (int f = 0; f < F; f++) begin
        h.syndrome(x[f], s);
        y = new[n];
        foreach (y[i]) y[i] = x[f][i];
        if (role == ROLE_BOB) for (int k = 0; k < 4; k++) y[$urandom % n] ^= 1'b1;
        else foreach (s[i]) s_exp.push_back(s[i]);
        for (int w = 0; w < (n+63)/64; w++) begin
          for (int b = 0; b < 64; b++) push_word[b] = y[64*w + b];
          push = 1; @(negedge clk);
        end
        if (role == ROLE_BOB)
          for (int w = 0; w < (h.m+63)/64; w++) begin
            for (int b = 0; b < 64; b++) push_word[b] = (64*w + b < h.m) ? s[64*w + b] : 1'b0;
            push = 1; @(negedge clk);
          end
        push = 0; frame_start = 1;
        @(negedge clk); frame_start = 0;
        t = 0;
        while (!frame_done && t < 100000) begin @(negedge clk); t++; end
        check(frame_done && frame_ok, $sformatf("role %0d frame %0d done and ok", role, f));
      end
      repeat (4) @(negedge clk);
      check(ntag == 16, $sformatf("16 tags (%0d)", ntag));
      check(comb_count == F*n && share_len == F*n, "combiner count");
      if (role == ROLE_BOB) begin
        check(ver_done, "verification done");
        check(chunk_ok == ~16'h0020, $sformatf("chunk_ok %h", chunk_ok));
      end else begin
        check(!ver_done, "transmitter waits for Bob's verdict");
        @(negedge clk); flags_we = 1; flags_in = 16'hbeef;
        @(negedge clk); flags_we = 0;
        check(ver_done && chunk_ok == 16'hbeef, "transmitter takes Bob's verdict");
        check(s_exp.size() == 0, "all syndrome bits sent");
      end
      for (int i = 0; i < F*n; i++) begin
        comb_raddr = i; #1;
        if (comb_rbit != share[i]) begin
          check(0, $sformatf("combiner bit %0d", i));
          break;
        end
      end
      check(1, "combiner readback");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
