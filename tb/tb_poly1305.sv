// tb_poly1305: checks the Poly1305 core against the RFC 8439 example
// and against a bit-serial reference on random messages of random length,
// in both finishing modes, and checks that each tag follows its last block
// by exactly one clock.
module tb_poly1305;
  import tb_ref_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic         init, xor_mode, blk_valid, blk_last, tag_valid;
  logic [127:0] key_r, key_s, blk_data, tag;
  logic [4:0]   blk_bytes;
  int checks = 0, failures = 0;

  poly1305 dut (.*);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  task automatic run_msg(input logic [7:0] msg [], input int len, input logic [127:0] r,
                         input logic [127:0] s, input bit xm, output logic [127:0] t);
    int nb;
    nb = (len + 15) / 16;
    for (int b = 0; b < nb; b++) begin
      @(negedge clk);
      init      = (b == 0);
      key_r     = r;
      key_s     = s;
      xor_mode  = xm;
      blk_valid = 1'b1;
      blk_last  = (b == nb - 1);
      blk_bytes = 5'((len - 16*b >= 16) ? 16 : len - 16*b);
      blk_data  = '0;
      for (int i = 0; i < 16; i++) if (16*b + i < len) blk_data[8*i +: 8] = msg[16*b + i];
    end
    @(negedge clk);
    init = 0; blk_valid = 0; blk_last = 0;
    check(tag_valid == 1'b1, "tag one clock after last block");
    t = tag;
    @(negedge clk);
    check(tag_valid == 1'b0, "tag_valid is a single pulse");
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [7:0]   msg [];
    logic [127:0] t, r, s, exp_t;
    string        text;
    init = 0; blk_valid = 0; blk_last = 0; xor_mode = 0; key_r = '0; key_s = '0;
    blk_data = '0; blk_bytes = 5'd16;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;

    // RFC 8439 section 2.5.2
    text = "Cryptographic Forum Research Group";
    msg = new[text.len()];
    for (int i = 0; i < text.len(); i++) msg[i] = text[i];
    r = 128'h_a806d542_fe52447f_336d5557_78bed685;
    s = 128'h_1bf54941_aff6bf4a_fdb20dfb_8a800301;
    run_msg(msg, text.len(), r, s, 1'b0, t);
    check(t == 128'ha927010c_af8b2bc2_c6365130_c11d06a8, "RFC 8439 tag");

    // random messages
    for (int n = 0; n < 40; n++) begin
      int len;
      bit xm;
      len = 1 + ($urandom % 70);
      xm  = n[0];
      msg = new[len];
      for (int i = 0; i < len; i++) msg[i] = 8'($urandom);
      r = {$urandom, $urandom, $urandom, $urandom};
      s = {$urandom, $urandom, $urandom, $urandom};
      if (n == 1) begin   // extreme accumulator values
        for (int i = 0; i < len; i++) msg[i] = 8'hff;
        r = '1;
      end
      exp_t = poly1305_ref(msg, len, r, s, xm);
      run_msg(msg, len, r, s, xm, t);
      check(t == exp_t, $sformatf("random msg %0d len %0d", n, len));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
