// tb_auth_mac: checks t = Poly1305_{T_r k2}(m) XOR k2 against the
// reference models for random r, k2 and messages, that the derived key is
// ready two clocks after start, and that two tags of one message under
// different r differ (the hash key really changes).
module tb_auth_mac;
  import tb_ref_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic         start, ready, blk_valid, blk_last, tag_valid;
  logic [254:0] r_bits;
  logic [127:0] k2, blk_data, tag;
  logic [4:0]   blk_bytes;
  int checks = 0, failures = 0;

  auth_mac dut (.*);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  function automatic logic [127:0] tz(input logic [254:0] r, input logic [127:0] k);
    logic [127:0] o;
    for (int a = 1; a <= 128; a++) begin
      o[a-1] = 0;
      for (int b = 1; b <= 128; b++) o[a-1] ^= r[127 - a + b] & k[b-1];
    end
    return o;
  endfunction

  task automatic run(input logic [7:0] msg [], input int len, output logic [127:0] t);
    int nb, w;
    @(negedge clk); start = 1;
    @(negedge clk); start = 0;
    check(!ready, "not ready one clock after start");
    @(negedge clk);
    check(ready, "ready two clocks after start");
    nb = (len + 15) / 16;
    for (int b = 0; b < nb; b++) begin
      blk_valid = 1; blk_last = (b == nb-1);
      blk_bytes = 5'((len - 16*b >= 16) ? 16 : len - 16*b);
      blk_data = '0;
      for (int i = 0; i < 16; i++) if (16*b+i < len) blk_data[8*i +: 8] = msg[16*b+i];
      @(negedge clk);
    end
    blk_valid = 0; blk_last = 0;
    check(tag_valid, "tag one clock after last block");
    t = tag;
    @(negedge clk);
  endtask

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [7:0] msg [];
    logic [127:0] t, t2, e;
    int len;
    start = 0; blk_valid = 0; blk_last = 0; blk_bytes = 16; blk_data = '0; r_bits = '0; k2 = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int n = 0; n < 20; n++) begin
      len = 1 + $urandom % 60;
      msg = new[len];
      foreach (msg[i]) msg[i] = 8'($urandom);
      for (int w = 0; w < 8; w++) r_bits[w*32 +: 32] = $urandom;
      k2 = {$urandom, $urandom, $urandom, $urandom};
      e = poly1305_ref(msg, len, tz(r_bits, k2), k2, 1'b1);
      run(msg, len, t);
      check(t == e, $sformatf("tag %0d", n));
      if (n == 0) begin
        r_bits[0] = ~r_bits[0];
        r_bits[200] = ~r_bits[200];
        run(msg, len, t2);
        check(t2 != t && t2 == poly1305_ref(msg, len, tz(r_bits, k2), k2, 1'b1), "new r gives a new hash key");
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
