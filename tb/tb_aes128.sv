// tb_aes128: AES-128 known-answer tests (FIPS-197 appendices B and C.1) in
// both directions, then a back-to-back stream of random blocks, one per
// clock, checking the 11-clock latency, one result per clock, and that
// decryption returns every plaintext.
module tb_aes128;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic         key_load, key_ready, in_valid, decrypt, out_valid;
  logic [127:0] key, in_block, out_block;
  int checks = 0, failures = 0;

  aes128 dut (.*);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic load_key(input logic [127:0] k);
    int n;
    @(negedge clk); key_load = 1; key = k;
    @(negedge clk); key_load = 0;
    n = 0;
    while (!key_ready && n < 100) begin @(negedge clk); n++; end
    check(n == 10, $sformatf("key expansion takes 11 clocks (waited %0d)", n + 1));
  endtask

  // one block, returns result and latency in clocks
  task automatic one(input logic [127:0] b, input bit dec, output logic [127:0] o, output int lat);
    @(negedge clk); in_valid = 1; decrypt = dec; in_block = b;
    @(negedge clk); in_valid = 0;
    lat = 1;
    while (!out_valid && lat < 100) begin @(negedge clk); lat++; end
    o = out_block;
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic [127:0] pts [64];
  logic [127:0] cts [64];

  initial begin
    logic [127:0] o;
    int lat, got;
    key_load = 0; in_valid = 0; decrypt = 0; key = '0; in_block = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;

    load_key(128'h000102030405060708090a0b0c0d0e0f);
    one(128'h00112233445566778899aabbccddeeff, 0, o, lat);
    check(o == 128'h69c4e0d86a7b0430d8cdb78070b4c55a, "FIPS-197 C.1 encrypt");
    check(lat == 11, $sformatf("latency 11 clocks (got %0d)", lat));
    one(128'h69c4e0d86a7b0430d8cdb78070b4c55a, 1, o, lat);
    check(o == 128'h00112233445566778899aabbccddeeff, "FIPS-197 C.1 decrypt");

    load_key(128'h2b7e151628aed2a6abf7158809cf4f3c);
    one(128'h3243f6a8885a308d313198a2e0370734, 0, o, lat);
    check(o == 128'h3925841d02dc09fbdc118597196a0b32, "FIPS-197 B encrypt");
    one(128'h3925841d02dc09fbdc118597196a0b32, 1, o, lat);
    check(o == 128'h3243f6a8885a308d313198a2e0370734, "FIPS-197 B decrypt");

    // streaming: 64 blocks back to back
    for (int i = 0; i < 64; i++) pts[i] = {$urandom, $urandom, $urandom, $urandom};
    got = 0;
    fork
      begin
        for (int i = 0; i < 64; i++) begin
          @(negedge clk); in_valid = 1; decrypt = 0; in_block = pts[i];
        end
        @(negedge clk); in_valid = 0;
      end
      begin
        @(negedge clk);
        repeat (11) @(negedge clk);
        for (int i = 0; i < 64; i++) begin
          check(out_valid, $sformatf("stream enc result %0d on its clock", i));
          cts[i] = out_block;
          check(out_block != pts[i], "ciphertext differs from plaintext");
          @(negedge clk);
        end
      end
    join
    fork
      begin
        for (int i = 0; i < 64; i++) begin
          @(negedge clk); in_valid = 1; decrypt = 1; in_block = cts[i];
        end
        @(negedge clk); in_valid = 0;
      end
      begin
        @(negedge clk);
        repeat (11) @(negedge clk);
        for (int i = 0; i < 64; i++) begin
          check(out_valid && out_block == pts[i], $sformatf("stream dec %0d", i));
          @(negedge clk);
        end
      end
    join
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
