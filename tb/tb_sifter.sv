// tb_sifter: random detections in BB84, BBM92 and COW mode. Checks every
// kept bit and its order against the sifting rule, the kept count and the
// classical-bit count (2 per detection for BB84/BBM92, 1 for COW), and
// that about half the BB84 detections and the data-line COW detections
// survive.
module tb_sifter;
  import kde_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  proto_e      mode;
  logic        clear, in_valid, bob_basis, alice_basis, key_bit, out_valid, out_bit;
  logic [31:0] kept, chan_bits;
  int checks = 0, failures = 0;

  sifter dut (.*);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  bit exp_q [$];
  always @(posedge clk) if (rst_n && out_valid) begin
    checks++;
    if (exp_q.size() == 0 || exp_q.pop_front() != out_bit) begin
      failures++;
      $display("FAIL: unexpected sifted bit");
    end
  end

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int nk, nd;
    proto_e modes [3] = '{PROTO_BB84, PROTO_BBM92, PROTO_COW};
    clear = 0; in_valid = 0; bob_basis = 0; alice_basis = 0; key_bit = 0; mode = PROTO_BB84;
    repeat (3) @(negedge clk);
    rst_n = 1;
    foreach (modes[m]) begin
      @(negedge clk); mode = modes[m]; clear = 1;
      @(negedge clk); clear = 0;
      nk = 0; nd = 0;
      for (int i = 0; i < 2000; i++) begin
        in_valid    = ($urandom % 4) != 0;
        bob_basis   = 1'($urandom);
        alice_basis = 1'($urandom);
        key_bit     = 1'($urandom);
        if (in_valid) begin
          nd++;
          if ((modes[m] == PROTO_COW) ? (bob_basis == 0) : (bob_basis == alice_basis)) begin
            nk++;
            exp_q.push_back(key_bit);
          end
        end
        @(negedge clk);
      end
      in_valid = 0;
      @(negedge clk);
      check(kept == 32'(nk), $sformatf("mode %0d kept count %0d vs %0d", m, kept, nk));
      check(chan_bits == 32'((modes[m] == PROTO_COW) ? nd : 2*nd), $sformatf("mode %0d channel bits", m));
      check(nk > nd*4/10 && nk < nd*6/10, "about half kept");
      check(exp_q.size() == 0, "every kept bit came out");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
