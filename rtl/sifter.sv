// sifter: basis sifting for BB84, BBM92 and COW.
//
// One aligned detection is presented per cycle (in_valid). For BB84 and
// BBM92, Bob announces his basis bit and Alice answers with one bit, the
// XOR of her basis and Bob's; the detection is kept when that XOR is 0, so
// two classical bits are spent per detection (m_BS = 2 n_Q). For COW, Bob
// announces only which detector clicked; a data-line click (det = 0 in this
// design) is kept, a monitoring-line click is dropped, and Alice sends no
// answer (m_BS = n_Q). The kept key bit leaves one cycle later on
// out_valid/out_bit. kept and chan_bits count sifted bits and classical
// bits since reset or clear. The sifting rules and the bit costs follow the
// paper; the value of det meaning "data line" and the registered output are
// this design's choices. The same module serves Alice and Bob: key_bit is
// the local key bit of whichever side it runs on.
module sifter
  import kde_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  proto_e      mode,
  input  logic        clear,
  input  logic        in_valid,
  input  logic        bob_basis,     // BB84/BBM92: Bob's basis; COW: detector (0 data line, 1 monitor)
  input  logic        alice_basis,   // BB84/BBM92: Alice's basis; unused for COW
  input  logic        key_bit,
  output logic        out_valid,
  output logic        out_bit,
  output logic [31:0] kept,
  output logic [31:0] chan_bits
);
  logic keep;
  logic reply;

  always_comb begin
    reply = alice_basis ^ bob_basis;
    unique case (mode)
      PROTO_COW: keep = (bob_basis == 1'b0);
      default:   keep = (reply == 1'b0);
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_bit   <= 1'b0;
      kept      <= '0;
      chan_bits <= '0;
    end else begin
      out_valid <= in_valid && keep;
      out_bit   <= key_bit;
      if (clear) begin
        kept      <= '0;
        chan_bits <= '0;
      end else if (in_valid) begin
        kept      <= kept + (keep ? 32'd1 : 32'd0);
        chan_bits <= chan_bits + ((mode == PROTO_COW) ? 32'd1 : 32'd2);
      end
    end
  end

endmodule
