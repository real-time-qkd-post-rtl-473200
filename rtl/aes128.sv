// aes128: AES-128 encryptor and decryptor for the distilled key.
//
// Key expansion runs on its own, independent of the data path: after
// key_load the eleven round keys are produced one per cycle and held in
// registers (key_ready rises 11 cycles after the key_load cycle). The cipher is fully
// unrolled: an input stage adds the first round key and each of the ten
// rounds has its own pipeline register, so one 128-bit block can enter
// every clock and leaves 11 cycles later on out_valid/out_block. Each
// entering block chooses encryption (decrypt = 0) or decryption; the two
// directions are separate unrolled pipelines sharing the round keys. The
// S-box is a 256-entry lookup table. Following the paper: AES-128, table
// lookups, parallel round instances, key expansion separate from the
// rounds; the exact pipeline cut and the shared enc/dec interface are this
// design's choices. At 100 MHz one block per clock is 12.8 Gbit/s.
module aes128 (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         key_load,
  input  logic [127:0] key,
  output logic         key_ready,
  input  logic         in_valid,
  input  logic         decrypt,
  input  logic [127:0] in_block,
  output logic         out_valid,
  output logic [127:0] out_block
);
  import aes_pkg::*;

  logic [127:0] rk [11];
  logic [3:0]   kx_round;
  logic         kx_busy;

  // Round-key generator: rk[i] from rk[i-1], one round per clock.
  function automatic logic [127:0] next_rk(input logic [127:0] p, input logic [7:0] rcon);
    logic [31:0] w0, w1, w2, w3, t;
    w0 = p[127:96]; w1 = p[95:64]; w2 = p[63:32]; w3 = p[31:0];
    t  = sub_word({w3[23:0], w3[31:24]}) ^ {rcon, 24'h0};
    w0 = w0 ^ t;
    w1 = w1 ^ w0;
    w2 = w2 ^ w1;
    w3 = w3 ^ w2;
    return {w0, w1, w2, w3};
  endfunction

  logic [7:0] rcon;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      kx_round  <= '0;
      kx_busy   <= 1'b0;
      key_ready <= 1'b0;
      rcon      <= 8'h01;
      for (int i = 0; i < 11; i++) rk[i] <= '0;
    end else if (key_load) begin
      rk[0]     <= key;
      kx_round  <= 4'd1;
      kx_busy   <= 1'b1;
      key_ready <= 1'b0;
      rcon      <= 8'h01;
    end else if (kx_busy) begin
      rk[kx_round] <= next_rk(rk[kx_round-1], rcon);
      rcon         <= xtime(rcon);
      if (kx_round == 4'd10) begin
        kx_busy   <= 1'b0;
        key_ready <= 1'b1;
      end
      kx_round <= kx_round + 1'b1;
    end
  end

  // Pipeline: stage 0 is the initial AddRoundKey, stages 1..10 the rounds.
  logic [127:0] enc_st [11];
  logic [127:0] dec_st [11];
  logic [10:0]  vld;
  logic [10:0]  dir;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      vld[0]    <= 1'b0;
      dir[0]    <= 1'b0;
      enc_st[0] <= '0;
      dec_st[0] <= '0;
    end else begin
      vld[0]    <= in_valid;
      dir[0]    <= decrypt;
      enc_st[0] <= in_block ^ rk[0];
      dec_st[0] <= in_block ^ rk[10];
    end
  end

  // One register stage per round, each its own process.
  for (genvar r = 1; r <= 10; r++) begin : g_round
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) begin
        vld[r]    <= 1'b0;
        dir[r]    <= 1'b0;
        enc_st[r] <= '0;
        dec_st[r] <= '0;
      end else begin
        vld[r] <= vld[r-1];
        dir[r] <= dir[r-1];
        if (r < 10) begin
          enc_st[r] <= mix_columns(shift_rows(sub_bytes(enc_st[r-1]))) ^ rk[r];
          dec_st[r] <= inv_mix_columns(inv_sub_bytes(inv_shift_rows(dec_st[r-1])) ^ rk[10-r]);
        end else begin
          enc_st[r] <= shift_rows(sub_bytes(enc_st[r-1])) ^ rk[10];
          dec_st[r] <= inv_sub_bytes(inv_shift_rows(dec_st[r-1])) ^ rk[0];
        end
      end
    end
  end

  assign out_valid = vld[10];
  assign out_block = dir[10] ? dec_st[10] : enc_st[10];

endmodule
