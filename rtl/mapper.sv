// mapper: one instance of the map stage of the map-reduce reconciliation.
//
// The scheduler hands each mapper a share of the sifted-key block as a
// series of LDPC frames. A frame enters through the split buffer (a FIFO of
// 64-bit words, pushed with push/push_word) and is started with
// frame_start. On the receiver (role = ROLE_BOB) the frame is Bob's bits y
// followed by Alice's syndrome, and the LDPC decoder corrects y; on the
// transmitter (ROLE_ALICE) the frame is Alice's bits x, and the syndrome
// encoder computes the syndrome (syn_valid/syn_bit, to be sent to Bob). In
// both cases the resulting key frame, one bit per clock, is appended to the
// mapper's combiner buffer and streamed into error verification, which was
// armed for the whole share with share_start (share_bits, 256-bit key).
// Error verification emits one Poly1305 tag per 1/16 of the share
// (tag_valid/tag_idx/tag); on Bob the tags are compared with Alice's
// (peer_we/peer_idx/peer_tag) and chunk_ok tells which chunks survive; on
// Alice chunk_ok is the verdict Bob sent back (flags_we/flags_in). The
// combiner buffer is read bit by bit by the reducer (comb_raddr/comb_rbit).
//
// Structure (split buffer, LDPC, error verification, yes/no decision,
// combiner buffer) follows the paper's map-reduce figure; the port
// protocol, the one-bit-per-clock combiner and holding both the encoder
// and the decoder so that one build serves either end are this design's
// choices.
// Immediate assertions check that a frame starts only when the previous one
// has ended and that a share never overruns the combiner buffer.
module mapper
  import kde_pkg::*;
#(
  parameter int unsigned N_MAX      = 8192,
  parameter int unsigned M_MAX      = 7680,
  parameter int unsigned E_MAX      = 32768,
  parameter int unsigned MAX_ITER   = 50,
  parameter int unsigned FIFO_DEPTH = 512,
  parameter int unsigned COMB_BITS  = 1048576
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  role_e                      role,
  // parity-check matrix (broadcast)
  input  logic                       h_we,
  input  logic [$clog2(E_MAX)-1:0]   h_addr,
  input  logic [$clog2(N_MAX)-1:0]   h_col,
  input  logic                       h_row_end,
  // code configuration
  input  logic [$clog2(N_MAX+1)-1:0] n_cols,
  input  logic [$clog2(M_MAX+1)-1:0] n_rows,
  input  logic [$clog2(E_MAX+1)-1:0] n_edges,
  input  logic [6:0]                 llr_mag,
  input  logic [$clog2(MAX_ITER+1)-1:0] max_iter,
  // split buffer
  input  logic                       push,
  input  logic [63:0]                push_word,
  output logic                       fifo_full,
  // share / frame control
  input  logic                       share_start,
  input  logic [31:0]                share_bits,
  input  logic [255:0]               ver_key,
  input  logic                       frame_start,
  output logic                       frame_busy,
  output logic                       frame_done,
  output logic                       frame_ok,
  output logic [$clog2(MAX_ITER+1)-1:0] frame_iters,
  output logic                       syn_valid,
  output logic                       syn_bit,
  // verification
  input  logic                       peer_we,
  input  logic [3:0]                 peer_idx,
  input  logic [127:0]               peer_tag,
  input  logic                       flags_we,
  input  logic [15:0]                flags_in,
  output logic                       tag_valid,
  output logic [3:0]                 tag_idx,
  output logic [127:0]               tag,
  output logic                       ver_done,
  output logic [15:0]                chunk_ok,
  // combiner buffer
  output logic [31:0]                share_len,
  output logic [31:0]                comb_count,
  input  logic [31:0]                comb_raddr,
  output logic                       comb_rbit
);
  localparam int unsigned CWORDS = COMB_BITS / 64;
  localparam int unsigned CA     = $clog2(CWORDS);

  logic [63:0] fifo_dout;
  logic        fifo_empty, fifo_pop;
  logic        dec_pop, enc_pop;

  sync_fifo #(.WIDTH(64), .DEPTH(FIFO_DEPTH)) u_split (
    .clk, .rst_n,
    .push, .din(push_word),
    .pop  (fifo_pop),
    .dout (fifo_dout),
    .full (fifo_full),
    .empty(fifo_empty),
    .count()
  );

  assign fifo_pop = (role == ROLE_BOB) ? dec_pop : enc_pop;

  // --- receiver: LDPC decoder --------------------------------------------
  logic dec_busy, dec_done, dec_ok, dec_ov, dec_ob;
  logic [$clog2(MAX_ITER+1)-1:0] dec_it;

  ldpc_decoder #(.N_MAX(N_MAX), .M_MAX(M_MAX), .E_MAX(E_MAX), .MAX_ITER(MAX_ITER)) u_dec (
    .clk, .rst_n,
    .h_we, .h_addr, .h_col, .h_row_end,
    .start   (frame_start && role == ROLE_BOB),
    .n_cols, .n_rows, .n_edges,
    .llr_mag,
    .max_iter,
    .ld_valid(!fifo_empty && role == ROLE_BOB),
    .ld_word (fifo_dout),
    .ld_pop  (dec_pop),
    .busy    (dec_busy),
    .done    (dec_done),
    .success (dec_ok),
    .iterations(dec_it),
    .out_valid(dec_ov),
    .out_bit  (dec_ob)
  );

  // --- transmitter: syndrome encoder -------------------------------------
  logic enc_busy, enc_done, enc_kv, enc_kb;

  ldpc_syndrome_enc #(.N_MAX(N_MAX), .M_MAX(M_MAX), .E_MAX(E_MAX)) u_enc (
    .clk, .rst_n,
    .h_we, .h_addr, .h_col, .h_row_end,
    .start   (frame_start && role == ROLE_ALICE),
    .n_cols, .n_rows, .n_edges,
    .ld_valid(!fifo_empty && role == ROLE_ALICE),
    .ld_word (fifo_dout),
    .ld_pop  (enc_pop),
    .busy    (enc_busy),
    .done    (enc_done),
    .syn_valid,
    .syn_bit,
    .key_valid(enc_kv),
    .key_bit  (enc_kb)
  );

  logic kv, kb;
  logic done_d;
  assign kv = (role == ROLE_BOB) ? dec_ov : enc_kv;
  assign kb = (role == ROLE_BOB) ? dec_ob : enc_kb;
  assign frame_busy = (role == ROLE_BOB) ? dec_busy : enc_busy;

  // frame_done pulses once per finished frame
  logic done_now;
  assign done_now = (role == ROLE_BOB) ? dec_done : enc_done;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) done_d <= 1'b0;
    else        done_d <= done_now;
  end
  assign frame_done  = done_now && !done_d;
  assign frame_ok    = (role == ROLE_BOB) ? dec_ok : 1'b1;
  assign frame_iters = (role == ROLE_BOB) ? dec_it : '0;

  // --- combiner buffer ------------------------------------------------------
  logic [63:0] comb [CWORDS];

  always_ff @(posedge clk) begin
    if (kv) comb[comb_count[CA+5:6]][comb_count[5:0]] <= kb;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      comb_count <= '0;
      share_len  <= '0;
    end else begin
      if (share_start) begin
        comb_count <= '0;
        share_len  <= share_bits;
      end else if (kv) begin
        comb_count <= comb_count + 1;
      end
      // a share never overruns the combiner buffer, and a frame starts
      // only after the previous one has ended
      assert (!kv || comb_count < 32'(COMB_BITS));
      assert (!frame_start || !frame_busy);
    end
  end

  assign comb_rbit = comb[comb_raddr[CA+5:6]][comb_raddr[5:0]];

  // --- error verification ---------------------------------------------------
  logic [15:0] ok_own, ok_peer;
  logic        own_done;

  error_verify #(.T(16), .K(128)) u_ver (
    .clk, .rst_n,
    .start      (share_start),
    .total_bits (share_bits),
    .key        (ver_key),
    .peer_we,
    .peer_idx,
    .peer_tag_in(peer_tag),
    .bit_valid  (kv),
    .bit_in     (kb),
    .tag_valid,
    .tag_idx,
    .tag,
    .chunk_ok   (ok_own),
    .done       (own_done)
  );

  logic flags_got;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ok_peer   <= '0;
      flags_got <= 1'b0;
    end else if (share_start) begin
      ok_peer   <= '0;
      flags_got <= 1'b0;
    end else if (flags_we) begin
      ok_peer   <= flags_in;
      flags_got <= 1'b1;
    end
  end

  assign chunk_ok = (role == ROLE_BOB) ? ok_own : ok_peer;
  assign ver_done = (role == ROLE_BOB) ? own_done : (own_done && flags_got);


endmodule
