// kde_top: key distillation engine, the hardware side of QKD post-processing.
//
// Raw detections are sifted (sifter, BB84/BBM92/COW) after the aligner has
// found the delay between the two parties' records; sifted bits are packed
// into 64-bit words in the acquisition FIFO, from which the processor moves
// them to external memory. Reconciliation then runs as map-reduce: the
// processor (outside this module) splits a block of sifted key into LDPC
// frames and pushes them into the split buffers of N_MAPPERS mappers. Each
// mapper corrects its frames (receiver) or computes their syndromes
// (transmitter), verifies its share with 16 XOR-folded Poly1305 tags and
// holds the result in its combiner buffer. The reducer, privacy
// amplification, hashes the surviving chunks of all active mappers into the
// final key, read out bit by bit on key_valid/key_bit/key_idx. Every
// complete 128 bits of final key are loaded as a fresh AES-128 key, and the
// AES pipeline encrypts or decrypts one block per clock for the
// application. The authentication unit tags classical-channel messages with
// a Toeplitz-refreshed Poly1305 key.
//
// Everything the processor does (scheduling, QBER estimation, choosing the
// code shortening f, moving data to and from DDR3, exchanging syndromes,
// tags and flags over the classical link) is outside this module: its
// inputs and outputs are the ports below, plain signals and packed arrays,
// one lane per mapper where a signal is per mapper. num_active selects how
// many mappers the reducer collects from (1 to N_MAPPERS), so one build
// runs every mapper count of the paper's measurements.
//
// The block partition (split buffers, LDPC + error verification mappers,
// combiner buffers, privacy-amplification reducer, AES, authentication,
// sifting) follows the paper; N_MAPPERS = 4 is its largest configuration.
// Buffer sizes, the seed memory and all port protocols are this design's
// choices.
module kde_top
  import kde_pkg::*;
#(
  parameter int unsigned N_MAPPERS  = 4,
  parameter int unsigned N_MAX      = 8192,
  parameter int unsigned M_MAX      = 7680,
  parameter int unsigned E_MAX      = 32768,
  parameter int unsigned MAX_ITER   = 50,
  parameter int unsigned FIFO_DEPTH = 512,
  parameter int unsigned COMB_BITS  = 1048576,
  parameter int unsigned SEED_BITS  = 2097152,
  parameter int unsigned PA_SEG     = 1024,
  parameter int unsigned ACQ_DEPTH  = 1024,
  parameter int unsigned MAX_OFFSET = 64
) (
  input  logic                          clk,
  input  logic                          rst_n,
  input  role_e                         role,
  // alignment
  input  logic                          al_start,
  input  logic [15:0]                   al_window,
  input  logic                          al_valid,
  input  logic                          al_a_bit,
  input  logic                          al_b_bit,
  output logic                          al_done,
  output logic [$clog2(MAX_OFFSET)-1:0] al_offset,
  output logic [15:0]                   al_count,
  // sifting and acquisition buffer
  input  proto_e                        proto,
  input  logic                          sift_clear,
  input  logic                          det_valid,
  input  logic                          det_bob_basis,
  input  logic                          det_alice_basis,
  input  logic                          det_key_bit,
  output logic [31:0]                   sift_kept,
  output logic [31:0]                   sift_chan_bits,
  input  logic                          acq_pop,
  output logic [63:0]                   acq_word,
  output logic                          acq_empty,
  output logic                          acq_overflow,
  // parity-check matrix load (all mappers)
  input  logic                          h_we,
  input  logic [$clog2(E_MAX)-1:0]      h_addr,
  input  logic [$clog2(N_MAX)-1:0]      h_col,
  input  logic                          h_row_end,
  // code configuration
  input  logic [$clog2(N_MAX+1)-1:0]    n_cols,
  input  logic [$clog2(M_MAX+1)-1:0]    n_rows,
  input  logic [$clog2(E_MAX+1)-1:0]    n_edges,
  input  logic [6:0]                    llr_mag,
  input  logic [$clog2(MAX_ITER+1)-1:0] max_iter,
  // mappers
  input  logic [N_MAPPERS-1:0]          push,
  input  logic [63:0]                   push_word,
  output logic [N_MAPPERS-1:0]          fifo_full,
  input  logic [N_MAPPERS-1:0]          share_start,
  input  logic [31:0]                   share_bits,
  input  logic [255:0]                  ver_key,
  input  logic [N_MAPPERS-1:0]          frame_start,
  output logic [N_MAPPERS-1:0]          frame_busy,
  output logic [N_MAPPERS-1:0]          frame_done,
  output logic [N_MAPPERS-1:0]          frame_ok,
  output logic [N_MAPPERS-1:0][$clog2(MAX_ITER+1)-1:0] frame_iters,
  output logic [N_MAPPERS-1:0]          syn_valid,
  output logic [N_MAPPERS-1:0]          syn_bit,
  input  logic [N_MAPPERS-1:0]          peer_we,
  input  logic [3:0]                    peer_idx,
  input  logic [127:0]                  peer_tag,
  input  logic [N_MAPPERS-1:0]          flags_we,
  input  logic [15:0]                   flags_in,
  output logic [N_MAPPERS-1:0]          tag_valid,
  output logic [N_MAPPERS-1:0][3:0]     tag_idx,
  output logic [N_MAPPERS-1:0][127:0]   tag,
  output logic [N_MAPPERS-1:0]          ver_done,
  output logic [N_MAPPERS-1:0][15:0]    chunk_ok,
  // reducer: privacy amplification
  input  logic [$clog2(N_MAPPERS+1)-1:0] num_active,
  input  logic                          seed_we,
  input  logic [$clog2(SEED_BITS/64)-1:0] seed_waddr,
  input  logic [63:0]                   seed_wdata,
  input  logic                          pa_start,
  input  logic [31:0]                   r_len,
  output logic                          pa_busy,
  output logic                          pa_done,
  output logic [31:0]                   pa_kept_bits,
  output logic [31:0]                   pa_dropped_bits,
  output logic                          key_valid,
  output logic                          key_bit,
  output logic [31:0]                   key_idx,
  // AES application
  output logic                          aes_key_ready,
  input  logic                          aes_in_valid,
  input  logic                          aes_decrypt,
  input  logic [127:0]                  aes_in_block,
  output logic                          aes_out_valid,
  output logic [127:0]                  aes_out_block,
  // authentication
  input  logic                          auth_start,
  input  logic [254:0]                  auth_r,
  input  logic [127:0]                  auth_k2,
  output logic                          auth_ready,
  input  logic                          auth_blk_valid,
  input  logic [127:0]                  auth_blk_data,
  input  logic [4:0]                    auth_blk_bytes,
  input  logic                          auth_blk_last,
  output logic                          auth_tag_valid,
  output logic [127:0]                  auth_tag
);
  localparam int unsigned SA = $clog2(SEED_BITS/64);

  // ---------------------------------------------------------------- alignment
  aligner #(.MAX_OFFSET(MAX_OFFSET), .CW(16)) u_align (
    .clk, .rst_n,
    .start   (al_start),
    .window  (al_window),
    .in_valid(al_valid),
    .a_bit   (al_a_bit),
    .b_bit   (al_b_bit),
    .done    (al_done),
    .best_offset(al_offset),
    .best_count (al_count)
  );

  // ------------------------------------------------ sifting and acquisition
  logic        sv, sb;
  logic [63:0] pack;
  logic [5:0]  pack_n;
  logic        acq_push, acq_full;

  sifter u_sift (
    .clk, .rst_n,
    .mode       (proto),
    .clear      (sift_clear),
    .in_valid   (det_valid),
    .bob_basis  (det_bob_basis),
    .alice_basis(det_alice_basis),
    .key_bit    (det_key_bit),
    .out_valid  (sv),
    .out_bit    (sb),
    .kept       (sift_kept),
    .chan_bits  (sift_chan_bits)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      pack         <= '0;
      pack_n       <= '0;
      acq_overflow <= 1'b0;
    end else begin
      if (sift_clear) begin
        pack_n       <= '0;
        acq_overflow <= 1'b0;
      end else if (sv) begin
        pack[pack_n] <= sb;
        pack_n       <= pack_n + 1'b1;
        if (pack_n == 6'd63 && acq_full) acq_overflow <= 1'b1;
      end
    end
  end
  assign acq_push = sv && (pack_n == 6'd63);

  sync_fifo #(.WIDTH(64), .DEPTH(ACQ_DEPTH)) u_acq (
    .clk, .rst_n,
    .push (acq_push),
    .din  ({sb, pack[62:0]}),
    .pop  (acq_pop),
    .dout (acq_word),
    .full (acq_full),
    .empty(acq_empty),
    .count()
  );

  // ----------------------------------------------------------------- mappers
  logic [N_MAPPERS-1:0][31:0] share_len;
  logic [N_MAPPERS-1:0]       comb_rbit;
  logic [31:0]                rd_addr;
  logic [$clog2(N_MAPPERS)-1:0] rd_sel;

  for (genvar i = 0; i < N_MAPPERS; i++) begin : g_map
    mapper #(
      .N_MAX(N_MAX), .M_MAX(M_MAX), .E_MAX(E_MAX), .MAX_ITER(MAX_ITER),
      .FIFO_DEPTH(FIFO_DEPTH), .COMB_BITS(COMB_BITS)
    ) u_map (
      .clk, .rst_n, .role,
      .h_we, .h_addr, .h_col, .h_row_end,
      .n_cols, .n_rows, .n_edges, .llr_mag, .max_iter,
      .push       (push[i]),
      .push_word,
      .fifo_full  (fifo_full[i]),
      .share_start(share_start[i]),
      .share_bits,
      .ver_key,
      .frame_start(frame_start[i]),
      .frame_busy (frame_busy[i]),
      .frame_done (frame_done[i]),
      .frame_ok   (frame_ok[i]),
      .frame_iters(frame_iters[i]),
      .syn_valid  (syn_valid[i]),
      .syn_bit    (syn_bit[i]),
      .peer_we    (peer_we[i]),
      .peer_idx,
      .peer_tag,
      .flags_we   (flags_we[i]),
      .flags_in,
      .tag_valid  (tag_valid[i]),
      .tag_idx    (tag_idx[i]),
      .tag        (tag[i]),
      .ver_done   (ver_done[i]),
      .chunk_ok   (chunk_ok[i]),
      .share_len  (share_len[i]),
      .comb_count (),
      .comb_raddr (rd_addr),
      .comb_rbit  (comb_rbit[i])
    );
  end

  // ------------------------------------------------- reducer: PA + feeder
  logic        pass_req, f_valid, f_bit, f_end;
  logic [31:0] seed_addr;
  logic        seed_rd, seed_bit;
  logic [63:0] seed_mem [SEED_BITS/64];

  reducer_feed #(.N_MAPPERS(N_MAPPERS)) u_feed (
    .clk, .rst_n,
    .pass_req,
    .num_active,
    .share_len,
    .chunk_ok,
    .rd_sel,
    .rd_addr,
    .rd_bit      (comb_rbit[rd_sel]),
    .out_valid   (f_valid),
    .out_bit     (f_bit),
    .out_end     (f_end),
    .kept_bits   (pa_kept_bits),
    .dropped_bits(pa_dropped_bits)
  );

  always_ff @(posedge clk) begin
    if (seed_we) seed_mem[seed_waddr] <= seed_wdata;
  end
  assign seed_bit = seed_rd && (seed_addr < 32'(SEED_BITS)) &&
                    seed_mem[seed_addr[SA+5:6]][seed_addr[5:0]];

  privacy_amp #(.PA_SEG(PA_SEG)) u_pa (
    .clk, .rst_n,
    .start    (pa_start),
    .r_len,
    .busy     (pa_busy),
    .done     (pa_done),
    .seed_addr,
    .seed_rd,
    .seed_bit,
    .pass_req,
    .in_valid (f_valid),
    .in_bit   (f_bit),
    .in_end   (f_end),
    .out_valid(key_valid),
    .out_bit  (key_bit),
    .out_idx  (key_idx)
  );

  // --------------------------------------------- AES keyed by the final key
  logic [127:0] kbuf;
  logic         k_load;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      kbuf   <= '0;
      k_load <= 1'b0;
    end else begin
      k_load <= key_valid && (key_idx[6:0] == 7'd127);
      if (key_valid) kbuf[7'd127 - key_idx[6:0]] <= key_bit;   // first key bit is the MSB
    end
  end

  aes128 u_aes (
    .clk, .rst_n,
    .key_load (k_load),
    .key      (kbuf),
    .key_ready(aes_key_ready),
    .in_valid (aes_in_valid),
    .decrypt  (aes_decrypt),
    .in_block (aes_in_block),
    .out_valid(aes_out_valid),
    .out_block(aes_out_block)
  );

  // ----------------------------------------------------------- authentication
  auth_mac #(.N(128), .L(128)) u_auth (
    .clk, .rst_n,
    .start    (auth_start),
    .r_bits   (auth_r),
    .k2       (auth_k2),
    .ready    (auth_ready),
    .blk_valid(auth_blk_valid),
    .blk_data (auth_blk_data),
    .blk_bytes(auth_blk_bytes),
    .blk_last (auth_blk_last),
    .tag_valid(auth_tag_valid),
    .tag      (auth_tag)
  );

endmodule
