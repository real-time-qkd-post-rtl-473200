// ldpc_syndrome_enc: Alice's side of syndrome-based LDPC reconciliation.
//
// Computes the syndrome s = H x of a key frame x, which Alice sends to Bob
// in place of parity bits. H is held in the same form the decoder uses: the
// column indices of its ones, row after row, the last entry of each row
// flagged (h_we/h_addr/h_col/h_row_end). start (with n_cols, n_rows,
// n_edges) reads ceil(n_cols/64) words of x from the load stream
// (ld_valid/ld_word/ld_pop; bit b of word w is position 64w+b), then walks
// the edge list one edge per clock, XORing the addressed bits of each row,
// and stops after n_edges edges or n_rows rows, whichever comes first.
// Syndrome bits leave on syn_valid/syn_bit in row order as each row ends;
// then the frame itself is replayed on key_valid/key_bit, n_cols bits, one
// per clock, so the mapper can pass it on like a decoded frame. done marks
// the end. The function (syndrome computation on the (7680-f) x (8192-f)
// matrix) follows the paper; the serial datapath is this design's choice.
module ldpc_syndrome_enc #(
  parameter int unsigned N_MAX = 8192,
  parameter int unsigned M_MAX = 7680,
  parameter int unsigned E_MAX = 32768
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic                       h_we,
  input  logic [$clog2(E_MAX)-1:0]   h_addr,
  input  logic [$clog2(N_MAX)-1:0]   h_col,
  input  logic                       h_row_end,
  input  logic                       start,
  input  logic [$clog2(N_MAX+1)-1:0] n_cols,
  input  logic [$clog2(M_MAX+1)-1:0] n_rows,
  input  logic [$clog2(E_MAX+1)-1:0] n_edges,
  input  logic                       ld_valid,
  input  logic [63:0]                ld_word,
  output logic                       ld_pop,
  output logic                       busy,
  output logic                       done,
  output logic                       syn_valid,
  output logic                       syn_bit,
  output logic                       key_valid,
  output logic                       key_bit
);
  localparam int unsigned NW = (N_MAX + 63) / 64;
  localparam int unsigned EA = $clog2(E_MAX);
  localparam int unsigned NA = $clog2(N_MAX);

  typedef enum logic [2:0] {S_IDLE, S_LD, S_SYN, S_KEY, S_DONE} st_e;
  st_e st;

  logic [NA-1:0] h_col_mem [E_MAX];
  logic          h_end_mem [E_MAX];
  logic [63:0]   x_mem     [NW];

  logic [$clog2(N_MAX+1)-1:0] ncol_q;
  logic [$clog2(E_MAX+1)-1:0] nedge_q;
  logic [$clog2(M_MAX+1)-1:0] nrow_q, row_q;
  logic [31:0] cnt, nx_words;
  logic [EA:0] e;
  logic        par;
  logic [NA-1:0] ecol;
  logic        xbit;

  always_ff @(posedge clk) begin
    if (h_we) begin
      h_col_mem[h_addr] <= h_col;
      h_end_mem[h_addr] <= h_row_end;
    end
    if (st == S_LD && ld_valid) x_mem[cnt[$clog2(NW)-1:0]] <= ld_word;
  end

  assign nx_words = (32'(ncol_q) + 32'd63) >> 6;
  assign ecol     = h_col_mem[e[EA-1:0]];
  assign xbit     = x_mem[ecol[NA-1:6]][ecol[5:0]];
  assign ld_pop   = ld_valid && (st == S_LD);
  assign busy     = (st != S_IDLE) && (st != S_DONE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st        <= S_IDLE;
      ncol_q    <= '0;
      nedge_q   <= '0;
      nrow_q    <= '0;
      row_q     <= '0;
      cnt       <= '0;
      e         <= '0;
      par       <= 1'b0;
      done      <= 1'b0;
      syn_valid <= 1'b0;
      syn_bit   <= 1'b0;
      key_valid <= 1'b0;
      key_bit   <= 1'b0;
    end else begin
      syn_valid <= 1'b0;
      key_valid <= 1'b0;
      unique case (st)
        S_IDLE, S_DONE: if (start) begin
          ncol_q  <= n_cols;
          nedge_q <= n_edges;
          nrow_q  <= n_rows;
          cnt     <= '0;
          done    <= 1'b0;
          st      <= S_LD;
        end
        S_LD: if (ld_valid) begin
          if (cnt + 1 >= nx_words) begin
            cnt <= '0;
            e   <= '0;
            par <= 1'b0;
            row_q <= '0;
            st  <= S_SYN;
          end else cnt <= cnt + 1;
        end
        S_SYN: begin
          if (h_end_mem[e[EA-1:0]]) begin
            syn_valid <= 1'b1;
            syn_bit   <= par ^ xbit;
            par       <= 1'b0;
            row_q     <= row_q + 1'b1;
          end else begin
            par <= par ^ xbit;
          end
          e <= e + 1'b1;
          // the frame's syndrome ends with its last edge or its last row
          if (e + 1 >= (EA+1)'(nedge_q) || (h_end_mem[e[EA-1:0]] && row_q + 1'b1 >= nrow_q))
            st <= S_KEY;
        end
        S_KEY: begin
          key_valid <= 1'b1;
          key_bit   <= x_mem[cnt[NA-1:6]][cnt[5:0]];
          if (cnt + 1 >= 32'(ncol_q)) begin
            st   <= S_DONE;
            done <= 1'b1;
          end
          cnt <= cnt + 1;
        end
        default: st <= S_IDLE;
      endcase
    end
  end

endmodule
