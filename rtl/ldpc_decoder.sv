// ldpc_decoder: syndrome (Slepian-Wolf) LDPC decoder for reconciliation.
//
// Bob holds y, a noisy copy of Alice's frame x, and receives Alice's
// syndrome s = H x. The decoder searches for the frame closest to y whose
// syndrome is s, by layered normalised min-sum message passing on the
// Tanner graph of H. The parity-check matrix (irregular, up to
// M_MAX x N_MAX = 7680 x 8192, shrunk at run time to (7680-f) x (8192-f)
// to adapt the rate to the QBER) is not built in: it is loaded as a list of
// the column indices of its ones, row after row, each row's last entry
// flagged (h_we/h_addr/h_col/h_row_end), exactly the index lists the
// engine's processor keeps.
//
// Operation: start (with n_cols, n_rows, n_edges, llr_mag, max_iter) reads
// ceil(n_cols/64) words of y and then ceil(n_rows/64) words of s from the
// load stream (ld_valid/ld_word, ld_pop acknowledges a word; bit b of word w
// is position 64w+b). The posterior of every bit starts at +llr_mag for a 0
// and -llr_mag for a 1 (llr_mag comes from the QBER estimate). A check pass
// (one clock per edge) compares the syndrome of the hard decisions with s;
// if it differs, one layered iteration runs (two clocks per edge: gather
// Q = L - R for the row and track the two smallest |Q|, then write back
// R = 0.75 * min with the sign set by the parity of the other signs and the
// syndrome bit, L = Q + R). Decoding stops when the syndrome matches
// (success = 1) or after max_iter iterations (success = 0). The hard
// decisions then leave on out_valid/out_bit, one bit per clock, n_cols bits.
//
// Cycle count: n_cols/64 + n_rows/64 load, n_edges per check pass, 2
// n_edges per iteration, n_cols output. The algorithm family (soft message
// passing, syndrome decoding, index-list H, at most 50 iterations, the
// (7680-f) x (8192-f) shape) follows the paper; min-sum with factor 0.75,
// layered order, 8-bit messages, 10-bit posteriors and the serial
// one-edge-per-clock datapath are this design's choices. Rows may hold at
// most DMAX ones.
module ldpc_decoder #(
  parameter int unsigned N_MAX    = 8192,
  parameter int unsigned M_MAX    = 7680,
  parameter int unsigned E_MAX    = 32768,
  parameter int unsigned DMAX     = 32,
  parameter int unsigned MAX_ITER = 50,
  parameter int unsigned LW       = 8
) (
  input  logic                       clk,
  input  logic                       rst_n,
  // parity-check matrix load
  input  logic                       h_we,
  input  logic [$clog2(E_MAX)-1:0]   h_addr,
  input  logic [$clog2(N_MAX)-1:0]   h_col,
  input  logic                       h_row_end,
  // frame control
  input  logic                       start,
  input  logic [$clog2(N_MAX+1)-1:0] n_cols,
  input  logic [$clog2(M_MAX+1)-1:0] n_rows,
  input  logic [$clog2(E_MAX+1)-1:0] n_edges,
  input  logic [LW-2:0]              llr_mag,
  input  logic [$clog2(MAX_ITER+1)-1:0] max_iter,
  // y / syndrome load stream
  input  logic                       ld_valid,
  input  logic [63:0]                ld_word,
  output logic                       ld_pop,
  // result
  output logic                       busy,
  output logic                       done,
  output logic                       success,
  output logic [$clog2(MAX_ITER+1)-1:0] iterations,
  output logic                       out_valid,
  output logic                       out_bit
);
  localparam int unsigned NW  = (N_MAX + 63) / 64;
  localparam int unsigned MW  = (M_MAX + 63) / 64;
  localparam int unsigned EA  = $clog2(E_MAX);
  localparam int unsigned NA  = $clog2(N_MAX);
  localparam int unsigned MA  = $clog2(M_MAX);
  localparam int unsigned PW  = LW + 2;           // posterior width
  localparam int unsigned QW  = LW + 3;           // Q width before clipping
  localparam int unsigned DA  = $clog2(DMAX);
  localparam int unsigned IW  = $clog2(MAX_ITER+1);

  typedef logic signed [LW-1:0] msg_t;
  typedef logic signed [PW-1:0] post_t;
  typedef logic signed [QW-1:0] q_t;

  typedef enum logic [3:0] {S_IDLE, S_LDY, S_LDS, S_INIT, S_CHK, S_GATH, S_SCAT, S_OUT, S_DONE} st_e;
  st_e st;

  // storage
  logic [NA-1:0] h_col_mem [E_MAX];
  logic          h_end_mem [E_MAX];
  msg_t          r_mem     [E_MAX];
  post_t         l_mem     [N_MAX];
  logic [63:0]   y_mem     [NW];
  logic [63:0]   s_mem     [MW];
  q_t            qbuf      [DMAX];
  logic [NA-1:0] cbuf      [DMAX];

  // configuration of the current frame
  logic [$clog2(N_MAX+1)-1:0] ncol_q;
  logic [$clog2(M_MAX+1)-1:0] nrow_q;
  logic [$clog2(E_MAX+1)-1:0] nedge_q;
  logic [LW-2:0]              llr_q;
  logic [IW-1:0]              maxit_q;

  // counters
  logic [31:0]   cnt;          // generic index (words, columns)
  logic [EA:0]   e;            // edge pointer
  logic [EA:0]   e_row;        // first edge of the current row
  logic [MA:0]   row;
  logic [DA:0]   kd;           // position in the row
  logic [DA:0]   deg;          // degree of the row being scattered
  logic          par;          // check-pass parity / sign parity
  logic [31:0]   mism;         // unsatisfied checks in the check pass
  logic [LW-2:0] min1, min2;
  logic [DA:0]   idx1;

  always_ff @(posedge clk) begin
    if (h_we) begin
      h_col_mem[h_addr] <= h_col;
      h_end_mem[h_addr] <= h_row_end;
    end
  end

  // --- combinational views --------------------------------------------------
  logic [NA-1:0] ecol;
  logic          eend;
  post_t         lcol;
  msg_t          rcur;
  q_t            qcur;
  logic [LW-2:0] qmag;
  logic          srow;
  logic          hard;

  assign ecol = h_col_mem[e[EA-1:0]];
  assign eend = h_end_mem[e[EA-1:0]];
  assign lcol = l_mem[ecol];
  assign rcur = r_mem[e[EA-1:0]];
  assign qcur = q_t'(lcol) - q_t'(rcur);
  assign hard = lcol[PW-1];
  assign srow = s_mem[row[$clog2(MW)+5:6]][row[5:0]];

  function automatic logic [LW-2:0] clip_mag(input q_t q);
    q_t a;
    a = (q < 0) ? -q : q;
    return (a > q_t'((1 << (LW-1)) - 1)) ? {(LW-1){1'b1}} : a[LW-2:0];
  endfunction

  function automatic post_t sat_post(input q_t v);
    if (v > q_t'((1 << (PW-1)) - 1))  return post_t'((1 << (PW-1)) - 1);
    if (v < -q_t'((1 << (PW-1)) - 1)) return -post_t'((1 << (PW-1)) - 1);
    return post_t'(v);
  endfunction

  assign qmag = clip_mag(qcur);

  // scatter-phase values
  q_t            qs;
  logic [LW-2:0] mag_s, nmag_s;
  msg_t          rnew;
  logic          sgn_s;

  always_comb begin
    qs     = qbuf[kd[DA-1:0]];
    mag_s  = (kd == idx1) ? min2 : min1;
    nmag_s = mag_s - (mag_s >> 2);            // x 0.75
    sgn_s  = par ^ (qs < 0) ^ srow;
    rnew   = sgn_s ? -msg_t'({1'b0, nmag_s}) : msg_t'({1'b0, nmag_s});
  end

  logic [31:0] ny_words, ns_words;
  assign ny_words = (32'(ncol_q) + 32'd63) >> 6;
  assign ns_words = (32'(nrow_q) + 32'd63) >> 6;

  assign busy   = (st != S_IDLE) && (st != S_DONE);
  assign ld_pop = ld_valid && (st == S_LDY || st == S_LDS);

  always_ff @(posedge clk) begin
    unique case (st)
      S_LDY: if (ld_valid) y_mem[cnt[$clog2(NW)-1:0]] <= ld_word;
      S_LDS: if (ld_valid) s_mem[cnt[$clog2(MW)-1:0]] <= ld_word;
      S_INIT: begin
        if (cnt < 32'(ncol_q))
          l_mem[cnt[NA-1:0]] <= y_mem[cnt[NA-1:6]][cnt[5:0]] ? -post_t'({1'b0, llr_q}) : post_t'({1'b0, llr_q});
        if (cnt < nedge_q) r_mem[cnt[EA-1:0]] <= '0;
      end
      S_GATH: begin
        qbuf[kd[DA-1:0]] <= qcur;
        cbuf[kd[DA-1:0]] <= ecol;
      end
      S_SCAT: begin
        r_mem[e[EA-1:0]]        <= rnew;
        l_mem[cbuf[kd[DA-1:0]]] <= sat_post(qs + q_t'(rnew));
      end
      default: ;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st         <= S_IDLE;
      ncol_q     <= '0;
      nrow_q     <= '0;
      nedge_q    <= '0;
      llr_q      <= '0;
      maxit_q    <= '0;
      cnt        <= '0;
      e          <= '0;
      e_row      <= '0;
      row        <= '0;
      kd         <= '0;
      deg        <= '0;
      par        <= 1'b0;
      mism       <= '0;
      min1       <= '0;
      min2       <= '0;
      idx1       <= '0;
      done       <= 1'b0;
      success    <= 1'b0;
      iterations <= '0;
      out_valid  <= 1'b0;
      out_bit    <= 1'b0;
    end else begin
      out_valid <= 1'b0;
      unique case (st)
        S_IDLE, S_DONE: if (start) begin
          ncol_q     <= n_cols;
          nrow_q     <= n_rows;
          nedge_q    <= n_edges;
          llr_q      <= llr_mag;
          maxit_q    <= max_iter;
          cnt        <= '0;
          done       <= 1'b0;
          success    <= 1'b0;
          iterations <= '0;
          st         <= S_LDY;
        end
        S_LDY: if (ld_valid) begin
          if (cnt + 1 >= 32'(ny_words)) begin
            cnt <= '0;
            st  <= S_LDS;
          end else cnt <= cnt + 1;
        end
        S_LDS: if (ld_valid) begin
          if (cnt + 1 >= 32'(ns_words)) begin
            cnt <= '0;
            st  <= S_INIT;
          end else cnt <= cnt + 1;
        end
        S_INIT: begin
          // one column (and one edge) per clock
          if (cnt + 1 >= 32'(ncol_q) && cnt + 1 >= 32'(nedge_q)) begin
            st   <= S_CHK;
            e    <= '0;
            row  <= '0;
            par  <= 1'b0;
            mism <= '0;
          end
          cnt <= cnt + 1;
        end
        S_CHK: begin
          // syndrome of the hard decisions, one edge per clock
          if (eend) begin
            if ((par ^ hard) != srow) mism <= mism + 1;
            par <= 1'b0;
            row <= row + 1'b1;
          end else begin
            par <= par ^ hard;
          end
          e <= e + 1'b1;
          if (e + 1 >= (EA+1)'(nedge_q)) begin
            if (mism == 0 && !(eend && ((par ^ hard) != srow))) begin
              success <= 1'b1;
              cnt     <= '0;
              st      <= S_OUT;
            end else if (iterations >= maxit_q) begin
              success <= 1'b0;
              cnt     <= '0;
              st      <= S_OUT;
            end else begin
              iterations <= iterations + 1'b1;
              e     <= '0;
              e_row <= '0;
              row   <= '0;
              kd    <= '0;
              par   <= 1'b0;
              min1  <= {(LW-1){1'b1}};
              min2  <= {(LW-1){1'b1}};
              idx1  <= '0;
              st    <= S_GATH;
            end
          end
        end
        S_GATH: begin
          // Q = L - R; track sign parity and the two smallest magnitudes
          par <= par ^ (qcur < 0);
          if (qmag < min1) begin
            min2 <= min1;
            min1 <= qmag;
            idx1 <= kd;
          end else if (qmag < min2) begin
            min2 <= qmag;
          end
          if (eend) begin
            deg <= kd + 1'b1;
            kd  <= '0;
            e   <= e_row;
            st  <= S_SCAT;
          end else begin
            kd <= kd + 1'b1;
            e  <= e + 1'b1;
          end
        end
        S_SCAT: begin
          if (kd + 1'b1 == deg) begin
            row   <= row + 1'b1;
            par   <= 1'b0;
            min1  <= {(LW-1){1'b1}};
            min2  <= {(LW-1){1'b1}};
            idx1  <= '0;
            kd    <= '0;
            e     <= e + 1'b1;
            e_row <= e + 1'b1;
            if (e + 1 >= (EA+1)'(nedge_q)) begin
              e    <= '0;
              row  <= '0;
              mism <= '0;
              st   <= S_CHK;
            end else begin
              st <= S_GATH;
            end
          end else begin
            kd <= kd + 1'b1;
            e  <= e + 1'b1;
          end
        end
        S_OUT: begin
          out_valid <= 1'b1;
          out_bit   <= l_mem[cnt[NA-1:0]][PW-1];
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
