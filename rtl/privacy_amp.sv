// privacy_amp: Toeplitz-hash privacy amplification, segment by segment.
//
// Compresses the verified key W (n bits) to the final key of r bits with
// the r x n Toeplitz matrix T[i][j] = s[j - i + r - 1] built from the
// public random seed s of n + r - 1 bits: final bit i = XOR_j T[i][j] W[j].
// The output is produced PA_SEG bits per pass. For the segment starting at
// row i0, column j of the segment is the seed window s[b + k], k = 0..S-1,
// with b = j + r - i0 - S, and row i0+t uses window bit S-1-t; moving to the
// next column slides the window one seed bit up. So each pass keeps an
// S-bit window register and an S-bit accumulator: a 1 input bit XORs the
// window into the accumulator, and every input bit shifts the window by one
// seed bit.
//
// Sequence per pass: the window is first filled (S cycles, seed read one
// bit per clock through seed_addr/seed_bit, addresses below 0 read as 0),
// then pass_req asks the key source to stream W from its start on
// in_valid/in_bit, ended by in_end (after the last bit, no data). The
// segment's bits then leave on out_valid/out_bit/out_idx, one per clock, in
// row order. After ceil(r/S) passes done rises. A pass therefore takes
// about n + 2S cycles. Toeplitz hashing and the TRNG seed follow the paper;
// the paper speeds the product up with an FFT, which is not built here:
// this is the direct product, split into passes so that the state is only
// 2S flip-flops whatever n and r are. The paper's seed length n-1 is short
// of the n + r - 1 bits an r x n Toeplitz matrix needs; the latter is used.
module privacy_amp #(
  parameter int unsigned PA_SEG = 1024
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        start,
  input  logic [31:0] r_len,       // final key length r (> 0)
  output logic        busy,
  output logic        done,
  // seed memory (combinational read)
  output logic [31:0] seed_addr,
  output logic        seed_rd,
  input  logic        seed_bit,
  // input key stream
  output logic        pass_req,
  input  logic        in_valid,
  input  logic        in_bit,
  input  logic        in_end,
  // final key
  output logic        out_valid,
  output logic        out_bit,
  output logic [31:0] out_idx
);
  localparam int unsigned S  = PA_SEG;
  localparam int unsigned SW = $clog2(S + 1);

  typedef enum logic [2:0] {IDLE, FILL, REQ, RUN, EMIT, FIN} st_e;
  st_e st;

  logic [S-1:0]        win, acc;
  logic signed [33:0]  sptr;       // next seed index
  logic [31:0]         i0;         // first row of the segment
  logic [31:0]         r_q;
  logic [SW-1:0]       k;
  logic                sbit;

  assign seed_addr = sptr[31:0];
  assign seed_rd   = (st == FILL) || (st == RUN && in_valid);
  assign sbit      = (sptr < 0) ? 1'b0 : seed_bit;
  assign busy      = (st != IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st        <= IDLE;
      win       <= '0;
      acc       <= '0;
      sptr      <= '0;
      i0        <= '0;
      r_q       <= '0;
      k         <= '0;
      done      <= 1'b0;
      pass_req  <= 1'b0;
      out_valid <= 1'b0;
      out_bit   <= 1'b0;
      out_idx   <= '0;
    end else begin
      pass_req  <= 1'b0;
      out_valid <= 1'b0;
      unique case (st)
        IDLE: if (start) begin
          r_q  <= r_len;
          i0   <= '0;
          done <= 1'b0;
          sptr <= 34'(signed'({2'b0, r_len})) - 34'(S);
          k    <= '0;
          st   <= FILL;
        end
        FILL: begin
          win  <= {sbit, win[S-1:1]};
          sptr <= sptr + 1;
          if (k == SW'(S - 1)) begin
            acc      <= '0;
            st       <= REQ;
            pass_req <= 1'b1;
          end
          k <= k + 1'b1;
        end
        REQ: st <= RUN;
        RUN: begin
          if (in_valid) begin
            if (in_bit) acc <= acc ^ win;
            win  <= {sbit, win[S-1:1]};
            sptr <= sptr + 1;
          end else if (in_end) begin
            k  <= '0;
            st <= EMIT;
          end
        end
        EMIT: begin
          // row i0 + t is accumulator bit S-1-t
          out_valid <= 1'b1;
          out_bit   <= acc[S-1];
          out_idx   <= i0 + 32'(k);
          acc       <= {acc[S-2:0], 1'b0};
          if (k == SW'(S - 1) || i0 + 32'(k) + 1 == r_q) begin
            if (i0 + 32'(S) >= r_q) begin
              st <= FIN;
            end else begin
              i0   <= i0 + 32'(S);
              sptr <= 34'(signed'({2'b0, r_q})) - 34'(signed'({2'b0, i0})) - 34'(2*S);
              k    <= '0;
              st   <= FILL;
            end
          end else begin
            k <= k + 1'b1;
          end
        end
        FIN: begin
          done <= 1'b1;
          st   <= IDLE;
        end
        default: st <= IDLE;
      endcase
    end
  end

endmodule
