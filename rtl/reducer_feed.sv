// reducer_feed: streams the verified key from the combiner buffers.
//
// On pass_req it walks the combiner buffers of mappers 0 .. num_active-1
// in order, each over its share of share_len bits, split into the same 16
// chunks of ceil(share_len/16) bits that error verification used. Chunks
// whose chunk_ok bit is 0 are skipped whole (the discard of the paper's
// map-reduce figure); the bits of the others are sent to privacy
// amplification one per clock on out_valid/out_bit, and out_end follows
// the last one. The read of a combiner bit is combinational
// (rd_sel/rd_addr -> rd_bit), the outputs are registered. kept_bits and
// dropped_bits count the last pass. The order of the concatenation and the
// bit-serial read are this design's choices.
module reducer_feed #(
  parameter int unsigned N_MAPPERS = 4
) (
  input  logic                         clk,
  input  logic                         rst_n,
  input  logic                         pass_req,
  input  logic [$clog2(N_MAPPERS+1)-1:0] num_active,
  input  logic [N_MAPPERS-1:0][31:0]   share_len,
  input  logic [N_MAPPERS-1:0][15:0]   chunk_ok,
  output logic [$clog2(N_MAPPERS)-1:0] rd_sel,
  output logic [31:0]                  rd_addr,
  input  logic                         rd_bit,
  output logic                         out_valid,
  output logic                         out_bit,
  output logic                         out_end,
  output logic [31:0]                  kept_bits,
  output logic [31:0]                  dropped_bits
);
  localparam int unsigned MW = $clog2(N_MAPPERS+1);

  logic          run;
  logic [MW-1:0] m;
  logic [31:0]   pos, inchunk, clen, slen;
  logic [4:0]    chunk;

  assign slen    = share_len[m[$clog2(N_MAPPERS)-1:0]];
  assign clen    = (slen + 32'd15) >> 4;
  assign rd_sel  = m[$clog2(N_MAPPERS)-1:0];
  assign rd_addr = pos;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      run          <= 1'b0;
      m            <= '0;
      pos          <= '0;
      inchunk      <= '0;
      chunk        <= '0;
      out_valid    <= 1'b0;
      out_bit      <= 1'b0;
      out_end      <= 1'b0;
      kept_bits    <= '0;
      dropped_bits <= '0;
    end else begin
      out_valid <= 1'b0;
      out_end   <= 1'b0;
      if (pass_req) begin
        run          <= 1'b1;
        m            <= '0;
        pos          <= '0;
        inchunk      <= '0;
        chunk        <= '0;
        kept_bits    <= '0;
        dropped_bits <= '0;
      end else if (run) begin
        if (m >= num_active || m >= MW'(N_MAPPERS)) begin
          run     <= 1'b0;
          out_end <= 1'b1;
        end else if (pos >= slen) begin
          m       <= m + 1'b1;
          pos     <= '0;
          inchunk <= '0;
          chunk   <= '0;
        end else if (!chunk_ok[m[$clog2(N_MAPPERS)-1:0]][chunk[3:0]]) begin
          // discard the rest of this chunk in one step
          dropped_bits <= dropped_bits + ((pos + clen - inchunk > slen) ? slen - pos : clen - inchunk);
          pos     <= pos + clen - inchunk;
          inchunk <= '0;
          chunk   <= chunk + 1'b1;
        end else begin
          out_valid <= 1'b1;
          out_bit   <= rd_bit;
          kept_bits <= kept_bits + 1;
          pos       <= pos + 1;
          if (inchunk + 1 == clen) begin
            inchunk <= '0;
            chunk   <= chunk + 1'b1;
          end else begin
            inchunk <= inchunk + 1;
          end
        end
      end
    end
  end

endmodule
