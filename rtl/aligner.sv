// aligner: sliding-window alignment of Bob's record to Alice's sequence.
//
// Before sifting, Bob's detections must be matched to the slots in which
// Alice sent. The aligner tries MAX_OFFSET candidate delays at once: Alice's
// bits pass through a delay line, and for every delay d a counter counts
// how often Bob's bit agrees with Alice's bit d slots earlier. After
// window samples (start clears, in_valid/a_bit/b_bit supply one slot per
// clock) done rises with the delay of the highest count (best_offset,
// lowest delay wins ties) and that count (best_count). The agreement count
// over the window stands for the correlation coefficient; at the right
// delay it is near window*(1-QBER), elsewhere near window/2. The sliding
// window and correlation measure follow the paper; the parallel counters,
// the agreement count and the sizes are this design's choices. Finding the
// maximum takes MAX_OFFSET clocks after the window.
module aligner #(
  parameter int unsigned MAX_OFFSET = 64,
  parameter int unsigned CW         = 16
) (
  input  logic                          clk,
  input  logic                          rst_n,
  input  logic                          start,
  input  logic [CW-1:0]                 window,
  input  logic                          in_valid,
  input  logic                          a_bit,
  input  logic                          b_bit,
  output logic                          done,
  output logic [$clog2(MAX_OFFSET)-1:0] best_offset,
  output logic [CW-1:0]                 best_count
);
  localparam int unsigned OW = $clog2(MAX_OFFSET);

  typedef enum logic [1:0] {A_IDLE, A_RUN, A_MAX, A_DONE} st_e;
  st_e st;

  logic [MAX_OFFSET-1:0] dl;          // dl[d] = Alice bit d slots ago (d=0: current)
  logic [CW-1:0]         cnt [MAX_OFFSET];
  logic [CW-1:0]         seen;
  logic [OW:0]           scan;
  logic [MAX_OFFSET-1:0] adl;

  assign adl = {dl[MAX_OFFSET-2:0], a_bit};

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st          <= A_IDLE;
      dl          <= '0;
      seen        <= '0;
      scan        <= '0;
      done        <= 1'b0;
      best_offset <= '0;
      best_count  <= '0;
      for (int d = 0; d < MAX_OFFSET; d++) cnt[d] <= '0;
    end else begin
      unique case (st)
        A_IDLE, A_DONE: if (start) begin
          dl   <= '0;
          seen <= '0;
          done <= 1'b0;
          for (int d = 0; d < MAX_OFFSET; d++) cnt[d] <= '0;
          st <= A_RUN;
        end
        A_RUN: if (in_valid) begin
          dl <= adl;
          // delay d only counts once d earlier Alice slots exist
          for (int d = 0; d < MAX_OFFSET; d++)
            if (32'(seen) >= d && adl[d] == b_bit) cnt[d] <= cnt[d] + 1'b1;
          seen <= seen + 1'b1;
          if (seen + 1'b1 == window) begin
            scan        <= '0;
            best_offset <= '0;
            best_count  <= '0;
            st          <= A_MAX;
          end
        end
        A_MAX: begin
          if (cnt[scan[OW-1:0]] > best_count) begin
            best_count  <= cnt[scan[OW-1:0]];
            best_offset <= scan[OW-1:0];
          end
          if (scan == (OW+1)'(MAX_OFFSET - 1)) begin
            done <= 1'b1;
            st   <= A_DONE;
          end
          scan <= scan + 1'b1;
        end
        default: st <= A_IDLE;
      endcase
    end
  end

endmodule
