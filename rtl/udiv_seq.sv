// udiv_seq: unsigned restoring divider, one quotient bit per cycle.
//
// Used by the SIMD lanes of the extrapolation unit to turn the pixel-weighted
// sums into averages (Eq. 1 of the algorithm and the ROI confidence).  A
// `start` pulse loads the operands; `done` pulses NW+1 cycles later with
// quot = num / den (truncated).  A zero divisor gives an all-ones quotient;
// callers avoid it.  The divider itself is this implementation's choice: the
// averaging it serves is the paper's.
module udiv_seq #(
  parameter int unsigned NW = 30,   // numerator / quotient width
  parameter int unsigned DW = 22    // divisor width
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          start,
  input  logic [NW-1:0] num,
  input  logic [DW-1:0] den,
  output logic          busy,
  output logic          done,
  output logic [NW-1:0] quot
);
  logic [NW-1:0]        q;
  logic [DW:0]          rem;
  logic [DW-1:0]        d;
  logic [$clog2(NW+1)-1:0] cnt;

  wire  [DW:0] trial = {rem[DW-1:0], q[NW-1]};
  wire         ge    = (trial >= {1'b0, d});

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      q <= '0; rem <= '0; d <= '0; cnt <= '0;
      busy <= 1'b0; done <= 1'b0; quot <= '0;
    end else begin
      done <= 1'b0;
      if (start && !busy) begin
        q    <= num;
        rem  <= '0;
        d    <= den;
        cnt  <= ($bits(cnt))'(NW);
        busy <= 1'b1;
      end else if (busy) begin
        rem <= ge ? trial - {1'b0, d} : trial;
        q   <= {q[NW-2:0], ge};
        cnt <= cnt - 1'b1;
        if (cnt == 1) begin
          busy <= 1'b0;
          done <= 1'b1;
          quot <= {q[NW-2:0], ge};
        end
      end
    end
  end
endmodule
