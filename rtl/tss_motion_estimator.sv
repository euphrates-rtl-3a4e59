// tss_motion_estimator: block-matching motion estimation for one macroblock,
// as done in the temporal-denoising stage of the ISP.
//
// The current L x L macroblock at pixel position <x,y> is compared, by sum of
// absolute differences (SAD), with candidate blocks of the previous frame
// inside a (2d+1) x (2d+1) search window.  The search is the classic
// three-step search (TSS): the centre and its eight neighbours at distance S
// are evaluated, the best one becomes the new centre, S is halved, and the
// process repeats until S = 1.  For d = 7 this is 1 + 8*3 = 25 candidates,
// i.e. L^2*(1+8*log2(d+1)) absolute differences, as in the paper's cost model.
// The result is the motion vector <u,v> (the best match sits at <x+u,y+v> in
// the previous frame), its SAD, and the confidence of Eq. 2 scaled to a byte:
//     conf = 255 - SAD/256     (= 255 * (1 - SAD/(255*L^2)) for L = 16).
//
// Interface: the caller holds `cur` (current macroblock) and `win` (previous
// frame pixels from (x-d, y-d) to (x+L+d-1, y+L+d-1), padded by the caller at
// frame borders) stable while `busy` is high.  `start` is accepted when not
// busy.  `done` pulses for one cycle with mv/sad/conf valid; they then hold.
//
// Timing: one row of L absolute differences per cycle, so 25*L = 400 cycles per
// macroblock plus 1 to finish: `done` rises 401 cycles after the `start` edge
// for L = 16, d = 7.
// A 1080p frame (8160 macroblocks) therefore takes about 3.3 M cycles,
// 4.3 ms at the ISP's 768 MHz, well inside a 16.7 ms frame at 60 FPS.
//
// From the paper: block matching with SAD, TSS, L = 16, d = 7, the 1-byte MV
// encoding and Eq. 2.  Own choices: one row per cycle, strict-less-than tie
// break in the fixed candidate order below, and conf = 255 - SAD>>8.
module tss_motion_estimator
  import euph_pkg::*;
#(
  parameter int unsigned L = MB_L,
  parameter int unsigned D = SEARCH_D,
  localparam int unsigned W = L + 2*D
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             start,
  input  logic [7:0]       cur [L][L],
  input  logic [7:0]       win [W][W],
  output logic             busy,
  output logic             done,
  output mv_t              mv,
  output logic [15:0]      sad,
  output logic [7:0]       conf
);

  // Largest power of two not above (D+1)/2: first step size of TSS.
  function automatic int first_step(input int d);
    int s;
    s = 1;
    while (2*s*2 <= d + 1) s = 2*s;
    return s;
  endfunction
  localparam int S0 = first_step(D);

  localparam int CW = $clog2(2*D+1) + 1;   // signed offset width
  localparam int RW = $clog2(L);

  typedef enum logic [1:0] {S_IDLE, S_RUN, S_DONE} state_t;
  state_t state;

  logic signed [CW-1:0] cen_u, cen_v;      // centre of the current step
  logic signed [CW-1:0] best_u, best_v;
  logic [15:0]          best_sad;
  logic [$clog2(S0+1):0] step;
  logic [3:0]           k;                 // candidate 0 = centre, 1..8 = ring
  logic [RW-1:0]        row;
  logic [15:0]          acc;
  logic                 have_best;

  // Offset of ring candidate k (1..8), row-major around the centre.
  logic signed [CW-1:0] dx, dy, cand_u, cand_v;
  always_comb begin
    unique case (k)
      4'd1: begin dx = -1; dy = -1; end
      4'd2: begin dx =  0; dy = -1; end
      4'd3: begin dx =  1; dy = -1; end
      4'd4: begin dx = -1; dy =  0; end
      4'd5: begin dx =  1; dy =  0; end
      4'd6: begin dx = -1; dy =  1; end
      4'd7: begin dx =  0; dy =  1; end
      4'd8: begin dx =  1; dy =  1; end
      default: begin dx = 0; dy = 0; end
    endcase
    cand_u = cen_u + dx * CW'(signed'({1'b0, step}));
    cand_v = cen_v + dy * CW'(signed'({1'b0, step}));
  end

  // SAD of one row of the candidate block.
  logic [15:0] row_sad;
  always_comb begin
    int unsigned wr, wc;
    logic [7:0] a, b;
    row_sad = '0;
    wr = int'(row) + D + int'(cand_v);
    for (int c = 0; c < L; c++) begin
      wc = c + D + int'(cand_u);
      a  = cur[row][c];
      b  = win[wr][wc];
      row_sad += 16'((a > b) ? 8'(a - b) : 8'(b - a));
    end
  end

  wire [15:0] cand_sad = acc + row_sad;
  wire        last_row = (row == RW'(L-1));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state     <= S_IDLE;
      cen_u     <= '0; cen_v  <= '0;
      best_u    <= '0; best_v <= '0;
      best_sad  <= '0;
      step      <= '0;
      k         <= '0;
      row       <= '0;
      acc       <= '0;
      have_best <= 1'b0;
      done      <= 1'b0;
      mv        <= '0;
      sad       <= '0;
      conf      <= '0;
    end else begin
      done <= 1'b0;
      unique case (state)
        S_IDLE: if (start) begin
          state     <= S_RUN;
          cen_u     <= '0; cen_v <= '0;
          step      <= ($bits(step))'(S0);
          k         <= '0;
          row       <= '0;
          acc       <= '0;
          have_best <= 1'b0;
        end
        S_RUN: begin
          if (!last_row) begin
            row <= row + 1'b1;
            acc <= cand_sad;
          end else begin
            row <= '0;
            acc <= '0;
            if (!have_best || cand_sad < best_sad) begin
              best_sad <= cand_sad;
              best_u   <= cand_u;
              best_v   <= cand_v;
            end
            have_best <= 1'b1;
            if (k != 4'd8) begin
              k <= k + 1'b1;
            end else if (step != 1) begin
              // next step: centre moves to the best candidate so far
              step  <= step >> 1;
              k     <= 4'd1;
              if (cand_sad < best_sad) begin
                cen_u <= cand_u; cen_v <= cand_v;
              end else begin
                cen_u <= best_u; cen_v <= best_v;
              end
            end else begin
              state <= S_DONE;
            end
          end
        end
        S_DONE: begin
          state   <= S_IDLE;
          done    <= 1'b1;
          mv.u    <= 4'(best_u);
          mv.v    <= 4'(best_v);
          sad     <= best_sad;
          conf    <= 8'd255 - best_sad[15:8];
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  assign busy = (state != S_IDLE);

endmodule
