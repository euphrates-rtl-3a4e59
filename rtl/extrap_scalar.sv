// extrap_scalar: the scalar unit of the extrapolation unit.  It produces the
// two control signals of the motion controller's datapath:
//
//  * frame type (signal 5 of the block diagram): a frame counter marks an
//    inference frame (I-frame) every EW frames and extrapation frames
//    (E-frames) in between, so EW = 2 runs the CNN on half of the frames and
//    EW = 1 on all of them.  `force_i` (no ROI known yet) makes an I-frame.
//  * window size (signal 4): in constant mode EW follows the programmed value.
//    In adaptive mode, after each I-frame the sequencer streams pairs of
//    (CNN ROI, extrapolated ROI) through `cmp_*`; the unit takes the L1
//    distance of the four corner coordinates of each pair.  If any pair is
//    farther apart than `diff_thr`, EW drops by one (down to 1); if GOOD_RUN
//    I-frames in a row were all within the threshold, EW grows by one (up to
//    EW_MAX).  When the unit is in constant mode its adaptive EW tracks the
//    programmed EW, so switching to adaptive mode starts from that value.
//
// Interface: `frame_adv` pulses once per processed frame; `is_iframe` is valid
// combinationally for the frame about to be processed.  The compare stream is
// one pair per cycle; `cmp_last` marks the last pair of an I-frame (a stream
// with no pairs is simply not sent).  `ew_up`/`ew_down` pulse on an update.
//
// From the paper: I/E frames, constant and adaptive mode, "reduce EW if the
// difference is above a threshold, increase it if it stays below across
// several CNN invocations", EW-N meaning one inference in N frames (the 50%
// and 25% inference rates of EW-2 and EW-4).  Own choices: the L1 corner
// distance, steps of one, GOOD_RUN = 3, the limits 1..EW_MAX.
module extrap_scalar
  import euph_pkg::*;
#(
  parameter int unsigned EWM      = EW_MAX,
  parameter int unsigned GOOD_RUN = 3,
  localparam int unsigned EWW     = $clog2(EWM + 1)
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic           init,          // start of a task: frame counter to 0
  input  logic           adaptive,
  input  logic [EWW-1:0] ew_cfg,
  input  logic           force_i,
  input  logic           frame_adv,
  output logic           is_iframe,     // signal 5
  output logic [EWW-1:0] ew,            // signal 4
  input  logic           cmp_valid,
  input  logic           cmp_last,
  input  roi_t           cmp_cnn,
  input  roi_t           cmp_ext,
  input  logic [15:0]    diff_thr,
  output logic           ew_up,
  output logic           ew_down
);
  logic [EWW-1:0] ew_a, cnt;
  logic [$clog2(GOOD_RUN+1)-1:0] good;
  logic           bad;

  function automatic logic [COORD_W:0] absd(input logic [COORD_W-1:0] a, input logic [COORD_W-1:0] b);
    return (a > b) ? {1'b0, a - b} : {1'b0, b - a};
  endfunction

  wire [COORD_W+2:0] l1d = (COORD_W+3)'(absd(cmp_cnn.x0, cmp_ext.x0)) + (COORD_W+3)'(absd(cmp_cnn.y0, cmp_ext.y0))
                          + (COORD_W+3)'(absd(cmp_cnn.x1, cmp_ext.x1)) + (COORD_W+3)'(absd(cmp_cnn.y1, cmp_ext.y1));
  wire pair_bad = l1d > (COORD_W+3)'(diff_thr);
  wire [EWW-1:0] ew_cfg_c = (ew_cfg == '0) ? EWW'(1) : (ew_cfg > EWW'(EWM)) ? EWW'(EWM) : ew_cfg;

  wire [EWW-1:0] cnt_nxt = (is_iframe ? '0 : cnt) + 1'b1;
  assign ew        = adaptive ? ew_a : ew_cfg_c;
  assign is_iframe = force_i || (cnt == '0);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ew_a <= EWW'(1); cnt <= '0; good <= '0; bad <= 1'b0;
      ew_up <= 1'b0; ew_down <= 1'b0;
    end else begin
      ew_up <= 1'b0; ew_down <= 1'b0;
      if (!adaptive) ew_a <= ew_cfg_c;
      if (init) begin
        cnt <= '0; good <= '0; bad <= 1'b0;
      end else begin
        if (frame_adv) cnt <= (cnt_nxt >= ew) ? '0 : cnt_nxt;
        if (adaptive && cmp_valid) begin
          if (!cmp_last) begin
            bad <= bad | pair_bad;
          end else begin
            bad <= 1'b0;
            if (bad | pair_bad) begin
              good <= '0;
              if (ew_a > EWW'(1)) begin ew_a <= ew_a - 1'b1; ew_down <= 1'b1; end
            end else if (good + 1'b1 >= ($bits(good))'(GOOD_RUN)) begin
              good <= '0;
              if (ew_a < EWW'(EWM)) begin ew_a <= ew_a + 1'b1; ew_up <= 1'b1; end
            end else begin
              good <= good + 1'b1;
            end
          end
        end
      end
    end
  end
endmodule
