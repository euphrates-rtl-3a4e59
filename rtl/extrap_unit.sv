// extrap_unit: motion extrapolation of one ROI (the datapath core of the
// motion controller).
//
// Given the ROI of the previous frame, R_{F-1}, the unit splits it into four
// sub-ROIs (quadrants at the ROI's midpoints), walks every macroblock the ROI
// touches in raster order, reading one motion vector and confidence per cycle
// from the motion-vector buffer, and broadcasts each to the four SIMD lanes
// (extrap_simd), one lane per sub-ROI.  When the walk ends the lanes produce
// each sub-ROI's filtered motion MV_F (Eq. 1-3).  Each sub-ROI is moved by
// MV_F rounded to whole pixels and the result is the smallest box enclosing the
// moved sub-ROIs, clipped to the frame.  The unit remembers MV_F of every
// sub-ROI of every ROI slot, which is MV_{F-1} for the next frame.
//
// Direction: a stored motion vector <u,v> says the block came from <x+u,y+v>
// in the previous frame, so the content moved by <-u,-v>; the unit therefore
// moves the sub-ROIs by -MV_F.  (The paper writes R_F = R_{F-1} + MV_F; with
// its own MV definition that sign only holds for vectors taken in the other
// direction, so the definition of the MV was followed.)
//
// Interface: `start` with `roi_idx` and `roi_in`; `done` pulses with
// `roi_out`.  `clear_hist` zeroes all MV_{F-1}.  Read port to mv_buffer with a
// one-cycle latency.
// Timing: (#macroblocks touched) + 102 cycles for the default parameters, so a
// 100x50-pixel ROI (at most 8x5 macroblocks) takes at most 142 cycles and a
// full-frame ROI 8262 cycles; ten ROIs per frame at 60 FPS need at most
// 83 K of the 1.67 M cycles a 100 MHz clock gives per frame.
//
// From the paper: sub-ROIs, per-sub-ROI Eq. 1-3, the minimal bounding box,
// the 4-wide SIMD datapath.  Own choices: four quadrant sub-ROIs (one per
// lane), raster walk, rounding of MV_F to whole pixels, clipping to the frame.
module extrap_unit
  import euph_pkg::*;
#(
  parameter int unsigned L       = MB_L,
  parameter int unsigned COLS    = MB_COLS,
  parameter int unsigned FW      = FRAME_W,
  parameter int unsigned FH      = FRAME_H,
  parameter int unsigned N_ROIS  = MAX_ROIS,
  parameter int unsigned BYTES   = MV_BYTES,
  localparam int unsigned IW     = $clog2(N_ROIS),
  localparam int unsigned BAW    = $clog2(BYTES)
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic           clear_hist,
  input  logic           start,
  input  logic [IW-1:0]  roi_idx,
  input  roi_t           roi_in,
  input  logic [7:0]     conf_thr,
  output logic           busy,
  output logic           done,
  output roi_t           roi_out,
  output logic [LANES-1:0] lanes_ok,
  output logic [LANES-1:0] lanes_hi,
  // motion-vector buffer read port
  output logic           rd_en,
  output logic [BAW-1:0] rd_mb,
  input  mv_t            rd_mv,
  input  logic [7:0]     rd_conf
);
  localparam int unsigned LS = $clog2(L);
  localparam int unsigned SW = COORD_W + 2;   // signed coordinate width

  typedef enum logic [2:0] {U_IDLE, U_WALK, U_DRAIN, U_FIN, U_MOVE} ustate_t;
  ustate_t state;

  roi_t                roi;
  logic [IW-1:0]       idx;
  roi_t                sub   [LANES];
  logic [COORD_W-1:0]  cx, cy, cx0, cx1, cy1;
  logic                v1;
  logic [COORD_W-1:0]  px1, py1;

  mvf_t hist [N_ROIS][LANES];
  mvf_t prev [LANES];
  mvf_t mvf  [LANES];
  logic ok   [LANES];
  logic hi   [LANES];
  logic simd_busy, simd_done, simd_finish, simd_clear;

  // sub-ROIs: quadrants split at the midpoints
  logic [COORD_W-1:0] xm, ym;
  always_comb begin
    xm = COORD_W'(({1'b0, roi.x0} + {1'b0, roi.x1}) >> 1);
    ym = COORD_W'(({1'b0, roi.y0} + {1'b0, roi.y1}) >> 1);
    sub[0] = '{x0: roi.x0, y0: roi.y0, x1: xm,     y1: ym};
    sub[1] = '{x0: xm,     y0: roi.y0, x1: roi.x1, y1: ym};
    sub[2] = '{x0: roi.x0, y0: ym,     x1: xm,     y1: roi.y1};
    sub[3] = '{x0: xm,     y0: ym,     x1: roi.x1, y1: roi.y1};
    for (int l = 0; l < LANES; l++) prev[l] = hist[idx][l];
  end

  extrap_simd #(.N_LANES(LANES), .L(L)) u_simd (
    .clk, .rst_n, .clear(simd_clear), .sub,
    .acc_en(v1), .mb_px(px1), .mb_py(py1), .mv(rd_mv), .conf(rd_conf),
    .finish(simd_finish), .conf_thr, .prev,
    .busy(simd_busy), .done(simd_done), .mvf, .lane_ok(ok), .lane_hi(hi)
  );

  wire roi_empty = (roi_in.x1 <= roi_in.x0) || (roi_in.y1 <= roi_in.y0);
  wire row_end   = (cx == cx1);
  wire walk_end  = row_end && (cy == cy1);

  assign rd_en = (state == U_WALK);
  assign rd_mb = BAW'(cy * COORD_W'(COLS) + cx);
  assign simd_clear  = start && !busy;
  assign simd_finish = (state == U_DRAIN);

  // moved sub-ROIs and their bounding box
  roi_t box;
  always_comb begin
    logic signed [SW-1:0] du, dv, nx0, ny0, nx1, ny1;
    logic signed [SW-1:0] bx0, by0, bx1, by1;
    logic any;
    bx0 = SW'(FW); by0 = SW'(FH); bx1 = '0; by1 = '0; any = 1'b0;
    for (int l = 0; l < LANES; l++) begin
      du  = (SW'(mvf[l].u) + SW'(1 << (MV_FRAC-1))) >>> MV_FRAC;
      dv  = (SW'(mvf[l].v) + SW'(1 << (MV_FRAC-1))) >>> MV_FRAC;
      nx0 = SW'(sub[l].x0) - du;  nx1 = SW'(sub[l].x1) - du;
      ny0 = SW'(sub[l].y0) - dv;  ny1 = SW'(sub[l].y1) - dv;
      if (ok[l]) begin
        any = 1'b1;
        if (nx0 < bx0) bx0 = nx0;
        if (ny0 < by0) by0 = ny0;
        if (nx1 > bx1) bx1 = nx1;
        if (ny1 > by1) by1 = ny1;
      end
    end
    if (bx0 < 0) bx0 = '0;
    if (by0 < 0) by0 = '0;
    if (bx1 > SW'(FW)) bx1 = SW'(FW);
    if (by1 > SW'(FH)) by1 = SW'(FH);
    if (bx1 < bx0) bx1 = bx0;
    if (by1 < by0) by1 = by0;
    if (any) box = '{x0: COORD_W'(bx0), y0: COORD_W'(by0), x1: COORD_W'(bx1), y1: COORD_W'(by1)};
    else     box = roi;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= U_IDLE; roi <= '0; idx <= '0;
      cx <= '0; cy <= '0; cx0 <= '0; cx1 <= '0; cy1 <= '0;
      v1 <= 1'b0; px1 <= '0; py1 <= '0;
      done <= 1'b0; roi_out <= '0; lanes_ok <= '0; lanes_hi <= '0;
      for (int r = 0; r < N_ROIS; r++) for (int l = 0; l < LANES; l++) hist[r][l] <= '0;
    end else begin
      done <= 1'b0;
      v1   <= (state == U_WALK);
      px1  <= cx << LS;
      py1  <= cy << LS;
      if (clear_hist)
        for (int r = 0; r < N_ROIS; r++) for (int l = 0; l < LANES; l++) hist[r][l] <= '0;
      unique case (state)
        U_IDLE: if (start) begin
          roi   <= roi_in;
          idx   <= roi_idx;
          cx    <= roi_in.x0 >> LS;
          cx0   <= roi_in.x0 >> LS;
          cy    <= roi_in.y0 >> LS;
          cx1   <= (roi_in.x1 - 1'b1) >> LS;
          cy1   <= (roi_in.y1 - 1'b1) >> LS;
          state <= roi_empty ? U_DRAIN : U_WALK;
        end
        U_WALK: begin
          if (walk_end)      state <= U_DRAIN;
          else if (row_end) begin cx <= cx0; cy <= cy + 1'b1; end
          else               cx <= cx + 1'b1;
        end
        U_DRAIN: state <= U_FIN;          // last macroblock accumulates here
        U_FIN:   if (simd_done) state <= U_MOVE;
        U_MOVE: begin
          state   <= U_IDLE;
          done    <= 1'b1;
          roi_out <= box;
          for (int l = 0; l < LANES; l++) begin
            hist[idx][l] <= mvf[l];
            lanes_ok[l]  <= ok[l];
            lanes_hi[l]  <= hi[l];
          end
        end
        default: state <= U_IDLE;
      endcase
    end
  end

  assign busy = (state != U_IDLE);
endmodule
